// t3_node: the memory side of one GPU with T3 (top level).
//
// T3 overlaps a GEMM with the reduce-scatter of its output. Instead of the GEMM
// finishing and a collective kernel then reading, sending and reducing the output,
// the GEMM's own stores start the communication:
//   * stores to a remote_mapped chunk leave the GPU at once as remote_update packets;
//   * stores to a dma_mapped chunk are near-memory updates of local DRAM; the
//     Tracker counts them, together with the updates that arrive from the neighbour
//     GPU, per wavefront tile, and when a tile has all its updates it triggers a
//     pre-programmed DMA that reads the reduced tile and sends it, as a dma_update,
//     to the next GPU of the ring;
//   * the memory controller's MCA arbitration keeps the bursty communication traffic
//     from filling the DRAM queue ahead of the GEMM's reads.
// The node contains the address map (t3_addr_map), the memory controller (mem_ctrl:
// input queues, MCA, DRAM queue, Tracker), the NMC DRAM (nmc_dram), the DMA request
// table (dma_req_table) and the DMA engine (dma_engine). The compute units, caches and
// the inter-GPU links are outside: the CU port takes the requests that reach memory
// (uncached output stores carry the kernel's "update" flag as OP_UPDATE), and the
// tx/rx ports carry packets to and from the ring neighbours.
//
// Interfaces: every stream is valid/ready; cu_rsp_* returns read data and cannot be
// stalled. Configuration ports are written by the driver before the kernel runs:
// address-map regions, wf_tile_size/32, DMA commands and the DMA block geometry.
// calib is raised while the first GEMM stage runs alone (MCA calibration) and drain
// at the producer kernel boundary. Remote stores and DMA packets share tx
// round-robin (this design's choice).
module t3_node
  import t3_pkg::*;
#(
  parameter int unsigned WORDS       = 8192,
  parameter int unsigned TRK_SETS    = 256,
  parameter int unsigned TRK_WAYS    = 8,
  parameter int unsigned DMA_ENTRIES = 64,
  parameter int unsigned REGIONS     = 8,
  parameter int unsigned MCQ_DEPTH   = 64,
  localparam int unsigned AW         = $clog2(WORDS),
  localparam int unsigned OW         = $clog2(MCQ_DEPTH + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // driver configuration
  input  logic                        map_we,
  input  logic [$clog2(REGIONS)-1:0]  map_idx,
  input  region_t                     map_region,
  input  logic [CNT_W-1:0]            wf_tile_gran,
  input  logic                        dma_prog_valid,
  input  logic [$clog2(DMA_ENTRIES)-1:0] dma_prog_idx,
  input  dma_cmd_t                    dma_prog_cmd,
  input  dma_geom_t                   dma_geom,
  input  logic                        calib,
  input  logic                        drain,
  input  logic                        mca_auto,
  input  logic [OW-1:0]               mca_thr_cfg,
  input  logic                        mca_nolimit_cfg,
  input  logic [15:0]                 mca_starve,
  // compute units
  input  logic                        cu_valid,
  output logic                        cu_ready,
  input  cu_req_t                     cu_req,
  output logic                        cu_rsp_valid,
  output logic [DATA_W-1:0]           cu_rsp_data,
  output logic [3:0]                  cu_rsp_tag,
  // ring network
  output logic                        tx_valid,
  input  logic                        tx_ready,
  output net_pkt_t                    tx_pkt,
  input  logic                        rx_valid,
  output logic                        rx_ready,
  input  net_pkt_t                    rx_pkt,
  // status
  output node_stats_t                 stats
);
  // ---------------- address map
  region_kind_e     a_kind, b_kind;
  logic [VA_W-1:0]  a_remote_va;
  logic [GPU_W-1:0] a_remote_gpu;
  logic [CNT_W-1:0] a_thresh, b_thresh;

  t3_addr_map #(.REGIONS(REGIONS)) u_map (
    .clk, .rst_n,
    .cfg_we (map_we), .cfg_idx (map_idx), .cfg_region (map_region), .wf_tile_gran,
    .a_va (cu_req.va), .a_kind, .a_remote_va, .a_remote_gpu, .a_thresh,
    .b_va (rx_pkt.va), .b_kind, .b_thresh);

  // ---------------- CU requests: remote stores to the network, the rest to memory
  logic     cu_remote;
  logic     rs_valid, rs_ready;      // remote store towards tx
  net_pkt_t rs_pkt;
  logic     cmp_valid, cmp_ready;
  mem_req_t cmp_req;

  assign cu_remote = (a_kind == REG_REMOTE) && (cu_req.op != OP_READ);
  assign rs_valid  = cu_valid && cu_remote;
  assign rs_pkt    = '{dst_gpu: a_remote_gpu, op: cu_req.op, va: a_remote_va, data: cu_req.data,
                       wg_id: cu_req.wg_id, wf_id: cu_req.wf_id};
  assign cmp_valid = cu_valid && !cu_remote;
  assign cmp_req   = '{op: cu_req.op, va: cu_req.va, data: cu_req.data, wg_id: cu_req.wg_id,
                       wf_id: cu_req.wf_id,
                       track: (a_kind == REG_DMA) && (cu_req.op != OP_READ),
                       thresh: a_thresh, src: SRC_CU, tag: cu_req.tag};
  assign cu_ready  = cu_remote ? rs_ready : cmp_ready;

  // ---------------- packets from the ring
  logic     net_valid, net_ready;
  mem_req_t net_req;
  assign net_valid = rx_valid;
  assign rx_ready  = net_ready;
  assign net_req   = '{op: rx_pkt.op, va: rx_pkt.va, data: rx_pkt.data, wg_id: rx_pkt.wg_id,
                       wf_id: rx_pkt.wf_id, track: (b_kind == REG_DMA), thresh: b_thresh,
                       src: SRC_CU, tag: 4'd0};

  // ---------------- memory controller + DRAM
  logic              dmar_valid, dmar_ready, dma_rsp_valid;
  logic [VA_W-1:0]   dmar_va;
  logic [DATA_W-1:0] dma_rsp_data;
  logic              dram_valid, dram_ready, dram_rsp_valid;
  mem_op_e           dram_op;
  logic [AW-1:0]     dram_addr;
  logic [DATA_W-1:0] dram_data, dram_rsp_data;
  logic [5:0]        dram_tag, dram_rsp_tag;
  logic              trig_valid, trig_ready;
  logic [WG_W-1:0]   trig_wg_id;
  logic [WF_W-1:0]   trig_wf_id;
  logic [VA_W-1:0]   trig_va;
  logic [OW-1:0]     mcq_occ, mca_thr;
  logic              mca_nolimit, mc_idle;
  logic [31:0]       n_blocked, n_starve, n_drain, n_triggers, n_trk_stalls;
  logic [31:0]       n_reads, n_writes, n_updates;

  mem_ctrl #(.WORDS(WORDS), .MCQ_DEPTH(MCQ_DEPTH), .TRK_SETS(TRK_SETS), .TRK_WAYS(TRK_WAYS)) u_mc (
    .clk, .rst_n,
    .cmp_valid, .cmp_ready, .cmp_req,
    .net_valid, .net_ready, .net_req,
    .dmar_valid, .dmar_ready, .dmar_va,
    .cu_rsp_valid, .cu_rsp_data, .cu_rsp_tag,
    .dma_rsp_valid, .dma_rsp_data,
    .dram_valid, .dram_ready, .dram_op, .dram_addr, .dram_data, .dram_tag,
    .dram_rsp_valid, .dram_rsp_data, .dram_rsp_tag,
    .trig_valid, .trig_ready, .trig_wg_id, .trig_wf_id, .trig_va,
    .calib, .drain, .cfg_auto (mca_auto), .cfg_thr (mca_thr_cfg), .cfg_nolimit (mca_nolimit_cfg),
    .cfg_starve (mca_starve),
    .mcq_occ, .mca_thr, .mca_nolimit, .n_blocked, .n_starve, .n_drain, .n_triggers,
    .n_trk_stalls, .idle (mc_idle));

  nmc_dram #(.WORDS(WORDS)) u_dram (
    .clk, .rst_n,
    .cmd_valid (dram_valid), .cmd_ready (dram_ready), .cmd_op (dram_op), .cmd_addr (dram_addr),
    .cmd_data (dram_data), .cmd_tag (dram_tag),
    .rsp_valid (dram_rsp_valid), .rsp_data (dram_rsp_data), .rsp_tag (dram_rsp_tag),
    .n_reads, .n_writes, .n_updates);

  // ---------------- DMA request table and engine
  logic                           blk_valid, blk_ready;
  logic [$clog2(DMA_ENTRIES)-1:0] blk_idx;
  dma_cmd_t                       blk_cmd;
  logic [WG_W-1:0]                blk_wg_id;
  logic [WF_W-1:0]                blk_wf_id;
  logic [31:0]                    n_ready, n_unmatched, n_blocks, n_pkts;
  logic [DMA_ENTRIES-1:0]         dma_pending;
  logic                           dma_busy;
  logic                           dp_valid, dp_ready;
  net_pkt_t                       dp_pkt;

  dma_req_table #(.ENTRIES(DMA_ENTRIES)) u_tbl (
    .clk, .rst_n,
    .prog_valid (dma_prog_valid), .prog_idx (dma_prog_idx), .prog_cmd (dma_prog_cmd),
    .trig_valid, .trig_ready, .trig_va, .trig_wg_id, .trig_wf_id,
    .rdy_valid (blk_valid), .rdy_ready (blk_ready), .rdy_idx (blk_idx), .rdy_cmd (blk_cmd),
    .rdy_wg_id (blk_wg_id), .rdy_wf_id (blk_wf_id),
    .n_ready, .n_unmatched, .pending (dma_pending));

  dma_engine u_dma (
    .clk, .rst_n, .geom (dma_geom),
    .blk_valid, .blk_ready, .blk_cmd, .blk_wg_id, .blk_wf_id,
    .rd_req_valid (dmar_valid), .rd_req_ready (dmar_ready), .rd_req_va (dmar_va),
    .rd_rsp_valid (dma_rsp_valid), .rd_rsp_data (dma_rsp_data),
    .pkt_valid (dp_valid), .pkt_ready (dp_ready), .pkt (dp_pkt),
    .busy (dma_busy), .n_blocks, .n_pkts);

  // ---------------- tx: round-robin between remote stores and DMA packets
  logic rr_dma, sel_dp;
  assign sel_dp   = dp_valid && (!rs_valid || rr_dma);
  assign tx_valid = rs_valid || dp_valid;
  assign tx_pkt   = sel_dp ? dp_pkt : rs_pkt;
  assign dp_ready = tx_ready && sel_dp;
  assign rs_ready = tx_ready && !sel_dp;

  logic [31:0] n_remote_tx, n_rx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_dma      <= 1'b0;
      n_remote_tx <= '0;
      n_rx        <= '0;
    end else begin
      if (tx_valid && tx_ready && rs_valid && dp_valid) rr_dma <= !sel_dp;
      if (rs_valid && rs_ready) n_remote_tx <= n_remote_tx + 32'd1;
      if (rx_valid && rx_ready) n_rx <= n_rx + 32'd1;
    end
  end

  always_comb begin
    stats.remote_tx     = n_remote_tx;
    stats.dma_tx        = n_pkts;
    stats.rx            = n_rx;
    stats.triggers      = n_triggers;
    stats.trk_stalls    = n_trk_stalls;
    stats.dma_blocks    = n_blocks;
    stats.dma_unmatched = n_unmatched;
    stats.mca_blocked   = n_blocked;
    stats.mca_starve    = n_starve;
    stats.mca_drain     = n_drain;
    stats.dram_reads    = n_reads;
    stats.dram_writes   = n_writes;
    stats.dram_updates  = n_updates;
    stats.mca_thr       = 7'(mca_thr);
    stats.mca_nolimit   = mca_nolimit;
    stats.idle          = mc_idle && !dma_busy && !blk_valid && !trig_valid;
  end
endmodule
