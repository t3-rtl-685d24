// mem_ctrl: memory controller with T3's MCA arbitration and Tracker.
//
// Two streams reach the controller. The compute stream holds the GPU's own reads and
// writes (the producer GEMM). The communication stream holds writes arriving from
// other GPUs (remote_update and dma_update) and the DMA engine's reads of data to send;
// those two sources share the stream round-robin. Each stream has its own input
// queue; the MCA picks, each cycle, which queue head enters the DRAM command queue
// (MCQ). When a tracked write enters the MCQ its {wg_id, wf_id, address, threshold}
// also goes to the Tracker (through a small queue, so the Tracker is off the critical
// path, as in the paper); the Tracker's trigger is an output, to the DMA request
// table. The MCQ issues in order to the NMC DRAM; writes with the kernel's "update"
// flag, and dma_updates, become op-and-store commands. Read data returns to the
// compute units or to the DMA engine according to the request's source.
// Because the MCQ and the DRAM are in order, a DMA read that a trigger causes always
// sees every update that was queued before it.
//
// Own choices: queue depths (compute and communication queues 16, MCQ 64, tracker
// queue 16), round-robin merge of the two communication sources, identity mapping
// of virtual address bits [GRAN_SH +: AW] to DRAM words (no translation modelled).
// Timing: a request spends at least two cycles from input to DRAM command; reads
// return after the DRAM read latency. One request enters the MCQ per cycle.
module mem_ctrl
  import t3_pkg::*;
#(
  parameter int unsigned WORDS      = 8192,
  parameter int unsigned CQ_DEPTH   = 16,
  parameter int unsigned MQ_DEPTH   = 16,
  parameter int unsigned MCQ_DEPTH  = 64,
  parameter int unsigned TQ_DEPTH   = 16,
  parameter int unsigned TRK_SETS   = 256,
  parameter int unsigned TRK_WAYS   = 8,
  localparam int unsigned AW        = $clog2(WORDS),
  localparam int unsigned OW        = $clog2(MCQ_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // compute stream
  input  logic               cmp_valid,
  output logic               cmp_ready,
  input  mem_req_t           cmp_req,
  // communication stream: writes from other GPUs
  input  logic               net_valid,
  output logic               net_ready,
  input  mem_req_t           net_req,
  // communication stream: DMA engine reads
  input  logic               dmar_valid,
  output logic               dmar_ready,
  input  logic [VA_W-1:0]    dmar_va,
  // read returns
  output logic               cu_rsp_valid,
  output logic [DATA_W-1:0]  cu_rsp_data,
  output logic [3:0]         cu_rsp_tag,
  output logic               dma_rsp_valid,
  output logic [DATA_W-1:0]  dma_rsp_data,
  // DRAM command port
  output logic               dram_valid,
  input  logic               dram_ready,
  output mem_op_e            dram_op,
  output logic [AW-1:0]      dram_addr,
  output logic [DATA_W-1:0]  dram_data,
  output logic [5:0]         dram_tag,
  input  logic               dram_rsp_valid,
  input  logic [DATA_W-1:0]  dram_rsp_data,
  input  logic [5:0]         dram_rsp_tag,
  // Tracker trigger
  output logic               trig_valid,
  input  logic               trig_ready,
  output logic [WG_W-1:0]    trig_wg_id,
  output logic [WF_W-1:0]    trig_wf_id,
  output logic [VA_W-1:0]    trig_va,
  // MCA control
  input  logic               calib,
  input  logic               drain,
  input  logic               cfg_auto,
  input  logic [OW-1:0]      cfg_thr,
  input  logic               cfg_nolimit,
  input  logic [15:0]        cfg_starve,
  // status
  output logic [OW-1:0]      mcq_occ,
  output logic [OW-1:0]      mca_thr,
  output logic               mca_nolimit,
  output logic [31:0]        n_blocked,
  output logic [31:0]        n_starve,
  output logic [31:0]        n_drain,
  output logic [31:0]        n_triggers,
  output logic [31:0]        n_trk_stalls,
  output logic               idle
);
  typedef struct packed {
    logic [WG_W-1:0]  wg_id;
    logic [WF_W-1:0]  wf_id;
    logic [VA_W-1:0]  va;
    logic [CNT_W-1:0] thresh;
  } trk_req_t;

  // ---------------- input queues
  mem_req_t cq_head, mq_head, mq_din, mcq_head, mcq_din;
  logic     cq_empty, cq_full, mq_empty, mq_full, mcq_empty, mcq_full;
  logic     cq_pop, mq_push, mq_pop, mcq_push, mcq_pop;
  logic [$clog2(CQ_DEPTH):0] cq_cnt;
  logic [$clog2(MQ_DEPTH):0] mq_cnt;
  logic     rr_dma;            // round-robin pointer between net writes and DMA reads
  logic     sel_dma;
  mem_req_t dmar_req;

  assign cmp_ready = !cq_full;

  sync_fifo #(.T(mem_req_t), .DEPTH(CQ_DEPTH)) u_cq (
    .clk, .rst_n, .push(cmp_valid && !cq_full), .din(cmp_req), .pop(cq_pop),
    .head(cq_head), .empty(cq_empty), .full(cq_full), .count(cq_cnt));

  always_comb begin
    dmar_req       = '0;
    dmar_req.op    = OP_READ;
    dmar_req.va    = dmar_va;
    dmar_req.src   = SRC_DMA;
    sel_dma        = dmar_valid && (!net_valid || rr_dma);
    mq_din         = sel_dma ? dmar_req : net_req;
    mq_push        = (net_valid || dmar_valid) && !mq_full;
    net_ready      = !mq_full && !sel_dma;
    dmar_ready     = !mq_full && sel_dma;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_dma <= 1'b0;
    else if (mq_push && net_valid && dmar_valid) rr_dma <= !sel_dma;
  end

  sync_fifo #(.T(mem_req_t), .DEPTH(MQ_DEPTH)) u_mq (
    .clk, .rst_n, .push(mq_push), .din(mq_din), .pop(mq_pop),
    .head(mq_head), .empty(mq_empty), .full(mq_full), .count(mq_cnt));

  // ---------------- MCA
  logic grant_cmp, grant_com;
  logic tq_full, tq_empty, tq_pop;
  logic [$clog2(TQ_DEPTH):0] tq_cnt;
  trk_req_t tq_din, tq_head;
  logic trk_ready;

  mca_arbiter #(.QDEPTH(MCQ_DEPTH)) u_mca (
    .clk, .rst_n,
    .cmp_valid (!cq_empty),
    .com_valid (!mq_empty),
    .mcq_occ   (mcq_occ),
    .mcq_full  (mcq_full || tq_full),
    .grant_cmp, .grant_com,
    .calib, .drain, .cfg_auto, .cfg_thr, .cfg_nolimit, .cfg_starve,
    .thr (mca_thr), .thr_nolimit (mca_nolimit),
    .n_blocked, .n_starve, .n_drain);

  assign cq_pop   = grant_cmp;
  assign mq_pop   = grant_com;
  assign mcq_push = grant_cmp || grant_com;
  assign mcq_din  = grant_cmp ? cq_head : mq_head;

  // ---------------- MCQ and Tracker queue
  logic [$clog2(MCQ_DEPTH):0] mcq_cnt;
  sync_fifo #(.T(mem_req_t), .DEPTH(MCQ_DEPTH)) u_mcq (
    .clk, .rst_n, .push(mcq_push), .din(mcq_din), .pop(mcq_pop),
    .head(mcq_head), .empty(mcq_empty), .full(mcq_full), .count(mcq_cnt));
  assign mcq_occ = OW'(mcq_cnt);

  assign tq_din = '{wg_id: mcq_din.wg_id, wf_id: mcq_din.wf_id, va: mcq_din.va,
                    thresh: mcq_din.thresh};
  sync_fifo #(.T(trk_req_t), .DEPTH(TQ_DEPTH)) u_tq (
    .clk, .rst_n, .push(mcq_push && mcq_din.track && mcq_din.op != OP_READ), .din(tq_din),
    .pop(tq_pop), .head(tq_head), .empty(tq_empty), .full(tq_full), .count(tq_cnt));

  t3_tracker #(.SETS(TRK_SETS), .WAYS(TRK_WAYS)) u_trk (
    .clk, .rst_n,
    .upd_valid  (!tq_empty),
    .upd_ready  (trk_ready),
    .upd_wg_id  (tq_head.wg_id),
    .upd_wf_id  (tq_head.wf_id),
    .upd_va     (tq_head.va),
    .upd_thresh (tq_head.thresh),
    .trig_valid, .trig_ready, .trig_wg_id, .trig_wf_id, .trig_va,
    .n_triggers, .n_full_stalls (n_trk_stalls), .live_entries ());
  assign tq_pop = !tq_empty && trk_ready;

  // ---------------- DRAM issue and read return
  assign dram_valid = !mcq_empty;
  assign dram_op    = mcq_head.op;
  assign dram_addr  = mcq_head.va[GRAN_SH +: AW];
  assign dram_data  = mcq_head.data;
  assign dram_tag   = {1'b0, mcq_head.src, mcq_head.tag};
  assign mcq_pop    = dram_valid && dram_ready;

  assign cu_rsp_valid  = dram_rsp_valid && (dram_rsp_tag[4] == SRC_CU);
  assign cu_rsp_data   = dram_rsp_data;
  assign cu_rsp_tag    = dram_rsp_tag[3:0];
  assign dma_rsp_valid = dram_rsp_valid && (dram_rsp_tag[4] == SRC_DMA);
  assign dma_rsp_data  = dram_rsp_data;

  assign idle = cq_empty && mq_empty && mcq_empty && tq_empty;
endmodule
