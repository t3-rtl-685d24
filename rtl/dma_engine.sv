// dma_engine: turns a ready DMA block into local reads and dma_update packets.
//
// The table holds only start addresses; the engine generates the rest from the
// block geometry, as the paper describes (start VAs, wf_tile_size and the output
// dimension M). The GEMM output is column major, so one wf_tile is `cols` column
// segments of `col_bytes` bytes each, successive columns col_stride = M * 2 bytes
// apart. A block of several tiles is taken to stack them down the column (col_bytes
// * tiles per column); this is this design's reading of "DMA block is a multiple of
// wf_tile". For every 32-byte word the engine issues a read of the local copy into the
// memory controller's communication stream, and when the data returns it sends one
// packet to the destination GPU at the same offset from the destination start, with
// the block's operation (store or update) and the {wg_id, wf_id} that the peer's
// Tracker counts. The table gives the ids of the block's first tile; tile i further
// down the column is sent as wf_id + i (own assumption: the wavefronts of a workgroup
// are stacked down the column, as in the paper's Fig. 9 where wf 0 and wf 1 of wg 2
// start 0x40 apart).
//
// Interface: blk_* valid/ready from the DMA request table; rd_req_* valid/ready to the
// memory controller; rd_rsp_valid/rd_rsp_data return in request order and cannot be
// stalled, so the engine never has more than DEPTH reads without a free buffer slot;
// pkt_* valid/ready to the network. Timing: one read issued and one packet sent per
// cycle at best; a new block is accepted once the previous one has issued its reads.
module dma_engine
  import t3_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned PW = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  dma_geom_t          geom,
  // ready block from the DMA request table
  input  logic               blk_valid,
  output logic               blk_ready,
  input  dma_cmd_t           blk_cmd,
  input  logic [WG_W-1:0]    blk_wg_id,
  input  logic [WF_W-1:0]    blk_wf_id,
  // reads of the local copy
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic [VA_W-1:0]    rd_req_va,
  input  logic               rd_rsp_valid,
  input  logic [DATA_W-1:0]  rd_rsp_data,
  // packets to the remote GPU
  output logic               pkt_valid,
  input  logic               pkt_ready,
  output net_pkt_t           pkt,
  // status
  output logic               busy,
  output logic [31:0]        n_blocks,
  output logic [31:0]        n_pkts
);
  typedef struct packed {
    logic [GPU_W-1:0]  dst_gpu;
    mem_op_e           op;
    logic [VA_W-1:0]   va;
    logic [WG_W-1:0]   wg_id;
    logic [WF_W-1:0]   wf_id;
  } slot_hdr_t;

  // current block
  logic              run;
  dma_cmd_t          cur;
  logic [WG_W-1:0]   cur_wg;
  logic [WF_W-1:0]   cur_wf;
  logic [VA_W-1:0]   col_base;    // offset of the current column
  logic [31:0]       row_off;     // byte offset inside the column segment
  logic [31:0]       tile_off;    // byte offset inside the current tile's column part
  logic [WF_W-1:0]   tile_i;      // tile of the block the current word belongs to
  logic [15:0]       col;
  logic [31:0]       seg_bytes;

  // reorder-free buffer: slots allocated at issue, filled in order, sent in order
  slot_hdr_t         hdr  [DEPTH];
  logic [DATA_W-1:0] dat  [DEPTH];
  logic              full [DEPTH];
  logic [PW-1:0]     wr_ptr, ret_ptr, rd_ptr;
  logic [PW:0]       used;
  logic              issue, send, last_word;

  assign seg_bytes    = 32'(geom.col_bytes) * 32'(cur.tiles);
  assign blk_ready    = !run;
  assign rd_req_valid = run && (used < (PW+1)'(DEPTH));
  assign rd_req_va    = cur.src_va + col_base + VA_W'(row_off);
  assign issue        = rd_req_valid && rd_req_ready;
  assign last_word    = (row_off + GRAN_B >= seg_bytes) && (col + 16'd1 >= geom.cols);
  assign pkt_valid    = full[rd_ptr];
  assign send         = pkt_valid && pkt_ready;
  assign busy         = run || (used != '0);

  always_comb begin
    pkt.dst_gpu = hdr[rd_ptr].dst_gpu;
    pkt.op      = hdr[rd_ptr].op;
    pkt.va      = hdr[rd_ptr].va;
    pkt.data    = dat[rd_ptr];
    pkt.wg_id   = hdr[rd_ptr].wg_id;
    pkt.wf_id   = hdr[rd_ptr].wf_id;
  end

  always_ff @(posedge clk) begin
    if (issue) begin
      hdr[wr_ptr] <= '{dst_gpu: cur.dst_gpu, op: cur.op, va: cur.dst_va + col_base + VA_W'(row_off),
                       wg_id: cur_wg, wf_id: cur_wf + tile_i};
    end
    if (rd_rsp_valid) dat[ret_ptr] <= rd_rsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      cur      <= '0;
      cur_wg   <= '0;
      cur_wf   <= '0;
      col_base <= '0;
      row_off  <= '0;
      tile_off <= '0;
      tile_i   <= '0;
      col      <= '0;
      wr_ptr   <= '0;
      ret_ptr  <= '0;
      rd_ptr   <= '0;
      used     <= '0;
      n_blocks <= '0;
      n_pkts   <= '0;
      for (int i = 0; i < DEPTH; i++) full[i] <= 1'b0;
    end else begin
      if (blk_valid && blk_ready) begin
        run      <= 1'b1;
        cur      <= blk_cmd;
        cur_wg   <= blk_wg_id;
        cur_wf   <= blk_wf_id;
        col_base <= '0;
        row_off  <= '0;
        tile_off <= '0;
        tile_i   <= '0;
        col      <= '0;
        n_blocks <= n_blocks + 32'd1;
      end
      if (issue) begin
        wr_ptr <= wr_ptr + PW'(1);
        if (last_word) begin
          run <= 1'b0;
        end else if (row_off + GRAN_B >= seg_bytes) begin
          row_off  <= '0;
          tile_off <= '0;
          tile_i   <= '0;
          col      <= col + 16'd1;
          col_base <= col_base + geom.col_stride;
        end else begin
          row_off <= row_off + GRAN_B;
          if (tile_off + GRAN_B >= 32'(geom.col_bytes)) begin
            tile_off <= '0;
            tile_i   <= tile_i + WF_W'(1);
          end else begin
            tile_off <= tile_off + GRAN_B;
          end
        end
      end
      if (rd_rsp_valid) begin
        full[ret_ptr] <= 1'b1;
        ret_ptr       <= ret_ptr + PW'(1);
      end
      if (send) begin
        full[rd_ptr] <= 1'b0;
        rd_ptr       <= rd_ptr + PW'(1);
        n_pkts       <= n_pkts + 32'd1;
      end
      used <= used + (PW+1)'(issue) - (PW+1)'(send);
    end
  end

  a_pkt_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               pkt_valid && !pkt_ready |=> pkt_valid && $stable(pkt.va));
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 rd_rsp_valid |-> used != '0);
endmodule
