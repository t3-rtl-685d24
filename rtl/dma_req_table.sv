// dma_req_table: the DMA request table that the GPU driver fills ahead of time.
//
// Each entry is one DMA block: source start address, the span of source addresses
// that belong to it, destination GPU and start address, the operation to perform at
// the destination (store, or update with near-memory add) and how many wf_tiles make
// up the block. A Tracker trigger carries the finished tile's start address and its
// {wg_id, wf_id}; the entry whose source range holds that address counts the tile,
// records the ids (the destination GPU's Tracker needs them) and, once all of its
// tiles are done, becomes ready. For a block of several tiles the entry keeps the ids
// of its first tile, the one that starts at src_va; the DMA engine derives the others.
// The paper describes exactly this (address match, ids
// filled in on trigger, an extra per-entry counter when a block spans several tiles).
//
// Own choices: ENTRIES = 64 (the paper's figure numbers blocks up to 47); the match is
// a parallel range compare with the lowest index winning; a trigger matching no entry
// is dropped and counted; ready entries are handed to the DMA engine lowest index
// first, and an entry is freed when the engine takes it.
// Timing: programming and triggers take effect in one cycle; one trigger per cycle.
module dma_req_table
  import t3_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // driver programming port
  input  logic               prog_valid,
  input  logic [IW-1:0]      prog_idx,
  input  dma_cmd_t           prog_cmd,
  // trigger from the Tracker
  input  logic               trig_valid,
  output logic               trig_ready,
  input  logic [VA_W-1:0]    trig_va,
  input  logic [WG_W-1:0]    trig_wg_id,
  input  logic [WF_W-1:0]    trig_wf_id,
  // ready blocks to the DMA engine
  output logic               rdy_valid,
  input  logic               rdy_ready,
  output logic [IW-1:0]      rdy_idx,
  output dma_cmd_t           rdy_cmd,
  output logic [WG_W-1:0]    rdy_wg_id,
  output logic [WF_W-1:0]    rdy_wf_id,
  // status
  output logic [31:0]        n_ready,
  output logic [31:0]        n_unmatched,
  output logic [ENTRIES-1:0] pending
);
  dma_cmd_t         cmd     [ENTRIES];
  logic             ent_v   [ENTRIES];
  logic             ent_rdy [ENTRIES];
  logic [7:0]       ent_cnt [ENTRIES];
  logic [WG_W-1:0]  ent_wg  [ENTRIES];
  logic [WF_W-1:0]  ent_wf  [ENTRIES];

  logic             match;
  logic [IW-1:0]    match_idx;
  logic             take;

  always_comb begin
    match = 1'b0; match_idx = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (ent_v[e] && !ent_rdy[e] && trig_va >= cmd[e].src_va &&
          trig_va < cmd[e].src_va + cmd[e].span) begin
        match = 1'b1; match_idx = e[IW-1:0];
      end
    end
    rdy_valid = 1'b0; rdy_idx = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (ent_v[e] && ent_rdy[e]) begin
        rdy_valid = 1'b1; rdy_idx = e[IW-1:0];
      end
    end
    for (int e = 0; e < ENTRIES; e++) pending[e] = ent_v[e];
  end

  assign trig_ready = 1'b1;
  assign take       = rdy_valid && rdy_ready;
  assign rdy_cmd    = cmd[rdy_idx];
  assign rdy_wg_id  = ent_wg[rdy_idx];
  assign rdy_wf_id  = ent_wf[rdy_idx];

  always_ff @(posedge clk) begin
    if (prog_valid) cmd[prog_idx] <= prog_cmd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        ent_v[e]   <= 1'b0;
        ent_rdy[e] <= 1'b0;
        ent_cnt[e] <= '0;
        ent_wg[e]  <= '0;
        ent_wf[e]  <= '0;
      end
      n_ready     <= '0;
      n_unmatched <= '0;
    end else begin
      if (take) begin
        ent_v[rdy_idx]   <= 1'b0;
        ent_rdy[rdy_idx] <= 1'b0;
      end
      if (trig_valid) begin
        if (match) begin
          ent_cnt[match_idx] <= ent_cnt[match_idx] + 8'd1;
          // keep the ids of the block's first tile (the one starting at src_va)
          if (ent_cnt[match_idx] == '0 || trig_va == cmd[match_idx].src_va) begin
            ent_wg[match_idx] <= trig_wg_id;
            ent_wf[match_idx] <= trig_wf_id;
          end
          if (ent_cnt[match_idx] + 8'd1 >= cmd[match_idx].tiles) begin
            ent_rdy[match_idx] <= 1'b1;
            n_ready <= n_ready + 32'd1;
          end
        end else begin
          n_unmatched <= n_unmatched + 32'd1;
        end
      end
      if (prog_valid) begin
        ent_v[prog_idx]   <= 1'b1;
        ent_rdy[prog_idx] <= 1'b0;
        ent_cnt[prog_idx] <= '0;
      end
    end
  end
endmodule
