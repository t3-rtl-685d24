// t3_tracker: counts the updates that reach each wavefront's output tile and
// triggers the tile's DMA when all expected updates have arrived.
//
// Following the paper, tracking is per wavefront (WF), not per address: an entry is
// found by the producing workgroup and wavefront ids that every memory access carries.
// The table has SETS = 256 sets indexed by the low 8 bits of wg_id (wg_lsb); each set
// is associative, tagged with {wg_msb, wf_id}. An entry holds the tile's start virtual
// address (the smallest address seen for the WF) and an access counter. Each tracked
// access increments the counter (the ALU of the Tracker figure) and compares it with
// its threshold, (wf_tile_size/32) * total_updates (the CMP); when the threshold is
// reached the entry is released and a trigger {wg_id, wf_id, start VA} goes to the
// DMA request table. The memory controller feeds the Tracker as accesses enter its
// DRAM queue, so the Tracker is off the memory critical path.
//
// Own choices: WAYS = 8 ways per set (the paper's 19 KB total over 256 sets leaves
// ~76 bits per way for 8 ways, enough for a 4-bit tag, 48-bit VA and 16-bit counter);
// a miss allocates the lowest free way with count 1; a miss in a full set, or a
// trigger not yet taken, stalls the update (upd_ready low).
// Timing: one update per cycle; the trigger is registered (one cycle after the
// completing update) and held until trig_ready.
module t3_tracker
  import t3_pkg::*;
#(
  parameter int unsigned SETS = 256,
  parameter int unsigned WAYS = 8,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned TAG_W = WG_W - SET_W + WF_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // one tracked access
  input  logic               upd_valid,
  output logic               upd_ready,
  input  logic [WG_W-1:0]    upd_wg_id,
  input  logic [WF_W-1:0]    upd_wf_id,
  input  logic [VA_W-1:0]    upd_va,
  input  logic [CNT_W-1:0]   upd_thresh,
  // trigger to the DMA request table
  output logic               trig_valid,
  input  logic               trig_ready,
  output logic [WG_W-1:0]    trig_wg_id,
  output logic [WF_W-1:0]    trig_wf_id,
  output logic [VA_W-1:0]    trig_va,
  // statistics
  output logic [31:0]        n_triggers,
  output logic [31:0]        n_full_stalls,
  output logic [15:0]        live_entries
);
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [VA_W-1:0]  va;
    logic [CNT_W-1:0] cnt;
  } trk_ent_t;

  logic     ent_v [SETS][WAYS];
  trk_ent_t ent   [SETS][WAYS];

  logic [SET_W-1:0] set_idx;
  logic [TAG_W-1:0] tag;
  logic             hit, free_ok;
  logic [$clog2(WAYS)-1:0] hit_way, free_way, way;
  trk_ent_t         cur, nxt;
  logic             done, fire, trig_busy;

  assign set_idx = upd_wg_id[SET_W-1:0];
  assign tag     = {upd_wg_id[WG_W-1:SET_W], upd_wf_id};

  always_comb begin
    hit = 1'b0; hit_way = '0;
    free_ok = 1'b0; free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (ent_v[set_idx][w] && ent[set_idx][w].tag == tag) begin
        hit = 1'b1; hit_way = w[$clog2(WAYS)-1:0];
      end
      if (!ent_v[set_idx][w]) begin
        free_ok = 1'b1; free_way = w[$clog2(WAYS)-1:0];
      end
    end
    way = hit ? hit_way : free_way;
    cur = ent[set_idx][way];
    nxt.tag = tag;
    nxt.cnt = (hit ? cur.cnt : '0) + CNT_W'(1);                       // ALU
    nxt.va  = (hit && cur.va < upd_va) ? cur.va : upd_va;              // smallest VA
    done    = (nxt.cnt >= upd_thresh);                                  // CMP
  end

  assign trig_busy = trig_valid && !trig_ready;
  assign upd_ready = !trig_busy && (hit || free_ok);
  assign fire      = upd_valid && upd_ready;

  always_ff @(posedge clk) begin
    if (fire && !done) ent[set_idx][way] <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) ent_v[s][w] <= 1'b0;
      trig_valid    <= 1'b0;
      trig_wg_id    <= '0;
      trig_wf_id    <= '0;
      trig_va       <= '0;
      n_triggers    <= '0;
      n_full_stalls <= '0;
      live_entries  <= '0;
    end else begin
      if (trig_valid && trig_ready) trig_valid <= 1'b0;
      if (upd_valid && !hit && !free_ok) n_full_stalls <= n_full_stalls + 32'd1;
      if (fire) begin
        ent_v[set_idx][way] <= !done;
        if (!hit && !done)     live_entries <= live_entries + 16'd1;
        else if (hit && done)  live_entries <= live_entries - 16'd1;
        if (done) begin
          trig_valid <= 1'b1;
          trig_wg_id <= upd_wg_id;
          trig_wf_id <= upd_wf_id;
          trig_va    <= nxt.va;
          n_triggers <= n_triggers + 32'd1;
        end
      end
    end
  end

  a_trig_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                trig_valid && !trig_ready |=> trig_valid && $stable(trig_va));
endmodule
