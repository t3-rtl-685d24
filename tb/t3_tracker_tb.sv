// t3_tracker_tb: random tracked accesses from many wavefronts against a reference
// count per (wg_id, wf_id); each trigger must come exactly when a tile's count
// reaches its threshold and carry the smallest address seen. Also fills all ways of
// one set to check the full-set stall and the one-cycle trigger latency.
module t3_tracker_tb;
  import t3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               upd_valid, upd_ready;
  logic [WG_W-1:0]    upd_wg_id;
  logic [WF_W-1:0]    upd_wf_id;
  logic [VA_W-1:0]    upd_va;
  logic [CNT_W-1:0]   upd_thresh;
  logic               trig_valid, trig_ready;
  logic [WG_W-1:0]    trig_wg_id;
  logic [WF_W-1:0]    trig_wf_id;
  logic [VA_W-1:0]    trig_va;
  logic [31:0]        n_triggers, n_full_stalls;
  logic [15:0]        live_entries;

  t3_tracker dut (.*);

  int checks = 0, failures = 0;
  int cnt [int];
  longint minva [int];
  typedef struct { int key; longint va; } trig_t;
  trig_t exp_q[$];
  int cyc = 0, fire_cyc = 0, trig_lat = -1;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && upd_valid && upd_ready) begin
      int k;
      k = {upd_wg_id, upd_wf_id};
      if (!cnt.exists(k)) begin cnt[k] = 0; minva[k] = longint'(upd_va); end
      cnt[k]++;
      if (longint'(upd_va) < minva[k]) minva[k] = longint'(upd_va);
      if (cnt[k] >= int'(upd_thresh)) begin
        trig_t t;
        t.key = k; t.va = minva[k];
        exp_q.push_back(t);
        cnt.delete(k);
        fire_cyc = cyc;
      end
    end
    if (rst_n && trig_valid && trig_ready) begin
      checks++;
      if (trig_lat < 0) trig_lat = cyc - fire_cyc;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected trigger");
      end else begin
        if (exp_q[0].key != int'({trig_wg_id, trig_wf_id}) || exp_q[0].va != longint'(trig_va)) begin
          failures++;
          $display("FAIL trigger %h va %h, expected %h va %h", {trig_wg_id, trig_wf_id}, trig_va,
                   exp_q[0].key, exp_q[0].va);
        end
        void'(exp_q.pop_front());
      end
    end
  end

  task automatic send(input int wg, input int wf, input longint va, input int th);
    @(negedge clk);
    upd_valid = 1; upd_wg_id = WG_W'(wg); upd_wf_id = WF_W'(wf); upd_va = VA_W'(va);
    upd_thresh = CNT_W'(th);
    #1;
    while (!upd_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 upd_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wg, wf;
    upd_valid = 0; upd_wg_id = 0; upd_wf_id = 0; upd_va = 0; upd_thresh = 4; trig_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one tile, threshold 4: trigger one cycle after the 4th access, min VA kept
    send(2, 0, 'h84, 4); send(2, 0, 'h04, 4); send(2, 0, 'h44, 4); send(2, 0, 'hc4, 4);
    repeat (3) @(posedge clk);
    checks++; if (trig_lat != 1) begin failures++; $display("FAIL trigger latency %0d", trig_lat); end
    // fill the 8 ways of set 5 with different tags
    for (int i = 0; i < 8; i++) send((i < 4) ? 5 : 261, i % 4, 'h1000 + i * 64, 3);
    @(negedge clk);
    upd_valid = 1; upd_wg_id = 5; upd_wf_id = 7; upd_va = 'h2000; upd_thresh = 3; #1;
    checks++; if (upd_ready) begin failures++; $display("FAIL full set did not stall"); end
    @(negedge clk); upd_valid = 0;
    checks++; if (n_full_stalls == 0) begin failures++; $display("FAIL stall counter"); end
    // finish the first tag: two more accesses, then the new tag fits
    send(5, 0, 'h1000, 3); send(5, 0, 'h1004, 3);
    send(5, 7, 'h2000, 3);
    checks++; if (live_entries != 8) begin failures++; $display("FAIL live entries %0d", live_entries); end
    for (int i = 1; i < 8; i++) begin
      send((i < 4) ? 5 : 261, i % 4, 'h1000 + i * 64, 3);
      send((i < 4) ? 5 : 261, i % 4, 'h1000 + i * 64 + 32, 3);
    end
    send(5, 7, 'h2020, 3); send(5, 7, 'h2040, 3);
    // random traffic with random trigger back-pressure
    fork
      begin
        for (int n = 0; n < 6000; n++) begin
          wg = $urandom_range(0, 11) * 85;           // sets 0,85,170,255 with msb 0/1
          wf = $urandom_range(0, 1);
          send(wg, wf, 48'h10000 + longint'($urandom_range(0, 255)) * 32, 6);
        end
      end
      begin
        for (int n = 0; n < 12000; n++) begin
          @(negedge clk); trig_ready = ($urandom_range(0, 3) != 0);
        end
        trig_ready = 1;
      end
    join
    repeat (10) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d triggers missing", exp_q.size()); end
    checks++; if (n_triggers != 32'(checks - 6)) begin failures++; $display("FAIL trigger counter %0d", n_triggers); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
