// mem_ctrl_tb: memory controller with an NMC DRAM behind it. Checks that
//  * a tile updated twice per word, once by the compute stream and once from the
//    network, triggers the Tracker exactly once, after the last update, with the
//    tile's smallest address;
//  * near-memory updates sum correctly (read back by the compute units and by the
//    DMA read port, each to its own return port);
//  * with a fixed MCA threshold of 5 a flood of communication writes never lets
//    the DRAM command queue grow past 5 while compute is idle, and the MCA counts
//    the held-back cycles; with drain high the flood fills the queue further.
module mem_ctrl_tb;
  import t3_pkg::*;
  localparam int unsigned WORDS = 1024;
  localparam int unsigned AW = $clog2(WORDS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmp_valid, cmp_ready, net_valid, net_ready, dmar_valid, dmar_ready;
  mem_req_t cmp_req, net_req;
  logic [VA_W-1:0] dmar_va;
  logic cu_rsp_valid, dma_rsp_valid;
  logic [DATA_W-1:0] cu_rsp_data, dma_rsp_data;
  logic [3:0] cu_rsp_tag;
  logic dram_valid, dram_ready;
  mem_op_e dram_op;
  logic [AW-1:0] dram_addr;
  logic [DATA_W-1:0] dram_data;
  logic [5:0] dram_tag, dram_rsp_tag;
  logic dram_rsp_valid;
  logic [DATA_W-1:0] dram_rsp_data;
  logic trig_valid, trig_ready;
  logic [WG_W-1:0] trig_wg_id;
  logic [WF_W-1:0] trig_wf_id;
  logic [VA_W-1:0] trig_va;
  logic calib, drain, cfg_auto, cfg_nolimit;
  logic [6:0] cfg_thr, mcq_occ, mca_thr;
  logic [15:0] cfg_starve;
  logic mca_nolimit, idle;
  logic [31:0] n_blocked, n_starve, n_drain, n_triggers, n_trk_stalls;
  logic [31:0] n_reads, n_writes, n_updates;

  mem_ctrl #(.WORDS(WORDS)) dut (.*);
  nmc_dram #(.WORDS(WORDS)) u_dram (
    .clk, .rst_n, .cmd_valid(dram_valid), .cmd_ready(dram_ready), .cmd_op(dram_op),
    .cmd_addr(dram_addr), .cmd_data(dram_data), .cmd_tag(dram_tag),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data), .rsp_tag(dram_rsp_tag),
    .n_reads, .n_writes, .n_updates);

  int checks = 0, failures = 0;
  int ntrig = 0;
  logic [VA_W-1:0] last_trig_va;
  int max_occ = 0;

  function automatic logic [15:0] i2h(input int v);
    int a, e;
    logic s;
    if (v == 0) return 16'h0;
    s = (v < 0);
    a = s ? -v : v;
    e = 0;
    while ((a >> (e + 1)) != 0) e++;
    return {s, 5'(e + 15), 10'((a << 10 >> e) & 10'h3ff)};
  endfunction
  function automatic logic [DATA_W-1:0] splat(input int v);
    return {LANES{i2h(v)}};
  endfunction

  always @(posedge clk) begin
    if (rst_n && trig_valid && trig_ready) begin ntrig++; last_trig_va = trig_va; end
    if (int'(mcq_occ) > max_occ) max_occ = int'(mcq_occ);
  end

  task automatic cmp_send(input mem_op_e op, input longint va, input int v, input logic trk,
                          input int wg, input int wf);
    @(negedge clk);
    cmp_valid = 1;
    cmp_req = '{op: op, va: VA_W'(va), data: splat(v), wg_id: WG_W'(wg), wf_id: WF_W'(wf),
                track: trk, thresh: CNT_W'(4), src: SRC_CU, tag: 4'(va >> 5)};
    #1; while (!cmp_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmp_valid = 0;
  endtask
  task automatic net_send(input mem_op_e op, input longint va, input int v, input logic trk,
                          input int wg, input int wf);
    @(negedge clk);
    net_valid = 1;
    net_req = '{op: op, va: VA_W'(va), data: splat(v), wg_id: WG_W'(wg), wf_id: WF_W'(wf),
                track: trk, thresh: CNT_W'(4), src: SRC_CU, tag: 4'd0};
    #1; while (!net_ready) begin @(negedge clk); #1; end
    @(negedge clk); net_valid = 0;
  endtask
  task automatic wait_idle();
    repeat (2) @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (10) @(posedge clk);
  endtask

  logic [DATA_W-1:0] got_cu, got_dma;
  always @(posedge clk) begin
    if (cu_rsp_valid) got_cu <= cu_rsp_data;
    if (dma_rsp_valid) got_dma <= dma_rsp_data;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmp_valid = 0; net_valid = 0; dmar_valid = 0; cmp_req = '0; net_req = '0; dmar_va = 0;
    trig_ready = 1; calib = 0; drain = 0; cfg_auto = 0; cfg_thr = 5; cfg_nolimit = 1;
    cfg_starve = 16'd1000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // zero a 2-word tile at 0x1000 (words 128, 129)
    cmp_send(OP_STORE, 'h1000, 0, 0, 0, 0);
    cmp_send(OP_STORE, 'h1020, 0, 0, 0, 0);
    // local updates then network updates of the tile, 4 tracked accesses in all
    cmp_send(OP_UPDATE, 'h1020, 3, 1, 3, 1);
    net_send(OP_UPDATE, 'h1000, 5, 1, 3, 1);
    cmp_send(OP_UPDATE, 'h1000, 7, 1, 3, 1);
    wait_idle();
    checks++; if (ntrig != 0) begin failures++; $display("FAIL early trigger"); end
    net_send(OP_UPDATE, 'h1020, -2, 1, 3, 1);
    wait_idle();
    checks++;
    if (ntrig != 1 || last_trig_va != 'h1000) begin
      failures++; $display("FAIL trigger count %0d va %h", ntrig, last_trig_va);
    end
    // read back word 0x1000 (5 + 7 = 12) by CU and word 0x1020 (3 - 2 = 1) by DMA
    cmp_send(OP_READ, 'h1000, 0, 0, 0, 0);
    @(negedge clk); dmar_valid = 1; dmar_va = 'h1020;
    #1; while (!dmar_ready) begin @(negedge clk); #1; end
    @(negedge clk); dmar_valid = 0;
    wait_idle();
    checks++; if (got_cu != splat(12)) begin failures++; $display("FAIL CU read %h", got_cu[15:0]); end
    checks++; if (got_dma != splat(1)) begin failures++; $display("FAIL DMA read %h", got_dma[15:0]); end
    // MCA: flood of communication updates to one bank group, compute idle
    cfg_nolimit = 0;
    max_occ = 0;
    for (int i = 0; i < 60; i++) net_send(OP_UPDATE, 'h2000 + i * 128, 1, 0, 0, 0);
    wait_idle();
    checks++; if (max_occ > 5) begin failures++; $display("FAIL MCQ reached %0d", max_occ); end
    checks++; if (n_blocked == 0) begin failures++; $display("FAIL no blocking counted"); end
    // same flood with drain: the threshold no longer applies
    drain = 1; max_occ = 0;
    fork
      for (int i = 0; i < 60; i++) net_send(OP_UPDATE, 'h2000 + i * 128, 1, 0, 0, 0);
    join
    wait_idle();
    drain = 0;
    checks++; if (max_occ <= 5 || n_drain == 0) begin failures++; $display("FAIL drain %0d %0d", max_occ, n_drain); end
    $display("mem_ctrl: blocked %0d drain %0d updates %0d", n_blocked, n_drain, n_updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
