// dma_req_table_tb: programs the rows of the DMA request table figure (blocks 16, 17
// and 47) plus random blocks of one to four tiles, sends Tracker triggers in random
// order and checks that each block becomes ready only after its last tile, with the
// ids of that tile, and that unmatched triggers are counted and dropped.
module dma_req_table_tb;
  import t3_pkg::*;
  localparam int unsigned ENTRIES = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               prog_valid;
  logic [5:0]         prog_idx;
  dma_cmd_t           prog_cmd;
  logic               trig_valid, trig_ready;
  logic [VA_W-1:0]    trig_va;
  logic [WG_W-1:0]    trig_wg_id;
  logic [WF_W-1:0]    trig_wf_id;
  logic               rdy_valid, rdy_ready;
  logic [5:0]         rdy_idx;
  dma_cmd_t           rdy_cmd;
  logic [WG_W-1:0]    rdy_wg_id;
  logic [WF_W-1:0]    rdy_wf_id;
  logic [31:0]        n_ready, n_unmatched;
  logic [ENTRIES-1:0] pending;

  dma_req_table #(.ENTRIES(ENTRIES)) dut (.*);

  int checks = 0, failures = 0;
  int tiles [ENTRIES];
  int got   [ENTRIES];
  int last_wg [ENTRIES];
  longint base [ENTRIES];

  task automatic prog(input int idx, input longint src, input longint span, input int gpu,
                      input longint dst, input int nt);
    @(negedge clk);
    prog_valid = 1; prog_idx = 6'(idx);
    prog_cmd = '{src_va: VA_W'(src), span: VA_W'(span), dst_gpu: GPU_W'(gpu),
                 dst_va: VA_W'(dst), op: OP_UPDATE, tiles: 8'(nt)};
    @(negedge clk); prog_valid = 0;
    tiles[idx] = nt; got[idx] = 0; base[idx] = src;
  endtask

  task automatic trig(input longint va, input int wg, input int wf);
    @(negedge clk);
    trig_valid = 1; trig_va = VA_W'(va); trig_wg_id = WG_W'(wg); trig_wf_id = WF_W'(wf);
    @(negedge clk); trig_valid = 0;
  endtask

  // take one ready block and check it
  task automatic expect_ready(input int idx, input int wg, input int wf, input longint dst);
    @(negedge clk);
    checks++;
    if (!rdy_valid || rdy_idx != 6'(idx) || rdy_wg_id != WG_W'(wg) || rdy_wf_id != WF_W'(wf) ||
        rdy_cmd.dst_va != VA_W'(dst)) begin
      failures++;
      $display("FAIL ready v%0d idx %0d wg %0d wf %0d, expected %0d %0d %0d", rdy_valid, rdy_idx,
               rdy_wg_id, rdy_wf_id, idx, wg, wf);
    end
    rdy_ready = 1;
    @(negedge clk); rdy_ready = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[$];
    int e;
    prog_valid = 0; prog_idx = 0; prog_cmd = '0; trig_valid = 0; trig_va = 0;
    trig_wg_id = 0; trig_wf_id = 0; rdy_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the three rows printed in the figure, one 64-byte wf_tile each
    prog(16, 'h0004, 64, 3, 'h3004, 1);
    prog(17, 'h0044, 64, 3, 'h3044, 1);
    prog(47, 'h03c8, 64, 3, 'h33c8, 1);
    @(negedge clk);
    checks++; if (rdy_valid) begin failures++; $display("FAIL ready before trigger"); end
    trig('h0044, 2, 1);
    expect_ready(17, 2, 1, 'h3044);
    trig('h03c8, 5, 7);
    trig('h0004, 2, 0);
    expect_ready(16, 2, 0, 'h3004);   // lowest index first
    expect_ready(47, 5, 7, 'h33c8);
    trig('h9999_0000, 1, 1);           // matches nothing
    @(negedge clk);
    checks++; if (n_unmatched != 1 || rdy_valid) begin failures++; $display("FAIL unmatched"); end
    // random multi-tile blocks
    for (int i = 0; i < 32; i++) prog(i, 48'h100000 + i * 4096, 4096, 1, 48'h200000 + i * 4096,
                                      $urandom_range(1, 4));
    for (int i = 0; i < 32; i++) for (int t = 0; t < tiles[i]; t++) order.push_back(i * 8 + t);
    order.shuffle();
    foreach (order[k]) begin
      e = order[k] / 8;
      trig(base[e] + (order[k] % 8) * 256, e, order[k] % 8);
      got[e]++;
      last_wg[e] = e;
      @(negedge clk);
      checks++;
      if (got[e] == tiles[e]) begin
        if (!rdy_valid || rdy_idx != 6'(e) || rdy_wg_id != WG_W'(e) || rdy_wf_id != '0) begin
          failures++; $display("FAIL block %0d not ready after %0d tiles", e, got[e]);
        end
        rdy_ready = 1; @(negedge clk); rdy_ready = 0;
      end else if (rdy_valid) begin
        failures++; $display("FAIL block %0d ready early", rdy_idx);
      end
    end
    checks++; if (n_ready != 35 || pending != '0) begin failures++; $display("FAIL final %0d", n_ready); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
