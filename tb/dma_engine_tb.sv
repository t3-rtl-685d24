// dma_engine_tb: feeds blocks of one to three column-major wf_tiles, answers the
// engine's reads from a model memory whose word is a function of its address (random
// latency 2..6 cycles, in order), applies random back-pressure on reads and packets,
// and checks every packet's destination, address, data, operation and ids against the
// address sequence worked out here. A last run with no back-pressure checks that the
// engine sends one word per cycle.
module dma_engine_tb;
  import t3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dma_geom_t         geom;
  logic              blk_valid, blk_ready;
  dma_cmd_t          blk_cmd;
  logic [WG_W-1:0]   blk_wg_id;
  logic [WF_W-1:0]   blk_wf_id;
  logic              rd_req_valid, rd_req_ready;
  logic [VA_W-1:0]   rd_req_va;
  logic              rd_rsp_valid;
  logic [DATA_W-1:0] rd_rsp_data;
  logic              pkt_valid, pkt_ready;
  net_pkt_t          pkt;
  logic              busy;
  logic [31:0]       n_blocks, n_pkts;

  dma_engine dut (.*);

  int checks = 0, failures = 0;
  logic rand_bp = 1;

  function automatic logic [DATA_W-1:0] word_of(input logic [VA_W-1:0] va);
    return {8{va[31:0] ^ 32'h5a5a_0000}};
  endfunction

  // memory model: in-order responses with a latency of 2..6 cycles
  logic [VA_W-1:0] pend_va[$];
  int              pend_t[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    rd_rsp_valid <= 1'b0;
    if (pend_t.size() > 0 && pend_t[0] <= cyc) begin
      rd_rsp_valid <= 1'b1;
      rd_rsp_data  <= word_of(pend_va[0]);
      void'(pend_va.pop_front());
      void'(pend_t.pop_front());
    end
    if (rd_req_valid && rd_req_ready) begin
      pend_va.push_back(rd_req_va);
      pend_t.push_back(rand_bp ? cyc + $urandom_range(2, 6) : cyc + 2);
    end
    rd_req_ready <= rand_bp ? ($urandom_range(0, 3) != 0) : 1'b1;
    pkt_ready    <= rand_bp ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  net_pkt_t exp_q[$];
  always @(posedge clk) if (pkt_valid && pkt_ready) begin
    checks++;
    if (exp_q.size() == 0 || pkt != exp_q[0]) begin
      failures++;
      if (failures < 10) $display("FAIL packet va %h (expected %h)", pkt.va,
                                  exp_q.size() ? exp_q[0].va : '0);
    end
    if (exp_q.size() != 0) void'(exp_q.pop_front());
  end

  task automatic run_block(input longint src, input longint dst, input int gpu, input int nt,
                           input int wg, input int wf, input mem_op_e op);
    net_pkt_t p;
    for (int c = 0; c < int'(geom.cols); c++)
      for (int r = 0; r < int'(geom.col_bytes) * nt; r += 32) begin
        p.dst_gpu = GPU_W'(gpu); p.op = op;
        p.va = VA_W'(dst + c * longint'(geom.col_stride) + r);
        p.data = word_of(VA_W'(src + c * longint'(geom.col_stride) + r));
        p.wg_id = WG_W'(wg); p.wf_id = WF_W'(wf + r / int'(geom.col_bytes));
        exp_q.push_back(p);
      end
    @(negedge clk);
    blk_valid = 1;
    blk_cmd = '{src_va: VA_W'(src), span: VA_W'(64), dst_gpu: GPU_W'(gpu), dst_va: VA_W'(dst),
                op: op, tiles: 8'(nt)};
    blk_wg_id = WG_W'(wg); blk_wf_id = WF_W'(wf);
    #1;
    while (!blk_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    blk_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, words;
    blk_valid = 0; blk_cmd = '0; blk_wg_id = 0; blk_wf_id = 0;
    rd_rsp_data = '0;
    // M = 64 FP16 rows -> 128-byte column stride; a tile is 2 columns x 32 bytes
    geom = '{col_stride: VA_W'(128), col_bytes: 16'd32, cols: 16'd2};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_block('h0004, 'h3004, 3, 1, 2, 0, OP_UPDATE);
    run_block('h0044, 'h3044, 3, 1, 2, 1, OP_UPDATE);
    for (int i = 0; i < 40; i++)
      run_block(48'h1_0000 + i * 512, 48'h8_0000 + i * 512, i % 7, $urandom_range(1, 3),
                i, i % 8, (i % 2) ? OP_STORE : OP_UPDATE);
    while (busy || exp_q.size() != 0) @(posedge clk);
    // throughput with no back-pressure: 4 columns x 64 bytes = 8 words
    rand_bp = 0;
    repeat (5) @(posedge clk);
    geom = '{col_stride: VA_W'(256), col_bytes: 16'd64, cols: 16'd4};
    t0 = cyc;
    run_block('h4000, 'h9000, 1, 1, 7, 7, OP_UPDATE);
    while (busy || exp_q.size() != 0) @(posedge clk);
    words = cyc - t0;
    checks++;
    if (words > 8 + 6) begin failures++; $display("FAIL 8 words took %0d cycles", words); end
    checks++;
    if (n_blocks != 43) begin failures++; $display("FAIL block count %0d", n_blocks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
