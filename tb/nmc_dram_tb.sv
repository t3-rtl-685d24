// nmc_dram_tb: stores, near-memory updates and reads against a reference array
// of small integers (their FP16 sums are exact), and the bank-group spacing:
// CCDL cycles between commands to one group, CCDWL after an update, and
// back-to-back issue to different groups.
module nmc_dram_tb;
  import t3_pkg::*;
  localparam int unsigned WORDS = 256;
  localparam int unsigned AW = $clog2(WORDS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              cmd_valid, cmd_ready;
  mem_op_e           cmd_op;
  logic [AW-1:0]     cmd_addr;
  logic [DATA_W-1:0] cmd_data;
  logic [5:0]        cmd_tag;
  logic              rsp_valid;
  logic [DATA_W-1:0] rsp_data;
  logic [5:0]        rsp_tag;
  logic [31:0]       n_reads, n_writes, n_updates;

  int checks = 0, failures = 0;
  int ref_mem [WORDS][LANES];
  int cyc = 0;
  always @(posedge clk) cyc++;

  nmc_dram #(.WORDS(WORDS)) dut (.*);

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

  function automatic logic [DATA_W-1:0] pack(input int v[LANES]);
    logic [DATA_W-1:0] w;
    for (int l = 0; l < LANES; l++) w[l*16 +: 16] = i2h(v[l]);
    return w;
  endfunction

  // issue one command; returns the cycle it was accepted
  task automatic issue(input mem_op_e op, input int addr, input logic [DATA_W-1:0] d,
                       output int acc_cyc);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_addr = AW'(addr); cmd_data = d;
    cmd_tag = 6'(addr);
    #1;
    while (!cmd_ready) begin
      @(negedge clk);
      #1;
    end
    acc_cyc = cyc;
    @(posedge clk);
    #1 cmd_valid = 1'b0;
  endtask

  // expected read data queue
  logic [DATA_W-1:0] exp_q[$];
  always @(posedge clk) if (rsp_valid) begin
    checks++;
    if (exp_q.size() == 0 || rsp_data !== exp_q[0]) begin
      failures++;
      $display("FAIL read data tag %0d", rsp_tag);
    end
    if (exp_q.size() != 0) void'(exp_q.pop_front());
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[LANES];
    int t0, t1, t2, t3, a;
    cmd_valid = 0; cmd_op = OP_READ; cmd_addr = '0; cmd_data = '0; cmd_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // initialise with stores
    for (int w = 0; w < 32; w++) begin
      for (int l = 0; l < LANES; l++) begin v[l] = $urandom_range(0, 200) - 100; ref_mem[w][l] = v[l]; end
      issue(OP_STORE, w, pack(v), t0);
    end
    // random updates
    for (int k = 0; k < 200; k++) begin
      a = $urandom_range(0, 31);
      for (int l = 0; l < LANES; l++) begin v[l] = $urandom_range(0, 20) - 10; ref_mem[a][l] += v[l]; end
      issue(OP_UPDATE, a, pack(v), t0);
    end
    // read back
    for (int w = 0; w < 32; w++) begin
      for (int l = 0; l < LANES; l++) v[l] = ref_mem[w][l];
      exp_q.push_back(pack(v));
      issue(OP_READ, w, '0, t0);
    end
    repeat (10) @(posedge clk);
    // timing: store then store to the same group -> CCDL apart
    issue(OP_STORE, 40, '0, t0);
    issue(OP_STORE, 44, '0, t1);
    checks++; if (t1 - t0 != 2) begin failures++; $display("FAIL CCDL spacing %0d", t1 - t0); end
    // update then any command to the same group -> CCDWL apart
    issue(OP_UPDATE, 48, '0, t0);
    issue(OP_STORE, 52, '0, t1);
    checks++; if (t1 - t0 != 4) begin failures++; $display("FAIL CCDWL spacing %0d", t1 - t0); end
    // different bank groups back to back
    issue(OP_UPDATE, 60, '0, t2);
    issue(OP_UPDATE, 61, '0, t3);
    checks++; if (t3 - t2 != 1) begin failures++; $display("FAIL bank group overlap %0d", t3 - t2); end
    repeat (10) @(posedge clk);
    checks++;
    if (n_writes != 35 || n_updates != 203 || n_reads != 32) begin
      failures++; $display("FAIL counters %0d %0d %0d", n_writes, n_updates, n_reads);
    end
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL missing reads"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
