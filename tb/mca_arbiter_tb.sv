// mca_arbiter_tb: checks calibration (constant occupancies that must select the
// thresholds 5, 10, 30 and no limit) and then compares every grant over random
// traffic with a reference of the policy: starvation first, then compute, then
// communication below the threshold or while draining, nothing when the MCQ is full.
module mca_arbiter_tb;
  localparam int unsigned QDEPTH = 64;
  localparam int unsigned OW = $clog2(QDEPTH + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          cmp_valid, com_valid, mcq_full, grant_cmp, grant_com;
  logic [OW-1:0] mcq_occ, cfg_thr, thr;
  logic          calib, drain, cfg_auto, cfg_nolimit, thr_nolimit;
  logic [15:0]   cfg_starve;
  logic [31:0]   n_blocked, n_starve, n_drain;

  mca_arbiter #(.QDEPTH(QDEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int ref_wait = 0;

  task automatic calibrate(input int occ, input int exp_thr, input logic exp_nl);
    @(negedge clk);
    calib = 1; mcq_occ = OW'(occ);
    repeat (100) @(negedge clk);
    calib = 0;
    @(negedge clk);
    checks++;
    if (thr_nolimit !== exp_nl || (!exp_nl && thr != OW'(exp_thr))) begin
      failures++;
      $display("FAIL occupancy %0d gives thr %0d nolimit %0d", occ, thr, thr_nolimit);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic e_cmp, e_com, below, starve;
    cmp_valid = 0; com_valid = 0; mcq_full = 0; mcq_occ = 0; calib = 0; drain = 0;
    cfg_auto = 1; cfg_thr = 0; cfg_nolimit = 0; cfg_starve = 16'd20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (!thr_nolimit) begin failures++; $display("FAIL limit before calibration"); end
    calibrate(40, 5, 0);
    calibrate(20, 10, 0);
    calibrate(10, 30, 0);
    calibrate(2, 0, 1);
    calibrate(33, 5, 0);
    // random traffic against the reference policy
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      cmp_valid = ($urandom_range(0, 9) < (((n / 2000) % 2 == 1) ? 10 : 3));
      com_valid = ($urandom_range(0, 9) < 7);
      mcq_occ   = OW'($urandom_range(0, 12));
      mcq_full  = ($urandom_range(0, 19) == 0);
      drain     = (n >= 16000 && n < 18000);
      #1;
      below  = (mcq_occ < 5);
      starve = com_valid && (ref_wait >= 20);
      e_cmp = 0; e_com = 0;
      if (!mcq_full) begin
        if (starve) e_com = 1;
        else if (cmp_valid) e_cmp = 1;
        else if (com_valid && (below || drain)) e_com = 1;
      end
      checks++;
      if (grant_cmp !== e_cmp || grant_com !== e_com) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d grants %0d%0d expected %0d%0d", n,
                                    grant_cmp, grant_com, e_cmp, e_com);
      end
      if (e_com || !com_valid) ref_wait = 0; else ref_wait++;
    end
    checks++;
    if (n_starve == 0 || n_blocked == 0 || n_drain == 0) begin
      failures++; $display("FAIL counters %0d %0d %0d", n_starve, n_blocked, n_drain);
    end
    $display("mca: blocked %0d starve %0d drain %0d", n_blocked, n_starve, n_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
