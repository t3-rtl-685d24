// mca_arbiter: communication-aware memory-controller arbitration (MCA).
//
// Decides each cycle which of two request streams may enter the DRAM command queue
// (MCQ): the compute stream (the producer GEMM's reads and writes) or the
// communication stream (incoming remote/DMA updates and the DMA engine's reads).
// The policy is the paper's:
//   * the compute stream always goes first;
//   * the communication stream goes only when compute is empty and the MCQ holds
//     fewer than `thr` requests, so bursts of communication cannot fill the queue
//     and stall later GEMM reads;
//   * the threshold is chosen by measuring the MCQ occupancy while the first GEMM
//     stage runs alone (`calib` high): a memory-intensive kernel gets a small
//     threshold. The choices are the paper's 5, 10, 30 or no limit;
//   * if the communication stream has waited STARVE cycles since its last issue it
//     is given priority, so it cannot starve;
//   * at the producer kernel boundary (`drain` high) the threshold is lifted and the
//     communication stream is drained.
// Own choices: the occupancy bands that map to 5/10/30/no limit (average occupancy
// of at least 1/2, 1/4, 1/8 of the MCQ depth), no limit before calibration, the
// default starvation limit, and an optional fixed threshold (cfg_auto low).
// Timing: combinational grant from registered state; one grant per cycle.
module mca_arbiter #(
  parameter int unsigned QDEPTH  = 64,
  parameter int unsigned THR_HI  = 5,    // memory-intensive kernel
  parameter int unsigned THR_MID = 10,
  parameter int unsigned THR_LO  = 30,
  localparam int unsigned OW     = $clog2(QDEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmp_valid,
  input  logic           com_valid,
  input  logic [OW-1:0]  mcq_occ,
  input  logic           mcq_full,
  output logic           grant_cmp,
  output logic           grant_com,
  // control
  input  logic           calib,          // first GEMM stage running in isolation
  input  logic           drain,          // producer kernel boundary
  input  logic           cfg_auto,       // 1: threshold from calibration
  input  logic [OW-1:0]  cfg_thr,        // fixed threshold when cfg_auto = 0
  input  logic           cfg_nolimit,    // fixed "no limit" when cfg_auto = 0
  input  logic [15:0]    cfg_starve,     // starvation limit in cycles
  // status
  output logic [OW-1:0]  thr,
  output logic           thr_nolimit,
  output logic [31:0]    n_blocked,      // cycles communication was held back by thr
  output logic [31:0]    n_starve,       // grants forced by the starvation limit
  output logic [31:0]    n_drain         // grants only allowed by drain
);
  logic [OW-1:0]  auto_thr;
  logic           auto_nolimit;
  logic [31:0]    occ_sum;
  logic [23:0]    calib_cyc;
  logic           calib_q;
  logic [15:0]    wait_cnt;
  logic           starve, below, com_ok;

  assign thr         = cfg_auto ? auto_thr : cfg_thr;
  assign thr_nolimit = cfg_auto ? auto_nolimit : cfg_nolimit;
  assign below       = thr_nolimit || (mcq_occ < thr);
  assign com_ok      = com_valid && (below || drain);
  assign starve      = com_valid && (wait_cnt >= cfg_starve);

  always_comb begin
    grant_cmp = 1'b0;
    grant_com = 1'b0;
    if (!mcq_full) begin
      if (starve)         grant_com = 1'b1;
      else if (cmp_valid) grant_cmp = 1'b1;
      else if (com_ok)    grant_com = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      auto_thr     <= '0;
      auto_nolimit <= 1'b1;
      occ_sum      <= '0;
      calib_cyc    <= '0;
      calib_q      <= 1'b0;
      wait_cnt     <= '0;
      n_blocked    <= '0;
      n_starve     <= '0;
      n_drain      <= '0;
    end else begin
      calib_q <= calib;
      // occupancy monitor during the isolated first stage
      if (calib && !calib_q) begin
        occ_sum   <= 32'(mcq_occ);
        calib_cyc <= 24'd1;
      end else if (calib) begin
        occ_sum   <= occ_sum + 32'(mcq_occ);
        calib_cyc <= calib_cyc + 24'd1;
      end
      if (!calib && calib_q) begin
        // average occupancy = occ_sum / calib_cyc, compared with fractions of QDEPTH
        if (occ_sum * 2 >= 32'(calib_cyc) * QDEPTH) begin
          auto_thr <= OW'(THR_HI);  auto_nolimit <= 1'b0;
        end else if (occ_sum * 4 >= 32'(calib_cyc) * QDEPTH) begin
          auto_thr <= OW'(THR_MID); auto_nolimit <= 1'b0;
        end else if (occ_sum * 8 >= 32'(calib_cyc) * QDEPTH) begin
          auto_thr <= OW'(THR_LO);  auto_nolimit <= 1'b0;
        end else begin
          auto_nolimit <= 1'b1;
        end
      end
      // cycles since the communication stream last issued
      if (grant_com || !com_valid) wait_cnt <= '0;
      else if (wait_cnt != 16'hffff) wait_cnt <= wait_cnt + 16'd1;
      if (com_valid && !below && !drain && !cmp_valid && !mcq_full && !starve)
        n_blocked <= n_blocked + 32'd1;
      if (grant_com && starve && (cmp_valid || !com_ok)) n_starve <= n_starve + 32'd1;
      if (grant_com && !starve && !below) n_drain <= n_drain + 32'd1;
    end
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) !(grant_cmp && grant_com));
  a_no_full:   assert property (@(posedge clk) disable iff (!rst_n) mcq_full |-> !(grant_cmp || grant_com));
endmodule
