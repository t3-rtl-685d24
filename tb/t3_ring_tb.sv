// t3_ring_tb: end-to-end test of T3: a fused GEMM + ring reduce-scatter on rings of
// 8 and then 16 GPUs (the tensor-parallel degrees of the evaluated systems), each
// GPU a t3_node at its default parameters. The two runs share the 16 instantiated
// nodes; the 8-GPU run uses the first eight, and every run starts from reset.
//
// Each GPU's output array has one chunk per GPU, of 2*npairs columns x 32 FP16 rows
// (column major, 64 bytes per column): 16 columns in the 8-GPU run, 8 in the 16-GPU
// run. The GEMM is not simulated; the testbench plays the compute units and issues
// what the GEMM would send to memory: reads of its input (all to one DRAM bank group,
// so the GEMM is memory bound), one store per output word carrying the "update" flag,
// and a random pause after each store. Its wavefront tile is 16 rows x 2 columns (two
// 32-byte words, wf_tile_size/32 = 2), wg_id = chunk*8 + column pair, wf_id = row half.
//
// The ring follows the staggered schedule: in step s GPU g produces chunk
// (g+s-1) mod n. The driver's configuration on GPU g is
//   chunk g             remote_map to GPU g-1 (the first step's stores go there);
//   chunks g+1 .. g+n-2 dma_map (at most two address regions, split at the wrap),
//                       2 updates per element, DMA blocks of two tiles (one column
//                       pair) pre-programmed to update the same chunk on GPU g-1;
//   chunk g+n-1         local; it ends up holding the reduced result.
// A link model carries packets from GPU g to GPU g-1 with a fixed 700-cycle latency
// (500 ns at 1.4 GHz) and is busy one cycle in eight. The MCA calibrates during step
// 1 and drains after each GPU's GEMM ends.
//
// Checks, per run: every GPU's final chunk equals the sum of all n contributions
// (small integers, exact in FP16); exact counts per GPU of remote_updates, Tracker
// triggers (2 per column pair of each dma_mapped chunk), DMA blocks, DMA packets,
// received packets and near-memory updates; no unmatched trigger; every packet goes
// to the ring neighbour; the first DMA of each GPU starts before its GEMM finishes
// (overlap). Over both runs every mechanism (remote_update, Tracker trigger, DMA, NMC
// update, MCA calibration, MCA blocking, starvation, drain) must have happened.
module t3_ring_tb;
  import t3_pkg::*;
  localparam int NG = 16;            // nodes instantiated
  localparam int LAT = 700;
  localparam int RPS = 8;             // GEMM input reads per output store
  localparam int GAP = 10;            // longest pause between output stores
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ng = 8;                         // GPUs in the ring being run
  int npairs = 8;                     // column pairs per chunk
  int tot_r = 0, tot_t = 0, tot_d = 0, tot_n = 0, tot_b = 0, tot_s = 0, tot_dr = 0, tot_cal = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- per-GPU signals
  logic        map_we [NG];
  logic [2:0]  map_idx [NG];
  region_t     map_region [NG];
  logic        dma_prog_valid [NG];
  logic [5:0]  dma_prog_idx [NG];
  dma_cmd_t    dma_prog_cmd [NG];
  logic        calib [NG], drain [NG];
  logic        cu_valid [NG], cu_ready [NG];
  cu_req_t     cu_req [NG];
  logic        cu_rsp_valid [NG];
  logic [DATA_W-1:0] cu_rsp_data [NG];
  logic [3:0]  cu_rsp_tag [NG];
  logic        tx_valid [NG], tx_ready [NG], rx_valid [NG], rx_ready [NG];
  net_pkt_t    tx_pkt [NG], rx_pkt [NG];
  node_stats_t stats [NG];
  dma_geom_t   geom;
  assign geom = '{col_stride: 48'd64, col_bytes: 16'd32, cols: 16'd2};

  for (genvar g = 0; g < NG; g++) begin : gpu
    t3_node u_node (
      .clk, .rst_n,
      .map_we (map_we[g]), .map_idx (map_idx[g]), .map_region (map_region[g]),
      .wf_tile_gran (16'd2),
      .dma_prog_valid (dma_prog_valid[g]), .dma_prog_idx (dma_prog_idx[g]),
      .dma_prog_cmd (dma_prog_cmd[g]), .dma_geom (geom),
      .calib (calib[g]), .drain (drain[g]), .mca_auto (1'b1), .mca_thr_cfg (7'd0),
      .mca_nolimit_cfg (1'b0), .mca_starve (16'd48),
      .cu_valid (cu_valid[g]), .cu_ready (cu_ready[g]), .cu_req (cu_req[g]),
      .cu_rsp_valid (cu_rsp_valid[g]), .cu_rsp_data (cu_rsp_data[g]), .cu_rsp_tag (cu_rsp_tag[g]),
      .tx_valid (tx_valid[g]), .tx_ready (tx_ready[g]), .tx_pkt (tx_pkt[g]),
      .rx_valid (rx_valid[g]), .rx_ready (rx_ready[g]), .rx_pkt (rx_pkt[g]),
      .stats (stats[g]));
  end

  // ---------------- ring link model
  typedef struct { net_pkt_t p; longint t; } flight_t;
  flight_t link_q [NG][$];
  longint  cyc = 0;
  int      bad_dst = 0;
  longint  first_dma [NG];
  longint  gemm_end [NG];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int g = 0; g < NG; g++) begin
        if (tx_valid[g] && tx_ready[g]) begin
          if (int'(tx_pkt[g].dst_gpu) != (g + ng - 1) % ng) bad_dst++;
          link_q[(g + ng - 1) % ng].push_back('{p: tx_pkt[g], t: cyc + longint'(LAT)});
        end
        if (rx_valid[g] && rx_ready[g]) void'(link_q[g].pop_front());
        if (stats[g].dma_tx != 0 && first_dma[g] < 0) first_dma[g] = cyc;
      end
    end
  end
  always @(negedge clk) begin
    for (int g = 0; g < NG; g++) begin
      tx_ready[g] = ($urandom_range(0, 7) != 0);   // link busy 1 cycle in 8
      rx_valid[g] = (link_q[g].size() > 0) && (link_q[g][0].t <= cyc);
      rx_pkt[g]   = (link_q[g].size() > 0) ? link_q[g][0].p : '0;
    end
  end

  // ---------------- data
  function automatic logic [15:0] i2h(input int n);   // small positive integer to FP16
    int e;
    e = 0;
    while ((n >> (e + 1)) != 0) e++;
    return {1'b0, 5'(e + 15), 10'((n << (10 - e)) & 32'h3FF)};
  endfunction
  function automatic int contrib(input int g, c, p, h, k, lane);
    return ((g * 5 + c * 3 + p * 7 + h * 2 + k + lane) % 8) + 1;
  endfunction
  function automatic logic [DATA_W-1:0] word_of(input int g, c, p, h, k);
    logic [DATA_W-1:0] w;
    for (int l = 0; l < LANES; l++) w[l*16 +: 16] = i2h(contrib(g, c, p, h, k, l));
    return w;
  endfunction
  function automatic logic [VA_W-1:0] out_va(input int c, p, h, k);
    return VA_W'(c * npairs * 128 + p * 128 + h * 32 + k * 64);
  endfunction

  // one CU request, driven at negedge and held until accepted
  task automatic cu_issue(input int g, input mem_op_e op, input logic [VA_W-1:0] va,
                          input logic [DATA_W-1:0] d, input int wg, input int wf, input int tag);
    @(negedge clk);
    cu_valid[g] = 1'b1;
    cu_req[g]   = '{op: op, va: va, data: d, wg_id: WG_W'(wg), wf_id: WF_W'(wf), tag: 4'(tag)};
    #1;
    while (!cu_ready[g]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 cu_valid[g] = 1'b0;
  endtask

  task automatic run_gemm(input int g);
    for (int s = 1; s <= ng; s++) begin
      int c;
      c = (g + s - 1) % ng;
      if (s == 2) calib[g] = 1'b0;
      for (int p = 0; p < npairs; p++)
        for (int h = 0; h < 2; h++)
          for (int k = 0; k < 2; k++) begin
            for (int r = 0; r < RPS; r++)
              cu_issue(g, OP_READ, VA_W'(32'h8000 + 128 * $urandom_range(0, 255)), '0, 0, 0, 0);
            cu_issue(g, OP_UPDATE, out_va(c, p, h, k), word_of(g, c, p, h, k), c * 8 + p, h, 0);
            // the GEMM's arithmetic leaves gaps in its memory stream
            repeat ($urandom_range(2, GAP)) @(negedge clk);
          end
    end
    gemm_end[g] = cyc;
    drain[g] = 1'b1;                    // producer kernel boundary
  endtask

  // ---------------- configuration of GPU g (what the driver does)
  task automatic map_write(input int g, input int idx, input int c0, input int nchunks,
                           input region_kind_e kind);
    int cb;
    cb = npairs * 128;
    @(negedge clk);
    map_we[g]     = 1'b1;
    map_idx[g]    = 3'(idx);
    map_region[g] = '{valid: (nchunks > 0), base: VA_W'(c0 * cb), size: VA_W'(nchunks * cb),
                      kind: kind, remote_gpu: GPU_W'((g + ng - 1) % ng),
                      remote_base: VA_W'(c0 * cb), total_updates: UPD_W'(2)};
    @(negedge clk);
    map_we[g] = 1'b0;
  endtask

  task automatic configure(input int g);
    int prev, hi;
    prev = (g + ng - 1) % ng;
    @(negedge clk);
    // zero the output array with plain stores before it is mapped
    for (int w = 0; w < ng * npairs * 4; w++)
      cu_issue(g, OP_STORE, VA_W'(w * 32), '0, 0, 0, 0);
    // chunk g remote; chunks g+1 .. g+ng-2 (mod ng) dma, as at most two contiguous
    // regions; chunk g-1 local
    hi = (g + ng - 2 < ng) ? g + ng - 2 : ng - 1;
    map_write(g, 0, g, 1, REG_REMOTE);
    map_write(g, 1, g + 1, hi - g, REG_DMA);
    map_write(g, 2, 0, (g >= 2) ? g - 1 : 0, REG_DMA);
    map_write(g, 3, prev, 1, REG_LOCAL);
    for (int i = 1; i <= ng - 2; i++)
      for (int p = 0; p < npairs; p++) begin
        int c;
        c = (g + i) % ng;
        @(negedge clk);
        dma_prog_valid[g] = 1'b1;
        dma_prog_idx[g]   = 6'((i - 1) * npairs + p);
        dma_prog_cmd[g]   = '{src_va: VA_W'((c * npairs + p) * 128), span: VA_W'(128),
                              dst_gpu: GPU_W'(prev), dst_va: VA_W'((c * npairs + p) * 128),
                              op: OP_UPDATE, tiles: 8'd2};
        @(negedge clk);
        dma_prog_valid[g] = 1'b0;
      end
  endtask

  task automatic check_result(input int g);
    int c;
    c = (g + ng - 1) % ng;
    for (int p = 0; p < npairs; p++)
      for (int h = 0; h < 2; h++)
        for (int k = 0; k < 2; k++) begin
          logic [DATA_W-1:0] exp_w;
          bit got;
          for (int l = 0; l < LANES; l++) begin
            int sum;
            sum = 0;
            for (int q = 0; q < ng; q++) sum += contrib(q, c, p, h, k, l);
            exp_w[l*16 +: 16] = i2h(sum);
          end
          fork
            cu_issue(g, OP_READ, out_va(c, p, h, k), '0, 0, 0, 15);
            begin
              got = 0;
              while (!got) begin
                @(posedge clk);
                if (cu_rsp_valid[g] && cu_rsp_tag[g] == 4'd15) begin
                  got = 1;
                  check(cu_rsp_data[g] == exp_w,
                        $sformatf("GPU %0d chunk %0d p%0d h%0d k%0d: %h vs %h", g, c, p, h, k,
                                  cu_rsp_data[g], exp_w));
                end
              end
            end
          join
        end
  endtask

  function automatic bit all_idle();
    for (int g = 0; g < NG; g++)
      if (!stats[g].idle || link_q[g].size() != 0 || cu_valid[g]) return 0;
    return 1;
  endfunction

  initial begin
    #20_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // one complete fused GEMM + reduce-scatter on a ring of n GPUs, from reset
  task automatic run_ring(input int n, input int pairs);
    int quiet;
    ng = n;
    npairs = pairs;
    bad_dst = 0;
    for (int g = 0; g < NG; g++) begin
      map_we[g] = 0; map_idx[g] = 0; map_region[g] = '0;
      dma_prog_valid[g] = 0; dma_prog_idx[g] = 0; dma_prog_cmd[g] = '0;
      calib[g] = 0; drain[g] = 0; cu_valid[g] = 0; cu_req[g] = '0;
      first_dma[g] = -1; gemm_end[g] = 0;
    end
    @(negedge clk) rst_n = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;

    for (int g = 0; g < ng; g++)
      fork
        automatic int gg = g;
        configure(gg);
      join_none
    wait fork;

    // the fused GEMM + reduce-scatter; the first step is the MCA calibration window
    for (int g = 0; g < ng; g++) calib[g] = 1'b1;
    for (int g = 0; g < ng; g++)
      fork
        automatic int gg = g;
        run_gemm(gg);
      join_none
    wait fork;

    quiet = 0;
    while (quiet < 50) begin
      @(posedge clk);
      quiet = all_idle() ? quiet + 1 : 0;
    end
    for (int g = 0; g < ng; g++) drain[g] = 1'b0;

    for (int g = 0; g < ng; g++) begin
      check_result(g);
      $display("%0d-GPU ring, GPU %0d: remote_tx=%0d dma_tx=%0d rx=%0d trig=%0d blocks=%0d nmc=%0d thr=%0d%s blocked=%0d starve=%0d drain=%0d trk_stall=%0d first_dma=%0d gemm_end=%0d",
               ng, g, stats[g].remote_tx, stats[g].dma_tx, stats[g].rx, stats[g].triggers,
               stats[g].dma_blocks, stats[g].dram_updates, stats[g].mca_thr,
               stats[g].mca_nolimit ? "(none)" : "", stats[g].mca_blocked,
               stats[g].mca_starve, stats[g].mca_drain, stats[g].trk_stalls,
               first_dma[g], gemm_end[g]);
      check(stats[g].remote_tx == 32'(4 * npairs), $sformatf("GPU %0d remote_updates %0d", g, stats[g].remote_tx));
      check(stats[g].triggers == 32'(2 * npairs * (ng - 2)), $sformatf("GPU %0d triggers %0d", g, stats[g].triggers));
      check(stats[g].dma_blocks == 32'(npairs * (ng - 2)), $sformatf("GPU %0d DMA blocks %0d", g, stats[g].dma_blocks));
      check(stats[g].dma_tx == 32'(4 * npairs * (ng - 2)), $sformatf("GPU %0d DMA packets %0d", g, stats[g].dma_tx));
      check(stats[g].rx == 32'(4 * npairs * (ng - 1)), $sformatf("GPU %0d received %0d", g, stats[g].rx));
      check(stats[g].dram_updates == 32'(8 * npairs * (ng - 1)), $sformatf("GPU %0d NMC updates %0d", g, stats[g].dram_updates));
      check(stats[g].dma_unmatched == 0, $sformatf("GPU %0d unmatched triggers", g));
      check(first_dma[g] >= 0 && first_dma[g] < gemm_end[g],
            $sformatf("GPU %0d: DMA did not overlap the GEMM", g));
      tot_r += int'(stats[g].remote_tx); tot_t += int'(stats[g].triggers);
      tot_d += int'(stats[g].dma_blocks); tot_n += int'(stats[g].dram_updates);
      tot_b += int'(stats[g].mca_blocked); tot_s += int'(stats[g].mca_starve);
      tot_dr += int'(stats[g].mca_drain); tot_cal += int'(!stats[g].mca_nolimit);
    end
    check(bad_dst == 0, "packet sent to a GPU that is not the ring neighbour");
  endtask

  initial begin
    for (int g = 0; g < NG; g++) begin
      tx_ready[g] = 1; rx_valid[g] = 0; rx_pkt[g] = '0;
    end
    run_ring(8, 8);      // TP = 8: 8 chunks of 16 columns
    run_ring(16, 4);     // TP = 16: 16 chunks of 8 columns (56 DMA blocks per GPU)

    // every mechanism must have happened somewhere
    check(tot_r > 0, "no remote_update");
    check(tot_t > 0, "no Tracker trigger");
    check(tot_d > 0, "no DMA block");
    check(tot_n > 0, "no near-memory update");
    check(tot_cal > 0, "MCA calibration never chose a threshold");
    check(tot_b > 0, "MCA never held communication back");
    check(tot_s > 0, "MCA starvation limit never used");
    check(tot_dr > 0, "MCA drain never used");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
