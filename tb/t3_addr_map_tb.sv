// t3_addr_map_tb: programs GPU-0's mapping for a 4-GPU ring reduce-scatter (chunk 0
// remote_mapped to GPU-3, chunks 1 and 2 dma_mapped with two updates per element,
// chunk 3 local) and checks the kind, translated address, GPU and threshold of
// random addresses on both ports against a reference computed here.
module t3_addr_map_tb;
  import t3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               cfg_we;
  logic [2:0]         cfg_idx;
  region_t            cfg_region;
  logic [CNT_W-1:0]   wf_tile_gran;
  logic [VA_W-1:0]    a_va, a_remote_va, b_va;
  region_kind_e       a_kind, b_kind;
  logic [GPU_W-1:0]   a_remote_gpu;
  logic [CNT_W-1:0]   a_thresh, b_thresh;

  t3_addr_map dut (.*);

  int checks = 0, failures = 0;
  localparam longint BASE  = 48'h10_0000;
  localparam longint CHUNK = 48'h2000;
  localparam longint RBASE = 48'h70_0000;

  task automatic program_region(input int idx, input longint base, input longint size,
                                input region_kind_e k, input int gpu, input longint rb,
                                input int upd);
    @(negedge clk);
    cfg_we = 1; cfg_idx = 3'(idx);
    cfg_region = '{valid: 1'b1, base: VA_W'(base), size: VA_W'(size), kind: k,
                   remote_gpu: GPU_W'(gpu), remote_base: VA_W'(rb), total_updates: UPD_W'(upd)};
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint va;
    int c;
    region_kind_e ek;
    cfg_we = 0; cfg_idx = 0; cfg_region = '0; wf_tile_gran = 16; a_va = 0; b_va = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    program_region(0, BASE, CHUNK, REG_REMOTE, 3, RBASE, 0);
    program_region(1, BASE + CHUNK, CHUNK, REG_DMA, 3, 0, 2);
    program_region(2, BASE + 2 * CHUNK, CHUNK, REG_DMA, 3, 0, 2);
    for (int n = 0; n < 3000; n++) begin
      va = BASE - 48'h1000 + longint'($urandom_range(0, 'h9fff));
      @(negedge clk);
      a_va = VA_W'(va); b_va = VA_W'(va ^ 48'h20);
      #1;
      c = (va < BASE) ? -1 : int'((va - BASE) / CHUNK);
      ek = (c == 0) ? REG_REMOTE : (c == 1 || c == 2) ? REG_DMA : REG_LOCAL;
      checks++;
      if (a_kind != ek || (ek == REG_DMA && a_thresh != 32) || (ek != REG_DMA && a_thresh != 0) ||
          (ek == REG_REMOTE && (a_remote_va != VA_W'(RBASE + va - BASE) || a_remote_gpu != 3))) begin
        failures++;
        if (failures < 10) $display("FAIL va %h kind %0d va' %h thr %0d", va, a_kind, a_remote_va, a_thresh);
      end
      va = va ^ 48'h20;
      c = (va < BASE) ? -1 : int'((va - BASE) / CHUNK);
      ek = (c == 0) ? REG_REMOTE : (c == 1 || c == 2) ? REG_DMA : REG_LOCAL;
      checks++;
      if (b_kind != ek || (ek == REG_DMA && b_thresh != 32)) begin
        failures++;
        if (failures < 10) $display("FAIL port B va %h kind %0d", va, b_kind);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
