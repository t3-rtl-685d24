// t3_addr_map: the producer's output address-space configuration.
//
// T3 needs no change to the GEMM kernel: the runtime maps the output array so that
// stores themselves start the collective. remote_map makes a chunk's stores go to a
// peer GPU (the first ring step); dma_map keeps a chunk local, has its updates
// counted by the Tracker and names the number of updates per element after which the
// chunk is DMA'd (two for ring reduce-scatter). This block holds those mappings as a
// table of REGIONS address ranges and classifies addresses on two ports:
//   port A, the compute units' stores: kind, translated address and GPU for remote
//   stores, and the Tracker threshold (wf_tile_size/32) * total_updates;
//   port B, writes arriving from other GPUs: kind and threshold.
// Addresses in no region are plain local memory. The paper gives the function (API
// calls that program the mapping); the range table, REGIONS = 8 and lowest-index
// priority are this design's choices.
// Timing: lookups are combinational; a table write takes effect the next cycle.
module t3_addr_map
  import t3_pkg::*;
#(
  parameter int unsigned REGIONS = 8,
  localparam int unsigned RW = $clog2(REGIONS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [RW-1:0]      cfg_idx,
  input  region_t            cfg_region,
  input  logic [CNT_W-1:0]   wf_tile_gran,   // wf_tile_size / 32
  // port A: local stores
  input  logic [VA_W-1:0]    a_va,
  output region_kind_e       a_kind,
  output logic [VA_W-1:0]    a_remote_va,
  output logic [GPU_W-1:0]   a_remote_gpu,
  output logic [CNT_W-1:0]   a_thresh,
  // port B: incoming remote / DMA writes
  input  logic [VA_W-1:0]    b_va,
  output region_kind_e       b_kind,
  output logic [CNT_W-1:0]   b_thresh
);
  region_t tbl [REGIONS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < REGIONS; r++) tbl[r] <= '0;
    end else if (cfg_we) begin
      tbl[cfg_idx] <= cfg_region;
    end
  end

  function automatic logic in_region(input region_t r, input logic [VA_W-1:0] va);
    return r.valid && (va >= r.base) && (va - r.base < r.size);
  endfunction

  always_comb begin
    a_kind = REG_LOCAL; a_remote_va = a_va; a_remote_gpu = '0; a_thresh = '0;
    b_kind = REG_LOCAL; b_thresh = '0;
    for (int r = REGIONS - 1; r >= 0; r--) begin
      if (in_region(tbl[r], a_va)) begin
        a_kind       = tbl[r].kind;
        a_remote_va  = tbl[r].remote_base + (a_va - tbl[r].base);
        a_remote_gpu = tbl[r].remote_gpu;
        a_thresh     = CNT_W'(wf_tile_gran * CNT_W'(tbl[r].total_updates));
      end
      if (in_region(tbl[r], b_va)) begin
        b_kind   = tbl[r].kind;
        b_thresh = CNT_W'(wf_tile_gran * CNT_W'(tbl[r].total_updates));
      end
    end
  end
endmodule
