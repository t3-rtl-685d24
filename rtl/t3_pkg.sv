// t3_pkg: types and constants shared by the T3 memory-side blocks.
//
// T3 fuses a producer kernel (a GEMM) with the reduce-scatter that follows it.
// Every memory request and network packet carries the producing workgroup (wg_id)
// and wavefront (wf_id) as metadata, so that the Tracker at the memory controller
// can count the updates to each wavefront's output tile.
//
// Widths that follow the paper: wf_id is 3 bits (at most eight wavefronts per
// workgroup); the Tracker has 256 sets indexed by the 8 low bits of wg_id and one
// wg_msb tag bit (the "0-000" ... "1-111" tags of the Tracker figure), so wg_id is
// 9 bits: the workgroup index modulo the largest stage (512 WGs). The 32-byte access
// granule matches the "wf_tile_size/32" term of the Tracker threshold.
// This design's own choices: 48-bit virtual addresses, 6-bit GPU ids (up to 64
// GPUs), 16-bit access counters, one 32-byte word (16 FP16 lanes) per access.
package t3_pkg;

  localparam int unsigned VA_W     = 48;   // virtual address width (own choice)
  localparam int unsigned GRAN_B   = 32;   // bytes per memory access
  localparam int unsigned GRAN_SH  = 5;    // log2(GRAN_B)
  localparam int unsigned DATA_W   = GRAN_B * 8;
  localparam int unsigned LANES    = DATA_W / 16;  // FP16 lanes per access
  localparam int unsigned WG_LSB_W = 8;    // Tracker set index (paper: 8 bits)
  localparam int unsigned WG_MSB_W = 1;    // Tracker tag bits from wg_id
  localparam int unsigned WG_W     = WG_LSB_W + WG_MSB_W;
  localparam int unsigned WF_W     = 3;    // paper: three bits, 8 WFs per WG
  localparam int unsigned GPU_W    = 6;
  localparam int unsigned CNT_W    = 16;   // Tracker access counter
  localparam int unsigned UPD_W    = 4;    // total updates expected per element

  // Kind of memory access. OP_UPDATE is the near-memory op-and-store (add).
  typedef enum logic [1:0] {
    OP_READ   = 2'd0,
    OP_STORE  = 2'd1,
    OP_UPDATE = 2'd2
  } mem_op_e;

  // Region kinds set by remote_map / dma_map.
  typedef enum logic [1:0] {
    REG_LOCAL  = 2'd0,   // plain local memory
    REG_REMOTE = 2'd1,   // remote_map: stores go straight to a peer GPU
    REG_DMA    = 2'd2    // dma_map: local updates are tracked and later DMA'd
  } region_kind_e;

  // Source of a request inside the memory controller; selects where read data returns.
  typedef enum logic {
    SRC_CU  = 1'b0,
    SRC_DMA = 1'b1
  } req_src_e;

  typedef struct packed {
    mem_op_e            op;
    logic [VA_W-1:0]    va;
    logic [DATA_W-1:0]  data;
    logic [WG_W-1:0]    wg_id;
    logic [WF_W-1:0]    wf_id;
    logic               track;   // count this access in the Tracker
    logic [CNT_W-1:0]   thresh;  // Tracker threshold for this access's tile
    req_src_e           src;
    logic [3:0]         tag;     // requester's tag, returned with read data
  } mem_req_t;

  // Request from a compute unit (after the L2/LLC: uncached output stores and misses).
  typedef struct packed {
    mem_op_e            op;      // OP_UPDATE when the kernel carries the "update" flag
    logic [VA_W-1:0]    va;
    logic [DATA_W-1:0]  data;
    logic [WG_W-1:0]    wg_id;
    logic [WF_W-1:0]    wf_id;
    logic [3:0]         tag;
  } cu_req_t;

  // Packet between GPUs: a remote_update from a GEMM store or a dma_update.
  typedef struct packed {
    logic [GPU_W-1:0]   dst_gpu;
    mem_op_e            op;      // OP_STORE or OP_UPDATE
    logic [VA_W-1:0]    va;
    logic [DATA_W-1:0]  data;
    logic [WG_W-1:0]    wg_id;
    logic [WF_W-1:0]    wf_id;
  } net_pkt_t;

  // One entry of the output address-space map.
  typedef struct packed {
    logic               valid;
    logic [VA_W-1:0]    base;
    logic [VA_W-1:0]    size;          // bytes
    region_kind_e       kind;
    logic [GPU_W-1:0]   remote_gpu;    // REG_REMOTE: destination GPU
    logic [VA_W-1:0]    remote_base;   // REG_REMOTE: base address in the peer
    logic [UPD_W-1:0]   total_updates; // REG_DMA: updates per element before DMA
  } region_t;

  // One pre-programmed DMA command (a row of the DMA request table).
  typedef struct packed {
    logic [VA_W-1:0]    src_va;        // smallest source address of the block
    logic [VA_W-1:0]    span;          // bytes from src_va that belong to the block
    logic [GPU_W-1:0]   dst_gpu;
    logic [VA_W-1:0]    dst_va;
    mem_op_e            op;            // store or update at the destination
    logic [7:0]         tiles;         // wf_tiles per block
  } dma_cmd_t;

  // DMA block geometry, from wf_tile_size and the output dimension M (column major).
  typedef struct packed {
    logic [VA_W-1:0]    col_stride;    // bytes between columns = M * element bytes
    logic [15:0]        col_bytes;     // bytes of one wf_tile inside one column
    logic [15:0]        cols;          // columns of one wf_tile
  } dma_geom_t;

  // Event counters and state of one node, for measurement and tests.
  typedef struct packed {
    logic [31:0] remote_tx;      // remote_update packets sent by GEMM stores
    logic [31:0] dma_tx;         // dma_update packets sent by the DMA engine
    logic [31:0] rx;             // packets received
    logic [31:0] triggers;       // Tracker triggers
    logic [31:0] trk_stalls;     // cycles a Tracker set was full
    logic [31:0] dma_blocks;     // DMA blocks started
    logic [31:0] dma_unmatched;  // triggers that matched no DMA entry
    logic [31:0] mca_blocked;    // cycles communication was held back by the threshold
    logic [31:0] mca_starve;     // communication grants forced by the starvation limit
    logic [31:0] mca_drain;      // communication grants allowed only by drain
    logic [31:0] dram_reads;
    logic [31:0] dram_writes;
    logic [31:0] dram_updates;   // near-memory op-and-store commands
    logic [6:0]  mca_thr;
    logic        mca_nolimit;
    logic        idle;           // no request or packet in flight inside the node
  } node_stats_t;

endpackage
