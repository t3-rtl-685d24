# T3 memory-side hardware in SystemVerilog

## The idea

In tensor-parallel training and inference, a layer's matrix multiply (GEMM) is followed
by a reduce-scatter: every GPU holds a full-size partial output, and the partial outputs
must be summed so that each GPU ends up with one reduced slice. Normally the collective
starts only after the GEMM kernel finishes. It then runs as a separate kernel that takes
compute units away, reads each chunk twice, and writes it again.

T3 ("transparent tracking and triggering") lets the GEMM's own stores drive the
collective instead. The GEMM is not changed. The driver maps the GEMM's output so that:

* **remote_map.** Stores to the chunk that leaves first go straight to the ring
  neighbour as remote updates.
* **Near-memory accumulation.** Every other output store is an *update*. The memory adds
  it to what is already in DRAM (near-memory op-and-store), so local partial sums and
  sums arriving from the neighbour accumulate in place, in any order.
* **dma_map.** A small table in the memory controller, the **Tracker**, counts the
  updates that reach each wavefront's output tile. When a tile has all of them (its own
  store plus the neighbour's, two per element for a ring), the Tracker triggers a DMA
  that the driver set up in advance. The DMA reads the reduced tile once and sends it
  as an update to the next GPU.
* **MCA (communication-aware arbitration).** The memory controller keeps the bursty
  communication traffic from filling the DRAM queue ahead of the GEMM's reads.

The result is a reduce-scatter that overlaps the GEMM at the granularity of wavefront
tiles. It uses no compute units and reads the data once instead of twice.

This repository gives RTL for everything on the memory side of one GPU that this needs.
That is the address map, the memory controller with the Tracker and MCA, a DRAM model
with near-bank FP16 adders, the DMA request table and the DMA engine, plus a ring testbench
that runs a complete fused GEMM + reduce-scatter through 8 and then 16 of them. The GPU's
compute units, its caches, the inter-GPU links and the HBM device are existing parts; they
appear as ports, or as models in the testbenches.

## One node: `t3_node`

```
 CU requests ──► t3_addr_map (port A) ──┬─ remote_map store ─► tx arbiter ─► tx (to GPU g-1)
 (cu_req_t)                             │                          ▲
                                        └─ everything else         │ dma_update packets
                                              │ compute stream     │
 rx (from GPU g+1) ─► t3_addr_map (port B) ─► mem_ctrl ◄── reads ── dma_engine
                       communication stream   │  ├ CQ / comm queue   ▲
                                              │  ├ mca_arbiter       │ ready blocks
                                              │  ├ MCQ ─► nmc_dram   │
                                              │  └ t3_tracker ─ trigger ─► dma_req_table
```

* **The address map** (`t3_addr_map`) holds the driver's regions. Each region has a base
  and size, a kind, and some kind-specific fields:
  - **local**: no extra fields.
  - **remote** (remote_map): a peer GPU and a base address in that peer.
  - **dma** (dma_map): the number of updates per element before the chunk is complete.

  A CU store to a remote region becomes a `net_pkt_t` carrying the translated address,
  the data, the update flag and the `{wg_id, wf_id}` of the wavefront that wrote it.
  Everything else enters the compute stream. Writes to dma regions are marked to be
  tracked and carry their threshold, `(wf_tile_size/32) * total_updates`. Packets from
  the ring are classified the same way (port B) and enter the communication stream.
* **The memory controller** (`mem_ctrl`) has a compute queue and a communication queue.
  The communication queue merges ring writes and DMA reads round-robin. An MCA arbiter
  picks which queue head moves into the DRAM command queue (MCQ). When a tracked write
  enters the MCQ, a copy of its `{wg, wf, va, threshold}` goes through a small queue to
  the Tracker, off the critical path. Read data returns by tag, either to the CUs or to
  the DMA engine.
* **The DRAM** (`nmc_dram`) executes three commands: read, store and update.
  - An update reads the 32-byte word, adds the 16 FP16 lanes with `fp16_add` (through
    `nmc_alu`), and writes the result back.
  - One command is accepted per cycle, which makes updates atomic.
  - A bank group is busy for CCDL = 2 cycles after a read or store, and for
    CCDWL = 4 cycles after an update.
* **The DMA path**: a Tracker trigger goes to `dma_req_table`, then to `dma_engine`. The
  engine reads the reduced data through the communication stream and sends `dma_update`
  packets to tx.
* **The tx port** is shared round-robin between remote stores and DMA packets.

The node's `stats` output (`node_stats_t`) counts every mechanism: remote updates, DMA
packets, triggers, Tracker stalls, DMA blocks, unmatched triggers, MCA held-back cycles,
starvation grants, drain grants, and DRAM reads, writes and updates.

## The Tracker, in detail

Counting "has this data arrived yet" by address would need either a range per chunk or
a table per address. A tiled GEMM's output tile is not contiguous in column-major memory:
a 16-row x 2-column tile is two separate 32-byte pieces, 64 or more bytes apart. The
Tracker therefore counts by *who wrote it* instead: every output tile belongs to exactly
one wavefront, and every memory request carries `wg_id` and `wf_id`.

`t3_tracker` is a set-associative table:

* **Sets.** There are 256 sets, indexed by the low 8 bits of the workgroup id
  (`wg_lsb`).
* **Tags.** Each way is tagged with `{wg_msb, wf_id}`: 1 bit of workgroup MSB, so up to
  512 workgroups per GEMM stage, and 3 bits of wavefront, so up to 8 wavefronts per
  workgroup.
* **Way contents.** Each way holds a 16-bit access counter and a start address.
* **Ways.** There are 8 per set. At 48-bit addresses that is about 18 KB of state, close
  to the 19 KB the design is meant to cost.

For each counted write the Tracker does the following:

1. **Hit.** The counter is incremented, and the start address becomes the smaller of the
   stored one and the write's address. No message ever says where a tile starts, so the
   smallest address seen *is* the tile's start.
2. **Miss.** The lowest free way is allocated, with count 1 and the write's address.
3. **Complete.** If the new count reaches the threshold carried with the write, the way
   is freed and a trigger `{wg_id, wf_id, start VA}` is raised in the next cycle.
4. **Full set.** If the set is full, or the previous trigger has not been taken, the
   update waits. Those cycles are counted as `trk_stalls`.

The threshold is in 32-byte accesses. A tile of `wf_tile_size` bytes that each element
updates twice needs `2 * wf_tile_size/32` counted writes. These can come from any mix of
the local GEMM, a remote_update and a dma_update, in any order.

The tags are why the ids must travel with the data. A remote store and a DMA packet
carry the *producer's* `{wg_id, wf_id}`. The receiving GPU runs the same GEMM, so its
wavefront with those ids writes the same tile. Both contributions then land in the same
Tracker entry.

## From trigger to packets

`dma_req_table` holds the DMA commands the driver programs before the GEMM starts. Each
command has:
* the source start address and the span of source addresses it covers;
* the destination GPU and the destination start address;
* the operation: store or update;
* the number of wavefront tiles in the block.

A trigger is matched by range against all entries in parallel; the lowest index wins.
Each match increments the entry's tile counter, and the entry becomes ready when the
counter reaches the block's tile count. The entry keeps the ids of the trigger that
starts at the block's source address, i.e. its first tile.

`dma_engine` stores no address lists. It rebuilds the block's addresses from three
numbers:
* the column stride (M rows x 2 bytes);
* the bytes of one tile inside one column;
* the number of columns in a tile.

A block of `t` tiles covers `t * col_bytes` bytes down each column. For each 32-byte
word, in column order, the engine issues one read into the communication stream. It
keeps up to 8 reads in flight in an in-order buffer. When the data returns it sends one
packet, at the same offset from the destination start, with `wf_id + i` for the i-th tile
down the column. With no back-pressure, one word leaves per cycle.

## Near-memory reduction and MCA

All output writes are uncached, so DRAM is the one place where the local, remote and DMA
contributions meet. Because the MCQ issues one command at a time and an update is a
single command, concurrent updates to a word cannot lose a sum.

`mca_arbiter` applies the following rules:
* **Compute first.** Compute requests always go first.
* **Threshold.** Communication requests go only when the compute queue is empty and the
  MCQ holds fewer than `thr` entries. The MCQ must be below capacity in both cases.
* **Starvation.** If communication has waited `cfg_starve` cycles since its last grant,
  it goes first.
* **Drain.** While `drain` is high (the producer kernel has ended), the threshold is
  ignored.

The threshold is learned while `calib` is high, during the GEMM's first stage, which runs
before any communication exists. The arbiter averages MCQ occupancy over that window and
picks a threshold from it:

| Average occupancy over the calibration window | Threshold `thr` |
|---|---|
| at least 1/2 of the queue | 5 |
| at least 1/4 | 10 |
| at least 1/8 | 30 |
| lower | no limit |

A fixed threshold can be forced with `cfg_auto = 0`.

## Programming a ring reduce-scatter

For N GPUs, GPU g in step s produces chunk (g+s-1) mod N; the GPUs are staggered so that
each produces a different chunk at any time. GPU g's driver sets regions as follows:

| Chunk | Region kind | Programming |
|---|---|---|
| g | remote | to GPU g-1, same offset |
| g+1 … g+N-2 | dma | `total_updates = 2`; one DMA command per block: update, same address on GPU g-1. Contiguous except where the chunk numbers wrap, so two regions are enough |
| g+N-1 | local | none; this is where the reduced result ends up |

The output must be zeroed before the map is written, because every output write is an
accumulate. `tb/t3_ring_tb.sv` does exactly this for N = 8 and N = 16, and is the reference for how
to drive the configuration ports.

## Types and interfaces

`t3_pkg` holds the shared widths and types:
* **Widths:** 48-bit virtual address, 32-byte access (`DATA_W = 256`, 16 FP16 lanes),
  9-bit `wg_id` (8 LSB + 1 MSB), 3-bit `wf_id`.
* **Structs:** `cu_req_t`, `mem_req_t`, `net_pkt_t`, `region_t`, `dma_cmd_t`,
  `dma_geom_t` and `node_stats_t`.

Handshakes:
* Every stream is valid/ready, and assertions check that held requests stay stable.
* Read-return ports (`cu_rsp_*`, and the DMA engine's read data) cannot be stalled.
* Reset is asynchronous, active low.

Timing:
* Address-map lookups are combinational.
* A Tracker trigger follows its completing update by one cycle.
* A DMA table entry becomes ready in the cycle after its last trigger.

## Where this departs from the paper's evaluation

* **Tracker ways.** Eight, chosen to match the stated size.
* **Table and queue sizes.** The DMA table has 64 entries, the MCQ 64, and the compute
  and communication queues 16 each. None of these is specified.
* **Calibration bands.** The occupancy bands that map to thresholds 5/10/30/none are
  this design's own. The stated rule is only "smaller for memory-intensive kernels".
  The starvation limit is programmable.
* **DRAM.** The model is 8192 words (256 KB) with a fixed read latency of 4 and the bank
  group taken from the low address bits. It is far smaller than an HBM2 stack. The
  other HBM timings, refresh and row buffers are not modelled; only the bank-group
  command spacing is (CCDL = 2, CCDWL = 4).
* **Tile ids in multi-tile DMA blocks.** Tile i of a block is sent with `wf_id + i`. This
  assumes a workgroup's wavefronts are stacked down the column, as in the figure where
  wf 0 and wf 1 of a workgroup start 0x40 apart.
* **Reads from a remote-mapped region.** These are served locally. The GEMM only writes
  its output.
* **Sizing for full models.** For the evaluated models (Mega-GPT-2 and T-NLG at TP 8/16;
  GPT-3, PALM and MT-NLG at TP 32):
  - The Tracker has room for a stage's wavefronts, assuming a 256x128 output tile per
    workgroup.
  - The 256 KB DRAM model does not hold the output arrays (48–96 MB).
  - The 64-entry DMA table does not hold a stage's blocks unless the driver refills
    entries as they free.

  The largest runs simulated are the 8- and 16-GPU rings below, at default parameters,
  with a small output matrix of 8 KB per GPU.

  A 32-GPU ring with the same 8 KB matrix fits the tables: 4 regions, and 60 of the 64
  DMA entries. It has not been simulated.
* **Only ring reduce-scatter is exercised.** The other collectives are meant as
  configuration changes only, and the RTL supports them, but none has been run:
  - **Direct reduce-scatter:** several remote regions, each pointing at a different GPU.
  - **All-gather:** DMA commands with the store operation and one write per element.
* **Split-K GEMMs are not handled.** Split-K lets several workgroups write one tile.
  Handling it would mean the Tracker merging entries by address, which was only outlined
  as a possible extension.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| Testbench | What it checks |
|---|---|
| `fp16_add_tb` | special values and 60,000 random pairs against a real-number reference rounded to nearest-even |
| `nmc_dram_tb` | stores, updates and reads against a model; command spacing of 2 cycles (same bank group), 4 after an update, 1 across groups |
| `t3_tracker_tb` | random interleaved tiles against a reference model: trigger count, start VA, ids, set-full stalls |
| `dma_req_table_tb` | the figure's rows 16, 17 and 47, then random multi-tile blocks triggered in random order |
| `dma_engine_tb` | address, data, ids and operation of every packet under random back-pressure; one word per cycle when unstalled |
| `mca_arbiter_tb` | calibration choices, then 20,000 random cycles against a reference including starvation and drain |
| `t3_addr_map_tb` | the four-GPU example map: classification, translation, thresholds |
| `mem_ctrl_tb` | trigger after exactly four tracked updates with the smallest address; read routing; MCQ capped at the threshold under a flood, and filling further with drain |
| `t3_ring_tb` | rings of 8 and then 16 `t3_node`s at default parameters with a 700-cycle link (500 ns at 1.4 GHz), running the whole fused GEMM + reduce-scatter |

`t3_ring_tb` checks:
* every GPU's final chunk against the sum of all contributions;
* exact event counts per GPU. In the 8-GPU run these are 32 remote updates, 96 triggers,
  48 DMA blocks, 192 DMA packets, 224 received packets and 448 near-memory updates;
* that every packet went to the ring neighbour;
* that each GPU's first DMA starts before its GEMM ends (overlap);
* that calibration, threshold blocking, starvation and drain all occurred.

To run one with Verilator:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/t3_pkg.sv $(ls rtl/*.sv | grep -v t3_pkg) \
          tb/t3_ring_tb.sv --top-module t3_ring_tb
./obj_dir/Vt3_ring_tb
```

The package has to come first. Any other testbench is run the same way with its own
name. The ring test takes about a minute to build and seconds to run.
