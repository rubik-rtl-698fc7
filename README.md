# Rubik-style graph learning accelerator in SystemVerilog

A graph neural network layer has two phases per node. Aggregation
gathers the feature vectors of the node's neighbours and reduces them
(sum or max). Combination multiplies the aggregate by a weight matrix.
Aggregation is irregular and limited by memory. Combination is a dense
matrix-vector product and limited by compute.

This design attacks both phases with reuse at two levels:

* **Graph level.** The graph is reordered ahead of time so that nodes with
  many common neighbours get consecutive numbers. A window of consecutive
  nodes is then given to one processing element (PE). While the PE works
  through its window, the neighbour features it fetched for one node are
  still in its private feature cache (G-D) when the next node needs them.
* **Node level.** Two neighbours that several nodes share can be treated
  as a pair. The reduced pair (a partial aggregate) is computed once and
  kept in a second private cache (G-C). Every later node that has both
  neighbours fetches one cached line instead of two.

Weights live in a shared on-chip global buffer. The current 32x32 weight
tile stays in the register files of a PE's MAC array, so consecutive
multiplications by the same tile skip the reload.

The RTL is a complete, cycle-level implementation of the accelerator
chip: an 8x8 PE array, the global buffer, a horizontal on-chip network,
two memory controllers and the instruction scheduler/mapper. The graph
reordering, the choice of pairs and the generation of the instruction
stream are host software. They are not part of the RTL. The testbench
driver `tb/gcn_driver.sv` contains a small version of them.

## Top level

```
             host commands
                  |
          scheduler_mapper ---- global_buffer (2 MB, one line/cycle, round-robin)
           | per-PE queue              | weight lines
   +-------+-----------+---------------+--------+
   |  PE(0,0) - router - PE(0,1) - router - ... |  row 0
   |  ...                                       |
   |  PE(7,0) - router - ...       - PE(7,7)    |  row 7
   +--------------------------------------------+
 mem_ctrl left                         mem_ctrl right
      |  DRAM channel 0                     |  DRAM channel 1
```

`rubik_top` contains the following blocks:

* `PE_ROWS x PE_COLS` (8x8) `pe` instances, each with a `noc_router`.
* One `global_buffer`.
* One `scheduler_mapper`.
* Two `mem_ctrl`, one at the left edge and one at the right edge of the
  array.

Its ports are:

* A host command port. It carries valid/ready and a `host_cmd_t`.
* Two DRAM channel ports. Requests carry the requesting PE's coordinates.
  Responses return them.
* `busy`: high while any PE, router or controller holds work.
* `perf`: the event counters of all PEs, summed.
* `mem_lines`: the number of lines each controller has issued.

All sequential logic uses one clock (500 MHz intended) and an active-low
synchronous reset. Reset clears valid bits, pointers, counters and state.
Data arrays are not reset.

## Data format

* Features and weights are 16-bit signed fixed point (`rubik_pkg::ELEM_W`).
* One memory line is 64 bytes: 32 elements, the width of one feature
  *chunk*.
* A node's feature vector of dimension D occupies ceil(D/32) consecutive
  lines. The line address of chunk `c` of node `v` is `LBASE + v*LSTRIDE + c`.
* Products accumulate in 32-bit accumulators.
* A store shifts the accumulator right by `FRAC` = 8 bits, saturates it
  to 16 bits and can apply ReLU.
* Sum aggregation saturates at the 16-bit limits. Every clipped element
  is counted in `perf.sat`.

## Micro-instructions

The host turns each node's work into a *task*, a short list of 64-bit
micro-instructions (`instr_t`):

| field | bits | meaning |
|---|---|---|
| `op` | 4 | opcode |
| `flags` | 4 | bit 0 FIRST (start a new aggregate), bit 1 MAX (max instead of sum), bit 2 RELU |
| `node_a` | 18 | node |
| `node_b` | 18 | second node of a pair, or output tile number |
| `idx` | 20 | chunk number, or global-buffer line |

| op | effect |
|---|---|
| `LOADF a, c` | aggregate chunk `c` of node `a`'s features: G-D lookup, memory read on a miss |
| `LOADI a, b, c` | aggregate the partial result of the pair (a,b), chunk `c`: G-C lookup; on a miss, load both nodes (through G-D), reduce them, fill G-C, then aggregate |
| `COMP t, w` | output tile `t` += weight tile at global-buffer line `w` x aggregate |
| `STORE a, t` | requantise output tile `t` and write it as one line to `SBASE + a*SSTRIDE + t`; clear the tile |
| `CFG r, v` | set LBASE, LSTRIDE, SBASE or SSTRIDE |
| `INV` | invalidate G-D, G-C and the resident weight tile |

LOADF, LOADI, COMP and STORE are the four primitives of the programming
model. CFG and INV are housekeeping added by this design. With FIRST
clear, a load reduces into the running aggregate. With FIRST set, the
load replaces it.

The caches are not coherent with memory. A layer's outputs are written
to a region that the same layer never reads. The driver broadcasts INV
between layers.

A layer with output width H and input dimension D needs the following
program for each node:

1. For each chunk: one FIRST load, then loads for the remaining
   neighbours and pairs.
2. For each chunk: one COMP per output tile (H/32 tiles).
3. One STORE per output tile.

The weight tile for (chunk `c`, output tile `t`) sits at global-buffer
lines `(c*T + t)*32 .. +31`. Row `k` of the tile holds the weights of
output `k`.

## Inside a PE (`pe`, `pe_ctrl`)

A PE holds the following blocks:

* `instr_queue`: 16 entries.
* `pe_ctrl`: the controller.
* `gd_cache` and `gc_cache`: 64 KB each.
* `mac_array`: 4x8 `mac_unit`s, each with a 32-entry register file and
  8 accumulators.
* `ld_st_queue` (LSQ): 8 entries.
* `noc_queue`: 4 entries each way.

The controller runs one instruction at a time. Loads block: the next
instruction starts only after the current load's line has been reduced
into the aggregate. Stores are posted.

Timing of each instruction:

* **LOADF, G-D hit.** The lookup is issued in one cycle. Hit and data
  arrive in the next. The line is reduced in the cycle after.
* **LOADF, G-D miss.** The request enters the LSQ, which can stall if
  the LSQ is full (counted in `perf.lsq_stall`). The request then passes
  the NoC queue and the row's routers to a memory controller. When the
  data returns it fills G-D and is reduced.
* **LOADI.** A G-C hit costs the same as a G-D hit. On a miss the
  controller loads `a`, then `b`, each through G-D. It reduces the two
  lines, writes the pair line into G-C, and reduces it into the
  aggregate. The G-C key ignores the order of the two nodes and includes
  the chunk and the MAX flag.
* **COMP.**
  * If the requested tile is not resident, the controller requests its
    32 lines from the global buffer. The buffer grants one PE per cycle,
    so a full load takes at least 32 cycles. Each returned line is
    written into the register file of MAC unit `k` (row `k` of the tile).
  * If the tile's address matches the resident one, the load is skipped.
    This is counted in `perf.w_reuse`.
  * The array then runs 32 cycles. In cycle `j` every MAC unit `k`
    adds `W[k][j] * x[j]` into accumulator tile `t`.
  * A 32x32 tile-chunk product therefore takes 32 cycles on 32 MACs.
* **STORE.** Reads the 32 accumulators of tile `t`. Writes one requantised
  line into the LSQ and clears the tile.

The controller's counters in `perf`:

* G-D hits and misses.
* G-C hits and misses.
* Weight loads and weight reuses.
* LSQ stall cycles.
* Saturated elements.

## Caches (`gd_cache`, `gc_cache`)

Both caches have the following organisation:

* 256 sets x 4 ways of 64-byte lines: 64 KB each, 128 KB per PE.
* LRU replacement. An age is kept per way; 0 is the most recent.
* A lookup answers in the next cycle. Tags are in flops and data is read
  synchronously.
* A fill takes one cycle.
* INV clears all valid bits in one cycle.

The two caches differ in how they are indexed:

* **G-D** is indexed by the low bits of the line address.
* **G-C** is indexed by the XOR of both node ids and the chunk. It is
  tagged with the full key {max flag, smaller node, larger node, chunk}.
  Storing the full key leaves no aliasing.

A store is write-through. It goes to memory and is not allocated in
either cache.

## On-chip network (`noc_router`, `noc_lane`) and memory controllers (`mem_ctrl`)

Every memory access travels horizontally within its row:

* A request goes to the left or right controller. Bit 0 of its line
  address chooses the controller, so the two controllers share the
  traffic evenly.
* Read data travels back along the same row.

Each router has four one-way lanes:

* Requests west.
* Requests east.
* Responses west.
* Responses east.

Requests and responses never share a lane, so read data cannot be stuck
behind requests. Vertical links are not built, because this routing
never uses them.

At each hop a lane arbitrates round-robin between through traffic and
the local PE. The winner enters a 2-entry output buffer. A hop costs one
cycle. No ready signal runs combinationally along the row.

A response lane ejects a packet at the column it is addressed to. When
both response lanes eject in the same cycle, they are served round-robin.

A memory controller serves its eight rows round-robin. It issues at most
one 64-byte line every `LINE_CYCLES` = 2 cycles. At 500 MHz the two
controllers together move 64 B/cycle = 32 GB/s.

A read is issued only while the controller's response FIFO has a free
slot. This guarantees that returned data can always be accepted. Writes
are posted.

## Global buffer and scheduler (`global_buffer`, `scheduler_mapper`)

The global buffer has the following structure:

* 32768 lines of 64 bytes (2 MB).
* One host write port.
* One read port, shared by the 64 PEs through a round-robin arbiter. A
  granted PE receives its line one cycle after the grant, on a shared
  data bus.

The scheduler/mapper accepts these host commands:

| command | effect |
|---|---|
| `CMD_GB_WRITE` | loads the weights |
| `CMD_PUSH_PE` | sends an instruction to one PE |
| `CMD_BCAST` | sends an instruction to all PEs (CFG, INV). It waits until every queue has room. |
| `CMD_PUSH_MAPPED` | sends an instruction to the PE chosen by window mapping |
| `CMD_SET_WINDOW` | sets the window size and restarts mapping at PE 0 |

Window mapping works as follows. The instructions of a task carry
`task_end` on their last instruction. After `WINDOW` tasks the mapping
moves to the next PE, wrapping after the last one. A command is accepted
in the cycle its target queue has room.

## Parameters

| parameter | default | where it comes from |
|---|---|---|
| PE array | 8 x 8 | as published |
| MACs per PE | 4 x 8 | as published |
| global buffer | 32768 x 64 B = 2 MB | size as published; line width chosen |
| private cache per PE | 128 KB, split 64 KB G-D + 64 KB G-C | total as published; split chosen |
| register file per PE | 32 MACs x 32 x 16 bit = 2 KB | total as published; shape chosen |
| memory bandwidth | 2 controllers x 64 B / 2 cycles | 32 GB/s as published |
| element width | 16 bit, FRAC = 8 | chosen |
| output tiles | 8 (up to 256 outputs) | chosen to hold a 256-wide hidden layer |
| queues | IQ 16, LSQ 8, NoC queue 4 | chosen |
| node id | 18 bit; chunk index 8 bit | chosen to cover the largest graphs evaluated |

## How far the design departs from the published description

* The paper gives the functions of the PE's queues, the mapper and the
  memory controllers but not their insides. The simplest versions that
  do the job were built.
  * "First come, first served" arbitration is approximated by round-robin.
  * The cache organisation (sets, ways, hashing of pairs) is chosen.
* A G-C entry reuses the reduced pair of two nodes, as published. Which
  pairs to use is decided by the host. The driver here uses pairs of
  neighbours shared by nodes close to each other in the order.
* The memory controllers return read data over the NoC. The host feeds
  instructions through its own command port.
* The CFG and INV instructions, the saturation and requantisation rules,
  and the weight-tile residency check are this design's own.
* Physical SRAM macros are not modelled. The memories are plain arrays.
  The DRAM is outside the chip. A behavioural model with a fixed latency
  and random back-pressure (`tb/dram_model.sv`) stands in for it.

## Sizing against the evaluated workloads

The graph classification sets in the evaluation fit easily:

| dataset | avg. nodes per graph | feature dimension | chunks | weight lines (256 hidden) |
|---|---|---|---|---|
| COLLAB | 74 | 492 | 16 | 4096 |
| BZR | 36 | 53 | 2 | 512 |
| IMDB-BINARY | 20 | 136 | 5 | 1280 |
| DD | 284 | 89 | 3 | 768 |

Weight lines are counted against the 32768 lines of the global buffer.

The two large graphs also fit:

* **CITESEER-S** (227,320 nodes, dimension 3703):
  * 116 chunks, within the 8-bit chunk index.
  * 29,696 weight lines for the first layer, 1.8 MB of the 2 MB buffer.
* **REDDIT** (232,965 nodes, 602-dimensional features):
  * 18-bit node ids, enough for 232,965 nodes.
  * 19 chunks.
  * 4.4 million feature lines in external memory.

Both GraphSage (hidden width 256) and GIN (hidden width 128) fit within
the 8 accumulator tiles. Edges never live on chip: they are implied by
the instruction stream.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares
against values computed in the testbench, has a watchdog, and ends with a
`TB_RESULT checks=N failures=M` line.

* `tb_instr_queue`, `tb_ld_st_queue`, `tb_noc_queue`: fill, overflow,
  order, back-pressure.
* `tb_mac_unit`, `tb_mac_array`: dot products and a full 32x32 tile
  product against a software matrix-vector product. Also checks the
  32-cycle compute time.
* `tb_gd_cache`, `tb_gc_cache`: random traffic against an LRU model. The
  pair cache is looked up with both node orders.
* `tb_global_buffer`: one grant per cycle, round-robin order, data one
  cycle after the grant.
* `tb_noc_router`:
  * A row of three routers.
  * One cycle per hop.
  * Random two-way traffic with back-pressure.
  * Every packet delivered once, in order per source.
* `tb_mem_ctrl`: never more than one line per two cycles, exactly one per
  two under load. Read data reaches the right PE, in order.
* `tb_scheduler_mapper`: window mapping, direct push, back-pressure,
  broadcast.
* `tb_pe`:
  * Covers the PE and its controller.
  * Runs a directed micro-program over hits, misses, pairs in both
    orders, max aggregation, saturation, weight reuse, ReLU and
    invalidation.
  * Compares every stored line and every event counter with exact
    expected values.
* `tb_rubik_top`:
  * The whole accelerator at a reduced size: 2x2 PEs, tiny caches,
    1-entry queues.
  * Runs the 8-node example graph through a SAGE-style layer (sum and
    max aggregation) and a GIN-style layer.
  * Every output line is checked against a reference model of the
    instruction semantics.
  * Counts each mechanism:
    * G-D and G-C hits and misses.
    * Weight loads and reuse.
    * Saturation.
    * LSQ stalls.
    * Traffic on both controllers.
  * A mechanism that never happens counts as a failure.
* `tb_rubik_full`:
  * The same two-layer run on the default-size accelerator with no
    parameter overrides: 64 PEs, a 512-node random graph with community
    structure, 2-chunk features and windows of 8 nodes.
  * It passes 1033 checks in about 222,000 cycles.
  * Verilator needs about 15 minutes to compile it on a single core and
    under 3 minutes to run it.

To simulate, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rubik_pkg.sv tb/tb_rubik_top.sv \
    --top-module tb_rubik_top -Mdir obj_top -o sim
obj_top/sim +verilator+rand+reset+2
```

Replace the testbench name for any other test. The testbenches reset
everything they read, so they pass under random initialisation.

## Files

| file | contents |
|---|---|
| `rtl/rubik_pkg.sv` | types, instruction and packet formats, reduction helpers |
| `rtl/rubik_top.sv` | the accelerator |
| `rtl/pe.sv`, `rtl/pe_ctrl.sv` | processing element and its controller |
| `rtl/instr_queue.sv`, `rtl/ld_st_queue.sv`, `rtl/noc_queue.sv` | PE queues |
| `rtl/mac_array.sv`, `rtl/mac_unit.sv` | MAC array |
| `rtl/gd_cache.sv`, `rtl/gc_cache.sv` | private caches |
| `rtl/global_buffer.sv`, `rtl/scheduler_mapper.sv` | shared buffer and instruction distribution |
| `rtl/noc_router.sv`, `rtl/noc_lane.sv`, `rtl/mem_ctrl.sv` | memory network and controllers |
| `rtl/sync_fifo.sv`, `rtl/rr_arbiter.sv` | generic helpers |
| `tb/gcn_driver.sv` | host model: graph, reordering window, pair selection, instruction generation, reference model |
| `tb/dram_model.sv` | external memory model |
