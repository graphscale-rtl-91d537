# GraphScale in SystemVerilog: a multi-channel graph processor

This design runs iterative graph algorithms, breadth-first search (BFS) and
weakly connected components (WCC), on a graph kept in DRAM. Its bandwidth
grows with the number of memory channels. Each channel has its own
**graph core**. A core streams its share of the graph sequentially, in
compressed form, from its channel. The only random accesses, the reads of
neighbour labels, are answered from on-chip **label scratch pads**, one per
core. A **two level crossbar** joins all the scratch pads, so that any core
can read the label of any vertex in the same cycle budget. Label updates go
back to DRAM line by line. With *immediate updates* they also go straight
into the scratch pad, so later edges of the same iteration already see them.

The default build matches the main configuration of the architecture:

| Parameter | Value |
|---|---|
| Cores and memory channels (`P`) | 4 |
| Labels of scratch pad in total (`SPAD_TOTAL`) | 2^21, i.e. 2^19 per core |
| Banks per scratch pad (`e`) | 16 |
| Source-vertex pipelines (`V`) | 8 |
| Reorder slots (`SLOTS`) | 32 |
| Word width | 32 bits |

## Graph layout and partitioning (host side)

The graph is stored *inverted*: for each vertex `v` the arrays hold the
vertices that have an edge **to** `v` (pull model).

- `pointers[v] .. pointers[v+1]` delimits `v`'s entries in `neighbours`.
- `labels[v]` is the current label.

All arrays are 32-bit words, start on a 64-byte line, and are packed 16 per
line.

Two-dimensional partitioning:

- The vertex set is cut into `P` equal intervals, one per channel and core.
  Core `q` owns its interval's labels and pointers.
- Each interval is further cut into `l` sub-intervals of at most 2^19
  vertices. Sub-interval `k` of every core forms meta-partition `k`; its
  labels fit the scratch pads at once.
- Partition `(k, q)` holds the edges of core `q`'s vertices whose source
  lies in meta-partition `k`. Its neighbour entries are rewritten into the
  **neighbour index format**:

  | Bits | Meaning |
  |---|---|
  | top log2(P) | core whose scratch pad holds the label |
  | low log2(2^19) | offset within that scratch pad |
  | low 4 bits of the offset | bank |

Partitioning, the index rewrite and stride mapping (the optional vertex
renumbering used against load imbalance) are host software. They are not
RTL. The end-to-end testbenches contain a small partitioner that shows the
format.

The host writes the execution metadata through a register port
(`cfg_we/cfg_addr/cfg_wdata`):

| Address | Content |
|---|---|
| `0x0000` | number of meta-partitions `l` |
| `0x0001` | iteration limit |
| `0x0002` | flags: bit 0 immediate updates, bit 1 prefetch skipping |
| `0x1000 + 2q + {0,1}` | core `q`: first label line, vertex count |
| `0x2000 + 16k + {0,1}` | meta-partition `k`: sub-interval base, size |
| `0x3000 + 64k + 4q + {0,1,2}` | partition `(k,q)`: pointer line, neighbour line, neighbour count |

After that the host pulses `start` and waits for `done`; `iterations` then
holds the number of iterations run.

## Execution (processor_controller, core_controller)

For each iteration and each meta-partition `k`:

1. **Prefetch.** Every core copies sub-interval `k` of its labels into its
   scratch pad (`label_prefetcher`). Line `n` goes to row `n` of all 16 banks,
   so label offset `o` sits in bank `o % 16`, row `o / 16`.
2. **Process.** Only after every core has finished prefetching, all cores
   process partition `(k, q)` together. The cores run in lock step because a
   core's crossbar requests may reach any other core's scratch pad.

An iteration ends after the last meta-partition. Execution stops when no
core produced an update during the iteration, or when the iteration limit is
reached.

**Prefetch skipping.** With one meta-partition and immediate updates, the
scratch pads already hold the current labels after the first iteration, so
the prefetch phase is left out.

Each core's controller converts the word-unit metadata into line ranges. It
ends a processing phase in steps:

1. wait until the edge builder has retired every source group;
2. drain the accumulator pipeline;
3. flush the accumulator's held pairs;
4. flush the writer's open line.

Only then does it report ready.

## Inside a graph core

```
 channel ── mem_arbiter ─┬─ seq_reader (labels) ──┐
                         ├─ seq_reader (pointers)─┴─ src_builder ─────────┐
                         ├─ seq_reader (neighbours) ─ dst_builder ─ crossbar ─ edge_builder
                         └─ label_prefetcher ─→ label_scratch_pad          │
 channel ←── buffered_writer ←── accumulator ←────────────────────────────┘
                   └─(immediate updates)─→ label_scratch_pad
```

- **Sequential readers** keep up to 8 line requests in flight. They reserve
  buffer space per request (credits), because the memory returns reads in
  order with no backpressure.
- The **source builder** zips label lines with pointer lines. It emits V = 8
  source vertices per cycle with their label and their bounds `l = ptr[i]`,
  `r = ptr[i+1]`. The next pointer line is held as look-ahead so the last
  vertex of a line gets its `r`.
- The **destination builder** sends each neighbour line (16 indices, masked at
  the partition's end) into the crossbar.
- The **edge builder** pairs each returned label at position `j` with the
  source whose `l <= j < r`. It gives up to 16 edges from at most 8 sources
  per cycle. A neighbour line shared by two source groups is consumed in two
  parts, tracked by a lane mask. Within a cycle each source's edges are
  contiguous lanes in ascending source order.

## The accumulator (accumulator, prefix_adder)

This is the hardest part to follow. It turns up to 16 edges per cycle into
at most one update per source vertex. It has four pipelined steps:

1. **Update.** The map function per edge: BFS takes the neighbour label + 1
   (saturating at the all-ones "unvisited" value); WCC takes the neighbour
   label. An edge is flagged as an update when its candidate is below the
   source's current label.
2. **Prefix adder.** This is a segmented prefix reduction (minimum) over the
   16 lanes, keyed by source id.
   - Levels 0..3 form a Ladner-Fischer (Sklansky) network. At level `k`,
     lane `i` with bit `k` set combines with lane `((i >> k) << k) - 1`, but
     only if both ids are equal and everything in between carried that id.
     Each lane carries a `same` bit for this.
   - After level 3, lane `i` holds the reduction of the run of equal ids
     ending at `i`.
   - A mirrored suffix network computes the run starting at lane 0. A fifth
     level folds it into lane 15 when lane 15 has the same id but the line
     holds more than one id. This is the wrap-around case, where a source's
     edges occupy the end and the start of the lanes.
   - Latency is 5 cycles.
3. **SelectMSO.** 8 selectors. Selector `s` takes the right-most lane of the
   run of an id with `id % 8 == s`. A run that wrapped is taken from lane 15
   only.
4. **Sequential.** 8 operators merge the selected pairs of successive cycles
   for the same id. They release the pair, if it is flagged, when a
   different id arrives or on flush.

Because the edge builder emits sources in ascending order, the wrap-around
fold never happens in the integrated design. It is still built as described
and is tested on its own in `tb_prefix_adder`, with the worked example of
ids `4 4 4 1 2 2 3 4`.

The **buffered writer** combines the updates into one open line. It writes
that line to memory (masked) as soon as an update for a different line
arrives, or on flush.

## The two level crossbar (two_level_crossbar)

Every core sends 16 neighbour indices per cycle. These are `16 * P` scratch
pad reads per cycle, spread over `16 * P` banks. A request line flows
through these stages:

1. **Bank shuffle** (`bank_shuffle`, one per core). It moves each index to
   the lane of its bank. Each bank has its own small FIFO of whole lines
   (`BS_DEPTH`), so a bank conflict in one lane stalls only that bank. Later
   lines may overtake in other banks.
2. **Core shuffle** (`P * 16` instances of `xbar_arb`, each with `P` inputs).
   Each sends bank `b`'s request to bank `b` of the target core. The request
   carries an annotation: source core, line tag (line number modulo
   `SLOTS`), and original lane.
3. **Label scratch pad.** Each bank answers one cycle later with the
   annotation. When the response cannot leave, it moves to an overflow
   register, so no read is lost.
4. **Core unshuffle** (`P * 16` arbiters). It returns each label to its source
   core, still in its bank lane.
5. **Bank unshuffle** (16 arbiters per core, 16 inputs each). It moves each
   label back to the lane it came from.
6. **Reorder** (`reorder`, one per core). Labels are written into slot
   `tag`, lane `lane`. A FIFO holds the valid mask of every admitted line.
   When the slot under the output pointer has every lane of the head mask,
   the line leaves in order. A line is admitted only while the FIFO holds
   fewer than `SLOTS` lines. This bounds the lines in flight and supplies
   the crossbar's backpressure.

## Interfaces of `graphscale_top`

| Signal | Purpose |
|---|---|
| `clk`, `rst_n` | Clock; asynchronous active-low reset. |
| `cfg_*`, `start`, `done`, `iterations` | Host control, as above. |
| `mem_rd_valid/mem_rd_req/mem_rd_ready[q]` | Read requests of channel `q`: line address and client tag. |
| `mem_resp_valid/mem_resp[q]` | In-order read responses, 512-bit line plus tag, no backpressure. |
| `mem_wr_valid/mem_wr_req/mem_wr_ready[q]` | Masked line writes. |

A DDR4 controller sits behind each channel. The testbenches use a
behavioural model, `tb/mem_channel_model.sv`, with configurable latency and
random stalls.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv` that compares
it with an independent model. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- **`tb_graphscale_top`** (2 cores, reduced sizes) runs complete BFS
  executions on a random graph against a reference BFS. It covers three
  modes: two meta-partitions; one meta-partition with immediate updates and
  prefetch skipping; and no optimisations. It also counts every mechanism
  and fails if one never occurs: bank conflicts, crossbar backpressure,
  remote label reads, overflow-register use, immediate updates, skipped
  prefetches, sequential merges, writer line changes, memory stalls, and
  meta-partition switches.
- **`tb_graphscale_full`** runs the top with every parameter at its default
  (4 cores, 2^21 labels) through a complete BFS.

Run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
  rtl/gs_pkg.sv tb/tb_graphscale_top.sv --top-module tb_graphscale_top
./obj_dir/Vtb_graphscale_top
```

The full-size build takes a few minutes to compile, because of the
scratch pad arrays; it simulates in seconds.

## Departures from the architecture and open points

- **PageRank is not built.** It needs 64-bit labels (degree and value), a
  summation reduce, and a separate array for the next iteration's values.
  The exact map function and that data flow are not given in enough detail.
  The datapath here is BFS and WCC only (parameter `ALGO`).
- **WCC is built but not simulated end to end.** Only BFS runs through the
  end-to-end tests. WCC differs in the map function alone; the host must
  initialise every label to the vertex id.
- **Host software is outside the RTL:** graph partitioning, stride mapping,
  and the neighbour index format.
- **Own choices where the architecture is silent:**
  - the register map;
  - the memory channel protocol;
  - the round-robin arbitration in the crossbar and the memory arbiter;
  - the `id % V` selector mapping;
  - buffer depths (`BS_DEPTH`, reader credits);
  - the convergence rule;
  - the controller's flush sequence.
- **MAX_META = 16 meta-partitions.** This allows graphs up to 2^25
  vertices. All graphs of the original evaluation fit; the largest needs 8.
- **Iteration semantics:** the design updates labels asynchronously within
  an iteration (immediate updates). The number of iterations can therefore
  differ from a synchronous BFS, but the final labels are the same.
