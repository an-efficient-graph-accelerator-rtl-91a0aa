# Graph accelerator with in-datapath conflict resolution

Vertex-centric graph algorithms such as BFS, connected components and PageRank spend
most of their time applying one small update per edge: read the value of the edge's
source vertex, turn it into an update, and fold the update into the destination vertex
with a commutative operator (minimum, or addition). An accelerator that fetches a full
memory line of edges per cycle (16 edges here) will often find several of those edges
aimed at the same destination. A conventional design treats each update as an atomic
read-modify-write and serialises the colliding ones, which throws away most of the
parallelism on real graphs.

This design removes the collisions inside the datapath instead. Edges are stored grouped
by destination (CSC order), so the edges of one destination are always adjacent in a line.
The updates of a line are combined with a *segmented parallel prefix network*: every
destination's updates are reduced to one value in a single cycle, no matter how many
destinations share the line. A destination whose edges run over several lines produces one
partial result per line; these arrive one after another and are merged in a register
before memory is touched. Memory therefore sees at most one write per destination and
per run of consecutive lines, and never two conflicting writes in the same cycle.

Two further pieces keep the pipeline fed:

* **Degree-aware scheduling.** The edge list is read strictly sequentially, one line per
  cycle. The scheduler decides, line by line, which destinations own the edges in it:
  one high-degree vertex may own many lines, or up to eight low-degree vertices may share
  one line.
* **Banked source reads with reordering.** The 16 source values a line needs are read from
  16 memory banks out of order, and a reorder buffer puts them back in edge order.

The RTL is SystemVerilog-2017. It is synthesizable except for the behavioural off-chip
memory model used by the testbenches.

## Programming model

The graph lives in off-chip memory in CSC form, as two arrays of 32-bit words. Both are
read in lines of `N` = 16 words:

* `off[0..V]` is the offset table. Vertex `v`'s in-edges are edge indices
  `off[v] .. off[v+1]-1`, and `off[i]` is word `i mod N` of line `off_base + i / N`.
* `edge[]` holds one source vertex ID per edge. Edge `i` is word `i mod N` of line
  `edge_base + i / N`.

Vertex values live on chip, in `NBANK` = 16 banks of `BANK_DEPTH` 32-bit words. Vertex
`v` of an array that starts at word offset `base` is stored in bank `v mod 16`, word
`base + v / 16`. One *run* is configured by:

| input | meaning |
|---|---|
| `alg` | `ALG_BFS`, `ALG_WCC`, `ALG_PR` (fixed point) or `ALG_PRF` (float), from `ga_pkg` |
| `v_begin`, `v_end` | destination vertices `[v_begin, v_end)` |
| `edge_begin`, `edge_end` | their edges, i.e. `off[v_begin]` and `off[v_end]` |
| `off_base`, `edge_base` | line addresses of the two off-chip arrays |
| `src_base`, `dst_base` | on-chip word offsets of the source and destination arrays |

A one-cycle `start` pulse begins the run. `busy` stays high until the run ends, and
`done` pulses once. The configuration must stay stable in between. For every destination
`v` in the range the run computes

```
dst[v] = reduce(dst[v], reduce over in-edges (u, v) of update(src[u]))
```

| algorithm | update(x) | reduce | identity |
|---|---|---|---|
| BFS | `x + 1`, saturating at all-ones ("unvisited") | min | all-ones |
| WCC | `x` (component label) | min | all-ones |
| PageRank, `ALG_PRF` | `x` (the host stores `rank(u) / outdeg(u)`) | IEEE-754 single-precision add | +0.0 |
| PageRank, `ALG_PR` | same, as unsigned fixed point | 32-bit integer add | 0 |

The host prepares `dst` before a run. For BFS and WCC it holds the current values; the
source array itself can serve as `dst`. For PageRank it holds the constant term ε. Between
runs the host reads and writes the vertex memory through the host port. Its flat address
is `word * NBANK + bank`, and read data appears one cycle after the address.

Before the graph is loaded, the host should rearrange each vertex's in-edge list round
robin over `source mod 16`. The edges that share a line then tend to fall into different
banks (see *Banked source reads*). The rearrangement does not change any result.

A graph too large for the on-chip memory is processed in parts. Each part is a range of
destination vertices with its own `v_*`, `edge_*` and base settings, run one after
another. Because write-back is read-modify-write, a destination may safely be updated by
several runs.

## The pipeline

```
 off-chip offsets       off-chip edges
       |                     |
  P1 get vertex ----> P2 read edges ---- edge lines ----> P3 read vertex <--> vertex memory
  (ranges per          (address gen,                      (shuffle, bank      (16 banks)
   vertex)              vertex units,                      FIFOs, reorder)        ^
                        mask gen)                                |                |
                           |                                     v                |
                           +------ schedule beats ------> P4 schedule             |
                                                                 |                |
                                                          P5 process vertex       |
                                                                 |                |
                                                          P6 parallel accumulate -+
                                                          (prefix, N:M mux, crossbar,
                                                           dest. accumulators, write-back)
```

Every stage boundary is a valid/ready handshake. One clock and an active-low asynchronous
reset cover the whole design.

### P1 – get vertex (`ga_get_vertex`)

P1 streams the offset table lines of the run. The number of lines in flight is limited
by credits, up to `OFF_FIFO_DEPTH`. Each cycle P1 takes up to `M` = 8 consecutive table
entries from the head line. It turns each neighbouring pair `off[v], off[v+1]` into a
vertex `(v, left, right)` and deals these vertices round robin to the `M` vertex units of
P2. Vertices without in-edges are dropped at this point.

### P2 – read edges and degree-aware scheduling (`ga_read_edges`)

This is the least obvious stage. It has three parts:

* **Address generator.** It requests every edge line of `[edge_begin, edge_end)` in
  order, independently of the scheduler. Returned lines (16 source IDs each) go to P3
  along with a lane-valid mask that trims the first and last line.
* **Vertex units.** These are `M` FIFOs of `(v, left, right)` in dealing order.
  Because the dealing is round robin, the heads of the FIFOs, read from a rotating start
  pointer, are the next `M` vertices in ID order.
* **Matcher and mask generator.** For the current line `[ls, le)` they walk the heads in
  order and take every head whose `left < le`. They stop at the first head that starts
  in a later line.

Every head taken becomes a *slot* of a schedule beat: slot `k` covers the lanes
`[max(left,ls) - ls, min(right,le) - ls - 1]`. Those lanes are tagged `k`, and the slot
records its last lane. A head whose `right <= le` is finished and is popped. If the last
head taken extends to or past `le`, the line is complete: the beat is marked
`line_end`, and the matcher moves on to the next line. Otherwise the line holds more than
`M` vertices, and the next beat continues in the same line.

Example with `N` = 16 and `M` = 8: a line holds the last 3 edges of vertex 40, 1 edge
each of vertices 41–45, and the first 8 of vertex 46's 30 edges. This gives one beat with
7 slots. Vertex 46 stays at its FIFO head and becomes slot 0 of the beats for the next
line, and of the line after that.

A line takes `ceil(k / M)` beats, where `k` is the number of vertices touching it. So a
graph whose lines hold at most 8 vertices streams at one line per cycle. Beats wait in a
queue (`SCH_FIFO_DEPTH`) for P4.

### P3 – read vertex: banked access and reordering (`ga_read_vertex`)

P3 needs 16 random source values per line, but each bank gives one read per cycle. It
works as follows:

1. **Shuffle.** Lane `i`'s source `u` goes to bank `u mod 16`. The request is tagged
   with a *token* `{reorder slot, lane}`, where the reorder slot is the line's position
   in the reorder buffer. All requests of a line enter the per-bank request FIFOs in one
   cycle (`ga_req_fifo` takes up to 16 pushes per cycle). A line waits until every bank
   involved has room and a reorder slot is free.
2. **Bank reads.** Each bank pops one request per cycle and reads its word. A line whose
   sources collide in one bank simply takes several cycles in that bank, while other
   banks carry on with later lines. Data therefore returns out of order.
3. **Reorder.** Returned data is written straight into the reorder buffer at its token.
   Each line has a "got" mask, and the oldest line is released to P4 once every valid
   lane has arrived.

The token is the edge address modulo `ROB_LINES * N`. Because lines enter in order, no
token is reused while its line is still in the buffer.

### P4 – schedule (`ga_schedule`) and P5 – process vertex (`ga_process`)

P4 pairs each schedule beat from P2 with the reordered source values of its line from P3.
It keeps the line for as many beats as the line has and releases it with the `line_end`
beat. P5 applies the per-edge update function to every lane that belongs to the beat. All
other lanes get the identity of the reduce operator, so they cannot disturb the prefix.

### P6 – parallel accumulate (`ga_par_acc`)

1. **Segmented prefix** (`ga_src_acc`). This is a Ladner-Fischer/Sklansky prefix
   network of `log2 N` = 4 levels using the algorithm's reduce operator. A node combines
   its two inputs only when their lane tags are equal. After the last level, lane `i`
   holds the reduction of all lanes of its slot up to and including `i`. For float
   PageRank the nodes are single-precision adders (`ga_pkg::fp_add`). The network adds
   in tree order, so a float sum can differ from a sequential sum in the last bits.
2. **N:M multiplexer** (`ga_nm_mux`). Slot `k` takes the prefix at its last lane. That
   is the slot's complete contribution from this line; no ID comparison is needed.
3. A pipeline register follows.
4. **Crossbar** (`ga_crossbar`). Slot `k` goes to destination accumulator `vid mod M`.
   Slots of one beat are consecutive vertex IDs and normally land on distinct
   accumulators. A beat with `M` slots can still wrap around: for example, vertices
   7 and 15 of one beat both need accumulator 7. The crossbar then delivers the
   lowest-numbered pending slot first and holds the beat for another cycle. This is the
   only stall inside P6.
5. **Destination accumulators** (`ga_dst_acc`, `M` of them). Each holds one
   `(vertex, value)` pair. An input for the same vertex is merged. An input for another
   vertex pushes the held pair to write-back and takes its place. `flush` at the end of
   a run empties them.
6. **Write-back** (`ga_writeback`, one per accumulator). It reads `dst[v]` (cycle 1) and
   writes `reduce(old, new)` (cycle 2). Accumulator `j` owns banks `j, j+M, …`, so no
   two write-backs ever share a bank port. An assertion checks that a word is never read
   while its own write is pending. This holds because an accumulator emits a vertex only
   when a different one arrives.

### Run control (`ga_top`)

The run ends when all of the following hold:

* P1 and P2 have seen their whole ranges;
* every schedule beat produced by P2 has entered P6;
* P6's pipeline register is empty.

The top then pulses `flush`, waits until the accumulators and write-backs are idle, and
pulses `done`. `events` (`ga_pkg::ga_events_t`) gives one flag per cycle for each
mechanism, for profiling: multi-vertex beat, multi-beat line, vertex spanning lines, bank
conflict, out-of-order return, P3 back-pressure, crossbar conflict and destination merge.

## Timing and throughput

* **Streaming rate.** When every line holds at most `M` vertices, has no bank collisions
  and crossbar collisions do not occur, the pipeline takes one edge line (16 edges) per
  cycle. The end-to-end test checks this: it measures 89 cycles for 64 lines, which
  includes filling a pipeline that sees 10 cycles of memory latency. P3 on its own takes
  64 lines in 66 cycles, and P6 takes 200 conflict-free beats in 200 cycles.
* **Latency** from an edge line's return to its write-back is about 8 cycles plus any
  bank queueing. No stage has a fixed multi-cycle latency that an interface depends on;
  all rely on handshakes.
* Bank collisions cost throughput, not correctness. The round-robin edge rearrangement
  keeps them rare for low-degree vertices.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 16 | edge lanes = words per memory line (16 × 32 bit = one 64-byte line) |
| `M` | 8 | vertex units / slots per beat / destination accumulators |
| `NBANK` | 16 | vertex memory banks (must be a multiple of `M`) |
| `BANK_DEPTH` | 106250 | words per bank: 16 × 106250 = 1.7 M 32-bit vertex values |
| `ROB_LINES` | 8 | reorder buffer lines |
| `REQ_DEPTH` | 32 | entries per bank request FIFO |
| `VFIFO_DEPTH` | 8 | entries per vertex unit |
| `OFF_FIFO_DEPTH`, `EL_FIFO_DEPTH` | 8, 16 | off-chip lines in flight (offsets, edges); they must cover the memory latency to keep full rate |
| `SCH_FIFO_DEPTH` | 8 | queued schedule beats |

`N`, `M`, `NBANK` and the on-chip capacity are the published configuration. The queue
depths are this implementation's choice.

## Capacity

One run can address 1.7 M vertex values. BFS and WCC can run in place with one array, so
a graph of up to 1.7 M vertices fits in one run. PageRank needs a source and a destination
array, so it fits up to 0.85 M vertices. On the six evaluation graphs:

* Slashdot (0.08 M vertices) and DBLP (0.32 M) fit for all three algorithms.
* YouTube (1.13 M) fits for BFS and WCC. PageRank needs two parts.
* Wiki-Talk (2.39 M), LiveJournal (4.85 M) and Orkut (3.07 M) need 2–6 parts.

The original evaluation stores BFS depths in one byte and so fits every graph for BFS;
this implementation always uses 32-bit values.

## Where this implementation departs from the published design

* **Lane tags are slot numbers.** The published design tags each lane with the low
  `log2 N` bits of its destination ID. Because vertices without in-edges are skipped, two
  vertices in one line can share those bits (for example 3 and 19 with 15 empty vertices
  between them). A prefix node compares non-neighbouring lanes, so it could then merge two
  different vertices. The slot index within the beat is unique and needs only `log2 M`
  bits.
* **Number format.** All values are 32-bit words. BFS depths take 32 bits rather than 8,
  so that one build serves every algorithm. Float PageRank follows the original single
  precision. It rounds to nearest even and flushes subnormals to zero. The fixed-point
  PageRank mode is an addition of this design.
* **Crossbar conflicts** between slots of one beat are not discussed in the original. Here
  they are serialised, one extra cycle per colliding slot.
* **Lines with more than `M` vertices** take several beats. The original text only
  describes lines with up to `M` vertices.
* **Stage P4** is named in the original without details. Here it is the join of P2's
  schedule with P3's reordered values.
* **Memory interface.** The DDR4 controller is replaced by two in-order line-read
  channels (offsets, edges), and the host prepares the destination array. Edge
  rearranging and graph partitioning are host software; the design only provides the
  range and base inputs they need.
* The original block diagram draws the pipeline as a stack of "basic units", which may
  mean several copies. Its text never describes more than one, so one is built. The
  diagram also links the vertex memory to the off-chip memory interface. Here that path
  is the host port.
* The vertex memory has a second read port per bank, so that write-back reads never
  compete with source reads (on an FPGA, a duplicated block RAM).

## Files

`rtl/`:

* `ga_pkg.sv`: types, algorithm encoding, update and reduce functions, event flags.
* `ga_top.sv`: the top level.
* Pipeline stages: `ga_get_vertex.sv`, `ga_read_edges.sv`, `ga_read_vertex.sv`,
  `ga_schedule.sv`, `ga_process.sv`, `ga_par_acc.sv`.
* Parts of P3: `ga_req_fifo.sv`.
* Parts of P6: `ga_src_acc.sv`, `ga_nm_mux.sv`, `ga_crossbar.sv`, `ga_dst_acc.sv`,
  `ga_writeback.sv`.
* Memory and helpers: `ga_vertex_mem.sv`, and the generic FIFO `ga_fifo.sv`.

`tb/` holds one self-checking testbench `tb_<module>.sv` per module, plus:

* `tb_ga_top.sv`, the end-to-end test, with a 4096-word bank depth to keep it small.
* `tb_ga_top_full.sv`, the same test on the top at its default parameters.
* `ga_dram_model.sv`, a behavioural in-order line memory with fixed latency.

The end-to-end test builds a random skewed graph of 400 vertices. It has:

* runs of degree-1 vertices and vertices of degree 40+;
* sources concentrated in one bank;
* vertices without in-edges, and self loops.

It applies the round-robin edge rearrangement, then runs three BFS iterations, two WCC
iterations (the first split into two vertex-range parts), one fixed-point PageRank
accumulation, one float PageRank accumulation (within a relative 1e-5 of an exact sum)
and an in-place WCC (source array = destination array) repeated until it converges,
and compares every result array with a software reference. It also checks the streaming
rate. It fails if any of the eight mechanisms listed under *Run control* never occurs.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. Each
one is run with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/ga_pkg.sv tb/tb_ga_top.sv --top-module tb_ga_top -o sim
./obj_dir/sim
```

The full-size test runs in well under a second of simulation time. Its vertex memory
needs about 7 MB of host memory.

## Known limitations

* No DDR4 controller or PHY.
* Timing closure has not been evaluated. The prefix network and the P2 matcher (an
  8-deep head walk with 32-bit comparisons) are the longest combinational paths. The
  prefix network means 4 levels of 32-bit min/add, or of single-precision adders in
  float mode. The original reached 250 MHz with integer operators and 200 MHz for float
  PageRank. The float adder here is a single combinational stage and has not been
  pipelined.
