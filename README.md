# A ReRAM graph accelerator that keeps recurring subgraph patterns resident

When a sparse graph is processed on ReRAM crossbars, its adjacency matrix is
cut into small C x C windows, and each non-empty window (a *subgraph*) is
written into a crossbar so that one analog read applies the source vertex
values to all its edges at once. Writing ReRAM is slow (about fifteen times
slower than a read) and wears the cells out. The cost is mostly writes.

The observation behind this design is that with small windows the same bit
pattern recurs very often. With 4 x 4 windows on a power-law graph, most
windows hold a single edge, so there are only 16 such patterns, and they cover
most of the graph. So the engines are split in two kinds:

* **Static engines** get the most frequent patterns written once, when the
  accelerator is initialised. From then on they only receive vertex values.
  No configuration travels to them and their cells are never rewritten.
* **Dynamic engines** take the rare patterns. They are rewritten at run time,
  and the pattern is shipped together with the vertex data.

A global controller walks through a precomputed table of subgraphs. It sends
each subgraph to the engine that holds its pattern, or rewrites a dynamic
engine for it. It then folds the engines' partial results back into the
vertex array.

The RTL is parameterised. Its defaults are the main configuration:

* 32 graph engines (`T`), 16 of them static (`N`);
* one 4 x 4 crossbar of 1-bit cells per engine (`M`, `C`);
* 8-bit vertex data.

## Where everything lives

```
host (software)            graph_accel (this RTL)                    main memory (outside)
-----------------          ----------------------------------------  ---------------------
preprocess graph  ----->   global_controller <--ct_*/st_*/vs_*/va_*-->  configuration table
into CT and ST                  |                                     subgraph table
                          ge_interconnect                             vertex data
                         /      |        \
                graph_engine x T (0..N-1 static, N..T-1 dynamic)
                  in FIFO -> in reg -> ge_controller -> xbar_driver -> reram_crossbar
                  -> sample_hold -> adc (shared) -> ge_alu -> accumulators -> out FIFO
```

Main memory is not part of the RTL. The top module brings out one
synchronous port per table. Every read port returns data on the cycle after
its enable.

## Preparing a graph: patterns, the configuration table and the subgraph table

Preprocessing is host software. In this repository it is the function
`preprocess()` in `tb/graph_tb_pkg.sv`. It does the following:

1. Cut the adjacency matrix into C x C windows. Row i of a window is source
   vertex `src_blk*C+i`, and column j is destination vertex `dst_blk*C+j`.
   All-zero windows are dropped.
2. Collect the distinct windows (patterns) and count how often each occurs.
3. Sort the patterns by decreasing count. The pattern of rank r becomes
   entry r of the configuration table.
4. The first `N*M` patterns are static. Pattern r goes to engine `r % N`,
   crossbar `r / N`, which spreads them evenly over the static engines.
   All other patterns are dynamic.
5. Emit one subgraph-table entry per window. The entries are in column-major
   order (grouped by destination block) or row-major order (grouped by source
   block).

The table formats are packed structs in `rtl/graph_pkg.sv`:

| table | entry fields |
|---|---|
| configuration table `ct_entry_t` | `pattern` (C x C bitmap, `[row=src][col=dst]`), `row_mask` (which rows hold an edge), `is_static`, `ge`, `cb` |
| subgraph table `st_entry_t` | `src_blk`, `dst_blk`, `pat` (index into the configuration table) |
| vertex memory | one word per block of C vertices (`vblock_t`, C x 8 bits); addressed as `src_base + src_blk` for reading and `dst_base + dst_blk` for aggregation |

The row mask is what lets a static engine skip empty rows. A single-edge
pattern is then processed with one crossbar read instead of C.

## The graph engine

`graph_engine` is one processing element. Engines 0..N-1 are built with
`IS_STATIC = 1`. A static engine accepts configuration only in a
configuration-only request, and an assertion checks this.

A request (`ge_req_t`) carries the following fields:

* `has_cfg` with `cfg`: a pattern to write first;
* `has_data` with `vdata`: the C source values;
* `cb`: the target crossbar;
* `op`: the operation;
* `row_mask`;
* `tag`: the destination block.

Each request with data produces exactly one result (`ge_rsp_t`: `tag` plus C
partial values). Results come out in request order.

### Datapath

The datapath, in order:

1. **Input buffer and input register.** A FIFO (`ge_fifo`, first-word
   fall-through, valid/ready) feeds a one-entry input register. The global
   controller sees backpressure as soon as the buffer is full.
2. **`ge_controller`.** It takes the request from the input register and
   sequences everything below it.
3. **`xbar_driver`.** For a configuration it supplies the bits of the row
   being written. For a read it drives the wordlines:
   * `OP_MIN` (BFS, unweighted shortest paths): one wordline at a time, for
     the current source row. Sources equal to INF (255, "not reached") are
     inactive and are never driven.
   * `OP_SUM` (gather-sum, as in PageRank): all wordlines at once, carrying
     one bit-plane of the eight-bit source values.
4. **`reram_crossbar`.** This is a behavioural model of C x C 1-bit cells.
   Each bitline gives the number of driven rows whose cell in that column is
   1. This is the analog sum of conductance times voltage, reduced to an
   integer. It also counts row writes, which measures wear. The engine counts
   crossbar reads, one per wordline activation.
5. **`sample_hold`.** It freezes all C bitline values on one strobe.
6. **`adc`.** One converter per engine is shared by the bitlines and converts
   one bitline per cycle. Each code is ready the cycle after the start.
7. **`ge_alu`.** It combines one ADC code into one accumulator lane:
   * `OP_MIN`: a code ≥ 1 means an edge from the current source, so the lane
     becomes `min(acc, src+1)`, saturating at INF.
   * `OP_SUM`: the lane adds `code << plane`, saturating at 255.
8. **Accumulators.** They serve as the output register and are cleared to the
   operation's identity (INF for min, 0 for sum) at the start of each request.
9. **Output buffer.** It is another `ge_fifo`.

With M > 1 there is one driver, crossbar and S/H per crossbar. The request's
`cb` field picks which one is used, and the ADC reads that crossbar's S/H.

### Timing

The defaults assume a 1 GHz clock. A crossbar read takes 1.3 ns and a cell
write 20.2 ns, which rounds up to `READ_CYCLES = 2` and `WRITE_CYCLES = 21`.
One ADC conversion takes one cycle. The cells of a row are written together,
so configuring a crossbar costs `C * WRITE_CYCLES` = 84 cycles.

From the cycle the controller takes a request until its result is offered to
the output buffer, the latency is:

```
3 + (has_cfg ? C*WRITE_CYCLES : 0) + reads * (READ_CYCLES + C + 1)
```

The number of reads depends on the operation:

* `OP_MIN`: reads = the rows that are in `row_mask` and have an active source.
* `OP_SUM`: reads = 8, one per bit-plane.

Example: a one-edge `OP_MIN` subgraph on a static engine takes 13 cycles from
acceptance into an empty engine to `rsp_valid`. Three of those cycles are
the input FIFO, the input register and the output FIFO, one each. A dynamic engine pays
another 84 cycles for the rewrite. Reads and conversions are not overlapped.
An engine holds up to `IN_DEPTH` queued requests and `OUT_DEPTH` finished
results (4 each by default).

## The global controller

`global_controller` runs the whole job after `start`.

**Initialisation.** It reads the configuration table and sends every static
entry once, as a configuration-only request, to engine `ge` and crossbar
`cb`.

**Passes.** It streams the subgraph table. For each entry it reads the
pattern's configuration-table entry and the source block (one cycle each). It
then picks an engine:

* A static pattern goes to its static engine, with vertex data only
  (counter `n_static`).
* For a dynamic pattern, *FindGE* first looks for a dynamic crossbar that
  already holds this pattern. A table of what each dynamic crossbar holds is
  kept for this. If one is found, only the data are sent (`n_dyn_hit`).
  Otherwise the next dynamic crossbar in round-robin order is chosen. The
  pattern is sent with the data, and the table is updated (`n_dyn_cfg`).
  Requests to one engine are served in order, so a rewrite never overtakes an
  earlier read of the old pattern.

If the target's input buffer is full, dispatch waits. These cycles are
counted in `n_stall`.

**Batches.** Consecutive subgraphs with the same destination block form a
batch. With `row_major = 1`, they share the source block instead. When the
block changes, dispatch stops until every outstanding result has been
aggregated (`n_barrier` counts the cycles). This models the step in which a
batch's results are merged before the next batch starts.

**Aggregation** runs next to dispatch. Each result from the interconnect is
handled in two cycles. The controller reads the destination block, combines
it lane by lane with the same reduction the ALU uses, and writes it back. It
also notes whether any value changed. Min and saturating sum do not depend on
order, so results can be merged as they arrive.

**Convergence.** After the last subgraph of a pass has been aggregated, a new
pass starts if a value changed and fewer than `max_passes` passes have run.
Otherwise `done` pulses. For BFS, the vertex array holds the levels (root = 0,
all others INF), and `src_base = dst_base`. Each pass extends the frontier,
and the run ends when a pass changes nothing. For a single gather-sum, set
`max_passes = 1` and use separate source and destination arrays.

## Interconnect

`ge_interconnect` steers each request to the addressed engine. The engine's
input-buffer ready is returned as `req_ready`. On the way back, a round-robin
arbiter gives one engine per cycle the single result channel. The winner goes
into a registered output, so results take one cycle through the
interconnect. The pointer moves past the last winner, so no engine starves.

## Top level: `graph_accel`

| group | ports |
|---|---|
| run control | `start`, `op`, `row_major`, `num_ct`, `num_st`, `max_passes`, `src_base`, `dst_base`, `busy`, `done` |
| configuration table | `ct_en`, `ct_addr`, `ct_rdata` |
| subgraph table | `st_en`, `st_addr`, `st_rdata` |
| vertex data | `vs_en`, `vs_addr`, `vs_rdata` (dispatch reads); `va_en`, `va_we`, `va_addr`, `va_wdata`, `va_rdata` (aggregation) |
| statistics | `n_passes`, `n_static`, `n_dyn_hit`, `n_dyn_cfg`, `n_stall`, `n_barrier`, `static_xb_writes`, `dynamic_xb_writes`, `static_xb_reads`, `dynamic_xb_reads`, `n_xb_configs`, `engine_busy` |

Reset is asynchronous and active low (`rst_n`), and it clears the crossbars.
Every run starts with the initialisation step, so each static crossbar is
written once per run and then only read. The
host must not change the tables while `busy` is high.

The sizes of the table addresses are set in `graph_pkg`:

* `BLK_W = 20` covers 4M vertices;
* `ST_AW = 24` covers 16M subgraphs;
* `PAT_W = 16` covers every possible 4 x 4 pattern.

These sizes hold the largest graph the design was sized for: about 0.9M
vertices and 5M edges.

## Simulating

Any Verilator 5 works; no other tool is needed. To run one testbench from the
repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/graph_pkg.sv tb/graph_tb_pkg.sv tb/tb_graph_accel.sv --top-module tb_graph_accel
./obj_dir/Vtb_graph_accel
```

Verilator may print style and width warnings. If the build stops on them,
add `-Wno-fatal`.

Every testbench prints `TB_RESULT checks=<n> failures=<n>`. Each one has a
watchdog that ends the run with a failure if the design hangs.

| testbench | what it checks |
|---|---|
| `tb_reram_crossbar` | random patterns and wordlines against a bit count; the write counter |
| `tb_sample_hold` | hold and track behaviour |
| `tb_adc` | code = held value, bitline select, one-cycle latency, saturation |
| `tb_xbar_driver` | wordline patterns for both operations, inactive sources, write rows |
| `tb_ge_alu` | min and sum updates against a reference, saturation |
| `tb_ge_fifo` | random push/pop against a queue model, full/empty, ordering |
| `tb_ge_controller` | read counts, row skipping and the cycle formula (at small cycle counts) |
| `tb_graph_engine` | a static M=1 engine and a dynamic M=2 engine against a reference; the 13-cycle latency |
| `tb_ge_interconnect` | steering, fairness of the round robin, no lost or duplicated results |
| `tb_global_controller` | a 32-vertex BFS with 4 small engine models; barriers, reuse, replacement |
| `tb_graph_accel` | full-size design (defaults, 32 engines) end to end; described below |
| `tb_workload_bfs` | BFS on five engine configurations at once; described below |

`tb_graph_accel` runs on a 64-vertex graph with a long chain, random single
edges, a recurring two-edge pattern, and dense windows that overflow the
dynamic crossbars. It runs three jobs:

1. BFS in column-major order;
2. BFS in row-major order;
3. one gather-sum pass.

It compares every vertex with a reference model. It fails unless each of the
following happened at least once:

* static processing;
* reuse of a dynamic crossbar;
* a rewrite and a replacement of a dynamic crossbar;
* an input-buffer stall;
* a batch barrier;
* a multi-pass run;
* row-major order;
* gather-sum.

It also checks three counts:

* each run writes every static crossbar exactly once;
* a BFS run reads fewer than C rows per subgraph, because empty rows and
  inactive sources are skipped;
* the gather-sum pass makes exactly eight reads per subgraph.

It builds in under a minute and runs in well under a second.

`tb_workload_bfs` runs one BFS on a generated 128-vertex graph. The graph has
a skewed out-degree with a few hub vertices, a long chain, and some dense
windows. It runs side by side on five accelerators, each with its own copy of
memory:

* 32 engines with N = 0, 8, 16 and 31 static engines;
* 6 engines, 4 of them static, with 4 crossbars each.

It checks every BFS level and the static write counts. It also checks that
16 static engines cut the dynamic writes compared with none, and that the
4-crossbar engines use their upper crossbars. It prints the cycles, reads
and writes of each configuration. In one run:

| configuration | cycles | dynamic row writes | reads static / dynamic |
|---|---|---|---|
| T=32, N=0 | 17791 | 1920 | 0 / 1339 |
| T=32, N=8 | 17349 | 1532 | 425 / 916 |
| T=32, N=16 | 17182 | 1204 | 722 / 618 |
| T=32, N=31 | 25873 | 880 | 904 / 438 |
| T=6, N=4, M=4 | 28401 | 1280 | 722 / 618 |

For the 6-engine configuration it also prints each engine's activity. Each
static engine is written 16 rows (4 crossbars, once) and read about 180
times. Each dynamic engine is written 640 rows and read about 310 times.

On a graph this small, the batch barriers dominate the run time. The gain
from static engines shows mainly in the writes, and too many static engines
cost time. It takes about a minute to build and run.

## Departures from the original description, and what is modelled only roughly

* **Analog parts are behavioural.** The crossbar, S/H and ADC compute the
  ideal integer results. Nothing models conductance spread, IR drop, sense
  amplifiers or ADC noise. Energy is not modelled.
* **Clock and cycle counts are this design's own.** The published timing is
  given in nanoseconds. The cycle counts come from it at an assumed 1 GHz.
  How wide the shared ADC is, and how many bitlines share one, is a choice:
  one ADC per engine.
* **Pattern storage.** The original stores each pattern as a list of edge
  coordinates together with row addresses. Here it is a C x C bitmap plus a
  row mask. The information is the same, in a fixed width.
* **Replacement policy.** The published algorithm rewrites a dynamic engine
  for every non-static subgraph. Its replacement policy is not specified.
  Here a dynamic crossbar that already holds the pattern is reused without a
  write, and otherwise the victim is chosen round-robin. Because of this,
  this design makes no more dynamic writes than the original scheme would.
* **Batching.** Batches are groups of subgraphs that share a destination (or
  source) block, separated by a barrier. In the original, batch size is set
  by the number of free engines. Here free engines show up as input-buffer
  backpressure rather than as a fixed batch length.
* **Operations.** Two operations are provided. Min-plus-one covers BFS, the
  algorithm used in the evaluation. Saturating gather-sum is the core of
  PageRank. Scaling and damping for PageRank, and weighted edges, are left to
  the host. Vertex values are 8 bits, and 255 means unreached.
* **Engines are either static or dynamic.** The original engine drawing
  shows one static and one dynamic crossbar in the same engine, but it is
  described as a generic picture, and the method keeps each engine all-static
  or all-dynamic. The RTL follows the method, through `IS_STATIC` per engine.
* **Weighted shortest paths are not supported.** The cells hold one bit, and
  the original does not say how edge weights would be stored. `OP_MIN` gives
  shortest paths on unweighted graphs, which is the same as BFS.
* **Configuration-only requests return nothing.** In the original, every
  input-buffer entry has a matching output entry. Here only requests that
  carry vertex data produce a result. The configuration-only requests sent
  at initialisation produce none.
* **Capacity.** The evaluation quotes a 32 KB crossbar capacity. How that maps
  onto 4 x 4 crossbars is not stated. The RTL builds 32 engines x one 4 x 4
  crossbar, as in the main configuration.
* **Worked example.** The small worked example that accompanies the
  original description lists its pattern occurrences inconsistently between
  text and figure. Nothing here depends on it.
* **Not built.** The following are outside the RTL:
  * the main memory;
  * the host-side preprocessing, which is provided only as testbench code;
  * the energy and lifetime models.

  The read and write counters (`static_xb_reads`, `dynamic_xb_reads`,
  `static_xb_writes`, `dynamic_xb_writes`, and the per-engine `xb_reads` and
  `xb_writes`) are the inputs that energy and lifetime estimates need.

## Changing the design

* `T`, `N`, `M`, the buffer depths and the read/write cycle counts are
  parameters of `graph_accel`. The engine and crossbar indices allow
  `0 <= N <= T <= 256` and `M <= 4`. Simulated so far: T = 32 with N = 0, 8,
  16 and 31, and T = 6 with M = 4. Wider ranges need `GE_W` and `CB_W` in
  `graph_pkg` changed.
* `C` and `DATA_W` are package constants in `rtl/graph_pkg.sv`. The reference
  models and the preprocessing follow them. The ALU's bit-serial sum assumes
  `DATA_W = 8` planes of an 8-bit ADC.
* The testbenches for the small blocks override parameters such as the cycle
  counts, to keep them short. `tb_graph_accel` uses the top's defaults.
