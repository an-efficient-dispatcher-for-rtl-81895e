# A dual-module BFS engine with a runtime module dispatcher

Breadth-first search over a power-law graph has two very different phases.
In the first and last levels only a few vertices are active. Following each
active vertex's out-edges (vertex-centric *push*) touches little memory.
In the middle levels most of the graph becomes active at once. There it is
cheaper to stream whole groups of edges and let each unvisited destination
*pull* from an active source (edge-centric).

This design puts both engines on one chip:
- a **low parallel unit** for the push phase;
- a **high parallel unit** for the pull phase;
- a **processing dispatcher** that measures the state of the search after
  every level and picks the unit for the next level.

All graph data sits in one external DDR memory. A small set of on-chip
bitmaps records which vertices and blocks still matter, so only useful data
is fetched.

The RTL is synthesizable SystemVerilog in `rtl/`. It implements BFS; the
result is a depth (level) per vertex, written back to DDR.

## Data layout in DDR

The host builds seven arrays and passes their word base addresses in
`base_addr[]`. The order of `base_addr[]` is `graph_pkg::arr_e`. All
entries are 32-bit words, indexed by element.

| array      | length   | contents                                                   |
|------------|----------|------------------------------------------------------------|
| `OFFSET`   | N+1      | CSR row pointer: out-edges of v are `NEIGH[OFFSET[v] .. OFFSET[v+1]-1]` |
| `NEIGH`    | E        | CSR column indices (destinations)                          |
| `BSTART`   | B        | first edge of edge-block b in `ESRC`/`EDST`                |
| `BCOUNT`   | B        | number of edges in edge-block b                            |
| `ESRC`     | E        | edge-block edge list, sources                              |
| `EDST`     | E        | edge-block edge list, destinations                         |
| `DEPTH`    | N        | result: BFS level, host pre-fills 255 (= unreached)        |

An **edge-block** holds every edge whose destination lies in one range of
`VPB` consecutive vertices (default 8). Block b covers destinations
`b*VPB .. b*VPB+VPB-1`, so B = ceil(N/VPB). Blocks are fixed for the whole
run; what changes is which of them are still worth processing.

## The two processing units

**Low parallel unit (`vertex_pipeline`).** The unit takes active vertices one
at a time from a pipe:
- It reads the vertex's two CSR offsets.
- It then works through the neighbour list in loops of `VERTEX_THREADS` (16)
  neighbours, like a 16-thread group. Each loop first loads up to 16
  neighbour ids into a register cache.
- For each neighbour it does an atomic test-and-set on the visited bitmap.
  A neighbour seen for the first time gets depth `level+1` in DDR and a bit
  in the next-frontier bitmap.
- A vertex of degree d takes ceil(d/16) loops.
- A vertex whose degree reaches the runtime input `hub_degree` raises
  `hub_seen`.

**High parallel unit (`high_parallel_unit`).** This unit has three parts:
- The **edge-block dispatcher** walks an on-chip bitmap of still-active
  blocks. For each active block it reads the block's count and start and
  sorts it by size: *small* (< 64 edges), *middle* (64–2048) or *large*
  (> 2048).
- It writes a descriptor into that class's **pipe**, a FIFO of
  `PIPE_DEPTH` entries. A halt descriptor ends each pipe's stream for the
  level.
- Three **edge pipelines** with 16, 64 and 256 threads drain the pipes in
  parallel. A pipeline works through a block in loops of `THREADS` edges:
  it loads up to `THREADS` (src, dst) pairs, then pulls each one.
  - A pull updates dst only if src is in the current frontier and dst is
    unvisited.
  - A block of c edges therefore takes ceil(c/THREADS) loops. Sizing the
    thread count to the class keeps the loop count bounded: at most 4 for
    small blocks and at most 32 for middle ones. Large blocks get the
    widest group.
- After a block, its pipeline reads the visited word holding the block's
  destinations. The block stays active only while one of them is unvisited.
  It counts as *accessed* if it updated anything.
- These flags go back to the edge-block dispatcher. The dispatcher clears
  the block's bit and gathers the statistics for the switch rule.

Both units reach DDR only through the **data analyzer**.
- Every request names an array and an index. The analyzer adds the array's
  base address.
- It arbitrates round-robin between its six clients.
- It returns read data to the right client, in order, using a tag FIFO of
  `OUTSTANDING` (32) entries.

## The bitmaps

`bitmap_unit` keeps three bitmaps of `MAX_V` bits (default 2^23) in on-chip
RAM, as 32-bit words:
- *visited*;
- two frontier banks that alternate as *current* (found in the previous
  level) and *next* (found in this level). A `swap` pulse between levels
  exchanges them.

The unit serves six clients one operation at a time. Each operation is a
two-cycle read-modify-write. This makes test-and-set atomic: when two
pipelines reach the same vertex in the same level, exactly one of them
claims it and writes its depth.

| op      | effect                                                                  |
|---------|-------------------------------------------------------------------------|
| `CLEAR` | zero one word of all three bitmaps                                      |
| `ROOT`  | mark a vertex visited and current                                       |
| `PUSH`  | if unvisited: mark visited + next, report `updated`                     |
| `PULL`  | as `PUSH`, only if the source vertex is in the current frontier          |
| `SCAN`  | return the three words of a word index, then clear its current word     |
| `READ`  | return the three words of a word index                                  |

Replies always carry the words as they were *before* the operation.

## One level, step by step

`processing_dispatcher` runs the search.

1. **Start.** On `start` it clears ceil(N/32) bitmap words, marks the root
   and writes depth 0 for it. It also marks all edge-blocks active. The
   first level runs in the low unit, or in the high unit if `start_high`
   is set.
2. **Low level.** The dispatcher scans the current frontier word by word
   and streams the active vertices, lowest first, into the vertex pipe. A
   halt token follows. It waits for the pipeline's `done`.
3. **High level.** The dispatcher pulses `hp_start` and waits for the high
   unit's `done`. The high unit reads the current frontier directly from
   the bitmap.
4. **State analysis.** `state_analyzer` scans all words. It counts
   Na = population of the next frontier and Ni = N − |visited|. The same
   scan clears the old current frontier.
5. **Decision.** `switch_policy` evaluates the rules below. Then the banks
   are swapped and `level` is incremented. The run ends when Na = 0.

### The switch rules

The thresholds `alpha`, `beta` and `gamma` are 16-bit unsigned fixed point
with 8 fractional bits (0x0100 = 1.0). Ratios are compared by
cross-multiplication, so no divider is needed.

**From low to high.** The next level runs in the high unit if either:
- an active vertex of hub degree was processed in this level; or
- Na / Ni > alpha.

The level in progress always finishes in the low unit.

**From high to low.** This uses the high unit's block statistics:
- Nb = small + middle blocks processed;
- Na = those still active;
- Nl = large blocks processed;
- Fl = large blocks that updated a vertex.

The rules:
- Na/Nb < beta **and** Fl/Nl > gamma: switch for the next level.
- Na/Nb < beta alone: run one more level in the high unit, then switch,
  whatever the statistics say then.
- An empty denominator counts as the condition holding.

Every switch is also counted, by its cause, in `stats`.

## Top level

`graph_engine_top` has these ports; all are plain signals or packed
structs:

- **Control:** `start`, `root`, `num_vertices`, `num_blocks`,
  `start_high`, `alpha`, `beta`, `gamma`, `hub_degree`, `base_addr[7]`.
- **Status:** `busy`, `done` (one-cycle pulse), `mode` (unit running),
  `level`.
- **DDR:** a single 32-bit word port.
  - `ddr_req_valid`/`ddr_req_ready`/`ddr_req` carry `{we, addr, wdata}`.
  - `ddr_rsp_valid`/`ddr_rsp_data` return reads, in request order, any
    number of cycles later. Writes get no reply.
- **Counters:**
  - `stats` (`graph_pkg::engine_stats_t`): iterations per unit, switch
    events by cause, vertex-pipeline work, per-class dispatch, loops,
    edges, updates, halts, and pipe-full cycles;
  - `acc_count[7]`: DDR accesses per array.

Default parameters:

| parameter | default | meaning |
|---|---|---|
| `MAX_V` | 2^23 | largest vertex count (bitmap size) |
| `VPB` | 8 | destination vertices per edge-block (1..32, divides 32) |
| `MAX_BLOCKS` | MAX_V/VPB | size of the block-activity bitmap |
| `VERTEX_THREADS` | 16 | neighbours per loop in the low unit |
| `SMALL_THREADS` / `MIDDLE_THREADS` / `LARGE_THREADS` | 16 / 64 / 256 | edges per loop in each edge pipeline |
| `PIPE_DEPTH` | 16 | entries per pipe |
| `OUTSTANDING` | 32 | DDR reads in flight (power of two) |

At the defaults:
- the bitmaps use 3 × 8 Mbit of on-chip RAM, and the block bitmap 1 Mbit;
- 8.39 M vertices are enough for graphs such as LiveJournal
  (4.85 M vertices, 69 M edges). Its arrays take about 0.8 GiB of DDR.

## Where this design departs from its source description

- **Inequality directions.** The published switch formulas are printed as
  Na/Ni < alpha (to high) and Na/Nb > beta (to low). The surrounding
  explanation says the opposite: go to the edge-centric unit when *many*
  vertices are active, and back when *few* blocks remain active. This
  design follows the explanation. The third test (Fl/Nl > gamma) is used
  as printed.
- **The deferred-switch rule.** In the source the rule names the same
  formula twice. It is read as "formula 2 without formula 3".
- **Small-block threads.** The source text gives 1 thread for small
  blocks, but its workload-balance figure shows a 16-thread group. 16 is
  used, and it also matches the "fewer than 8 loops" stated for such blocks.
- **Depth width.** Depth is stored as a 32-bit word per vertex, not one
  byte. Internally the level is 8 bits, so levels up to 254 are
  representable.
- **Sequential threads.** A "thread group" is a loop of up to `THREADS`
  elements loaded into a register cache and then applied one per bitmap
  operation. The edge loads of a loop overlap in DDR, but the updates are
  serial, one per two cycles. The design keeps the per-class loop structure
  and the concurrency *between* the three pipelines and the dispatcher. It
  does not reproduce the throughput of 256 parallel work-items.
- **Single DDR port.** Every unit shares one port through the data
  analyzer. There are no per-pipeline caches beyond the register edge cache.
- **Block activity.** Activity is decided from the visited bitmap: a block
  stays active while any destination is unvisited.
- **BFS only.** PageRank and connected components, which need
  per-vertex rank or label arithmetic, are not implemented.
- **Host work.** Building CSR and edge-blocks is the host's job, as is
  loading DDR. The testbench package does it in software.
- **Example graph.** The edge-block example figure of the source shows an
  edge 3→1 where its graph figure has 3→0, and it uses 2 vertices per
  block. The testbenches use the graph figure's edges and 8 vertices per
  block.

## Verification

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`.
Each prints `TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.
The testbenches compare against models written independently of the RTL:
- `tb_mem_model` and `ddr_model` are behavioural memories with random
  stalls and latency;
- `tb_bm_model` is a bit-array bitmap;
- `tb_graph_pkg` provides CSR / edge-block construction and a reference
  BFS.

What the unit testbenches check:
- FIFO ordering and back-pressure;
- address formation, routing and round-robin fairness in the data analyzer;
- bitmap operations, including the atomic concurrent push;
- Na/Ni counting;
- every switch rule against a real-valued reference;
- loop counts ceil(count/threads) for all three pipelines at the class
  boundaries;
- block dispatch order, classification and retirement;
- a complete pull-only BFS through the high unit;
- the level sequence and module choice of the dispatcher.

`tb_graph_engine_top` runs the full engine at its default parameters:
- the example graph;
- a skewed 4096-vertex graph with a hub and blocks of all three classes;
- two more runs that force eq. (1) and a start in the high unit.

It checks every vertex's depth against the reference BFS. It also counts a
failure for any mechanism that never occurred:
- hub, eq. (1), eq. (2)+(3) and deferred switches;
- low and high levels;
- multi-loop vertices;
- small, middle and large pipelines, and large blocks needing more than 8
  loops;
- full pipes, DDR stalls and halt tokens.

It finishes in seconds.

`tb_bfs_workload` runs one BFS at the default parameters on a generated
graph of the size of soc-Epinions:
- 80,000 vertices and 510,000 edges;
- a random shallow tree plus destinations drawn from a steep power law.

It checks all 80,000 depths. In a typical run:
- the search takes about 6.1 M cycles;
- it runs 7 levels in the low unit and 4 in the high unit;
- it switches twice in each direction.

It takes about a minute in Verilator.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/graph_pkg.sv tb/tb_graph_pkg.sv rtl/*.sv \
  tb/ddr_model.sv tb/tb_mem_model.sv tb/tb_bm_model.sv tb/tb_graph_engine_top.sv \
  --top-module tb_graph_engine_top
./obj_dir/Vtb_graph_engine_top
```

Replace the last testbench file and `--top-module` for the others.
