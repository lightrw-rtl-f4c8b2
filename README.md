# LightRW — a streaming FPGA engine for graph dynamic random walks

A *graph dynamic random walk* moves a walker from vertex to vertex. At each step it picks the next
vertex from the current vertex's neighbors, with probabilities that depend on the walker's state.
Two applications are supported:

- **MetaPath**: an edge can be taken only if its relation label matches the label required at this step.
- **Node2Vec**: the choice depends on the previous vertex.

Because the weights change at every step, they cannot be prepared ahead of time. A CPU therefore
spends most of its time on two things:

- fetching neighbor lists with poor locality;
- running two-pass samplers (build a table, then draw from it) over those lists.

This RTL takes a different route. It streams every neighbor list once through a pipeline that:

1. computes each neighbor's dynamic weight on the fly;
2. feeds the weight straight into a **weighted reservoir sampler** (WRS).

The WRS picks one neighbor in a single pass, with no table and no second read. Two memory-side
mechanisms keep the stream full:

- a **degree-aware cache** for per-vertex information;
- a **dynamic burst engine** that chooses burst lengths from the neighbor-list length.

Many walks are in flight at once, and their steps interleave in the pipeline. The top level
places four independent pipelines side by side, one per DRAM channel.

Everything is SystemVerilog-2017 in `rtl/`. Self-checking testbenches and a behavioural DRAM model
are in `tb/`.

## Pipeline of one instance

```
            +------------------------------------------------------------+
            v                                                            |
query_scheduler --step--> neighbor_info_loader --info--> dynamic_burst_engine
  ^   |  (loop-back)        (degree_aware_cache)             (K neighbors / beat)
  |   |                         |  ctx                           |
  |   v result words            v                                v
  |  DRAM                 context FIFO ----------------> weight_updater
  |                                                             |
  +------------------------------ sample ---------------- wrs_sampler
```

The whole path is valid/ready-handshaked, and every stage works at the same time. A *step*
carries a context `ctx_t`:

| Field | Meaning |
|---|---|
| `qid` | query id |
| `step` | step number |
| `len` | query length |
| `v_curr` | current vertex |
| `v_prev` | previous vertex |

Each step takes this path:

1. **Info lookup.** `neighbor_info_loader` turns `v_curr` into `{address, degree}`, the vertex's
   row_index entry. The answer comes from the cache, or from a DRAM read on a miss. The answer is
   forked two ways:
   - to the burst engine;
   - with the context, into a context FIFO.
2. **Neighbor stream.** `dynamic_burst_engine` streams the neighbor list out of col_index as
   512-bit beats of K = 16 edge words. Each beat has a per-lane mask and a `last` flag.
3. **Weights.** `weight_updater` computes the dynamic weight of every lane from the edge word and
   the context.
4. **Sampling.** `wrs_sampler` takes 16 (item, weight) pairs per cycle. At `last` it emits the
   chosen neighbor, or "not found" if every weight was zero.
5. **Result and loop-back.** `query_scheduler` writes the result word. If the walk continues, it
   loops the query back with `step + 1`.

Loop-back queries have priority over new ones. No more than `MAX_INFLIGHT` (64) queries are in
the loop at a time. The loop-back queue is as deep as that bound, so a returning sample can always
be accepted and the loop cannot deadlock.

## Parallel weighted reservoir sampling

Sequential WRS (the A-Chao form) keeps one reservoir item and a running weight sum `W`. When item
`i` with weight `w_i` arrives, it does two things:

- it adds `w_i` to `W`;
- it replaces the reservoir with probability `w_i / W`.

At the end, item `i` is in the reservoir with probability `w_i / sum(w)`.

The hardware does the same for K items per cycle without changing the result.

**Step a and b — `wrs_weight_accumulator`** (two register stages):

- A prefix sum over the beat gives `w_0`, `w_0+w_1`, and so on.
- The sum of all earlier beats, `w_sum`, is added to each prefix.
- Lane `j` therefore sees exactly the running sum that the sequential algorithm would have at
  that item: `acc_j = w_sum + w_0 + ... + w_j`.
- `w_sum` then grows by the beat total, and is cleared after the beat marked `last`.

**Step c — `wrs_selector`**: every lane makes its replacement test in parallel. The test
`w_j / acc_j > r` with a uniform `r` in [0,1) becomes, for a 32-bit random integer `r*`:

```
2^32 * w_j  >  r*_j * acc_j + w_j
```

This needs only a shift and a multiply-add, with no divider. Adding `w_j` on the right makes a
lane with `w_j = acc_j` (the first non-zero item) always pass, as it must.

**Step d — `wrs_selector`**: several lanes of one beat may pass. Sequentially each would overwrite
the previous one, so only the **highest-indexed** candidate matters. A binary tree of
"keep the right one if it passed" comparators finds it in log2(K) levels.

**Output — `wrs_output`**: if the beat had a candidate, its item becomes the reservoir. At `last`
the reservoir and the context leave as a `sample_t`, and the reservoir is cleared.

Taken together, the sampler accepts one beat per cycle, which is 16 neighbors per cycle, and has
a latency of 5 cycles. It stalls only when its output is not taken.

**Random numbers — `thundering_prng`**: the sampler needs 16 independent 32-bit numbers per beat.
The generator has three parts:

- one shared 64-bit LCG state generator;
- per lane, a PCG-style "xorshift, random rotate" output function applied to the state plus a
  lane-specific odd offset;
- per lane, a xorshift32 decorrelator XORed into the output.

The numbers advance only when a beat is accepted. This structure — one shared state plus one
decorrelator per lane — mirrors the generator the design is based on, but the mixing functions
are this design's own. It passes simple mean, bit-balance and lane-correlation tests. No
statistical test suite has been run on it.

## Degree-aware cache

Random walks revisit high-degree vertices far more often than others. `degree_aware_cache` is a
direct-mapped cache of row_index entries with `CACHE_LINES` = 4096 lines. Each line holds
`{valid, tag, address, degree}`.

- **Hit**: the answer comes one cycle after the request is accepted, and a new request is
  accepted in the same cycle, so hits stream at one per cycle.
- **Miss**: the row_index line is read from DRAM. The entry is returned at once, and then it
  **replaces the cached line only if its degree is larger than the cached one's** (or the line is
  empty).

A rarely visited low-degree vertex can therefore never evict a hub, while a plain direct-mapped
cache would thrash between them. The cache blocks on a miss, so answers stay in request order. It
counts hits, misses and replacements.

## Dynamic burst engine

A neighbor list occupies the col_index lines from `first = addr/16` to `last = (addr+deg-1)/16`,
which is `n` 512-bit lines. Long bursts use the DRAM efficiently but waste data on short lists.
Single-beat bursts waste nothing but are slow on long lists.

`burst_cmd_generator` splits each list into two kinds of burst:

- `floor(n/S1)` bursts of `S1` = 32 beats, sent to the long-burst pipeline;
- the remainder as bursts of `S2` = 1 beat, sent to the short-burst pipeline.

The waste is therefore at most one short burst. Each command also writes an order record that
tells `intra_burst_merge` how to rebuild the stream:

- which pipeline the command went to;
- how many beats it covers;
- which vertex it belongs to;
- whether it is the vertex's last command.

Each `burst_channel` is one memory port with its own command queue and data buffer. It issues a
burst only when buffer space for the whole burst is reserved, so returned data is never refused and
the port never blocks. The two channels run independently.

`intra_burst_merge` pulls beats from the two channels in list order and computes the mask of lanes
inside `[addr, addr+deg)`. A vertex without neighbors produces one all-masked beat and no memory
access, so the sampler still reports "not found" for it.

## Weight functions

Each col_index word is `{weight[31:28], relation[27:25], vertex[24:0]}`.

**MetaPath**: weight = `w*` if `relation == rel_path[step]`, else 0. The relation schema
`rel_path` has up to 16 entries and is a configuration input.

**Node2Vec** (p = 2, q = 0.5): the three cases `w*/p`, `w*` and `w*/q` are scaled by 2 to avoid
fractions.

| Candidate | Weight |
|---|---|
| the previous vertex | `w*` |
| a neighbor of the previous vertex | `2w*` |
| any other vertex | `4w*` |
| any candidate on the first step | `2w*` |

Whether a candidate is a neighbor of the previous vertex needs a lookup in a second neighbor list.
That lookup is **not built**. Each instance takes the answer as the per-lane input
`n2v_prev_adj[K]`, aligned with the beat entering the weight updater. The testbench computes this
input from its copy of the graph. If the input is tied to zero, a Node2Vec build still walks
only real edges, but it treats every non-return neighbor as distant (`4w*`). A MetaPath build
ignores the input. `APP` selects the
application per build.

## Memory layout (per instance)

| Region | Base (line address) | Format |
|---|---|---|
| queries | `query_base` | one 32-bit start vertex per query, 16 per line |
| row_index | `row_base` | 64-bit `{degree[63:32], offset[31:0]}` per vertex, 8 per line |
| col_index | `col_base` | 32-bit edge words, 16 per line; `offset` counts words |
| results | `result_base` (**word** address) | word `qid*query_len + step` = vertex reached, `0xFFFFFFFF` = dead end, nothing after it |

All read ports take a 512-bit line address and a beat count, and return whole lines. The write
port writes single 32-bit words.

## Top level — `lightrw_top`

`NUM_INST` = 4 instances, each with its own DRAM channel, as on a card with four channels. All
ports are plain arrays indexed by instance. Each instance has:

- its configuration: `start`, `num_queries`, the bases and `done`;
- five memory ports: query read, result write, row_index read, long-burst read, short-burst read;
- the Node2Vec adjacency input;
- counters: steps, dead ends, cache hits, misses and replacements, long and short bursts.

`query_len` and `rel_path` are shared by all instances. Each instance gets its own random seed.

The following are left outside the RTL, and their signals are the top's ports:

- the DRAM controllers;
- the vendor crossbar between the engines and a channel;
- PCIe DMA;
- the host program that loads the graph and splits the queries.

## How far to trust it — departures and own choices

- **Node2Vec adjacency**: not computed in hardware (see above). MetaPath is complete.
- **Random number generator**: a stand-in with the same structure as the original generator, not
  the original algorithm.
- **Burst sizes** are counted in 512-bit lines, not bytes.
- **Sum width**: the sampler's running sums are 32 bits. With 4-bit weights scaled by at most 4,
  a neighbor list may hold about 71M edges before a sum could overflow.
- **Own choices, not from the source design**:
  - the record formats above and the 25-bit vertex id (up to 33.5M vertices);
  - 4-bit static weights and 3-bit relation labels;
  - the result layout;
  - direct-mapped indexing of the cache, and blocking on a miss;
  - the loop-back priority and `MAX_INFLIGHT`;
  - credit-based burst issue;
  - buffer depths;
  - the register stages of the sampler.
- **Missing in hardware**: the vendor interconnect, DMA and host, as listed under the top level.
- **Sizes**: every default is at the source design's values (K = 16, 4096-line cache,
  bursts of 32 and 1, four instances).
- **Evaluated graphs**: the largest graph the source design was evaluated on (18.5M vertices,
  298M edges) fits the id and address widths.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog. Control registers
use an active-low asynchronous reset, and the testbenches assert it with a falling edge. The
testbenches pass with Verilator's random initial values (`+verilator+rand+reset+2`). With
Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/lightrw_pkg.sv \
    tb/tb_lightrw_top.sv --top-module tb_lightrw_top -Mdir obj -o sim && ./obj/sim
```

| Testbench | What it checks |
|---|---|
| `tb_wrs_weight_accumulator` | prefix and running sums, including a worked 4-lane example, against a software model |
| `tb_wrs_selector` | candidate test against an exact real-number division; highest-candidate choice |
| `tb_thundering_prng` | mean, bit balance, lane correlation, hold without advance, reproducibility |
| `tb_wrs_sampler` | directed streams, all-zero streams, 1 beat/cycle and 5-cycle latency, back-pressure, and a frequency check of `w/sum(w)` |
| `tb_degree_aware_cache` | replacement rule against a reference model, including the worked example "cached degree 3 vs. fetched degree 31"; 1-cycle hit latency and one hit per cycle when streamed |
| `tb_neighbor_info_loader` | row_index decoding, order, hit/miss/read accounting |
| `tb_dynamic_burst_engine` | every neighbor in order, masks, exact long/short burst counts, beats per port |
| `tb_weight_updater` | both weight functions lane by lane |
| `tb_query_scheduler` | with a modelled pipeline: result words, loop-back contexts, in-flight bound, dead ends |
| `tb_lightrw_instance` | one Node2Vec instance, 256 walks of 80 steps: every step is a real weighted edge; the 1 : 2 : 4 second-order bias is measured on a hand-built sub-graph |
| `tb_lightrw_top` | the full four-instance design at default parameters: 5000-vertex graph with hubs of 600–1000 edges and empty vertices; every result checked; every mechanism counted |

The mechanisms counted by `tb_lightrw_top` are:

- cache hits, misses, replacements, and misses that keep the old line;
- long and short bursts;
- empty lists;
- dead ends;
- result-port back-pressure.

`tb/dram_model.sv` is a behavioural multi-port memory. It has a random latency and random ready
signals, and the testbenches load it directly.
