# PEFP: an FPGA engine for k-hop constrained s-t simple path enumeration

Given a directed graph, a source `s`, a target `t` and a hop limit `k`, the engine lists
every *simple* path from `s` to `t` with at most `k` edges. The number of such paths
grows exponentially with `k`, and so does the number of partial paths that a search has
to keep. The design handles this in three ways:

* **Batched breadth-first expansion.** Partial paths are extended one hop at a time in
  batches. Every successor of a batch is checked by a small, fully combinational
  verifier, so the work is a regular stream that suits hardware.
* **Depth-first batch selection (Batch-DFS).** Each batch is taken from the top of a stack
  of partial paths. The longest paths therefore go first, which keeps the set of live
  paths small.
* **Two-level storage.** The graph and the path set live in on-chip RAM as far as they
  fit, and the rest stays in DRAM. Graph lookups that miss on-chip storage fall back to
  DRAM. When the stack of partial paths fills up, it is spilled to DRAM and read back
  later in fixed-size chunks.

A software pre-pass on the host, not part of this RTL, first shrinks the graph. It keeps
only the vertices that can lie on an s-t path of length ≤ k, renumbers them, and
computes a *barrier* `bar[u]`: a lower bound on the hop distance from `u` to `t`. The
engine receives this reduced graph in CSR form in DRAM.

## The search in one picture

```
           +-------------------- pefp_top --------------------------+
 start,s,t,k -> control FSM: INIT -> SEED -> LOOP <-> BATCH -> EXPAND |
           |                          |  ^                  |   ^   |
           |          graph_cache <---+--+---- expander ----+   |   |
  graph    |  (offsets, edges, bar    |  |   (validity_check:   |   |
  DRAM  <->|   in on-chip RAM, DRAM   |  |    target/barrier/   |   |
  port     |   fallback on a miss)    |  |    visited)          |   |
           |                          v  |        | push        |   |
           |   path_stack (buffer area) <---------+             |   |
           |        |  ^  top entries                           |   |
           |        |  +-- batch_dfs --> processing_area -------+   |
           |        |                                               |
  path     |   spill_ctrl: flush whole stack / refill THETA1 paths  |
  DRAM  <->|        (DRAM holds the spilled path set as a stack)    |
           +--------------------------------------------------------+
                         results: valid/ready stream of s-t paths
```

Once per query the control FSM does the following:

1. **INIT.** `graph_cache` loads as much of the offset array, edge array and barrier array
   as fits on chip.
2. **SEED.** It looks up `s` and pushes the one-vertex path `{s}` onto the buffer area,
   with a neighbour range covering all of `s`'s out-edges.
3. **LOOP.** One of three things happens:
   * If the buffer area holds paths, Batch-DFS fills the processing area with the next
     batch, and the expander checks and extends every successor in it.
   * Otherwise, if paths were spilled to DRAM, `spill_ctrl` reads the newest `THETA1` of
     them back into the buffer area.
   * Otherwise, the query is done and `done` pulses.

## Path records and neighbour ranges

Every partial path is a `path_rec_t` (see `pefp_pkg`) with these fields:

* `v[0..MAX_K-1]`: its vertices.
* `len`: its length in edges.
* Three edge-array pointers into the out-edges of its last vertex:
  * `nb_start`: the first successor of the path that has not yet been handed out.
  * `nb_end`: end of the slice handed out most recently. The first slice is
    `[nb_start, nb_end)`; after that, `nb_end` is the first successor still pending.
  * `nb_last`: one past the vertex's last out-edge. It is `off[u+1]`.

A newly created path has `nb_start = nb_end = off[u]` and `nb_last = off[u+1]`.
These pointers are what allow a path to be *split*. A vertex of very high degree (a
"super node") may have more successors than a whole batch holds. Batch-DFS then hands out
one slice of them now, leaves the path on the stack with `nb_end` moved forward, and hands
out the rest in later batches. A batch's size is therefore measured in successors
(`THETA2`), not in paths. This bounds the work per batch however skewed the degrees are.

Results are `result_t`: up to `MAX_K+1` vertices plus a length. A result is the stored
path with `t` appended.

## Batch-DFS (`batch_dfs`)

Batch-DFS walks the buffer-area stack from the top downwards, keeping `cnt`, the number
of successors collected so far. For each entry it does the following:

* `ptr1 = nb_end`, `ptr2 = min(ptr1 + (THETA2 - cnt), nb_last)`.
* If `ptr2 > ptr1`, it copies the entry into the processing area with the slice
  `[ptr1, ptr2)` and adds `ptr2 - ptr1` to `cnt`.
* If `ptr2 == nb_last`, every successor of the path has now been handed out, so the entry
  is popped.
* Otherwise the entry is rewritten with `nb_end = ptr2` and stays on the stack. This is
  counted as a split.

It stops when `cnt` reaches `THETA2` or the bottom of the stack is reached. Only an entry
at the top can be popped: the walk pops top entries until it meets one that stays, and
the entries below that one can only become the new top through the same rule. So the
stack stays contiguous.

Each entry costs two cycles, because the stack RAM is read synchronously.

## Verification (`validity_check`, `expander`)

For every successor `u` of a processing-area entry `p`, three independent checks run in
parallel in the same cycle. Each has its own module:

| check | condition | verdict |
|---|---|---|
| target (`target_checker`) | `u == t` | output `p + t` as a result |
| barrier (`barrier_checker`) | `len(p) + 1 + bar[u] > k` | drop |
| visited (`visited_checker`) | `u` is one of `p`'s vertices | drop |

The verdicts are merged with priority target > barrier > visited. If none fires, the
verdict is `VALID`: the path `p + u` is pushed onto the buffer area with its neighbour
range.

Splitting the data this way means the barrier check needs only `len(p)` and `bar[u]`,
while the visited check needs the path vertices and `u`. The visited check compares
against all `MAX_K` slots at once, masked by `len(p)`, so its cost does not grow with
`k`. The merged verdict is registered: it is ready one cycle after the inputs.

The expander processes one successor at a time. When the on-chip cache hits, each
successor takes five cycles: an edge lookup, a vertex lookup for `off[u]`, `off[u+1]`
and `bar[u]`, the check, and the action. Each processing-area entry adds two cycles to
read it.

Two conditions make it stall:

* **Result back-pressure.** A `TARGET` verdict waits for `res_ready`.
* **Full buffer area.** A `VALID` verdict that finds the buffer area full raises
  `flush_req`. The top then spills the whole stack to DRAM and the push is retried.

## Graph cache (`graph_cache`)

The reduced graph sits in DRAM as three arrays of 32-bit words, each at its own base
address:

* `off[0..|V|]`: CSR row offsets.
* `edg[0..|E|-1]`: the successor lists.
* `bar[0..|V|-1]`: the barriers.

When a query starts, the cache copies the first `VCAP+1` offsets, the first `ECAP`
edges and the first `VCAP` barriers into on-chip arrays. It copies fewer if the graph is
smaller.

Lookups are answered as follows:

* A lookup inside the copied prefix is answered one cycle after the request.
* A lookup outside it reads DRAM. An edge miss reads one word; a vertex miss reads three.
  The answer then comes after the DRAM latency, roughly 7–8 cycles on the target board.

Miss counts are exported in `stats`, so the share of graph traffic that went off chip can
be read after a query.

## Buffer area spills (`spill_ctrl`)

The spilled path set in DRAM is kept as a stack, addressed in whole path records on the
path DRAM port.

* **Flush.** When the buffer area is full, every record it holds is written to DRAM
  above the current DRAM depth `pd_count`. The on-chip stack is then cleared.
* **Refill.** When the buffer area is empty, the newest `min(THETA1, pd_count)` records
  are read back and pushed in their original order.

Since DRAM is written and read only at its tail, it never fragments. Because refills take
the newest paths, the search remains depth-first across the spill.

## Interfaces (`pefp_top`)

| group | signals | notes |
|---|---|---|
| query | `start`, `s`, `t`, `k`, `num_vertices`, `num_edges`, `off_base`, `edge_base`, `bar_base` | `start` is a one-cycle pulse. The other signals must stay stable until `done`. Addresses are 32-bit word addresses. Vertex ids are those of the reduced graph. |
| status | `busy`, `done` | `done` pulses once per query |
| results | `res_valid`, `res_data`, `res_ready` | one path per beat; the engine holds `res_data` until it is accepted |
| graph DRAM | `g_req_valid/addr/ready`, `g_rsp_valid/data` | reads only; responses return in order |
| path DRAM | `p_req_valid/write/addr/wdata/ready`, `p_rsp_valid/rdata` | one `path_rec_t` per word; read responses return in order |
| counters | `stats` (`pefp_stats_t`) | results, pushes, barrier and visited prunes, batches, splits, flushes, refills, edge and vertex misses. Cleared only by reset. |

Reset is synchronous and active low. Every module has one clock.

Default sizes:

| parameter | default | meaning |
|---|---|---|
| `VCAP` | 65,536 | vertices whose offsets and barriers are held on chip |
| `ECAP` | 262,144 | edges held on chip |
| `BUF_DEPTH` | 4,096 | path records in the buffer area, at 613 bits each |
| `THETA2` | 256 | successors per batch; also the processing-area depth |
| `THETA1` | 1,024 | path records per refill |
| `MAX_K` | 16 | largest supported `k`, in `pefp_pkg` |

Together these use about 13.5 Mbit of on-chip RAM. That fits the Alveo U200-class device
the engine is sized for.

## Where this design departs from the published architecture

* **One verification lane.** The published pipeline verifies `n` successors per cycle in
  parallel lanes but does not say what `n` is. Here there is one lane, and a successor
  takes five cycles rather than one. The batch flow and the verdicts are unchanged; only
  the throughput differs.
* **Sizes and widths are this design's own.** The cache sizes, buffer depth, `THETA1`,
  `THETA2`, the 32-bit ids and the 5-bit hop counts are all assumed; none of them is
  published.
* **Prefix caching.** Which part of the graph is cached is not specified. Here it is the
  leading part of each array, loaded once per query.
* **Whole-buffer flush.** The flush is triggered by the buffer being full, and it spills
  the whole buffer.
* **Seeding.** The seed `{s}` goes through the buffer area instead of straight into the
  processing area. The first batch comes out the same.
* **Two DRAM ports.** Graph words and path records use separate ports. The path port
  moves one whole 613-bit record per beat.
* **Not included.** The host-side pre-pass (k-hop BFS from `s` and `t`, pruning,
  renumbering, barriers), the PCIe transfer and the DRAM controller are outside the RTL.
  The testbenches model them.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_validity_check` | about 2,000 random and directed cases against a reference model of the three checks, including the one-cycle latency |
| `tb_graph_cache` | hits and misses with tiny `VCAP`/`ECAP`; exact hit latency (1 cycle) and miss latency |
| `tb_path_stack`, `tb_processing_area` | random operation sequences against a queue model |
| `tb_batch_dfs` | random stacks against a software Batch-DFS: the batch contents, the pops, the rewritten pointers and the successor count |
| `tb_spill_ctrl` | flush and refill order, DRAM addresses, and `pd_count` |
| `tb_expander` | verdict actions, pushes, results and the flush handshake, plus an exact cycle count of `2·paths + 5·successors` on cache hits |
| `tb_pefp_top` | ten random queries end to end at tiny sizes. Every reported path must be a real s-t k-path in the original graph and appear only once, and the count must match a reference depth-first search. It also checks that cache misses, splits, flushes, refills, both kinds of pruning and result back-pressure each occurred at least once. |
| `tb_pefp_full` | one query of a 300-vertex random graph with `k = 6` at every default size |
| `tb_pefp_workload` | four queries at every default size. Each runs on a random graph with the edges-per-vertex ratio of a real benchmark graph: Reactome (6,300 vertices, 23 edges per vertex, `k = 4`), twitter-social (`k = 8`), Baidu with 600-edge super nodes (`k = 5`) and Amazon (`k = 12`). The results are checked as above, and the test requires super nodes to be split. |

Support files:

* `pefp_host_pkg` holds the host model. It generates a random graph with a few
  high-degree hubs, runs the pre-pass and builds the CSR arrays. Its reference
  enumeration is used to check the results.
* `graph_dram_model` and `path_dram_model` are latency-accurate behavioural DRAM models
  with random stalls.

Simulating with plain Verilator: list the packages first, then the RTL, then the
testbench and its models. For example:

```
verilator --binary --timing -Wno-fatal -Irtl \
  rtl/pefp_pkg.sv tb/pefp_host_pkg.sv rtl/*_checker.sv rtl/validity_check.sv \
  rtl/graph_cache.sv rtl/path_stack.sv rtl/processing_area.sv rtl/batch_dfs.sv \
  rtl/spill_ctrl.sv rtl/expander.sv rtl/pefp_top.sv \
  tb/graph_dram_model.sv tb/path_dram_model.sv tb/tb_pefp_top.sv \
  --top-module tb_pefp_top -o sim && ./obj_dir/sim
```

To test a single block, pass `pefp_pkg.sv`, the block, the modules it uses and its
testbench.

Keep in mind that the simulator has only two states. Uninitialised state starts as
random values, so every register the design reads is reset. The testbenches ignore
outputs while reset is asserted.
