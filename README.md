# GNNIE: one engine for the weighting and the aggregation of graph neural networks

A graph neural network layer does two different kinds of work. **Weighting**
multiplies every vertex's feature vector by a weight matrix (`eta = h * W`). The
input features are very sparse, and the sparsity differs a lot from one column
block to the next. **Aggregation** combines, for every vertex, the weighted
features of its neighbours (sum, max, or an attention-weighted sum for graph
attention networks). Its memory access is irregular and follows the power-law
degree distribution of real graphs.

This RTL builds both on one array of computation PEs (CPEs). It uses three ideas:

* **Flexible MAC rows and workload reordering.** The input feature vector is cut
  into `M = 16` blocks of `k` elements. CPE row `r` always works on one block.
  The rows differ in how many multipliers (MACs) they have: rows 0-7 have 4,
  rows 8-11 have 5, and rows 12-15 have 6. Before a layer runs, the blocks are
  ranked by their nonzero count, and the sparsest block goes to the row with the
  fewest MACs. So the row with the most work also has the most MACs.
* **Load redistribution (LR).** Rows can still finish at different times. A
  light row that runs dry is reloaded with the weights of its heavy partner
  row, then takes blocks from the partner's queue.
* **Degree-aware vertex caching for aggregation.** Vertices are numbered in
  descending degree order. Only a subset of them fits on chip. A cache
  controller keeps a set of vertices resident, and the array aggregates all
  edges among them. The controller then replaces vertices that have few edges
  left. DRAM is read in sequential order only.

## Array and data path

```
 feature tokens ─► input buffer (bank per row) ─► RLC decoder ─► zero detection ─► CPE row r (N CPEs)
 weights ───────► weight buffer (double) ───── k-cycle spad load ───────────────────┘     │ psums
                                                                                           ▼
                         merge PE per column ─► output buffer (eta, e1/e2, sums) ◄─ aggregation flushes
                                                        │
                                   drain: divider (GAT) ─► activation ─► memory access scheduler ─► DRAM
 cache controller (alpha, gamma, rounds) ─── DRAM alpha words / edge acceptance ──► edge dispatcher ─► CPE rows
```

`gnnie_top` has the defaults M = N = 16, 8-bit data and 32-bit accumulators.
It runs at one token per row per cycle, one zero-skipped beat per row per
cycle, and one finished element per merge PE per cycle.

### Feature path: RLC decoder and zero detection (`rlc_decoder`, `zero_detect`)
Features arrive as run-length tokens `{last, run, value}`. The decoder writes
each value `run` positions after the previous one. A token with `last` set
closes the block. With `rlc_en = 0` (a dense layer), `run` is ignored and the
tokens are written one after another (bypass). The zero-detection stage turns
the dense block into beats of up to LANES nonzero `(index, value)` pairs. LANES
is the MAC count of the row. An all-zero block costs a single empty beat.

### CPE (`cpe`)
In weighting, the CPE holds `k` weights of one weight column in its spad. It
multiplies the lanes of a beat and accumulates the products. When the block
ends, it emits a partial sum tagged with the vertex id.

In aggregation, the CPE holds a G-element slice (`G = 8`) of the target
vertex's partial vector. For each neighbour slice it adds (SUM), takes the
maximum (MAX), or adds `exp(LeakyReLU(e_i1 + e_j2)) * eta_j` and accumulates the
exponential as a denominator (GAT). For GAT it first asks the column's SFU for
the exponential. The slice is flushed to the output buffer when the target
changes or when the subgraph ends.

### Merge PE (`mpe`)
Each column's merge PE collects the M partial sums of a vertex. A round-robin
arbiter moves one per cycle into the update spad. The accumulator adds it to
the psum slot of the same vertex, or opens a free slot. After `nblk`
contributions, the element goes to the output buffer.

A CPE whose vertex has no slot, while no slot is free, has to wait. This is
the stall that the slot count trades against area. Only CPEs whose vertex
already owns a slot, or that can get a free slot, are admitted. Every row visits
the vertices in the same order, so the oldest unfinished vertex can always
enter, and the column cannot deadlock.

### FM scheduler and controller (`fm_scheduler`, `controller`)
The FM scheduler ranks the blocks by nonzero count and builds `blk_of_row`.
Ties keep block order.

The controller sequences one weighting pass:
1. It loads every spad in `k` cycles.
2. It lets the rows run. A row takes tokens only while its spads hold this
   pass's weights.
3. It watches the LR pairs `(r, M-1-r)` for `r < 4`. When a light row is empty
   and its partner still has at least `LR_MIN = 2` complete blocks waiting, the
   controller reloads the light row with the partner's weights (`k` cycles).
   The light row then reads the partner's bank. The input buffer locks a bank to
   one reader until that block's last token, so blocks are never interleaved.

The controller reports done when all banks, rows and merge PEs are empty.

A layer with `F_out` output features needs `ceil(F_out / N)` passes. Pass `p`
fills slot `p` of the output buffer's G slots.

### Output buffer, SFU, divider, activation, drain
The output buffer gives each column a bank. Vertex `v` occupies entry
`v mod 1024`, which holds:
* the G eta elements of that column,
* the G aggregation sums,
* for the whole vertex, `e1`, `e2` and the softmax denominator.

The SFU evaluates `exp(LeakyReLU(x))` for a Q8.8 input, with negative slope
13/64. It scales by log2(e), splits the result into integer and fraction, and
interpolates a 17-entry table of `2^(i/16)`. The result is Q16.16. One request
is served per cycle from a small queue shared by the column's M CPEs.

The drain unit walks the vertices. For GAT it divides the sums by the
denominator with a restoring divider: W + FRAC + 1 = 49 cycles, quotient in
feature units. It then applies ReLU or identity and writes each element to
`OUT_BASE + v*F + i` through the memory access scheduler. The scheduler
round-robins between its clients and routes read data back by tag.

## Aggregation with the vertex cache (`cache_controller`)
In DRAM, word `ALPHA_BASE + v` holds `alpha_v`, the number of `v`'s edges not
yet aggregated. It starts at the degree. The cache has 1024 vertex slots,
4-way set associative by `v mod 256`. One aggregation runs as follows:

1. **Fill.** A pointer walks the vertices in id order, so DRAM is read
   sequentially. Vertices that are cached or have `alpha = 0` are skipped. The
   others take a free way of their set. The fill stops at a full set, or after
   every vertex has been looked at once. When the pointer wraps, a **Round**
   ends.
2. **Iterate.** The edge streamer offers edges `(a, b)` with `a < b`. An edge
   is accepted when both ends are cached and at least one of them was loaded
   since the last iteration. This rule keeps any edge from being processed
   twice. Each accepted edge is sent in both directions (`a <- b`, `b <- a`) to
   the next free CPE row, and every column of that row handles its slice. Each
   direction decrements `alpha` of its target.
3. **Evict.** Finished vertices (`alpha = 0`) are dropped. Then up to `r = 64`
   vertices with `alpha < gamma` (`gamma = 5`) are replaced, lowest id first,
   and their `alpha` is written back.
4. **Deadlock.** Suppose an iteration neither frees a slot nor loads a vertex,
   while edges remain. The cache then holds only vertices whose remaining
   edges lead outside it, and `gamma` doubles.

The controller is done when all `alpha` values have reached zero.
`rounds`, `iters`, `evictions`, `deadlocks` and `gamma` are exported as
statistics.

## Where this RTL departs from the published design
* **Attention logits.** For GAT, `e1 = a1 . eta` and `e2 = a2 . eta` are
  computed by an extra weighting pass, with `[a1 a2]` as two weight columns,
  on 8-bit features that the caller supplies. Normally those features are the
  quantised eta.
* **Aggregation operands.** Aggregation reads the neighbour's eta from the
  output buffer, not from a feature stream.
* **Self-loops.** Self-loops are not added in hardware.
* **Edge mapping.** Edges are dispatched to rows one at a time, not in mapped
  blocks.
* **Fetching.** Weight and feature fetching from DRAM happens outside the
  design. `wf_*` and `tf_*` are ports. The DRAM itself (HBM) is a port.
* **Output buffer capacity.** The output buffer maps vertices directly and has
  no spill path for graphs with more than 1024 vertices in flight. Partial
  results of larger graphs must be drained per subgraph.
* **Activations.** Only ReLU and identity activations are built. The softmax
  of a DiffPool layer is not.
* **Eviction of finished vertices.** Vertices with `alpha = 0` are evicted
  freely. Without that, strict dictionary-order replacement can evict the same
  unfinished vertices again and again.
* **Arithmetic.** All number formats are fixed point of this design's
  choosing: 8-bit features and weights, 32-bit sums, Q8.8 logits and Q16.16
  exponentials.

## Sizes and workloads
The defaults hold k-blocks up to 256 features, so inputs up to 4096 features.
They also hold 8 output slices of 16 columns, so hidden layers up to 128
features. Cora (1433), Citeseer (3703), Pubmed (500), PPI (50) and Reddit (602)
all fit the feature dimension. The number of vertices per on-chip subgraph is
bounded by the 1024 output-buffer entries and cache slots.

## Simulating
Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>`. For example:

```
verilator --binary --timing --assert -I. -y rtl rtl/gnnie_pkg.sv tb/tb_top.sv
./obj_dir/Vtb_top
```

`tb_top` runs the whole engine at reduced size: 4x2 array, k = 4, 16 vertices
and an 8-slot cache. It performs:
* FM scheduling,
* an RLC weighting pass, a bypassed weighting pass and an attention pass,
* a sum aggregation, checked exactly,
* a GAT aggregation, checked against floating point within 3%.

It fails if any of these mechanisms never occurs: merge-PE stall, RLC bypass,
zero block, load redistribution, SFU use, division, dropped edge, eviction,
Round, or deadlock recovery.

That reduced size is the largest simulated end to end. The full 16x16
configuration has been compiled, but it has not been simulated end to end.
