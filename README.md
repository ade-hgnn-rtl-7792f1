# An attention-pruning accelerator for heterogeneous graph neural networks

Heterogeneous graph neural networks (HGNNs) spend most of their time in
neighbour aggregation. Each target vertex v sums the projected features of its
neighbours u, weighted by an attention softmax over scores θ_uv. The scores of
one target are very uneven: a handful of neighbours carry almost all of the
weight. This accelerator exploits that at run time. It keeps only the K
neighbours with the largest scores and drops the rest before their features
are ever aggregated.

Three ideas make that cheap in hardware:

* **The score splits into two per-vertex halves.** In a GAT-style score,
  θ_uv = LeakyReLU(a_srcᵀ h'_u + a_dstᵀ h'_v). The first term, θ_u\*,
  depends only on the source vertex. The second, θ_\*v, depends only on the
  target. Each is computed once per vertex and semantic graph, then reused for
  every edge that touches that vertex. LeakyReLU is monotonic and θ_\*v is
  fixed for one target. So ranking the neighbours of v by θ_u\* alone gives
  the same order as ranking them by θ_uv.
* **Top-K is kept in a min-heap.** For each target, a pruning unit keeps the K
  best (θ_u\*, u) pairs seen so far as a min-heap. Each new neighbour is
  compared with the root only. A worse one is discarded on the spot; a better
  one replaces the root and sinks to its place in log₂K steps.
* **Work is scheduled edge by edge, not stage by stage.** Projection,
  coefficient, pruning decision and aggregation for an edge follow each other
  directly. Intermediate results never make a round trip through DRAM.

The RTL is written in SystemVerilog with a single clock. It covers the datapath
(reconfigurable PE arrays and an activation unit), the pruner, the on-chip
buffers, the HBM traffic controller and the dispatcher that runs the flow.

## Block map

```
                 +--------------------------- ade_hgnn ------------------------------+
 host: cfg,      |  dispatcher (FSM + redundancy bitmap)                             |
 start, done --->|     |  arrays 0,1,2        |  theta_u* / ids       | features     |
 weight load --->|     v                      v                       v              |
                 |  computing_unit      pruner (NUM_UNITS x     feature_cache (LFU)  |
                 |  (NUM_ARRAYS x        pruning_unit)         attention_buffer      |
                 |   ROWS x COLS pe)    activation_module      weight_buffer         |
                 |                                              edge_buffer <--+     |
                 |  memory_access_controller: arbiter + edge-fetch engine -----+     |
                 +------------------------------|------------------------------------+
                                                v
                                    HBM line port (hbm_*), off chip
```

| module | role | default size |
|---|---|---|
| `pe` | operand registers, 16×16 MAC into a 32-bit result, pass registers | – |
| `computing_unit` | 8 arrays of 32×32 PEs with row/column operand muxes | 8192 PEs |
| `activation_module` | LeakyReLU, ELU, exp with a softmax sum, normalisation | 64 lanes |
| `pruning_unit` | input comparator, retention domain, heapifier | K ≤ 100 |
| `pruner` | bank of pruning units, one per concurrent target | 128 units |
| `weight_buffer` | projection matrices and attention vectors | 64 banks × 19988 × 16 bit (2.44 MB) |
| `attention_buffer` | θ_u\* and θ_\*v per vertex | 104857 × 2 × 16 bit (0.40 MB) |
| `feature_cache` | projected features h'_u, LFU replacement | 40960 lines × 128 B (5 MB) |
| `edge_buffer` | FIFO of source-vertex IDs | 314572 × 32 bit (1.2 MB) |
| `memory_access_controller` | HBM arbiter and edge-fetch engine | 512 B line per cycle |
| `dispatcher` | the edge-by-edge flow, bitmap, counters | – |
| `ade_hgnn` | top level | – |

`ade_pkg` holds the number format, the mode and operation encodings, the job
descriptor `cfg_t` and the event counters `perf_t`.

## Numbers

All data is signed fixed point. Operands are Q7.8 (16 bits, 8 fraction bits).
Products and sums are held in 32-bit accumulators with 16 fraction bits.
Projections and coefficients are shifted back by 8 and saturated to 16 bits.
This choice is the design's own and is the main source of numerical
difference from a float reference.

The activation unit computes exp(x) as 2^(x·log₂e). The integer part of
x·log₂e becomes a shift. The fraction f uses 2^f ≈ 1 + f − 0.3431·f(1−f),
which is within 0.3 % over the range used. The softmax is done as:

* clear the running sum;
* one `ACT_EXP` per neighbour, whose result is the weight w_u (Q7.8); masked
  lanes add it to the sum;
* one `ACT_NORM` on the accumulated Σ w_u·h'_u, dividing by the sum.

The score maximum is not subtracted first. With Q7.8, exp saturates for
scores above about 4.85, so the attention scores must stay in that range. The
LeakyReLU negative slope is 1/4, a shift.

## The reconfigurable computing unit

Each PE has two operand registers (`op_reg0` from the left, `op_reg1` from
above) that feed the MAC. It also has two pass registers that hand the same
operands to the right and lower neighbours one cycle later. Each operand input
comes through a 2:1 mux: input 1 is the neighbour's pass register, input 0 is
an external operand. Each array has one row-select and one column-select bit,
giving four modes:

| mode (`cu_mode_e`) | row sel | col sel | use |
|---|---|---|---|
| `MODE_SIMD` | 0 | 0 | every PE multiplies its own operands |
| `MODE_SYS_I_ROW` | 1 | 0 | operands of column 0 travel along rows; weights are external |
| `MODE_SYS_I_COL` | 0 | 1 | the same along columns |
| `MODE_SYS_C` | 1 | 1 | classic 2-D systolic matrix multiply |

PEs in column 0 and row 0 always take the external operand.

Timing: with `en` high, a pair presented in cycle t is in the operand
registers after edge t. Its product is in `result` after the next enabled
edge. `clr` makes that next product start a new sum.

The dispatcher uses three arrays, as follows.

* **Array 0, `MODE_SYS_I_ROW`: feature projection h' = W·h.** Output j is PE
  (j / COLS, j mod COLS).
  * Raw feature h[t] enters column 0 of every row at step t and moves one PE
    per cycle.
  * PE (r, c) multiplies it with W[j][t−c], read from weight bank j.
  * One projection takes f_in + COLS enabled cycles plus a clear cycle.
  * It pauses while the next 256-value raw-feature line comes from HBM.
* **Array 1, `MODE_SIMD`, plus a 64-input adder tree: the coefficients.**
  Computes a_srcᵀh' and a_dstᵀh' in three cycles.
* **Array 2, `MODE_SIMD`: the aggregation.** Accumulates w_u·h'_u, one
  neighbour per pass.

The other arrays are held idle. They are there for a dispatcher that works on
several targets at once.

## Pruning units and the retention domain

A pruning unit serves one target at a time. `start` empties it and latches
K, clamped to 1..`RD_DEPTH`. `RD_DEPTH` is 2·K_DEFAULT = 100. Each accepted
(θ, id) pair is handled in one of three ways:

* **Domain not full (size < K):** the pair is appended and sifted up, one level
  per cycle. It is kept.
* **Domain full and θ > root:** the root is overwritten, the old root's ID is
  reported as evicted, and the new entry sifts down one level per cycle.
  Each level compares both children, takes the smaller and swaps if it is
  smaller than the current entry.
* **Domain full and θ ≤ root:** the pair is discarded with no heap work.

The decision (`dec_keep`, `dec_evict`, `evict_id`) is valid one cycle after
the input is accepted. `in_ready` is low while the heapifier runs, which takes
at most ⌈log₂K⌉ cycles. The domain is a register array with combinational
reads, so a parent and both children are read in one cycle. After the last
neighbour, the retained pairs are read out by index in heap order.

`pruner` holds `NUM_UNITS` of them. A start, an input or a read is steered by
a unit number, and the decision is returned with the unit number of the last
accepted input.

## The edge-by-edge flow (dispatcher)

A job is a range of target vertices of one semantic graph, described by
`cfg_t`:

| field | meaning |
|---|---|
| `v_first`, `v_count` | the target range |
| `ptr_base`, `idx_base` | HBM line bases of the CSC arrays |
| `feat_base`, `feat_lines`, `f_in` | raw-feature layout and length |
| `out_base` | output base |
| `w_base` | this graph's weights in the weight buffer |
| `k` | the pruning threshold |
| `elu` | apply ELU to the result |
| `new_graph` | clear the bitmap and the feature cache |

The job runs as follows.

1. The pointers of the whole range are read, and the edge-fetch engine starts
   streaming the job's row indices into the edge buffer. It pauses when the
   buffer is full.
2. For each target v:
   1. Read col_ptr[v] and col_ptr[v+1]. The degree is their difference.
      v is *pruned* if its degree is greater than K.
   2. Start pruning unit v mod `NUM_UNITS`, clear the softmax sum and array 2.
   3. Get h'_v, from the feature cache or by a projection followed by a cache
      insert. Compute θ_\*v and store it in the attention buffer.
   4. For each edge popped from the edge buffer, with source u:
      1. If the bitmap bit of u is set, read θ_u\* from the attention buffer.
         Otherwise get h'_u, compute θ_u\*, store it and set the bit.
      2. If v is not pruned, aggregate u right away:
         LeakyReLU(θ_u\*+θ_\*v) → exp → w_u·h'_u into array 2.
      3. If v is pruned, send (θ_u\*, u) to the pruning unit and wait for its
         decision.
   5. If v is pruned, wait for the heapifier to settle. Then aggregate each
      retained neighbour. Its θ_u\* comes from the retention domain and h'_u
      from the cache or a new projection.
   6. Normalise, apply ELU if `elu` is set, and write the 64 results to HBM
      line out_base + v.

The bitmap and the attention buffer persist across jobs until `new_graph`,
and so does the feature cache. A graph can therefore be processed in several
jobs.

Cycle cost per edge, with the needed features cached and θ_u\* known:

* **Not pruned:** about 7 cycles.
* **Pruned:** about 5 cycles for the push and decision, plus about 5 more for
  each retained neighbour.

A projection costs f_in + 33 cycles plus one HBM round trip per 256 raw
values. `perf` counts the following events per job: targets, edges,
projections, cache hits, θ reuses, direct aggregations, pruned targets, keeps,
discards, evictions, retained aggregations, projection line stalls, edge-buffer
waits and cache evictions.

### HBM layout

HBM is addressed in 512-byte lines (`LINE_W` = 4096 bits, 22-bit line
address = 2 GB). The data layout is:

* **CSC pointers and row indices:** 32-bit words, 128 per line.
* **Raw features:** 256 Q7.8 values per line. Vertex u starts at line
  feat_base + u·feat_lines.
* **Output:** one line per target, with values in the low 64×16 bits.

An output region can serve as the raw features of a next layer (f_in = 64,
feat_lines = 1).

### Weight-buffer layout

For a semantic graph at base B:

* bank j holds row j of W at B .. B+f_in−1;
* a_src[j] is at B+f_in;
* a_dst[j] is at B+f_in+1.

Weights are written through the `wb_wr_*` port before a job.

## Memory access controller

The controller has one line port to HBM, with a request/grant handshake and
read data returned in order with any latency. Two clients share it:

* the dispatcher (pointer reads, feature lines, result writes), which has
  priority;
* the edge-fetch engine, which reads the index lines of a range [begin, end)
  and pushes one index per cycle into the edge buffer.

A four-entry owner FIFO routes each read response to its client. Each client
keeps at most one read outstanding.

## Where this design departs from the source design

* **One target at a time.** The dispatcher runs one target at a time. The
  pruner has 128 units, but only one is busy at any moment, and five of the
  eight PE arrays sit idle. Running several targets concurrently is the main
  missing piece.
* **Retained neighbours are aggregated after the last edge.** Their
  importance is computed then, instead of overlapping with the heap updates.
* **No chaining of retention domains.** Retention domains are not combined
  across units, so K ≤ 100.
* **One projection matrix per job.** It is used for both ends of an edge.
  That covers metapath-based semantic graphs (same vertex type at both ends).
  Relation-based graphs with differing source and target types would need a
  second matrix, and a type bit in the cache key.
* **No semantic fusion.** The stage that combines the per-graph results of a
  vertex is not built.
* **One attention head per job.** Multi-head attention is run as one job per
  head, each with its own weights.
* **No self term.** Only the listed neighbours are aggregated. Add self-loops
  to the graph to include the vertex itself.
* **Only projected features are cached.** The feature cache holds only
  projected features, not partial aggregates.
* **Memories are flip-flop arrays.** They are written as plain arrays with
  combinational reads. A real chip would use SRAM macros and add a read cycle.
* **The HBM itself is not part of the RTL.**

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. They run
with plain Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb rtl/ade_pkg.sv tb/tb_pruning_unit.sv --top tb_pruning_unit
obj_dir/Vtb_pruning_unit
```

| testbench | what it checks |
|---|---|
| `tb_pe` | random operand streams against a MAC model, including clear |
| `tb_computing_unit` | 2-D systolic matrix multiply with skewed inputs, SIMD, both independent systolic modes |
| `tb_activation_module` | LeakyReLU exactly; exp and ELU within the stated error; sum and normalisation |
| `tb_pruning_unit` | a worked seven-entry heap example; random streams for K = 50 and 100 against a sorted model; the heap property; one level per cycle |
| `tb_pruner` | four targets with different K, inputs interleaved at random |
| `tb_weight_buffer`, `tb_attention_buffer`, `tb_edge_buffer` | against array and queue models; FIFO full/empty/flush |
| `tb_feature_cache` | hits, data, LFU victim choice and evicted ID against a model; frequently used lines survive |
| `tb_memory_access_controller` | index streams under random back-pressure, with dispatcher reads and writes interleaved |
| `tb_ade_hgnn` | end to end on a 40-vertex random graph, in three jobs: fresh graph with K = 4; reuse of cached state with K = 8 and ELU; a second weight set with K = 2 |

The end-to-end reference computes the following:

* the projections and the attention coefficients in integers, bit-exact;
* the same min-heap, so that the retained neighbours are known exactly;
* the softmax-weighted sums in real arithmetic.

Each output must lie within a bound derived from the Q7.8 weight resolution.
The event counters that have a closed form must match exactly: edges, pruning
decisions and evictions (which depend on every coefficient's exact value), retained aggregations, bitmap reuses and feature
fetches. Every mechanism above must occur at least once:

* projection stall;
* cache hit and LFU eviction;
* θ reuse;
* direct and pruned targets;
* keep, discard and evict;
* a target with no neighbours;
* ELU on a negative value.

At the reduced size, the edge buffer's back-pressure on the fetch engine is
also exercised. The edge-wait counter stays at zero there, because projections
give the fetch engine ample lead.

The largest configuration simulated end to end is the reduced one above:
three 2×32 PE arrays, 4 pruning units with a retention domain of 8, a
16-line feature cache, a 64-entry edge buffer and a 1024-word weight buffer.
At the full default size (8192 PEs, 128 pruning units, the 5 MB cache),
Verilator generates about 100 MB of C++, and compiling it takes well over ten
minutes. The same test body can drive that instance; only the instance
parameters and the two depths TB_WB_DEPTH and TB_RD change. All blocks also
pass lint and elaboration at their default sizes.
