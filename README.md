# An interaction-network accelerator for track-segment classification

At a hadron collider, every charged particle leaves a trail of hits in the
layers of the tracking detector. A track finder has to decide which hits belong
together. A common way to do this with a graph neural network works like this:

- The detector is cut into sectors.
- In each sector, every hit becomes a **node**.
- Every geometrically plausible pair of hits on neighbouring layers becomes an
  **edge**, a candidate track segment.
- A small **interaction network** (IN) scores each edge with a number in
  [0, 1]: how likely it is that the two hits come from the same particle.

This repository holds synthesizable SystemVerilog for that network. It follows
the *resource-optimized* architecture from the paper "Graph Neural Networks for
Charged Particle Tracking on FPGAs" (Elabd et al.), an accelerator written there for Vivado HLS through hls4ml. Here it is
plain RTL, and every scheduling decision is explicit. The default size is the
one evaluated there:

- 448 nodes and 896 edges per graph;
- 16 parallel lanes;
- reuse factor 1;
- 14-bit fixed point with 7 fractional bits.

Everything that is this design's own choice rather than the paper's is listed
in [Where this design departs from the paper](#where-this-design-departs-from-the-paper).

## 1. The network

A node has three features, x = (r, φ, z), the hit's cylindrical coordinates.
An edge *ij* joins a receiver hit *i* to a sender hit *j*. It has four
features: a = (Δr, Δφ, Δz, ΔR). One forward pass is:

```
a'_ij  = φR1(x_i, x_j, a_ij)              edge block 1        10 -> 8 -> 8 -> 4
ā_i    = Σ_{j : edge j->i} a'_ij           aggregation (sum)
x'_i   = φO(x_i, ā_i)                     node block           7 -> 8 -> 8 -> 3
w_ij   = sigmoid(φR2(x'_i, x'_j, a'_ij))  edge block 2        10 -> 8 -> 8 -> 1
```

Each φ is a three-layer perceptron:

- two hidden layers of 8 units with ReLU;
- a linear output layer, followed by a sigmoid only in φR2.

Together they have 196 + 163 + 169 = 528 weights and biases. An MLP's input is
always the concatenation in the order written above:

- ⟨receiver, sender, edge⟩ for the edge blocks;
- ⟨node, aggregate⟩ for the node block.

Edge block 2 reuses a'_ij, the output of edge block 1, not the original a_ij.
The node block sees only x_i and the aggregate.

### Number format and arithmetic

Every value in the datapath is a W-bit two's-complement number with F
fractional bits (defaults W = 14, F = 7, range [-64, 64) in steps of 1/128).
A dense layer works in four steps:

1. It forms each product of a W-bit weight and a W-bit input at full width
   (2F fractional bits).
2. It adds them all, plus the bias shifted up by F bits, without rounding.
3. It shifts the sum right by F bits, which truncates toward minus infinity.
4. It keeps the low W bits, which wraps on overflow.

ReLU is applied to the wrapped value. These are the rounding and overflow
modes of the default fixed-point type of the HLS library the paper used, so the
RTL reproduces its quantised results bit for bit, apart from the sigmoid. The
aggregation sums also wrap at W bits.

The sigmoid is the piecewise-linear PLAN approximation:

| Input range | Output |
|---|---|
| \|x\| ≥ 5 | 1 |
| 2.375 ≤ \|x\| < 5 | \|x\|/32 + 0.84375 |
| 1 ≤ \|x\| < 2.375 | \|x\|/8 + 0.625 |
| \|x\| < 1 | \|x\|/4 + 0.5 |

It mirrors for negative x: sigmoid(−x) = 1 − sigmoid(x). It needs only shifts
and adds, and its worst error is about 0.019. That is below the quantisation
effects the 14-bit network already has, but it is not exact. Anything
comparing against a floating-point model must allow for it.

## 2. Lanes and the reuse factor

Two parameters set how much hardware does the work.

**PF (parallelization factor, default 16)** is the number of lanes in each
block. Element *i* of an array always lives in lane *i mod PF*, and in every
interface it travels in beat *i / PF*. So a block's outer loop has
⌈N/PF⌉ iterations. N need not be a multiple of PF: lanes past the end of the
last beat are masked everywhere.

**RF (reuse factor, default 1)** is how many cycles each multiplier is reused.

- A dense layer with N_IN inputs and N_OUT outputs has N_OUT·⌈N_IN/RF⌉
  multipliers.
- In cycle *c* of RF it handles the inputs with index *i mod RF = c*.
- It accepts a new vector every RF cycles and delivers the result RF cycles
  later. An MLP therefore has latency 3·RF and initiation interval RF.
- Every block starts one loop iteration, that is PF elements, every RF cycles.

At the defaults, the 16 lanes × 3 MLPs × 3 layers hold:

| MLP | Multipliers per lane | × 16 lanes |
|---|---|---|
| φR1 | 80 + 64 + 32 = 176 | 2,816 |
| φO | 56 + 64 + 24 = 144 | 2,304 |
| φR2 | 80 + 64 + 8 = 152 | 2,432 |

That is 7,552 multipliers in total. RF = 8 divides this by about 8.

## 3. The dataflow pipeline

```
 n_* ─┐                       ┌─> X copies (PF×2 ports) ──────────────┐
      ├─> graph_loader ───────┼─> X (node block)  ─────────────┐      │
 e_* ─┘                       ├─> edge features ─────┐         │      │
                              └─> edge index ×3 ─┐   │         │      │
                                                 v   v         │      v
                                  edge_block φR1 ──> a' ×2 ────┼──> aggregate_block
                                                     │         │         │
                                                     │         v         v
                                                     │   node_block φO <─ ā
                                                     │         │
                                                     │         v
                                                     │   X' copies (PF×2 ports)
                                                     v         v
                                               edge_block φR2 (sigmoid) ──> w buffer
                                                                               │
                                                               graph_unloader ─┴─> w_*
```

Every arrow into a block is a **ping-pong buffer** (`pp_buffer`): two banks,
so a producer can fill graph g+1 while its consumer still reads graph g.

- A producer may start writing when a bank is free (`p_ready`). It hands the
  bank over with `p_commit` on its last write.
- A consumer may start when a bank holds a graph (`c_valid`). It frees the bank
  with `c_release` when it has read everything.
- A block starts a graph only when every input buffer holds one and its output
  buffer has a free bank.
- Each block commits its output and releases all its inputs in the same cycle.

So the five stages can overlap:

- loading;
- edge block 1;
- aggregation;
- node block;
- edge block 2 together with read-out.

Up to five graphs are in flight, and graphs leave in the order they entered.

Two mechanisms keep every buffer single-reader.

1. **Cloning.** An array read by more than one block is written once into one
   ping-pong buffer per reader (`array_clone`).
   - The edge index has three readers: both edge blocks and the aggregation.
   - The first edge block's output a' has two readers: the aggregation and the
     second edge block.
   - A write into a clone set waits until *all* clones have a free bank.
   - Each clone is released by its own reader, so a fast reader is never held
     back by a slow one, up to the two banks of slack.

2. **Node copies.** The edge blocks read node features through the edge index.
   In one iteration, each of the 16 lanes needs two arbitrary rows, its
   receiver and its sender.
   - A single array cannot serve 32 random reads per cycle.
   - So node features bound for an edge block are stored as PF full copies,
     each with two read ports. Lane *l* reads only copy *l*.
   - The copies are written at load time, and by the node block for edge
     block 2. Every write beat goes into all PF copies at once, so no copy pass
     is needed.
   - The node block itself reads nodes in order. Its inputs, X and ā, are
     ordinary cyclically partitioned arrays.

## 4. The blocks

### Edge block (`edge_block`, used twice)

The edge block runs a three-stage read pipeline, then the MLP:

1. Cycle 1 addresses edge row *b·PF + l* of the index and edge-feature arrays
   in every lane *l*.
2. Cycle 2 uses the returned receiver and sender numbers to address the lane's
   node copy twice.
3. Cycle 3 feeds ⟨x_receiver, x_sender, a⟩ to the lane's MLP.

A new iteration starts every RF cycles. The results are written into the
output buffer as one PF-wide beat per iteration. From start to commit the edge
block takes

    (⌈N_EDGES/PF⌉ − 1)·RF + 3 + 3·RF cycles   (61 at the defaults).

In φR2 form (SIGMOID = 1, OD = 1) it is edge block 2.

### Aggregation (`aggregate_block`)

This is the subtle block. In one iteration 16 lanes each add an edge feature
onto their edge's receiver, and several lanes may name the same receiver. A
single accumulator array would need 16 read-modify-write ports with conflict
resolution.

Instead, every lane owns a **private accumulator copy** of the whole node
array, and the block runs three phases:

1. **Reset.** Clear all PF copies, PF rows per cycle.
2. **Add.** Lane *l* adds a'_e into row receiver(e) of its own copy, for
   e = b·PF + l. A lane's own updates follow each other at least RF cycles
   apart. With RF = 1, a lane can hit the same row in back-to-back cycles, so
   the copy is a single-cycle read-modify-write.
3. **Sum.** Add the PF copies row by row to form ā, PF rows per iteration, and
   write them into the output buffer.

From start to commit this takes

    (2·⌈N_NODES/PF⌉ + ⌈N_EDGES/PF⌉ − 3)·RF + 4 cycles   (113 at the defaults).

This is the longest stage, so it sets the graph-to-graph interval. The cost is
PF·N_NODES·4 accumulator words: 28,672 words of 14 bits at the defaults.

### Node block (`node_block`)

The node block reads x_i and ā_i in lane order, runs φO, and writes x'_i into
the PF-copy buffer that edge block 2 reads. From start to commit it takes

    (⌈N_NODES/PF⌉ − 1)·RF + 2 + 3·RF cycles   (32 at the defaults).

### Weights (`weight_store`)

The 528 parameters sit in a register file that is loaded through `wt_we`,
`wt_addr` and `wt_data`, one word per cycle.

**Address map.** φR1 occupies addresses 0–195, φO 196–358 and φR2 359–527.
Within each MLP the order is:

- W1 row-major [out][in], then b1;
- W2, then b2;
- W3, then b3.

Load the weights before the first graph, and change them only while the
pipeline is empty.

## 5. Interfaces and timing

All streams are valid/ready and move on a cycle where both are high. Lane *l*
of beat *b* carries element *b·PF + l*.

| Port group | Direction | Beats per graph | Content per lane |
|---|---|---|---|
| `n_valid/n_ready/n_data` | in | ⌈N_NODES/PF⌉ | x = (r, φ, z), each W bits |
| `e_valid/e_ready/e_attr/e_idx` | in | ⌈N_EDGES/PF⌉ | (Δr, Δφ, Δz, ΔR) and {sender, receiver}, each index ⌈log2 N_NODES⌉ bits, receiver in `e_idx[l][0]` |
| `w_valid/w_ready/w_data/w_lanes/w_last` | out | ⌈N_EDGES/PF⌉ | edge score in [0, 1]; `w_lanes` marks lanes that hold edges, `w_last` the final beat |
| `wt_we/wt_addr/wt_data` | in | – | one parameter per cycle |

The node and edge streams of one graph may interleave in any way. The next
graph's beats are accepted as soon as a bank is free. A graph smaller than the
built size must be zero-padded by the sender. A zero-padded edge from node 0 to
node 0 adds its message to node 0; a padded node or edge should therefore carry
features that the trained network treats as null.

The reset `rst_n` is asynchronous and active-low. It empties all buffers and
clears the weights.

**Cycle counts at the defaults**, from the stage formulas above:

| Stage | Cycles |
|---|---|
| Loading (edge stream) | 56 |
| Edge block 1 | 61 |
| Aggregation | 113 |
| Node block | 32 |
| Edge block 2 | 61 |
| Read-out | 56 |

The first score leaves about 330–360 cycles after the first input beat. In the
full-size simulation, with random input gaps and a consumer ready 75 % of the
time, the first output came 355 cycles after the first input.

**What sets the graph-to-graph interval.** No stage can take a new graph
faster than its own start-to-commit time, so the aggregation (113 cycles at
the defaults) is a lower bound. A second limit usually dominates, and it
comes from the two-bank buffers.

- The loader writes the edge index into three clones at once.
- It cannot write graph g+2 until the last reader, edge block 2, has released
  graph g.
- So one index bank stays occupied from the end of loading, through edge block
  1, the aggregation and the node block, to the end of edge block 2.
- With two banks, a new graph can enter only about every half of that span.

Measured with no input gaps and no back-pressure:

| Configuration | Interval (cycles) | Latency (cycles) | HLS report: interval / latency |
|---|---|---|---|
| 28 / 56, RF 1 | 31 | 43 | 28 / 79 |
| 448 / 896, RF 8 | 1,235 | 2,114 | 520 / 1,590 |

At RF 8 the aggregation alone takes 876 cycles, because its three loops issue
one iteration every RF cycles, as the paper's loop pragmas specify. The
interval is then set by the index-buffer occupancy, as explained above. Giving
the edge-block-2 clones of the index and of a' a third bank would bring the
interval down to the slowest stage. That is not done here: the banks are fixed
at two, and `pp_buffer` would need a bank-count parameter.

The HLS build of the main configuration (448 / 896, RF 1) reports latency 470
and interval 174. Those numbers come from the HLS scheduler's loop overheads
and dataflow channel depths, which this RTL does not copy. At that size the RTL's
latency is below the HLS figure, and its interval is limited as described
above.

## 6. Sizes and what fits

All sizes are top-level parameters: `N_NODES`, `N_EDGES`, `PF`, `RF`, `W`
and `F`. The index width follows from `N_NODES`.

| Graph | Source | At the defaults |
|---|---|---|
| 448 nodes / 896 edges | paper's main evaluation (RF 1 and RF 8) | fits exactly; RF 8 is a parameter change; both simulated |
| 28 / 56 | paper's small-graph comparison | fits by zero-padding, or set the size; simulated at that size |
| 113 / 196 | 95th-percentile sector graph, 2 GeV threshold, 8×2 sectors | fits by padding |
| 162 / 326 | 95th percentile, 1 GeV threshold, 8×8 sectors | fits the buffers, but needs W = 16, F = 8 for full accuracy |
| 1,344 / 2,688 | paper's largest scaling point | set `N_NODES`/`N_EDGES` |
| ≈ 6,500 / 20,000 | a whole 1 GeV event without sectors | far beyond the defaults |

Memory grows as N_NODES·PF, for the node copies and the aggregation copies.
Logic grows with PF/RF.

## 7. Where this design departs from the paper

- **Only the resource-optimized architecture is built.** The paper also
  describes a fully unrolled, throughput-optimized variant for graphs of up to
  28 nodes. That variant also offers mean aggregation (division by look-up
  table) and max aggregation (tournament tree). It is not included; the
  aggregation here is a sum.
- **The output of edge block 1 is cloned twice, not three times.** The text
  says a' is cloned once for each block that uses it, and counts three,
  including the node block. The equations give the node block only x_i and
  ā_i. The design follows the equations.
- **Node copies are made at write time.** The paper copies node features into
  PF duplicates inside the edge block. Here every write beat goes into all
  copies at once, which gives the same storage without a copy pass.
- **Weights are loaded at run time.** The paper compiles them into the
  firmware as constants.
- **The sigmoid is piecewise linear.** The paper does not say how its sigmoid
  is computed.
- **Buffers are two-deep ping-pong pairs, with a start/commit/release
  handshake.** The paper relies on HLS dataflow channels, whose depth it does
  not state.
- **Interfaces are this design's own.** The stream interfaces, lane mapping,
  reset and the ordering of parameters are not specified by the paper.
- **The reuse-factor split is an assumption.** How the multipliers share
  inputs across RF cycles (cyclically, input *i* in cycle *i mod RF*) is a
  plausible reading of the HLS library, not a documented match.
- **Cycle counts differ from the paper's HLS reports** (see section 5). The
  interval at RF 8 is more than twice the reported one. That is because of
  the two-bank index clone and the RF-paced aggregation loops.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each testbench compares
against `gnn_ref_pkg`, an independent integer model of the same arithmetic
written as plain loops. Each one prints `TB_RESULT checks=N failures=M`, and
each has a watchdog.

- **`tb_dense_layer`, `tb_mlp3`, `tb_sigmoid_pwl`**
  - bit-exact layer and MLP results at several reuse factors;
  - latencies of exactly RF and 3·RF;
  - a full sweep of the 14-bit sigmoid against the exact function.
- **`tb_pp_buffer`, `tb_array_clone`, `tb_graph_loader`, `tb_graph_unloader`**
  - bank hand-over;
  - back-pressure, including a slow clone holding back the writer;
  - partial last beats;
  - data order.
- **`tb_edge_block`, `tb_aggregate_block`, `tb_node_block`**
  - every output row against the reference, on random graphs with many edges
    sharing a receiver;
  - start-to-commit cycle counts against the formulas above.
- **`tb_gnn_in_top`**
  - six random graphs of 10 nodes / 19 edges on 4 lanes, pushed back to back
    with random gaps and output back-pressure;
  - every edge score checked;
  - it counts, and requires to happen at least once: overlap of consecutive
    graphs inside the pipeline, input stalls from full buffers, output stalls,
    partial beats, and clones being released at different times.
- **`tb_gnn_workloads`** (with the helper `gnn_run`)
  - the two other evaluated points of the resource-optimized design: 28 nodes /
    56 edges at RF 1, and 448 / 896 at RF 8, both with 16 lanes;
  - three graphs each, flat out, every score checked;
  - checks that the graph interval is shorter than one graph's solo pass
    through all stages, which proves overlap, and bounds the latency;
  - about six minutes to build.
- **`tb_gnn_in_top_full`**
  - the same test at every default parameter: 448 nodes, 896 edges, 16 lanes,
    three graphs;
  - about 5,500 checks;
  - takes a few minutes to build and run.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_gnn_in_top \
    rtl/gnn_pkg.sv tb/gnn_ref_pkg.sv $(ls rtl/*.sv | grep -v gnn_pkg) tb/tb_gnn_in_top.sv
./obj_dir/Vtb_gnn_in_top
```

The reduced sizes used by the block testbenches are set with parameter
overrides in each testbench. The RTL defaults remain the full size.

## 9. Files

| File | Content |
|---|---|
| `rtl/gnn_pkg.sv` | network dimensions, parameter counts and address map |
| `rtl/dense_layer.sv` | fixed-point dense layer with reuse factor |
| `rtl/sigmoid_pwl.sv` | piecewise-linear sigmoid |
| `rtl/mlp3.sv` | three-layer MLP (φR1, φO, φR2) |
| `rtl/weight_store.sv` | run-time loadable weight registers |
| `rtl/pp_buffer.sv` | ping-pong array buffer, optional per-lane copies |
| `rtl/array_clone.sv` | one writer, several independent buffers |
| `rtl/graph_loader.sv` | input streams into the graph buffers |
| `rtl/edge_block.sv` | gather + φR, PF lanes |
| `rtl/aggregate_block.sv` | sum aggregation with per-lane accumulator copies |
| `rtl/node_block.sv` | φO, PF lanes |
| `rtl/graph_unloader.sv` | edge scores out as a stream |
| `rtl/gnn_in_top.sv` | the accelerator |
| `tb/gnn_ref_pkg.sv` | integer reference model |
| `tb/gnn_run.sv` | parameterised end-to-end runner used by the workload test |
| `tb/tb_*.sv` | one testbench per module, the workload test and the full-size run |
