# GraphACT forward pipeline in SystemVerilog

Training a graph convolutional network (GCN) on a large graph is mostly two
kinds of work:

- **Aggregation.** Each node averages the feature vectors of its neighbours.
  This is irregular, memory-bound and sparse.
- **Transformation.** The averaged and the node's own vectors are multiplied
  by weight matrices. This is regular, compute-bound and dense.

GraphACT, by Zeng and Prasanna, trains on minibatches. A minibatch is a small
subgraph that the host CPU samples from the training graph, and everything
the FPGA needs for one minibatch (features, topology, weights) fits in
on-chip RAM. Before the data go to the FPGA, the CPU looks for *pairs of
nodes that occur together in many neighbour lists*. Each such pair is summed
once on the FPGA and reused wherever the pair occurs. This *redundancy
reduction* removes a large share of the aggregation additions.

This RTL implements the accelerator's **forward pass**:

- two graph-convolution layers (L = 2) and the final MLP layer;
- FP32 arithmetic;
- a 128-lane accumulator array for the aggregation;
- a 24 × 24 systolic array for the weight products;
- the schedule that overlaps the two.

The backward pass, the gradient buffers and the optimizer state of the
original design are not included (see *Limits*).

## Contents

1. The layer being computed
2. Data layout: 128-feature chunks
3. Feature aggregation
4. Weight transformation
5. Schedule
6. Host interface
7. Arithmetic
8. Sizes and the evaluated workloads
9. Verification
10. Limits and departures
11. File map

## 1. The layer being computed

Layer l maps the feature matrix X^(l-1) (one row per node) to

    X^(l) = ReLU( X^(l-1) · W_self^(l) )  |  ReLU( D⁻¹ A X^(l-1) · W_neigh^(l) )

- A is the subgraph's adjacency and D its degree matrix.
- `|` is concatenation. With hidden length f, each half has f/2 columns.

After two layers, the MLP layer computes X_out = ReLU(X^(2) · W_MLP). The
host reads X_out to evaluate softmax and loss.

**Redundancy reduction.** This is host software, modelled in
`tb/tb_util_pkg.sv`. It rewrites A as A#:

- It counts, for every node pair {u, w}, how many neighbour lists contain
  both.
- It greedily matches pairs whose count exceeds θ (θ = 2 in the tests).
- In every list that holds a matched pair, it replaces the two entries by one
  new node that stands for the pair's sum.
- Several rounds are run; a later round may pair the pair nodes of an earlier
  round.

The pairs are numbered in the order they were matched. Pair m gets node index
|V_s| + m, so a node index below |V_s| is a real node and anything above is a
pair sum. The accelerator receives:

- the pair list (u_m, v_m);
- the reduced neighbour lists;
- the coefficient 1/deg(v) from the *original* degree.

## 2. Data layout: 128-feature chunks

All feature buffers are feature-major: one read returns the features of one
node. A word holds 128 FP32 features, the width of the accumulator array.
Longer vectors (602 input features for Reddit) take `nch = ceil(f/128)`
consecutive words:

    address(node, chunk) = node * nch + chunk

On a full-width word access, lanes beyond f are don't-care. Writes carry a
128-bit lane mask. Each output buffer (X^(1), X^(2), X_out) has a
companion 1-bit-per-lane buffer, the *status bits*. A status bit records
whether ReLU clipped that value, which is the information the backward
pass's mask() needs.

| buffer | holds | default depth (words) |
|---|---|---|
| X^(0) | input features | 16384 = 2750 nodes × 5 chunks |
| AGG | D⁻¹A#X of the current layer | 16384 |
| X^(1), X^(2) | hidden features (f = 256) | 8192 = 4000 × 2 |
| X_out | MLP output (≤ 128 classes) | 4096 |
| X_M | pair sums of the current chunk | 8192 (one word per pair) |
| topology | end pointers, 1/deg, neighbour indices | 4000 nodes, 65536 indices |
| pair list | (u, v) as two 14-bit indices | 8000 |
| W_self, W_neigh | weights, 24 column banks | 8192 per bank |

## 3. Feature aggregation (`feature_aggregation.sv`)

The module processes the vectors chunk by chunk. For each chunk it runs three
steps on the 128-lane `accum_array`.

**Step 1: pair sums.** Pairs are read in list order. X[u] and X[v] are read on
consecutive cycles, and the sum goes through the accumulator into X_M[m]. A
pair therefore costs 2 cycles, and consecutive pairs overlap.

List order matters. A pair from round r + 1 may use a pair node of round r,
and that sum must already be in X_M. It is, except for one case: the pair
just before it. That pair's sum is still in the accumulator pipeline, so the
module waits up to two cycles. The `hazard_waits` counter counts these
cycles.

**Step 2: neighbour sums.** For each node v:

- the end pointer and 1/deg are read;
- the neighbour indices are read one per cycle;
- each index becomes a read of X (index < |V_s|) or of X_M (pair sum);
- the accumulator loads the first vector and adds the others.

The index stream and the feature reads are pipelined, so a list of d entries
costs d cycles.

**Step 3: scaling.** The sum is multiplied by 1/deg(v) and written to AGG. A
node without neighbours gets a zero vector. Steps 2 and 3 add a fixed
overhead of about 4 cycles per node. The design does not hide it, because it
is small next to the list lengths.

**Stall.** The X buffer being aggregated is also what the weight module reads
when it fills its tile buffer. The fill has priority. While it reads, `stall`
holds the aggregation module: no new read is issued, and reads already
issued complete normally.

## 4. Weight transformation (`weight_transform.sv`, `systolic_array.sv`, `sys_pe.sv`)

OUT = act(A · W) is computed in tiles:

- A has n rows and K columns and lives in a feature buffer.
- A *tile row* is P = 24 consecutive nodes.
- A *tile column* is 24 consecutive output columns.

For each tile row the module proceeds in three stages.

1. **Fill.** It copies the 24 nodes into the `tile_buffer`, one 128-feature
   chunk per cycle: 24 × nch cycles. Rows beyond n are zero-filled. This is
   the only time it touches the shared feature buffer, and the only time the
   aggregation module can be stalled.
2. **Stream.** For each tile column it feeds the systolic array K + P − 1
   skewed diagonals:
   - row i gets A[i][t−i] from the tile buffer;
   - column j gets W[t−j][j] from weight bank j, at address
     `base + (t−j)·ntc + tc`.

   Each PE multiplies, accumulates and passes its operands right and down.
   The first and last tags travel with the A operand. On the last element,
   the PE applies ReLU, records the status bit and raises `res_valid`.
3. **Drain.** The bottom-right PE finishes 2P − 2 cycles after the last
   diagonal enters. The module then copies the 24 × 24 results into a
   register and writes them to the output buffer, one tile row per cycle, at
   columns `col_off + tc·24`. A row that crosses a 128-lane word boundary is
   written in two cycles, so a drain takes at most 48 cycles.

**Back-to-back pairs.** If K > P, the next tile column starts streaming right
after the previous one, and the drain overlaps it. A tile pair then costs
exactly K + P − 1 cycles. If K ≤ P, the drain could fall behind, so the next
pair waits for it.

**Concatenation.** A GCN layer calls this module twice:

- the self-weight product writes columns [0, f/2);
- the neighbour-weight product, which reads AGG, writes columns [f/2, f).

The column offset is all that realises the `|` of the layer formula.

## 5. Schedule (`graphact_ctrl.sv`)

For each of the two layers:

- **a + b.** Aggregation of X^(l−1) into AGG runs at the same time as
  X^(l−1) · W_self. Both read X^(l−1); only the tile fills conflict.
- **c.** Once both have finished, AGG · W_neigh runs. The aggregation module
  is idle.

After that comes the MLP: X^(2) · W_MLP into X_out, with ReLU. `done` pulses
at the end.

The counters `ab_cycles`, `c_cycles` and `mlp_cycles` report the cycles spent
in each step. They count from reset and accumulate over runs.

`mem_ctrl.sv` routes the five buffers' read and write ports:

- reads: tile fill, then aggregation, then host;
- writes: weight module, then aggregation, then host.

Read data return to the requester one cycle later. Assertions check the two
rules the schedule guarantees: no two module writes to one buffer, and no
host read that a module read would override.

## 6. Host interface (`graphact_top.sv`)

**Writes:** `h_we`, `h_tgt`, `h_addr`, `h_wdata` (128 × 32 bits), `h_wmask`.

| h_tgt | address | data |
|---|---|---|
| HW_X0 | node·nch_in + chunk | 128 features, masked |
| HW_ENDPTR | node v | lane 0: exclusive end of v's list (list 0 starts at 0) |
| HW_COLIDX | list position | lane 0: neighbour index (≥ n = pair sum) |
| HW_DINV | node v | lane 0: 1/deg(v), FP32 |
| HW_PAIR | pair m | lane 0: {v_m[13:0], u_m[13:0]} |
| HW_WSELF / HW_WNEIGH | `base + k·ntc + tc` | lanes 0..23: W[k][tc·24 + j]; mask per bank |

Weight bases, with ntc = ceil((f/2)/24):

- layer 1 at 0;
- layer 2 at f_in·ntc;
- W_MLP (in the W_self banks) at f_in·ntc + f·ntc, with ntc = ceil(classes/24)
  inside that region.

**Run:** hold `cfg` (a `batch_cfg_t`: n_nodes, n_pairs, f_in, f_hid,
n_cls) stable and pulse `start`. `busy` stays high until `done`.

**Reads:** `h_re`, `h_rsel`, `h_raddr` return `h_rdata` and `h_rclip` (the
status bits) one cycle later. Host traffic must not overlap a run.

**Counters:**

| counter | counts |
|---|---|
| `fa_stall_cycles` | cycles the aggregation module was stalled |
| `fa_hazard_waits` | pair-hazard waits |
| `wt_compute_cycles` | systolic stream cycles |
| `wt_fill_cycles` | tile-fill cycles |
| `wt_pairs` | tile pairs computed |
| `ab_cycles`, `c_cycles`, `mlp_cycles` | cycles of each schedule step, since reset |
| `phase` | the step currently running |

## 7. Arithmetic (`graphact_pkg.sv`)

`fp_add` and `fp_mul` are combinational IEEE-754 single-precision operators:

- round to nearest, ties to even;
- denormals are flushed to zero;
- overflow gives infinity.

Every PE and accumulator lane uses them with a register after them, so each
is a one-cycle operator. A real FPGA build would map them to pipelined DSP
operators. Since every result here is registered once, the cycle counts
stated in this document are those of a one-cycle operator.

## 8. Sizes and the evaluated workloads

Defaults: 128 aggregation lanes, P = 24, at most 4000 subgraph nodes, 8000
pairs and 65536 neighbour indices. The GraphACT minibatches of the three
benchmark graphs (f = 256) fit:

| dataset | nodes | f_in | classes | largest need vs. default |
|---|---|---|---|---|
| PPI | 4000 | 50 | 121 | X^(1): 8000 of 8192 words; pairs: 8000 of 8000 |
| Reddit | 2750 | 602 | 41 | X^(0): 13750 of 16384 words; weights: 5660 of 8192 per bank |
| Yelp | 2750 | 300 | 100 | X^(0): 8250 of 16384; weights: 4616 of 8192 |

The neighbour-index capacity assumes an average subgraph degree of at most
16. The original evaluation uses 15.

Cycle cost of one layer:

- a + b lasts max(aggregation, self product).
- c is the neighbour product, ntr·ntc·(K + 23) stream cycles plus fills.
- The aggregation of a chunk takes 2·|pairs| + |A#| cycles plus about 4 per
  node.

Simulated forward passes of the full-size design on 40–48-node subgraphs
(figures per run):

| widths (f_in, f, classes) | pairs | A# entries | stream cycles | a+b | c | MLP |
|---|---|---|---|---|---|---|
| PPI (50, 256, 121) | 14 | 191 | 11796 | 4524 | 4524 | 3522 |
| Reddit (602, 256, 41) | 14 | 163 | 22812 | 11340 | 11340 | 1266 |
| Yelp (300, 256, 100) | 16 | 145 | 17238 | 7620 | 7620 | 2940 |

On subgraphs this small, the self-weight product is longer than the
aggregation. Step a+b then lasts exactly as long as step c, which has the
same shape. On a 2750–4000-node minibatch the two are of the same order. Take PPI
layer 1 with n = 4000, an average degree of 15 and 8000 pairs. The
aggregation needs about 2·8000 + 44000 + 4·4000 ≈ 76000 cycles. The product
needs 167·6·73 ≈ 73000 stream cycles. Whichever is longer sets the length of
a+b.

## 9. Verification

Every block has a self-checking testbench in `tb/`. Each testbench:

- prints `TB_RESULT checks=N failures=M`;
- has a watchdog;
- uses only `$urandom` stimulus.

Reference values come from `tb_util_pkg`. It converts FP32 to double, does
the operation, and rounds back to FP32 with its own round-to-nearest-even
routine. For one add or multiply this gives the correctly rounded result.
Because the testbenches repeat the hardware's order of operations, every
comparison is bit-exact (+0 and −0 count as equal).

| testbench | what it shows |
|---|---|
| `tb_fp32_arith` | add/mul against the model on 20k random pairs (close, far, cancelling exponents), ties to even, zeros, infinities, NaN, overflow, underflow |
| `tb_sram_1r1w`, `tb_feature_buffer`, `tb_topo_buffer`, `tb_tile_buffer`, `tb_weight_buffer` | storage: latency, hold, lane and bank masks, per-row and per-bank read addresses, zero padding |
| `tb_accum_array` | random LOAD/ADD/SCALE/ZERO sequences on all 128 lanes |
| `tb_sys_pe` | back-to-back dot products of length 1..20, ReLU clip and status bit, result timing |
| `tb_systolic_array` | 4 × 4 array, back-to-back tiles; `tile_done` exactly K + 2P − 3 cycles after the first diagonal |
| `tb_weight_transform` | P = 4, K up to 300 (3 chunks), odd column counts and offsets, straddled rows, K ≤ P; stream cycles = ntr·ntc·(K + P − 1), fill cycles = ntr·P·nch |
| `tb_feature_aggregation` | random reduced subgraphs, 3 reduction rounds, 1 or 2 chunks, random stalls; 2 cycles per pair and 1 per index without stall; hazards, stalls, chained pairs and isolated nodes all occur |
| `tb_mem_ctrl` | port routing and priorities, stall, data return |
| `tb_graphact_ctrl` | step order, a/b in both finishing orders, all operation fields, cycle counters |
| `tb_graphact_top` | full-size top, two complete forward passes (see below) |
| `tb_graphact_workloads` | full-size top with the PPI, Reddit and Yelp feature widths and 40–48-node subgraphs |

`tb_graphact_top` is the end-to-end test. It uses the default parameters and
acts as the host:

- It samples a graph: a ring with chords, an 8-clique seen by 8 further
  nodes, and one isolated node.
- It runs three reduction rounds, loads everything, runs the forward pass
  and compares every value of X^(1), X^(2) and X_out, with its status bit.
- It runs twice: first with PPI widths, then with f_in = 200 and f = 200, so
  that tile rows straddle words.
- It checks that the systolic stream took exactly Σ ntr·ntc·(K + 23) cycles.
- It fails if any of these never happened: aggregation stall, pair hazard,
  chained pair, ReLU clip, zero-degree node, multi-chunk input, straddled
  row.

Each testbench was also run against a copy of its module with one deliberate
bug. Examples: ties rounded up, lane mask ignored, `tile_done` taken from the
wrong PE, step c started after only one of a/b. Every such copy was caught.

To run one testbench with plain Verilator (5.x):

    verilator --binary --timing -Wno-fatal --top-module tb_graphact_top \
        -y rtl -y tb +libext+.sv rtl/graphact_pkg.sv tb/tb_util_pkg.sv \
        tb/tb_graphact_top.sv
    ./obj_dir/Vtb_graphact_top

Building the full-size top takes a few minutes, because it contains 576 FP32
multiply-accumulate PEs and 128 FP32 lanes. The simulation itself takes
seconds.

## 10. Limits and departures

- **Not built:**
  - the backward pass (gradients with respect to weights and activations,
    mask()), its gradient buffers and the optimizer state;
  - weight updates;
  - the PCIe/DMA link, for which the host ports stand in;
  - softmax and loss, which run on the CPU in the original design too.

  The status bits that mask() would read are produced and stored.
- **Chunking.** The original describes an accumulator array as wide as the
  longest feature vector, but evaluates a 128-wide one. This design keeps
  128 lanes and processes longer vectors in chunks, recomputing the pair
  sums per chunk. The tile buffer is likewise filled one chunk per cycle
  rather than one feature per cycle.
- **Memory controllers.** The two controllers of the original block diagram
  are merged into one routing block with fixed priorities.
- **Pair hazard.** The wait for the immediately preceding pair is this
  design's own rule. The original only requires rounds to complete in order.
- **K ≤ P.** For tile pairs with K ≤ P the stream waits for the drain, so
  such products (K ≤ 24) are slower than K + P − 1 per pair. None of the
  evaluated widths is that short.
- **Per-node overhead.** Aggregation spends about 4 cycles per node on
  pointer read, scaling and write, which are not overlapped with the next
  node.
- **Arithmetic.** FP32 operators are single-cycle combinational logic. This
  is fine for simulation and for sizing by synthesis. On an FPGA it would
  not reach a useful clock rate without pipelining (DSP blocks).
- **Synthesis.** Lint and elaboration pass for every module. Coarse Yosys
  synthesis also finishes for the buffers, the PE, the tile and weight
  buffers, the port router and the scheduler. For the five modules that
  contain many FP32 operators, it did not finish on a 16 GB machine:
  - the 128-lane accumulator array and the aggregation module ran for more
    than ten minutes;
  - the 24 × 24 array ran for more than ten minutes;
  - the weight module and the top ran out of memory.

  No gate counts are therefore given for those five.

## 11. File map

- `rtl/graphact_pkg.sv`: constants, types, FP32 functions.
- `rtl/graphact_top.sv`: top level: buffers, routing, both modules,
  scheduler.
- `rtl/graphact_ctrl.sv`: schedule.
- `rtl/mem_ctrl.sv`: buffer port routing.
- `rtl/feature_aggregation.sv`, `rtl/accum_array.sv`, `rtl/topo_buffer.sv`:
  aggregation.
- `rtl/weight_transform.sv`, `rtl/systolic_array.sv`, `rtl/sys_pe.sv`,
  `rtl/tile_buffer.sv`, `rtl/weight_buffer.sv`: weight products.
- `rtl/feature_buffer.sv`, `rtl/sram_1r1w.sv`: RAMs.
- `tb/`: one testbench per module, `tb_util_pkg.sv` (reference arithmetic
  and host-side graph preparation), and the two whole-design tests.
