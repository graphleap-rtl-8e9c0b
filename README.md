# GraphLeap accelerator in SystemVerilog

A Vision GNN (ViG) treats an image as a set of patch nodes. Every block
first builds a k-nearest-neighbour graph over the current node features and
then updates the features with a graph convolution over that graph. The graph
of block l depends on the output of block l-1. So graph construction and
feature update normally run one after the other, and the O(N²·D) kNN search
sits on the critical path of every block.

GraphLeap breaks that dependency. Block l uses a graph built from the
features that entered block l-1. While the feature engine updates block l,
the graph engine is already building the graph for block l+1 from the same
input features. The two engines then run side by side, and a block costs
about max(T_graph, T_update) instead of their sum.

This repository is a synthesizable RTL version of that accelerator. It has:

- a Graph Construction Engine (GCE);
- a Feature Update Engine (FUE) that runs the whole ViG block (Grapher and
  FFN) on one shared systolic array;
- a two-stage look-ahead edge buffer between the two engines;
- ping-pong feature and weight buffers;
- a weight prefetcher that streams the next block's weights from HBM;
- a stage scheduler that runs the three units concurrently.

## Schedule

```
SETUP    prefetch W(0) -> weight half 0
BOOT     GCE: G(0) from X(0) -> edge stage 0      | prefetch W(1) -> half 1
LAYER 0  FUE: X(0) -> X(1) with G(0), W(0)        | GCE: G(1) from X(0) -> edge stage 1
LAYER 1  FUE: X(1) -> X(2) with G(1), W(1)        | GCE: G(2) from X(1) -> stage 0 | prefetch W(2) -> half 0
...
LAYER L-1 FUE only (no graph needed beyond the last block)
```

Block l reads features from buffer l mod 2 and writes them to buffer
(l+1) mod 2. It reads its graph from edge stage l mod 2 and its weights from
weight half l mod 2.

A stage ends when every unit launched in it has finished. The scheduler
counts the cycles of each stage in which:

- only the GCE was still busy (GCE-bound);
- only the FUE was still busy (FUE-bound);
- only the prefetch was still busy (prefetch-bound).

The first graph has no earlier features to come from. It is built from the
block input during BOOT. The graph of block l is G(X(l-1)), the graph built
from block l-1's input.

## Number format

All features, weights and biases are signed 16-bit fixed point, Q8.8.
Products accumulate in 48 bits. Each linear layer ends with the same
epilogue:

    y = sat16((acc + (bias << 8)) >>> 8)

This is followed by the activation and then a saturating residual add where
the layer has one.

- ReLU is a comparator.
- GELU is linear interpolation between 17 table points at x = -4, -3.5, …, 4.
  Below -4 the output is 0; at or above 4 it is x.

Distances are exact squared Euclidean distances in 48 bits. The square root
is skipped because it does not change the order.

## Graph Construction Engine (`gce`, `dist_pe`, `topk_sorter`)

The GCE holds P_N = 32 distance PEs. It works one node tile at a time:

1. **Load.** Each PE loads one query node of the current tile of 32 nodes.
   The load reads 16 banks per cycle, one channel tile (32 values) per read.
2. **Scan.** Every candidate node is broadcast to all PEs, one 32-value
   channel tile per cycle. Each PE computes 32 squared differences and an
   adder tree, and accumulates across channel tiles.
3. **Select.** When a candidate's last tile arrives, its distance enters a
   sorted insertion list of K·dil entries. Equal distances keep the
   lower-indexed node first. Entry s·dil of the list is the s-th dilated
   neighbour.

The node itself (distance 0) is always a neighbour, as in the original ViG.

One node tile scans in exactly N·ceil(D/32) cycles. A graph therefore takes
ceil(N/32)·N·ceil(D/32) cycles plus a small load and flush per tile. This is
the T_GCE model of the paper.

At the end of a tile, the 32 neighbour lists move into an output bank. The
bank drains one list per cycle into the edge FIFO while the next tile
scans. The drain takes 32 cycles and the next scan takes at least N ≥ 33
cycles, so in the assembled design the drain never stalls the scan. The
`stall_cycles` counter still records it if downstream back-pressure ever
holds the bank.

## Look-ahead edge buffer (`edge_buffer`, `sync_fifo`)

The neighbour lists are K = 9 indices of 12 bits each. They go through a
32-entry FIFO into a two-stage buffer of N_MAX·K indices.

The buffer is split into 32 banks by node mod 32. The GCE writes one node per
cycle, and the gather module reads a whole node tile's lists in one cycle.
One stage is written, for the next block, while the other is read.

## Feature Update Engine (`fue`)

With dh = D/H and H = 16 heads, one block is six phases on shared hardware.

| phase | operation | unit | cycles (about) |
|---|---|---|---|
| 1 | U = X·W_in + b | MLP | ⌈N/32⌉·⌈D/32⌉·max(D, 64) |
| 2 | M_i = max_j (U_j − U_i) over the 9 neighbours | gather + aggregator | ⌈N/32⌉·⌈D/32⌉·(≈10 + conflicts) |
| 3 | T = act([U_h, M_h]·W_agg,h + b) per head h | MLP, grouped | ⌈N/32⌉·⌈D/32⌉·max(2·heads·dh, 64) |
| 4 | Y = T·W_out + b + X | MLP | as phase 1 |
| 5 | Hd = act(Y·W_1 + b), 4D wide | MLP | 4× phase 1 |
| 6 | X' = Hd·W_2 + b + Y | MLP | ⌈N/32⌉·⌈D/32⌉·max(4D, 64) |

Phases 5 and 6 together take ⌈N/32⌉·⌈D/32⌉·8D ≈ 8·N·D²/(32·32) cycles
when D ≥ 64, which is the paper's FFN model. Phases 1 and 4 give the two
dense N·D²/(32·32) terms of its Grapher model. The grouped phase 3 is
cheaper than a dense layer because only the heads inside an output tile are
fed.

Phases 1–4 are the Grapher (FC in, max-relative graph convolution, FC out
with residual). Phases 5–6 are the FFN. U, M, T and Y live in 16-bank
scratch buffers, and Hd in a buffer four times as deep. All use the same
layout as the feature buffers.

### Gather and bank conflicts (`gather_module`, `gather_xbar`, `feature_banks`)

Node i's features live in bank i mod 16. Each word is one 32-value channel
tile. For each node tile and channel tile, the gather module proceeds as
follows:

1. It reads the 32 neighbour lists in one access.
2. Each of the 32 lanes fetches its centre node, then its 9 neighbours.
3. The crossbar grants at most one lane per bank per cycle, lowest lane
   first. Losing lanes retry, and every such cycle is counted as a conflict.
4. The aggregator mesh keeps, per lane and channel, the running maximum of
   sat(x_j − x_i).
5. The results are written as message tiles, 16 banks per cycle.

Because neighbouring patches fall into different banks, conflicts are
rare but real. They appear in the tests.

### Shared MLP fabric (`mlp_engine`, `systolic_array`, `mac_pe`, `act_unit`)

Every matmul runs on one 32×32 output-stationary systolic array:

- one node per row and one output channel per column;
- one input channel enters per cycle;
- rows are skewed by n cycles and columns by d cycles at entry;
- first/last flags ride with the data, so a new tile can enter while the previous one is still draining.

A tile's result is complete P_N + P_D − 1 = 63 cycles after its last channel
enters. The last channels of consecutive tiles must be at least 64 cycles
apart, and the engine inserts idle cycles for short tiles.

The engine does its work in this order:

1. It loads up to 96 operand tiles of a node tile into a local operand
   buffer.
2. It streams weight rows from the weight buffer, one 32-wide word per
   cycle.
3. It drains each result through the epilogue (bias, requantisation,
   activation, residual). The drain writes 16 nodes per cycle.

The grouped layer (phase 3) has H = 16 heads. Each head's output channel c
depends only on input channels h·dh … h·dh+dh−1 of U and of M. For each
output tile, the engine feeds only the input rows of the heads that the tile
covers, and masks the weights of the other heads. A head that straddles two
channel tiles is handled by feeding it to both tiles. The weight matrix is
stored compactly as 2·dh rows × D columns, as in the paper.

## Weights in HBM (`weight_prefetch`, `weight_buffer`)

HBM is modelled as a read port: a request carries a word address, and a
response carries one 32-value word. Up to 16 requests may be outstanding,
and responses come back in order.

Each block's weights are t·(10·D + 2·dh + 8) consecutive words, with
t = ⌈D/32⌉. Block l starts at word l times that size. Within a block, the
parts are:

| offset (words) | part | shape |
|---|---|---|
| 0 | W_in | D rows × t words |
| D·t | W_agg | 2·dh rows × t |
| (D+2dh)·t | W_out | D rows × t |
| (2D+2dh)·t | W_1 | D rows × 4t |
| (6D+2dh)·t | W_2 | 4D rows × t |
| (10D+2dh)·t | b_in, b_agg, b_out (t words each), b_1 (4t), b_2 (t) | |

The weight buffer has two halves of 186,816 words, which holds one block of
D = 768. The prefetcher fills the half that the FUE is not reading.

## Top level (`graphleap_top`)

Ports:

- **Host side.** 16 write ports into feature buffer 0, one per bank, usable
  while idle. Use them to load X(0): node i, channel tile c goes to bank
  i mod 16, address ⌊i/16⌋·t + c. There are 16 matching read ports
  (1-cycle latency) on the buffer that holds the result, which is buffer
  L mod 2.
- **Configuration.** `cfg_layers`, `cfg_nodes`, `cfg_dim` (a multiple of
  16), `cfg_dil` (1 or 2) and `cfg_act`. A pulse on `cfg_start` starts a run,
  and `done` pulses at the end.
- **HBM.** `hbm_req_*` and `hbm_rsp_*` as above.
- **Statistics.** GCE-bound, FUE-bound and prefetch-bound cycles, gather
  conflict cycles (last block), GCE output stalls, and graphs built.

Defaults: P_N = P_D = 32, H = 16, K = 9, dilation up to 2, N ≤ 3136,
D ≤ 768, and two look-ahead stages. Each feature bank holds 1024 words
(the FFN hidden buffer holds 4096).

## What fits

A workload fits if every stage satisfies all of the following:

- ⌈N/16⌉·⌈D/32⌉ ≤ 1024;
- 4·⌈N/16⌉·⌈D/32⌉ ≤ 4096;
- ⌈D/32⌉·(10D + 2D/16 + 8) ≤ 186,816;
- N ≤ 3136.

I use 14×14 patches at 224×224. Pyramid stages have H/4 … H/32 patches per
side.

| model (blocks, D) | 224×224 | 448×448 |
|---|---|---|
| ViG-Ti (12, 192) | fits (N 196: 91 words/bank) | fits (N 784: 294) |
| ViG-S (12, 320) | fits | fits (N 784: 490) |
| ViG-B (16, 640) | fits | fits (N 784: 980; weights 64,100) |
| ViG-Py-Ti/S/M/B | fits (stage 1 N 3136, D ≤ 96: 588 words/bank) | does not fit: stage 1 has N = 12,544 |

Pyramid models at 448×448 would need N_MAX = 12,544 and DEPTH = 2352 (Py-B,
D = 96 in stage 1). Both are parameters. Raising them costs only memory.

## Where this design departs from the paper

- **Graph source.** The paper's equations build G(l) from the previous
  block's *projected* features U(l-1). Its hardware description and
  schedule build it from the block input X(l-1), which is what the GCE
  reads while the FUE reads the same buffer. This design follows the
  hardware description.
- **Weight prefetch depth.** The schedule figure prefetches two blocks
  ahead, which would need three weight buffers. The text and the buffer
  count (two) say one block ahead, and that is what is built.
- **One systolic array, not one per head.** The figure shows H MLP arrays,
  but the performance model counts p_N·p_D MACs per cycle. One 32×32 array
  is built and shared by all heads and all layers.
- **Top-k.** The paper keeps min-heaps. A sorted insertion list gives the
  same result at one candidate per cycle.
- **Not built:** the convolutional stem with BatchNorm, positional
  embedding, LayerNorm, the pyramid down-sampling, global average pooling
  and the classifier. The datapath covers the repeated GraphLeap block. The
  host supplies patch features and reads back the final block's features.
  Normalisation is therefore absent from the block (the features are not
  normalised before FC_in).
- The number format, table-based GELU, weight layout and HBM protocol are
  not given by the paper. They are this design's choices.

## Verification

Every testbench is self-checking and ends with a `TB_RESULT checks=…
failures=…` line and a watchdog:

| testbench | covers |
|---|---|
| `tb_sync_fifo` | random traffic against a queue model, fall-through timing |
| `tb_topk_sorter` | stable k-smallest with ties, dilation 1/2 |
| `tb_dist_pe` | kNN of a random query, result exactly 3 cycles after the last tile |
| `tb_act_unit` | identity/ReLU/GELU against an independent interpolation |
| `tb_systolic_array` | random tiles at the minimum 64-cycle spacing, latency P_N+P_D−1 |
| `tb_gce` | a 4-PE engine's graphs against a reference, T_GCE scan-time bounds, output stall under back-pressure |
| `tb_layer_scheduler` | launch order, buffer/stage/half selection and resynchronisation for 1–6 blocks with random unit latencies |
| `tb_aggregator_mesh` | interleaved lanes, saturating max-relative messages |
| `tb_graphleap_top` | whole runs at default parameters against a software ViG block model |

`tb_graphleap_top` drives four runs. It loads X(0) through the host ports,
serves weights from an HBM model that computes each word from its address,
and compares every output feature with a reference model written in the
testbench. The reference covers the dilated kNN with the same tie rule, the
bootstrap graph, and all six phases in the same fixed point. The runs are:

- N = 40, D = 48, 3 blocks, dilation 2, GELU, with slow HBM. This run has a
  partial node tile, heads that straddle channel tiles, and
  prefetch-bound stages.
- N = 24, D = 16, 2 blocks: a single partial tile.
- N = 640, D = 16, 3 blocks, ReLU: GCE-bound. Its run time must lie between
  1 and 1.5 times three graph builds at the T_GCE rate.
- N = 196, D = 192, 2 blocks: the ViG-Ti block shape at 224×224.

All four match bit for bit. The testbench also requires that each of these
was seen at least once: bank conflicts, GCE-bound, FUE-bound and
prefetch-bound stages, a dilated graph, and the graph count. The whole test
runs in about 15 s.

The other blocks are verified in place by `tb_graphleap_top`: edge
buffer, feature banks, crossbar, gather module, MLP engine, weight buffer,
prefetcher and FUE. A fault placed in any of them makes its
outputs mismatch.

To simulate with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_graphleap_top \
        -y rtl -y tb +libext+.sv -Irtl rtl/gl_pkg.sv tb/tb_graphleap_top.sv
    ./obj_dir/Vtb_graphleap_top
