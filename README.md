# A GraphSAGE q/pT estimator for the CMS overlap muon trigger, in SystemVerilog

In the barrel–endcap overlap region of the CMS muon system, a muon leaves short
track segments ("stubs") in drift-tube, cathode-strip and resistive-plate
chambers. The Level-1 trigger must turn those stubs into a momentum estimate
within a fixed latency. The template-matching approach handles prompt muons
well but loses efficiency for displaced muons.

This design estimates the signed inverse transverse momentum, q/pT, with a
graph neural network instead. Each stub is a node, with at most one node for
each of ten detector layers. Edges join stubs that are geometrically related.
The graph goes through four GraphSAGE convolutions, which mix each node's
features with those of its neighbours. A mean over the nodes then turns the
graph into a fixed-size vector, and a small MLP maps that vector to q/pT.

The RTL implements this network as a fixed-point, time-multiplexed datapath.
The network's layer sequence, widths and graph limits are as published for
this network. The arithmetic format, the schedule and all interfaces are this
design's own choices, and they are marked as such below and in each file's
header.

## The network

| stage | operation | widths (per node) |
|---|---|---|
| input | 10 nodes x 3 features, up to 45 undirected edges | 3 |
| SAGE 0 | GraphSAGE convolution | 3 -> 128 |
| SAGE 1 | GraphSAGE convolution | 128 -> 64 |
| SAGE 2 | GraphSAGE convolution | 64 -> 64 |
| SAGE 3 | GraphSAGE convolution | 64 -> 64 |
| pool | mean over the present nodes | 64 (per graph) |
| MLP | Linear+ReLU, Linear+ReLU, Linear+ReLU, Linear | 64 -> 64 -> 32 -> 16 -> 1 |

The published network fixes the number of nodes (10) and edges (45, every pair
of nodes), the SAGE widths, and the four-layer MLP with a largest layer of
64 x 64. The MLP inner widths 64/32/16 are this design's choice.

### Inside one SAGE layer (`sage_layer`)

Each SAGE layer is built from five blocks, in this order: root linear,
neighbour linear, message passing, projection linear and 2D ReLU. With `x[i]`
the input row of node `i`, the layer computes:

    r[i] = Wr x[i] + br                          root linear      (DIN -> DOUT)
    n[i] = Wn x[i] + bn                          neighbour linear (DIN -> DOUT)
    a[i] = (1/deg i) * sum over edges {i,j} n[j] message passing  (mean)
    c[i] = sat(r[i] + a[i])                      combination
    y[i] = ReLU(Wp c[i] + bp)                    projection linear (DOUT -> DOUT), 2D ReLU

Only the list of five blocks and their order come from the network
description. The following are this design's interpretation:

* The neighbours are aggregated by their mean.
* The combination is an addition.
* The projection is a DOUT x DOUT layer applied after the combination.

As a cross-check, the published multiply-accumulate count for the convolutions
is 335,360. That is exactly 2 x 10 x (3·128 + 128·64 + 64·64 + 64·64), the
count for the root and neighbour linears alone. The projections add another
286,720 MACs in this design.

An optional l2 normalisation of `c[i]` can be switched on with the
parameter `NORMALIZE` of `sage_layer` and `omtf_gnn`. It is off by default,
because it is not clear whether the evaluated network used it.

### l2 normalisation (`l2_norm`)

When enabled, each combined row is replaced by `c[i] / ||c[i]||`, and a zero
row stays zero. The block handles one node at a time:

* One cycle forms the exact sum of squares with `DIM` multipliers.
* A bit-serial integer square root gives `nrm = floor(sqrt(sum))` in the
  same fixed-point format as the data. It takes 20 cycles at the default
  widths.
* A restoring divider forms `floor(2^30 / nrm)` in 31 cycles.
* One cycle scales the row: `y = sat((c * recip) >>> 20)`.

This costs `NODES * (SQ_BITS + 33) + 2` cycles, where `SQ_BITS` is the
square-root length. That is 532 cycles at 10 nodes. A
SAGE layer with normalisation therefore takes 533 cycles more, and the whole
network takes 4,037 cycles instead of 1,905.

### Edges

An edge `{a, b}` is undirected and sends a message both ways. Edges that name
a node at or above `n_nodes` are ignored. A self edge `{i, i}` adds `h[i]` to
its own sum once and counts once towards the degree. A node without
neighbours gets `a[i] = 0`, so its output depends only on its own features.
The edge list is an input: the rule that picks edges from stub geometry is
not part of this design.

## Number format and rounding

All activations, weights and biases are signed 16-bit fixed point with 10
fraction bits, a range of [-32, 32) and a step of 1/1024. The 16-bit width is
the precision the network was sized for; the 6/10 split is this design's
choice. The parameters are in `gnn_pkg`: `DATA_W`, `FRAC` and `ACC_W`.

* **Linear layers.** Products are summed exactly in a 48-bit accumulator,
  seeded with `bias << FRAC`. The result is shifted right by `FRAC`
  (truncation towards minus infinity) and saturated to 16 bits.
* **Means.** Message passing and pooling form the exact sum, multiply it by
  `round(2^16 / n)` and shift right by 16 (`gnn_pkg::mean_of`). This is not
  an exact division. The testbenches' reference model uses the same rule, so
  the match is bit-exact.
* **Combination.** `r + a` is saturated to 16 bits.

## Hardware organisation

### The linear engine (`linear_engine`)

Every dense layer, whether root, neighbour, projection or MLP, is an instance
of one module. A fully parallel mapping would need hundreds of thousands of
multipliers, so the engine reuses its multipliers over time:

* It has `NODES x OUT_PAR` multipliers.
* In one cycle it takes input column `i` of every node and multiplies it with
  weights `W[o][i]` for a group of `OUT_PAR` output channels `o`.
* It walks through the `DIN` inputs, one per cycle. It then writes that group
  of outputs, saturated, and moves on to the next group.

One layer takes `ceil(DOUT/OUT_PAR) * DIN` busy cycles. The default
`OUT_PAR = 32` gives 3,968 multipliers for the whole network: 12 SAGE units x
10 nodes x 32, plus 4 MLP units x 32. That is well inside the roughly 10^4
DSP slices of a Virtex UltraScale+ VU13P. `OUT_PAR` is the reuse-factor knob:
lowering it saves multipliers and costs latency.

Weights sit in a memory inside each engine. They are read asynchronously, so
the memory maps to distributed RAM or registers.

### Sequencing

Every stage has a `start` input and `busy`/`done` outputs:

* `start` is a one-cycle pulse, sampled while the stage is idle.
* `done` is a one-cycle pulse.
* A stage's outputs are registered and hold until its next run.

Inside a SAGE layer, the root and neighbour engines run together. Message
passing follows, then the projection. The top runs the six stages (4 SAGE,
pool, MLP) strictly one after another, with one graph in flight. Every
hand-over costs one cycle, because starts are registered.

The stage latencies below count the cycle in which `start` is sampled as
cycle 1. `E` is the number of edges and `n` the number of nodes, after
clipping.

| stage | latency (cycles) | default, n=10, E=45 |
|---|---|---|
| linear_engine | `ceil(DOUT/OUT_PAR)*DIN + 1` | - |
| message_passing | `E + 3` | 48 |
| sage_layer | `Lx + E + Lp + 7`, with `Lx`, `Lp` the root and projection engine latencies | 578, 438, 310, 310 |
| meanpool | `n + 3` | 13 |
| mlp_head | `L1 + L2 + L3 + L4 + 5` | 249 |
| omtf_gnn (in_valid taken to out_valid) | sum of the six stages + 7 | **1,905** |

At 360 MHz, 1,905 cycles are 5.3 µs. That latency is also the initiation
interval, because only one graph is in flight at a time. How this fits the
trigger is discussed under Limits.

## Top-level interface (`omtf_gnn`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `wload` | in | `wload_t` (38 bits) | weight load beat: `en`, 5-bit unit `id`, 16-bit `addr`, 16-bit `data` |
| `in_valid` / `in_ready` | in / out | 1 | graph handshake; `in_ready` is high while no graph is in flight |
| `in_n_nodes` | in | 4 | present nodes, clipped to 10 |
| `in_feat` | in | 10 x 3 x 16 | node features; rows at or above `in_n_nodes` are zeroed on capture |
| `in_n_edges` | in | 6 | listed edges, clipped to 45 |
| `in_edges` | in | 45 x `edge_t` (2 x 4 bits) | node pairs |
| `out_valid` | out | 1 | one-cycle pulse when a new result is available |
| `out_q` | out | 16 | q/pT in the fixed-point format above; holds until the next result |

The graph is copied into registers when it is accepted. The input port may
change while the graph is processed.

**Loading weights.** The trained weights are not part of the design. Load
them after reset and before the first graph. Each linear unit answers to one
`id`:

* SAGE layer `l` uses `3l` (root), `3l+1` (neighbour) and `3l+2`
  (projection).
* The MLP layers use ids 12 to 15.

Within a unit, address `o*DIN + i` holds `W[o][i]` and address `DOUT*DIN + o`
holds bias `b[o]`. Loading all 16 units takes 69,953 beats at one beat per
cycle.

## Files

| file | content |
|---|---|
| `rtl/gnn_pkg.sv` | sizes, fixed-point types, edge and load-bus structs, saturation and mean helpers |
| `rtl/linear_engine.sv` | time-multiplexed dense layer with its weight memory |
| `rtl/message_passing.sv` | mean aggregation over the edge list |
| `rtl/relu2d.sv`, `rtl/relu1d.sv` | activations |
| `rtl/sage_layer.sv` | one GraphSAGE convolution |
| `rtl/l2_norm.sv` | optional per-node l2 normalisation |
| `rtl/meanpool.sv` | global mean pooling |
| `rtl/mlp_head.sv` | four-layer MLP |
| `rtl/omtf_gnn.sv` | top level |
| `tb/gnn_ref.svh` | bit-exact integer reference model, included by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench is self-checking. It ends with a line
`TB_RESULT checks=N failures=M`, and it has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
      --top-module tb_omtf_gnn rtl/gnn_pkg.sv tb/tb_omtf_gnn.sv
    ./obj_dir/Vtb_omtf_gnn

Replace `tb_omtf_gnn` with any other testbench name to run that test.
`tb_omtf_gnn` runs the whole network at its default size, and its C++ build
takes a couple of minutes. It:

* loads random weights into all 16 units;
* sends ten graphs back to back, so the input stalls;
* compares each q/pT and each latency with the reference model.

It also checks that each of these cases occurred at least once:

* a full 10-node, 45-edge graph;
* an empty graph;
* node and edge counts above the limits, which must be clipped;
* edges to absent nodes;
* a self edge;
* an isolated node;
* ReLU clipping;
* q/pT of both signs.

The block testbenches use smaller widths through parameters, and they use odd
`OUT_PAR` values so that partial channel groups are exercised. `tb_sage_layer`
runs a second layer with `NORMALIZE` set on the same inputs and checks it
against the normalising reference.

## Limits and departures

* **Interpretation.** Mean aggregation, the additive combination, the position
  and size of the projection linear, and the MLP inner widths are
  interpretations. See "Inside one SAGE layer".
* **No ReLU on the last layer.** The diagram of the network draws a ReLU after
  every MLP layer. The last one is left out here, because a ReLU would remove
  the sign of q/pT.
* **l2 normalisation off.** The optional l2 normalisation is built but off by
  default. It is tested inside one SAGE layer, but not through the whole
  network.
* **Throughput.** Only one graph is in flight, so the design does not accept a
  new graph every 25 ns bunch crossing. About 200 interleaved instances, or a
  pipelined schedule, would be needed for that.
* **Latency budget.** The full-graph latency of 1,905 cycles is a sizeable
  part of the 12.5 µs Level-1 budget. That budget covers the whole trigger
  chain, and the share left to this stage is unknown.
* **Other quantisation.** 8-bit and 4-bit variants are not provided. Changing
  `DATA_W` and `FRAC` in `gnn_pkg` rescales the whole datapath, but it has
  only been tested at 16/10.
* **No weights.** No trained weights are included. The tests use random
  weights and check the arithmetic, not physics performance.
