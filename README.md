# A fused, node-serial JEDI-net accelerator for sub-microsecond jet tagging

The Level-1 trigger of a collider experiment must decide, within a fixed
budget of about a microsecond per algorithm, whether a collision is worth
keeping. One candidate algorithm is JEDI-net, a graph neural network that
classifies a jet (a spray of particles) into one of five classes: gluon,
light quark, W, Z or top. Each jet is a graph with one node per particle and a
directed edge between every ordered pair of particles, so 30 particles already
give 870 edges. This gives an interaction network: an MLP on every edge, a sum
of edge messages into every node, an MLP on every node, and a final MLP on the
whole jet.

The SystemVerilog here implements that network as one fine-grained pipeline.
It rests on three observations about the graph being fully connected:

* **No adjacency matrices.** The receiving and sending matrices `Rr` and `Rs`
  are fixed one-hot patterns. Multiplying by them is just picking columns, and
  the index of the column is a formula. Edge `e = i*(NO-1) + k` is received by
  node `i` and sent by node `k` if `k < i`, else by node `k+1`.
* **Aggregation as an outer product.** The edges that node `i` receives are
  consecutive: `i*(NO-1)` to `i*(NO-1)+NO-2`. So the sum `Ebar = E*Rr^T` is a
  running sum of edge-MLP outputs. It is restarted at each node and needs no
  multiplier. A node's aggregate is ready as soon as its last edge has been
  processed.
* **Fusion.** Because of the two points above, the edge work and the node work
  can run in one loop over the nodes. There is no buffer between "all edges"
  and "all nodes".

The default parameters give a design point for 30 particles. A new node enters
the pipeline every clock cycle, and a new jet every 30 cycles. At 200 MHz that
is one jet every 150 ns.

## The computation

A jet has `NO` particles with `P` features each. They form the matrix `I`
(`P x NO`), stored column by column.

| step | math | here |
|---|---|---|
| edge inputs | `B = [I*Rr ; I*Rs]`, `2P x NE` | `edge_gather`: receiver column stacked on sender column |
| edge MLP `f_R` | `E = f_R(B)`, `De x NE` | `NFR` copies of `mlp`, one per lane |
| aggregation | `Ebar = E*Rr^T`, `De x NO` | `mmm3_agg`: running sum per node |
| node inputs | `C = [Ebar ; I]`, `(De+P) x NO` | wiring in `edge_node_unit` |
| node MLP `f_O` | `O = f_O(C)`, `Do x NO` | one `mlp` |
| head `phi_O` | `y = phi_O(sum over nodes of O)`, 5 scores | `jedi_head` |

`NE = NO*(NO-1)`. All MLP layers except the last layer of `phi_O` use ReLU. The
head gives raw scores and applies no softmax. The scores rank the classes in
the same order a softmax would.

## The fused schedule

This is the part to understand before changing anything.

There is a single node engine. It takes the receiving nodes `i = 0 .. NO-1` in
order. The `NO-1` edges of a node are handled `NFR` at a time, so a node has
`NG = ceil((NO-1)/NFR)` edge groups. A small state machine in `edge_node_unit`
counts a state `st` from `0` to `II_LOOP-1` for each node:

```
II_LOOP = max(NG, R_FO, R_PHI)
st < NG      : issue edge group st of node i  (gather -> f_R lanes -> running sum)
st = II_LOOP-1: move to node i+1 (or to node 0 of the next jet)
st >= NG     : issue nothing (only when an MLP is folded more than NG times)
```

A nested loop would have the node work outside the edge loop, and that could
not be pipelined. The state machine turns it into one loop that takes a step
every cycle.

Timing of one node (`NG = 2`, `NL_R = 1`, `NL_O = 1`, `R_FO = 1`; each column is
one clock):

```
cycle            t      t+1     t+2     t+3     t+4
issue          grp0    grp1
edge_gather            B(g0)   B(g1)
f_R lanes                      E(g0)   E(g1)
mmm3_agg  sum                  +g0     +g1 -> Ebar(i)
f_O                                            O(i)
```

The node's own features travel down a short delay line. They meet `Ebar(i)`
at the input of `f_O` (Concat2). Timing, counted from the first issue of a jet:

```
last O column of a jet = II_LOOP*(NO-1) + DP_LOOP
DP_LOOP                = (NG-1) + 1 (gather) + NL_R + 1 (sum) + NL_O*R_FO
interval between jets  = II_LOOP*NO
```

Seen from the ports, three more cycles go in front: two in the input channel
and one to start the state machine. Three more go behind: one in the channel
to the head, one to form the sum, and `NL_P*R_PHI` in the head. At the
defaults (`NO = 30`, `NFR = 29`, so `NG = 1` and `II_LOOP = 1`), the scores
appear 42 cycles after the last particle of a jet is accepted. Jets streamed
back to back finish every 30 cycles.

The interval formula gives the intervals published for the five fused design
points of JEDI-net:

| design point | NO | NFR | NG | interval (cycles) |
|---|---|---|---|---|
| 30 particles, lowest latency (default) | 30 | 29 | 1 | 30 |
| 30 particles, `f_R`/`f_O` width 20 | 30 | 10 | 3 | 90 |
| 30 particles, highest accuracy | 30 | 6 | 5 | 150 |
| 50 particles, lowest latency | 50 | 25 | 2 | 100 |
| 50 particles, highest accuracy | 50 | 17 | 3 | 150 |

The published latencies include the pipeline depths of the original
high-level-synthesis build, which are not given. They are 58 cycles for the
default point and 181 for the last row. This RTL has one register stage per
layer and gives 42 and 163 cycles from the last input (see Verification).

The next jet starts with no gap if it is already in the node store when the
current jet's last node ends. The node store is a ring of `NBANK = 3` banks.
So while one jet is processed, a second one can wait and a third can load,
and a source that delivers one particle per cycle never leaves a gap. With two
banks the interval at the default size grows from 30 to 31 cycles.

## Number formats

Data is Q12.12: 24 bits, with a sign bit, 11 integer bits and 12 fraction
bits. Accumulators are Q16.16 (32 bits). In a layer, each product
`x*w` (24 fraction bits) is shifted right by 8 to Q16.16, rounding towards
minus infinity. The bias is shifted left by 4. The sum is built at full width
and saturated once to Q16.16. It is then shifted right by 4 and saturated to
Q12.12. The sums in the aggregation and in the head follow the same path. The
helpers are in `jedi_pkg`. The testbench golden model restates them in plain
integer arithmetic.

## Modules

```
ll_gnn_top
 ├─ weight_store x3        coefficients of f_R, f_O, phi_O (cfg port)
 ├─ stream_fifo            input channel (particle columns)
 ├─ node_buffer            ring of NBANK banks, each the NO x P matrix I
 ├─ edge_node_unit         fused loop, state machine
 │   ├─ edge_gather        MMM1 + MMM2 + Concat1 by index arithmetic
 │   ├─ mlp x NFR          f_R lanes (each a chain of fc_layer)
 │   ├─ mmm3_agg           running sum into the receiving node
 │   └─ mlp                f_O, reuse factor R_FO
 ├─ stream_fifo            channel of O columns
 └─ jedi_head              sum over nodes, then mlp phi_O (reuse R_PHI)
```

`fc_layer` is the only arithmetic primitive. With reuse factor `R` it has
`ceil(IN/R) x OUT` multipliers and spends `R` cycles on a vector. In cycle `c`
it handles the inputs `c*ceil(IN/R)` onwards. `R = 1` is fully parallel. The
`f_R` lanes always use `R = 1`, because the edge MLP is the bottleneck.

## Using the top level

* **Reset:** `rst_n` is synchronous and active low. It clears all state and
  all coefficients.
* **Coefficients:** write them before streaming jets. Drive one word per cycle
  on `cfg_we`, `cfg_sel` (0 = `f_R`, 1 = `f_O`, 2 = `phi_O`), `cfg_addr` and
  `cfg_data` (Q12.12). Inside one MLP, the words are stored layer after layer.
  For layer `l`, the `DIMS[l+1] x DIMS[l]` weights come first, row by row
  (`w[o][i]` at `o*DIMS[l] + i`), then the `DIMS[l+1]` biases.
  `jedi_pkg::mlp_off` gives where each layer starts.
* **Particles:** send one particle per `s_valid && s_ready` handshake, with
  its `P` features on `s_col`, and `NO` particles per jet. `s_ready` goes low
  only when every bank of the node store is full.
* **Scores:** `y_valid` pulses once per jet, with five Q12.12 scores on
  `y_scores`, in jet order. The output cannot be stalled.

Parameters of `ll_gnn_top`, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `NO` | 30 | particles per jet |
| `P` | 16 | features per particle |
| `NFR` | 29 | parallel `f_R` lanes |
| `NL_R`, `DIMS_R` | 1, {32, 8} | `f_R` layers and widths; `DIMS_R[0]` must be `2P`; `De = 8` |
| `NL_O`, `DIMS_O` | 3, {24, 48, 48, 48} | `f_O`; `DIMS_O[0]` must be `P + De`; `Do = 48` |
| `NL_P`, `DIMS_P` | 2, {48, 48, 5} | `phi_O`; `DIMS_P[0]` must be `Do` |
| `R_FO`, `R_PHI` | 1, 1 | reuse factors of `f_O` and `phi_O` |

`DIMS_*` are arrays of `MAXL + 1 = 9` entries, padded with zeros.

## Where this departs from, or adds to, the published design

The published accelerator was generated with high-level synthesis, with the
coefficients compiled in. This RTL keeps its structure: the fused loop, the
state machine, the `NFR` parallel `f_R` lanes, aggregation by index, the
reuse factors and the number formats. Some details are its own:

* **Sizes.** The published description of the default point gives only "`f_R`: 1 layer of 8,
  `f_O`: 3 layers of 48". Here that is read as `De = 8` and `Do = 48`. The
  head's shape (48 hidden units, 2 layers) is not published either and is an
  assumption. So the published accuracy of this point cannot be claimed for
  these sizes without retraining.
* **Resources.** With the sizes above and one DSP per multiplier, the default
  needs more multipliers than the published 8776 DSPs. The original build
  multiplies by constants, which synthesis can simplify. Here the
  coefficients are run-time registers, so no such saving applies.
* **Sum before `phi_O`.** Summing `O` over the particles before the head
  follows the original JEDI-net formulation. The softmax is left out.
* **Rounding.** The rounding and saturation rules above are choices of this
  design.
* **Pipeline stages.** There is one register stage per gather, per MLP layer
  and per aggregation. A build for 200 MHz would need more stages inside wide
  layers, which changes `DP_LOOP` but not the interval.
* **Input path.** The input channel, the bank ring of the node store and the
  valid/ready handshakes are this design's. The optical links and
  transceivers that deliver the particle stream in the trigger are not
  included.
* **Concat row order.** `B` stacks the receiver above the sender, and `C`
  stacks `Ebar` above `I`. Only the weight layout depends on these orders.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The golden model, `tb_ref_pkg`, does not use
the index tricks of the RTL. It builds `Rr` and `Rs` explicitly by listing
every ordered pair (receiver, sender), then forms `B`, `Ebar` and `C` by
matrix products.

| testbench | what it exercises |
|---|---|
| `tb_fc_layer` | parallel and folded layers, latency `R`, saturation |
| `tb_mlp` | three-layer chain, reuse 2, inputs every `R` cycles |
| `tb_weight_store` | random writes, including out-of-range addresses |
| `tb_stream_fifo` | random handshakes on both sides; fill and drain |
| `tb_node_buffer` | bank ring, `g_pending`, input held off when full |
| `tb_edge_gather` | every node and group against `[I*Rr ; I*Rs]`; masked lanes |
| `tb_mmm3_agg` | running sums, masks, gaps, saturation |
| `tb_edge_node_unit` | O columns, latency and interval formulas, idle states |
| `tb_jedi_head` | jets of 3–7 nodes, back to back, latency |
| `tb_ll_gnn_top` | end to end at reduced size; counts back-pressure, half-empty edge groups, idle states, jets chained and started from idle, folded `f_O` and `phi_O` |
| `tb_ll_gnn_full` | default parameters: three 30-particle jets; latency 42, interval 30 |
| `tb_ll_gnn_j3`, `tb_ll_gnn_j5`, `tb_ll_gnn_u4`, `tb_ll_gnn_u5` | the other four published sizes (table below), three jets each, through the shared bench `tb_ll_gnn_sized` |

Measured at the published sizes (interval and latency in cycles; latency
counted from the last accepted particle of a jet):

| bench | NO | NFR | `f_R` | `f_O` | `phi_O` | interval | latency |
|---|---|---|---|---|---|---|---|
| `tb_ll_gnn_full` | 30 | 29 | 32-8 | 24-48-48-48 | 48-48-5 | 30 | 42 |
| `tb_ll_gnn_j3` | 30 | 10 | 32-20-20-20 | 36-20-20-20 | 20-20-5 | 90 | 104 |
| `tb_ll_gnn_j5` | 30 | 6 | 32-32-32 | 48-48-48-48 | 48-48-5 | 150 | 163 |
| `tb_ll_gnn_u4` | 50 | 25 | 32-8-8 | 24-32-32-32 | 32-32-5 | 100 | 113 |
| `tb_ll_gnn_u5` | 50 | 17 | 32-8-8 | 24-48-48-48 | 48-48-5 | 150 | 163 |

The intervals equal the published ones. The latencies are 16–20 cycles
below the published 58, 124, 181, 130 and 181. The hidden width of `phi_O`
is an assumption in every row. Where a published `f_O` width differs from
48, the `phi_O` width follows it.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/jedi_pkg.sv tb/tb_ref_pkg.sv \
    rtl/*.sv tb/tb_ll_gnn_top.sv --top-module tb_ll_gnn_top -Mdir obj
./obj/Vtb_ll_gnn_top
```

The full-size testbenches build in under a minute and run in seconds.
Coefficients and inputs are random. They are scaled so that activations stay
mostly inside the Q12.12 range. Saturation is checked separately in the unit
tests.

## Limits

* The RTL checks only the arithmetic and the schedule. It has not been
  compared with a trained JEDI-net model, because no trained coefficients are
  included.
* Timing closure at 200 MHz, and the resource use, have not been checked on an
  FPGA.
* Nothing is pipelined inside a layer. At the default size, the `f_R` lanes
  alone need 7424 multipliers, and a 48-input layer of `f_O` sums 48 products
  in one cycle.
