# GNN hit filter for a drift-chamber trigger sector

At high luminosity most hits in the Belle II Central Drift Chamber (CDC) come
from beam background, not from particle tracks. This RTL removes background
hits *before* track finding in the Level-1 trigger: the hits of one trigger
sector are treated as the nodes of a graph, a small quantised graph neural
network (an Interaction Network) scores every hit, and hits whose score is
below a threshold are dropped. The design is a pipelined dataflow accelerator
that accepts one complete event every four clocks (31.8 MHz of events at the
127.216 MHz trigger clock) and needs no DSP multipliers: every multiplication is
4 bit x 4 bit.

The architecture follows the paper "Hardware-Accelerated GNN-based Hit
Filtering for the Belle II Level-1 Trigger" (Heine, Mayer, Neu, Becker,
Ferber). The paper gives the block structure, the edge rules, the number
formats, the sector size and the reuse factor. It does not give the trained
weights, the layer widths, the insides of its switch boxes or the real wire
geometry. Where this RTL had to choose, it says so below, and in the opening
comment of each file.

## 1. The network on the wire graph

**Nodes.** Each sense wire of the sector is a node, hit or not. The front end
delivers per wire a hit flag, an ADC value (collected charge) and a TDC value
(drift time). Both values arrive already normalised to [-1, 1) and quantised
to 4-bit signed (LSB = 1/8). Each node also has a static position (x, y).

**Edges.** The graph is fixed. Edges come from three geometric rules:

| rule | delta-layer | delta-wire |
|------|-------------|------------|
| same layer | 0 | -1, +1 |
| next layer | +1 | 0 |
| next-to-next layer | +2 | -1, 0, +1 |

An edge points from the inner wire (source) to the outer wire (destination).
An edge is *live* in an event only when both of its wires are hit. Dead edges
are still computed, because the hardware is static, but they are ignored
wherever results are combined. Each edge carries delta-r and delta-phi
(static) and delta-TDC = TDC(dst) - TDC(src), saturated to 4 bits.

**Network.** The network has three small MLPs and two max-aggregations:

1. **R1** (edge block): `[x,y,ADC of src, x,y,ADC of dst, dr, dphi, dTDC]` gives a 4-element edge vector.
2. **Aggregate**: each node takes the element-wise maximum of R1 over its live
   incoming edges, or 0 if it has none. Max instead of sum cannot overflow.
3. **O** (node block): `[x, y, ADC, aggregate]` gives a 4-element node vector.
4. **R2** (edge block): `[O of src, O of dst, R1 of the edge]` gives one 8-bit edge score.
5. **Aggregate**: each node's score is the maximum R2 score over its live incoming edges.
6. **Threshold**: a hit is kept if `score >= thr`.

Every MLP has one hidden layer: R1 is 9-7-4, O is 7-4-4 and R2 is 12-4-1. Each
layer computes `acc = bias + sum(w*x)` exactly. The hidden layer then applies
`h = clamp(acc >>> 3, 0, 15)`, which is ReLU plus a 4-bit unsigned activation.
The output layer applies `clamp(acc >>> 3)` to 4-bit signed (R1, O) or 8-bit
signed (R2). R2 has no final activation: the paper replaced the training-time
sigmoid by a linear map. Weights are 4-bit signed and biases 16-bit signed.
These widths give 211 parameters, the paper's count after compression. The
paper does not give the widths themselves.

## 2. Streams, beats and the reuse factor

Every link between blocks is a ready/valid stream in the AXI4-Stream style,
with `valid`, `ready`, `data`, a per-lane `mask` and `last`. One event travels
as **R beats** (`REUSE`, 4 by default):

* a node beat carries `NODE_LANES = ceil(495/4) = 124` wires; wire *n* is in
  beat `n / 124`, lane `n % 124`;
* an edge beat carries `EDGE_LANES = ceil(2261/4) = 566` edges, numbered the
  same way;
* `last` marks beat R-1, and the mask marks live edges or hit nodes.

A processing-element array has one MLP per lane. Each MLP therefore handles R
items per event, one per clock: this is the reuse factor. A larger R means
fewer PEs and a lower event rate.

The input hit beat is copied three ways by an eager fork (`axis_fork`): to the
first scatter box, to a FIFO that feeds the hit records to the first aggregate
box, and to a FIFO that carries them to the threshold stage. A second fork
sends the R1 results to the first aggregate box and, through a third FIFO, to
the second scatter box. Each fork output takes a beat once, and the input is
released when every branch has it.

```
hits -> fork -+-> Scatter SB 1 -> R1 PEs -> fork -+-> Aggregate SB 1 -> O PEs
              |                                   |        ^              |
              +-> hit FIFO ---------------------- | -------+              v
              |                                   +-> edge FIFO --> Scatter SB 2
              |                                                         |
              |                                  R2 PEs <---------------+
              |                                    |
              |                            Aggregate SB 2
              |                                    v
              +-> output FIFO --------------> Threshold -> filtered hits
```

## 3. Switch boxes: putting the graph into wiring

The switch boxes are the part that holds the graph. A **scatter box** (node to
edge) hands every edge the values of its two end nodes. An **aggregate box**
(edge to node) reduces the edges that end at a node. Neither looks anything up
at run time: both are generate loops over every wire and every edge rule
("slot" k = 0..5). These loops fix, at elaboration, which buffer bit drives
which other bit.

The shared arithmetic is in `gnn_pkg`:

* `slot_exists(L, W, l, w, k)` says whether wire (l, w) has an edge through slot k;
* `edge_id(L, W, l, w, k)` gives the edge number in closed form. Edges are
  numbered source wire by source wire, in slot order. The number of edges a
  whole layer sends out is `2(W-1) + W*[l+1<L] + (3W-2)*[l+2<L]`;
* an aggregate box finds the edges entering wire (l, w) by walking the slots
  backwards: the source of slot k is `(l - dl_k, w - dw_k)`. A wire has at
  most six incoming edges, so its max-reduction is at most six deep.

Each box is double buffered. It collects all R beats of an event in an input
buffer, then copies through the fixed wiring into an output buffer in one
clock. While it sends those R beats, it collects the next event. The copy
starts when the input is complete and the output buffer is free or sending
its last beat. This keeps one event every R clocks. The cost is latency: 2
clocks from the last input beat to the first output beat, which is about R
clocks more than a streaming design would need. The paper's boxes come from a
Chisel generator that the paper cites but does not describe; this construction
is this design's own.

The second scatter box and the first aggregate box each have a second input:
the edge FIFO and the hit FIFO. They start the copy only when both inputs hold
a complete event.

## 4. Timing

Per block, from the first input handshake to the first output handshake when
nothing stalls:

| block | clocks |
|-------|--------|
| scatter / aggregate box | R + 1 (2 after the last input beat) |
| PE array | 2 |
| threshold | 1 |

End to end this is **4R + 11 clocks**: 27 clocks, about 212 ns at 127.216
MHz, for R = 4. The design sustains one event per R clocks. Both numbers are
checked in simulation. The paper reports 632.4 ns (about 80 clocks) after
place and route on an AMD UltraScale XCVU190. That latency is set by its HLS
processing elements, about 21 clocks each. The two figures are not comparable
as a statement about speed: this RTL has not been synthesised for an FPGA, and
its single-cycle 9-input MAC stages may not close timing at 127 MHz without
more pipelining.

Back-pressure works everywhere. A PE array stalls as one pipeline. A switch
box stops accepting once both of its buffers are full. A fork waits for its
slowest branch. The FIFO depths (16 hits, 16 edges, 32 output beats) are large
enough that the bypass paths never limit the rate when the output is always
ready.

## 5. Loading a network

The top `gnn_hit_filter` takes the weights as ports `r1_w`, `o_w` and `r2_w`,
of packed struct types `r1_weights_t`, `o_weights_t` and `r2_weights_t`
(`gnn_pkg`), plus the 8-bit signed threshold `thr`. In a struct, `w1[j][i]` is
the weight from input i to hidden unit j, `b1[j]` is its bias, and `w2`/`b2`
are the same for the output layer. The input element order is the order
listed in section 1. Pruned weights are 0. If the ports are tied to constants,
synthesis removes the pruned products.

To use a trained model, convert each Brevitas layer to integers at the
following scales: inputs and weights with LSB 1/8, biases at the scale of the
`w*x` products (1/64), and hidden and output values with LSB 1/8 after the
shift. If the trained scales differ, change `HID_SHIFT` and `OUT_SHIFT` of
`mlp_pe`. Set `thr` to the score at the chosen working point; the paper works
at 95 % signal-hit efficiency.

## 6. How far this follows the paper

Taken from the paper:

* the block chain and the three bypass FIFOs;
* the edge rules;
* the features;
* 4-bit inputs, weights and activations, 16-bit biases and an 8-bit output;
* max aggregation between R1 and O, and a linear output after R2;
* the 495-wire sector, R = 4 and 124 nodes per clock;
* ready/valid streams.

Chosen here:

* **Wire geometry.** The sector is a regular 5 x 99 grid. x, y, delta-r and
  delta-phi are linear in layer and wire index (`node_x`, `node_y`,
  `edge_dr`, `edge_dphi` in `gnn_pkg`). The real sector is irregular and has
  2163 edges; the grid has 2261, so there are 566 edge lanes where the paper
  has 541. For real data, replace those four functions with tables of the
  true wire positions. If the wire layout itself differs, replace
  `slot_exists`/`edge_id` as well.
* **Layer widths and rescaling.** The widths and the right-shift rescaling
  are section 1's.
* **R2 input.** R2 sees the R1 edge result, not the raw edge features. The
  paper's diagram takes the edge FIFO from the R1 stage without saying which
  side of it.
* **Second aggregation and direction.** The second aggregation is a maximum
  as well. Results are reduced onto each edge's destination wire. An empty
  maximum is 0.
* **Output format.** Rejected hits leave with the hit flag cleared and ADC/TDC
  unchanged. Scores are output as well.
* **Internals.** The switch-box construction, FIFO depths, forks, pipeline
  depths and the reset are this design's own. Control registers use an
  active-low asynchronous reset; data registers have no reset.

Not included: the front-end readout that delivers the hits and the track
finder that receives them. Both are existing trigger hardware, outside this
design. The network can also be trained to score edges instead of wires. That
edge-classification mode is not built here, because wire scores are what the
filter uses.

## 7. Files

| file | contents |
|------|----------|
| `rtl/gnn_pkg.sv` | number formats, hit/feature/weight types, network shape, edge rules and static features |
| `rtl/axis_if.sv` | stream interface with handshake assertions, used for every link inside the top |
| `rtl/axis_fork.sv` | eager stream fork |
| `rtl/mlp_pe.sv` | one quantised MLP, 2-clock pipeline |
| `rtl/pe_array.sv` | LANES MLPs behind one stream, global stall |
| `rtl/scatter_sb.sv` | node-to-edge switch box (variant `FIRST` = 1 before R1, 0 before R2) |
| `rtl/aggregate_sb.sv` | edge-to-node max switch box (`FIRST` = 1 before O, 0 for the scores) |
| `rtl/stream_fifo.sv` | bypass FIFO |
| `rtl/threshold.sv` | score/hit join and selection |
| `rtl/gnn_hit_filter.sv` | top level |
| `tb/tb_ref_pkg.sv` | reference model: graph built by walking the rules, integer MLPs |
| `tb/tb_*.sv` | one self-checking testbench per block |
| `tb/tb_gnn_body.svh` | shared body of the two end-to-end tests |

## 8. Simulating

Each testbench checks its block against the reference model and prints one
line `TB_RESULT checks=N failures=M`. Each also has a watchdog. Example with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Itb --top-module tb_gnn_hit_filter \
  rtl/gnn_pkg.sv tb/tb_ref_pkg.sv rtl/axis_if.sv rtl/*.sv tb/tb_gnn_hit_filter.sv
./obj_dir/Vtb_gnn_hit_filter
```

For a block test, list `gnn_pkg.sv`, `tb_ref_pkg.sv`, the block's file(s) and
the testbench. `pe_array` also needs `mlp_pe`.

* `tb_gnn_hit_filter` runs a 4 x 6-wire sector with R = 2 and 50 events, and
  finishes in well under a second. In the first 30 events it applies random
  input gaps and output stalls. These make the input stall, the forks split,
  a bypass FIFO fill, and dead edges, empty aggregations, saturation, kept
  hits and rejected hits all occur. The test counts each of these cases and
  fails if one never happened. The last 20 events run back to back and check
  the latency of 4R + 11 clocks and the rate of one event per R clocks.
* `tb_gnn_full` runs the default 495-wire sector with R = 4: 4 events with
  gaps and output stalls, then 6 back to back. It checks every output lane
  against the reference model, plus the 27-clock latency and the 4-clock
  event rate. With so few events the default FIFOs never fill, so this test
  does not require the flow-control corner cases; the small test covers them.
  The simulation itself takes under a second. Building it takes 7 to 13
  minutes, depending on the number of compile jobs, because the design
  flattens to about 1260 MLP instances.

Most parameters can be changed at instantiation: `N_LAYERS`, `N_WIRES`,
`REUSE` and the FIFO depths. The lane counts follow from them. Changing the
network shape means editing the constants in `gnn_pkg`.
