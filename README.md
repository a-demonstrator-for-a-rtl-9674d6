# A fixed-latency GNN trigger engine for the sPHENIX silicon trackers

At RHIC, sPHENIX sees about 3 MHz of proton-proton collisions but can record
only about 15 kHz with its triggered readout. Heavy-flavour decays (for example
D0 mesons) often produce low-momentum particles, so the usual trick of
triggering on high-momentum signals does not work for them. What does set them
apart is topology: their tracks come from a secondary vertex about 100 um from
the collision point. The FELIX-AI demonstrator reconstructs short tracks from
the silicon pixel (MVTX) and strip (INTT) hits on a FELIX-712 FPGA board, runs
a graph neural network (GNN) on them, and sends a trigger line back to the
experiment's timing system. The trigger must arrive at a **fixed** time after
the collision, although the work per event varies with its hit count.

This repository holds SystemVerilog for the parts of that engine whose
behaviour is known well enough to write down:

* the 128-deep FIFO for decoded hits;
* the TrackGNN core. It has one message-passing layer, a 4-layer MLP of width 8
  for the nodes and another for the edges, and it uses the model's fixed-point
  formats;
* the logic that makes the decision latency fixed: it either delays the
  decision to a set time or vetoes the event;
* a top level that joins these.

The stages before the GNN are not included. They are the link receivers, the
raw-data decoder, the event builder, the clusterizer and the step that builds
the graph's edges. The networks after the GNN are not included either. They are
displaced-vertex finding, track-momentum regression and the final
heavy-flavour decision. The top level has ports where each of them connects.
Their algorithms and trained weights are not public in enough detail to write
as RTL.

The MVTX and INTT are split into two halves, and each half has its own board
and engine. So one instance of this design serves 24 MVTX links and 24 INTT
links.

```
  decoded hits ──► hit_fifo (128) ──► ┌──────────────── trackgnn_core ─────────────────┐
                                      │ feature RAM ─► node MLP (4x8) ─► embedding RAM │
  edge list ────────────────────────► │ edge RAM ─► edge_adapter ◄──────────┘          │
                                      │              └─► edge MLP (4x8) ─► msg_aggregator ──► messages (res_*)
  weights (host) ───────────────────► │                        └───────────────────────────► edge embeddings (eo_*)
                                      └─────────────────────────────────────────────────┘
  first hit of an event ─► ev_start ─► latency_aligner ◄── decision from the decision networks (hf_*)
                                            │  └─► drop (veto while the core is still on the event)
                                            └──► trig_out / dec_valid / veto, exactly LATENCY cycles after ev_start
```

## Number formats

All arithmetic uses two's-complement fixed point with 12 fraction bits:

| quantity | format | bits |
|---|---|---|
| node embeddings, edge embeddings, weights, biases | ap_fixed<18,6> | 18 (6 integer incl. sign) |
| messages, input hit features | ap_fixed<21,9> | 21 (9 integer incl. sign) |

Both formats have 12 fraction bits. So an 18-bit value becomes a message by
sign extension alone. A layer computes `b*2^12 + Σ w·x` at full precision. It
then shifts the sum right by 12 bits, which rounds toward minus infinity, and
keeps the low 18 bits, so overflow wraps. Messages also wrap at 21 bits. This
is what Vitis HLS `ap_fixed` does by default (AP_TRN, AP_WRAP). RTL results
therefore match a C model that uses default `ap_fixed` types bit for bit,
provided the C model uses the same layer structure.

## The TrackGNN core

`trackgnn_core` handles one event graph at a time. It works through four
phases:

1. **LOAD.** Hits arrive on a valid/ready stream and edges on another. Each
   stream marks its last item with a flag, and the two streams load in
   parallel. A hit is its `NODE_FEAT` = 3 features (21 bits each) plus the last
   flag. An edge is a pair of node indices, `src` and `dst`, where node *n* is
   the *n*-th hit of the event. Hits beyond 200 and edges beyond 500 are thrown
   away, and `overflow` stays set for that event.
2. **NODE.** One node per cycle passes through the node MLP. The embedding
   `h[n]` goes into the embedding RAM. In the same cycle the node's message
   `m[n]` is cleared, so clearing needs no separate pass.
3. **EDGE.** `edge_adapter` reads each edge's `(src, dst)`, then fetches
   `h[src]` and `h[dst]` from the two read ports of the embedding RAM. It feeds
   `{h[src], h[dst]}` (16 values) to the edge MLP, one edge per cycle with no
   stalls. Each edge embedding `e` is streamed out on `eo_*` and added into
   `m[dst]` by `msg_aggregator`. The aggregator does the read-modify-write in
   one cycle, so a run of edges into the same node needs no forwarding.
4. **READ.** The messages `m[0..N-1]` (8 × 21 bits each) are read out on
   `res_*` with a valid/ready handshake, and `res_last` marks the final node.
   After this, `done` pulses and the core returns to LOAD.

This order follows the FlowGNN message-passing dataflow: all node embeddings
are computed first, then an adapter routes node data to the edge processing
unit, which computes the edge embedding and aggregates the messages. This
design has a single edge unit. It is fully pipelined, so the adapter never has
to choose between units.

**Timing.** Count from the cycle the core leaves LOAD to the `done` pulse, with
N nodes, E edges and `res_ready` held high:

    NODE N + 6   +   EDGE E + 7   +   READ 2N   +   1   =   3N + E + 14 cycles

Each MLP has a latency of 4 cycles, one per registered layer. The extra 2 or 3
cycles in each phase are RAM read latency plus the state change. A graph of
average size (92 nodes, 142 edges) takes 432 cycles, which is 1.52 µs at
285 MHz. The largest graph (200 nodes, 500 edges) takes 1114 cycles, or 3.91 µs.
Loading takes max(N, E) cycles on top of that when both streams run at full
rate. The core's testbench measures the following across the range of graph
sizes in the measured event sample:

| nodes / edges | 16/20 | 50/80 | 92/142 | 130/260 | 175/420 | 200/500 |
|---|---|---|---|---|---|---|
| cycles | 82 | 244 | 432 | 664 | 959 | 1114 |
| µs at 285 MHz | 0.29 | 0.86 | 1.52 | 2.33 | 3.36 | 3.91 |

The HLS build on an Alveo U280 measured 8.82 µs for the average graph,
but that figure covers the whole round trip from the host: moving the graph and
the weights over PCIe, computing and reading back. Here the inputs are already
on the chip, so the two numbers do not measure the same thing.

**Dropping an event.** `drop_ev` abandons the current event at once. It clears
both MLP pipelines and the adapter. The core then enters FLUSH, where it takes
in and discards the rest of the event's hits and edges, up to their last
flags, before it returns to LOAD.

### Parameter memory

Each MLP keeps its parameters in a register file that is cleared at reset.
They are written through `wt_we / wt_sel / wt_addr / wt_data`, one
ap_fixed<18,6> value per cycle. `wt_sel` selects the network: `WSEL_NODE` (0)
or `WSEL_EDGE` (1). Layer by layer, with `in_1` = 3 for the node network or 16
for the edge network, and `in_L` = 8 for the later layers:

    layer L weights w[o][i] : base_L + o*in_L + i        o = 0..7
    layer L biases  b[o]    : base_L + 8*in_L + o
    base_1 = 0, base_{L+1} = base_L + 8*in_L + 8

That gives 248 parameters for the node network and 352 for the edge network.
Layers 1 to 3 apply ReLU; layer 4 is linear. Do not write parameters while an
event is being computed; an assertion checks this.

## Fixed latency: delaying or vetoing

The trigger line has to change a fixed time after the collision. The timing
budget is 10 µs to the global trigger, of which the silicon readout and the
cables take about 6 µs. That leaves about 4 µs for the engine, or 1140 cycles
at 285 MHz. This is the default `LATENCY`.

`latency_aligner` keeps a queue (depth 4) of events that are waiting for their
deadline. Each entry holds a time stamp from a free-running cycle counter. In
`felix_ai_top`, an event starts (`ev_start`) when its first hit is pushed into
the hit FIFO. Decisions arrive in event order, and each one is attached to the
oldest event that does not have one yet. Exactly `LATENCY` cycles after an
event's `ev_start`, that event leaves the queue in one of two ways:

* If its decision has arrived, at the latest in that same cycle, `dec_valid`
  pulses with `dec_trig`, and `trig_out` pulses if the decision is to trigger.
* If not, `veto` pulses and so does `drop_ev`.

A decision that arrives while no event is waiting for one is counted in
`late_cnt`. An `ev_start` that arrives when the queue is full is counted in
`ev_lost_cnt`.

Hits queue in the FIFO while the core is busy, so the core may be several
events behind the aligner. Two pieces of bookkeeping in the top keep them
matched:

* The top counts events the core has finished (done or dropped) and events the
  aligner has resolved. A veto drops the core's current event only if the two
  counts are equal, which means the core is still working on the vetoed event.
  If the core had already finished that event, the veto only suppresses the
  trigger.
* Results leave with an event number, `res_event`. The decision networks must
  return it with their decision on `hf_event`. If a decision is for an event
  that has already been vetoed, the top discards it and counts it in
  `stale_cnt`, so it cannot be attached to the wrong event.

Because events queue up, their latency budget is shared. In a busy stream, an
event that waits long in the FIFO is vetoed even if its own graph is small. The
end-to-end test shows this: when the hit sender runs ahead, most events miss
the 1140-cycle deadline. The real system would choose `LATENCY` (up to about
30 µs, the depth of the TPC buffers) and the input rate to keep this rare.

## Top-level interface (`felix_ai_top`)

| group | signals | direction | notes |
|---|---|---|---|
| clock, reset | `clk`, `rst_n` | in | one clock (285 MHz in the HLS reference build), asynchronous active-low reset |
| weights | `wt_we`, `wt_sel`, `wt_addr[8:0]`, `wt_data[17:0]` | in | see the parameter memory section |
| hits | `hit_in_valid`, `hit_in_ready`, `hit_in` (`hit_t`: `last`, 3 × 21-bit features) | in/out/in | from the decoder / clusterizer side |
| edges | `edge_valid`, `edge_ready`, `edge_src[7:0]`, `edge_dst[7:0]`, `edge_last` | in/out/in | the event's edge list, accepted only during LOAD |
| edge embeddings | `eo_valid`, `eo_idx[8:0]`, `eo_emb` (8 × 18) | out | one per edge during EDGE, no back-pressure |
| messages | `res_valid`, `res_ready`, `res_node[7:0]`, `res_msg` (8 × 21), `res_last`, `res_event[15:0]` | out/in/out | per-node readback |
| decision | `hf_valid`, `hf_trig`, `hf_event[15:0]` | in | from the decision networks |
| trigger | `trig_out`, `dec_valid`, `dec_trig`, `veto` | out | one-cycle pulses, `LATENCY` cycles after the event start |
| status | `core_busy`, `core_done`, `core_dropped`, `overflow`, `n_nodes`, `n_edges`, `fifo_level`, `late_cnt`, `stale_cnt`, `ev_lost_cnt` | out | |

The widths above are for the default sizes (200 nodes, 500 edges).

## What follows the published design and what is this design's choice

These come from the published description:

* one GNN layer;
* 4-layer MLPs of width 8 for node and edge embedding;
* the ap_fixed<18,6> and ap_fixed<21,9> formats and which quantities use them;
* graphs of up to 200 nodes and 500 edges;
* node embeddings first, then an adapter feeding edge units, then aggregation;
* the 128-deep decoded-hit FIFO;
* a fixed decision latency, reached by delaying or vetoing;
* the 285 MHz clock and the 4 µs engine budget.

These are this design's own choices:

* ReLU after hidden layers and a linear output layer;
* 3 input features per hit;
* the edge-network input `{h[src], h[dst]}` on directed edges;
* sum aggregation into the destination node;
* one fully unrolled edge unit;
* the stream formats and handshakes;
* the parameter address map;
* overflow by truncation;
* how an event's start is defined (its first hit entering the FIFO);
* the queue in the aligner, the event tags and the drop rule.

The output of the model itself is a choice too. The model is meant to label
track hits, and later networks regress momenta and find vertices. The way the
labels are formed from the embeddings is not published, so the core returns
the raw edge embeddings and the per-node messages.

There is one inconsistency in the source about the engine's time budget. The
GNN target is stated as "of order 10 µs", and 8.82 µs is called acceptable
against the 30 µs hard limit. Elsewhere, about 4 µs is left for the engine
within the 10 µs goal. The default `LATENCY` follows the 4 µs figure; change
the parameter for the other.

## How far it can be trusted

Each module has a self-checking testbench in `tb/`. The testbenches compare
against an integer reference model (`tb/gnn_ref_pkg.sv`) that is written
separately from the RTL. The checks are:

* **`tb_mlp4`:** both MLP shapes; every lane of 300 random vectors per
  parameter set, with occasional full-range values so that wrap and ReLU are
  exercised; latency of 4; reloading the parameters.
* **`tb_hit_fifo`:** fills to exactly 128 words; pushes refused when full;
  order; one-cycle fall-through; random traffic against a queue model.
* **`tb_edge_adapter`:** a 500-edge walk with no gaps, first vector 3 cycles
  after start, correct embeddings and destination for every edge.
* **`tb_msg_aggregator`:** sums with wrap over random traffic that keeps
  hitting a few nodes; clears in the middle of the traffic.
* **`tb_trackgnn_core`:**
  * whole graphs checked against the reference: 92/142, 200/500, 1/1 and
    random graphs;
  * the cycle count 3N + E + 14;
  * gaps on the input streams and back-pressure on the results;
  * overflow;
  * a drop in the middle of the EDGE phase, followed by a clean graph;
  * a sweep of ten graph sizes from 16/20 to 200/500, which gives the timing
    table above.
* **`tb_latency_aligner`:**
  * the outcome of every event matches a model of the queue;
  * the latency is exactly 1140 cycles;
  * a decision that arrives in the deadline cycle is on time;
  * late decisions, overlapping events and queue overflow.
* **`tb_felix_ai_top`:** 12 events at full default size. It checks every edge
  embedding and every message, the latency of every event, the drop rule and
  stale decisions. A behavioural stand-in for the decision networks triggers
  when the lane-0 message sum is above a per-event threshold. It is not the
  real model. The test requires that each of these happens at least once:
  trigger, no trigger, veto, drop, FIFO-full stall, overflow, back-pressure and
  a stale decision.

For every module there is also a copy with one deliberate bug, and the
module's testbench fails against it. The weights used are random, because the
trained weights are not public. The tests therefore show that the arithmetic
is right, not that the trigger finds heavy-flavour events.

## Simulating

The testbenches need Verilator 5 with timing support. Each testbench ends by
printing `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/gnn_pkg.sv tb/gnn_ref_pkg.sv -y rtl -y tb \
  tb/tb_felix_ai_top.sv --top-module tb_felix_ai_top -Mdir obj -o sim
./obj/sim
```

Replace `tb_felix_ai_top` with any other testbench name. Give the package
files first; the `-y` paths find the modules. The full-size end-to-end test
runs in a few seconds. To lint the synthesizable part:
`verilator --lint-only -Wall rtl/gnn_pkg.sv rtl/felix_ai_top.sv -y rtl --top-module felix_ai_top`.

## Files

| file | content |
|---|---|
| `rtl/gnn_pkg.sv` | number formats, sizes, hit record, parameter count |
| `rtl/hit_fifo.sv` | decoded-hit FIFO |
| `rtl/dp_ram.sv` | one-write, two-read RAM (features, edges, embeddings) |
| `rtl/mlp_layer.sv` | one fully-unrolled fixed-point layer |
| `rtl/mlp4.sv` | 4-layer MLP with parameter register file |
| `rtl/edge_adapter.sv` | edge walk, routes embeddings to the edge MLP |
| `rtl/msg_aggregator.sv` | per-node message sums |
| `rtl/trackgnn_core.sv` | the GNN engine and its phase controller |
| `rtl/latency_aligner.sv` | fixed-latency decision, veto |
| `rtl/felix_ai_top.sv` | top level |
| `tb/gnn_ref_pkg.sv` | integer reference model for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Changing it

* **Graph size.** Set `MAX_N` and `MAX_E` on `felix_ai_top` or
  `trackgnn_core`. Index widths follow from them. The package constants
  `MAX_NODES` and `MAX_EDGES` are only the defaults.
* **Decision time.** Set `LATENCY` in cycles.
* **Hit features.** `NODE_FEAT` in `gnn_pkg` sets the width of the hit record
  and of the node MLP's first layer. The parameter address width is derived
  from the edge network, which is the larger of the two.
* **Activations.** The `RELU` parameter of each `mlp_layer` instance in
  `mlp4.sv`.
* **Several edge units.** Split the edge list between several adapter/MLP
  pairs. The aggregator would then need one accumulate port per unit, or
  banking by destination node.
