# Interaction-network segment classifier for particle tracking

In a tracking detector, every charged particle leaves hits on successive
detector layers. To turn hits into tracks, one can build a graph: each hit is
a node, and each pair of hits on neighbouring layers that could belong to the
same particle is an edge. A graph neural network then scores each edge with
the probability that it is a true track segment. Edges with high scores are
joined into tracks.

This repository is a synthesizable SystemVerilog implementation of such an
edge classifier. It uses an *interaction network* (IN), built for
fixed-latency FPGA inference. The graph of one detector sector streams in.
Every layer of every small neural network is unrolled across all nodes or all
edges of the graph. The result for the whole graph comes out a fixed number
of cycles later.

## The network

Each node carries 3 input features: the hit coordinates (r, φ, z). Each edge
carries 4: (Δr, Δφ, Δz, ΔR) between its two hits. It also carries its sender
and receiver node indices. The computation has four stages, each made of small
fully connected networks with hidden width 8:

| stage | function | layers | activation |
|---|---|---|---|
| encoder | v'ᵢ = φ₁ᵛ(vᵢ), e'ₖ = φ₁ᵉ(eₖ) | 3→8→8 and 4→8→8 | ReLU, ReLU |
| edge block | e''ₖ = φ₂ᵉ(e'ₖ, v'ᵣₖ, v'ₛₖ) | 24→8→8 | ReLU, ReLU |
| aggregation | ē''ᵢ = Σ e''ₖ over real edges with receiver i | — | — |
| node block | v''ᵢ = φ₂ᵛ(ē''ᵢ, v'ᵢ) | 16→8→8 | ReLU, ReLU |
| decoder | scoreₖ = φ₃(e''ₖ) | 8→8→8→8→1 | ReLU ×3, sigmoid |

The score of edge k is the output of the decoder. The node vectors v'' are
also brought out.

All values are signed fixed point **<16,6>**: 16 bits, of which 6 are integer
bits and 10 are fraction bits. This covers the range [−32, 32) in steps of
1/1024.
- Products and sums are formed at full width.
- The result of each neuron is then floored (arithmetic shift right by 10)
  and saturated to 16 bits.
- Aggregation sums are also saturated.

The rounding and overflow behaviour is this design's choice. The fixed-point
format itself is the one the design was evaluated at.

## Fixed graph size: padding, truncation, masks

The hardware processes a fixed-size graph. The defaults are
`N_NODES = 28` and `N_EDGES = 37`, which is a quarter of a detector sector.
A full η–φ sector at the 95th-percentile size would need 112 nodes and
148 edges. That size can be built by changing only these two parameters. The
cost is about four times the multipliers.

`graph_loader` collects the node and edge streams of one graph:

- Items beyond the capacity are dropped (*truncation*). `trunc_event` pulses
  when this happens.
- Unused slots are filled with zeros (*zero padding*).
- `nmask[i]` marks real nodes.
- `emask[k]` marks real edges whose two end points were both loaded.
  - An edge that points at a truncated node, or out of range, is dropped.
  - Its indices are forced to 0.

The masks travel with the graph through every stage, for two reasons:
- the aggregation only sums messages of real edges, so padding cannot
  distort a real node;
- at the output, the scores of padding edges and the vectors of padding nodes
  are forced to zero.

Dropping edges with a missing end point is this design's choice.

## Reuse factor and the dense layer

Everything except the FIFOs and the loader is built from one module,
`dense_layer`. It computes y = act(W·x + b) for all `N_ITEMS` items (every
node or every edge) at once. Each item has its own copy of the multipliers,
and all copies share one set of weights.

How many multipliers each copy has is set by the **reuse factor** `RF`:

- Each output neuron has CH = ⌈N_IN / RF⌉ multipliers.
- Each multiplier is used NCYC = ⌈N_IN / CH⌉ times per graph.
- The layer therefore needs NCYC cycles per graph, and its initiation
  interval is NCYC.

| RF | 3-input layer | 4-input layer | 8-input layer | 16-input layer | 24-input layer |
|---|---|---|---|---|---|
| 1 | 1 | 1 | 1 | 1 | 1 |
| 2 | 2 | 2 | 2 | 2 | 2 |
| 8 (default) | 3 | 4 | 8 | 8 | 8 |

Each layer is one pipeline stage, and stages are joined by valid/ready
handshakes:

- A graph taken at clock edge *t* is offered from edge *t + NCYC*.
- The next stage takes it one edge later, so each layer adds NCYC + 1 cycles.
- A layer takes the next graph at the edge where the previous one finishes.
- If its output register is still full, the layer holds its last step until
  the result is taken. This is the stall mechanism; a stall propagates
  backwards through the `in_ready` signals.

Multi-input stages need to stay aligned:
- In the encoder, the node path and the edge path run side by side and are
  joined at the output.
- Data that a later stage needs, such as the node vectors, the indices and
  the masks, travels with the graph as side data. This keeps everything
  belonging to one graph together with no separate bookkeeping.

### Sigmoid

The last decoder layer ends in `sigmoid_plan`, the piecewise-linear "PLAN"
approximation of the logistic function. It uses three segments whose slopes
are powers of two, so it needs only shifts and adds, with symmetry for
negative inputs. Its largest error against the exact sigmoid is below 0.02.
A lookup table would be the usual alternative; PLAN is this design's choice.

## Latency and throughput

The table below is for the defaults (RF = 8). Counts are in clock cycles,
measured from the cycle where the last stream element of a graph is taken.

| stage | cycles |
|---|---|
| input FIFO | 1 |
| graph loader | 1 |
| encoder: 3→8 / 4→8 in parallel, then 8→8 | 14 |
| edge block: 24→8, 8→8, aggregation | 19 |
| node block: 16→8, 8→8 | 18 |
| decoder: four layers | 35 |
| **total** | **88** |

That is 440 ns at a 5 ns clock. The HLS implementation this design follows
was reported at 650 ns–1 µs. The difference comes from scheduling choices of
the HLS tool, which are not reproduced here.

In the network itself, every layer accepts a new graph every NCYC ≤ RF cycles.
The streaming input brings in one node and one edge per cycle, so it limits
the design to one graph every max(N_NODES, N_EDGES) + 1 cycles. That is
38 cycles at the defaults. Several graphs are in the pipeline at once.

## Weights

The weights are not built into the hardware. They are registers, written
before use through a simple bus: `wl_en`, a 12-bit `wl_addr` and a 16-bit
`wl_data`, one word per cycle.

The twelve layers are laid out one after another, in this order:

| index | layer |
|---|---|
| 0, 1 | encoder, node path (φ₁ᵛ) |
| 2, 3 | encoder, edge path (φ₁ᵉ) |
| 4, 5 | edge block (φ₂ᵉ) |
| 6, 7 | node block (φ₂ᵛ) |
| 8–11 | decoder (φ₃) |

The start address of layer *l* is `gnn_pkg::layer_base(l)`. Within a layer:
- weight W[o][i] is at `base + o·N_IN + i`;
- bias b[o] is at `base + N_OUT·N_IN + o`.

The bases are 0, 32, 104, 144, 216, 416, 488, 624, 696, 768, 840 and 912. The
model has 921 words in total. Input order inside a layer is the order of the
formulas above:
- the edge block reads (edge, receiver node, sender node);
- the node block reads (aggregated message, node).

## Top-level interface (`gnn_top`)

- `node_valid/ready/feat[48]/last` is the node stream: (r, φ, z) as three
  <16,6> words. `node_last` marks the last node of a graph.
- `edge_valid/ready/feat[64]/snd/rcv/last` is the edge stream: four features,
  then 16-bit sender and receiver node indices.
- `out_valid/out_ready` is the result handshake. With it come:
  - `out_score[N_EDGES]`, the scores;
  - `out_emask`, marking real edges;
  - `out_node[N_NODES][8]`, the node vectors v'';
  - `out_nmask`, marking real nodes.
- `trunc_event` pulses when a truncated graph enters the network.
- The clock is `clk`. The reset `rst_n` is asynchronous and active low. Reset
  clears all handshakes and all weights.

## Files

| file | content |
|---|---|
| `rtl/gnn_pkg.sv` | number format, layer sizes, weight map, saturation |
| `rtl/stream_fifo.sv` | first-word-fall-through FIFO on each input stream |
| `rtl/graph_loader.sv` | builds the padded, masked graph |
| `rtl/dense_layer.sv` | the reuse-factor dense layer, all items in parallel |
| `rtl/sigmoid_plan.sv` | PLAN sigmoid |
| `rtl/encoder.sv`, `edge_block.sv`, `aggregate.sv`, `node_block.sv`, `decoder.sv` | the stages of the network |
| `rtl/gnn_top.sv` | the whole classifier |
| `tb/gnn_ref_pkg.sv` | bit-exact reference model, written independently with integer arithmetic |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench ends by printing `TB_RESULT checks=N failures=M`. Each has a
watchdog. Each one does the following:
- loads random weights;
- drives random data with gaps on its inputs and back-pressure on its output;
- compares every output bit-exactly with the reference model.

Where a latency or an initiation interval is defined, the cycle counts are
checked too.

`tb_gnn_top` runs the full-size design (28/37, RF = 8) end to end. It uses ten
graphs, including:
- an exactly full graph;
- an oversized graph, which is truncated;
- small, padded graphs;
- edges that point at missing nodes.

It also counts five mechanisms: padding, truncation, dropped edges, several
graphs in flight at once, and output stalls. If any of them never occurs, the
test fails. It checks the 88-cycle latency of an isolated graph.

To simulate, for example the top-level test:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/gnn_pkg.sv tb/gnn_ref_pkg.sv rtl/*.sv tb/tb_gnn_top.sv \
  --top-module tb_gnn_top
./obj_dir/Vtb_gnn_top
```

(`rtl/gnn_pkg.sv` is listed first so the package is compiled before its
users; repeating it through `rtl/*.sv` is harmless.)

## Departures and limits

- **Latency.** It is 88 cycles (440 ns at the defaults). The reported HLS
  figure is 650 ns–1 µs. The structure, layer sizes, fixed-point format and
  reuse factor are the same; the pipeline schedule is this design's own.
- **Graph rate.** It is bounded by the one-item-per-cycle input streams, not
  by the reuse factor.
- **Weights.** They are loadable registers rather than constants. This costs
  registers, but one bitstream can serve any trained model of this shape.
- **Sigmoid.** It is the PLAN approximation, not a table.
- **Aggregation.** It is a saturating sum at the receiving node.
- **Edge end points.** An edge whose end point was truncated is dropped.
- **Not included.** Other implementations of the network are not part of this
  design:
  - a floating-point coprocessor version built from tiled matrix-multiply
    kernels;
  - its larger model without encoder and decoder, together with a reduced
    variant of that model.
- **Verification.** It is by simulation against the bit-exact model with
  random weights. No trained weights or physics data were used, so the
  classification quality was not measured.
- **Synthesis.** Full-size synthesis with open-source tools is slow: the fully
  unrolled design has 37 × 8 × 3 multipliers in the widest layer alone. No
  FPGA resource or timing figures are given here.
