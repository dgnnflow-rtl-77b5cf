# DGNNFlow EdgeConv kernel in SystemVerilog

In an edge-based dynamic graph neural network the message on an edge is not
stored anywhere: it is computed at run time from the embeddings of both of
its end nodes. EdgeConv is the standard example. For an edge from node `u` to
its neighbour `v` it computes

    m_uv = phi(x_u, x_v - x_u)

and node `u` keeps the element-wise maximum of the messages from all of its
neighbours. A message-passing accelerator that splits edges over parallel
units, with each unit owning a slice of the node embeddings, then has a
problem. A unit can read its own source node `x_u` locally. The neighbour
`x_v` usually sits in another unit's slice.

This RTL implements the DGNNFlow answer to that problem. DGNNFlow is a
streaming dataflow architecture, published for the particle-graph networks of
the HL-LHC Level-1 trigger (one graph per collision event: particles as
nodes, with an edge between two particles that are close in the
pseudorapidity/azimuth plane). No unit ever fetches a neighbour embedding.
Instead, every node embedding of the layer is **broadcast** in node order to
all message-passing units at once. Each unit keeps only the embeddings it
has edges for, and drops the rest in the cycle they arrive. Memory accesses
stay regular, each embedding matrix is stored once, and the broadcast order
is fixed.

The RTL covers the whole on-chip kernel of that architecture:

- loading the weights, the node embeddings and the edge list;
- building per-unit degree and neighbour tables;
- the layer engine with its banked double buffer, the broadcast, four
  Enhanced MP units, the MP-to-NT adapter and two NT units;
- the readout.

Graph construction runs on the host and is only modelled in the testbench.

## What one layer computes

All values are signed 16-bit fixed point with 8 fraction bits (Q7.8).
Arithmetic saturates at the 16-bit range. For each node `u` of an event with
`N` nodes:

    c      = concat(x_u, sat(x_v - x_u))                     2*EMB_DIM values
    m_uv   = sat((b * 2^8 + W c) >> 8)                       W: EMB_DIM x 2*EMB_DIM
    a_u    = element-wise max over all edges (u, v) of m_uv  (0 if u has no edge)
    x_u'   = sat(x_u + sat(((a_u * scale) >> 8) + shift))

`scale` and `shift` are an inference BatchNorm folded to one multiplier and
one offset per dimension. The last line is BatchNorm followed by the residual
connection. `>>` is an arithmetic shift, so values round toward minus
infinity. The kernel runs `NUM_LAYERS = 2` such layers, each with its own
weights, and returns the final `x'`. The model's input embedding MLP and
output MLP are not part of the kernel: it takes node embeddings in and gives
node embeddings out.

Edges are directed. The host lists `(u, v)` and `(v, u)` separately when both
directions are wanted, as the distance rule produces them.

## Dataflow of a layer

    Input NE buffer (4 banks) --copy--> Intermediate NE buffer
        |   |                                  |
        |   |                            Broadcast ---> 4 FIFOs (one per unit)
        |   |                                  |
        |   +--- bank b (port A) ---> Enhanced MP Unit b  (b = 0..3)
        |                                      |  message FIFO
        |                               MP-to-NT adapter
        |                                      |  FIFO per NT unit
        +-------- port B -----------> NT Unit j (j = 0..1) ---> Output NE buffer
                                                 after the layer: swap Input/Output

- **NE buffers** (`ne_buffer`). Two identical buffers, A and B. Node `n` is
  stored in bank `n % 4`, row `n / 4`. One buffer is the layer's input and
  the other its output. They swap after every layer (`in_sel` in
  `gnn_compute`). Each bank has one write port and two read ports.
  - Port A serves the MP unit of that bank, and the copy at the start of a
    layer.
  - Port B serves the NT unit that finishes the nodes of that bank, and the
    final readout.

  Since `P_EDGE` is a multiple of `P_NODE`, bank `b` is only ever touched by
  NT unit `b % P_NODE`, so the two NT units never collide.
- **Intermediate NE buffer** (`intermediate_ne_buffer`). A one-row-per-node
  copy of the layer's input, which the broadcast reads in sequence.
- **Node Embedding Broadcast** (`ne_broadcast`). First it copies the input
  buffer into the intermediate buffer, one node per cycle (`N` cycles). Then
  it sends `{last=0, n, x_n}` for `n = 0..N-1` into all four unit FIFOs in
  the same cycle, followed by `{last=1}`. A beat goes out only when every FIFO
  has room. Every unit therefore sees exactly the same sequence, and a single
  slow unit holds the broadcast back (counted as a broadcast stall).
- **Enhanced MP Unit** (`enhanced_mp_unit`, one per bank). A unit owns the
  edges whose source `u` is in its bank (`u % 4 == b`), so `x_u` is always a
  local read. It runs three tasks:
  1. *Select.* Look up `deg[v]`, the number of this unit's edges that need
     `x_v`. If it is zero, drop the beat at once. Otherwise put the beat into
     a 2-deep FIFO, together with `deg[v]` and the CSR offset of `v`.
  2. *Gather.* For each kept `v`, walk its neighbour list. Per source row `u`:
     read `x_u` (1 cycle), then compute one message element per cycle
     (`edge_msg_dot`: 2·EMB_DIM multipliers in parallel) and max-merge it into
     the unit's partial aggregate for `u`. An edge costs `1 + EMB_DIM` cycles.
  3. *Expand.* On the end token, emit one message per node the unit owns, in
     node order. A node with no edge gets a zero message. The aggregate is
     cleared as it is sent.
- **MP-to-NT adapter** (`mp_nt_adapter`). It walks `n = 0..N-1`, takes node
  `n`'s message from unit `n % 4` and forwards it to NT unit `n % 2`. All
  edges of `u` live in one unit, so that unit's partial max is already the
  full aggregate. The adapter therefore only gathers and routes, and never
  has to merge partial results.
- **NT Unit** (`nt_unit`). Applies BatchNorm and the residual, one node per
  cycle, all dimensions in parallel. It reads `x_n` through port B of the
  input buffer and writes the output buffer in the same cycle.
- The layer ends when all `N` nodes have been written. Then the buffers
  swap.

### Why the broadcast order matters

Every unit consumes the broadcast in node order, and the adapter consumes
the units' outputs in node order. The whole layer is therefore deterministic,
and no unit needs a node-indexed random-access path into another unit's
memory. The cost is that each unit sees all `N` beats even if it needs only
a few. With the select task, a beat that is not needed costs one cycle, and
a needed beat costs `(1 + EMB_DIM)` cycles per edge. The lock-step broadcast
means the busiest unit sets the pace of the layer. A unit with many edges on
one target fills its FIFO and holds the others back. This is the broadcast
stall, and the testbenches make it happen.

## Graph tables

Each MP unit holds a `mp_graph_table`, built once per event and used by both
layers. `load_graph` hands edge `(u, v)` to unit `u % 4` as `(row u/4, v)`.
The table then:

1. stores the edge and increments `deg[v]` (one edge per cycle);
2. on `build`, forms `off[v]` as the prefix sum of `deg` (`N` cycles);
3. scatters each stored edge to `nbr[off[v] + fill[v]++]` (one cycle per
   edge).

The result is a CSR table keyed by the *target* node, because targets are
what the broadcast delivers. From `build` to `done` takes `N + E_unit + 3`
cycles. Each unit holds up to `MAX_EDGES` edges. An extra edge is dropped and
raises `edge_overflow`. An edge that names a node `>= N` is dropped and
counted in `bad_edges`.

## Using the kernel (`dgnnflow_top`)

All streams are valid/ready. A beat moves on a clock edge where both are
high.

| port | direction | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `w_we`, `w_addr`, `w_data` | in | one weight word per cycle; taken only while `busy` is low |
| `start`, `num_nodes`, `num_edges` | in | begin an event (`1..128` nodes, `0..1024` edges) |
| `x_valid/x_ready/x_data` | in | node embeddings, node order, one node (`EMB_DIM` x 16 bit) per beat |
| `e_valid/e_ready/e_data` | in | edges `{u, v}`, any order |
| `y_valid/y_ready/y_data` | out | results `{n, x_n}`, node order |
| `busy`, `done`, `cycles` | out | event in progress; completion pulse; cycles from `start` to `done` |
| `bad_edges`, `edge_overflow` | out | dropped edges |
| `cnt_*` | out | activity counters: beats selected/dropped, edge messages, broadcast stalls, buffer swaps |

Sequence of an event:

1. Pulse `start`.
2. Send the `N` node embeddings and the `E` edges. The two streams are
   accepted concurrently.
3. The kernel builds the tables, runs the two layers and streams out `N`
   results.
4. `done` pulses.

The weights persist across events. Write them once, while idle, at these
word addresses:

    layer l base = l * (2*EMB_DIM^2 + 3*EMB_DIM)
    base + r*2*EMB_DIM + c          W[r][c]   (c < EMB_DIM: x_u part, else x_v - x_u part)
    base + 2*EMB_DIM^2 + d          b[d]
    base + 2*EMB_DIM^2 + EMB_DIM+d  BatchNorm scale[d]   (Q7.8, 1.0 = 256)
    base + 2*EMB_DIM^2 + 2*EMB_DIM+d BatchNorm shift[d]

## Timing

- Loading takes about `max(N, E)` cycles.
- Building the tables takes `N + E_max_unit + 3` cycles.
- Each layer takes about `2N` cycles (copy and broadcast), plus
  `(1 + EMB_DIM) * E_max_unit` for the gather of the busiest unit, plus
  `N/2` for expansion, and a few cycles of pipeline.
- The readout takes `N` cycles.

Measured at the default parameters:

| event | kernel cycles | at 200 MHz |
|---|---|---|
| 18 nodes, 56 edges | 888 | 4.4 µs |
| 50 nodes, 316 edges | 4 273 | 21 µs |
| 70 nodes, 536 edges | 6 516 | 33 µs |
| 70 nodes, 838 edges | 9 759 | 49 µs |

The published prototype reports about 0.36 ms end to end per event, host
transfers included, on events of 18–70 nodes and up to about 770 edges. The
testbench uses that figure (72 000 cycles at 200 MHz) only as an upper bound
on the kernel alone. The two numbers are not comparable beyond that: the
figure for the published prototype includes PCIe and HBM transfers, and
comes from an HLS design whose pipelining differs from this one.

## Parameters

Set in `dgnnflow_pkg`:

| name | default | origin |
|---|---|---|
| `P_EDGE` | 4 | architecture: 4 banks / Enhanced MP units |
| `P_NODE` | 2 | architecture: 2 NT units |
| `NUM_LAYERS` | 2 | model: two message-passing layers |
| `EMB_DIM` | 16 | own choice; the model width is not published |
| `DATA_W`, `FRAC_W` | 16, 8 | own choice (Q7.8) |
| `MAX_NODES` | 128 | own choice, covers the 70-node events evaluated |
| `MAX_EDGES` | 1024 | own choice, covers the ~770-edge events evaluated; must be a power of two |

`P_EDGE` must be a multiple of `P_NODE`. The FIFO depths are local
parameters of `gnn_compute`: 2 (broadcast), 2 (message) and 4 (to the NT
units). They follow the cell counts drawn in the published block diagram,
which gives no numbers.

## Where this RTL departs from, or adds to, the published design

- The published design is HLS C++ on an Alveo U50, fed from the host over
  PCIe, HBM and AXI. Here the kernel boundary is plain valid/ready streams.
  PCIe, HBM and the AXI masters are not modelled.
- Host-side graph construction (`dR^2 < delta^2`) is not hardware. The
  end-to-end testbench performs it in SystemVerilog to produce edge lists.
- The number format, embedding width, capacities, FIFO depths, the handshake,
  bank mapping `n % P_EDGE`, adapter routing `n % P_NODE`, the zero message
  for isolated nodes, the folded BatchNorm and the cycle-level schedule are
  this design's choices. The source describes these units only by their
  function.
- Assigning each edge to the unit that owns its *source* node is a choice.
  So is the consequence that the adapter routes but never merges. The source
  says only that the adapter "aggregates".
- The copy into the intermediate buffer is a separate first phase of every
  layer (`N` cycles). It is not overlapped with the previous layer.
- Memories use asynchronous reads. A block-RAM mapping would add one
  pipeline stage to each read.
- The source text once says the *MP* units write the output buffer. Its
  figure shows the NT units doing so. This RTL follows the figure.
- The message function is the linear layer with no activation, as
  described. Message elements are computed one per cycle, each with all
  `2*EMB_DIM` products in parallel. The source unrolls over the embedding
  dimension without saying how far.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. It
prints `TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.
Expected values come from `tb/dgnn_ref_pkg.sv`, an integer model of the
arithmetic written separately from the RTL.

`tb_dgnnflow_top` runs the kernel at its default parameters:

- It writes random weights, then runs events of 1, 5, 18, 32, 50 and 70
  nodes, plus a dense 70-node, 838-edge event. The edges come from random
  particles and the distance rule.
- All input streams have random gaps, and the output has random
  back-pressure.
- Every output value is compared with a two-layer reference.
- It also runs an event with invalid edges and one with more edges than a
  unit can hold.
- It requires that each mechanism happened at least once:
  - target beats selected and dropped;
  - broadcast stalls;
  - buffer swaps;
  - isolated nodes;
  - invalid edges;
  - overflow.

`tb_workload_events` runs the evaluated workload at the default parameters.
It sends 40 events of 18 to 70 particles, one at a time, each graph built
with `delta = 1.25`. Every output is checked, and the cycles per event are
printed. On that run the mean was 3 786 cycles: 1 148 for events below 30
nodes and 5 956 for events of 50 nodes or more. The test requires that
latency grows with graph size, as it does in the published measurements,
and that every event stays under 72 000 cycles.

`tb_dgnnflow_pkg` checks the saturation and fixed-point multiply helpers.

To run the end-to-end test with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/dgnnflow_pkg.sv tb/dgnn_ref_pkg.sv rtl/*.sv tb/tb_dgnnflow_top.sv \
        --top-module tb_dgnnflow_top
    ./obj_dir/Vtb_dgnnflow_top

(`rtl/dgnnflow_pkg.sv` is listed first so that the package is read before its
users. Verilator ignores the second mention.) Any other testbench runs the
same way with its own top module. Each takes well under a minute.

## Files

| file | content |
|---|---|
| `rtl/dgnnflow_pkg.sv` | parameters, types, saturation and fixed-point multiply |
| `rtl/dgnnflow_top.sv` | kernel: loaders, weights, layer engine, readout, event sequencing |
| `rtl/gnn_compute.sv` | layer engine and buffer swap |
| `rtl/ne_buffer.sv`, `rtl/intermediate_ne_buffer.sv` | node-embedding memories |
| `rtl/ne_broadcast.sv` | copy and broadcast |
| `rtl/enhanced_mp_unit.sv`, `rtl/edge_msg_dot.sv`, `rtl/mp_graph_table.sv` | MP unit, its message datapath, its graph tables |
| `rtl/mp_nt_adapter.sv`, `rtl/nt_unit.sv` | adapter and node transformation |
| `rtl/load_graph.sv`, `rtl/load_node_embeddings.sv`, `rtl/weight_store.sv`, `rtl/finalize.sv` | kernel I/O stages |
| `rtl/stream_fifo.sv` | FIFO used for every stream link |
| `tb/dgnn_ref_pkg.sv` | reference model |
| `tb/tb_*.sv` | testbenches |
