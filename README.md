# Edge-classifying graph neural network for particle tracking, in SystemVerilog

At a hadron collider, every bunch crossing leaves a few hundred *hits* in the
inner tracking detector. These are points where charged particles crossed a
detector layer. Track reconstruction must decide which hits belong to the same
particle, and a trigger must do this in a few microseconds per event. A
well-established way to do this is to build a graph. Hits are nodes, and every
plausible segment between hits on nearby layers is an edge. An *interaction
network* then gives each edge a score between 0 (fake segment) and 1 (real
track segment).

This RTL implements such a network as a streaming accelerator. Its main idea
comes from the detector's shape. Particles fly outward through cylindrical
layers, so an edge can only join two neighbouring layers. Hits are therefore
split by layer into **11 node groups**, and edges into **13 edge groups**. Each
edge group sees only its two node groups, so it gets its own processing
elements (PEs) and small private memories. All groups compute in parallel, and
no PE ever needs the whole graph.

The design follows the architecture of Huang et al., "Low Latency Edge
Classification GNN for Particle Trajectory Tracking on FPGAs". That work built
its accelerator with high-level synthesis. This RTL is an independent
hand-written implementation of the architecture it describes. Every place
where a choice had to be made is listed under
[Where this RTL departs from or adds to the architecture](#where-this-rtl-departs-from-or-adds-to-the-architecture).

## The network being computed

Every node has 3 features (the hit's coordinates), and every edge has 4.
Each graph goes through four functions in turn:

| step | function | computation |
|---|---|---|
| 1 | first Edgeblock | `e'_ij = R1([x_i, x_j, e_ij])`, 10 inputs → 4 outputs |
| 2 | Aggregate | `a_v = Σ e'_iv` over all edges that end in node v |
| 3 | Nodeblock | `x'_v = O([x_v, a_v])`, 7 inputs → 3 outputs |
| 4 | last Edgeblock | `s_ij = hsig(R2([x'_i, x'_j, e'_ij]))`, 10 inputs → 1 output |

`R1`, `O` and `R2` are multilayer perceptrons with two hidden layers of 8
neurons, ReLU after the hidden layers and a linear output. `hsig(x) =
clamp(x/4 + 1/2, 0, 1)` is a hard sigmoid that maps the last output to a score.

All values are signed fixed point in Q7.7 format: 14 bits, of which 7 bits are
integer (sign included) and 7 are fractional, so 1.0 is `128`. A dense layer
sums `w·x` at full precision, adds the bias, shifts right by 7 (rounding
toward minus infinity) and saturates to 14 bits. Aggregation sums saturate as
well. `tb/gnn_ref_pkg.sv` holds a plain-integer reference of exactly this
arithmetic.

## Node groups, edge groups and PE allocation

The innermost tracker has 4 barrel layers, B1 to B4, and, on each side, a
set of endcap disks. Seven of them, E1 to E7, are used here. Barrel groups
hold more hits and are *type A*. Endcap groups hold fewer and are *type B*.

```
 node groups (index):  B1(0) B2(1) B3(2) B4(3) | E1(4) E2(5) ... E7(10)
 edge groups (index):
   A-A  0: B1->B2   1: B2->B3   2: B3->B4
   A-B  3: B1->E1   4: B2->E1   5: B3->E1   6: B4->E1
   B-B  7: E1->E2   8: E2->E3  ...  12: E6->E7
```

Every group has a fixed capacity and a fixed number of PEs:

| group type | capacity per group | PEs per group | groups | PEs in total |
|---|---|---|---|---|
| node A (B1..B4) | 138 nodes | 2 Nodeblock PEs | 4 | 8 |
| node B (E1..E7) | 62 nodes | 1 Nodeblock PE | 7 | 7 |
| edge A-A | 277 edges | 4 Edgeblock + 4 Aggregate PEs per Edgeblock stage | 3 | 12 |
| edge A-B | 77 edges | 1 + 1 | 4 | 4 |
| edge B-B | 87 edges | 1 + 1 | 6 | 6 |

This gives 15 *node lanes* and 22 *edge lanes*. A lane is one PE together with
its own slice of every memory. A group with several PEs is dealt out round
robin. Item `k` of the group goes to lane `base + k mod PEs`, at address
`k div PEs` inside that lane. The functions `node_lane_base`,
`edge_lane_base`, `egrp_src`, `egrp_dst` and `lane_count` in `rtl/gnn_pkg.sv`
define all of this. Changing the geometry means editing these functions and
the constants next to them.

Within a graph, each node is numbered locally inside its group (0 to 137 for
B2, for instance). An edge of group `g` carries `i`, the sender's number in
group `egrp_src(g)`, and `j`, the receiver's number in group `egrp_dst(g)`.
Nothing ever enters B1, so the aggregated features of B1 nodes are zero. E1
receives edges from four A-B groups, and its sums are formed across all four.

## The dataflow pipeline

```
            ┌──── in (2) ────┐                ┌───── ee (5): i, j, e' ─────────────┐
 host ──────┤                ▼                │                                    ▼
  edges,    │            Edgeblock 1 ──┬──────┘                               Edgeblock 2 ──► scores
  nodes     │                          └── ea (2): j, e' ──► Aggregate                 ▲
            │                                                    │ av (2): a_v         │ xp (2): x'_v
            └──── xn (5): x_v ─────────────────────────────────► Nodeblock ────────────┘
```

Each function is one pipeline stage, and each stage works on one whole graph
at a time. The stages are joined by *channels*, and the number after each
channel name is its depth. A channel of depth `n` holds up to `n` complete
graphs, each in its own bank of the channel's memories. This lets up to four
graphs be in flight at once, one in each stage, with more queued in the
channels.

The long skip paths, `xn` and `ee`, are deeper because their data waits while
the graph passes through two or three stages. A stage starts when all of its
input channels hold a graph and all of its output channels have room. When it
finishes, it *commits* its outputs (the next stage may now start on them) and
*releases* its inputs (their banks may be reused). `pipo_ctrl` keeps these
bank pointers and counts. It also carries the graph's per-group node and edge
counts (`graph_sizes_t`) along as a tag, so every stage knows how many items
each lane holds.

The channel memories live in the stage that reads them:

- The first Edgeblock holds the edge memories of channel `in` (one per edge
  lane). Each of its PEs also has two node arrays, one for the sender group
  and one for the receiver group.
- Aggregate holds the `ea` memories.
- Nodeblock holds the `xn` and `av` memories.
- The last Edgeblock holds the `ee` memories and, in each PE, the node arrays
  filled from `xp`.

A producer writes into the bank that the channel names as its write bank.

### Stage timing

All PEs of a stage step through their lane memories together, one address per
clock. A stage therefore takes as long as its busiest lane, plus a few clocks
for memory read, PE latency and hand-over:

| stage | clocks per graph | full-capacity graph |
|---|---|---|
| Edgeblock (either) | max edges per lane + 7 | 87 + 7 = 94 |
| Aggregate | max edges per lane + 69 + about 9 | about 165 |
| Nodeblock | max nodes per lane + 6 | 69 + 6 = 75 |

The busiest edge lanes belong to the B-B groups: 87 edges on one PE. The
69-clock term in Aggregate is its readout phase (see below). It makes
Aggregate the slowest stage, and so sets the interval between graphs.

In simulation, a graph filled to every capacity (986 nodes, 1661 edges) has
its last score 430 clocks after it was committed. That is 2.15 µs at the
200 MHz target clock. The published architecture reaches 2.07 µs latency and
one graph every 0.31 µs (62 clocks). This RTL's interval is about 165 clocks
(0.82 µs, about 1.2 million graphs per second). It therefore does **not**
meet the 2.22 million graphs per second per FPGA that the trigger needs. The
obvious next step is to overlap Aggregate's readout of one graph with the
accumulation of the next, using two PE memory banks.

## Inside the PEs

### Edgeblock PE: private node arrays

A naive edge PE would fetch `x_i` and `x_j` from one shared node memory. With
22 PEs reading random addresses every clock, that memory becomes the
bottleneck. Here every PE instead holds a private copy of the node features
it can possibly need: one array for the sender group and one for the receiver
group (`node_array`).

Because of the grouping, these arrays hold at most 138 nodes rather than the
whole graph. This is the memory saving the group partition buys. A node array
is written by the node lanes of its group: two for a barrel group, each
writing the nodes `v` with `v mod 2 =` its position. So the array is built
from one sub-memory per writing lane, and a read selects the sub-memory by
`v mod lanes`.

PE pipeline, one edge per clock:

1. **Clock 0.** The edge `(i, j, e)` arrives, and both node arrays are
   addressed.
2. **Clock 1.** `[x_i, x_j, e]` enters the MLP.
3. **Clocks 2 to 4.** One registered dense layer per clock. The result leaves
   at clock 4, with `i`, `j` and the lane address alongside.

### Aggregate PE: read-modify-write with forwarding

Aggregation is a scatter-add. For every incoming edge, the PE reads the
running sum of its receiver `v` from the aggregated-feature memory, adds `e'`
and writes the sum back. The memory read takes one clock, so the sum is
written one clock after the edge arrived. If the next edge has the same
receiver, its read (issued in that same clock) still returns the old sum, and
one contribution would be lost.

The PE handles this with two registers:

- **Edge Reg** holds the sum written last.
- **Index Reg** holds that sum's node index.

Each incoming index is compared with the Index Reg. On a match ("hit"), the
adder takes the Edge Reg instead of the memory output. With a one-clock read,
this single bypass is enough: an edge two places back has already reached the
memory. The PE therefore adds one edge per clock whatever the order of
receivers. The testbenches deliberately send runs of equal receivers, and
the full-design test counts over a thousand forwarded additions.

```
  clock t   : edge (v, e') arrives        -> read mem[v]
  clock t+1 : old = (v == IndexReg) ? EdgeReg : mem_q
              sum = old + e'              -> write mem[v] = sum,
                                             EdgeReg = sum, IndexReg = v
```

### Aggregate stage: accumulate, then adder-tree readout

A node's partial sums are spread over every Aggregate PE whose edges can
reach it. For B2 that is the 4 PEs of group B1->B2; for E1 it is the 4 PEs of
the four A-B groups B1..B4->E1. So Aggregate runs in two phases:

1. **Accumulate.** Each PE adds up its own edges.
2. **Read out.** The stage sweeps the PE memories address by address. For
   each node lane, an adder tree (`adder_tree`) sums the partial sums of all
   PEs feeding that node group. The tree output is streamed to Nodeblock as
   `a_v`.

Reading also clears each entry, so the memories start empty for the next
graph. After reset, each PE clears its memory on its own (69 clocks) before
the stage accepts a graph.

The PE memory is split into one sub-memory per Nodeblock lane of the receiver
group (`v mod 2` for barrel groups). Both lanes of a barrel group are
therefore read out together, and the readout takes 69 clocks rather than 138.

### Nodeblock PE

This is the plain MLP `O([x_v, a_v])`, one node per clock, with 3 clocks of
latency. Its outputs `x'_v` are written straight into the node arrays of
every last-Edgeblock PE that needs that node group.

### MLP engine

`mlp` chains three `dense_layer`s. Each layer multiplies all of its weights
in parallel and registers its output, so an MLP accepts a new vector every
clock. In total the design has:

- 22 × 196 multiplier-weights in the first Edgeblock;
- 22 × 169 in the last Edgeblock;
- 15 × 163 in Nodeblock.

This full unrolling is what lets each PE keep pace with one edge per clock.
It is also what makes the design large.

## Using the top level (`gnn_top`)

**Weights.** After reset, load the three MLPs one word per clock with
`w_we`/`w_sel`/`w_addr`/`w_data`. `w_sel` selects the MLP: 0 is R1
(196 words), 1 is O (163 words), 2 is R2 (169 words). Inside each MLP, the
words are laid out in this order:

1. layer-1 weights `w1[o][i]` at `o*NIN + i`;
2. layer-1 biases;
3. layer-2 weights `w2[o][i]` at `o*8 + i`;
4. layer-2 biases;
5. layer-3 weights, then layer-3 biases.

Weights are registers that reset to zero.

**Loading a graph.** While `in_ready` is high, write the graph's items:

- Edges go through the 22 edge-lane ports (`in_edge_we`, `in_edge_addr`,
  `in_edge_rec` = `{i, j, e[3:0]}`).
- Nodes go through the 15 node-lane ports (`in_node_we`, `in_node_addr`,
  `in_node_x`).

All lanes may write in the same clock, so a full graph loads in 87 clocks.
Then pulse `in_commit` for one clock, with the per-group counts on `in_sizes`.
Writing while `in_ready` is low is a protocol error, and an assertion checks
it. Counts must not exceed the group capacities, and every `i`/`j` must be
below the count of its group.

**Results.** Each edge lane produces at most one score per clock on
`out_valid[l]`, `out_idx[l]` and `out_score[l]`. `out_idx[l]` is the edge's
number inside its group, and `out_score[l]` is a Q7.7 value from 0 to 128.
`out_graph_done` pulses after the last score of a graph. Graphs leave in the
order they came. The outputs have no back-pressure.

## Where this RTL departs from or adds to the architecture

Taken from the architecture:

- the four-stage Edgeblock → Aggregate → Nodeblock → Edgeblock dataflow;
- the channel depths (2, 3 and 5);
- the per-PE node arrays;
- the Aggregate PE with its Edge Reg/Index Reg bypass and the adder tree;
- the 11/13 group partition;
- the PE counts per group type (2/1 for nodes, 4/1/1 for edges) and the group
  capacities;
- the Q7.7 number format;
- the MLP shape (two hidden layers of 8).

Chosen here:

- **Channels hold whole graphs.** The published pipeline labels its buffers
  only as FIFOs of depth 2, 3 or 5. Element-wise FIFOs that short would
  deadlock, because Aggregate must see every edge before Nodeblock can start.
  Here they are read as whole-graph buffers, like the ping-pong buffers of a
  high-level-synthesis dataflow design.
- **Fewer channels.** The index and edge-feature paths, drawn separately in
  the original, are merged. `(i, j, e')` travel together in `ea` and `ee`,
  and `ea` takes depth 2.
- **The E3..E7 chain is extrapolated.** The exact list of edge groups beyond
  E1->E2->E3 is an extrapolation that gives the stated totals of 11 node
  groups and 13 edge groups. The published PE table gives 4 PEs to A-A edge
  groups although its text suggests 2; the table is followed.
- **Arithmetic details.** The activations (ReLU, linear output), the hard
  sigmoid for the final score, and rounding toward minus infinity with
  saturation are not specified by the architecture.
- **Interfaces and control.** All of the following are this design's own:
  - the host interfaces: per-lane loading, commit with sizes, and per-lane
    results;
  - run-time weight loading;
  - reset behaviour and the self-clearing Aggregate memories;
  - lockstep control of all PEs in a stage;
  - the two-phase Aggregate schedule.
- **Performance.** The interval is about 2.7 times longer than published (see
  [Stage timing](#stage-timing)).
- **Out of scope.** Grouping the hits by layer and building the edge list
  happen before the graph reaches this hardware.

## Files

| file | contents |
|---|---|
| `rtl/gnn_pkg.sv` | number format, sizes, group geometry functions, shared structs |
| `rtl/gnn_top.sv` | top level: weight registers, six channels, four stages |
| `rtl/edgeblock.sv`, `rtl/edgeblock_pe.sv`, `rtl/node_array.sv` | Edgeblock stage, PE, per-PE node arrays |
| `rtl/aggregate.sv`, `rtl/aggregate_pe.sv`, `rtl/adder_tree.sv` | Aggregate stage, PE with bypass, adder tree |
| `rtl/nodeblock.sv`, `rtl/nodeblock_pe.sv` | Nodeblock stage and PE |
| `rtl/mlp.sv`, `rtl/dense_layer.sv` | three-layer MLP and its fully parallel layer |
| `rtl/pipo_ctrl.sv`, `rtl/pipo_ram.sv` | graph-buffer channel control and banked memory |
| `rtl/weight_regs.sv` | MLP weight register file |
| `tb/gnn_ref_pkg.sv` | integer reference arithmetic for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_gnn_top` runs the whole design |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. For example,
to run the full design at its real size:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_gnn_top \
    rtl/gnn_pkg.sv tb/gnn_ref_pkg.sv tb/tb_gnn_top.sv -Mdir obj_top -j 8
./obj_top/Vtb_gnn_top
```

The other testbenches are built the same way with their own `--top-module`;
verilator finds the modules they use in `rtl/`. The full-design build takes
about a minute and a half; the run itself takes well under a second.

`tb_gnn_top` loads random weights and sends four graphs back to back. The
first graph fills every group to capacity. It checks every edge score against
the integer reference model, checks that each graph returns exactly its edge
count, and checks the full-capacity latency against a bound of 460 clocks. It
also requires that each of the following happened at least once:

- the loader was stalled by full input channels;
- the Aggregate bypass fired;
- several stages were busy at once;
- a stage was held back by a full output channel.

The unit testbenches check:

| testbench | what it checks |
|---|---|
| `tb_mlp` | exact outputs and 3-clock latency, including saturating inputs |
| `tb_edgeblock_pe` | both PE configurations, bank selection, 4-clock latency |
| `tb_node_array` | concurrent writes by two lanes, reads from both banks |
| `tb_aggregate_pe` | sums over runs of equal receivers; clearing between rounds |
| `tb_adder_tree` | 4, 3 and 0 inputs, with and without saturation |
| `tb_pipo_ctrl` | a queue model of a depth-3 channel |
| `tb_edgeblock`, `tb_aggregate`, `tb_nodeblock` | one whole stage over full-capacity and random graphs, including hand-over and stage timing |

Trust, in short: all arithmetic agrees bit for bit with an independent
integer model over several thousand edges, at full size. The bypass and the
multi-graph channel logic have been exercised. Nothing has been run on an
FPGA. The test data are random: no trained weights or real detector events
were used.
