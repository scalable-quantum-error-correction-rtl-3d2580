# Helios: a distributed Union-Find decoder for surface codes, in SystemVerilog

A surface-code quantum computer measures its ancilla qubits every round and
has to work out, from the pattern of flipped measurements (the *syndrome*),
which physical errors most likely happened. It must do this faster than the
syndromes arrive, or a backlog builds up. The Union-Find (UF) decoder does it
by growing clusters around the flipped measurements until every cluster holds
an even number of them. Run serially, that work grows at least with the volume
of the code, d³ for distance d over d rounds.

This design spreads the decoder over the decoding graph itself. Each vertex of
the graph gets a small processing element (PE), and each PE talks only to the
PEs next to it and to a controller that ORs two status bits from every PE. The
cluster bookkeeping a serial UF decoder keeps in a union-find table is held
here by the PEs themselves:

* every cluster elects its **lowest vertex id** as its cluster id (`cid`),
  and the id spreads from PE to PE across grown edges;
* a PE that takes a neighbour's `cid` makes that neighbour its **parent**,
  so each cluster carries a spanning tree rooted at its lowest-id vertex;
* the **parity** of a cluster (odd or even number of defects) is summed up
  the tree towards the root and copied back down to every member.

In the common case clusters are small, so a decode finishes after a few
iterations of a few cycles each, whatever the code distance. The RTL gives the
decoder at the paper's largest configuration, d = 21 with 21 rounds
(4620 PEs), in one clock domain.

## The decoding graph as it is built

Only one error type is decoded (X errors seen by Z-type ancillas); the other
type is an identical, independent copy. A vertex is one Z-ancilla
measurement in one round. A distance-d rotated code has (d+1)·(d−1)/2
Z-ancillas, laid out here as **d+1 rows of (d−1)/2**. Each row is shifted by
half a column against the next. A data qubit between two Z-ancillas on
neighbouring rows gives an edge inside a round, and the same ancilla in two
consecutive rounds gives a time-like edge (a measurement error). A PE therefore
has at most six links:

| direction | neighbour | edge register lives in |
|---|---|---|
| `DIR_UA` | next row, lower of the two columns it touches | this PE |
| `DIR_UB` | next row, higher column | this PE |
| `DIR_TU` | same ancilla, next round | this PE |
| `DIR_DA` | previous row, the PE whose `UB` link points here | that PE |
| `DIR_DB` | previous row, the PE whose `UA` link points here | that PE |
| `DIR_TD` | same ancilla, previous round | that PE |

Ids run from 1 at the bottom-left corner, row by row within a round, then
round by round, so PE index = id − 1. For d = 5, PE 1 links to PE 3 and
PE 4 on the next row and to PE 13 in the next round. The higher neighbour always
has the higher id, so every edge is stored in the PE with the **lower id**.
That PE is the only writer of the edge's growth. `helios_pkg::neighbour_index`
computes the whole layout.

**No boundary.** Data qubits on the left and right edges of the code touch
only one Z-ancilla. In a complete decoder they connect a vertex to the code
boundary, which can absorb an odd cluster. The source describes no boundary
vertex, so this graph has none. A cluster can therefore only become even by
meeting another defect. A syndrome made of bulk data-qubit errors and
measurement errors always decodes. A syndrome with an odd number of defects in
some connected group never reaches "no odd cluster", and the decoder keeps
iterating; `cycle_count` saturates. Adding boundary vertices is the first
extension a user is likely to need.

## How a PE works

Each PE (`processing_element`) holds:

* `m`: its defect bit;
* `cid`, `odd`, `st_odd` and `parent`: what the adjacent PEs read;
* `busy`, together with `odd`: what the controller reads;
* `stage`: GROWING or MERGING, never shared;
* one `edge_grow` register per owned edge.

`st_odd` is the parity of the PE's own subtree. `parent` is kept as a 3-bit
direction, `DIR_SELF` for a root.

On every clock edge, and all in parallel, a PE that is not frozen does the
following:

1. **Stage.** It follows the broadcast stage. GROWING lasts one cycle in the
   PE, after which it moves to MERGING by itself.
2. **Growing** (only in stage GROWING). For each owned edge whose far end has
   a different `cid` and that is not yet fully grown:
   `growth ← min(growth + odd_here + odd_there, w)`.
   Both ends grow the edge in the same step, so one writer adds both
   contributions: +2 when both clusters are odd, +1 when one is.
3. **Merging.** The PE looks at its *neighbours*, the adjacent PEs across fully
   grown edges, and at itself. If a neighbour has the lowest `cid`, the PE takes
   that `cid` and makes that neighbour its parent.
4. **Subtree parity.** `st_odd ← m XOR st_odd of every child`. A child is a
   neighbour whose `parent` points back at this PE.
5. **Cluster parity.** A root sets `odd ← st_odd`. Every other PE copies its
   parent's `odd`.
6. **Checking.** `busy` is set if any of these holds, and cleared otherwise:
   * a neighbour disagrees on `cid` or `odd` (the per-link `edge_busy` terms);
   * `st_odd` is not yet the XOR over the children;
   * the PE is a root and its `odd` differs from `st_odd`.

Steps 3 to 6 run every cycle, so ids flow down from the roots while parity
flows up from the leaves, one tree level per cycle. The clock makes it work.
All PEs update from the same snapshot, so `busy` is low everywhere in a cycle
only when no update rule would change anything. The array is then at a fixed
point: every cluster has one `cid`, its tree is complete, the root's `st_odd`
is the cluster's parity, and every member's `odd` equals it. `busy` is
registered and describes the state one cycle before, so "no PE busy" means the
state has not changed since.

The algorithm has a Merging stage and a Checking stage. Here both run in every
cycle, and only Growing is a separate stage.

## The controller and the timing of a decode

`control_node` reduces the `busy` and `odd` bits of one measurement round
with two ORs. `root_control_node` ORs the leaves and steps the global stage:

```
start ─► GROWING ─(1 cycle)─► MERGING ─(wait 2)─► watch busy every cycle
              ▲                                        │ no PE busy
              └──────────── some PE odd ◄──────────────┤
                                                       └─ no PE odd ─► TERMINATE (done)
```

The two wait cycles cover the latency of the PEs. The PEs apply the growth one
cycle after GROWING, and the first `busy` that reflects the new growth is
registered one cycle after that. The leaves are combinational, so the tree
costs no cycle. TERMINATE freezes all PEs, and it is also the idle state.

Worked example, two defects at the ends of one unweighted edge (w = 2).
Edge *k* is the *k*-th rising clock edge after `start`:

| edge | controller | PEs |
|---|---|---|
| 0 | `start`: stage ← GROWING | load syndrome |
| 1 | ← MERGING, wait 2 | stage ← GROWING |
| 2 | wait | growth 0 → 2, the edge is fully grown |
| 3 | wait | higher PE takes `cid`, parent; busy |
| 4 | busy seen | root's `st_odd` ← 0 |
| 5 | busy seen | root's `odd` ← 0 |
| 6 | busy seen | child copies `odd` ← 0 |
| 7 | busy seen | all consistent, `busy` ← 0 |
| 8 | no busy, no odd → TERMINATE | frozen |

`cycle_count` reads 8. An empty syndrome takes 4 cycles. Each later iteration
costs 4 cycles plus one cycle per tree level the id and the parity have to
travel. Other designs often quote decoding time per measurement round: at
100 MHz that is `cycle_count × 10 ns / d`.

## Interface

`helios_top` parameters:

* `D` (default 21): code distance.
* `ROUNDS` (default `D`): measurement rounds.
* `W_BITS` (default 5): width of weights and growth. 5 bits hold weights up
  to 16.
* `CNT_W` (default 16): width of the counters.

The design has N = (D+1)·(D−1)/2·ROUNDS PEs and `ID_W` = ⌈log2(N+1)⌉ bits per
id (13 bits at the defaults).

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | single clock; asynchronous active-low reset |
| `start` | in | one-cycle pulse: load `syndrome`, begin decoding |
| `syndrome[N]` | in | defect bit per vertex, index = id − 1 |
| `weight[N][3]` | in | weight of the edge PE *p* owns in direction UA, UB, TU. Use 2 for an unweighted graph. Hold stable during a decode |
| `done` | out | high from TERMINATE until the next `start`; all outputs are frozen |
| `global_stage` | out | controller stage |
| `cycle_count`, `iteration_count` | out | cycles from `start` to `done`; number of growing stages |
| `cid[N]` | out | cluster id (lowest id in the cluster) per vertex |
| `parent[N]` | out | spanning-tree parent direction per vertex (`DIR_SELF` = root) |
| `edge_growth[N][3]` | out | final growth of every owned edge |

The decoder stops once it has the clusters and their spanning trees. Producing
a correction from them (peeling each even cluster along its tree) is not part
of this RTL. `cid`, `parent` and `edge_growth` carry everything that stage
needs.

The clock-by-clock rules above are those of the published FPGA design. The
following choices are this design's own:

* the start/load protocol and `done`;
* the cycle counters;
* TERMINATE doubling as the idle state;
* parent stored as a direction;
* the fully-grown flag sent to the higher-id PE in place of the raw growth;
* one leaf control node per round;
* weights as an input bus;
* no boundary vertices;
* a growth update that requires different cluster ids at the two ends. The
  short published code listing leaves that test out, while the published
  algorithm has it.

Each file's header comment says which parts are which.

## Verification

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line. The reference model in `tb/uf_ref_pkg.sv` is independent of the RTL:

* It builds the graph from the surface-code coordinates, not from the RTL's
  neighbour function.
* It runs the textbook serial Union-Find decoder with the same growth rule.
* It draws syndromes from the phenomenological noise model: each data-qubit
  edge in each round, and each measurement between two rounds, flips with
  probability p.

The distributed decoder should give exactly the same clusters, edge growths
and iteration counts as the serial one, and it does in every test.

| testbench | what it checks |
|---|---|
| `tb_edge_grow` | growth rule against a model: +2, +1, cap at w, frozen when fully grown, no growth inside a cluster |
| `tb_processing_element` | two PEs (all links, some links) against a cycle-by-cycle model of the PE rules, with random neighbour state |
| `tb_control_node` | the OR reductions |
| `tb_root_control_node` | stage sequence, the two wait cycles, counters, against a model |
| `tb_pe_array` | d = 7 grid (168 PEs) with a testbench-driven stage sequence; clusters, growths and parent links against the reference |
| `tb_helios_top` | d = 5 end to end: about 350 decodes at p = 0.1 %, 2 % and 6 %, unweighted and with weights up to 16. Checks clusters, growths, iteration counts, that every parent chain reaches its root, and the exact cycle counts 4 and 8 from the example above. It also counts that each mechanism happened: +2 growth, +1 growth, growth capped at w, merges, controller waiting on busy PEs, multi-iteration decodes, empty syndromes |
| `tb_helios_workloads` | the published evaluation workloads at d = 7 (error rates 0.05 %, 0.1 %, 0.5 %; non-uniform weights with w_max 4, 8, 16). It prints the mean decoding time per round and checks it against the published figures as an upper bound |

Each testbench runs with plain Verilator, for example:

```
verilator --binary --timing --assert rtl/helios_pkg.sv tb/uf_ref_pkg.sv \
  rtl/edge_grow.sv rtl/processing_element.sv rtl/pe_array.sv \
  rtl/control_node.sv rtl/root_control_node.sv rtl/helios_top.sv \
  tb/tb_helios_top.sv --top-module tb_helios_top && ./obj_dir/Vtb_helios_top
```

**What has not been simulated.** The full d = 21 array (4620 PEs) lints and
elaborates cleanly, but Verilator's C++ build of it takes far longer than a
test run should. The largest array simulated end to end is d = 9 with 9 rounds
(360 PEs), in a one-off run of the workload testbench. That testbench is set
to d = 7 (168 PEs) so that it builds in reasonable time. All RTL is
parameterised by `D`, and the checks at d = 5, 7 and 9 exercise the same PE and wiring code. Nothing here has been synthesised for an
FPGA. The published resource figures (about 0.9 M LUTs and 0.24 M registers at
d = 21) are not reproduced.

**Timing compared with the published measurements.** The published figures
are mean decoding times of about 25 ns per round at d = 5 and 11.5 ns per
round at d = 21, for p = 0.1 % at 100 MHz. They include the measurement
harness around the array. This array alone needs fewer cycles per decode: an
empty syndrome takes 4 cycles here, against roughly 11 in the published
distributions. So only the upper bound is checked, not the published numbers
themselves.

## Files

* `rtl/helios_pkg.sv`: stage and direction types, graph geometry functions
* `rtl/edge_grow.sv`: growth register of one edge
* `rtl/processing_element.sv`: one vertex
* `rtl/pe_array.sv`: the 3-D grid and its links
* `rtl/control_node.sv`: leaf of the controller tree
* `rtl/root_control_node.sv`: stage sequencer
* `rtl/helios_top.sv`: the decoder
* `tb/uf_ref_pkg.sv`: graph builder, serial UF reference, noise model
* `tb/tb_*.sv`: the testbenches listed above
