# Micro Blossom: a vertex-parallel dual-phase accelerator for MWPM decoding

A surface-code quantum memory measures its stabilisers once per cycle. An
error on a data qubit flips the stabilisers next to it. A faulty measurement
flips one stabiliser outcome in one round only. The decoder gets these
*defects*: vertices of a 3-D decoding graph, which has space and round as
its axes. It must pair each defect with another defect or with the code
boundary so that the total weight of the chosen paths is minimal. This is a
minimum-weight perfect matching (MWPM). The logical correction is the parity
of the chosen paths that cross a logical cut of the code.

The blossom algorithm solves MWPM in two alternating phases:

- The **dual phase** grows and shrinks a "cover" (a ball of radius y) around
  every defect or odd set of defects (a *blossom*), until two covers meet
  (a **Conflict**).
- The **primal phase** reacts to each Conflict by matching, by building an
  alternating tree, or by forming or expanding a blossom.

In software, almost all the time goes into the dual phase. This design gives
the dual phase one small processing unit per graph vertex (vPU) and one per
graph edge (ePU). Each PU talks only to its direct neighbours. Every unit
executes the same broadcast instruction in the same clock cycle. A
convergecast tree reduces their answers to a single response. The primal
phase stays in software on a CPU, which drives the array over a 64-bit AXI4
bus.

Two further ideas keep the CPU out of the common case:

- **Pre-matching.** Most defects at low error rates come in isolated pairs.
  The PUs detect such a pair, or a defect next to the boundary, and match it
  themselves. The CPU never hears of it.
- **Round-wise fusion.** Syndrome rounds are loaded one at a time. Rounds
  not yet loaded act as a temporary boundary, so decoding can follow the
  measurements as they arrive.

## Block diagram

```
            AXI4 (64 b)            32-bit instruction        decoded instr_t
  CPU  <==================> mb_axi4_slave -> mb_controller -> mb_broadcast ----+
                                              ^                               |
                              root report_t   |                    all vPUs and ePUs
                                              |                               v
           mb_convergecast (vPUs) --combine-- + -- mb_convergecast (ePUs) <- mb_vertex[|V|]
                                                                            mb_edge[|E|]
  syndrome[(D*D-1)/2] --------------------------------------------------> vPUs of the round being loaded
  correction, correction_valid <-- mb_controller
```

`micro_blossom` is the top. All PU instances and all of their wiring come
from closed-form functions in `mb_graph_pkg`. No table is stored.

## The decoding graph (`mb_graph_pkg`)

The code is a distance-D rotated surface code, with one Z-check graph decoded
over D rounds. In each round the stabiliser sites are the even checkerboard
points (a, b) of a (D+1)×(D+1) grid:

- Sites with b = 0 or b = D are **virtual** vertices: the code boundary.
- The other (D²−1)/2 sites are real stabilisers.

Edges:

- Data qubit (i, j) is an edge between the two even corners of its cell.
  This gives D² spatial edges per round.
- Each real stabiliser has a **time edge** to itself in the next round.

Sizes:

- |V| = D(D+1)²/2, which is 1274 at D = 13.
- |E| = D³ + (D−1)(D²−1)/2, which is 3205 at D = 13.

Numbering and neighbours:

- Vertex number: `v = t·(D+1)²/2 + a·(D+1)/2 + b/2`.
- Each vertex has up to six neighbour slots: 0 = (a+1,b+1), 1 = (a−1,b−1),
  2 = (a+1,b−1), 3 = (a−1,b+1), 4 = previous round, 5 = next round.

The logical cut is the column of data qubits j = 0. A path that ends on the
b = 0 boundary flips the logical parity.

This graph uses the *phenomenological* noise model: data errors plus
measurement errors. The vertex count equals the published one for every
distance. A circuit-level graph has the same vertices but more diagonal
space-time edges (5629 at d = 13). Those edges would be extra slots in the
same `mb_vertex`/`mb_edge` scheme, but their exact pattern is not specified
here. All edges have the weight `WEIGHT` = 14, the 4-bit maximum.

## Vertex state and instruction set

Each vPU holds a compact state (`mb_pkg::vstate_t`). It is 41 bits wide with
the 15-bit index fields used here:

| field | meaning |
|---|---|
| `touch` t_v | the defect whose cover reaches this vertex (all-ones = none) |
| `node` n_v | the outermost blossom (or the defect itself) that cover belongs to |
| `r` (7 b) | residue: how far beyond this vertex the cover reaches |
| `s` | direction of that node: 0, +1 (grow), −1 (shrink) |
| `defect` | a defect was loaded here |
| `boundary` | virtual vertex, or a round not loaded yet |

An ePU holds no state. Its weight is a parameter, and it is replaced by
`FUSION_WEIGHT` while one end is not loaded.

The CPU writes 32-bit instruction words. The low bits select the
instruction:

| instruction | word | effect in every vPU |
|---|---|---|
| reset | `…1001_00` | clear all state; virtual vertices become boundary |
| load Defects | `layer[31:6] 0111_00` | the vertices of that round take the syndrome port and stop being boundary; a defect starts as its own node, growing |
| set Direction | `S[31:17] dir[16:15] 0_00` | vertices with n_v = S take the direction (00 = 0, 01 = +1, 11 = −1) |
| set Cover | `C[31:17] S[16:2] 01` | vertices with t_v = C or n_v = C take node S (a new blossom) |
| grow | `l[31:6] 1101_00` | r_v += l·s (saturating at 0 and at the maximum) |
| find Conflict | `…0001_00` | nothing; the array just reports |

## One instruction, cycle by cycle

The controller writes the word into the broadcast register. One cycle later
(`BCAST_STAGES` = 1) every PU sees it. Within that cycle, each vPU
evaluates three combinational steps and registers the result:

1. **Pre-Match.** The vertex counts its tight incident edges. From these it
   forms:
   - `q`: exactly one tight edge;
   - `empty`: no tight edge towards a loaded vertex;
   - `excl_ok[k]`: every edge other than slot k is loose, or leads to a
     regular vertex whose only tight edge it is.

   If an incident ePU reports an isolated Conflict on its edge, the vertex
   is pre-matched and acts with direction 0 (`s_eff`).
2. **Execute.** The vertex applies the instruction to its registered state,
   using `s_eff` instead of `s` for grow.
3. **Update.** A regular vertex, one that is neither a defect nor a
   boundary, recomputes its touch from its neighbours. It takes the
   neighbour u with the largest r_u − w_e ≥ 0; ties go to the larger
   direction. It then copies that neighbour's touch, node and `s_eff`, with
   r = r_u − w_e. With no such neighbour it leaves every cover. Defect and
   boundary vertices keep their Execute result.

A cover can only spread one vertex per cycle. The controller therefore
keeps issuing idle cycles until no vPU reports a change, and only then
latches the convergecast result as the response. On a stable array an
instruction costs `BCAST_STAGES + 2` cycles, which is 3 at the defaults.
After a grow, it costs one more cycle per vertex the cover front moves
across. The response register 0x08 records the cycle count.

## Conflicts and grow lengths (`mb_edge`, `mb_vertex`)

An edge is **tight** when r₁ + r₂ ≥ w. The ePU reports a **Conflict** when
the edge is tight, its two ends belong to different nodes, and s₁ + s₂ > 0.
Against a boundary vertex, the report carries node2 = touch2 = all-ones and
names the boundary vertex in vert2.

Each PU also bounds how far the array may grow before something changes:

- An ePU between two covers allows (w − r₁ − r₂)/(s₁ + s₂). Against an
  uncovered or boundary end it allows w − r.
- A defect vPU whose node is shrinking allows r_v. The node's dual value is
  then r_v.

The convergecast takes the minimum over all PUs. The response is therefore
one of:

- *finished*: nothing is growing;
- *grow by l*: the CPU issues `grow l`;
- *Conflict*: with node, touch and vertex numbers for the CPU;
- *blocked*: length 0, from a shrinking node that has reached zero.

## Pre-matching isolated Conflicts

Three conditions decide whether an ePU matches its edge without the CPU.
Each one needs the edge to be tight.

- **m^r, two defects.** Both ends are growing defects, and both have
  exactly one tight edge (`q`).
- **m^b, a defect and the code boundary.** One end is a growing defect with
  `q`. The other end is a permanent virtual vertex. The defect's other
  edges must satisfy `excl_ok`, so that no third cover is involved.
- **m^f, a defect and an unloaded round.** This is a time edge whose upper
  end is not loaded. The lower end is a growing defect that is `empty`
  apart from this edge.

A matched pair stops growing, because its `s_eff` is 0. Vertices covered by
it copy that 0 during Update, so the whole cover stands still. If another
cover later touches the pair, `q` fails and the pre-match dissolves. The
Conflict then reaches the CPU in the normal way.

Each vPU whose pre-matched edge crosses the logical cut adds one bit to the
parity tree. The controller combines that parity with the parity the CPU
writes for the matches it resolved itself (register 0x20). The result is
`correction`.

## Round-wise fusion

Until round t is loaded, its vertices are boundary vertices. Time edges
into them weigh `FUSION_WEIGHT` (2) instead of 14. A defect in round t−1
therefore usually meets this cheap temporary boundary first and is
pre-matched there by m^f. When round t arrives, its vertices stop being
boundary and the edge returns to full weight. The pre-match breaks by
itself. For the few fusion matches the CPU made explicitly, the CPU sets
the node growing again. Decoding then continues with the new round present.

## Controller register map (`mb_controller`)

All registers are 64 bits wide, at byte addresses:

| addr | dir | content |
|---|---|---|
| 0x00 | W | instruction word [31:0]; accepted only while idle |
| 0x08 | R | [1:0] 0 finished, 1 grow, 2 Conflict, 3 blocked; [31:16] length; [47:32] cycles used. The read waits until the instruction has settled. |
| 0x10 | R | node1 [14:0], node2 [30:16], touch1 [46:32], touch2 [62:48] |
| 0x18 | R | vertex1 [14:0], vertex2 [30:16] |
| 0x20 | W | [0] CPU-side parity, [1] done: latches `correction` |
| 0x28 | R | [0] busy, [1] pre-match parity, [2] correction valid |

A reset instruction clears `correction_valid`.

## AXI4 interface (`mb_axi4_slave`)

- 64-bit data, 23-bit address, 4-bit IDs.
- INCR bursts, with the address stepping by 8 per beat.
- One write burst and one read burst are handled at a time.
- Each write beat goes to the register port and is acknowledged when the
  controller takes it.
- Each read beat waits until the controller answers. A read of the
  response register during an instruction therefore blocks the CPU, which
  is the intended synchronisation.
- All responses are OKAY. Write strobes are not used.

## Where this RTL departs from the published design

- **No pipelining or contexts.** Pre-Match, Execute and Update are one
  combinational cycle (CPI 1). The published prototype splits them into
  three pipeline stages and interleaves up to 1024 independent decoding
  contexts behind a response buffer. Neither the stages nor the contexts
  are built here. Only one syndrome stream is decoded at a time.
- **Graph.** The graph has phenomenological edges instead of circuit-level
  ones, and one weight for all edges (see above).
- **Widths.** The residue is 7 bits wide. The index fields are 15 bits, the
  width of the instruction fields. A tighter encoding (11-bit touch and
  12-bit node at d = 13) would save state bits.
- **Own choices** where the source leaves the detail open:
  - `FUSION_WEIGHT` = 2;
  - the rule that covered vertices copy the effective direction;
  - the shrink-length bound taken at defect vertices only;
  - the register map and response encoding;
  - the settle-until-stable handshake;
  - the correction-parity bookkeeping.
- **Primal phase.** The primal phase (alternating trees, blossoms) is
  software and is not part of the RTL. The end-to-end testbench contains a
  minimal primal phase. It handles matches between two growing nodes and
  matches with the boundary, which is enough for the scenarios it runs.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_mb_vertex` | each instruction on a defect, a regular and a virtual vPU; q / empty / excl_ok; Update takes the best neighbour; pre-match zeroes s_eff; grow saturation; parity |
| `tb_mb_edge` | tightness, Conflict reports, grow lengths between nodes and against the boundary, Eq. 1–3 including each failing condition, fusion weight |
| `tb_mb_convergecast` | 300 random report sets against a reference reduction |
| `tb_mb_broadcast` | every opcode decoded, two-cycle latency with STAGES = 2, NOP when idle |
| `tb_mb_controller` | register map, blocking read, 3-cycle instruction on a stable array, settling, correction bit |
| `tb_mb_axi4_slave` | single and burst reads and writes, ID echo, rlast, stalled reads and writes, 2-cycle read latency |
| `tb_micro_blossom` | D = 7, end to end (see below) |

The end-to-end test plays the CPU over AXI4. It streams syndrome rounds and
runs the minimal primal phase after each one. It injects small error
patterns whose matching is known without the design, and covers:

- an isolated pair;
- a defect at the code boundary;
- a measurement error across the fusion boundary;
- two defects two edges apart;
- a defect two edges from the boundary;
- a measurement-error chain across rounds.

It also exercises set Cover, a shrink to zero (the blocked response), and
the 3-cycle instruction latency. It counts each mechanism and fails if one
never occurs:

- the three pre-match kinds;
- the three Conflict kinds;
- fusion release;
- grow, load and settle;
- blocked and set Cover.

It checks `correction` against the parity of the injected errors on the
cut.

## Simulating

With Verilator 5, for example the top-level test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mb_pkg.sv rtl/mb_graph_pkg.sv tb/tb_micro_blossom.sv \
    --top-module tb_micro_blossom -Mdir obj -o sim && obj/sim
```

Each other testbench builds the same way with its own name. Both packages
must come first.

The testbench runs at D = 7, where the model builds in under three minutes
and runs in well under a second. The same scenarios also pass at D = 9
(237 checks, all mechanisms seen). There the build takes about 4.5 minutes
with four compile jobs. D = 9 is the largest size simulated end to end. At the
default D = 13 the array has 1274 vPUs and 3205 ePUs. It passes lint and
elaboration. However, the C++ model Verilator generates for it is about 1 GB
and takes well over 20 minutes to compile. To run the end-to-end scenarios
at full size, change the `D` localparam of `tb_micro_blossom` to 13 and drop
the `#(.D(D))` on the instance. The scenarios are placed by coordinates and
do not depend on D.

To change the code size, set `D` on `micro_blossom`; the graph and all
widths follow. `WEIGHT` must stay below the residue range: 2^7 − 1 with
`RES_BITS` = 7 in `mb_pkg`. Other graphs need new closed-form functions in
`mb_graph_pkg`, with the same slot convention. Neither `mb_vertex` nor
`mb_edge` depends on the graph's shape beyond its six neighbour slots.
