# A networked Union-Find decoder for lattice surgery

A surface-code quantum computer that uses lattice surgery keeps changing its decoding
problem. Two logical qubits are merged for a few rounds and then split again, and whether
that merge happens at all can depend on a measurement that has just been decoded. So the
decoding graph is only known at run time. It is also far too large for one chip.

This design attacks both problems with one idea. The graph is cut into **decoding blocks**:
one logical qubit for `d` measurement rounds. Every block has the same fixed shape and is
decoded by its own hardware unit. Blocks that belong together are then joined by a
**fusion** step:

- between merged neighbours in space;
- between consecutive blocks of the same qubit in time;
- between blocks that live on different chips.

Because of fusion, a dynamic graph never has to be built: changing a boundary register
changes the graph.

The units sit in **leaves**. Leaves are joined in two ways:

- A tree to a **root** that runs the logical circuit. Instructions go down the tree and
  decoded results come back up it.
- A grid to their neighbours. Boundary information between neighbouring qubits on
  different leaves goes over the grid.

The RTL here is that system as a prototype would have it: one root and four leaves with 25
logical qubits of distance 5 each, 100 logical qubits in all, and a 100 MHz clock.

## Contents

| file | what it is |
|---|---|
| `rtl/deconet_pkg.sv` | message format, boundary states, decoder commands, program instructions |
| `rtl/uf_decoder.sv` | one decoder instance: Union-Find with fusion for one logical qubit |
| `rtl/meas_router.sv` | routes measurement rounds from controller channels to instances |
| `rtl/leaf_coordinator.sv` | a leaf's control: instruction queue, boundary registers, decode sequence, boundary exchange, results |
| `rtl/leaf_node.sv` | one leaf: coordinator, measurement router, NQ instances in a row |
| `rtl/msg_router.sv` | tree router (the root's router; also usable as an intermediate node) |
| `rtl/logical_processor.sv` | the root's program engine, including conditional instructions |
| `rtl/root_node.sv` | logical processor behind a router |
| `rtl/eos_link.sv` | **behavioural model** of a fixed-latency chip-to-chip link |
| `rtl/deconet_top.sv` | root, four leaves, tree links and grid links |
| `tb/tb_*.sv` | one self-checking testbench per block and an end-to-end test of the network |

## The decoding block

A block holds `d` rounds. Each round is a grid of `d` rows by `d-1` columns of ancilla
measurements, plus one extra **seam** column. Only the defects (changes of a measurement
from the previous round) matter, so every grid point is a vertex of the decoding graph.
Edges join:

- neighbours in a row;
- neighbours in a column;
- the same point in consecutive rounds (time edges).

Column 0 has an edge to the block's **left face**. Column `d-2` has an edge either to a
boundary (the right side of the qubit patch) or, while the qubit is merged with its
right-hand neighbour, to the seam column. The seam column stands for the ancillas that
exist only during a merge. It has its own row edges and an edge to the **right face**,
which leads to column 0 of the neighbouring qubit.

Each face has one of four states. The coordinator holds them in a register array that
every instance reads:

| state | meaning for the decoder |
|---|---|
| `F_SPLIT` | real boundary (the patch edge); the seam is unused |
| `F_MERGED` | the neighbour's block is joined across this face, inside the same leaf |
| `F_OPEN` | the neighbour is on another leaf; this side decodes first and treats the face as a boundary, then sends the corrections that cross it |
| `F_CLOSED` | the neighbour is on another leaf and decodes first; this side waits for its corrections and applies them as toggled defects before decoding |

The instance decodes a **window** of two blocks: the previous block (rounds `0..d-1`) and
the current one (rounds `d..2d-1`). The last round has an open edge to the future, so a
measurement error at the very end of the window stays undecided until the next window. A
measurement FIFO of `4d` rounds sits in front. The `C_SHIFT` command moves the current
block into the previous slot and loads `d` new rounds in one cycle.

Each block remembers the faces it was decoded with: the instance keeps face registers for
the previous and the current block. A boundary change for block `k+1` therefore never
alters the graph of block `k`.

## Union-Find as flooding

Union-Find decoding grows a cluster around each defect, half an edge at a time, until
every cluster has an even number of defects or touches a boundary. It then peels each
cluster into a correction. Here every vertex is a processing element, and each step of the
algorithm is a **flood**: a rule every vertex applies using only its six neighbours,
repeated until nothing changes. The coordinator issues a step's `_INIT` command once, then
the step itself until the instances report `changed` low.

| step | rule at each vertex | result |
|---|---|---|
| `MRG` | take the smallest cluster id over fully grown edges; a fully grown boundary edge offers id 0 | every vertex knows its cluster; id 0 means "touches a boundary" |
| `TREE` | hop count = 1 + smallest hop count of a same-cluster neighbour (roots and boundary-touching vertices have 0); the neighbour that gave it is the parent | a spanning tree of each cluster, rooted at its root or at the boundary |
| `PAR` | subtree parity = own defect XOR the parities of the children | the root's parity says whether the cluster is odd |
| `BC` | copy the parent's odd flag | every vertex knows whether its cluster is odd |
| `GROW` | vertices of odd clusters add half an edge to every incident edge (2-bit counters, saturating) | clusters grow |

Vertex ids are unique across all instances of a leaf (`INST` gives an offset), so
clusters that span merged faces get one id.

The subtree parity from `PAR` is also the peeling result. The edge from a vertex to its
parent carries a correction exactly when the subtree below holds an odd number of
defects. So no separate peeling pass is needed: the correction on every edge is available
as soon as the fused stage ends.

Flooding costs one cycle per hop of the longest cluster. At `d=5`, a whole window with
single errors took at most 53 cycles (0.53 µs) in the block testbench. That is well inside
the 5 µs that `d` rounds take to measure. Larger clusters take longer.

## Fusion, in two stages

A decode runs in two stages.

1. **Stage 1 (`fused`=0).** Every block is decoded as if alone. A merged face, and the
   face between the previous and the current block, act as **artificial boundaries**. A
   cluster whose grown edges reach one is treated as even and stops growing.
2. **Stage 2 (`fused`=1).** The artificial boundaries become ordinary edges. Clusters on
   both sides join, parities are computed again, and growth resumes until no odd cluster
   is left. Growth from stage 1 is kept.

Most work is local and happens in parallel in stage 1. Stage 2 only finishes what crosses
a face. The end-to-end test includes an error chain that leaves two odd clusters after
stage 1, so stage 2 must grow.

Then the previous block is **committed**:

- **Logical result.** The logical flip is the parity of corrections across column 0's left
  edge. Corrections that a left neighbour on another leaf sent in are folded in too.
- **Time face.** Corrections on the time edges into the current block are remembered as
  toggles. They are applied to the current block's defects when it becomes the previous
  block at the next shift.
- **Open faces.** Corrections across an `F_OPEN` face are handed to the coordinator for
  the neighbouring leaf.

## Leaves that decode in turn

Faces between leaves are handled like parallel-window decoding. One side (`F_OPEN`)
decodes block `k`, fuses it, and commits it after decoding block `k+1`. It then sends the
corrections that cross the face as an `H_BDRY_DEFECTS` message, with the block number and
one bit per face edge in 32-bit chunks. The other side (`F_CLOSED`) does not start block
`k` until that message is in. It then decodes with those defects toggled, so the
correction is not made twice, and counts them towards its logical result.

This is the staggering of compute groups into a pipeline. A leaf decodes a block as soon
as its inputs are there and its previous results have gone out. So throughput does not
depend on link latency, but a chain of `n` leaves that wait on each other adds `n` blocks
of latency.

Two rules for whoever writes the program:

- A face between leaves must not switch directly from `F_OPEN` on one side to `F_OPEN` on
  the other. Put at least one `F_SPLIT` block in between. Otherwise each side waits for
  the other.
- The coordinator's instruction queue holds 16 messages. The program must pace its decode
  instructions with waits so that no leaf falls more than a few blocks behind.

## Messages and the network

Every message is 64 bits. Each node routes on the destination byte alone:

| bits | field |
|---|---|
| 63:56 | destination node (0 = root, 1..4 = leaves) |
| 55:48 | header |
| 47:0 | payload |

| header | payload |
|---|---|
| `H_SET_BOUNDARY` 0x01 | `[7:0]` face index (0..NQ), `[9:8]` state |
| `H_DECODE` 0x02 | `[15:0]` block number |
| `H_SET_ROUTE` 0x03 | `[7:0]` channel, `[15:8]` instance |
| `H_BDRY_DEFECTS` 0x10 | `[31:0]` chunk of face bits (bit `t*d+r`), `[35:32]` chunk index, `[47:36]` block |
| `H_RESULT` 0x20 | `[7:0]` global logical qubit, `[23:8]` committed block, `[24]` logical flip |

**Routers.** `msg_router` gives each port an input FIFO, because links cannot be stalled.
Each output has one register stage and a round-robin arbiter, so a hop costs two cycles.
Child `k` serves a contiguous address range.

**Root.** The root is that router with the logical processor on its local port.

**Links.** Each direction of every tree and grid connection is an `eos_link`. It is a
behavioural stand-in for a low-latency transceiver: 10 cycles (about 95 ns at 100 MHz), in
order, no back-pressure.

**Leaves.** A leaf holds its `NQ` instances in a row. Face `i` lies between instances
`i-1` and `i`; faces 0 and `NQ` are the leaf's west and east faces to its grid neighbours.
So merges inside a leaf are between neighbouring qubits of the row. The leaves form a
chain: leaf `l` east ↔ leaf `l+1` west.

## The logical processor

The root runs a program from a memory that the user loads. The instructions are:

| op | action |
|---|---|
| `OP_SEND msg` | send `msg` (any instruction to any leaf) when the router has room |
| `OP_WAIT q, blk` | stall until the latest result of logical qubit `q` is for block `blk` or later |
| `OP_SENDIF q, v, msg` | send `msg` only if the latest result of `q` equals `v`, otherwise skip it |
| `OP_END` | stop |

`OP_SENDIF` is how the run-time graph is built. For example, the boundary message that
merges two qubits is sent only if an earlier decoded measurement asked for it. Every
result is passed on to the user port, and counters record taken and skipped conditionals.
Leaves also copy every result to a feedback port for the qubit controllers.

## Top-level interface

`deconet_top` has these parameters (defaults in brackets): `D` (5), `NQ` per leaf (25),
`NLEAF` (4), `LINK_LAT` (10), `PROG_DEPTH` (256). Its ports:

| group | ports |
|---|---|
| user | `prog_we`, `prog_addr`, `prog_data` (an `lp_instr_t`), `start`, `running`, `res_valid`/`res_msg`, `n_cond_taken`, `n_cond_skipped` |
| qubit controllers | `meas_valid[l][i]`, `meas_data[l][i]` (one round of `d*d` defect bits, bit `r*d+c`, column `d-1` is the seam), `meas_ready[l][i]`; `fb_valid[l]`, `fb_qubit[l]`, `fb_logical[l]` |
| status | `leaf_busy[l]` |

Reset is asynchronous and active low. Everything runs on one clock.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_uf_decoder` | 40 blocks with random single errors of every kind; logical flips against an independent graph model; no odd cluster left; each window under `100*d` cycles |
| `tb_meas_router` | random traffic against a reference priority rule |
| `tb_leaf_coordinator` | instruction execution, waiting for blocks and for boundary defects, the command sequence, results and boundary messages |
| `tb_leaf_node` | three qubits with merges, an open east face and a closed west face; every result and every east message against a model |
| `tb_msg_router` | random traffic with stalls: every message delivered once, in order per source and destination, best-case two-cycle hop |
| `tb_logical_processor`, `tb_root_node` | program execution, waits, conditionals, routing to leaves, simultaneous results |
| `tb_eos_link` | exact latency and order |
| `tb_deconet_top` | whole network, 2 qubits per leaf, 40 blocks; see below |

`tb_deconet_top` checks each of these mechanisms against a model of the global graph, and
fails if one never happens:

- merges inside leaves, with growth after fusion;
- open and closed faces in both directions;
- leaves waiting for neighbours;
- program waits;
- one conditional merge taken and one skipped;
- feedback;
- measurement back-pressure.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert rtl/*.sv tb/tb_deconet_top.sv \
  --top-module tb_deconet_top -Mdir obj && ./obj/Vtb_deconet_top
```

**Sizes simulated.** The largest size simulated end to end with a passing result is four
leaves of two qubits each, at `d=5`, for 40 blocks; a single leaf was tested with three
qubits.

The default size is 100 instances of 50 processing elements, 5000 in all. A Verilator
model of it takes about 13 minutes to build on four cores and simulates a few thousand
cycles per second. A first run at that size streamed measurements faster than real time.
After about 340 cycles it overflowed the root's router buffers with result messages: four
leaves of 25 qubits each deliver up to 100 results at once into the processor's one port.
The buffers were then deepened from 32 to 128 messages. That run has not been repeated.

At the real measurement rate, one round per microsecond, the root needs one result per
5 clock cycles on average. The buffers only have to absorb bursts.

## How this departs from the published system

- **The decoder instance.** The published system uses an existing distributed Union-Find
  decoder whose internals are described elsewhere. The instance here is a new, simpler
  one: flooding instead of root tables, and peeling folded into the parity step. It has
  the same role and the same two-stage fusion. Its cycle counts will differ from the
  published latencies.
- **No reuse of the current block's clusters.** The current block of a window is decoded
  again, from scratch, in the next window. Its clusters are not carried over.
- **Geometry, formats and queues.** The planar layout of a block, the seam column, the
  face encoding, all message codes and payloads, the instruction set, and the queue and
  FIFO depths are this design's own.
- **The grid.** The grid between leaves is a chain, and qubits of a leaf form a row, so
  only neighbours in that order can merge. The published mapping of a 2-D qubit layout
  onto leaves is not reproduced.
- **Measurement loading.** Measurements enter through one parallel channel per logical
  qubit, as they would from the qubit controllers. They are not loaded one after another
  from a host processor.
- **Timing not reproduced.** Latencies and throughputs in nanoseconds, as measured on the
  FPGA prototype, are not reproduced. Per window, the tests check only that a block is
  decoded in less time than its `d` rounds take to measure.
- **Interfaces.** The links are latency models, not transceivers. The user interface
  (on the FPGA's processor) and the qubit controllers are outside the design and appear
  as ports.
