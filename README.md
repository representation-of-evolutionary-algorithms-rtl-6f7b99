# Distributed NDE evolutionary search for degree-constrained spanning trees

Many network design problems (power distribution, telecommunication, road
networks) reduce to finding a minimum spanning tree of a large graph under a
limit on the degree of every node. With that limit the problem is NP-hard, and
evolutionary algorithms are a practical way to attack it. This RTL implements
a hardware evolutionary engine of that kind, split over several FPGAs: a
**Central FPGA** keeps a forest of spanning trees, and one or more
**Satellite FPGAs**, connected to it in a star, each hold a set of
**Workers** that try random local changes on pairs of those trees in
parallel. The best change that lowers the total edge weight is kept.
The FPGAs exchange work over 10 Gb Ethernet through a small **Network
Abstraction System (NAS)** that turns memory-mapped writes into Ethernet
frames and back.

The design is sized for graphs of 4096 nodes with a 64-bit system bus. It
is a reconstruction from a short published description of such a platform.
That description gives the system organisation, the tree encoding, the
operator and the interfaces, but not the inside of any block. Everything
below the block level here is this design's own. The section *Where this
departs from the published platform* lists what that means.

## Trees as lists: Node-Depth Encoding

A tree is stored as the list of its nodes in depth-first order, each with its
depth (root at depth 0). One entry is 32 bits, `{node[15:0], depth[15:0]}`
(`nde_pkg::nde_entry_t`); two entries share a 64-bit bus word, entry `2i` in
bits `[31:0]` and entry `2i+1` in bits `[63:32]`.

Two properties make this encoding fit hardware:

* the subtree rooted at position `i` is the contiguous run `i..j` that follows
  it, up to the first later entry whose depth is not greater than `depth(i)`;
* the parent of the node at `i` is the last entry before `i` whose depth is
  `depth(i) - 1`.

A valid list starts with depth 0, and every later depth lies between 1 and
the previous depth plus 1. The testbenches build random trees from this rule
and check it on everything the hardware returns.

## The move: Preserve Ancestor Operator

Each Worker applies one operator to a pair of trees, *from* (A) and *to* (B):

1. Draw a prune position `ip` in `[1, len(A))`. The root is never pruned. Then
   draw an adoption position `ia` in `[0, len(B))`. Call the nodes there `p`
   and `a`.
2. Find the subtree of `p`, `A[ip..il]`, and its parent in A.
3. Count the degree of `a` in B: its children, plus 1 if it is not the root.
4. Look up `w(p, parent)` and `w(p, a)` in the graph memory.
5. Accept when all of these hold:
   * `w(p, a)` exists (the value `16'hFFFF` means "no edge");
   * `degree(a) < DMAX`;
   * B has room for the subtree;
   * `w(p, a) < w(p, parent)`.

   The weight change of the forest is then `w(p,a) - w(p,parent)`, which is
   negative.
6. The new *from* tree is A with `A[ip..il]` cut out. The new *to* tree is
   `B[0..ia]`, then the subtree with every depth shifted by
   `depth(a) + 1 - depth(p)`, then `B[ia+1..]`.

Together the two trees still span the same nodes, and the subtree keeps its
internal shape. This is why the operator is called "ancestor preserving".

### How a Worker does it (`pao_worker`)

Each Worker has its own copy of both trees, in two `N`-entry memories with a
synchronous read port. The steps are serial, one entry per clock:

| phase | cycles |
|---|---|
| draw `ip`, `ia` (xorshift32, multiply-high range reduction), fetch `p`, `a` | 4 |
| scan A once: parent of `p`, end of subtree `il` | `len(A)` + 2 |
| scan B from `ia+1`: degree of `a` | `len(B) - ia` + 2 |
| two weight look-ups | 2 × memory latency (+ arbitration) |
| decide | 1 |

The Worker does not rebuild the trees. Instead its read-out port (`nrd_sel`,
`nrd_idx`, with data one cycle later) maps each index of a *resulting* tree
onto the source memories and shifts the depth on the fly. The Worker
Controller streams the winner's trees out of that port. Each Worker seeds
its generator with `seed XOR (ID+1)·0x9E3779B9`, so Workers given the same
job explore different moves.

## Satellite FPGA: the Worker Set (`worker_controller`)

The Worker Controller receives a job on an Avalon-MM slave port (write only,
16-bit word address):

| address `[15:14]` | contents |
|---|---|
| 0 | words of the *from* tree, index in `[13:0]` |
| 1 | words of the *to* tree |
| 2 | control: `job_word_t {seed[31:0], len_to, len_from}` (starts the job) |
| 3 | command: `CMD_FETCH` (1) or `CMD_DISCARD` (0) |

Each tree word is broadcast to all `NW` Workers as two entry writes. After
every tree word, `s_waitrequest` stays high for one cycle. The control word
starts all Workers in the same cycle. When all of them are done, the
controller picks the accepted move with the most negative weight change
(lowest Worker number on a tie). It then reports on its master port with a
`result_word_t {accepted, worker, delta, len_to, len_from}` written to
region 2. The `worker` field is the global Worker number,
`SAT_ID·NW + local index`.

* If no Worker found an improving move, the job ends with that report.
* Otherwise the controller waits for a command in region 3:
  * `CMD_DISCARD` ends the job;
  * `CMD_FETCH` makes it write the winner's two new trees to regions 0 and
    1, then the same result word again to region 3, which marks the end.
    Each tree word takes four cycles plus wait states.

Tree and control writes are taken only while the controller is idle, and
commands only while it waits for one. This two-step exchange lets the
Central FPGA compare the reports of several Satellites before any trees
cross the link.

The Workers share one port to the graph memory (`mem_req/mem_u/mem_v` held
until a one-cycle `mem_ack` with `mem_data`). A fixed-priority arbiter grants
the port to the lowest-numbered Worker that asks. Every Worker makes exactly
two look-ups per job, unless its *from* tree has a single node.

## Central FPGA

**`central_controller`** owns the forest (`NTREES` trees, each with room for
`N` nodes, in `forest_mem`). It has one master port and one slave port per
Satellite (`NSAT` of each). After a `start` it runs `iterations`
iterations, each as follows:

1. Draw two different trees.
2. Broadcast all words of both trees, then a job word with a fresh seed, to
   every Satellite. A word moves on only once every Satellite's port has
   taken it. Each Satellite mixes its own number into the seed, so the
   Satellites explore different moves.
3. Collect one report from every Satellite.
4. If no Satellite accepted a move, the iteration ends and the forest is
   unchanged. Otherwise the accepting Satellite with the largest weight
   reduction wins (lowest number on a tie). It gets `CMD_FETCH`, and every
   other accepting Satellite gets `CMD_DISCARD`.
5. The winner's tree words go straight into the two trees' slots. Its end
   word updates the lengths and the counters `iter_count`, `improvements`
   and `delta_sum` (the summed weight change).

The winner may start sending trees before the last discard has gone out,
so the controller accepts tree words while it is still sending commands.
While idle, the host processor can write and read forest words and set tree
lengths. Sending costs at least two cycles per word, because the forest
memory is read synchronously.

**`forest_mem`**: `NTREES × N/2` words of 64 bits. It has one synchronous
read port and one write port, and a read of the word being written returns
the old data.

**`flow_controller`**: a `DEPTH`-entry FIFO of (address, data) writes. It
decouples the controller, which can issue a write every two cycles, from the
NAS, which needs eight. The host can pause its output with `enable`; a write
already on the port stays there until it is taken. It counts forwarded writes
and the cycles in which it was full.

## Network Abstraction System

Every memory-mapped write crosses the link as one minimum-size Ethernet frame
of eight 64-bit Avalon-ST beats, first byte in bits `[63:56]`:

| beat | contents |
|---|---|
| 0 | destination MAC (6 bytes), source MAC bytes 0–1 |
| 1 | source MAC bytes 2–5, EtherType `0x88B5`, 16-bit sequence number |
| 2 | word address, zero-extended |
| 3 | write data |
| 4–7 | zero padding; beat 7 has `eop` and `empty = 4` (60 bytes, the MAC appends the FCS) |

`nas_mm_slave` is the transmitter. It accepts one write, then holds
`s_waitrequest` high while the eight beats go out.

`nas_mm_master` is the receiver. It checks the destination address and the
EtherType, and it needs at least four beats with no error flag on the last
one. A good frame becomes an Avalon-MM write; any other frame is dropped and
counted. While that write waits, it holds `st_ready` low.

Nothing is retransmitted. A lost job frame stalls the loop: the Central
Controller waits for a report that never comes.

## System top (`dndewg_top`)

```
host_* ─► central_controller ◄─► forest_mem
            │ jobs, commands [s]        ▲ reports, trees [s]
            ▼                           │
      flow_controller [s]         nas_mm_master [s] ◄── c_rx_*[s]   (Central MAC RX, link s)
            ▼
       nas_mm_slave [s] ──► c_tx_*[s]                               (Central MAC TX, link s)

Satellite s:
s_rx_*[s] ──► nas_mm_master ──► worker_controller (NW × pao_worker) ──► nas_mm_slave ──► s_tx_*[s]
                                        │
                                      mem_*[s]  (Satellite graph memory)
```

Everything marked `[s]` exists once per Satellite, `s = 0 .. NSAT-1`, and
the top's ports for it are arrays. The Ethernet MACs, XAUI PHYs, optical
links, processors, JTAG and DDR3 controllers are outside the RTL, and their
interfaces are ports. To close loop `s`, connect `c_tx_*[s]` to `s_rx_*[s]`
and `s_tx_*[s]` to `c_rx_*[s]`, either directly or through a link model as
the testbenches do. The Central FPGA's MAC address is `02:00:00:00:00:01`;
Satellite `s` has `02:00:00:00:01:00 + s`. All FPGAs run from one clock and
one active-low asynchronous reset.

Default parameters: `N = 4096`, `NTREES = 4`, `NSAT = 1`, `NW = 4`,
`DMAX = 4`, `FC_DEPTH = 16`. With four trees of 1024 nodes, one iteration takes about
22,000 cycles. Most of that is NAS framing: eight cycles per 64-bit word, in
both directions.

## Where this departs from the published platform

* **Worker speed.** The published simulation reports about 0.144 µs per
  iteration for 1024 nodes at 75.91 MHz. That is about 11 cycles, and it
  needs Workers far more parallel than described anywhere. The serial Worker
  here needs about `2n` cycles. The operator and the decision rule are the
  same; the speed is not.
* **Sharing work among Satellites.** The published system is a star, with
  one Central FPGA and several Satellites (results are reported for 1, 4
  and 8), and it was validated with one Satellite, which is the default
  here. How jobs and results are shared among several Satellites is not
  described. The broadcast, report, fetch-or-discard scheme above is this
  design's own. In it every Satellite has the full set of `NW` Workers, so
  more Satellites means more Workers. The published resource figures instead
  suggest a fixed number of Workers split over the Satellites.
* **Own choices, not given in the source:**
  * all field widths;
  * the message layout and the frame format;
  * the FIFO role and depth of the Flow Controller;
  * the number of Workers (4), the number of trees (4) and the degree limit
    (4);
  * the random generator;
  * the contents of the Satellite memory, taken to be edge weights.
* **Not built:** the initial forest construction (described only as a
  modified Kruskal algorithm); the host processors and their software; the
  DDR3 memories and the Ethernet/XAUI/optical physical layer.

## Verification

Each block has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog:

| testbench | what it checks |
|---|---|
| `tb_pao_worker` | 400 random tree pairs. The move is taken from the Worker, then subtree, parent, degree, weights, decision and both resulting trees are recomputed independently. Also checks latency ≤ `len(A)+len(B)+40`. |
| `tb_worker_controller` | 150 jobs over the MM ports with random gaps and wait states. All four Workers' moves are re-evaluated, and the winner, weight change, trees and the one-cycle load wait state are checked. |
| `tb_forest_mem` | Random traffic against a model, including read/write collisions. |
| `tb_central_controller` | The testbench plays two Satellites: contents of every broadcast job, distinct pairs, every ordered pair drawn, fetch to the best report and discard to the others, write-back, counters, each Satellite winning. |
| `tb_flow_controller` | Ordering, back-pressure, full FIFO, pause. |
| `tb_nas_mm_slave` / `tb_nas_mm_master` | Frame layout, sequence numbers, held beats, one write per eight cycles. Good frames become writes; wrongly addressed, wrong-EtherType, short and errored frames are dropped and counted. |
| `tb_dndewg_top` | End to end at 64 nodes with two Satellites: injected bad frames, random link stalls, a paused Flow Controller. After the run, every node appears once, every tree is valid, and the final total weight equals the initial total plus the reported changes. Counts each mechanism: improving and rejected moves, full FIFO, pause, dropped frames, stalls, look-ups, wins of each Satellite, discards. |
| `tb_dndewg_full` | The same at the default sizes: 4096 nodes, one Satellite, 100 iterations. |
| `tb_dndewg_star` | The same with eight Satellites (32 Workers in all) on a 256-node graph, 400 iterations, until moves start being rejected. |

Graph weights in the testbenches come from the symmetric formula
`w(u,v) = ((u·v + 3(u+v)) mod 251) + 1`. A pair with `(u+v) mod 11 = 0` has
no edge.

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/nde_pkg.sv rtl/*.sv \
          tb/tb_dndewg_top.sv --top-module tb_dndewg_top -Mdir obj
obj/Vtb_dndewg_top
```

Replace the testbench name to run another one. The full-size test runs in
about a second.
