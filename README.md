# Q-StaR / BiDOR: a quasi-static routing network-on-chip in SystemVerilog

Dimension-order routing (XY, or YX) is the default in mesh networks-on-chip
because it is trivial to build, delivers in order and cannot deadlock. Its
weakness is that it ignores load. On a mesh where every node injects, the
middle nodes carry far more traffic than the corners. When all I/O sits on
the edges, as here, the rim routers carry the most. In both cases XY makes
no attempt to avoid the busy nodes. Adaptive
routing reacts to congestion but costs state, logic and deadlock-avoidance
machinery, and it reorders packets.

Q-StaR takes a middle road. Most of what decides where load piles up, the
topology and the long-term traffic matrix, changes rarely. From those two
inputs an offline procedure (N-Rank) gives every node a weight, w_NR, that
predicts how loaded it will be. For every source/destination pair the
network then picks, once, whichever of the two dimension-order routes (XY or
YX) passes through the lower total weight. The choices are stored in each
node as a bitmap with one bit per destination, so at run time routing is a
single bit lookup at injection. XY packets travel on virtual channel 0 and
YX packets on virtual channel 1. The two classes never mix, so the network
stays deadlock-free. A pair always uses the same route until the bitmaps are
rewritten, so delivery stays in order. The run-time part is called BiDOR
(two-choice dimension-order routing).

This RTL implements the run-time network, a 5 x 5 mesh with 20 I/O ports on
its edges, as described for the Q-StaR evaluation. It also implements the
route-choice calculation in hardware. N-Rank itself is an offline algorithm.
A behavioural model of it, used by the testbenches, is in
`tb/nrank_model.sv`.

## The network

```
            p0    p1    p2    p3    p4          north edge
       p15 [ 0]--[ 1]--[ 2]--[ 3]--[ 4] p5
       p16 [ 5]--[ 6]--[ 7]--[ 8]--[ 9] p6
       p17 [10]--[11]--[12]--[13]--[14] p7
       p18 [15]--[16]--[17]--[18]--[19] p8
       p19 [20]--[21]--[22]--[23]--[24] p9
            p10   p11   p12   p13   p14         south edge
```

* Every router has exactly four bidirectional ports: N, E, S and W. A port
  that faces a neighbour is a mesh channel. A port that faces the edge of the
  mesh is an I/O port of the network. Each edge node therefore has one I/O
  port and each corner node has two, giving 2*(X+Y) = 20 for 5 x 5.
* Nodes are numbered `id = y*MESH_X + x`. Node 0 is the north-west corner,
  x grows eastwards and y grows southwards.
* I/O ports are numbered 0..4 along the north edge (west to east), 5..9
  along the east edge (north to south), 10..14 along the south edge (west to
  east) and 15..19 along the west edge (north to south). The functions `io_x`,
  `io_y`, `io_dir` and `io_index` in `qstar_pkg` convert between port
  numbers and (node, direction).
* A flit (`flit_t`) carries `head`, `tail`, the destination node
  (`dst_x`, `dst_y`), the direction of the I/O port it must leave by at that
  node (`dst_dir`, needed because a corner node has two) and a 32-bit
  payload. A packet is one or more flits; only the head's routing fields are
  used.

## Choosing a route: bitmaps

Each node `s` holds a 25-bit register, `bidor_bitmap`. Bit `d` is the choice
b(s,d) for packets from `s` to node `d`: 0 selects the XY route on VC0 and 1
selects the YX route on VC1. When a head flit enters at an I/O port,
`bidor_inject` computes `dst_y*MESH_X + dst_x` and reads that bit. The packet
is then put on the chosen VC. Its remaining flits follow on the same VC
without another lookup, even if the bitmap is rewritten in the middle of the
packet. Nothing about the choice is stored in the flit. The VC a flit
travels on *is* the choice, and every router applies XY to VC0 and YX to
VC1 (`dor_route`).

Bitmaps reset to zero, which makes an unconfigured network behave exactly
like XY routing. They are rewritten through a configuration bus
(`bm_we`, `bm_node`, `bm_data`): one write replaces one node's whole bitmap
from the next cycle on.

### The cost rule

The cost of a route is the sum of the weights of every node it visits, both
ends included. The XY route from (sx,sy) to (dx,dy) visits row sy from sx
to dx and then column dx from sy to dy. The YX route visits column sx and
then row dy. The rule is:

    b(s,d) = 0  if cost_XY(s,d) <  cost_YX(s,d)
    b(s,d) = 1  otherwise (ties included)

The tie rule is deliberate. In the published 4 x 4 example, the bitmap of
node 11 is `01110111111-1111`, destination 0 first and `-` for the node
itself. Every destination in node 11's row or column has a 1 there. For such
destinations the two routes are the same path and the costs are equal. The
same example prices 11 -> 4 at 1.57 via XY and 2.17 via YX. Those sums only
come out if node 11's own weight is counted, which is why both end nodes are
included. `tb_bidor_choice_calc` reproduces that printed bitmap from the
example's weights.

### `bidor_choice_calc`: bitmaps from weights in hardware

The calculator latches 25 weights on `start`. The weights are 16-bit
unsigned fixed point; the testbenches use 8 fraction bits. It then evaluates
one (s,d) pair per cycle: two masked sums over all nodes and one compare.
Each completed bitmap is written out on the configuration bus. A full pass
takes N*N = 625 cycles. While it writes, it has priority over the external
configuration bus. The published scheme does this step offline in software.
Putting it next to the bitmaps is a choice of this design. Bitmaps computed
elsewhere can still be loaded directly over the bus.

### Where the weights come from (N-Rank, offline)

N-Rank treats the traffic matrix T (T[s][d] is the fraction of all traffic
going from node s to node d) as a quantity of "weight" that starts at its
sources and flows through the mesh:

* A pair (s,d) may use the channel u->n if that channel lies inside the
  rectangle spanned by s and d and points towards d, i.e. if a minimal path
  can take it.
* W(u,n) sums T over all pairs that may use u->n. Wdrn(u,n) sums T over the
  subset of those pairs whose destination is n.
* Weight leaving u is split over u's outgoing channels in proportion to W:
  p(u,n) = W(u,n) / sum over n' of W(u,n'). Of what arrives at n over u->n,
  the fraction pdrn(u,n) = Wdrn(u,n)/W(u,n) is delivered (drained).
* Start: w(n) = wNR(n) = sum over d of T[n][d]. Each iteration adds everything
  that flows into n to wNR(n), and keeps the undrained part as the new w(n).
* Stop when the total remaining w is below 0.01, or after 100 iterations.

wNR(n) is then the total traffic that passes through n over the whole
evolution. `tb/nrank_model.sv` implements this with `real` arithmetic. For
the four synthetic patterns below it converges in 37 to 66 iterations. For
uniform traffic on the edge-I/O mesh it gives 0.27 at the corners and 0.40 at
the centre. That profile is centre-heavy. The real load in this network is
edge-heavy, and so is the published profile. See the workload results below.

## The router (`qstar_router`)

Input-queued, wormhole-switched, with credit-based flow control and two
virtual channels that never exchange flits.

**Buffers.** Each input port has one 32-flit `vc_fifo` per VC. That makes 64
flits per port, split statically between the VCs. The FIFO shows its head
flit combinationally.

**Route computation.** `dor_route` computes the output port from the head
flit's destination, using XY for VC0 and YX for VC1. At the destination
node the output is the I/O port named in the flit. The result is stored per
input VC, and body flits reuse it.

**Allocation, in one cycle.** A flit at the head of input VC (i,v) is
*eligible* if two conditions hold. First, output VC (o,v) must have at least
one credit. Second, if the flit is a head, (o,v) must be unlocked; if it is
a body or tail flit, (o,v) must be locked by input i. Then:

1. Each input picks one of its eligible VCs, round-robin (`rr_arbiter`).
2. Each output picks one of the inputs that chose it, round-robin.
3. The winners are popped and written into the output register.

A head flit that is not also a tail locks its output VC, and the tail
unlocks it. Flits of different packets therefore never interleave on one VC
of one channel. Packets on different VCs may interleave on the same physical
channel cycle by cycle.

**Timing.** The output register *is* the channel. A flit written into an
input buffer at clock edge k can leave that buffer at edge k+1 and reaches
the next router's buffer at edge k+2. That is two cycles per hop: one for
routing and allocation, one for the channel. The injection port adds one
registered cycle. Without contention, a packet head accepted at an I/O port
leaves the network `1 + 2*H` cycles later, where H is the number of routers
on its route (Manhattan distance + 1). Both `tb_qstar_router` (2 cycles per
router) and `tb_qstar_noc` (1 + 2H end to end) check this exactly.

**Credits.** Each output keeps a credit counter per VC, starting at 32, the
depth of the downstream buffer. Every pop from an input buffer sends one
credit pulse upstream on the next cycle (`credit_out`, registered).
Assertions check the following:

* a buffer is never pushed when full or popped when empty;
* a credit counter never exceeds its start value;
* an arbiter grant is one-hot.

## Interfaces of the top, `qstar_noc`

| signal | dir | meaning |
|---|---|---|
| `io_in_valid[p]`, `io_in_flit[p]`, `io_in_ready[p]` | in, in, out | injection at I/O port p. A flit moves on a clock edge where valid and ready are both high. `ready` is high when the VC the flit will use has a credit (for a head flit, the VC its bitmap bit selects). |
| `io_out[p]` (`link_t`: valid, vc, flit) | out | ejection at port p, one flit per cycle at most |
| `io_out_credit[p][v]` | in | one pulse per flit of VC v the sink has freed. A sink must be able to hold 32 flits per VC. |
| `bm_we`, `bm_node`, `bm_data` | in | write a node's bitmap |
| `calc_start`, `w_nr[25]`, `calc_busy`, `calc_done` | in, in, out, out | route-choice calculator |

Parameters: `MESH_X`, `MESH_Y` (5, 5; at most 8 x 8 with `COORD_W = 3`),
`BUF_DEPTH` (32 flits per VC), and `W_W` (16-bit weights). All state resets
asynchronously on `rst_n` low, and reset also clears on a clock edge while
`rst_n` is low.

## Files

| file | contents |
|---|---|
| `rtl/qstar_pkg.sv` | flit and link types, directions, I/O port numbering |
| `rtl/vc_fifo.sv` | per-VC input buffer |
| `rtl/dor_route.sv` | XY / YX hop decision |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/qstar_router.sv` | the router |
| `rtl/bidor_bitmap.sv` | a node's route bitmap |
| `rtl/bidor_inject.sv` | bitmap lookup and VC choice at an I/O port |
| `rtl/bidor_choice_calc.sv` | weights -> bitmaps |
| `rtl/qstar_noc.sv` | the mesh (top) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_qstar_workloads` |
| `tb/nrank_model.sv` | behavioural N-Rank (weights from a traffic matrix) |

## Simulating

With Verilator 5, from the top of the tree:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
          rtl/qstar_pkg.sv tb/nrank_model.sv tb/tb_qstar_noc.sv \
          --top-module tb_qstar_noc -Mdir obj_noc -o sim
./obj_noc/sim
```

The package files go first on the command line. The library search (`-y`)
finds modules but not packages. Replace the testbench name to run any other
testbench. Each one prints
`TB_RESULT checks=<n> failures=<m>` and stops, and has a watchdog that
counts a failure if it hangs. All of them run at the default 5 x 5 size in
well under a second.

What the testbenches establish:

* `tb_qstar_noc` drives the full 5 x 5 network from all 20 ports. Its phases
  are: zero-load latency with reset bitmaps; all bitmaps written to YX over
  the bus; bitmaps computed by the calculator from random weights and read
  back; then heavy random traffic with sinks that stop returning credits for
  long stretches. It checks every flit's exit port, content, per-pair order,
  VC and wormhole contiguity, and that every packet arrives. It also counts
  VC0 and VC1 packets, bus writes, calculator runs, credit exhaustion,
  injection back-pressure, contention delays and multi-flit packets; each
  must occur.
* `tb_qstar_router` drives one interior router on all inputs and both VCs
  against a reference route rule. It checks ports, VCs, order, wormhole
  locking, credits (none lost, none exceeded) and the 2-cycle hop.
* `tb_bidor_choice_calc` checks the published 4 x 4 example (bitmap of node
  11 and the 1.57 / 2.17 costs), all 625 bits for random 5 x 5 weights, and
  the 625-cycle pass length.
* `tb_bidor_inject`, `tb_bidor_bitmap`, `tb_vc_fifo`, `tb_dor_route` and
  `tb_rr_arbiter` test each unit against an independent model. The
  `dor_route` test is exhaustive over an 8 x 8 grid.

### Synthetic workloads

`tb_qstar_workloads` runs the four traffic patterns of the Q-StaR evaluation
on the 5 x 5 edge-I/O network:

* uniform;
* shuffle: p -> (2p + floor(2p/20)) mod 20;
* a fixed random permutation;
* overturn: each port sends to the point-mirrored port on the opposite edge.

The port-level definitions of the last three are choices of this design.
Sources offer 4-flit packets at 30% load per port for 3000 cycles, and every
flit is checked as in `tb_qstar_noc`. Each pattern runs first with plain XY
(bitmaps zero). It then runs with BiDOR bitmaps, computed by the on-chip
calculator from three kinds of NR-weights:

* **load**: the per-router load measured in the XY run, a profiled weight set;
* **model**: the behavioural N-Rank model above;
* **plot**: the published weight profiles for this network. These exist for
  uniform and overturn only, and were read off the plots by eye.

Results from one seed. Latency is in cycles, from packet generation to exit,
source queueing included. LCV is the coefficient of variation of the number
of flits each router forwards; lower means better balance.

| pattern | routing | avg / max latency | LCV | packets on VC1 |
|---|---|---|---|---|
| uniform | XY | 18.3 / 85 | 0.357 | 0% |
| uniform | BiDOR, load | 15.4 / 67 | 0.104 | 73% |
| uniform | BiDOR, model | 28.1 / 162 | 0.632 | 78% |
| uniform | BiDOR, plot | 15.4 / 63 | 0.107 | 73% |
| shuffle | XY | 13.2 / 47 | 0.313 | 0% |
| shuffle | BiDOR, load | 15.9 / 104 | 0.268 | 70% |
| shuffle | BiDOR, model | 23.4 / 160 | 0.650 | 75% |
| permutation | XY | 19.5 / 109 | 0.345 | 0% |
| permutation | BiDOR, load | 19.8 / 166 | 0.205 | 64% |
| permutation | BiDOR, model | 367.7 / 2796 | 0.669 | 70% |
| overturn | XY | 34.4 / 169 | 0.265 | 0% |
| overturn | BiDOR, load | 360.4 / 2919 | 0.439 | 61% |
| overturn | BiDOR, model | 30.4 / 133 | 0.264 | 100% |
| overturn | BiDOR, plot | 28.8 / 139 | 0.264 | 100% |

With uniform traffic and an edge-heavy weight set (load or plot), BiDOR cuts
the load imbalance to less than a third. Latency also falls, by about 16%.
This is in line with the published trend: an LCV of 0.28 falling to 0.08
for the same case.

The N-Rank model as implemented here does not get there. In this network
every packet enters and leaves at an edge router. XY and YX paths between
two ports on the same or adjacent edges run along the rim. Under XY, edge
routers forward about 4,600 flits and interior routers about 1,900. The
model's weight spreads out along all minimal paths and forgets its
destination, so it concentrates in the middle. The bitmaps then send even
more traffic round the rim, which is the opposite of what is wanted. The
published description leaves the relevant details open:

* how edge ports enter the traffic matrix and the topology;
* the exact channel-use test;
* normalisation.

Two readings tried offline also gave centre-heavy weights: ports as separate
nodes, and a channel test that ignores direction.

Beyond saturation the edge-heavy weights raise throughput. With uniform
traffic offered at 0.8 flits per port per cycle, XY accepts 0.431 and
BiDOR with the plotted weights accepts 0.566, 31% more. The published gain
at saturation is 43%. At 0.5 offered, XY is already saturated (0.429
accepted, 268-cycle average latency). BiDOR carries 0.488 at a 27-cycle
average.

With fixed bitmaps, every flow keeps one route and one VC. No packet is
ever delivered out of order: the testbench checks order per port pair, so
the reorder buffer a receiver would need stays empty.

Profiled weights help where the imbalance is broad (uniform, and the LCV of
shuffle and permutation). They hurt overturn: its few heavy flows all move
together onto the YX route, and that route then saturates. These numbers are
reported, not checked.

## Departures from the published design and open points

* **Buffer sharing.** The evaluated routers have 64 flits per input port
  shared by the two VCs. Here the space is split 32/32. A dynamically
  shared buffer would give one VC more room when the other is idle.
* **Allocator, arbitration, credit delay, flit format, payload width, I/O
  numbering, reset value and the configuration bus** are not specified by
  the scheme. The choices above are this design's.
* **The route-choice calculator is in hardware.** The scheme computes it
  offline. Bitmaps can still be loaded directly.
* **NR-weights.** The behavioural N-Rank model follows the published
  equations but does not reproduce the published edge-I/O weight profile
  (see above). Weights from it are therefore a weak choice for this
  network. Measured or published weights work as intended.
* **Only the edge-I/O mesh is built.** The scheme's motivating example also
  uses a plain mesh with an I/O port at every node. That needs a fifth
  (local) router port and is not supported.
* **Rewriting bitmaps while traffic flows.** A packet in flight keeps its VC
  and route. The next packet of the same pair may take the other route and
  overtake it. The scheme accepts such occasional reordering.
  Nothing here prevents it: quiesce the affected sources before rewriting if
  strict order matters.
* **Sink capacity.** Ejection uses the same credit protocol as a mesh
  channel. A sink must accept 32 flits per VC or return credits
  accordingly.
