# A network on chip with multiplicative circulant topology

A multiplicative circulant MC(s,k) is a ring of N = s^k nodes in which every
node also has chords to the nodes s, s^2, ..., s^(k-1) places away on either
side. With only 2k links per node it reaches every node in few steps: the
64-node MC(4,3) built here has a diameter of 5 hops, where an 8 x 8 mesh has
14. Because all link lengths are powers of one base, a router can route
without any table and without knowing the path: from its own number and the
packet's destination number alone it picks the link whose length is closest
to the remaining distance, sends the packet one hop, and leaves the rest to
the next router. The packet carries nothing but the destination number.

This repository holds synthesizable SystemVerilog for such a network: the
next-hop unit, a router built around it and the complete network, plus
self-checking testbenches. The routing rule and the topology come from the
published description of the scheme (Shchegoleva, Romanov, Lezhnev and
Amerikanov, "Routing in Networks on Chip with Multiplicative Circulant
Topology"). That description gives no router microarchitecture, so buffers,
flow control, arbitration and timing are this design's own; they are
marked as such below and in each file's header.

## The topology

Nodes are numbered 0 .. N-1. The generatrices are g_j = s^j for
j = 0 .. k-1, and node i is linked to (i + g_j) mod N and (i - g_j) mod N.
Every undirected link is built as two one-way valid/ready channels.

For s = 2 the longest generatrix is N/2, and stepping N/2 left or right
reaches the same node. Such a network has one port per node fewer: only the
"right at N/2" port is wired, and the two nodes N/2 apart are joined
right-port to right-port.

## The next-hop rule (`mc_route_calc`)

This is the heart of the design. The unit is combinational; it takes the
router's number `cur` and the packet's destination `dst` and returns the
output port:

1. Relative destination: `rel = (dst - cur) mod N`. If `rel = 0` the packet
   has arrived and goes to the local port.
2. Direction: if `rel <= N/2` the packet goes right (towards higher
   numbers) and the remaining distance is `D = rel`; otherwise it goes left
   and `D = N - rel`.
3. Step: let `s^j` be the largest generatrix not above `D`, and `s^(j+1)`
   the next longer one (if `j < k-1`). Of the two, the one closer to `D` is
   used. Choosing `s^(j+1)` oversteps the destination on purpose; the next
   router sees the destination behind it and routes back. A tie goes to the
   shorter generatrix.

Each step strictly shrinks the distance to the destination, so a packet
always arrives. For every configuration listed under "Evaluated sizes" the
rule yields shortest paths for all source/destination pairs (checked
against breadth-first search, exhaustively from node 0 and by symmetry for
all pairs).

Worked example in MC(4,3), generatrices 1, 4, 16, from node 5 to node 17:
at node 5, `rel = 12`, go right, `D = 12`; the candidates 4 (off by 8) and
16 (off by 4) give 16, so the packet goes to node 21. At node 21,
`rel = 60 > 32`, go left, `D = 4`, generatrix 4, and the packet reaches
node 17. Two hops, the second one backwards.

In hardware, step 3 is k comparisons of `D` against constant generatrices
(largest fit wins), one table lookup for the next longer one and one
comparison of the two differences. The generatrices are elaboration-time
constants; nothing is stored per router except its number, which is a
parameter.

### Port numbering

| port | meaning (MC(4,3)) |
|------|-------------------|
| 0 | local: to and from the node's IP core |
| 1 .. k | left at s^(k-1), ..., s, 1  (-16, -4, -1) |
| k+1 .. 2k | right at 1, s, ..., s^(k-1)  (+1, +4, +16) |

Port 0 is also the "arrived" value of the next-hop unit. For s = 2 port 1
(left at N/2) is never chosen and never wired.

## The router (`mc_router`)

A router has 2k+1 ports. Each input port has a 2-entry FIFO (`mc_fifo`).
The packet at the head of each FIFO is routed by its own `mc_route_calc`.
Each output port has a round-robin arbiter (`mc_rr_arbiter`) over the
inputs whose head wants that port; the winner's head is switched onto the
output, and it leaves its FIFO when the output is ready.

Packets are single words `{dst, data}`: `dst` is ceil(log2 N) bits (6 for
MC(4,3)), `data` is `DATA_W` bits (32 by default).

Every channel uses valid/ready: a word moves at a rising clock edge when
both are high. An offered word stays on the channel, unchanged, until taken;
the arbiter holds its grant while its output is stalled so that this holds
for router outputs too. Assertions in the router check both rules and that
each grant is one-hot. `in_ready` is the FIFO's registered "not full". No
ready signal depends combinationally on another router, so the ring of
routers has no combinational loop.

Timing: a packet written into a FIFO at edge t is offered on its output
during the next cycle. Unblocked, every router costs one cycle, so a packet
accepted at the injection port at edge t is taken from its destination's
ejection port at edge t + hops + 1 (t + 1 for a packet sent to its own
node). Reset is synchronous and active low.

## The network (`mc_noc`)

`mc_noc` instantiates N routers, gives router m the number m, and wires
router m's right port at s^j to router (m + s^j) mod N's left port at s^j
(with the s = 2 exception above). The local ports are the network's
interface to the IP cores, which are outside this design:

| signal | dir | width | meaning |
|--------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `inj_valid`, `inj_ready` | in / out | N | core i offers / router i takes a packet |
| `inj_pkt` | in | N x (AW+DATA_W) | packet `{dst, data}` |
| `ej_valid`, `ej_ready` | out / in | N | router i offers / core i takes a packet |
| `ej_pkt` | out | N x (AW+DATA_W) | delivered packet, `dst` = i |

Parameters (all modules): `S` (default 4), `K` (default 3), and for the
router and network `DATA_W` (32) and `BUF_DEPTH` (2). The defaults build
MC(4,3), the circulant of the scheme's worked example; shared defaults and
helper functions live in `mc_pkg`.

## Evaluated sizes

The scheme was evaluated on MC(2,4), MC(2,5), MC(2,6), MC(3,4), MC(5,3),
MC(3,5), MC(6,3), on MC(5,4), MC(3,6), MC(6,4), MC(7,4) (diameter and mean
distance only) and on the family MC(s,2), s = 3..10. The RTL is
parameterized for all of them; only MC(4,3) is the default build. For each
of them `tb_mc_workloads` confirms that the next-hop unit routes on
shortest paths and reproduces the diameters 2, 3, 4, 8, 6, 10, 12 and mean
distances 2.67, 4.80, 4.00, 5.78, 6.86 quoted for MC(2,4), MC(2,6),
MC(3,4), MC(5,4), MC(3,6), MC(6,4), MC(7,4). The quoted mean distances for
MC(2,4) (1.33) and MC(2,6) (2.00) come from the approximation k/3; the
exact values are 1.44 and 2.11.

## Verification

| testbench | what it does |
|-----------|--------------|
| `tb_mc_route_calc` | every (cur, dst) pair of MC(4,3) and MC(2,4): port against a reference model of the rule, every step on a shortest path, flags, the 5 -> 21 -> 17 example |
| `tb_mc_router` | router 5 of MC(4,3) with all 7 inputs loaded and random output back-pressure: each packet on the right port, in order, none lost; one-cycle hop on an idle router; contention, stalls and full buffers all occur |
| `tb_mc_noc` | the whole 64-node network at default parameters: all N x N pairs as shift traffic with exact latency hops + 1, then random traffic with back-pressure; counts left, right and overstepping steps, self-delivery, contention delays, injection stalls and ejection back-pressure, and checks that link transfers equal the reference hop count |
| `tb_mc_workloads` | the next-hop rule on all evaluated configurations, 16 to 2401 nodes (uses `tb_mc_walk`) |

`tb_mc_ref_pkg` holds the reference models (breadth-first search and the
routing rule written with plain integers). Every testbench ends with a line
`TB_RESULT checks=N failures=M`. To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/mc_pkg.sv tb/tb_mc_ref_pkg.sv tb/tb_mc_noc.sv --top-module tb_mc_noc
    ./obj_dir/Vtb_mc_noc

The full 64-node network flattens into a large model: building `tb_mc_noc`
takes about eight minutes, running it well under a second.

## Departures and open points

- The source describes the re-basing of the destination in two sentences
  that both speak of the case "current number greater than destination";
  the design uses the modular difference, the only reading under which
  passing through node 0 works.
- Tie-breaking (shorter generatrix) and the direction at exactly N/2
  (right) are this design's choices; they do not change hop counts.
- The per-router storage budget given for the scheme counts registers for
  the router count, its own number, the generatrix table, generatrix
  indices and a "primary port" with a flag. Here the first three are
  constants; the "primary port" is not explained in the source and has no
  counterpart.
- Buffers, the valid/ready handshake, round-robin arbitration, one cycle
  per hop, single-word packets and the 32-bit payload are not from the
  source.
- There is no deadlock avoidance (no virtual channels); the source does not
  discuss deadlock. The tests run to completion, but cyclic buffer waits
  are possible in principle under heavy load.
- The table-driven source routing (a breadth-first search per packet and a
  path of port numbers carried in the packet), which the source describes
  as the earlier approach and compares against, is not built, nor are the
  IP cores at the nodes.
- FPGA resource figures published for the scheme (ALMs, registers) are not
  comparable with this design, whose router microarchitecture differs.
