# FoldedHexaTorus inter-chiplet network in SystemVerilog

A multi-chiplet package needs a network between its chiplets. On an organic or glass
substrate a die-to-die (D2D) link gets slower, or needs more power, as it gets longer. So a
good topology keeps every link short and still gives a small diameter. The FoldedHexaTorus
keeps every link short by placing the chiplets on a hexagon instead of a rectangular grid.
Each chiplet then has six neighbours at equal distance. Along each of the hexagon's three axes,
every line of chiplets is closed into a *folded* ring. A folded ring is a ring whose links hop
over exactly one chiplet, so no link is longer than twice the chiplet pitch, and the wrap-around
link of a plain torus is never needed. The result is a network of radix 6. A hexagon of radius
R holds N = 3R² + 3R + 1 chiplets, and its diameter is R + 1 hops.

This RTL builds that network cycle-accurately:

- one router per chiplet;
- six D2D links per chiplet, each modelled with its PHY and wire latency;
- credit-based virtual-channel flow control;
- a routing table computed during elaboration.

The cores, caches and memories that use the network are not part of it. Their router ports are
the top-level ports.

| File | Contents |
|------|----------|
| `rtl/fht_pkg.sv` | flit and credit types, hexagon coordinates, folded-ring wiring, link delay arithmetic |
| `rtl/fht_network.sv` | top level: N routers and 6N one-way links |
| `rtl/fht_router.sv` | input-queued virtual-channel router |
| `rtl/fht_route_unit.sv` | elaboration-time shortest-path table and lookup |
| `rtl/fht_vc_fifo.sv` | one virtual-channel buffer |
| `rtl/fht_rr_arbiter.sv` | round-robin arbiter |
| `rtl/fht_link.sv` | D2D channel: flit pipe one way, credit pipe the other |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Coordinates and wiring

Each chiplet has axial coordinates (q, s), with |q| ≤ R, |s| ≤ R and |q + s| ≤ R.

- **Numbering.** Chiplets are numbered row by row, where a row is a fixed s running from −R to
  +R. Within a row, q rises. Row s has 2R + 1 − |s| chiplets, so R = 2 gives rows of
  3, 4, 5, 4, 3. `node_index`, `node_q` and `node_s` in `fht_pkg` convert between index and
  coordinates.
- **Lines.** The three axes are lines of constant s (axis 0), constant q (axis 1) and constant
  q + s (axis 2). Every chiplet lies on exactly one line of each axis. Lines have between R + 1
  and 2R + 1 chiplets.
- **Folding.** A line of k chiplets, at positions 0 … k−1, is closed into the ring
  0 → 2 → 4 → … → (the largest even) → (the largest odd) → … → 3 → 1 → 0. Consecutive ring
  members are never more than two positions apart, so a link passes over at most one chiplet.
  `ring_next` and `ring_prev` compute this order.
- **Ports.** Router port 2a is "next on axis a" and port 2a + 1 is "previous on axis a". A link
  leaving port d therefore arrives on port d ^ 1 of the neighbour, which is what
  `fht_network` wires. Ports 6 … 6 + NUM_CORES − 1 are the local cores.

Breadth-first search over this wiring gives a diameter of exactly R + 1 for R = 2 … 8, which
matches the formula the topology is defined by. `tb_fht_route_unit` checks this for 37 chiplets
(R = 3) with an independent Floyd-Warshall computation. It also checks that every link is
bidirectional and spans at most two hexagon steps.

## Routing

`fht_route_unit` holds a constant table, `TABLE[src][dst]`. Each entry holds the first
direction of one shortest path and its hop count. A constant function runs one breadth-first
search from every source during elaboration. Neighbours are expanded in port order 0 … 5, so
ties always go to the lowest-numbered direction. This makes the routes deterministic and
minimal.

The table is the same for every router, so the router is a single design. Its chiplet number
comes in on the strapped input `node_id_i`, not on a parameter. A flit whose destination is the
router's own chiplet leaves on core port 6 + dst_core.

The table has N² entries of 7 bits: 2.5 kbit at R = 2 and 9.6 kbit at R = 3. A router only
needs its own row, and synthesis keeps only that row once `node_id_i` is tied off.

## Router

`fht_router` has P = 6 + NUM_CORES ports. Each input has NUM_VC buffers of VC_DEPTH flits.
A flit crosses the router in three clock edges:

1. **Route and write.** The flit's output port is looked up as it arrives. The flit is written
   into the buffer of its virtual channel together with that port and the virtual channel it
   will use downstream.
2. **Allocate.** An input VC may compete when all three of the following hold:
   - its head flit has a credit for its downstream VC;
   - if it is a head flit, that downstream VC is free;
   - its output port exists.

   Each input picks one competing VC round-robin. Each output then grants one of the inputs that
   picked it, also round-robin. That is a separable allocator: an input that loses simply tries
   again next cycle. The winner is popped and written into the switch register. A credit for
   the freed slot goes back upstream on the same edge.
3. **Traverse.** The switch register drives the output register.

An output VC is reserved by a head flit and released by the tail flit. This is wormhole
allocation, so flits of different packets never interleave on a VC. Per-output credit counters
start at VC_DEPTH. Each flit sent decrements a counter, and each credit returned increments it.
Assertions check for buffer overflow and underflow, credit overflow, and VC requests beyond the
last VC.

### Deadlock freedom by hop-indexed virtual channels

A flit injected by a core travels on VC 0 over its first link. Every router it passes through
moves it up one VC: a flit arriving on VC v leaves on VC v + 1. Ejection to a core keeps the VC.
A flit on its h-th link therefore always uses VC h − 1. Because every route is minimal, h never
exceeds the diameter R + 1.

Channel dependencies only ever point from VC v to VC v + 1, so they cannot form a cycle, and the
network is deadlock free whenever NUM_VC ≥ R + 1. With the four VCs of the reference setup, that
covers R ≤ 3 (up to 37 chiplets). For larger hexagons, raise NUM_VC: up to 8 VCs fit the 3-bit
VC field. `fht_network` prints a warning during elaboration if NUM_VC is too small. At run time
the `a_vc_in_range` assertion fires if a flit would need a VC that does not exist.

This is the main departure from the original proposal. There, routes come from Dijkstra
shortest paths made deadlock free with a turn model, cycle breaking and a dual graph, and the
VCs are left free for performance. Both schemes route minimally. They differ in which shortest
path is chosen and in how the VCs are used.

## D2D links and latency

`fht_link` is a pure delay line in each direction: flits forward, credits backward. Its latency
is

    LAT = 2·PHY_LAT + ceil(LINK_LEN_UM · √εr / c)   [cycles of 1 ns]

The formula counts one PHY at each end of the link plus the time of flight on the substrate.
With PHY_LAT = 2, a 17.5 mm link and √εr = 1.761 (organic substrate, εr = 3.1), the flight time
is 103 ps. That rounds up to one cycle, so LAT = 5. Any link under about 170 mm costs one flight
cycle. For glass (εr = 3.3) set SQRT_ER_MILLI = 1817.

At zero load, a packet from one core to a core h links away takes

    3·(h + 1) + LAT·h  cycles

from the core's output register to the destination core's input. That is 3, 11, 19 and 27 cycles
for h = 0 … 3 at the defaults. `tb_fht_network` checks these numbers exactly.

The link data rate falls with link length. This sets a link's bandwidth in bits per second, and
therefore how many flits a packet needs. It has no counterpart in this model: every link moves
one flit per cycle, and the testbenches choose packet lengths directly.

## Interface and timing

`fht_network` ports, all indexed `[chiplet][core]`:

| Port | Dir | Type | Use |
|------|-----|------|-----|
| `clk_i`, `rst_ni` | in | logic | 1 ns clock, asynchronous active-low reset |
| `inj_flit_i` | in | `link_flit_t` | core → network: `valid`, `vc` (must be 0), `flit` |
| `inj_credit_o` | out | `link_credit_t` | one pulse per injection buffer slot freed |
| `ej_flit_o` | out | `link_flit_t` | network → core; `vc` is the VC it arrived on |
| `ej_credit_i` | in | `link_credit_t` | core returns one pulse (with that `vc`) per flit consumed |

A core starts with VC_DEPTH credits for VC 0 and may send a flit only while it holds one. It
must likewise have room for VC_DEPTH flits per VC on its ejection side. A `flit_t` carries:

- head and tail bits (both set for a one-flit packet);
- the destination chiplet and core;
- the source chiplet;
- 32 data bits.

All outputs are registered, and every input is sampled on the rising edge.

## Verification

Each testbench drives its block and compares the outputs against an independent model. It ends
with a `TB_RESULT checks=… failures=…` line, and it has a watchdog.

- `tb_fht_vc_fifo`: directed fill and drain, then random push and pop against a queue model.
- `tb_fht_link`: flit and credit delay against a history buffer, for the default link and a
  200 mm link (6 cycles).
- `tb_fht_route_unit`: the wiring and diameter properties above, and every route walked to its
  destination with the expected hop count.
- `tb_fht_router`: a router at the centre of a 37-chiplet network. Directed tests cover the
  3-cycle latency, the v → v + 1 VC rule, ejection, credit stall after exactly VC_DEPTH flits,
  and wormhole ordering. A random phase of 20 000 cycles follows, with all ports loaded and every
  flit checked for the right port, VC and order.
- `tb_fht_network`: the whole network at its default parameters. It first runs the zero-load
  latency checks above. It then runs five traffic patterns of multi-flit packets:
  - random uniform, with compute chiplets only;
  - heterogeneous, where memory chiplets take the leftmost and rightmost chiplet of each row;
  - random permutation;
  - tornado;
  - neighbour.

  A scoreboard checks every packet for destination, source field, VC = hop − 1, order and
  completeness. The testbench counts each mechanism and fails if any count stays zero:
  - credit stalls;
  - busy-VC waits;
  - switch conflicts;
  - core back-pressure;
  - multi-flit packets;
  - use of the top VC;
  - diameter-length routes;
  - local delivery.

To simulate one testbench with Verilator 5, from the directory above `rtl/` and `tb/`:

    verilator --binary --timing --assert -j 4 -Irtl -Itb rtl/fht_pkg.sv tb/tb_fht_network.sv \
        --top-module tb_fht_network -Mdir obj -o sim
    ./obj/sim +verilator+rand+reset+2

The network testbench builds in under a minute on four threads and runs in a few seconds. To
simulate another size, override `R` (and `NUM_VC` if R > 3) on `fht_network`. In its testbench,
the local parameter `R` has to change too.

## What follows the original design and what does not

Taken from the original design:

- the topology: hexagonal placement, three axes, folded rings, radix 6, diameter R + 1;
- one router per chiplet with 8 cores;
- four VCs of four flits each, with credit-based flow control;
- 3-cycle router latency and 2-cycle PHYs at a 1 ns cycle;
- the link flight time from εr;
- the traffic patterns and the heterogeneous placement idea.

Choices made here:

- **Routing and deadlock avoidance:** hop-indexed VCs, described above.
- **Ring order and port numbering:** the folded ring order and the port numbering.
- **Flit format and widths:** the flit format and its field widths (NODE_W = 9, CORE_W = 4,
  DATA_W = 32).
- **Pipeline and allocators:** the exact 3-stage split and the separable round-robin allocators.
- **PHY count:** counting the PHY latency twice per link.
- **Link length:** a 17.5 mm link, since no length is given.
- **Default size:** R = 2 (19 chiplets), the smallest drawn instance.

Not modelled:

- the dependence of link bandwidth on length, and the flit counts that follow from it;
- area and power;
- the trace-driven workloads;
- the cores, caches, memories and IO chiplets themselves.
