# A virtual-channel 3D-mesh NoC for two-tier monolithic 3D integration

## The idea

In monolithic 3D (M3D) integration, a second tier of transistors is grown on
top of a finished first tier. The top tier has to be processed at low
temperature, so its transistors are slower. The bottom tier has to survive
that processing, so its wiring is tungsten, not copper, and its wires are
slower. A network-on-chip router built across both tiers therefore has three
choices for each pipeline stage:

* **BT**: build the stage in the bottom tier only. Transistors are nominal.
* **TT**: build it in the top tier only. Transistors are degraded.
* **MT**: split it over both tiers. Wires are shorter, but half the logic is
  degraded.

Each inter-router link also runs either in the fast copper top tier or in the
slow tungsten bottom tier. A link can only attach to a stage that touches
its tier. A process-variation-aware design picks these placements per
stage and per link to minimise the network's energy-delay product. The
picking is done at design time, by a search over placements.

None of those placement choices changes what the circuit computes. They
change only how fast and how power-hungry each part is. This RTL is
therefore the logic that all placements share:

* a 64-node network of three-stage virtual-channel routers;
* four virtual channels per port, 32-bit flits and six-flit packets;
* XYZ dimension-order routing on a 3D mesh;
* a per-port record of the tier placement, checked at elaboration against
  the rule that a link must share a tier with the router stage it feeds.

## Where this departs from the published design

* **Topology.** The main network studied is a small-world NoC: an irregular
  network with power-law distributed links up to six hops long, routed with
  layered shortest-path routing (ALASH). Its link list comes out of the
  optimiser and is not published, so it cannot be wired. The RTL builds the
  other network that was studied: a 3D mesh of the same 64 nodes with XYZ
  routing. Its shape, 4 x 4 x 4, is this design's choice. The routers are
  generic apart from route computation.
* **Tier placement** is a pair of router parameters (`PORT_STAGE_TIER`,
  `LINK_TIER`). They default to all-MT stages with top-tier links, which
  obeys the rule. The published placements depend on the benchmark and on
  the process corner, and are only shown as statistics.
* **Micro-architecture.** Only the names of the three router stages, their
  delay equations and the sizes v = 4, w = 32 and six flits per packet are
  given. These parts are this design's own, each the simplest one that does
  the job:
  * buffer depth;
  * credit flow control;
  * the allocator circuits;
  * the flit format;
  * the network interface.
* **Not built:** cores, caches and the coherence protocol, which are the
  simulated host system. Also not built: the physical tiering itself
  (monolithic inter-tier vias, tungsten and copper wiring).

## Flits and packets

A flit is `flit_t` in `noc_pkg`: `{valid, ftype[1:0], vc[1:0], data[31:0]}`.
`ftype` is HEAD, BODY, TAIL or HEADTAIL. Every packet has six flits. The head
flit's data word is `{tag[19:0], src[5:0], dest[5:0]}`, and the five
following flits carry payload words. The last flit is the tail. Nodes are
numbered `id = x + MESH_X*(y + MESH_Y*z)`. A credit is
`credit_t = {valid, vc[1:0]}`: "one slot of this VC's buffer was freed".

## The router pipeline (`vc_router`)

Seven ports: 0 local, 1 X+, 2 X-, 3 Y+, 4 Y-, 5 Z+, 6 Z-. For a head flit
that does not have to wait, one cycle per line:

| cycle | what happens | module |
|---|---|---|
| c | the flit on `in_flit[i]` is written into the FIFO of its VC | `input_unit` |
| c+1 | the head is at the FIFO front, its XYZ route is computed, and it asks for an output VC | `route_xyz`, `vc_allocator` |
| c+2 | it asks for the switch, if the output VC has a credit; the winner is popped, its credit goes upstream and the flit enters the switch-traversal register | `switch_allocator` |
| c+3 | the flit crosses the crossbar onto `out_flit[o]` | `crossbar` |

Body and tail flits skip VC allocation: the input VC keeps the output
port and output VC from head to tail. A flit may take part in switch
allocation only when the router's credit counter for its output VC is above
zero. That counter starts at `BUF_DEPTH`, drops by one for each flit sent and
rises by one for each `credit_in`. When the tail wins the switch, its
output VC is released. The VC can be granted again in the next cycle, and the
next packet's head waits in the downstream FIFO behind the old tail.

Allocators:

* **VC allocator.** One round-robin arbiter per output port over all 28
  input VCs. The winner gets the lowest free output VC. At most one
  allocation per output port per cycle.
* **Switch allocator.** Separable and input-first. A round-robin arbiter per
  input picks one eligible VC. A round-robin arbiter per output picks one
  input among those whose chosen VC wants that output. An input's pointer
  moves only when it wins both stages.

`events` gives four per-cycle flags: `va_stall`, `sa_stall`, `credit_stall`
and `flit_out`.

**Timing across the network.** `noc_link` adds `LINK_LATENCY` register
stages (1 by default) in each direction. A router therefore costs three
cycles and a link one. The credit loop, from a pop back to a usable upstream
credit, is five cycles. `BUF_DEPTH = 6` covers that loop and holds one
whole packet, so a packet on an idle network streams without a bubble. The
packet is delivered `(3 + LINK_LATENCY) * hops + 10` cycles after its tx
handshake. The testbenches check this exact count.

## Tier placement rule

`noc_pkg` defines `stage_tier_e` (`TIER_BT`, `TIER_TT`, `TIER_MT`),
`link_tier_e` (`LINK_TOP` for copper, `LINK_BOTTOM` for tungsten) and
`tier_rule_ok()`. The rule: a top-tier link needs a TT or MT stage, and a
bottom-tier link needs a BT or MT stage. `vc_router` stops elaboration with
an error if any port breaks it. The crossbar attaches to no link, so the
rule does not constrain it, and it has no parameter. How slow a tungsten
link is can only be expressed in a clocked design as extra link stages,
through `noc_link`'s `LATENCY`.

## Network interface and top level

`network_interface` takes a `packet_t` from the core with a valid/ready
handshake. It sends the packet as six flits, one per cycle while credits
last. Successive packets rotate over the four VCs. On the receive side it
reassembles packets per VC, because packets on different VCs can arrive
interleaved at the ejection port. It pulses `rx_valid` with the whole
packet, returns a credit for every flit one cycle after it arrives, and
never back-pressures.

`noc_mesh_top` has parameters `MESH_X`, `MESH_Y`, `MESH_Z` (4, 4, 4),
`BUF_DEPTH` (6) and `LINK_LATENCY` (1). Its ports are unpacked arrays with
one entry per node: `tx_valid`, `tx_ready`, `tx_pkt`, `rx_valid`, `rx_pkt`
and `events`. The ports on the faces of the mesh are tied off. XYZ routing
never uses them, and it keeps the mesh free of deadlock.

## Files

* `rtl/noc_pkg.sv`: types, sizes and the tier rule.
* `rtl/rr_arbiter.sv`: the round-robin arbiter the allocators use.
* `rtl/route_xyz.sv`, `input_unit.sv`, `vc_allocator.sv`,
  `switch_allocator.sv`, `crossbar.sv`: the parts of the router.
* `rtl/vc_router.sv`, `noc_link.sv`, `network_interface.sv`: the router,
  the link and the core interface.
* `rtl/noc_mesh_top.sv`: the network.
* `tb/tb_<module>.sv`: one self-checking test per module.
* `tb/tb_noc_full.sv`: the end-to-end test at the default 64-node size.
* `tb/tb_noc_locality.sv`: a locality workload.

## Tests and how to run them

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Build one with plain verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/noc_pkg.sv tb/tb_noc_mesh_top.sv --top-module tb_noc_mesh_top
./obj_dir/Vtb_noc_mesh_top
```

* **Unit tests.** Each one checks its module against a reference model.
  * `tb_route_xyz`: all 64 destinations from two positions.
  * `tb_crossbar`: random permutations.
  * `tb_vc_allocator`: a model of the busy bits, lowest-free-VC grants and
    fairness.
  * `tb_switch_allocator`: legality of every match, service of a lone
    requester, and round-robin service of seven inputs in seven cycles.
  * `tb_input_unit`: one cycle from head write to VC request, VC rewrite,
    credits, and two VCs interleaved.
  * `tb_vc_router`: three-cycle router latency, two inputs contending for one
    output, and credit back-pressure.
  * `tb_noc_link`: exact latency.
  * `tb_network_interface`: flit format, credit stall, VC rotation and
    interleaved reassembly.
* **`tb_noc_mesh_top`** runs a 2 x 2 x 2 mesh, which builds in seconds, and
  `tb_noc_full` runs the default 4 x 4 x 4 mesh. Verilator's C++ build of the
  64-router network takes about ten minutes; the run takes under a second.
  Both tests:
  * measure uncontended latency on an idle network;
  * send uniform random traffic;
  * send everything to one hot-spot node;
  * check every packet against a scoreboard;
  * require that VC-allocation stalls, switch conflicts, credit stalls,
    VC interleaving at ejection and all three mesh dimensions each occurred.
* **`tb_noc_locality`** runs a 4 x 4 x 2 mesh. 77.6 % of its packets go to
  a neighbour at distance 1; this is the share of RADIX traffic reported for
  routers one hop apart. The rest are split evenly between distances 2 and
  3 (the split is this test's choice). It checks delivery, the traffic mix,
  and that short packets arrive faster than long ones.

## How far to trust it

The mechanisms were each driven and checked. The shape of the pipeline
follows the three-stage router model the design uses. The cycle counts come
from this implementation, not from published numbers, because none were
published for cycle latency. The benchmark traffic of the evaluation
(SPLASH-2 and PARSEC under full-system simulation) is not reproduced. The
energy-delay numbers depend on the tier placement and on circuit
characterisation, so they are outside what RTL can show.
