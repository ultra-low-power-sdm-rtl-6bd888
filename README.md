# SDM circuit-switched mesh NoC with hard-wired cross-points

Many embedded SoCs and AI chips run a fixed set of tasks. Which core talks to which,
and at what bandwidth, is known before the chip runs. This network-on-chip uses that
knowledge. It has no packet routing at run time. Each communication flow gets its own
*circuit*: a fixed set of wires from the source core to the destination core, as wide
as the flow's bandwidth needs. The circuit is set up once and kept for as long as the
application runs.

Every link is split into narrow slices called **units**. This is spatial division
multiplexing (SDM). A circuit is a chain of units, one per link, joined inside each
router. Circuits never share a unit, so packets never contend. A router therefore has
no buffers beyond one pipeline register, and no routing, arbitration or flow control.
It is reduced to a unit-granular switch. Part of that switch is made of **hard-wired
cross-points**: fixed wires with no switch element, which draw less power than
programmable cross-points.

The RTL follows the architecture of Zaeemi and Modarressi, *Ultra Low-Power SDM-based
Circuit-Switching for Networks-on-Chip*. Where that description stops (configuration,
framing, the exact hard-wired pattern), this implementation makes its own choices. They
are listed in [Departures and own choices](#departures-and-own-choices).

## Default configuration

| quantity | value | origin |
|---|---|---|
| link width | 128 data wires | published evaluation |
| unit size m | 4 wires, so 32 units per link | published evaluation |
| hard-wired units | 12 per port (48 of the 128 wires) | published evaluation |
| programmable units | 20 per port (80 wires) | published evaluation |
| packet size | 1024 bits | published evaluation |
| mesh | 4 x 4 (`MESH_X`, `MESH_Y`) | the mesh size of the smallest evaluated applications |
| interface channels | 4 transmit + 4 receive per node (`NUM_CH`) | own choice |
| valid wire | 1 per unit, so a link is 32 x 5 = 160 wires | own choice |

The published text also reports a router synthesised with m = 8 and 25 % hard-wired
cross-points. All performance results use m = 4 with 48 hard-wired wires, so those are
the defaults here. Both are parameters.

## How a circuit is built

A unit is `UNIT_BITS` data wires plus one valid wire. Links, input registers and
crossbars are all sliced into units, and a unit is the smallest thing that can be
switched.

A circuit of width W = k·m bits uses k *lanes*. A lane is a chain of units:

```
source NI ──unit a──► router S ──unit b──► router … ──unit z──► router D ──unit y──► dest NI
           (local in)      (switch)                                (switch)  (local out)
```

At each router, a lane enters on some unit of an input port and leaves on some unit of
an output port. How it crosses depends on the class of the input unit.

* **Programmable units** (units 12…31 of every port). The crossbar can connect any of
  them to any programmable unit of any output port. This is the SDM crossbar with
  unit-level crosspoints: 100 input units against 100 output units per router. Each
  output unit holds a configuration register `{en, src}`.
* **Hard-wired units** (units 0…11 of every port). They bypass the crossbar. Unit h on
  input port p is wired permanently to unit h of output port `hw_out(p, h % 4)`
  (defined in `sdm_pkg`):

  | class k = h % 4 | local port sends it | neighbour that receives it ejects to local |
  |---|---|---|
  | 0 | east | west input → local |
  | 1 | west | east input → local |
  | 2 | north | south input → local |
  | 3 | south | north input → local |

  The other entries of the table run straight through. They exist so that, for each
  class, the five input ports map one-to-one onto the five output ports, with no
  U-turn. Every hard-wired output wire then has exactly one driver. With this table, a
  hard-wired lane is always a **one-hop** circuit to a neighbour. Each node has three
  hard-wired units, 12 bits, towards each of its four neighbours, with no switch in the
  path. A good task mapping puts heavy flows between neighbours, and those are the flows
  that benefit.

A hard-wired input unit can only reach a hard-wired output unit. A programmable input
unit can only reach a programmable output unit. So a lane is either entirely hard-wired
or entirely programmable. A single circuit may still mix both kinds of lanes.

**Multi-path.** The lanes of one circuit need not follow the same route. For example, a
4-lane flow from (1,1) to (3,3) can send two lanes east-first and two lanes south-first.
All routes are minimal, so they have the same length. Every lane advances one hop per
clock, so the parts of a flit arrive together. The receiver needs no reordering.

Finding the circuits is a design-time problem and is not part of the hardware. In the
published flow, tasks are first placed on nodes by a mapping heuristic (NMAP). Routes
are then found by solving a multi-commodity network-flow problem in which hard-wired
arcs cost less than programmable ones. The hardware only needs the result, loaded as
register settings.

## Blocks

| module | role |
|---|---|
| `sdm_pkg` | widths, `port_e`, the configuration bus type `cfg_t`, the hard-wired table `hw_out` |
| `sdm_input_reg` | input pipeline register of one router port, one cycle |
| `sdm_crossbar` | programmable unit crossbar with one `{en, src}` register per output unit |
| `sdm_router` | 5 input registers + hard-wired cross-points + `sdm_crossbar` |
| `sdm_ni_tx` | serializer: packets → flits of the circuit width on the local router port |
| `sdm_ni_rx` | deserializer: flits of the local router port → packets |
| `sdm_noc` | top level: the mesh, the links, one router + `sdm_ni_tx` + `sdm_ni_rx` per node |

Ports of a router are indexed N = 0, E = 1, S = 2, W = 3, L = 4 (local). Node n sits at
x = n % MESH_X, y = n / MESH_X. North is y − 1.

### Network interfaces

The source interface has `NUM_CH` channels, one per flow leaving the node. Each unit of
the local router port can be given to one channel, with a lane number; lanes of a
channel must be numbered 0 … k−1. The channel's flit width is k·m bits. A taken packet
goes into a 1024-bit shift register. In every cycle, lane l drives bits
[l·m +: m] and the register then shifts down by k·m. A packet therefore takes
⌈1024 / (k·m)⌉ cycles; a 20-bit circuit, for instance, takes 52 cycles with a padded
last flit. The handshake is valid/ready. Ready is also high in the cycle of the last
flit, so packets can follow back to back without a gap.

The destination interface works the same way in reverse. When any unit of a channel
carries a valid flit, the flit is gathered in lane order. It is then OR-ed into the
packet register at the current fill offset, and the offset advances by k·m. After 1024
bits, `pkt_valid` pulses for one cycle with the whole packet. Circuits have no
back-pressure, so the core must take the packet in that cycle.

## Configuration bus

One write port (`cfg`, type `sdm_pkg::cfg_t`) is broadcast to every node. A write takes
effect at the next clock edge. After reset, every cross-point and interface lane is
disabled.

| `target` | `node` | `addr` | `data` |
|---|---|---|---|
| `CFG_XBAR` | router | out_port·20 + (out_unit − 12) | `{en, 8'b0, src[6:0]}`, src = in_port·20 + (in_unit − 12) |
| `CFG_NI_TX` | node | local unit 0…31 | `{en, 3'b0, chan[3:0], lane[7:0]}` |
| `CFG_NI_RX` | node | local unit 0…31 | `{en, 3'b0, chan[3:0], lane[7:0]}` |

A hard-wired lane needs only the two interface writes. A programmable lane over H hops
also needs H + 1 crossbar writes. A circuit is torn down by writing `en = 0` to the same
addresses, and the mesh can be reconfigured for a new application at any time. Data
in flight on a circuit that is being rewritten is lost, so reconfigure between
applications, not during one.

## Timing

Every router registers its inputs, so a lane advances one hop per cycle. A packet is
taken in cycle A. Its first flit is on the source interface's output in cycle A + 1.
The circuit passes through R routers (hops + 1). The packet is then delivered
(`rx_valid`) in cycle

    A + 1 + R + ceil(1024 / W)

For example, a 16-bit circuit over 4 hops delivers 1 + 5 + 64 = 70 cycles after the
packet is taken. A hard-wired one-hop circuit has the same latency as a programmable
one; the hard-wired cross-points save power, not cycles. The crossbar is a
combinational 100:1 unit multiplexer after the input register. It is the critical path
of a router.

## Departures and own choices

Followed from the published design: unit-sliced links and crossbars with any-to-any
unit switching; a mix of hard-wired and programmable cross-points with 48 of 128 wires
hard-wired; one register per router input; one hop per cycle; serialization to the
circuit width at the end points; multi-path circuits on equal-length paths; the 2-D
mesh; 1024-bit packets.

Not described there and chosen here:

* **Where hard-wired cross-points lead.** The table above, and the choice of units 0…11
  as the hard-wired ones. A different table is a change to `sdm_pkg::hw_out` alone, as
  long as each class stays a one-driver-per-output permutation.
* **The input register.** The router figure labels it a latch. The text describes a
  register that forwards data in the next cycle, and a flip-flop is used.
* **One valid wire per unit** frames packets on a circuit. The published link width
  (128) counts data wires only.
* **The configuration bus**, its register layout, and reset clearing all circuits.
* **The interface organisation**: `NUM_CH` channels, per-unit `{chan, lane}` registers,
  valid/ready on the send side, and a one-cycle pulse on the receive side.
* **Mesh size 4 x 4 by default.** The published evaluation sizes the mesh per
  application, from 4 x 4 to 9 x 9. Other sizes only need `MESH_X` and `MESH_Y` (up to
  256 nodes with the 8-bit `node` field).

Not in the RTL: the cores, the task-mapping and route-finding software, and the
packet-switched router that served as the comparison baseline.

## Evaluated applications at the default size

A 4 x 4 mesh holds the MWD application (13 tasks, 15 flows) and the VOPD application
(16 tasks, 21 flows), provided no node has more than four outgoing or four incoming
flows. MMS (5 x 6), Telecom and auto-industry (6 x 4), GSM encoder (6 x 6), GSM decoder
(7 x 7) and Robot (9 x 9) need `MESH_X`/`MESH_Y` set to their mesh. Whether a given
application's flows fit in 32 units per link depends on its bandwidths and on the
clock, which is a per-application setting.

`tb_sdm_workloads` runs traffic of these sizes on a 6 x 5 instance. Smaller meshes use
its top-left corner. The sizes are MWD (13 tasks, 15 flows, 4 x 4), VOPD (16, 21,
4 x 4), MMS (27, 36, 6 x 5), Telecom (24, 25, 6 x 4) and auto-industry (22, 25, 6 x 4).
The published task graphs are not reproduced. Each workload is a random graph of the
stated size, with at most four flows in and out per task, mostly short flows, and 1 to
5 units of demand per flow. If a flow cannot be routed, the test doubles the clock,
which halves every flow's unit count, and allocates again. The published evaluation
resolves routing failures the same way. In a typical run, MWD, VOPD, Telecom and
auto-industry route at the base clock, with 9 to 14 hard-wired lanes each. MMS needs
the doubled clock. All 244 packets arrive intact and on time. The GSM and Robot sizes
(7 x 7, 6 x 6, 9 x 9) are left out to keep build time short; they differ only in size.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and has a
watchdog. With Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/sdm_pkg.sv tb/tb_sdm_noc.sv \
          --top-module tb_sdm_noc -Mdir obj_noc && obj_noc/Vtb_sdm_noc
```

| testbench | what it checks |
|---|---|
| `tb_sdm_input_reg` | one-cycle delay of random unit data; reset |
| `tb_sdm_crossbar` | random unit permutations with disabled outputs, against a reference table; reconfiguration; writes for other nodes ignored |
| `tb_sdm_router` | every output unit one cycle after random inputs, against an independent copy of the hard-wired table and a crossbar model |
| `tb_sdm_ni_tx` | 20-, 4- and 8-bit circuits (scattered lanes, reversed lane order); packet rebuilt from the wires; first flit one cycle after acceptance; exactly ⌈1024/W⌉ consecutive flits; back-to-back packets |
| `tb_sdm_ni_rx` | 12-, 4- and 32-bit circuits with idle cycles between flits; packet intact; `pkt_valid` exactly one cycle after the last flit and at no other time |
| `tb_sdm_noc` | whole 4 x 4 mesh at default parameters (below) |
| `tb_sdm_workloads` | application-sized random task graphs on a 6 x 5 mesh (see the section above) |

`tb_sdm_noc` sets up eight flows with a small greedy allocator. That allocator only
stands in for the design-time route finder; it is not the published one. The flows
cover hard-wired one-hop circuits east and north, a mixed hard-wired/programmable
circuit, programmable circuits of up to 6 hops, a 4-lane multi-path flow, two flows
sharing links on different units, two channels on one node, and partial last flits.
The flows send back-to-back packets. Two flows are then torn down, re-routed along the
other dimension order with a new width, and used again. Every delivered packet is
compared bit for bit, and its delivery cycle against the formula above. The test
prints how often each mechanism occurred and fails if one never did. Building it takes
about two minutes; it runs in well under a second.

## Changing the design

* Link width / unit size: `SDM_LINK_BITS` and `SDM_UNIT_BITS` in `sdm_pkg`, or
  `NUM_UNITS` / `UNIT_BITS` on `sdm_noc`. The crossbar's `src` field is 7 bits, so at
  most 128 programmable units per router (5 × `RC_UNITS`).
* Share of hard-wired wires: `HW_UNITS`. Keep it a multiple of 4 so that each direction
  gets the same number of hard-wired units.
* Hard-wired pattern: `sdm_pkg::hw_out`. The testbenches `tb_sdm_router` and
  `tb_sdm_noc` carry their own copy of the table (`HW_TAB`), which must be changed too.
* The crossbar and the deserializer use wide multiplexers and shifters (100:1 per
  output unit, a 1024-bit shift per channel). These dominate area if `NUM_CH` or
  `PKT_BITS` grows.
