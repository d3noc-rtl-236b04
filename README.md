# D3NOC: a mesh network-on-chip with one run-time optical express bus

D3NOC is a 16x16 electrical mesh network-on-chip that can add one long
shortcut to itself while it runs. A single optical waveguide winds through
all 256 nodes. At any time one pair of nodes owns it and uses it as a
one-hop express link from source to destination. The network decides which
pair owns it by measuring traffic. It also decides how long to measure
before it decides again. This second loop is the design's main idea. A
central controller changes the length of the measurement window by gradient
descent on the total packet latency it observes. The measurement process
therefore adapts to the traffic as well as the topology.

This repository gives synthesizable SystemVerilog for the digital side of the
design: the routers, the measurement units, the reconfiguration controller
and the bus control. It also gives a behavioural model of the
photonic/plasmonic device at each node, so that the bus can be simulated end
to end. The photonic device physics and the power figures are outside the
RTL.

## 1. The closed loop: operation windows and reconfiguration periods

Time alternates between two intervals.

* **Operation window** (`win_len` cycles, 100 after reset). The network
  carries traffic normally. Each node's *measurement unit* (MU) counts the
  flits its core sends to every other node. It keeps the largest of these
  counts, the node that count belongs to, and the total. It also adds up the
  latency of every packet delivered to its core.
* **Reconfiguration period** (50 cycles, longer only if the bus is still
  busy). The cores are held off and no new packet is sent onto the bus. The
  *reconfiguration control unit* (RCU) then works through these steps:

| cycle of the period | what happens |
|---|---|
| 0 | `snap`: every MU latches its report and starts an empty window |
| 1 | all reports are reduced in one step. The largest single count names the next bus owners: its reporter is the source and the node it sent most to is the destination. All latency sums are added into the window's total latency L. |
| 2 to 48 | `window_update` computes the next window length (a 1-bit-per-cycle divider) |
| >= 49 | once the update is done and the old owner has released the bus, the new owners and window length are broadcast and the next window starts |

The next window length follows a first-order gradient step:

```
G        = (L_t - L_{t-1}) / (T_t - T_{t-1})
T_{t+1}  = T_t - alpha * G             alpha = ALPHA_NUM / 2^ALPHA_SHIFT = 1/2
bounds:    100 <= T_{t+1} <= 10 * T_t
```

Here L is the total latency of all packets delivered in a window and T is the
window length. Two consequences are easy to miss:

* When two consecutive windows have the same length, the denominator would
  be zero. This design then uses 1 as the denominator. As a result, a run of
  100-cycle windows stays at 100 while latency rises. It jumps to the 10x
  bound (1000) as soon as latency falls. The window then grows by 10x per
  step while latency keeps falling, and drops back to the 100-cycle floor
  when latency rises. This gives the staircase of 100, 1000, 10 000 that
  adaptive runs of this scheme show.
* The lower bound reflects the cost of reconfiguration. A window much
  shorter than the 50-cycle period would spend most of its time
  reconfiguring. The upper bound keeps one lucky step from freezing the
  topology for the rest of a run.

If no node sent a flit during a window, no bus is allocated for the next
one. When the total latency of the first window is compared, the window
before it counts as 0 cycles with 0 latency.

### Report format

Each MU report (`report_t` in `d3noc_pkg`) holds:

* the reporting node's address (16 bits)
* the node it sent the most flits to (16 bits)
* its flit count towards that node (32 bits)
* its total flit count (32 bits)
* the sum of the latencies of the packets delivered to it (32 bits)

The last field is an addition of this design. The gradient step needs the
network's total latency, and this is how the RCU obtains it. Packet latency
runs from the cycle the head flit is injected to the cycle the tail flit is
delivered. The network has a global cycle counter (`now`), and the source
node stamps the time into every flit.

Reports travel on a dedicated link per node (the router's seventh port) and
are all present at the RCU in cycle 1.

## 2. The express optical bus

Bus positions follow a serpentine path:

* row 0 runs left to right, row 1 right to left, and so on
* the node at (x, y) sits at position `y*16 + x` on even rows and
  `y*16 + 15 - x` on odd rows

Each node has a *mo-detector* (modulator plus detector) and its own laser.
The mo-detector is a racetrack ring beside the waveguide. An ITO plasmonic
2x2 switch couples the ring to the waveguide, and a graphene photodetector
sits on the ring.

* **Unbiased** (cross state): light leaves the waveguide into the ring and
  is absorbed by the photodetector.
* **Biased** (bar state): light stays on the waveguide.

One pair owns the bus at a time, and the three kinds of node play these
roles:

| role | laser | switch bias | effect |
|---|---|---|---|
| source | on | = data bit | a 1 keeps the light on the bus; a 0 drops it into its own ring |
| nodes between | off | on | light passes |
| destination | off | off | all light drops into the ring; the photodetector output is the data |

The light travels only between the source and the destination. The model
lets it travel in either direction along the waveguide. `modetector` reduces
optical power to a "light present" bit. It models the 64 bit slots of one
network clock (50 Gb/s at 0.78125 GHz) side by side, and ignores loss. The
flit's control fields (head/tail, VC, ids, time stamp) travel beside the 64
data bits.

**Timing.** The source router's output register is the electrical-to-optical
stage. The light crosses the bus within that cycle. An optical-to-electrical
register at the destination adds one cycle. An optical hop therefore costs 2
cycles from output register to buffer, against 1 cycle for an electrical
link.

**Ownership hand-over.** During a reconfiguration period, routers route no
new packet to the bus, but packets already on it finish. The RCU changes the
owners only when `bus_idle` is high, which requires both of these:

* the old source has no packet in progress on its optical port and holds all
  its optical credits, so the destination buffers have drained;
* nothing is in the O-E register.

A new source therefore always starts with full credits and empty buffers at
its destination. The destination returns its optical credits to the source
over an electrical side path.

## 3. X-Y* routing

Packets use dimension-order routing: first along X to the destination's
column, then along Y. There is one exception. A packet at the router that is
the current bus source, and whose destination is the current bus
destination, takes the optical port. This applies to any packet that passes
through the bus source, not only to packets the source injected. The bus
adds a single edge that leads directly to a packet's destination, so it
cannot close a cycle of channel dependencies. A packet keeps the route chosen
for its head flit until its tail flit leaves.

## 4. The hybrid router

Each node's router has seven ports:

* local core
* north, east, south and west mesh links
* express optical bus
* reconfiguration (MU to and from RCU)

The first six go through a 6x6 crossbar. The reconfiguration port is a
direct link between the MU and the RCU. Every switched input has 4 virtual
channels (VCs) of 8 flits, and flits carry 64 data bits. Flow control is
credit based per VC.

The router has three pipeline stages:

1. **BW**: the flit arriving on a link is written into its VC buffer.
2. **RC/VA/SA**: work at the head of each VC.
   * Route computation (X-Y*) for a head flit.
   * Output-VC allocation: the lowest free VC that holds a credit.
   * Separable round-robin switch allocation: one VC per input port, then
     one input per output port.
   * The winner is dequeued, a credit goes back upstream, and the flit is
     registered with its new VC number.
3. **ST**: crossbar traversal into the output register. The output register
   drives the link in the following cycle.

Latency of a lone flit, from the cycle the core offers it to the cycle it is
delivered:

* over the mesh: `3 * (hops + 1)` cycles (21 corner to corner on 4x4, 93 on
  16x16)
* over the bus: 7 cycles, whatever the distance

## 5. Module map

| file | role |
|---|---|
| `rtl/d3noc_pkg.sv` | flit and report types, port numbering, widths |
| `rtl/d3noc_top.sv` | the whole network: nodes, mesh links, bus, RCU, cycle counter |
| `rtl/d3noc_node.sv` | one tile: router + MU, time stamping, injection hold-off |
| `rtl/hybrid_router.sv` | the 3-stage VC router |
| `rtl/vc_buffer.sv` | 4x8-flit input buffer of one port |
| `rtl/route_xystar.sv` | X-Y* route computation |
| `rtl/crossbar.sv` | 6x6 switch |
| `rtl/rr_arbiter.sv` | round-robin arbiter used by the allocator |
| `rtl/measurement_unit.sv` | traffic table, running maximum, latency sum, report |
| `rtl/rcu.sv` | window/period timing, report reduction, owner broadcast |
| `rtl/window_update.sv` | gradient-descent window sizing with restoring divider |
| `rtl/optical_bus.sv` | serpentine bus of mo-detectors, O-E register, credit return |
| `rtl/modetector.sv` | behavioural model of a mo-detector with its laser |

Main parameters and their defaults:

| parameter | default | meaning |
|---|---|---|
| `MESH_X`, `MESH_Y` | 16, 16 | mesh size (node ids are 8 bits, so at most 256 nodes) |
| `NUM_VC`, `DEPTH` | 4, 8 | virtual channels per port, flits per VC |
| `RP_CYCLES` | 50 | minimum reconfiguration period |
| `WIN_INIT` | 100 | first window length |
| `WIN_MIN`, `GROW_MAX` | 100, 10 | window bounds |
| `ALPHA_NUM`, `ALPHA_SHIFT` | 1, 1 | alpha = 1/2 |
| `WIN_W`, `LAT_W` | 32, 40 | window and total-latency widths |

`RP_CYCLES` must cover the window update, which takes `LAT_W + 6` cycles and
starts in cycle 2. An assertion in `rcu` checks this.

### Core interface (`d3noc_top`)

**Injection.** Per node, the core sets `head`, `tail`, `vc`, `dst` and
`data` of `inj_flit` and raises `inj_valid`. The flit is taken in the cycle
`inj_ready` is high. `inj_ready` is low when the chosen local VC is full or a
reconfiguration period is running. The node fills in `src` and the time
stamp itself.

**Delivery.** `ej_valid`/`ej_flit` deliver flits to the core. The core must
accept one every cycle.

**Status.** The top exports `bus_valid`, `bus_src`, `bus_dst`, `win_len`,
`rcfg_active`, `lat_last` (total latency of the last window) and `now`.

## 6. Where this RTL goes beyond or departs from the published description

The published description gives the architecture, the algorithm and the
numbers, but not the micro-architecture. The following are choices made
here:

* **Latency in the reports.** The report carries a latency sum, since the
  RCU needs latency and the published report has no field for it.
* **Report size.** The published report is said to fit 8 bytes. Its fields
  (4 + 4 + 2 bytes) add up to 10. The field widths are kept.
* **Cost function.** The cost is described both as the average latency over
  the nodes and as the total network latency in the window. The gradient
  step here uses the total.
* **Zero denominator.** A zero window difference is replaced by 1 (see
  section 1).
* **alpha.** The value of alpha (1/2) is chosen here. It is only described
  as a fraction between 0 and 1.
* **Router stages.** The router is described both as a 3-stage pipeline and
  as costing two cycles per router. Here a hop is 3 stages, BW, RC/VA/SA and
  ST, with BW overlapping the 1-cycle link. That makes 2 router cycles plus 1
  link cycle, which is consistent with both.
* **Core links.** The published timing adds one cycle from core to router
  and one from router to core, which would give 3*hops+4 cycles for a lone
  flit. Here the core writes straight into the local input buffer and reads
  the ejection output register, so a lone flit takes 3*(hops+1) cycles on
  the mesh and 7 over the bus, one cycle less than the published count.
* **Reconfiguration port.** The seventh router port is a direct MU/RCU link,
  not a crossbar port. Report collection is a single-cycle reduction at the
  RCU, not packets routed through the mesh.
* **Extended reconfiguration period.** The period stretches beyond 50 cycles
  when the old bus owner still has traffic in flight. The published design
  has a constant 50-cycle period.
* **Allocation and flow control.** Credit-based flow control, round-robin
  separable allocation, lowest-free output-VC choice and the stamping of
  flits with a global cycle count are all choices made here.
* **Light direction.** The waveguide carries light in both directions, and
  the serpentine's direction of travel is not fixed.
* **Modulation.** The device text describes "intrinsic" links whose laser
  needs no modulator, and also a mo-detector that modulates. The model
  follows the mo-detector: the laser is only switched on and off, and the
  switch modulates.
* **Not modelled.** Power, area and optical losses are not modelled.

## 7. Simulation

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_d3noc_top \
    rtl/d3noc_pkg.sv rtl/*.sv tb/tb_d3noc_top.sv
./obj_dir/Vtb_d3noc_top
```

| testbench | what it checks |
|---|---|
| `tb_vc_buffer` | random traffic against a queue model per VC |
| `tb_route_xystar` | all 65 536 router/destination pairs plus random bus cases |
| `tb_crossbar` | random selections |
| `tb_hybrid_router` | packets on all six ports with backpressure; 3-cycle empty-router latency; X-Y* port choice including the bus; in-order, non-interleaved delivery per output VC; credit limits; release of the optical port |
| `tb_measurement_unit` | reports over eight windows against a model; clearing at a window end |
| `tb_window_update` | the gradient rule, both bounds and the zero denominator against a 64-bit model; result latency |
| `tb_rcu` | window and period lengths, owner choice, next window, the no-traffic case, periods stretched by a late bus release |
| `tb_modetector` | transmit, bypass and receive behaviour and a source-bypass-receiver chain |
| `tb_optical_bus` | 4x4 bus with random owners in both directions: delivery after 1 cycle to the destination only, credit return |
| `tb_d3noc_top` | 4x4 network end to end (see below) |

The end-to-end test uses a core model at every node. The traffic consists
of:

* uniform background traffic;
* a hot source/destination pair far apart;
* a "passer" node whose packets cross the hot source.

Half way through the run, the hot pair moves. The test checks:

* every packet is delivered once, intact and in order;
* a lone flit takes 3*(hops+1) cycles over the mesh and 7 cycles over the
  bus;
* no flit enters during a reconfiguration period.

It also counts the following events and requires each to happen at least
once:

* a reconfiguration period;
* the bus allocated to each hot pair;
* a flit carried on the bus;
* the bus used by a packet from another source (X-Y*);
* a core held off;
* a window that grew (the 4x4 test only);
* a window held at a bound.

On the 4x4 network the test runs about 10 000 cycles in about a minute,
including the build. The largest network simulated is the 4x4 one. The
16x16 network at its default parameters elaborates under Verilator, but it
generates about 800 C++ files of over a minute each to compile, and that
build has not been carried through, so no full-size simulation has been run.

## 8. Limits

* The photonic devices are behavioural. Nothing here estimates optical
  power, loss, laser efficiency or energy per bit.
* The cores, and the application traces they would replay, are not part of
  the design. The top exposes their ports.
* The one-cycle reduction of all 256 reports at the RCU is a large
  combinational tree: 256 comparators and a 256-input adder. In silicon it
  could be pipelined over the spare cycles of the 50-cycle period without
  changing the behaviour described above.
* Node ids are 8 bits, so meshes above 256 nodes need a wider `NODE_W` in
  `d3noc_pkg`.
