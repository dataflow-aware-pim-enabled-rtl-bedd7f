# Floret: a space-filling-curve network-on-interposer for PIM chiplets

A DNN inference runs mostly in one direction: layer *i* sends its activations
to layer *i+1*. Suppose the layers of a network sit on processing-in-memory
(PIM) chiplets placed on a 2.5D interposer, and consecutive layers sit on
physically adjacent chiplets. Then almost all traffic is single-hop, and the
network that joins the chiplets needs far less than a mesh or a torus.

Floret builds its network from that observation. The chiplets are threaded
onto several *space-filling curves* (SFCs). Each curve is a one-way chain of
single-hop links from its **head** to its **tail**. A DNN task's layers are
placed on consecutive chiplets of a curve. When a curve runs out, the task
continues on another curve: its data leaves the first curve at the tail and
enters the next curve at its head. The heads and tails of all curves are
joined by a small **top-level network** of bidirectional links. Every router
except the heads and tails therefore needs only two network ports: one in and
one out.

This repository gives synthesizable SystemVerilog for that network: the
routers, one curve, and the whole 100-chiplet network. It also gives
self-checking testbenches, which run the DNN workload mixes from the published
evaluation on it. The PIM chiplets themselves (ReRAM crossbars) are not
included. Each chiplet's network port is a port of the top module.

## Topology

The 36-chiplet example from the published description has six curves on a
6 x 6 grid:

```
 o <- o <- H1 <-> T6 <- o <- o          H = head, T = tail
 |         ^     ^          ^           arrows: one-way curve links
 v         v     v          |           <-> / ^v : bidirectional ring links
 o -> o -> T1    H6 -> o -> o
           ^     ^
           v     v
 o <- o <- H2    T5 <- o <- o
 ...            ...
 o -> o -> T3 <-> H4 -> o -> o
```

Logically the network has two layers:

* **Curves.** Curve *s* holds chiplets *s·L ... s·L+L−1*, where `L` is
  `SFC_LEN`. Position 0 is the head and position `L−1` is the tail. Data
  moves only from the head towards the tail.
* **Ring.** The heads and tails, in the order H0, T0, H1, T1, …, form a ring
  of `2·N_SFC` nodes with a bidirectional link between neighbours. Ring node
  `2s` is head *s*; ring node `2s+1` is tail *s*.

The RTL describes only this logical structure. Where a curve lies on the
interposer does not matter to the logic, because every link costs one cycle.

**Default size.** The default is `N_SFC = 4`, `SFC_LEN = 25`: 100 chiplets, the
size of the published evaluation. The evaluation does not print the number of
curves for 100 chiplets; the default is derived as follows:

* This topology has `N_SFC·(SFC_LEN−1)` curve links plus `2·N_SFC` ring
  links, which is `100 + N_SFC` links in all.
* The published link count for Floret at 100 chiplets is 104, which gives
  four curves.
* Four curves also give 8 three-port routers and 92 two-port routers. That
  agrees with the published router-port histogram.
* With four curves every tail is at most three ring hops from any other head.
  The description states that limit.

The 36-chiplet figure is `N_SFC = 6`, `SFC_LEN = 6`, and has its own
testbench.

## Routing

A flit carries its destination chiplet number. Each router decides locally,
from its own role and position (`floret_pkg::route_port`):

| router | destination | output |
|---|---|---|
| any | this chiplet | local (eject) |
| mid-curve | anything else | next router on the curve |
| head | a later chiplet of its own curve | into the curve |
| head | another curve | ring, towards that curve's head |
| tail | another curve | ring, towards that curve's head |
| tail | an earlier chiplet of its own curve | ring, to its own head (one hop) |

On the ring a flit takes the shorter way round. On a tie it goes "clockwise",
towards higher ring indices. When it reaches the head of its destination
curve, it enters that curve and runs down to its chiplet.

One case follows from the rule without being special-cased. If a flit for a
tail travels the ring counter-clockwise, it passes that tail before that
curve's head, and it is ejected there.

Two consequences matter for users:

* **Latency is the hop count.** The hops are: down the curve to its tail (or
  none from a head), the ring hops, then down the destination curve. A flit
  accepted at clock edge *t* is offered at the destination chiplet after edge
  *t + hops*, if nothing stalls it.
* **No deadlock protection in hardware.** There are no virtual channels. The
  curves and the ring together form a cycle, so arbitrary all-to-all traffic
  at high load can deadlock. The published design relies on mapping instead:
  DNN tasks are mapped one at a time from a queue and have acyclic dataflow.
  The testbenches do the same. Their random traffic phase always sends
  "forward", to a chiplet later in curve order.

## Router micro-architecture

Every router is `floret_router` with one of three roles:

| role | network inputs | network outputs |
|---|---|---|
| `ROLE_MID` | previous chiplet on the curve | next chiplet on the curve |
| `ROLE_HEAD` | ring CW, ring CCW | into the curve, ring CW, ring CCW |
| `ROLE_TAIL` | end of the curve, ring CW, ring CCW | ring CW, ring CCW |

Each role also has the local port to its chiplet. The port list is always the
same four slots: `P_LOCAL`, `P_SFC`, `P_CW`, `P_CCW`. Slots a role does not use
build no hardware. Their `in_ready` and `out_valid` outputs stay low.

The published description gives only the port counts and the routing along
the curves. Everything below is this design's own choice, kept as simple as
works:

* **Input buffering.** Every used input has a `flit_fifo` of `FIFO_DEPTH = 2`
  flits. `in_ready` is "not full" and comes straight from a register, so the
  ready signal has no combinational path from one router into the next.
* **Route computation.** The route is computed on the flit at the head of
  each buffer.
* **Arbitration.** Each used output has an `rr_arbiter`: round-robin over the
  inputs that want that output. The priority moves only when a flit is
  actually taken.
* **Grant hold.** When an output shows a flit and the receiver is not ready,
  the grant is kept until the flit leaves. Valid/ready semantics therefore
  hold: `out_flit` does not change while `out_valid && !out_ready`. An
  assertion in the router checks this.
* **Timing and throughput.** A hop costs one cycle. Each output passes one
  flit per cycle.

The routing rule divides the destination number by `SFC_LEN`. With 100
chiplets that costs a small divider per input. The number of network ports
per router is still the one the published design describes.

## Flit format

`floret_pkg::flit_t`, 52 bits, one flit per packet:

| field | bits | meaning |
|---|---|---|
| `dest` | 8 | destination chiplet |
| `src` | 8 | source chiplet |
| `task_id` | 4 | DNN task the data belongs to |
| `data` | 32 | one activation word |

All widths are this design's choice. The published description gives no flit
format. To change a width, edit `ID_W`, `TASK_W` or `DATA_W` in the package.
`ID_W` must cover `N_SFC·SFC_LEN` chiplets, and an elaboration-time assertion
checks this.

## Files

| file | contents |
|---|---|
| `rtl/floret_pkg.sv` | flit type, port indices, roles, routing function |
| `rtl/flit_fifo.sv` | router input buffer |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/floret_router.sv` | the router (mid, head or tail) |
| `rtl/floret_sfc.sv` | one curve: head, mid routers, tail, chained |
| `rtl/floret_noi.sv` | **top**: `N_SFC` curves and the ring |
| `tb/tb_floret_router.sv` | routing of every destination in every role; one-cycle latency; backpressure; round-robin; one flit per cycle |
| `tb/tb_floret_sfc.sv` | one curve: sink and hop count for every source and destination; 400 random flits under random stalls |
| `tb/tb_floret_noi.sv` | end to end at the default 100 chiplets (see below) |
| `tb/tb_floret_fig1.sv` | the same test on the 36-chiplet, six-curve network |

### Top-level interface

`floret_noi` has one port pair per chiplet. Every transfer is one flit, on a
valid/ready handshake:

* `chip_in_valid/flit/ready[c]`: chiplet *c* into the network.
* `chip_out_valid/flit/ready[c]`: network to chiplet *c*.

`rst_n` is an asynchronous active-low reset.

## End-to-end test and workloads

`tb_floret_noi` and `tb_floret_fig1` contain a behavioural stand-in for the
PIM chiplets. A chiplet that receives an activation applies
`f_l(x) = 3x + l + 1 + t` as a placeholder for the crossbar matrix-vector
product. Here `l` is its layer and `t` its task. It then forwards the result
to the chiplet that holds the next layer.

The layer-to-chiplet mapping follows the published scheme:

* The task list is a queue, and one task is mapped at a time.
* A task's layers go onto the next free chiplets in curve order.
* When a curve is full, the task spills into the next curve.
* A finished task's chiplets are freed for later tasks.

Each DNN gets `ceil(parameters / 4M)` chiplets. The parameter counts are the
published ones for ResNet18/34/50/101/110/152, VGG19 and DenseNet169; the
4M-parameters-per-chiplet capacity is an assumption of the test.

The test runs these phases:

1. **Latency.** 300 single flits between random chiplet pairs in an idle
   network. Each must arrive after exactly the hop count computed from the
   topology. The ring transfers seen inside the network must match that path.
   A flit leaving through a tail may use at most `N_SFC−1` ring hops, which
   is the three-hop limit at the default size.
2. **Workloads.** The five concurrent workload mixes of the published
   evaluation, WL1–WL5, one after the other (143 DNN tasks in all). Each task
   takes four input activations, and every final result is checked against
   the layer functions applied in order. ResNet tasks also carry skip
   connections: every even layer sends its output to the layer two ahead as
   well. The receiving chiplet checks each skip value against its main-path
   input. The network treats these as ordinary flits.
3. **Random forward traffic.** 3000 flits with 40 % of chiplet outputs
   stalled at random. Each flit must arrive once, at its destination.

The test also checks these invariants:

* The number of ring-link transfers observed inside the network equals the
  ring hops the delivered flits should have made.
* Each of these events happens at least once:
  * delivery within a curve
  * spill to another curve
  * turn back to the own head
  * clockwise and counter-clockwise ring transfers
  * a multi-hop ring path
  * input and output stalls
  * reuse of a freed chiplet
  * a task spanning two curves
  * a skip-connection flit

Both tests run in about a second.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_floret_noi \
    -y rtl -y tb +libext+.sv -Irtl rtl/floret_pkg.sv tb/tb_floret_noi.sv
./obj_dir/Vtb_floret_noi
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each also
has a watchdog that reports a failure if the simulation hangs. To change the
network size, override `N_SFC`, `SFC_LEN` and `FIFO_DEPTH` on `floret_noi`.
`SFC_LEN` must be at least 2.

## How far it has been checked

* **Simulation.** Every module has a self-checking testbench, and each
  testbench fails when its module is deliberately broken.
* **Coverage of the top.** The top runs at its default 100-chiplet size with
  about 20,000 checks. Timing checks are exact to the cycle for idle-network
  latency and for single-router throughput.
* **Not covered.** There is no formal proof of deadlock freedom, and none is
  possible without restricting traffic (see Routing). Stability of
  valid/ready outputs is an assertion in the router, and holds in every test
  run.
* **Size.** A coarse synthesis of the default network gives about 2,300
  flip-flops and 22,000 bits of buffer memory: 100 routers, 2 flits per used
  input. No timing closure has been attempted.

## What is and is not here

Built from the published description:

* the curve-and-ring topology
* the one-way single-hop links inside a curve
* two-port routers everywhere except heads and tails
* bidirectional head/tail links
* the 100-chiplet size

This design's own choices, none of them given in the description:

* buffers and arbitration
* the flit format
* shorter-way ring routing and the tie rule
* the one-cycle hop
* the derived four-curve layout
* the absence of deadlock-avoidance hardware

Not included:

* **The ReRAM PIM chiplets.** They are analog, and no crossbar organisation
  is given.
* **The layer-mapping procedure and the design-time choice of curve paths.**
  These are software and design-time steps. The testbench models the mapping
  procedure.
* **The thermally optimised 3D network-on-chip.** Its layout comes from an
  optimisation whose result is not given.
* **Physical parts**: interposer wiring, through-silicon and inter-tier vias,
  and the heat sink.
* **The heterogeneous Transformer macro.** It is described only as future
  work.
