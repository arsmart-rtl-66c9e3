# ArSMART network-on-chip in SystemVerilog

A SMART-style network-on-chip lets a flit cross several routers in one clock cycle when the
routers on its way are set up in advance. The classic SMART design arranges that set-up in a
distributed way. Every router arbitrates among setup requests from upstream routers, and a path
may turn at most once. Both costs grow quickly with the number of hops a flit may take per cycle.

ArSMART takes the decisions out of the routers. The mesh is divided into clusters, and each
cluster has a controller. The controller knows which links are in use, chooses a route for every
message, and writes a small configuration word straight into each router on that route. A router
is then only a set of multiplexers with a one-flit register per output. It has no input buffers,
no virtual channels, no switch allocator and no route computation. A route may turn at any
router. A message that cannot get all of its links waits at its source, not inside the network.
So nothing inside the mesh ever contends for anything.

This repository holds synthesizable RTL for that scheme in its main configuration:

* an 8 x 8 mesh that forms one cluster, so one controller serves all 64 routers;
* 128-bit flits;
* at most 8 hops per cycle (`HPC_MAX = 8`);
* a controller that can track 1024 messages at once.

## The five steps of a message (C4R)

Every message goes through five steps: **c**ompute, **c**heck, **c**onfigure, **c**ommunicate,
**r**elease. Three kinds of agent take part: the processor of the source PE with its network
interface (`arsmart_ni`), the cluster controller (`arsmart_controller`), and the routers
(`arsmart_router`).

1. **Compute.** When a task starts, the processor hands its outgoing messages to its network
   interface, giving the destination and the size in flits. For each message the interface sends a
   *transmission-request* to the controller. The controller puts the message in a free thread and
   queues it for the route engine. The engine first produces the plain XY route, then an adaptive
   route (see "Routing" below).
2. **Check.** When the task ends, the interface sends *processor-finish*. This makes all of the
   PE's pending messages ready, each stamped with the current cycle. The controller keeps one
   busy bit per router output link. In each cycle it grants the oldest ready message whose links
   are all free. Granting is first come, first served, and a granted message is never pre-empted.
   The winner's links all become busy in that same cycle. A message that finds even one of its
   links busy reserves nothing; it waits at its source until the links come free. Because no
   message holds a partial path, there is no hold-and-wait inside the network.
3. **Configure.** In the next cycle the controller sends one 6-bit word to every router on the
   route. All the words go out in the same cycle, over point-to-point links. Each router answers
   with a one-cycle *configuration-finish*.
4. **Communicate.** Once every configuration-finish is back, the controller sends
   *transmission-begin* to the source. The source then streams the message, one flit per cycle.
   The flits cross up to `HPC_MAX` routers per cycle and are handed to the destination processor.
   After the last flit, the source sends *transmission-finish*.
5. **Release.** The controller waits `hops / HPC_MAX + 1` cycles, until the last flit has arrived.
   It then sends a release word to every router on the route and clears the busy bits of the
   links.

The controller pipelines these steps across messages. In any one cycle it can take:

* one request;
* one transmission-finish;
* one grant;
* one release.

Configuring a message takes the configure step and the wait for configuration-finish. Only one
message is configured at a time.

## The router and its configuration word

Each router has four neighbour ports: N, S, W and E. It also has a local port to its processor.

**Outputs.** Each non-local output has a 4:1 multiplexer. Its candidates are the other three
directions and the processor, taken in the order N, S, W, E, L with the output itself left out.

| output | candidate 0 | candidate 1 | candidate 2 | candidate 3 |
|--------|-------------|-------------|-------------|-------------|
| N      | S           | W           | E           | L           |
| S      | N           | W           | E           | L           |
| W      | N           | S           | E           | L           |
| E      | N           | S           | W           | L           |

**Delay registers.** Behind every output multiplexer is a one-flit delay register. If the output's
delay bit is set, the output sends the flit its multiplexer picked one cycle earlier. This is how
a flit stops after `HPC_MAX` hops.

**Ejection.** The processor can take the flit arriving on any of the four inputs, and all four at
once. It can also inject on all four outputs at once. A PE can therefore send and receive several
messages in parallel, in different directions.

**Configuration registers.** The router has two of them:

* The *non-local register* holds, per output, an enable bit, a 2-bit input selection and a delay
  bit.
* The *local register* holds, per input, a "connected to the processor" bit.

**Configuration word.** Bit 5 is sent first and chooses which register is written.

```
non-local write : 0 | out[1:0] | insel[1:0] | delay     (sets the enable bit of <out>)
local write     : 1 | in[1:0]  | connect    | 0 | 0
output release  : 1 | out[1:0] | 0          | 1 | 0     (clears the enable bit of <out>)
```

Directions are coded N=00, S=01, W=10, E=11.

*Example 1.* `0 01 00 1` tells a router to send its N input to its S output, through the delay
register. N is the first candidate of S, so insel is 00.

*Example 2.* `1 00 1 00` connects the N input to the local processor.

A local entry is released by writing it again with connect = 0. A disabled output drives an idle
(not valid) flit.

**Which routers are written.** A route of h hops writes one word into each of the h + 1 routers
on it:

* at the source, an output entry whose input is L;
* at each intermediate router, an output entry whose input is the direction the flit comes from;
* at the destination, a local entry.

The delay bit is set at every router whose hop count from the source is a non-zero multiple of
`HPC_MAX`. A route from router 0 to router 63 (14 hops) therefore stops once, at hop 8. Its first
flit reaches the destination 2 cycles after it leaves the source. With the cycle in which the
interface reads the flit from PE memory and the registered ejection, that is 3 cycles after
transmission-begin. After that, one flit arrives per cycle.

## Routing

For each message, `arsmart_route_engine` builds two routes in turn:

1. **XY route.** This is the default. It is ready a few cycles after the request, one hop per
   cycle.
2. **R1 route.** This is a least-cost route found with Dijkstra's algorithm over the mesh. The
   cost of the link from router u to its neighbour in direction d is
   `load(u,d) * 64 + 1`.
   * `load(u,d)` is the summed size of all messages that currently hold a route over that link
     and have not yet finished.
   * The `+1` makes the low bits of a path cost equal to its hop count. So among equally loaded
     routes the shortest one wins, and an empty network gives a minimal route.

The engine visits one router per cycle (a 64-way minimum search), then traces the route back one
router per cycle. For an 8 x 8 mesh the R1 route is ready within about 3 x 64 cycles after it starts (the testbench bound).

The R1 route replaces the XY route only if the message has not yet been granted. If a task ends
before R1 is done, the message goes along the XY route. Because the cost counts load rather
than busy bits, R1 steers long messages apart. It also lets a message go around a region that is
already heavily booked.

## Files

| file | contents |
|------|----------|
| `rtl/arsmart_pkg.sv` | flit type, direction codes, candidate order, configuration-word helpers, controller event struct |
| `rtl/arsmart_cfg_reg.sv` | decoder and configuration registers of a router |
| `rtl/arsmart_crossbar.sv` | output multiplexers, delay registers, ejection |
| `rtl/arsmart_router.sv` | router = configuration registers + crossbar |
| `rtl/arsmart_route_engine.sv` | XY and R1 route computation, configuration words per router |
| `rtl/arsmart_controller.sv` | thread table, link-state memory, FCFS grant, configure/begin/release sequencing |
| `rtl/arsmart_ni.sv` | network interface: request/finish signalling, flit streaming, ejection |
| `rtl/arsmart_noc.sv` | top: N x N routers and interfaces plus one controller |
| `tb/tb_<module>.sv` | self-checking testbench of each module |

### Top-level interface (`arsmart_noc`)

The processor and PE memory are not part of the design; their signals are ports. Each array
below has one entry per PE r. The `[4]` arrays have one entry per direction d (N, S, W, E).

* `msg_valid/msg_dst/msg_size/msg_ready [r]`: the processor hands over one message (destination
  id, size in flits) per handshake.
* `task_done [r]`: a one-cycle pulse at the end of the task. The PE's handed-over messages
  become ready to send.
* `rd_valid/rd_dst/rd_idx [r][d]` and `rd_data [r][d]`: the PE memory read port of injection
  channel d. When `rd_valid` is high, the memory must return flit `rd_idx` of the message to
  `rd_dst` combinationally on `rd_data`.
* `rx_flit [r][d]`: flits ejected from input d, registered, `{valid, data}`.
* `events`: one-cycle pulses from the controller:
  * `grant`, `grant_xy`;
  * `blocked` (a ready message waits at its source);
  * `r1_commit`, `r1_detour`;
  * `release_`.

Router ids are row-major, with row 0 at the north edge: router r is at row r / N, column r % N.

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N` | 8 | mesh side; one cluster covers the whole mesh |
| `HPC_MAX` | 8 | hops a flit may cross in one cycle |
| `THREADS` | 1024 | messages the controller can track at once |
| `SIZE_W` | 16 | width of a message size in flits |
| `LOAD_W` | 24 | width of a per-link load sum |
| `NI_MSGS` | 4 | messages a network interface holds at once |
| `FLIT_W` | 128 | flit width (package constant) |

The first three values and the flit width come from the ArSMART design. The three widths are this
design's choice.

## Where this RTL departs from the ArSMART description, or fills gaps

**Signals widened**

* *Release word.* The described configuration format has no release encoding. The one above
  uses a don't-care bit of the local format.
* *transmission-request* carries a message size as well as the destination, because R1 needs
  the volume of each message.
* *transmission-begin* carries the destination and the first-hop direction, not a bare bit, so
  that a PE with several waiting messages knows which one to start and on which channel.

**Structure**

* *Delay registers.* They sit one per output, behind the multiplexer. The prose description
  places them "in each input port", but the router diagram and the per-output delay bit of the
  configuration word put them at the outputs. The outputs were followed.
* *Link-state memory.* It keeps a busy bit only for the four output links of each router. The
  four per-router processor-port entries of the original are not stored: an injection or ejection
  channel is always busy exactly when its link is, so those entries would only repeat a link bit.
* *The controller is dedicated hardware.* It has one route engine and handles one grant, one
  release and one configuration at a time. The original leaves the controller's implementation
  open; one suggestion is to run it on one of the PEs.

* *One message configured at a time.* The original lets several messages configure the same
  router in the same period; a router then needs up to five cycles, one per port. Here the
  controller serialises configuration: one message per configure-and-wait round of about three
  cycles. Messages that are ready together are thus delayed by a few cycles each.
* *No data preparation phase.* The interface reads each flit from PE memory in the cycle it
  injects it, so there is no preparation time that could hide the configuration time.

**Routing**

* *R1 cost.* It is summed per link. A message that shares several links with a route is
  therefore counted once per shared link, not once per route.
* *Tie-breaks.* Ties in FCFS order go to the lower thread index. Equal-cost R1 routes go to the
  shorter one.

**Not built**

* *Several clusters.* Meshes larger than one cluster need controller-to-controller coordination.
  Paths that cross a cluster boundary would be forwarded through a "temporary destination"
  router. This is not built, so `N` larger than a cluster is not the original design.
* *Time-triggered routing (R2)* for applications with known execution times is not built.
* *Deadlock detection* for link arbitration is not built.
* *Physical parts.* The asynchronous link repeaters are plain wires here, and the processor and
  memories are outside the design.

**Timing and interface choices not taken from the original**

* the handshakes between processor, interface and controller;
* the round-robin intake of requests;
* processor-finish waiting until every request of the task has been accepted;
* the one-cycle configuration-finish;
* the release delay.

## The combinational loop in the mesh

The router multiplexers are chained combinationally from router to router, so that a flit can
cross several routers in one cycle. Since any turn is allowed, the mesh as a whole contains
combinational cycles, and verilator reports `UNOPTFLAT` on the top's `r_out` nets. No enabled
path closes a cycle, because every configured route is a simple path: it never visits a router
twice. In silicon the same structure calls for timing constraints that break the false loops.

## Verification

Each module has a self-checking testbench that prints `TB_RESULT checks=<n> failures=<m>` and
has a cycle watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_arsmart_cfg_reg` | both worked configuration examples, release words, and random words against a reference decoder |
| `tb_arsmart_crossbar` | random settings and flits each cycle against a reference model with its own candidate table, including one-cycle delays |
| `tb_arsmart_router` | a flit held in the delay register and forwarded N to S, local ejection, injection, release of an output, configuration-finish |
| `tb_arsmart_route_engine` | walks every XY and R1 route from its configuration words, see below |
| `tb_arsmart_controller` | 4 x 4 cluster, `HPC_MAX` = 2, 8 threads; see below |
| `tb_arsmart_ni` | request before processor-finish, exact flit streaming, finish order, ejection |
| `tb_arsmart_noc` | end-to-end run at the default size (8 x 8, one controller, 1024 threads, `HPC_MAX` 8); see below |
| `tb_arsmart_taskgraph` | workload: a random task graph of 100 tasks and 300 messages (64 flits on average) mapped onto the default 8 x 8 NoC, run to completion; see below |

The route-engine test checks, for every route:

* that it reaches the destination;
* that it uses only the links in its mask;
* the hop count;
* that the delay bits are set exactly at multiples of `HPC_MAX`;
* that the XY route goes X first, then Y;
* that the R1 route has the least cost, found independently by Bellman-Ford relaxation over the same link weights;
* that each result arrives within a cycle bound.

The controller test checks:

* that all configuration words of an XY route go out in one cycle, with the delay bit at hop 2;
* that transmission-begin (destination, first direction) follows configuration-finish;
* release words, `hops / HPC_MAX + 1` cycles after transmission-finish;
* that a message whose link is busy waits at its source until the release;
* that two waiting messages are granted in the order their tasks finished;
* that a message whose task runs long gets the R1 route and no XY grant.

The end-to-end test has processor models that run random tasks with random messages. It checks
every delivered flit against the expected data and order, and it checks the latency of a
corner-to-corner message. It also counts how often each mechanism occurred, and fails any that
never occurred:

* grants on XY routes;
* R1 routes and R1 detours;
* messages blocked at the source;
* releases;
* flits stopped in a delay register;
* PEs injecting in several directions at once.

A typical run delivers 105 messages (1222 flits). It sees 48 blocked cycles, 14 R1 routes, 3 R1
detours and 134 delay-register stops.

The task-graph workload follows the synthetic traffic used to evaluate ArSMART: 100 tasks, 300
messages, an 8 x 8 mesh and an average message size of 8192. The unit of that size is not given;
here it is read as bits, that is 64 flits. Each task runs on a random PE for 32 to 96 cycles and
starts once all of its input messages have arrived. One run delivered 298 network messages
(18,887 flits) in about 14,700 cycles. It saw 2109 blocked cycles, 31 R1 routes (29 of them
detours) and 2840 delay-register stops.

To run a testbench with verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/arsmart_pkg.sv \
          tb/tb_arsmart_noc.sv --top-module tb_arsmart_noc -Mdir obj_noc
./obj_noc/Vtb_arsmart_noc
```

Replace `tb_arsmart_noc` with any other testbench name. The end-to-end build takes about a
minute, and the run takes a few seconds.

## How far to trust it

What the tests cover:

* The router data path and the configuration format are checked exhaustively or randomly
  against independent models.
* The controller is checked on directed scenarios and in random end-to-end traffic.

What has not been done:

* No timing analysis. The path through eight routers plus long links is the critical path.
* No energy analysis.
* Only a single cluster: the multi-cluster protocol is not implemented.
