# HiRD: hierarchical rings with deflection — synthesizable RTL

A single ring is the simplest on-chip network there is. Each stop takes its
own flits off the ring and puts new flits into empty slots, and traffic
already on the ring always goes first. That needs no buffers and no flow
control. A single ring does not scale, though: latency and load grow with
the number of stops. The classic fix is a hierarchy of rings, where small
local rings are joined by a global ring. Earlier hierarchical rings had to
buffer and flow-control flits at every ring-to-ring crossing, which gives up
the simplicity of the ring.

HiRD keeps the local rings fully bufferless. Only the *bridge routers* that
join two rings have small transfer FIFOs. When a flit needs to change ring
and the FIFO it would enter is full, the bridge does not stall anything. The
flit stays on its ring, goes round once more and tries again. That extra
trip is a *deflection*. Deflections bring back the risk of livelock and
deadlock. Three small mechanisms deal with it:

* the **Swap Rule** in each bridge (two flits that both want to cross in
  opposite directions trade places through a bypass path);
* the **transfer guarantee** (a bridge watches ring slots in turn and reserves
  its FIFO for a flit that has circled too often);
* the **injection guarantee** (a starved injection point throttles its
  ring, and if that is not enough the whole network).

This repository holds SystemVerilog for the 16-node, two-level HiRD in its
8-bridge arrangement, with self-checking testbenches for every block and for
the whole network.

## Topology

```
      ring 0                       ring 1
   N0  N1                       N0  N1
 B0      B1 ===== global ===== B0      B1
   N3  N2        ring           N3  N2
     ||      (8 bridges,          ||
     ||       2 lanes)            ||
   N0  N1                       N0  N1
 B0      B1 ================== B0      B1
   N3  N2                       N3  N2
      ring 2                       ring 3
```

* Four local rings (0 top-left, 1 top-right, 2 bottom-left, 3 bottom-right).
  Each has four node routers N0..N3 and two bridge routers B0 (left side)
  and B1 (right side).
* One global ring connects the eight bridges.
* Every ring is bidirectional: one clockwise and one counter-clockwise ring
  of registers.
* Local links are 64 bits, one flit. The global ring is `LANES` = 2 flits
  wide, which gives it twice the local bandwidth. Each lane behaves as a
  separate one-flit bidirectional ring.
* Per-hop latency, router plus link, is 2 cycles on a local ring and 3 cycles
  on the global ring. The global links are five times longer, so they get one
  extra link register.

Stop order. The drawing this design follows shows the arrangement but
prints no stop numbers, so the order below is this design's reading of it.
Clockwise on each local ring the positions are 0..5 = N0, N1, B1, N2, N3,
B0. Clockwise on the global ring the positions are 0..7 = bridges
(ring,side) (0,0), (0,1), (1,0), (1,1), (3,1), (3,0), (2,1), (2,0), so the
two bridges of a ring sit next to each other. One trip round a ring takes
`LOCAL_LOOP` = 6×2 = 12 cycles on a local ring and `GLOBAL_LOOP` = 8×3 = 24
cycles on the global ring. Every slot moves one register per cycle, so these
loop times are exact. The transfer observers depend on that.

Node index = 4·ring + node. Bridge index = 2·ring + side.

## Flits and addresses

A flit is one 64-bit word (`hird_pkg::flit_t`):

| bits  | field   | meaning                                      |
|-------|---------|----------------------------------------------|
| 63    | valid   | slot holds a flit                            |
| 62:59 | dst     | {ring digit[1:0], node digit[1:0]}           |
| 58:55 | src     | source address, stamped by the node router   |
| 54:47 | tag     | per-source sequence number                   |
| 46:0  | payload | user data                                    |

The address has one digit per level of the hierarchy. A source must not
reuse a tag while a flit with that tag is still in the network, because the
transfer observers tell flits apart by {src, tag}.

## Routing

The hierarchy is a tree, so routing needs no tables (`hird_route`, plus the
functions in `hird_pkg`):

* At a **node router**, a flit leaves the ring when its whole address matches.
* At the **local side of a bridge**, a flit leaves when its ring digit
  differs from the ring's. Any bridge of the ring will do, and the flit takes
  the first one it meets.
* At the **global side of a bridge**, a flit leaves when its ring digit
  equals the bridge's ring.
* A flit that **enters** a ring takes the shorter direction. This covers new
  traffic at a node and a flit leaving a transfer FIFO. The target is the
  destination node on its own ring, or the nearer bridge of the ring it must
  reach. Ties go clockwise.

## Node router (`hird_node_router`)

Each direction of a node router is a three-step pipeline stage:

1. **Eject.** A flit for this node leaves. There are two ejectors, one per
   direction, so two flits can leave in the same cycle. Ejected flits are
   registered once and must be taken by the node every cycle. Ejection never
   pushes back on the ring.
2. **Inject.** If the slot is empty after ejection, it takes the head of that
   direction's injection FIFO, unless the router is throttled.
3. **Forward.** The result is written into the router register, which drives
   the link.

The node offers one flit per cycle over a valid/ready port. The router picks
the shorter direction and queues the flit in that direction's 4-entry FIFO.
`inj_ready` is low while that FIFO is full.

Timing on an empty ring: a flit accepted in cycle t is in the router register
at t+2. It shows on the destination's ejection output 2 cycles per hop later.

## Bridge router (`hird_bridge_router`)

Toward each ring it touches, a bridge looks like a node router. Toward the
local ring it has two interfaces, one per direction. Toward the global ring
it has 2·LANES interfaces (index 2·lane + direction). Behind every ejector is
a transfer FIFO into the other ring:

* local-to-global FIFOs: depth 1, one per local direction;
* global-to-local FIFOs: depth 4, one per global interface.

One cycle runs four steps:

1. **Transfer.** A flit that has to change ring enters the FIFO behind its
   own ejector. Two conditions apply: the FIFO is not full, and that input's
   observer does not hold a reservation for some other flit.
2. **Swap Rule.** Suppose a local flit and a global flit both want to cross
   and neither could enter its FIFO. Then the first such pair trade slots
   through a bypass. The local flit goes onto the global interface, and the
   global flit goes onto the local interface. At most one swap happens per
   cycle. This removes the one cycle of dependences in the tree, which is
   both directions' FIFOs full at once.
3. **Deflect.** Any other flit that wanted to cross stays where it is and
   goes round again.
4. **Inject from the FIFOs.** Crossbars move FIFO heads into free slots of
   the other ring, each in its shorter direction:
   * Global-to-local heads compete round-robin for the two local directions.
   * Local-to-global heads take the lowest free lane in their direction, and
     the two heads take turns at priority. This is how load is spread across
     the global lanes.

A swapped flit goes in the direction, and on the lane, of the slot it
takes over. That may be the longer way round. Correctness does not depend on
this.

Every FIFO head has a starvation counter:
* `local_starve` covers the heads waiting for the local ring and goes to
  that ring's controller.
* `global_starve` covers the heads waiting for the global ring and goes to
  the global controller.

The `evt_deflect`, `evt_swap` and `evt_reserve` outputs pulse once per event,
for performance counting.

## Delivery guarantees

### Transfer guarantee (`hird_observer`)

Open FIFO entries are not handed out fairly. A flit can be unlucky on every
pass and never get in. Each bridge ring input therefore has an observer with
three counters:

* `slot`: which ring slot is at the input now;
* `obs_slot`: which slot is being watched;
* `circles`: how often the watched flit has passed without crossing.

The watched slot comes round every `RING_LEN` cycles. If it holds the same
flit as last time, the flit still wants to cross, and it was refused again,
`circles` goes up. At `THRESH` the observer reserves the FIFO: until that
flit has entered, no other flit from that input may enter. If the watched
slot is empty, holds a different flit, or its flit has just crossed, the
observer releases any reservation. It then watches the next slot, the one
that arrives one cycle later. In this way the watched slot walks round the
whole ring, and every stuck flit is reached in time.

### Injection guarantee (`hird_starve_ctr`, `hird_throttle_ctrl`)

Traffic on the ring always wins, so an injection point can starve.
* Every injection point counts the cycles it has a flit ready but cannot
  inject. This covers each node FIFO and each bridge FIFO head.
* At 100 cycles the point raises its starve wire.
* The count resets on an injection. It holds while the router is throttled,
  so throttling does not make the throttled routers starve in turn.

Each local ring has a controller with six members: four nodes and two
bridge FIFO groups.
* While any member is starved, the controller throttles new injection at
  every member that is not starved. The ring drains, and the starved member
  gets an empty slot.
* If starvation lasts 100 cycles, the controller raises `escalate`.

The global controller has twelve members: the four rings' `escalate` wires
and the eight bridges' `global_starve` wires.
* While any member is starved, it throttles all four rings, which means
  every node that is not itself starved.

Wires between a member and its controller: `starve` up and `throttle` down.
All controller outputs are registered. The guarantee does not depend on how
fast they are.

## Parameters

| parameter     | default | where            | meaning                                 |
|---------------|---------|------------------|-----------------------------------------|
| `LANES`       | 2       | network, bridge  | global ring width in 64-bit flits       |
| `INJ_DEPTH`   | 4       | network, node    | node injection FIFO depth per direction |
| `L2G_DEPTH`   | 1       | network, bridge  | local-to-global transfer FIFO depth     |
| `G2L_DEPTH`   | 4       | network, bridge  | global-to-local transfer FIFO depth     |
| `INJ_THRESH`  | 100     | network, routers | starvation threshold (cycles)           |
| `ESC_THRESH`  | 100     | network, ctrl    | escalation threshold (cycles)           |
| `XFER_THRESH` | 4       | network, bridge  | observer retry threshold (circles)      |

Where the defaults come from:

* From the evaluated configuration: `LANES`, `L2G_DEPTH`, `G2L_DEPTH`, the
  two 100-cycle thresholds, the link widths and the per-hop latencies.
* Not given (this design's choice): `INJ_DEPTH` and `XFER_THRESH`. For the
  retry threshold, the evaluation reports less than 0.4 % difference across
  values from 1 to 16.

Sizes fixed in `hird_pkg`: 4 rings × 4 nodes, 2 bridges per ring, and the
flit layout.

## Files

| file | contents |
|------|----------|
| `rtl/hird_pkg.sv` | sizes, flit and address types, stop geometry, direction functions |
| `rtl/hird_route.sv` | routing decision of one stop |
| `rtl/hird_fifo.sv` | flit FIFO (injection and transfer queues) |
| `rtl/hird_link.sv` | link registers |
| `rtl/hird_starve_ctr.sv` | starvation counter |
| `rtl/hird_observer.sv` | transfer-guarantee observer |
| `rtl/hird_throttle_ctrl.sv` | throttling controller of one level |
| `rtl/hird_node_router.sv` | node router |
| `rtl/hird_bridge_router.sv` | bridge router |
| `rtl/hird_network.sv` | top: the 16-node network |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_hird_synthetic.sv` | synthetic traffic sweeps on the full network |

`hird_network` ports:
* Per node: `inj_valid`, `inj_flit`, `inj_ready` for new flits, and
  `ej_valid[2]`, `ej_flit[2]` for ejected flits. Ejected flits must be taken
  every cycle.
* Status: `ring_throttle[3:0]` and `global_throttle` show the throttling
  state, and `evt_*[7:0]` are the per-bridge event pulses.

Reset (`rst_n`) is asynchronous and active low. It empties every register
and FIFO.

## Simulation

Every testbench checks itself and ends by printing
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/hird_pkg.sv tb/tb_hird_network.sv --top-module tb_hird_network
./obj_dir/Vtb_hird_network
```

Swap in any other testbench name. Build the block testbenches the same way.

* `tb_hird_network` runs the full-size network with all defaults:
  * Latency on an empty network: 4 clock edges from the injection handshake
    to ejection for one local hop; 14 from ring 0 node 0 to ring 1 node 0.
  * Uniform random traffic near saturation.
  * A worst-case pattern. Three rings have neighbouring bridges; two of them
    flood each other, and the middle one sends only to the fourth ring. This
    runs for 20,000 cycles, and the middle ring must get its flits through.
  * A full drain.
  * A scoreboard checks exactly-once, correct, unchanged delivery.
  * The test also requires that every mechanism occurs at least once:
    deflection, swap, reservation, ring and global throttling, dual ejection,
    and injection back-pressure.
* `tb_hird_synthetic` measures accepted throughput and mean latency for
  uniform random, transpose and bit-complement traffic at 5 %, 20 % and
  50 % offered load. Uniform random also runs at 3 %, 18 %, 32 % and 47 %,
  the mean injection rates of low- to high-intensity multiprogrammed
  workloads whose addresses are interleaved over all nodes. Measured
  results:

  | traffic        | offered | accepted (flits/node/cycle) | mean latency (cycles) |
  |----------------|---------|-----------------------------|-----------------------|
  | uniform random | 3 %     | 0.029                       | 12.4                  |
  | uniform random | 18 %    | 0.181                       | 13.3                  |
  | uniform random | 32 %    | 0.318                       | 14.7                  |
  | uniform random | 47 %    | 0.472                       | 18.5                  |
  | transpose      | 50 %    | 0.364                       | 22.4                  |
  | bit complement | 50 %    | 0.466                       | 32.9                  |

  Transpose accepts less because the four diagonal nodes send nothing.

## Departures and limits

* **Two levels only.** The 64-node, three-level version is not built. That
  version puts four of these networks on a 256-bit third-level ring.
  `hird_pkg` fixes the address at two digits, and the bridge has a
  local/global shape.
* **No packet reassembly.** The network carries single flits. The receiver
  scheme assumed around it is Retransmit-Once. There, packets are rebuilt in
  the cache miss registers, and flits that find no buffer are dropped and
  retransmitted later. That scheme is not part of this RTL. The ejection
  ports must accept two flits per cycle, which is the assumption that scheme
  rests on.
* **Choices where no detail is given:**
  * stop order;
  * flit layout;
  * tie rule of the direction choice;
  * injection FIFO depth;
  * retry threshold;
  * lane choice and arbitration order in the bridge;
  * the swap taking only flits that would otherwise be deflected;
  * starvation counters holding while throttled;
  * throttling exempting the starved member;
  * a reservation being released when its flit leaves by another bridge.
* **Bridge FIFO heads are starvation-counted but never throttled.** The
  throttle acts only on new traffic from nodes. Once nodes stop injecting,
  the transfer FIFOs empty by themselves, so the rings still drain.
* **A swapped flit takes the direction of the slot it takes over**, so it
  may go the longer way round.
* **Energy, area and timing figures** are not reproduced. The RTL has no
  process-specific parts.
