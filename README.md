# Ring router for 2D-mesh networks-on-chip — SystemVerilog RTL

A conventional NoC router keeps a bank of virtual-channel buffers at each of
its five inputs. A 5x5 crossbar, driven by a virtual-channel allocator and a
switch allocator, connects those buffers to the outputs. The buffers and the
crossbar take most of the router's area and power, and the allocation steps
make a packet spend about four cycles in each router.

The ring router removes the crossbar. The router becomes a small network of
its own: five identical three-port nodes, called **exchanges**, connected in
a bidirectional ring. There is one exchange per router port: core, north,
south, east and west. Every exchange buffers at its *exit* ports. A flit
crosses one exchange per clock cycle. The ring order is chosen for XY routing,
so a flit that goes straight through a router visits only two exchanges and
spends two cycles there.

This repository holds a synthesizable model of that router. It includes the
exchange and its parts, the router and an 8x8 mesh built from routers. It
also has self-checking testbenches for every level, including the full-size
mesh running six synthetic traffic patterns.

## 1. The exchange

```
              E (to a neighbouring router or the core)
              ^        |
              |        v
        +-----+--------+------+
        |   [buf E]<-mux(A,B) |
  A <---+-[buf A]<-mux(B,E)   |
  A --->+                     +<--- B
        |   mux(A,E)->[buf B]-+---> B
        +---------------------+
```

An exchange has ports **A** and **B**, which face the two neighbouring
exchanges of the ring, and port **E**, which faces the outside world. Each
port is a pair of unidirectional links, one in and one out. A flit may never
leave by the port it came in by, so each exit buffer has only two possible
sources. A 2:1 mux is enough; no crossbar is needed.

For each exit port `p` the exchange has one copy of each of these parts:

| part | module | what it does |
|---|---|---|
| buffer arbiter | `buffer_arbiter` | decides which of the two entry ports may write buffer `p` this cycle; round robin, so neither entry can starve |
| 2:1 mux | inside `exchange` | passes the granted flit to the buffer |
| route computation | `route_computation` | works out the exit port the flit will take in the *next* exchange, before the flit is written |
| buffer | `vc_buffer` | 2 virtual channels x 8 flits x 128 bits |
| output arbiter | `output_arbiter` | picks the virtual channel that sends next; round robin |

The exchange is written once (`exchange.sv`). A parameter `XC_ID` tells each
copy which exchange it is. Its only use is to tell the route computation units
what lies downstream of each port.

## 2. The ring and its disjoint

Ring order and port names:

```
        core.A ---- north.B        (A of each exchange drives B of the next
        north.A --- south.B         one in the order core, north, south,
        south.A --- east.B          east, west, core; B drives A of the
        east.A ---- west.B          previous one)
        west.A ---- core.B
```

The links form two rings, one clockwise (the A outputs) and one
counter-clockwise (the B outputs). A ring of buffers can deadlock. To prevent
that, routing never passes a flit *through* the core exchange: a flit that
enters the core exchange by A or B always leaves by E, to the core. Inside the
router the ring is therefore a line:

```
   (core.A) north — south — east — west (core.B)
```

The line has one path between any two direction exchanges. The core sits at
both ends of it. North and south are reached from the core through its A
port, and east and west through its B port.

Hop counts inside one router (one hop = one exchange = one cycle):

| enters by | leaves by | exchanges in between | hops |
|---|---|---|---|
| core | core | north, south, east, west | 6 |
| core | north / west | — | 2 |
| core | south | north | 3 |
| core | east | west | 3 |
| north | south | — | 2 |
| north | east | south | 3 |
| north | west | south, east | 4 |
| east | west / south | — | 2 |
| south | west | east | 3 |

The table is symmetric: a reversed pair takes the reversed path. Going
straight through takes two cycles. The one awkward turn is between north and
west. The short way round would pass through the core exchange, which the
disjoint forbids, so the flit goes the long way in four hops. A flit that a
core sends to itself goes once round the whole ring.

## 3. Lookahead routing

The buffers sit at the exits of the exchanges. By the time a flit is in a
buffer, it is already committed to the next exchange. So routing is done one
step ahead. As a flit passes through the 2:1 mux into buffer `p`, the route
computation unit of `p` computes the flit's exit port in the exchange behind
`p`. It writes the result into the flit's `la_port` field. In the next
exchange, `la_port` steers the flit straight to its buffer arbiter and mux, so
no route computation sits on that path.

To compute the port, the unit needs to know which exchange is downstream, the
port the flit enters it by, and the coordinates of the router that holds it:

* behind A: the next exchange in ring order, entered by B;
* behind B: the previous exchange, entered by A;
* behind E: the facing exchange of the neighbouring router (east → west of
  router x+1, north → south of router y+1, and so on), entered by E. Behind
  the core exchange's E there is only the core.

The unit first applies XY routing at that router: x first, then y, then the
core. That names the exchange the flit must leave the router by. Then:

1. If the downstream exchange is that exchange, the flit leaves by E. The one
   exception is a flit injected at the core exchange that is addressed to its
   own core; it goes round the ring instead.
2. A flit that entered by B keeps going forward (A), and one that entered by A
   keeps going backward (B).
3. A flit that entered by E picks its direction on the line. From the core
   exchange, north, south and the core are on the A side and east and west on
   the B side. From a direction exchange, the flit moves toward the target's
   position on the line. For the core as target, north and south use B, and
   east and west use A.

Flits from the core have no upstream exchange to compute their lookahead. The
router therefore computes it with one more `route_computation` instance
(`core_rc` in `ring_router`). Flits from a neighbouring router arrive with
`la_port` already set by the sending exchange.

### Flit format (`ring_pkg::flit_t`, 128 bits)

| bits | field | meaning |
|---|---|---|
| 127:126 | `la_port` | exit port in the exchange being entered (0 A, 1 B, 2 E) |
| 125:123 | `dst_x` | destination column, grows eastwards |
| 122:120 | `dst_y` | destination row, grows northwards |
| 119:0 | `payload` | |

## 4. Link handshake and timing

All links, both inside the ring and between routers, use the same signals:

| signal | direction | meaning |
|---|---|---|
| `valid`, `flit` | sender → receiver | a flit is offered; `flit.la_port` names the receiver buffer it wants |
| `acc` | receiver → sender | the flit is written at this clock edge |
| `space[3]` | receiver → sender | per receiver buffer: at least one virtual channel has room |

`space` comes straight from registers. `acc` depends combinationally on
`valid`, through the receiver's buffer arbiter. `valid` depends on `space`
only, so no link forms a combinational loop.

One cycle per exchange works like this. In cycle *t* a flit is at the head of
a virtual channel in buffer `X.p`. Its output arbiter offers it if the target
buffer in `Y` reports space. `Y`'s buffer arbiter grants it, and at the end of
cycle *t* the flit is written into `Y`, with its new lookahead. In cycle *t+1*
it is at the head there. From the edge that takes a flit into a router to the
edge that hands it on, the time is exactly the hop count in the table above.
The links between routers add nothing, because a router's E buffer writes
directly into the neighbour's exchange. The zero-load latency of a path is
therefore the sum of the per-router hop counts. For example, a flit sent one
router east takes 3 (core, west, east) + 2 (west, core) = 5 cycles.

The original design writes the buffers on the falling clock edge and reads
them on the rising edge. This RTL does both on the rising edge and reads the
head of a buffer combinationally. The hop still takes one cycle, and the
design stays single-edge.

## 5. Buffers, virtual channels and arbitration

* `vc_buffer`: `NVC` FIFOs (default 2) of `DEPTH` flits (default 8), held in
  one storage array. Write and read ports are independent. An incoming flit
  goes to the emptiest channel that is not full, the lowest index on a tie.
  `space` is high while any channel has room.
* `output_arbiter`: a channel may ask to send only if its head flit's target
  buffer downstream reports space. Among those channels it grants in round
  robin, starting after the channel served last. The pointer moves only when
  the flit is accepted, so an offer that lost arbitration downstream is
  repeated in the next cycle.
* `buffer_arbiter`: grants one of the two requesting entry ports, and only
  while the buffer has room. After each grant the other entry has priority.

Every packet is one flit long. So no channel is ever reserved for a packet,
and flits of different packets may overtake each other across the two
channels.

With 5 exchanges, 3 buffers each and 2 channels per buffer, a router holds 30
virtual channels (240 flits). A conventional five-input router with 8
channels per input holds 40.

## 6. The mesh (`ring_mesh`, top level)

`ring_mesh #(MESH_X = 8, MESH_Y = 8)` is a mesh with one router per core.
Node `n = y*MESH_X + x` sits at column `x` (growing eastwards) and row `y`
(growing northwards). East and west exchanges of horizontal neighbours are
linked, and so are north and south exchanges of vertical ones. Ports on the
edge of the mesh are tied off; XY routing never uses them.

The core side of node `n` has two handshakes:

* injection: `inj_valid[n]`, `inj_flit[n]`, `inj_acc[n]`. The core holds a
  flit until `inj_acc` is high; the flit is taken at that clock edge.
  `la_port` is ignored on injection.
* ejection: `ej_valid[n]`, `ej_flit[n]`, `ej_ready[n]`. A flit leaves the
  router at an edge where both `ej_valid` and `ej_ready` are high. `ej_valid`
  does not depend on `ej_ready`.

The cores themselves and the off-chip memory of the system are not part of
this RTL.

## 7. Where this RTL goes beyond, or departs from, the original description

Taken from the original design:

* the exchange structure;
* the ring order and port names;
* the disjoint at the core exchange;
* lookahead routing with XY dimension order;
* round-robin arbitration;
* one cycle per exchange, and the per-router hop counts;
* 2 channels x 8 flits x 128 bits per buffer;
* the 8x8 mesh.

Choices made here, where the description says nothing:

* The link signals (`valid` / `acc` / `space`) and the same-cycle grant. The
  original speaks of a write request that is granted in the next cycle; the
  hop count comes out the same.
* Single-edge buffers, instead of writing on the falling edge.
* How a virtual channel is chosen on a write.
* That the router computes the first lookahead for flits from the core.
* The flit layout, 3-bit coordinates, coordinate directions and node
  numbering.
* An active-low asynchronous reset, which clears pointers, counters and
  arbiter priorities. Buffer storage is not reset.

Not supported: packets longer than one flit. That would need wormhole
switching and per-packet virtual-channel allocation, which the original
describes nowhere. So the RTL can carry the evaluated synthetic traffic
(one-flit packets), but not application traces with multi-flit packets.

## 8. Verification

Every testbench checks itself and ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | checks |
|---|---|
| `tb_route_computation` | walks flits through the five exchanges; every row of the hop table above, both directions, must come out exactly; 2000 random coordinate pairs must end at the XY exit, with no loopback and no pass through the core exchange |
| `tb_vc_buffer` | against a queue model: one-cycle pass, full/space flag, channel choice, 3000 cycles of random push/pop |
| `tb_buffer_arbiter` | grant against a model, strict alternation under constant contention, no grant when full |
| `tb_output_arbiter` | grant against a model for 2 and 4 channels, pointer moves only on acceptance |
| `tb_exchange` | the south exchange at (3,3) with random traffic on all ports and random back-pressure: each flit leaves by the right port with the right lookahead, is offered only to a buffer with space, and an isolated flit passes in one cycle |
| `tb_ring_router` | single flits for all 21 entry/exit pairs: latency must equal the hop table; then 3000 cycles of random traffic on all five inputs with back-pressure, with every flit checked |
| `tb_ring_mesh` | a 4x4 mesh: zero-load latencies against the sum of hop counts along the XY path, then all six traffic patterns at 30% injection with random ejection back-pressure |
| `tb_ring_mesh_full` | the default 8x8 mesh: zero-load latencies, then uniform, transpose, bitcomp, shuffle, hotspot and asymmetric traffic at 20% injection for 1000 cycles each |

The mesh tests count each mechanism and fail if one never happened: core
loopback, the four-hop north/west turn, injection stalls, ejection
back-pressure, and two entry ports contending for one buffer. The traffic
generator is `tb/mesh_traffic.sv`. Its patterns use node number `s` with `b`
bits:

* transpose swaps the x and y halves;
* bitcomp is `~s`;
* shuffle rotates left by one;
* hotspot sends 25% of the flits to the node in the middle of the mesh and
  the rest uniformly;
* asymmetric is `s mod N/2`, plus `N/2` half of the time.

### What the full-size run shows

In the 8x8 run at 20% injection per node, every flit reached its
destination. The mean latency includes the time a flit waits in its source
queue:

| pattern | flits | mean latency (cycles) |
|---|---|---|
| uniform | 12787 | 15.2 |
| transpose | 12762 | 188.7 |
| bitcomp | 12775 | 23.0 |
| shuffle | 12853 | 21.8 |
| hotspot | 12967 | 1123.6 |
| asymmetric | 13141 | 9.0 |

Transpose is past saturation at this load. The hotspot pattern asks one core
to take 3.2 flits per cycle, but a core can take at most one. These numbers
come from one random seed, and the queueing model is this testbench's own.
They are not a reproduction of any published curve.

### Running a test with Verilator

```
verilator --binary --timing --assert -Irtl -Itb rtl/ring_pkg.sv \
  rtl/route_computation.sv rtl/vc_buffer.sv rtl/buffer_arbiter.sv \
  rtl/output_arbiter.sv rtl/exchange.sv rtl/ring_router.sv rtl/ring_mesh.sv \
  tb/mesh_traffic.sv tb/tb_ring_mesh.sv --top-module tb_ring_mesh
./obj_dir/Vtb_ring_mesh
```

Replace the last testbench file and `--top-module` to run another test. The
8x8 mesh takes about two minutes to build and under a minute to run.
