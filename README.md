# A connectionless, flit-interleaving Network-on-Chip

This is SystemVerilog RTL for a small mesh Network-on-Chip built for the kind of
SoC that carries a handful of strict real-time flows and many looser multimedia
flows. It follows the design of Berejuck and Fröhlich, *Evaluation of silicon
consumption for a connectionless Network-on-Chip*.

The network never sets up a connection and never reserves a link. Every flit
carries the full origin and destination address, so every router routes every
flit on its own. When several flows want the same output link, the router's
arbiter hands the link out one flit at a time, and flits of different packets
are interleaved on the wire. A short packet is not stuck behind a long one, as
it would be with wormhole switching. A flow's worst-case latency depends only on
how many flows can compete at each hop, and that number is fixed at design time.

Two more choices follow from this:

* **No buffers inside the routers.** Each router channel has one input register
  and one output register. All queueing happens in the FIFOs of the network
  interfaces at the end points.
* **Eight channels per router.** The router has eight ports (N, NE, E, SE, S,
  SW, W, NW). The four straight ones link to neighbouring routers; every port
  without a neighbour holds a core. Cores that talk to each other often can
  share a router, and the network needs fewer hops. A 2x2 mesh of these routers
  connects 24 cores. That is the default configuration here.

## The flit

Each flit is one word of a physical channel. From the most significant bit down:

| field | bits | meaning |
|---|---|---|
| C | 1 | control bit: 1 for a header or tail flit, 0 for payload |
| X_ORI, Y_ORI | P each | coordinates of the router where the flit entered |
| H_ORI | 3 | port of that router (the sending core) |
| X_DST, Y_DST | P each | coordinates of the destination router |
| H_DST | 3 | port of the destination core on that router |
| DATA | D | payload word |

The width is 1 + 2(2P+3) + D bits. The mesh is 2^P x 2^P routers by default (K x K in general, see below). With the
default P=1 and D=32 a flit is 43 bits:
`[42]` C, `[41:37]` origin, `[36:32]` destination, `[31:0]` data.
(`rtl/noc_flit.svh` declares the flit as a packed struct.)

A packet is a header flit, any number of payload flits and a tail flit. Routers
never look at C or DATA. They do not know where packets begin or end, and they
route each flit by its destination alone. C and DATA belong to the cores.

Port codes (`noc_pkg::port_e`) run clockwise from north: NN=0, NE=1, EE=2, SE=3,
SS=4, SW=5, WW=6, NW=7. X grows towards east and Y towards north. Router
`r` of the mesh sits at x = r mod K, y = r div K (K = 2^P by default), so router 0 is the
south-west corner.

## The physical channel

Every connection point has two one-way channels:

* **Input channel**: `din` (the flit), `wr` (write strobe, from the sender),
  `wait_o` (from the receiver). A flit is transferred on a rising edge where
  `wr` is high and `wait_o` is low.
* **Output channel**: `dout`, `nd` ("new data": a flit is waiting), `rd` (read
  strobe, from the reader). The flit is taken on a rising edge where `rd` is
  high.

Two facing channels (router to router, or router to network interface) are
tied the same way everywhere:

```
din(receiver) = dout(sender)
wr(receiver)  = nd(sender)
rd(sender)    = nd(sender) & ~wait(receiver)
```

Both ends therefore agree on when a transfer happens. `wait_o` and `nd` are
computed inside their own block from that block's registers only. A
combinational path thus crosses at most one link, and it never loops around
the mesh, whatever the mesh size.

## Inside the router (`noc_router`)

Each input port has an **input interface** (the flit register), a **flow
controller** and a **routing controller**. Each output port has an **arbiter**
and an **output interface** (the output register). An **allocator** and an 8x8
**crossbar** join the two sides.

### One flit, cycle by cycle

With no contention:

| cycle | what happens |
|---|---|
| t | the sender drives `din` with `wr`; `wait_o` is low; the flit is stored at the end of the cycle |
| t+1 | the flow controller passes X_DST/Y_DST/H_DST to the routing controller; XY routing picks one output; that output's arbiter grants it if the output register is empty; the allocator sets the crossbar and strobes the output register; the input register's `wait_o` already drops, so the sender may write the next flit now |
| t+2 | `nd` is high on the chosen output with the flit on `dout` |

A flit thus crosses a router in **two clock cycles**. The reader takes it with
`rd` in cycle t+2 at the earliest. The output register is empty in cycle t+3, so
it can be granted again in t+3 and holds a new flit in t+4. **An output (and so a
link) carries at most one flit every two cycles.** One round of arbitration lasts
two cycles. If N flows share an output, each gets a flit every 2N cycles.

An input register can take a new flit in the very cycle its old flit is
granted, so a single input is never slower than the output it feeds.

### XY routing (`noc_routing_control`)

While the destination X differs from the router's X, the flit goes east (if
larger) or west. Then, while Y differs, it goes north (if larger) or south.
Once both match, it goes to port H_DST. Every pair of cores thus has exactly one
path, and flits between them arrive in the order they were sent. The routing
controller puts out a one-hot request over the eight outputs.

### The arbiter (`noc_arbiter_control`)

This is the part that decides latency. Each output has its own arbiter. It keeps
the eight inputs in a priority list, with entry 0 the highest:

1. When the output register is empty, the first input in the list that requests
   this output is granted.
2. A **local input** (a core port) that is granted moves to the tail of the
   list. It gets the output again only after every other input that was
   waiting has had a turn.
3. A **mesh input** (NN, EE, SS or WW, where that port really leads to another
   router) has a burst counter. While the counter is above zero, a grant only decrements it,
   and the input keeps its place. When a grant finds the counter at zero, the
   counter is reloaded and the input moves to the tail. A mesh input therefore
   sends `MESH_BURST + 1` flits in a row (2 by default) before others get a turn.
4. After reset the list is NN, SS, EE, WW, NE, SE, SW, NW, and every counter
   holds `MESH_BURST`.

Rule 3 gives traffic from distant routers priority over local traffic. Such a
flit has already competed at earlier routers, and it may carry several flows
interleaved on one link. On the edge of the mesh some straight ports hold
cores (WW and SS of router 0, for instance). The router parameter `MESH_MASK`
marks the ports that really are links, and `noc_top` sets it from each router's
position. An edge core is then arbitrated like any other core. Without the mask
it would get two turns for every one of its neighbours.

Example: NE, SE and SW stream flits to output NW, and nothing else is active.
The output carries NE, SE, SW, NE, SE, SW, ..., one flit every two cycles, so
each flow gets a flit every six cycles. If WW and NE both stream to one output,
the output carries WW, WW, NE, WW, WW, NE, ...

### Allocator and crossbar

Each arbiter sends a command: a valid bit and the number of the granted input.
In one cycle the allocator (`noc_allocator`) turns all eight commands into
crossbar selects and output-register loads. It also tells each input whether it
was granted and to which output; the flow controller turns that into the
release of the input register. The crossbar (`noc_crossbar`) is eight 8:1 flit
multiplexers with no clock. Since an input requests only one output at a time,
no input is ever sent to two outputs. An assertion checks this.

### Flow controller

`noc_flow_control` connects an input register to the rest of the router. It
forwards the destination fields of the stored flit and turns a grant into a
release. It also counts how many cycles the stored flit has waited. The router
puts this count out as `wait_cycles`; it is useful for measuring contention.

## The network interface (`noc_network_interface`)

Between a core and its router port sit:

* a **core adapter** (`noc_core_adapter`). It takes the core's control bit,
  destination address and data word, adds its own address as the origin, and
  writes the flit into the Output FIFO. In the other direction it shows the
  core the control bit, origin and data of the oldest received word;
* an **Output FIFO** (whole flits) and an **Input FIFO** (C, origin and data,
  without the destination). Both are `noc_fifo`, `B_SIZE` words deep. With
  `B_SIZE = 1` each is a single register;
* a **router adapter** (`noc_router_adapter`). It is the NI's side of the
  physical channel: `nd` is "Output FIFO not empty", `wait_o` is "Input FIFO
  full", and it strips the destination from arriving flits. A flit that arrives
  with another NI's address raises `misrouted` and fires an assertion.

The FIFOs' full and empty flags are the end-to-end flow control. A core sees
`core_full` and `core_empty`. A full Input FIFO holds the router's output
register, which in turn holds the flits behind it. The rule of thumb for the
depth is B_SIZE = ceil(T_core / T_net). T_core is the time the core takes to
write or read one word. T_net is the shortest network latency the core sees.

Core handshake: hold `core_wr` with the word; it is taken on a rising edge
where `core_full` is low. Read with `core_rd` while `core_empty` is low; the
word on `core_rx_*` is removed at that edge. A word written in cycle t is
offered to the router from t+1.

## The mesh (`noc_top`)

`noc_top` builds a K x K mesh (K = 2^P unless set) of routers. It ties their straight ports
together and puts a network interface on every port without a neighbour. The
core ports are arrays indexed `[router][port]`. Entries at ports that lead to a
neighbouring router are unused: inputs ignored, outputs zero, `core_empty` high.
A core addresses another core by `{X, Y, H}` of the target router and port. With
the default P=1:

| router | x, y | links | core ports |
|---|---|---|---|
| 0 | 0, 0 | NN to router 2, EE to router 1 | NE, SE, SS, SW, WW, NW |
| 1 | 1, 0 | NN to router 3, WW to router 0 | NE, EE, SE, SS, SW, NW |
| 2 | 0, 1 | SS to router 0, EE to router 3 | NN, NE, SE, SW, WW, NW |
| 3 | 1, 1 | SS to router 1, WW to router 2 | NN, NE, EE, SE, SW, NW |

`misrouted` is the OR of all NIs' misroute flags and should never rise.

### Five to eight channels

The router parameter `PORT_EN` (and the same parameter of `noc_top`) selects
which of the eight channels are built. A missing channel holds `wait_o` high,
never raises `nd`, and contains no logic. An assertion fires if a flit is ever
routed to it. `noc_top` always builds the ports that link to a neighbour. For
example, `PORT_EN = 8'b0101_0111` gives a five-channel router: NN, NE, EE, SS,
WW.

### Meshes that are not 2^P on a side

`noc_top` has a parameter `K`, the number of routers per side. It defaults to
2^P, and may be set lower. Coordinates stay P bits wide; only the values 0 to
K-1 are used. The five-channel comparison network is a 3x3 mesh, built with
`P=2`, `K=3` and `PORT_EN = 8'b0101_0111`. Its routers are numbered 0 to 8 row
by row from the south-west corner. A corner router has three free channels,
an edge router two and the centre router one, so it has 21 core ports.

## Latency bounds

Each link carries half a flit per cycle, as built. Take a packet of f flits
that crosses routers i = 1..H, with N_i flows competing for its output at router
i. Let k packets, this one included, share the bottleneck (all going to the same
destination). A worst-case bound is

```
W = sum_i 2·N_i + 2·k·(f-1) + 2·B
```

The first term is the header: at most one arbitration round of 2·N_i cycles at
each router. The second term is the remaining flits, one per round of k
packets. The last term covers up to B flits already queued in each of the two
network interfaces. All of these are known at design time: the paths are fixed
by XY routing, N_i and k by the topology, B by the parameters, and f by the
sender. (The published bound names k only "packets from other nodes". Counting
the packet itself in k is what the measurement below needs.) Mesh inputs may
take `MESH_BURST + 1` flits per turn, so count each of them that many times in
N_i.

`tb_noc_wcl` measures this on a 4x4 mesh (P=2). A 100-flit packet crosses four
routers, with two competing packets from the same router to the same
destination core:

| competing packets | latency of the 100-flit packet |
|---|---|
| none | 209 cycles (2 per flit plus the path) |
| 2 x 100 flits | 607 cycles |
| 2 x 400 flits | 607 cycles |
| 2 x 1600 flits | 607 cycles |

The bound for H=4, N_i=3, k=3, f=100, B=4 is 626 cycles. The latency roughly
triples under competition, and after that it does not depend on how long the
competitors are. That is the point of interleaving: a wormhole network would make
the packet wait for whole competing packets.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `P` | 1 | all | bits per X/Y coordinate; default mesh is 2^P x 2^P (1: 2x2) |
| `K` | 2^P | top | routers per side, at most 2^P (3 with P=2 gives the 3x3 comparison mesh) |
| `D` | 32 | all | data bits per flit |
| `B_SIZE` | 4 | `noc_network_interface`, `noc_top` | depth of each NI FIFO |
| `MESH_BURST` | 1 | `noc_arbiter_control`, `noc_router`, `noc_top` | reload value of a mesh input's burst counter; it sends MESH_BURST+1 flits per turn |
| `MESH_MASK` | `8'b0101_0101` | `noc_arbiter_control`, `noc_router` | ports that lead to other routers; `noc_top` computes it per router |
| `PORT_EN` | `8'hFF` | `noc_router`, `noc_top` | channels built (five to eight) |

P=1 (the 2x2 network with 24 cores) and D=32 are the configuration the
published design is built and measured in. The published cost figures also
cover D = 16 to 256 and P = 1 to 4. All of these are just parameter changes.
B_SIZE and MESH_BURST are not given as numbers and are choices of this RTL.

## Where this RTL departs from, or adds to, the published design

* **Single clock edge.** The published timing updates the arbiter on the falling
  clock edge. This RTL uses only the rising edge and keeps the two-cycle router
  latency. The price is the two-cycle occupancy of an output register (one flit
  per two cycles per link). The published latency analysis also counts 2 cycles
  per flit per flow, so the two agree there. The published text also expects a
  throughput of one flit per cycle. With this timing a single link does not
  reach that; a router as a whole does, when its eight outputs are busy.
* **Arbiter details.** The published arbiter gives high initial priority to the
  four mesh inputs, moves a granted input to the lowest priority and lets mesh
  inputs send several flits per grant using counters. It does not give the
  counter value, which "depends on the number of requests" upstream, nor the
  order among equal inputs. Here the value is a fixed parameter (`MESH_BURST`).
  The order is NN, SS, EE, WW, NE, SE, SW, NW.
* **Routing test.** The published XY algorithm tests X twice in its first line;
  it is read as "X and Y both match".
* **Port codes, bit order, handshake polarity and reset** (synchronous, active
  low `rst_n`) are choices of this RTL. So are the link rule above and the core
  handshake.
* **Edge ports.** Straight ports that hold cores on the mesh edge do not get
  the mesh-input privilege (`MESH_MASK`). The published design does not
  discuss edge routers.
* **Leaving out channels** (`PORT_EN`) is done by not building them. How the
  published design removes channels is not described.
* **Mesh shape.** Only square meshes (K x K) are generated.
* **Packet length.** In the published design the NI buffers limit a packet to a
  maximum length set at design time. Here the NI does not look at packets at
  all, and any length passes. The FIFOs hold `B_SIZE` flits, and a longer
  packet simply streams through them.
* **Additions**: the flow controller's wait counter, the router adapter's
  misroute flag, and assertions on every handshake (no load into a full output
  register, no read of an empty one, no grant without a request, FIFO
  overflow/underflow, one output per input).

## Simulating

Every file in `rtl/` holds one module, one package or one include file. `tb/`
has a self-checking testbench per block. Each testbench prints one line
`TB_RESULT checks=N failures=M` and ends. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/noc_pkg.sv tb/tb_noc_top.sv --top-module tb_noc_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_noc_top` with any other testbench name.

| testbench | what it shows |
|---|---|
| `tb_noc_input_interface` | register, WR/WAIT handshake against a cycle model |
| `tb_noc_flow_control` | field extraction, release, wait counter |
| `tb_noc_routing_control` | every source/destination of a 4x4 mesh against the XY rule |
| `tb_noc_arbiter_control` | priority list and burst counters against a reference model; first grants after reset; bursts |
| `tb_noc_allocator` | selects, loads and per-input grants for random command sets |
| `tb_noc_crossbar` | random selects |
| `tb_noc_output_interface` | ND/RD/free timing against a model |
| `tb_noc_fifo` | 4-deep and 1-deep FIFO against a queue model, full reached |
| `tb_noc_router_adapter`, `tb_noc_core_adapter` | flit assembly and destination removal, flags |
| `tb_noc_network_interface` | both directions, order, ND one cycle after a write, both FIFOs filling |
| `tb_noc_router` | two-cycle latency; a five-channel router; three flows interleaved at one flit per 2 cycles (each flow every 6); mesh burst of MESH_BURST+1; random traffic on all 8 inputs checked per input/output pair |
| `tb_noc_sizes` | the router at all 20 sizes of the published cost tables (D = 16 to 256, P = 1 to 4): each flit on its XY output after exactly two cycles |
| `tb_noc_wcl` | the latency workload above on a 4x4 mesh: uncontended latency, about three times that with two competitors, no dependence on their length, the bound |
| `tb_noc_mesh3` | the 3x3 mesh of five-channel routers (P=2, K=3) with one-word NI buffers (B_SIZE=1), with the same traffic and checks as `tb_noc_top`; the left-out channels never carry a flit |
| `tb_noc_top` | the whole default network (4 routers, 24 cores): 960 packets of 2 to 8 flits to random cores, including the sender's own router. It checks data, origin and order between every pair of cores. It also counts, and requires, input stalls, full NI FIFOs on both sides, interleaving on router outputs, mesh bursts and every XY direction |

The end-to-end test runs the network at its default parameters and takes well
under a minute.
