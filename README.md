# D2D-MoT: a 4x4 Diametrical Mesh-of-Tree network-on-chip

A mesh of trees (MoT) joins a grid of leaf routers with binary trees. Every row of the
grid has a tree, and so does every column, and the leaves are shared by both. A packet
climbs a row tree to reach the right column, then a column tree to reach the right row.
This is simple and deadlock-free, but paths are long: corner to corner is 8 links in a
4x4 MoT. The Diametrical 2D Mesh-of-Tree (D2D-MoT) adds ten shortcut links to a 4x4
MoT:

* **diagonal links**: the grid is cut into four 2x2 modules, and in each module every
  leaf is linked to the leaf diagonally opposite (8 links);
* **diametrical root links**: the roots of the two inner rows are linked to each other,
  and so are the roots of the two inner columns (2 links).

This RTL builds that network for 32 IP cores, two per leaf router. It has 40 wormhole
routers, 116 one-way pipelined links (58 bidirectional links) and 32 network interfaces.
Routing is deterministic and shortest-path, and it is deadlock-free.

## The topology

```
 leaf grid L(r,c)                   trees over it
                                                      RR0 (row 0 root, external)
  L00 L01 | L02 L03                 RS(0,0)  RS(0,1)   row 0 stems
  L10 L11 | L12 L13                 RS(1,0)  RS(1,1)   row 1 stems -> RR1 (internal)
  --------+--------                                                 |  diametrical
  L20 L21 | L22 L23                 RS(2,0)  RS(2,1)   row 2 stems -> RR2 (internal)
  L30 L31 | L32 L33                 RS(3,0)  RS(3,1)   row 3 stems -> RR3 (external)

  diagonals in module (0,0):  L00-L11, L01-L10   (same in the other three modules)
  columns likewise: CS(c,h) stems, roots CR0..CR3, CR1-CR2 diametrical
```

| level       | count | ports | connected to                                             |
|-------------|-------|-------|----------------------------------------------------------|
| leaf        | 16    | 5     | core 0, core 1, row stem, column stem, diagonal leaf     |
| stem        | 16    | 3     | two leaves of one row (or column) half, its root         |
| internal root | 4   | 3     | its two stems, the opposite internal root                |
| external root | 4   | 2     | its two stems                                            |

Link count: 32 leaf–stem, 16 stem–root, 8 diagonal and 2 root–root, 58 in all. Router
count: 16 + 16 + 8 = 40.

The routers are numbered as follows: leaf `4r+c` (0–15), row stem `16+2r+h`, column
stem `24+2c+h`, row root `32+r`, column root `36+c`. The row stem with `h = 0` serves
columns 0–1, and the one with `h = 1` serves columns 2–3. Column stems split the rows
the same way. The functions `peer_node(n,p)` and `peer_port(n,p)` in `d2d_pkg` give the
neighbour behind each port. The top level generates all wiring from them, so the
topology is written down in one place.

The shortcut links shorten paths. Between leaves, the longest shortest path drops from
8 links (plain 4x4 MoT) to 7, and the average over all leaf pairs drops from 5.33 to
4.23 links. Both figures come from a breadth-first search over this topology. The
original description claims a diameter reduction of about 50%. That figure does not
follow from the topology as built here.

## Addresses and packets

A core has a 5-bit address `{row[1:0], col[1:0], core}`. The leaf is `4*row + col` and
`core` selects which of the leaf's two cores. The top numbers core `k` by the same
five bits, so core `k` sits on leaf `k/2`, port `k%2`.

A packet has `PKT_FLITS` flits (default 4): `HEAD, BODY, ..., TAIL`, or one `SINGLE`
flit. Every flit is 49 bits (`d2d_pkg::flit_t`):

| field | bits | meaning                                            |
|-------|------|----------------------------------------------------|
| kind  | 2    | head / body / tail / single                        |
| dest  | 5    | destination core                                   |
| src   | 5    | source core                                        |
| hops  | 4    | routers crossed so far (each router adds 1)        |
| data  | 32   | payload word                                       |

Every flit carries the header, for simplicity and to make tracing easy. Only the head
flit is routed. The hop count arrives at the receiving core with the packet. It equals
the number of routers crossed, i.e. the shortest-path link count plus one.

## Routing

Each router holds a 16-entry look-up table (`d2d_route`), indexed by the destination
leaf, that gives the output port. At the destination leaf, the core bit picks port 0
or 1. The table is not stored data. It is computed during elaboration by constant
functions in `d2d_pkg`:

1. `hop_distance(a,b)` runs a breadth-first search over the 40 routers;
2. `route_port(n,d)` takes the first port, in a fixed preference order, whose neighbour
   is one hop closer to leaf `d`. At a leaf the order is diagonal, row stem, column
   stem. At a stem or root the order is up (root, or the diametrical link at a root),
   then the children;
3. `build_lut(n)` fills the table of router `n`.

This is a shortest-path form of the prose algorithm of the original description.
Packets in the same row use the row tree. Packets in the same column use the column
tree. Other packets take the diagonal or diametrical channel when it is on a shortest
path. At the destination leaf the core ID decides. Example: from L00 to L33 the route
is L00 → L11 (diagonal) → RS(1,0) → RR1 → RR2 (diametrical) → RS(2,1) → L22 → L33
(diagonal), which is 7 links instead of 8 in the plain MoT.

**Deadlock.** With these tables, the channel dependency graph over all 240
leaf-to-leaf routes has no cycle. Its nodes are the 116 link directions plus the
ejection ports, which are sinks. `tb_d2d_route` builds this graph from the tables and
checks it by topological sort. Wormhole switching with one virtual channel is therefore
deadlock-free on this network, and shortest paths exclude livelock. If you change the
preference order or the topology, rerun that test.

## The router (`d2d_router`)

One module serves all four router kinds. `NODE` sets the number of ports and the
table contents. The port arrays are always 5 wide, and ports above the router's count
are tied off.

* **Input buffer**: a `d2d_fifo` of `BUF_DEPTH` (4) flits per port. `in_ready` is its
  registered not-full flag.
* **Route**: the head flit at the front of each buffer looks up its output port. The
  port is latched when the head leaves and is reused for the body and tail flits.
* **Arbitration and wormhole lock**: each output has a round-robin `d2d_arbiter` over
  the inputs whose front flit is a head wanting that output. When a head flit is sent,
  the output is locked to its input until the tail flit passes. Packets therefore never
  interleave on a link or at a core.
* **Crossbar**: a multiplexer per output, which also increments the hop count.

Timing: a flit written into an input buffer at clock edge *t* is presented at the output
right after edge *t*. So a router costs one cycle. An output moves one flit per cycle.

## Links (`d2d_link`) and network interfaces (`d2d_ni`)

Each router-to-router direction is a `d2d_link` of `LINK_STAGES` (1) stages. Each
stage is a 2-entry FIFO, which registers data and ready and keeps full throughput. A
stage costs one cycle. All 116 link directions are built alike, the long diametrical
links included.

The network interface turns a core transaction (destination plus `PKT_FLITS` 32-bit
words, valid/ready) into a packet. The head leaves in the cycle after acceptance and
one flit follows per cycle. The next transaction is taken after the tail has left. On
the receive side, flits are collected until the tail. Then source, words and hop count
are offered to the core, and the interface holds off the network until the core takes
them. Assertions check that only packets for this core arrive, head first and tail
last.

## End-to-end timing

With no contention, a packet that crosses *h* routers is delivered to the receiving
core `2h + PKT_FLITS - 1` cycles after the sending interface accepted it. Each router
adds 1 cycle and each link 1; the interface registers add the rest. Between two cores
of the same leaf, *h* = 1 and the latency is 5 cycles. The longest route, *h* = 8, takes
19 cycles.

## Top level (`d2d_mot_noc`)

Parameters: `PKT_FLITS = 4`, `BUF_DEPTH = 4`, `LINK_STAGES = 1`. The topology size
(4x4, 32 cores) is fixed: the shortcut links are only defined for this size. Ports are
arrays indexed by core number:

| port                  | dir | width            |
|-----------------------|-----|------------------|
| `tx_valid/tx_ready`   | in/out | `[32]`        |
| `tx_dest`             | in  | `[32]` x 5       |
| `tx_data`             | in  | `[32][PKT_FLITS]` x 32 |
| `rx_valid/rx_ready`   | out/in | `[32]`        |
| `rx_src`              | out | `[32]` x 5       |
| `rx_data`             | out | `[32][PKT_FLITS]` x 32 |
| `rx_hops`             | out | `[32]` x 4       |

The IP cores themselves are outside this design. After coarse synthesis the network has
about 11.7k flip-flop bits, plus 38.4k bits in buffer memories.

## Where this design departs from, or fills in, the original description

* The original gives the topology, the node degrees and counts, and a prose routing
  algorithm. It does not describe the router, the network interface, flit format,
  buffer depth, flow control or link timing. All of those are this design's own
  choices: wormhole, valid/ready, 4-flit buffers, 49-bit flits, 1-stage links.
* Its addressing scheme (row number, column level, column number, row level) is left
  out there. This design uses a 5-bit core address instead.
* One sentence places the IP cores at the root routers. The node degrees, the core
  count (32 = 2 x 16) and the routing algorithm's last step ("route to core 1 / core 2")
  place them at the leaves, two per leaf. The leaves were followed.
* Its routing step for packets in the same column says "row parent ... row child having
  equal RN". This design uses the column tree, as the plain MoT algorithm does.
* Its node-count formula `3*(m*n)(m+n)` does not give the stated 40. The count 40
  (16 + 16 + 8) was followed.
* The claimed ~50% diameter reduction is not reached by this topology (8 → 7 links,
  see above).
* The routing table lives in each router. It is not a source-route table in the
  network interface.
* The evaluation covers networks of 18, 32, 50 and 72 cores (3x3 to 6x6 leaves). Only
  the 32-core network is built. The diagonal modules and the pairing of internal roots
  are only defined for the 4x4 grid.

## Simulating

Every file has one module or package; `rtl/d2d_pkg.sv` must be read first. For the
whole network:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/d2d_pkg.sv rtl/d2d_fifo.sv rtl/d2d_arbiter.sv rtl/d2d_route.sv \
  rtl/d2d_router.sv rtl/d2d_link.sv rtl/d2d_ni.sv rtl/d2d_mot_noc.sv \
  tb/tb_d2d_mot_noc.sv --top-module tb_d2d_mot_noc
./obj_dir/Vtb_d2d_mot_noc
```

The unit testbenches are built the same way from the files they use. `tb_d2d_route`
and `tb_d2d_router` also need `tb/tb_topo_pkg.sv`, and `tb_d2d_router` needs
`tb/tb_router_harness.sv`. Every testbench ends with a line
`TB_RESULT checks=N failures=M`.

| testbench          | what it checks |
|--------------------|----------------|
| `tb_d2d_fifo`      | random push/pop against a queue model; full refuses a write |
| `tb_d2d_arbiter`   | round-robin order against a model; rotation under full load |
| `tb_d2d_route`     | all 40 tables: every step gets one hop closer, preference order, every route has shortest length, acyclic channel dependencies |
| `tb_d2d_router`    | leaf, stem, internal root and external root routers, traffic on every port, back-pressure: correct port, no interleaving, order, hop count, 1-cycle latency, contention occurs (via `tb_router_harness`) |
| `tb_d2d_link`      | order under random stalls; 1 flit/cycle, 1-cycle latency |
| `tb_d2d_ni`        | flit sequence and header on transmit, reassembly and back-pressure on receive, packet takes `PKT_FLITS` cycles |
| `tb_d2d_mot_noc`   | full network at default parameters, described below |

`tb_d2d_mot_noc` builds its own edge list of the topology. It checks the link count
(58) and the node degrees. Then it sends every one of the 1024 core pairs a packet in
isolation and checks data, source, hop count (= shortest path + 1) and latency
(`2h + PKT_FLITS - 1`). Next it runs an all-to-all exchange: 992 packets, shuffled
order, receivers ready 60% of the time. Last it runs a hot spot: 31 cores to core 0. It
counts use of the diagonal links, diametrical links, row and column trees, both core
ports, link stalls, receive back-pressure and output contention, and fails if any of
them never happens. The all-to-all exchange of 32 cores completes in about 460 cycles.
`tb_topo_pkg` is the testbenches' own model of the topology, written independently of
`d2d_pkg`.

## Changing it

* Packet length, buffer depth and link stages are top-level parameters. Wormhole
  switching does not need a whole packet to fit in a buffer. The end-to-end
  testbench's latency formula assumes one link stage; each further stage adds one cycle
  per link.
* The routing preference is the `order` array in `d2d_pkg::route_port`. After changing
  it, repeat the deadlock check described under Routing.
* Another topology needs new `num_ports`, `peer_node` and numbering in `d2d_pkg`, plus a
  wider hop counter if paths grow past 15 routers. The router, route unit and top
  follow from those functions.
