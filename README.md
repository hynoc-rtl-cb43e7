# HyNoC: a source-routed, circuit-switched wormhole network-on-chip

HyNoC connects processing nodes through routers that have no routing tables and no
virtual channels. The sender writes the whole route into the packet as a list of
small *relative* hop codes. Each router reads its own hop, opens a path from the
ingress port to the chosen egress port, and passes the rest of the packet through
that path flit by flit until it sees the stop bit. Once a path is open it belongs to
that packet, so payload flits never compete for a link again on the way. A path
therefore costs a fixed number of cycles per hop to set up, and after that the
network streams one flit per cycle. The only buffer is a small FIFO at each router
ingress.

Three consequences follow from that idea:

* Latency has no load-dependent term once the path is open:
  `L = alpha * H + P - 1` cycles for `H` hops and `P` payload flits.
* Deadlock freedom comes from the routes the sender chooses, not from the router.
  Dimension-ordered (X then Y) routes on a mesh are deadlock-free.
* The router stays small: a crossbar without loopback, one arbiter per egress
  port, and one FIFO per ingress port.

This repository holds synthesizable SystemVerilog for the routers, their arbiter and
FIFOs, a node attachment, and a 4 x 4 mesh top level. It also holds self-checking
testbenches, including end-to-end workloads on the full-size mesh.

## 1. Flits and packets

A flit is `PAYLOAD_WIDTH + 1` bits wide (33 by default). The MSB is the **stop
bit**, which marks the last flit of a packet. A packet has three parts:

1. one or more **routing flits** (stop bit 0);
2. any number of payload flits;
3. a last flit with the stop bit set.

There is no length field. A packet can be as long as the sender likes, because
flow control is per flit.

### 1.1 The routing flit

The routing flit layout, MSB first, for a 5-port, 32-bit router:

```
 32   31..28   27 ........................... 4   3..0
stop  proto    [gap] hop[H-1] ... hop[1] hop[0]   index
```

* **proto** gives the routing method:

  | code   | method                                               |
  |--------|------------------------------------------------------|
  | `0000` | unicast                                              |
  | `0001` | multicast                                            |
  | `1000` | XY routing: reserved; the packet is dropped          |
  | `1111` | forbidden; the packet is dropped                     |

* **hop fields** fill the `PAYLOAD_WIDTH - 4 - INDEX_WIDTH` bits between proto and
  index, packed from bit `INDEX_WIDTH` upwards. Hop `k` sits at bits
  `INDEX_WIDTH + k*b` and above, where `b` is the width of one hop.
* **index** points at the hop that the *next* router must use. The sender sets it to
  `H-1`, so the first router uses the highest hop.

When a router has used hop `index`, it does one of two things:

* If `index` is not 0, it forwards the routing flit with `index - 1`.
* If `index` is 0, it consumes the routing flit, which is not forwarded. The next
  flit then reaches the next router first. If that flit is another routing flit, it
  routes the rest of the journey. This is how routes longer than one flit can carry
  are built, and how multicast trees are chained.

### 1.2 Relative hops

A packet cannot leave through the port it came in on, so a router with `N` ports
only needs `N-1` hop values. A hop is therefore `ceil(log2(N-1))` bits wide. The
hop is **relative to the ingress port**: hop `h` on ingress `i` leaves through port
`(i + 1 + h) mod N`. Counting starts with the port after the ingress and never
returns to the ingress.

This encoding works only when `N - 1` is a power of two, so the valid port counts
are **3, 5 and 9** (hops of 1, 2 and 3 bits). Elaboration stops with an error for
any other value.

With the default `PAYLOAD_WIDTH=32` and `INDEX_WIDTH=4`, there are 24 hop bits:

| router | unicast bits/hop | unicast max hops | multicast bits/hop | multicast max hops |
|--------|-----------------:|-----------------:|-------------------:|-------------------:|
| 3-port | 1 | 24 (16 reachable, see §8) | 2 | 12 |
| 5-port | 2 | 12 | 4 | 6 |
| 9-port | 3 | 8  | 8 | 3 |

In the mesh, ports are numbered 0 = Local, 1 = East, 2 = South, 3 = West,
4 = North. The hop codes of a 5-port mesh router are:

| entered on | hop 0 | hop 1 | hop 2 | hop 3 |
|------------|-------|-------|-------|-------|
| Local      | East  | South | West  | North |
| East       | South | West  | North | Local |
| South      | West  | North | Local | East  |
| West       | North | Local | East  | South |
| North      | Local | East  | South | West  |

Example: a route from node (0,0) to node (2,3) goes East, East, East, South, South,
then Local. The hops are computed one router at a time:

* The first router is entered on Local, so East is hop 0. The next two routers are
  entered on West, so East is hop 2 for each of them.
* South is then hop 3, entered on West.
* The second South is hop 2, entered on North.
* Local is hop 0, entered on North.

The hop list is therefore `0,2,2,3,2,0` with H = 6 and index = 5.

### 1.3 Multicast

In a multicast routing flit, each hop field is a mask of `N-1` bits. Bit `h` selects
relative hop `h`. The ingress requests every selected egress and sends each flit to
all of them at the same time.

Later routing flits reach every branch unchanged. A branch whose destination has
already been reached receives them as payload. The testbench of the mesh uses this
pattern, with a unicast flit, then a multicast flit, then a unicast flit, to fan one
packet out to two nodes.

## 2. Inside a router

`hynoc_router_base` holds `N` ingress ports, `N` egress ports and a full crossbar
without loopback paths. Ingress `p` has `N-1` request, data and write wires, one to
each egress `(p+1+h) mod N`. Each egress has `N-1` grant and almost-full wires back,
one to each ingress. Every control wire connects exactly one ingress to one egress;
nothing is broadcast. `hynoc_router_3p` and `hynoc_router_5p` are the same router
with named `portX_*` signals.

### 2.1 Ingress port (`hynoc_ingress`): the hard part

The ingress port has two halves: an input FIFO and a four-state controller.

* **The FIFO.** In the default mode it is `dclkfifolut`. Its write side runs on the
  upstream port clock and its read side on the router clock. With
  `SINGLE_CLOCK_ROUTER=1` it is `sclkfifolut`.
* **The controller.** It reads the FIFO head directly (first-word fall-through) and
  has four states:

| state   | what happens |
|---------|--------------|
| IDLE    | The head flit is a routing flit. The controller decodes proto, index and hop, and turns the relative hop into a one-hot request over the `N-1` egress ports (a mask for multicast). A malformed routing flit sends it to FLUSH instead. |
| REQUEST | The requests are held. When every needed grant has arrived and no granted egress is almost full, it pops the routing flit. If `index != 0` it sends the flit on with the index counted down. If `index == 0` it drops the flit. |
| STREAM  | It pops one flit per cycle whenever the FIFO is not empty and no granted egress is almost full. The flit goes to all granted egress ports. The flit with the stop bit releases the requests and returns to IDLE. |
| FLUSH   | It drops flits up to and including the stop bit. |

A packet is dropped (FLUSH) in these cases:

* proto is XY, forbidden or any unknown code;
* proto is multicast while `ENABLE_MCAST_ROUTING=0`;
* the multicast mask is empty;
* the index points past the hop area;
* the routing flit itself has the stop bit set.

The outputs to the egress ports (request, write, data) are registered. A grant
counts only on its rising edge while the request is held, so a grant left over from
the previous packet cannot be taken for a new one.

**Multicast and deadlock.** Two multicast packets in the same router could each hold
some of the egress ports the other needs, and both would wait forever. To prevent
this, a multicast ingress acquires its egress ports **one at a time in a fixed
global order**: increasing physical port number, starting after its own port. It
requests the next port only after the previous one is granted. Because every
ingress uses the same order, no cycle of waiting can form. A 9-port test with random
concurrent multicast shows this working. Unicast needs only one egress port and is
not affected.

### 2.2 Egress port (`hynoc_egress`)

The egress port has three parts:

* **An arbiter.** A PRRA (§3) arbitrates over the `N-1` requests.
* **A mux.** The registered grant selects which ingress drives the egress. The
  egress then registers the write strobe and data of the granted ingress and sends
  them to the downstream FIFO.
* **A returned almost-full bit.** The downstream FIFO reports its number of **free**
  entries. When that number is `AFULL_LEVEL` (5) or less, the egress sends a
  registered almost-full bit back to the granted ingress only.

From an idle egress, a request is granted in 2 cycles: one for the PRRA and one for
the registered grant output.

**Why 5 free entries are enough.** The almost-full bit arrives late because of
several registers on the loop:

* the level register of the link;
* the almost-full register of the egress;
* the decision register of the ingress;
* the data registers of the ingress and the egress;
* the link data register.

In the worst case, 6 more flits land after the FIFO reports 5 free entries. That
is the 5 free entries plus the one being read. The FIFO overflow assertions never
fire in any test under heavy back-pressure. If you add pipeline stages on a link,
raise `AFULL_LEVEL` by one per added stage.

## 3. Parallel round-robin arbiter (`prra`, `prra_lut`)

A round-robin arbiter that scans requests one by one can take up to `N-1` cycles to
reach a waiting port. The PRRA removes the scan. It keeps one combinational table
per priority state, `N-1` tables in all. Each table gives the next winner for every
request vector, and the current state selects which table's answer is used.

The table for state `s` scans ports `s+1, s+2, ...` (wrapping around) and picks the
first one that requests. If nothing requests, it stays at `s`. For 4 requesters and
state 0 the table reads:

```
req  : 0 1 2 3 4 5 6 7 8 9 A B C D E F
next : 0 0 1 1 2 2 1 1 3 3 1 1 2 2 1 1
```

The tables are computed at elaboration by a constant function, so any width works.

The state and the one-hot grant register change only when the granted request has
dropped: `~|(grant & req)`. As a result:

* a grant is held for the whole packet;
* the arbiter moves on as soon as that packet ends;
* with no requests, the grant is all zero.

Two settings:

* `PIPELINE=0`: the grant follows the requests after one clock.
* `PIPELINE=1`: the requests and the table outputs are registered first, which adds
  one cycle.

Because the priority rotates to the port after the one just served, every requester
is served within `N-1` packets.

## 4. Clocks and FIFOs

Each ingress FIFO sits between two clocks: the clock of the port that feeds it and
the router clock.

* `dclkfifolut` is a gray-code FIFO. Each side registers its gray pointer, and the
  other side samples it through `SYNC_STAGES` (2) flip-flops.
* `sclkfifolut` has plain binary pointers.

Both FIFOs have an asynchronous read port (LUT RAM, first-word fall-through), so no
block RAM is used. Both report free entries to the writer and stored entries to the
reader, each `LOG2_DEPTH+1` bits wide. The levels of the dual-clock FIFO are
conservative, because each is computed against the synchronised and therefore older
copy of the other pointer.

A word written into `dclkfifolut` becomes readable **3 read-clock cycles later**
than in `sclkfifolut`: one cycle for the gray register and two for the synchroniser.
That is the whole per-hop difference between the two router modes.

Resets are synchronous and active high, one per clock domain. Assert all of them
together, for a few cycles of the slowest clock.

## 5. Latency

The route setup passes through the same registers at every hop. Measured on the
4 x 4 mesh, return path, `P = 2`:

| H | dual-clock | single-clock |
|--:|-----------:|-------------:|
| 2 | 25 | 16 |
| 3 | 35 | 23 |
| 4 | 45 | 30 |
| 5 | 55 | 37 |
| 6 | 65 | 44 |
| 7 | 75 | 51 |

This gives `L = 10 H + 5` in dual-clock mode and `L = 7 H + 2` in single-clock mode.
Each result is exactly linear and the same on every run. The dual-clock mode costs 3
cycles more per hop.

The measurement runs from the cycle the node's first flit is accepted to the cycle
the master node takes the last flit. That span includes the receive FIFO of the
local interface.

The published evaluation reports `12 H + P - 1` and `9 H + P - 1`. It has the same
3-cycle difference between modes, but a per-hop cost 2 cycles higher. This RTL
therefore agrees with the published structure and linearity, but not with the
absolute per-hop constant. The register stages that make up the published constant
are not described in enough detail to match them one for one.

Once the path is open, every payload flit adds one cycle. The tests check this: a
packet with 4 more flits arrives exactly 4 cycles later.

## 6. Attaching nodes: `hynoc_local_interface`

A node talks to its router port with an AXI-Stream style handshake:

* `tvalid` means write;
* `tready` means not full;
* `tdata` carries the payload bits;
* `tlast` is the stop bit.

A `fifo_level` sideband reports the number of free or stored entries.

The two directions differ:

* **Node to network.** The node writes straight into the router port's ingress FIFO.
  The write side of that FIFO runs on the node's clock, so no second FIFO is needed.
* **Network to node.** The router egress writes into an extra FIFO inside the local
  interface. It is dual-clock unless `SINGLE_CLOCK_ROUTER=1`, and the node reads it
  at its own pace. The router sees this FIFO's free level exactly as it would see a
  neighbour router's ingress FIFO, so one flow-control rule covers every port.

## 7. The mesh top level: `hynoc_mesh`

`hynoc_mesh` builds a `ROWS x COLS` grid (4 x 4 by default) of 5-port routers:

* Every router has a local interface on port 0.
* East links to West and South links to North.
* Each router-to-router direction has one register stage (`LINK_REG=1`) on the flit,
  its write strobe and the returned level.
* Boundary ports are left open: nothing enters them, and their egress sees an empty
  sink.
* All routers share `router_clk`; every node has its own `node_clk[n]`.

The node index is `n = r*COLS + c`.

The node-side signals are unpacked arrays indexed by node (`s_*` for node to
network, `m_*` for network to node). A node sends a packet by writing a routing flit
(the stop bit is 0, so `tlast=0`), then its payload with `tlast` on the last word. It
receives only the payload, because the last router has consumed the routing flits.

Routes must be deadlock-free as a set. Dimension-ordered routes (all X moves, then
all Y moves, then Local) are the simple choice.

### Parameters

| parameter | default | meaning |
|-----------|--------:|---------|
| `PAYLOAD_WIDTH` | 32 | payload bits per flit (the flit is one bit wider) |
| `LOG2_FIFO_DEPTH` | 5 | 32-entry FIFOs at every ingress and in every local interface |
| `NB_PORTS` | 5 | router ports: 3, 5 or 9 only (`hynoc_router_base`) |
| `INDEX_WIDTH` | 4 | width of the routing-flit index |
| `ENABLE_MCAST_ROUTING` | 1 | build multicast decode; when 0, multicast packets are dropped |
| `SINGLE_CLOCK_ROUTER` | 0 | 0: dual-clock FIFOs at ingress and local receive; 1: single-clock |
| `PRRA_PIPELINE` | 0 | 1 adds a register stage in every arbiter (grant one cycle later) |
| `AFULL_LEVEL` | 5 | free-entry threshold of the almost-full feedback |
| `LINK_REG` | 1 | register stage on mesh links (0 = plain wires) |
| `ROWS`, `COLS` | 4, 4 | mesh size |

## 8. Where this RTL departs from, or fills in, the published description

* **Free entries, not occupancy.** The FIFO level that flows back to an egress is
  the number of **free** entries. The published arbiter diagram tests "level ≤ 5"
  to raise almost-full. The prose calls the sideband an occupancy, but an occupancy
  test would stall on an empty FIFO.
* **Hop area size.** The hop area is `PAYLOAD_WIDTH - 4 - INDEX_WIDTH` bits, which
  matches the published hop-count table. The published formula is one bit larger,
  which would give 25 hops for the 3-port router.
* **Index range.** A 4-bit index can address only 16 hops. For the 3-port router,
  only 16 of the 24 hop fields are usable.
* **Port counts.** Only 3, 5 and 9 ports elaborate. A 7-port router appears in
  published synthesis results, but relative hops cannot encode it.
* **Widths.** The flit is `K+1` bits and the levels are `LOG2_DEPTH+1` bits.
  One diagram labels them `K+2` and `D`. The arbiter state is `ceil(log2(N-1))`
  bits, as in the published arbiter table.
* **Port numbering.** The mesh uses 0 = Local, 1 = East, 2 = South, 3 = West,
  4 = North. One overview drawing numbers the ports differently.
* **Choices made here where the published description is silent:**
  * the multicast acquisition order (§2.1);
  * the flush conditions other than XY;
  * the synchroniser depth;
  * synchronous resets;
  * boundary sinks;
  * first-word fall-through FIFOs.
* **Latency constant.** The per-hop latency is 10 cycles (dual-clock) and 7 cycles
  (single-clock), against 12 and 9 published. §5 explains why.
* **Not provided:**
  * the processing nodes, which the testbenches model;
  * the XY protocol code, which is reserved and drops the packet, as published.

## 9. Files

| file | contents |
|------|----------|
| `rtl/hynoc_pkg.sv` | protocol codes, hop-width and hop-mapping functions |
| `rtl/sclkfifolut.sv`, `rtl/dclkfifolut.sv` | single- and dual-clock LUT-RAM FIFOs |
| `rtl/prra_lut.sv`, `rtl/prra.sv` | round-robin table and parallel arbiter |
| `rtl/hynoc_ingress.sv`, `rtl/hynoc_egress.sv` | router ports |
| `rtl/hynoc_router_base.sv` | N-port router |
| `rtl/hynoc_router_3p.sv`, `rtl/hynoc_router_5p.sv` | routers with named port groups |
| `rtl/hynoc_local_interface.sv` | node attachment |
| `rtl/hynoc_mesh.sv` | 4 x 4 mesh top level |
| `tb/hynoc_stream_writer.sv`, `tb/hynoc_stream_reader.sv` | testbench-only packet generator and checker |

## 10. Verification

Every module has a self-checking testbench in `tb/`. Each one does three things:

* it compares outputs against a model written inside the testbench;
* it has a watchdog;
* it ends with the line `TB_RESULT checks=N failures=M`.

The testbenches:

| testbench | what it shows |
|-----------|---------------|
| `sclkfifolut_tb`, `dclkfifolut_tb` | data order, levels, full and empty flags, under random traffic. `dclkfifolut_tb` also checks the exact crossing latency and runs with unrelated clocks. |
| `prra_lut_tb` | the printed 4-input table for every offset, plus an 8-input scan model |
| `prra_tb` | grant against a reference model, with and without the pipeline stage; grant holding; starvation bound |
| `hynoc_ingress_tb` | routing flit forwarded with index−1 or consumed; every flush case; multicast; stalls on almost-full |
| `hynoc_ingress_nomcast_tb` | a port built without multicast drops every multicast packet whole and delivers the unicast packets around them unchanged, next to a port built with multicast |
| `hynoc_egress_tb` | 2-cycle grant; no interleaving of packets; almost-full rule; no downstream overflow |
| `hynoc_router_3p_tb`, `hynoc_router_5p_tb`, `hynoc_router_base_tb` (9 ports) | random unicast and multicast packets from every port at once, each delivered intact and in order, with slow sinks |
| `hynoc_router_3p_pair_tb` | two 3-port routers joined on port 0, four nodes: random unicast within and across routers, plus multicast to both nodes of the other router (a routing flit chain: unicast at the first router, mask `11` at the second). Built from the testbench models `hynoc_stream_writer` / `hynoc_stream_reader`. Every packet must arrive at exactly its readers, intact and in order. |
| `hynoc_local_interface_tb` | both directions across unrelated clocks, with back-pressure |
| `hynoc_mesh_tb` | full-size 4 x 4 mesh at default parameters, described below |
| `hynoc_mesh_sclk_tb` | the same with single-clock routers (7 cycles per hop) |
| `hynoc_mesh_llama_tb` | one output row per worker of a 4096-input layer, described below |

`hynoc_mesh_tb` runs five phases on the full-size mesh:

* a distributed 16 x 4 matrix-vector product: 10-flit requests, 3-flit replies,
  all 16 results checked, and the flits on every row-0 and column-0 link checked
  against the load the routes imply;
* the per-hop latency fit of §5;
* a chained multicast;
* a dropped XY packet;
* a random all-to-all stress run with slow readers.

It counts each mechanism and fails if any of them never happens: forwarding,
consumption, almost-full stalls, arbitration contention, multicast and flush.

`hynoc_mesh_llama_tb` uses packets of 3201 payload flits: 128 blocks of (scale + 8
packed int8 flits) plus 2048 packed 16-bit activations. It runs the rows first from
one master, then from four corner masters each serving its own 2 x 2 quadrant. It
checks three things:

* the results;
* that no flit crosses a quadrant boundary;
* that four masters are about 5x faster.

It measures 48,222 cycles against 9,682 cycles, and the first East link of the
single master is 79% busy.

To run a testbench with plain verilator, from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/hynoc_pkg.sv tb/hynoc_mesh_tb.sv \
  --top-module hynoc_mesh_tb -Mdir obj_mesh
./obj_mesh/Vhynoc_mesh_tb +verilator+rand+reset+2
```

Since verilator has only two signal states, every register read by the design is
reset, and the testbenches start uninitialised variables at random values to show
that nothing depends on them.
