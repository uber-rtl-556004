# Uber: a concentrated, buffered mesh network-on-chip for 256 cores

A network-on-chip for a many-core chip has two costs: the latency of the
routers a message crosses, and the time it waits in queues. A large mesh with
one core per router keeps queues short. It pays for that with long paths
(7 hops per dimension in an 8x8 mesh) and with router pipelines that must be
bypassed or made speculative to stay fast. Uber goes the other way. It puts
**16 cores on every mesh port**, so 256 cores need only a **4x4 mesh**. Paths
are then at most 3 hops per dimension, and a plain **four-stage router (RC, VA,
SA, ST)** is good enough. The price is higher port load and more queueing. The
underlying study argues that this is acceptable: shared-memory benchmarks
tolerate several times more queueing delay than router latency, so buffers
absorb the extra load. This suggests that the buffers, not clever pipelines,
should do the work.

The RTL here implements that network at its full target size. It has:

* 256 core interfaces that cut messages into cells and put them back together;
* 16 concentrators, each joining 16 cores onto one router port;
* 16 five-port routers with dimension-ordered routing;
* 16 ejection demultiplexors;
* two strictly prioritized virtual networks with credit flow control everywhere.

The cores, caches and coherence controllers that produce the messages are not
part of it. Their message ports are the ports of `uber_top`.

## Structure

```
 core c ──msg──> ni_tx ──cells──> ┐                         ┌──> edge_demux ──cells──> ni_rx ──msg──> core c
   (x16 per port)       credits <─┤                         │        (x16 cores)
                                  edge_mux ──> mesh_router ─┘
                                 (VA MA MT)   (RC VA SA ST) <──> 4 neighbour routers (E, W, N, S)
```

Core `c` belongs to concentrator `e = c / 16`. That concentrator's router
sits at `x = e % 4`, `y = e / 4`. Every arrow that carries cells carries at
most one cell per cycle. Each has a credit wire per virtual network running
the other way.

| file | block |
|---|---|
| `rtl/uber_pkg.sv` | cell, link and message types; sizes; port numbering |
| `rtl/cell_fifo.sv` | finite cell queue (one per virtual network per input) |
| `rtl/rr_arbiter.sv` | round-robin arbiter used by all allocators |
| `rtl/ni_tx.sv` | message → cells, per-network credits, control first |
| `rtl/ni_rx.sv` | cells → message, one reassembly buffer per network |
| `rtl/edge_mux.sv` | concentrator: per-core input queues, VA, MA, MT |
| `rtl/edge_demux.sv` | ejection: router local output → destination core |
| `rtl/mesh_router.sv` | 5-port XY router, RC/VA/SA/ST |
| `rtl/uber_top.sv` | the whole network |

## Cells, messages and virtual networks

Links are 4 bytes wide. A message is cut into **cells**, each holding one
32-bit word. Each cell also carries a small sideband: head and tail marks, the
virtual network, the message type, and 8-bit source and destination core ids.
There are two message sizes:

| message | virtual network | size | cells |
|---|---|---|---|
| request, forward (coherence control) | 0 (`VN_CTRL`) | 8 B | 2 |
| response (cache block) | 1 (`VN_DATA`) | 72 B | 18 |

The mean of 2 and 18 cells is 10 cycles of serialization, the figure the
underlying study uses. Word `i` of a message is `msg.data[32*i +: 32]`.

Buffers are finite, so protocol deadlock is possible: a response can wait
behind a request that waits for it. The two message classes therefore travel
in separate virtual networks. Each has its own queue at every buffer. Virtual
network 0 has **strict priority** wherever the two compete:

* at the core interface;
* at the concentrator multiplexor;
* at every router output.

A control message can therefore overtake a cache block that is already on its
way. Every testbench from the core interface up checks that this happens.

## Keeping messages whole: the allocation stages

This part is the least obvious. Cells of different messages could interleave
on a link. If they did, every core would need a reassembly buffer for every
possible source. That is 256 × 2 buffers of 72 bytes per core.

The design avoids this. A virtual channel is granted to one message from its
head cell to its tail cell.

* **Concentrator VA.** Take a virtual network whose router input queue is not
  held. A round-robin arbiter gives it to one core whose queue starts with a
  head cell. That core keeps it until its tail cell has left.
* **Router VA.** When a head cell has its output port (RC), it asks for the
  output's channel of its network. A round-robin arbiter per output channel
  grants one input. The grant is held until the tail cell passes SA.

So within each virtual network, every link carries whole messages one after
another. The two networks may interleave with each other cell by cell. Each
core therefore needs only **one reassembly buffer per virtual network**
(`ni_rx`).

## Concentrator (`edge_mux`): VA, MA, MT

Each of the 16 cores has its own queue per virtual network in the
concentrator, four cells deep. This is input queueing at the edge. Each cycle
the concentrator does three things:

1. **VA** grants free virtual networks to cores (see above).
2. **MA** (multiplexor allocation) picks one virtual network to send:
   * the network must be held by a core;
   * that core must have a cell queued;
   * the network must have a router credit.

   Control goes first. The chosen cell leaves its queue, and a credit returns
   to the core in the next cycle.
3. **MT** (multiplexor traversal) moves the cell into the output register,
   which drives the one-cycle link to the router.

The stage names come from the Uber schematic. Their exact division of work, as
given here, is this implementation's reading.

## Router (`mesh_router`): RC, VA, SA, ST

Ports: 0 local, 1 east (+x), 2 west (−x), 3 north (+y), 4 south (−y). Each
input has one FIFO per virtual network, eight cells deep.

| cycle | head cell of a message | stage |
|---|---|---|
| t | written into the input FIFO (end of the link cycle) | |
| t+1 | XY route: x first, then y, then local | RC |
| t+2 | output virtual channel granted | VA |
| t+3 | input offers one channel that has a cell and a credit; output grants control before data, round-robin within each | SA |
| t+4 | crossbar into the output register | ST |
| t+5 | on the link; written into the next FIFO | link |

Body cells skip RC and VA and stream one per cycle. Per hop an uncontended
head cell takes **4 router cycles + 1 link cycle**.

Switch allocation is separable and input-first. Each input first picks one of
its channels, then each output picks an input. Only the control-first rule
comes from the study; the rest is this implementation's choice. Outputs at the
mesh boundary are never chosen by XY routing.

## Credits and buffer depths

Each sender keeps one counter per virtual network, reset to the depth of the
receiving queue. It sends only with a credit, and the receiver returns one per
cell it pops. Round trips without contention:

* core interface ↔ concentrator queue: 4 cycles;
* concentrator ↔ router, and router ↔ router: 5 cycles.

The default depths are 4 cells at the concentrator and 8 at the routers. Both
cover these round trips, so a single message streams at 1 cell/cycle. The study
says only that buffers are finite. These depths are this implementation's
choice and are set by `CORE_Q_DEPTH` and `BUF_DEPTH`.

The ejection path (`edge_demux` → `ni_rx`) has no queue. Nothing competes
between a concentrator and its cores, and the core takes every message it is
given. The demultiplexor returns a credit for each cell the cycle after it
arrives, so the router treats its local output like any other.

## Latency

Count from the cycle a core's message is accepted (`tx_valid && tx_ready`) to
the cycle `rx_valid` rises at the destination. `H` is the number of
router-to-router hops. With no contention:

* **control message: 14 + 5·H cycles**
* **cache block: 30 + 5·H cycles** (16 more cells)

The 14 cycles of a control message break down as:

| cycles | step |
|---|---|
| 2 | core interface |
| 4 | concentrator: queue write, VA, MA, MT |
| 5 | first router plus link |
| 1 | demultiplexor |
| 1 | second cell |
| 1 | reassembly register |

In a 4x4 mesh, H ≤ 6, so a control message takes at most 44 cycles. The
end-to-end testbenches check this figure exactly: 24 cycles for H = 2 and 44
cycles for H = 6.

The study's 26-cycle figure is for a different, abstract model: an ideal
switch, 3-cycle links and 1-cycle components. It is not a prediction for this
RTL.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `MESH_X`, `MESH_Y` | 4, 4 | `uber_top`, `mesh_router` | mesh size (16 ports, as in the study) |
| `CONC` | 16 | `uber_top`, `edge_mux`, `edge_demux`, `mesh_router` | cores per mesh port (as in the study) |
| `CORE_Q_DEPTH` | 4 | `uber_top`, `edge_mux`, `ni_tx` | per-core queue per virtual network in the concentrator |
| `BUF_DEPTH` | 8 | `uber_top`, `mesh_router`, `edge_mux` | router input FIFO per virtual network |
| `CORE_ID_W` | 8 | `uber_pkg` | core id width; limits `MESH_X*MESH_Y*CONC` to 256 |

The study's evaluated miniature has 64 cores on a 4-port (2x2) mesh. That is
`uber_top #(.MESH_X(2), .MESH_Y(2))`. With the default 16 cores per port,
4 × 16 = 64 cores. The peak capacity of the default network comes from 64
links of 4 B at 2 GHz: 48 between routers and 16 for injection. That gives
4.1 Tb/s, matching the roughly 4 Tb/s the study names.

## Where this implementation departs from, or adds to, the study

**Mesh, not ring.** The schematic closes two (or four) routers into a ring.
The text speaks of a mesh with dimension-ordered routing, so a mesh is built.
With two routers, the two are the same.

**Choices the study leaves open:**

* the XY order;
* one virtual channel per virtual network;
* the allocator organization;
* round-robin fairness;
* buffer depths;
* the cell sideband format;
* the 8-bit core id;
* core numbering;
* the valid/ready message interface with one message in flight per virtual
  network per core;
* a core that always accepts delivered messages.

**Not built.** The in-order cores, the L1 and L2 caches, the MESI directory and
memory belong to the system around the network. The benchmarks that drive it
are not built either. The ideal output-queued switch, the crossbar schedulers
and the 64-port mesh appear in the study only as points of comparison, so they
are not built.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` at the end.

| testbench | what it checks |
|---|---|
| `tb_cell_fifo` | queue model, flags, fill to depth |
| `tb_ni_tx` | cell contents and marks; first cell 2 cycles after acceptance; credit stall; control overtaking a block; busy network refusing a message |
| `tb_ni_rx` | reassembly of interleaved control/data cell streams |
| `tb_edge_mux` | order per core and network; no interleaving within a network; no over-fill; overtaking; 4-cycle head latency; backpressure |
| `tb_edge_demux` | steering, timing and credits |
| `tb_mesh_router` | XY output port; order; no interleaving; no over-fill; overtaking; 5-cycle per-hop latency; backpressure |
| `tb_uber_top` | 2x2 mesh with 4 cores per port: random and hot-spot traffic, scoreboard, unloaded latency |
| `tb_uber_top_full` | the same at the default size: 256 cores, 4x4 mesh |
| `tb_uber_load` | 64 cores on a 2x2 mesh at the load measured for that system (see below) |

`tb_uber_top` and `tb_uber_top_full` also count each mechanism and fail if
one never occurs:

* fragmentation into 2 and 18 cells;
* routes with a turn;
* concentrator VA contention;
* strict-priority overtaking;
* credit stalls at the core interface, the concentrator and the routers;
* refused messages.

`tb_uber_load` models the evaluated 64-core, 4-port system. The load on each
port is 0.24 cells/cycle, as measured for that system. There is one control
message per two cache blocks. Messages go to random destinations. The test
checks that:

* every message arrives intact;
* no message arrives faster than the uncontended pipeline allows;
* the offered load is within 20% of the target.

It runs two phases. In the first, each message is created at a random time.
In the second, a core creates one control message and two blocks together:
38 cells at once, the kind of spike the benchmark load shows. One run gave:

| traffic | load (cells/cycle/port) | messages | mean end delay | mean queueing |
|---|---|---|---|---|
| smooth | 0.26 | 1615 | 34.9 cycles | 5.2 cycles |
| bursts | 0.25 | 1578 | 48.0 cycles | 18.3 cycles |

The end delay is counted from creation. The queueing delay is the end delay
minus the uncontended latency. These are synthetic loads, not the benchmarks
themselves, so they show how queueing grows with burstiness. They do not
reproduce the study's figures.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/uber_pkg.sv rtl/rr_arbiter.sv rtl/cell_fifo.sv rtl/ni_tx.sv rtl/ni_rx.sv \
    rtl/edge_mux.sv rtl/edge_demux.sv rtl/mesh_router.sv rtl/uber_top.sv \
    tb/tb_uber_top.sv --top-module tb_uber_top -o sim
./obj_dir/sim
```

The full-size testbench takes several minutes to compile, because Verilator
unrolls 256 interfaces and 16 routers, but it runs in about a second.
Assertions check the handshake rules, for example:

* no write into a full queue;
* no credit counter above its reset value;
* cells of a virtual network stay in message order at reassembly.
