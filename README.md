# Criticality-aware interconnect for a shared-memory multiprocessor

In a directory-based shared-memory multiprocessor, every cache miss becomes a
message that crosses several network links. Some of those messages matter more
than others. A request made while a thread holds a lock delays every other
thread waiting for that lock. A request made outside the lock delays only its
own thread. A conventional network treats all of them alike.

This design marks requests made inside critical sections as *critical* and
lets them overtake other traffic wherever the network makes messages wait.
There are three parts:

1. **A per-processor flag.** Each processor has one `crit` bit. Software flips
   it with a special (magic) instruction placed right after a lock is acquired
   and right before it is released.
2. **A second set of virtual networks.** Requests issued while the flag is set
   travel on their own virtual networks. So do the responses to them.
3. **Priority where messages queue.** Each link has an input buffer per virtual
   network. Whenever a link frees up, it serves the critical virtual networks
   before the ordinary ones.

The RTL here covers the network side of such a machine: the flag, the
network interface, the switches with their link throttles, and three
topologies (hypercube, 2D torus, crossbar). It uses the evaluated
configuration: 16 nodes, hypercube, link bandwidth 125. The processors,
caches, directory protocol and memory connect to it through plain
valid/ready ports.

## How a message becomes critical

`crit_sec_info` holds a processor's flag. Each pulse on `magic_toggle` inverts
it. A correct program therefore executes the instruction in pairs, and the
flag is set exactly while the lock is held. Reset clears it.

`net_iface` sits between a node's coherence controller and its switch. The
controller always names a *base* message class in the `vnet` field:

| base vnet | class             | critical copy |
|-----------|-------------------|---------------|
| 0         | request           | 3             |
| 1         | forwarded request | 4             |
| 2         | response          | 5             |

Criticality is decided as follows:

- A request (class 0) is critical if the node's flag is set when the request
  enters the network.
- Any other message is critical if the controller sets its `crit` bit. A
  directory or owner that answers a critical request copies the bit from the
  request, so the answer also travels on the fast set.

The interface then adds `NUM_BASE_VNETS` (3) to the vnet number of a critical
message and fills in the source node. In the other direction it turns the
vnet back into the base class. `crit` then tells the controller which set
carried the message. The interface also counts critical and non-critical
requests, which gives the ratio used to explain how much a workload can gain.

## The throttle: where priority happens

The throttle is the only place messages wait for each other, so the whole
effect of the design comes from it. Each output link of a switch has one
throttle (`throttle.sv`), and each throttle has:

- **Six message buffers** (`msg_buffer`), one per virtual network, each 16
  entries deep.
- **An arbiter** that runs whenever the link is free. If any critical buffer
  holds a message, it picks among the critical buffers only. Otherwise it
  picks among the ordinary ones. Inside a set the buffers take turns (round
  robin). A message already on the link is never pre-empted.
- **A serialiser.** The link carries `LINK_BANDWIDTH/1000` bytes per cycle. A
  message of `b` bytes therefore occupies it for `L = ceil(b*1000/LINK_BANDWIDTH)`
  cycles:

  | bandwidth | control message (8 B) | data message (72 B) |
  |-----------|-----------------------|---------------------|
  | 125       | 64 cycles             | 576 cycles          |
  | 250       | 32 cycles             | 288 cycles          |

  The scarce bandwidth is deliberate: it makes the buffers fill, and a full
  buffer is what gives priority something to reorder. A message picked in
  cycle `t` is offered to the next hop from cycle `t+L`. It stays offered
  until the next hop accepts it. The next pick can happen in the cycle the
  current message is taken.
- **Statistics counters:**
  - `util_cycles` counts the cycles the link is occupied.
  - `contention_cycles` counts the cycles in which critical and non-critical
    messages both wait in the buffers. These are the only cycles in which
    priority can change anything.
  - `crit_bypass_count` counts the picks of a critical message made while an
    ordinary one was waiting.

`CRIT_PRIORITY = 0` turns the arbiter into a single round robin over all six
buffers. Everything else stays the same. This is the conventional network the
design is measured against; it is kept as a parameter only so the two can be
compared in simulation.

## The switch

`router` models a contention-free switch. Every input port may deliver one
message per cycle. All inputs move their messages in the same cycle, straight
into the buffer of the virtual network and output link their destination
needs. To make that possible, each buffer accepts up to `NUM_PORTS` writes per
cycle and queues them in input-port order.

An input is accepted only when the buffer it needs has room for a message from
every input (`space_ok`). So one input's ready signal never depends on what
the other inputs do, and the switch never makes inputs wait for one another.
All queuing happens in front of the links.

Port 0 of every switch belongs to its own node. Messages from the node enter
the switch directly. Messages to the node leave through a throttle like any
other link, so ejection is also bandwidth-limited and prioritised.

## Topologies and routing

`route_unit` gives the output port for a destination. `TOPOLOGY` selects the
topology:

- **Hypercube (default).** `NUM_NODES = 2^D` switches, each with D links.
  Port `d+1` leads to the node whose number differs in bit `d`. A message
  corrects the lowest differing bit first, so it always takes a shortest path
  (the number of differing bits).
- **2D torus.** A `sqrt(N) x sqrt(N)` grid with wrap-around. Ports 1 to 4
  lead to +x, -x, +y and -y. A message corrects x before y, each the shorter
  way round (+ on a tie).
- **Crossbar.** A single switch with one port per node, so every message
  crosses exactly one throttle, the one in front of its destination.

With 4 nodes the 2x2 torus and the 2-cube are the same graph. The two
therefore behave identically at that size.

`cam_top` builds the chosen network:

- one `crit_sec_info` and one `net_iface` per node;
- one `router` per node (or a single central one for the crossbar);
- link wiring in which output port `p` of node `n` drives the facing input
  port of the neighbour.

It also sums the statistics of all links.

## Interface of `cam_top`

| port | dir | meaning |
|------|-----|---------|
| `magic_toggle[N]` | in | processor executed the magic instruction (one-cycle pulse) |
| `crit[N]` | out | criticality flags |
| `inj_valid/inj_ready/inj_msg[N]` | in/out/in | coherence controller → network; `vnet` = base class |
| `ej_valid/ej_ready/ej_msg[N]` | out/in/out | network → coherence controller |
| `crit_req_count[N]`, `noncrit_req_count[N]` | out | requests injected, per node |
| `total_util_cycles`, `total_contention_cycles`, `total_crit_bypass` | out | sums over all links |

Messages are `cam_pkg::msg_t`, a 69-bit packed struct with these fields:

- `dest` and `src`: 8 bits each;
- `vnet`: 3 bits;
- `crit` and `is_data`: 1 bit each;
- `addr`: 32 bits;
- `tag`: 16 bits.

`is_data` selects the size: 72 bytes (a 64-byte block plus header) or 8
bytes. `addr` and `tag` are carried unchanged for the end points.

**Latency on an idle network.** A message accepted at clock edge `t0` that
crosses `H` links is visible at the destination `H*(L+1)-1` cycles later.
`H` counts the final link into the node; each hop adds one cycle for the
hand-over. In the hypercube, `H = popcount(src ^ dest) + 1`. For example, a
control message from node 0 to node 15 is visible 324 cycles after it is
accepted.

**Reset.** The active-low `rst_n` is asynchronous. It clears flags, buffer
pointers, links and counters. Buffer contents are not reset.

## Parameters

| parameter | default | where it comes from |
|-----------|---------|---------------------|
| `NUM_NODES` | 16 | evaluated machine (16 and 4 processors) |
| `TOPOLOGY` | hypercube | one of the three evaluated topologies |
| `LINK_BANDWIDTH` | 125 | evaluated bandwidth (also run at 250) |
| `DEPTH` | 16 | this design's choice |
| `CRIT_PRIORITY` | 1 | 1 = criticality-aware; 0 = conventional baseline |
| `NUM_BASE_VNETS` (package) | 3 | this design's choice |
| `CONTROL_BYTES`, `DATA_BYTES` (package) | 8, 72 | this design's choice, 64-byte blocks |

## What is outside this RTL, and where it departs from the original study

- **Processors, caches, the directory and main memory are not here.**
  - The original machine was a full-system simulation: in-order cores, 256 KB
    4-way L1 caches, a 16 MB 4-way L2, 64-byte blocks and 512 MB of memory.
  - It ran an existing MOESI directory protocol, extended with the extra
    virtual networks.
  - That protocol is not specified in enough detail to rebuild, so its
    controllers are left outside. They attach to `inj_*`/`ej_*`. The
    testbenches stand in for them with simple directory and owner models.
- **The ordering point is not prioritised.** The idea also allows the
  directory, as the ordering point, to serve critical requests first. The
  study only implemented and measured priority at the link buffers, and so
  does this RTL.
- **Some details are this design's own choices:**
  - the bandwidth unit (bytes per 1000 cycles);
  - message sizes;
  - buffer depth;
  - round robin inside a set;
  - dimension-order routing;
  - flow control with back-pressure.

  The original network simulator modelled buffers and switches more
  abstractly.
- **Deadlock freedom.** Hypercube dimension-order routing is deadlock-free.
  The torus's wrap-around links, with finite buffers and no escape channels,
  are not proven so. No deadlock was seen in simulation, at the loads below.
- **No speedup claim.** The testbenches measure network latencies for a
  synthetic lock program. They do not reproduce the study's whole-program
  cycle counts.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|-----------|---------------|
| `crit_sec_info_tb` | toggling, lock-pair behaviour, toggle count |
| `net_iface_tb` | vnet mapping, inherited criticality, return mapping, request counters |
| `msg_buffer_tb` | multi-port FIFO order and fill level against a queue model, including full |
| `throttle_tb` | exact 64/576-cycle link occupancy at bandwidth 125; waiting critical messages leave before earlier ordinary ones; under random traffic no ordinary message is ever picked while a critical one waits; counters |
| `route_unit_tb` | every source/destination pair of the 16-node hypercube, 4x4 torus and crossbar reaches its target by a shortest path |
| `router_tb` | all inputs accepted in one cycle; correct output port; per-buffer order; priority activity |
| `cam_top_tb` | full default configuration; see below |
| `cam_micro_tb`, `cam_micro_topo_tb` | shared-counter lock program on the network with and without priority; see below |

`cam_top_tb` runs the full default configuration in three phases:

1. Exact idle-network latencies.
2. A lock program on all 16 nodes, with directory and owner models and
   forwarded requests.
3. A burst of requests from every node to one directory, to force
   back-pressure.

It checks that every message arrives once, at the right node and on the right
class of network. It also checks that each of these happened at least once:

- flag toggles;
- critical and non-critical requests;
- forwarded requests;
- 4-hop routes;
- contention;
- critical overtakes;
- injection and ejection back-pressure.

The `cam_micro_*` testbenches each compare two networks that are identical
except for `CRIT_PRIORITY`:

- `cam_micro_tb`: a 4-node hypercube at bandwidth 125 and at 250;
- `cam_micro_topo_tb`: a 4-node (2x2) torus and a 4-port crossbar, at 125;
- two workloads each: three shared counters per critical section (`micro`),
  and one (`micro(1/3)`).

They print completion cycles, their ratio, the average critical-request
latency and the contention cycles. They check that priority takes effect
(critical messages overtake waiting ones), that it does not make critical
requests more than 5% slower on average (short runs on small networks are
noisy), and that doubling the bandwidth reduces contention (on the 4-node
hypercube). These runs use 4 nodes to keep compile
time short. Sixteen nodes appear only in `cam_top_tb` (the hypercube lock
program) and in `route_unit_tb` (torus and crossbar routing). At 4 nodes the
measured differences between the two networks are small, a few percent either
way.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/cam_pkg.sv tb/cam_top_tb.sv --top-module cam_top_tb -o sim
./obj_dir/sim
```

Replace `cam_top_tb` with any other testbench name. The package must be given
first. The `cam_micro_*` testbenches build four copies of a 4-node network and compile
in about a minute.

To change the design:

- Network size, topology and bandwidth are parameters of `cam_top`.
- The number of message classes and the message sizes live in `cam_pkg`.
- The priority policy is the arbitration block of `throttle.sv`. It is the
  place to change if priority should, for example, age out, so that ordinary
  traffic cannot be starved while critical traffic keeps arriving.
