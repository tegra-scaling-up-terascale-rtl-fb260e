# TEGRA message-passing fabric

Trillion-edge graphs do not fit the usual graph-accelerator recipe, where
each processing element is replicated together with its own memory. Memory
and compute then grow in lock step. Graph traversal is limited by memory
bandwidth, and bandwidth ends up stranded on whichever channels are idle at
the moment.

TEGRA scales up instead of out:

- **Many small general-purpose cores.** These are RISC-V class cores, so the
  system stays programmable rather than hardwired.
- **Two kinds of memory, placed by access pattern.**
  - Vertex data is read at random and needs bandwidth. It lives in a private
    high-bandwidth memory (one HBM2 stack) next to each core.
  - Edges take most of the capacity and are read in short runs. They live in
    one shared, disaggregated DDR pool. The pool is reached over a CXL /
    silicon-photonics link that adds about 150 ns.
- **Two separate networks.** Cores do not exchange vertex updates through
  memory. Each core owns a hardware FIFO, its message queue, and any core can
  drop an 8-byte message into any other core's queue over an all-to-all
  network (in the spirit of Active Messages). Memory traffic goes over its own
  network to the link, so the two kinds of traffic do not compete.

Because the pool is shared, the number of cores can grow without adding edge
memory. Going from 32 to 48 cores on the same memory is reported to gain about
13 %.

This repository holds synthesizable SystemVerilog for everything that sits
between the cores and the memories. The core itself, its SSSP program, the
HBM stacks, the link and the memory pool are off-the-shelf parts, or parts
the design does not specify. Behavioural models stand in for them in the
testbenches.

```
          core 0            core 1                 core N-1
            |                 |                       |
   +--------+-------+ +-------+--------+      +-------+--------+
   |   tegra_node   | |   tegra_node   | ...  |   tegra_node   |
   | MQ  SB  AL     | | MQ  SB  AL     |      | MQ  SB  AL     |
   +--+---+---+--+--+ +--+---+---+--+--+      +--+---+---+--+--+
      |   |   |  |       |   |   |  |            |   |   |  |
   local  |   |  |    local  |   |  |         local  |   |  |
   HBM    |   |  |    HBM    |   |  |         HBM    |   |  |
          |   |  +-----------|---|--+------...-------|---|--+--> mem_interconnect --> CXL/SiPh link --> remote DDR pool
          +---+--------------+---+--------- ... -----+---+-----> msg_network (N x N crossbar)
 MQ = receive message queue, SB = send buffer, AL = active list
```

## Source map

| File | Content |
|---|---|
| `rtl/tegra_pkg.sv` | message, memory and core-port types; the address map |
| `rtl/msg_queue.sv` | synchronous FIFO used for every queue |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/active_list.sv` | active-vertex queue that overflows into memory |
| `rtl/tegra_node.sv` | per-core interface: address interception, queues, memory steering |
| `rtl/msg_network.sv` | all-to-all message crossbar |
| `rtl/mem_interconnect.sv` | memory network that merges all nodes onto the remote link |
| `rtl/tegra_top.sv` | N nodes plus both networks |
| `tb/mem_model.sv`, `tb/sssp_core_model.sv` | behavioural memory and SSSP core |
| `tb/tb_*.sv` | self-checking testbenches |

## How a core sees the fabric

The cores have no special instructions. Queue operations are ordinary loads
and stores to dedicated addresses. The node intercepts these accesses before
any cache would see them. Every other access is steered by address.

Addresses are 48-bit byte addresses. Bits [47:46] select the region:

| Region | Bits 47:46 | Goes to |
|---|---|---|
| local | `00` | the core's own vertex memory (HBM), over the node's local port |
| remote | `01` | the shared edge memory, over the memory network and link |
| queues | `10` | registers inside the node (table below) |

Each region is 2^46 bytes (64 TiB). The remote region alone therefore
addresses 8.8·10^12 eight-byte edges, which is the trillion-edge scale the
design targets.

| Offset in the queue region | Access | Effect |
|---|---|---|
| `0x0000` | load | status word `{al_count[31:0], send_free[15:0], mq_count[15:0]}` |
| `0x0008` | load | pop the next message `{vid[31:0], new_dist[31:0]}` from this core's queue |
| `0x0010` | store | push a vertex ID (low 32 bits) onto the active list |
| `0x0018` | load | pop a vertex ID from the active list |
| `0x1000 + 8·d` | store | send the 64-bit store data as a message to core d |

An SSSP message is 8 bytes: the vertex to update and a candidate distance.
The 32/32 split of those bytes is this implementation's choice.

The core port handles one access at a time, with a valid/ready request and a
response pulse:

- A store is acknowledged one cycle after it is accepted.
- A load returns its data one cycle after the data is available.
  - Queue and status reads: the cycle after acceptance.
  - Memory reads: the cycle after the memory responds.

Popping an empty queue, or sending into a full send buffer, does not fail.
The request simply waits, with `core_req_ready` low. Well-behaved software
reads the status word first and never issues an access that would wait. Why
that matters is explained next.

## SSSP on the fabric, and why it cannot deadlock

Single-source shortest path is split into two threads per core.

- **Consumer.** Pops a message `{v, d}`, loads v's distance from local
  memory, and compares.
  - If d is shorter, it stores d and pushes v onto the active list.
  - Otherwise it drops the message.
- **Generator.** Pops an active vertex v and loads its distance, edge pointer
  and edge count from local memory. For each edge it loads `{u, w}` from
  remote memory and sends `{u, dist(v) + w}` to the core that owns u.

The run has converged when every queue, every active list and both networks
are empty. The top module's `fabric_idle` output reports exactly that
condition.

### The deadlock hazard

Suppose core A's generator is blocked sending to B because B's queue is full,
and B's generator is blocked sending to A. Progress then depends on each
core's consumer draining its own queue. If a consumer could itself block (for
example on a full active list), the cycle would close and the system would
stop.

The fabric removes every way a consumer can block:

- **The active list never refuses a push for lack of on-chip space.**
  `active_list` is a 16-entry FIFO. When it is full, new vertex IDs are
  written to a ring buffer in the core's local memory: 65 536 entries at byte
  address `0x2000_0000_0000`. They are read back into the FIFO as it drains.
  - Once anything is in the ring, every further push also goes to the ring.
  - Refills read the ring head one word at a time.
  - Together these keep entries in first-in first-out order.
  - A push is refused only if the ring itself is full. Software can see that
    in `al_count`.
  - Spill writes and refill reads share the node's local memory port with the
    core. A round-robin arbiter splits the port: tag 0 is the core, tag 1 is
    the active list.
  - One subtle rule: a refill is started whenever no spill write is being
    accepted in the same cycle. Without this rule, a push waiting on a full
    ring could block the very refill that would free space in it.
- **A consumer never waits on its own queue**, because it checks `mq_count`
  before popping.
- **A generator that cannot send moves on.** It checks `send_free` before
  each send. If the buffer is full, it lets the consumer run instead of
  waiting. The 4-entry send buffer lets a send complete at once even while the
  network is busy.

With these rules, a core always keeps draining its own queue. Each generator's
message is therefore eventually accepted, and the system stays deadlock-free.

Keeping the whole active list in memory was the other option the design
allows. It was not taken, because it would put a memory access on every push
and pop.

## Message network

`msg_network` is a full N×N crossbar. Each destination port has:

- a round-robin arbiter over the sources currently addressing it;
- a one-entry output register that feeds that destination's message queue.

Behaviour:

- Sources aimed at different destinations move in the same cycle, so up to N
  messages are delivered per cycle.
- Sources that collide on one destination are served in turn.
- A full destination queue holds its register. That back-pressures only the
  sources sending to it.
- A message accepted at one clock edge can enter the destination queue at the
  next one.
- Messages from one source to one destination stay in order.

Crossbar size grows as N². The 32-core default synthesises to roughly 15 000
cells for this block.

## Memory network and the remote link

`mem_interconnect` merges the remote-memory requests of all N nodes onto the
single link, using a round-robin arbiter and one register stage.

- The arbiter writes the source node number into the request's tag.
- The link must return that tag with the read data.
- The returned tag steers each response back to its node.
- Since each node has at most one outstanding access, a node can always
  accept its response.

The link and the pool are outside the top module, so the 150 ns
disaggregation latency lives in the memory model. The testbenches use local
latency + 150 cycles, at an assumed 1 GHz.

Local vertex memory is private to each node and connects directly. It uses
the same tagged request/response format.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `N` (cores) | 32 | the main configuration; 48 was also evaluated |
| `MQ_DEPTH` | 64 | own choice |
| `SEND_DEPTH` | 4 | own choice |
| `AL_DEPTH` | 16 | own choice |
| `AL_SPILL_ENTRIES` | 65536 | own choice |
| `AL_SPILL_BASE` | `48'h2000_0000_0000` | own choice |

The message format (8 bytes: vertex ID and distance) is fixed in
`tegra_pkg`. So are the 48-bit address and the 8-bit tag, which allows up to
256 cores.

## Departures from the design description, and additions

- **Outside the RTL.** The cores, their program, the HBM stacks, the CXL /
  silicon-photonics link and the DDR pool exist only as behavioural models
  (`tb/sssp_core_model.sv`, `tb/mem_model.sv`).
- **Own choices, not given by the design description.**
  - the address map and status word;
  - the send buffer;
  - the crossbar structure and all arbitration;
  - every queue depth;
  - the tag scheme;
  - the active-list refill policy;
  - the one-outstanding-access core port.
- **Networks: text versus block diagram.** The design's block diagram draws a
  single "Network" box between the cores and the link. The text says there
  are two networks, one for memory accesses and one for messages. This
  implementation follows the text.
- **One link, modelled as one port.** The pool is reached over one link.
  Sharing bandwidth among several DDR channels inside the pool is left to the
  pool. No multi-channel pool is modelled.
- **Additions.** `fabric_idle` (convergence detection) and the `idle` output
  of each node are not in the design description.
- **Vertex ownership is software's business.** The testbenches give vertex v
  to core v mod N and store it at local words 2i and 2i+1, with i = v div N.
  Those words hold the distance and `{edge count, edge pointer}`. Edge j is
  remote word j, holding `{dst, weight}`.
- **Scale-up versus scale-out.** The design is described throughout as
  scale-up, but once as "a scale-out architecture". Nothing in the RTL
  depends on the label.

## Verification

Every block has a self-checking testbench. Each compares the block against
values worked out independently and prints
`TB_RESULT checks=<n> failures=<m>`.

| Testbench | Covers |
|---|---|
| `tb_msg_queue` | FIFO order, full/empty, simultaneous push and pop (random) |
| `tb_msg_network` | one-register latency, round-robin on collisions, random all-to-all traffic, per-source order, back-pressure |
| `tb_active_list` | order across spill and refill, capacity 4 + 16 at reduced size, memory stalls |
| `tb_mem_interconnect` | response routing by tag, lone-read latency = 1 + memory latency, fairness, writes |
| `tb_tegra_node` | every address of the map, interception, steering, status word, back-pressure |
| `tb_tegra_top` | SSSP end to end at reduced sizes (4 cores, tiny queues) |
| `tb_tegra_full` | SSSP at the default parameters (32 cores) |
| `tb_tegra_cores48` | SSSP with 48 cores and the same memory system |

### End-to-end SSSP tests

The three SSSP testbenches share one procedure:

1. Generate a random weighted graph.
2. Run SSSP from one source until the fabric has been idle for longer than a
   remote round trip.
3. Compare every distance in vertex memory with Dijkstra's algorithm.
4. Check that every message sent was consumed.

`tb_tegra_top` also counts how often each mechanism of the fabric occurs, and
fails if any never happens. In one run:

| Mechanism | Count |
|---|---|
| crossbar destination collisions | 480 |
| network back-pressure | 2063 |
| full message queue | 4653 |
| full send buffer | 231 |
| active-list spills and refills | 152 |
| core and active list contending for local memory | 45 |
| remote-link contention | 3 |
| dropped (non-improving) updates | 486 |

The local memory models refuse a quarter of requests at random in this test.
That makes local-port contention happen.

### Measured cycle counts

These are cycles to convergence on a 768-vertex random graph, with 150-cycle
remote latency:

| Cores | Cycles |
|---|---|
| 32 | 69 836 |
| 48 | 58 131 |

48 cores are about 20 % faster here, against 13 % reported for the
evaluated system. The graph, the memory timing and the core model all differ
from that evaluation, so only the direction of the change is comparable.

### Running with plain Verilator

```
verilator --binary --timing --assert --top-module tb_tegra_top \
  rtl/tegra_pkg.sv rtl/rr_arbiter.sv rtl/msg_queue.sv rtl/active_list.sv \
  rtl/tegra_node.sv rtl/msg_network.sv rtl/mem_interconnect.sv rtl/tegra_top.sv \
  tb/mem_model.sv tb/sssp_core_model.sv tb/tb_tegra_top.sv
./obj_dir/Vtb_tegra_top
```

For another testbench, replace the top module and the last file. Unit
testbenches need only the RTL files their block uses. The 32-core run builds
and simulates in under a minute.

## Capacity

- Vertex IDs are 32 bits, so up to 4.3·10^9 vertices.
- The remote region holds 8.8·10^12 edges.
- At 16 bytes per vertex, a core's local region holds 4.3·10^9 vertices.

In practice the real limits are the size of the HBM stack and of the pool.
The fabric does not limit them. Only the core count is set at build time,
through `N`.
