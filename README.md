# Slim NoC in SystemVerilog

Slim NoC is an on-chip network whose routers are wired as a graph of diameter two: any
router reaches any other in at most two hops. It does this with a small router radix. The
graph is the McKay–Miller–Širáň (MMS) construction over a finite field F_q. It has 2q² routers,
and each router has k' = (3q − 1)/2 network ports. For q = 5 that means 50 routers with 7 network
ports each. Four processing nodes hang off every router, giving 200 nodes.

A graph that hops far across the die needs long wires and deep buffers. The design handles
this in three ways:

- **Placement.** Routers are placed so that links stay short.
- **Long links.** They are built from ElastiStore pipeline stages, which give per-VC
  flow control inside the wire. SMART repeated wires let a flit cross 9 router pitches in
  one cycle.
- **Routers.** They use a small central buffer shared by all ports instead of deep input
  buffers.

This RTL implements that network at its small-scale configuration (called SN-S below):

| quantity | value |
|---|---|
| field size q | 5 |
| routers N_r = 2q² | 50 |
| nodes per router p | 4 |
| nodes N | 200 |
| network ports per router k' | 7 |
| router ports (k' + p) | 11 |
| virtual channels | 2 (VC0 first hop, VC1 second hop) |
| flit width | 128 bits (+ head/tail bits) |
| input staging buffer | 1 flit per port per VC |
| output buffer | 1 flit per port per VC |
| central buffer (CB) | 20 flits per router |
| injection / ejection queue | 20 flits each |
| router latency | 2 cycles bypassing the CB, 4 cycles through the CB |
| SMART reach H | 9 router pitches per cycle |

The larger configuration (SN-L: q = 9, p = 8, 162 routers, 1296 nodes) is the same RTL with
different parameters (`Q=9, P_CONC=8, LAYOUT=LAYOUT_GROUP`). It needs F_9, which is not
integers mod 9, so its addition and multiplication tables are included in the package.

## 1. The graph

### Labels and links

A router is labelled [G | a, b]:

- G ∈ {0, 1} is the subgroup type.
- a ∈ F_q is the subgroup.
- b ∈ F_q is the position within the subgroup.

Its numeric id is `r = G·q² + a·q + b`, with the field elements numbered 0..q−1. Node `n` sits
on router `n / p` at local port `n % p`.

Pick a primitive element ξ of F_q. Let X = {1, ξ², ξ⁴, …} be its even powers and X' = {ξ, ξ³, …}
its odd powers. For q = 4w + 1, X is exactly the set of non-zero squares and X' the set of
non-squares. The RTL uses that fact: it looks for a square root instead of listing powers.
The links are:

```
[0|a,b] – [0|a,b']   when  b − b' ∈ X        (inside a type-0 subgroup)
[1|m,c] – [1|m,c']   when  c − c' ∈ X'       (inside a type-1 subgroup)
[0|a,b] – [1|m,c]    when  b = m·a + c       (between subgroups)
```

Every router then has (q − 1)/2 + q = 7 neighbours, and every pair of routers is at most two
hops apart.

### Field arithmetic

- **Prime q.** Integers mod q.
- **q = 9.** The field is the nine elements {0, 1, 2, u, v, w, x, y, z}. Its addition and
  product tables are stored in `sn_pkg`.
- **Negation in F_9.** The negative of an element is found from the addition table by
  looking for the element that sums to 0. One published inverse table lists −2 = 0, which
  cannot be right, since 2 + 1 = 0 in the addition table. The addition table is what this
  RTL follows.

None of this becomes hardware. It runs at elaboration (`sn_pkg` functions) and fixes:

- which ports are wired to which routers;
- the route table inside each router.

### Routing

Routing is static and minimal:

- If the destination router is a neighbour, the packet goes there directly.
- Otherwise it goes through the common neighbour with the lowest router id.

A packet uses VC0 on its first network hop and VC1 on its second. The only channel
dependency is VC0 → VC1, so there is no cycle and no deadlock. Packets are always ejected on
VC0. The ejection port then carries whole packets one at a time, because a VC of the output
buffer carries one packet at a time.

Network ports of a router are numbered 0..k'−1 in increasing neighbour id. Ports k'..k'+p−1
are the local nodes.

## 2. Placement and link length

Routers sit on a grid. The default subgroup layout puts router [G | a, b] at column b and
row 2a − (1 − G), both 1-based. This interleaves the type-0 and type-1 subgroups so that
the many links between them stay short. For q = 5 the grid is 5 × 10. Two other layouts are
selectable:

- `LAYOUT_BASIC`: row a + G·q.
- `LAYOUT_GROUP`: groups of 2q routers folded into near-square blocks. This is intended for SN-L.

A link between routers at Manhattan distance d takes `max(1, ceil(d / H))` cycles. In SN-S the
directed links have lengths of 1 to 11 pitches. With H = 9:

- 348 of the 350 directed links are single-cycle;
- 2 take two cycles.

With H = 1 (no SMART), links take up to 11 cycles. The round trip of a link is then
2·ceil(d/H) plus the router's own cycles.

## 3. ElastiStore links

Each link cycle is one `es_stage`:

- a slave latch for each VC;
- a single master latch that all VCs share;
- a separate ready bit per VC going backwards.

### How a stage works

- **Accepting.** A stage takes a flit of VC v while v's slave latch is free or the shared
  master latch is free (`up_ready[v] = !slave[v] || !master`). The flit goes into the slave
  latch if that is free, otherwise into the master.
- **Sending.** Slave latches drive the output. When one drains, the master's flit moves up
  if it belongs to that VC.
- **Fairness.** When several VCs could send, a round-robin pointer chooses.

### What this gives

- One VC stalled downstream never blocks another, except while the shared master holds a
  flit of the stalled VC. That is the 1/|VC| worst-case loss.
- A chain of stages runs at one flit per cycle.
- Each stage stores up to |VC| + 1 flits.

`es_link` is a chain of `STAGES` such stages. A flit accepted at a clock edge appears at the
far end `STAGES − 1` edges later and is taken by the router input at the next edge.

## 4. The central-buffer router

`cb_router` has per-VC single-flit staging registers on its inputs and per-VC single-flit
output buffers. Between them sits one 20-flit central buffer (CB) shared by every port and VC.
A flit takes one of two paths.

**Bypass (2 cycles).**

1. Cycle 1: staging register.
2. Cycle 2: output buffer, reached through the crossbar in the same cycle it is allocated.
3. Then the link.

**Buffered (4 cycles).**

1. Cycle 1: staging register.
2. Cycle 2: crossbar into a CB slot.
3. Cycle 3: CB output register.
4. Cycle 4: output buffer.

The crossbar has k' + p inputs and k' + p + 1 outputs. The extra output is the CB's single
write port. The CB output reaches the output units through a 2:1 mux, beside the crossbar.
The CB has one write and one read port per cycle.

### Queues in the CB

The CB keeps one queue per (output port, VC). That is 22 queues for 11 ports and 2 VCs. Each
queue is a linked list over the 20 slots with its own head and tail pointers. A free-slot
bitmap supplies write slots.

### Allocation rules

These rules are the heart of the design. They are in `cbr_allocator`, which decides
everything combinationally once per cycle.

1. **The CB output goes first.** The CB reads a flit only when its output buffer is free
   for the next cycle, so a flit in the CB output register always has a place to go. Its
   output port is reserved before any input is considered.
2. **A head flit bypasses** when all of these hold:
   - its output VC buffer is free;
   - no other packet is in the middle of that output VC;
   - the CB holds nothing queued for that output VC.

   The last condition keeps packets in order.
3. **Otherwise the head enters the CB, but only as a whole packet.** The allocator compares
   the packet length with the CB's free, unreserved slots. If it fits, it reserves all of
   them at once. A packet that takes the CB path is therefore certain to get in completely:
   it can never be half in the CB with the rest stuck on a link. This atomic reservation is
   what keeps the shared buffer deadlock-free. A head that does not fit waits in its
   staging register.
4. **Packets stay contiguous.** The rest of a packet follows the path its head took:
   - A bypassing packet owns its output VC until the tail passes.
   - A packet entering the CB holds a write lock on its queue until its tail is written.

   So flits of two packets never interleave on an output VC. For the same reason, the CB
   does not read the head of a queued packet while a bypassing packet owns that output VC.
5. **One CB write per cycle.** Inputs are served in rotating priority.

A packet in the CB behaves as part of the output buffer of its port and VC. The VC0 → VC1
argument from routing therefore still holds.

### Event outputs

The router reports three event pulses:

- `ev_bypass`: a head took the bypass.
- `ev_to_cb`: a head was admitted to the CB.
- `ev_head_wait`: a head had to wait.

The network testbench uses them to count how often each path is used.

### Allocator stages

The allocator has three functions:

- input buffers to output ports;
- central buffer to output ports;
- input buffers to the central buffer.

The original router splits these over three pipeline stages. Here they are one
combinational block that meets the 2- and 4-cycle latencies.

## 5. Network interface and packet format

`sn_ni` puts a 20-flit injection FIFO and a 20-flit ejection FIFO between a node and its
router port:

- Injected flits enter the network on VC0.
- The ejection queue is ready to the router only while it is not full.

Flits are 130 bits: `head`, `tail` and 128 bits of data. A head flit carries:

| bits | field |
|---|---|
| [15:0] | destination node |
| [31:16] | source node |
| [39:32] | packet length in flits, head included |
| [127:40] | payload |

The length is what the CB reserves. Packet sizes used here are 6 flits (data) and 2 flits
(requests). Any length up to the CB size works.

## 6. Files

| file | what it is |
|---|---|
| `rtl/sn_pkg.sv` | flit and link types; field arithmetic; graph, routing and placement functions |
| `rtl/sn_route_compute.sv` | per-router route table (destination → port, VC) |
| `rtl/es_stage.sv`, `rtl/es_link.sv` | ElastiStore stage and multi-cycle link |
| `rtl/cbr_input_unit.sv` | per-VC input staging registers and route lookup |
| `rtl/cbr_allocator.sv` | bypass / CB admission / CB read allocation |
| `rtl/cbr_crossbar.sv` | (k'+p) × (k'+p+1) crossbar |
| `rtl/cb_central_buffer.sv` | 20-flit shared buffer with per-(port,VC) linked-list queues |
| `rtl/cbr_output_unit.sv` | per-VC output buffers and link VC arbitration |
| `rtl/cb_router.sv` | the router |
| `rtl/sync_fifo.sv`, `rtl/sn_ni.sv` | FIFO and network interface |
| `rtl/slim_noc.sv` | top level: routers, links and interfaces for the whole network |

`slim_noc` brings out one injection port and one ejection port per node, as valid/ready
pairs. The processing cores are outside it.

## 7. Verification

Each unit has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

- **`tb_sn_route_compute`**
  - Builds its own reference graphs with plain arithmetic, for q = 5 and q = 9, and checks
    their degree.
  - Checks the exact port list of one router against a hand-worked neighbour list.
  - Checks that, from every one of the 50 routers, every destination is reached in at most
    two hops by following the route tables.
  - Repeats that for four routers of the q = 9 network.
  - Checks VC selection and local ports, and that the square test for X and X' agrees with
    the list of powers of the primitive element.
- **`tb_es_stage`, `tb_es_link`**
  - Random per-VC stalls.
  - Check ordering and that no flit is lost or duplicated.
  - Check that a stalled VC does not block the other.
  - Check full throughput and latency.
- **`tb_cbr_input_unit`, `tb_cbr_output_unit`, `tb_cbr_crossbar`, `tb_cb_central_buffer`,
  `tb_sn_ni`**
  - Unit-level ordering, capacity and handshake checks.
- **`tb_cb_router`**
  - A lone packet leaves 2 cycles after it arrives (bypass).
  - Of two packets that collide on one output, one takes 2 cycles and the other 4 (CB path).
  - A long random run on all 11 ports and both VCs checks every flit for order and integrity.
- **`tb_slim_noc`**
  - The full 200-node network at default parameters.
  - Four traffic phases: uniform random, bit shuffle, bit reversal, and an adversarial pattern
    that sends to the neighbouring router.
  - A mix of 2- and 6-flit packets.
  - Every packet is checked to arrive at the right node, complete and in order.
  - The test fails if any of these never happened:
    - CB bypass;
    - CB path;
    - a head waiting;
    - one-hop and two-hop routes;
    - traffic on a two-cycle link;
    - back-pressure held in an ElastiStore stage;
    - a full injection queue.
  - A typical run delivers about 12,900 packets (51,500 flits). Mean latency is about 19 cycles.

Simulate with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl --top-module tb_cb_router \
          rtl/sn_pkg.sv tb/tb_cb_router.sv -o sim
./obj_dir/sim
```

The full-network testbench takes several minutes to compile, because the whole network is
elaborated flat. It then runs in about a second.

## 8. Where this RTL departs from the source design, and its limits

- **Allocation in one cycle.** The three allocators run as one combinational step instead of
  three pipeline stages. The 2- and 4-cycle latencies are kept, but the critical path is
  longer than a pipelined allocator's.
- **Flow control and arbitration.** The ElastiStore latch ordering, the per-VC ready rule,
  every arbitration order (round-robin, rotating priority) and the choice of common
  neighbour on two-hop routes are this design's own choices.
- **Head flit layout.** The layout of the head flit is this design's own.
- **Field sizes.** Only q = 4w + 1 is built (5, 9, 13, 17, 29 are accepted). Network sizes
  that need other fields (such as the 1024-node point, q = 8) are not.
- **SN-L.** The group layout coordinates are an interpretation. SN-L has been elaborated but
  not simulated.
- **SMART.** The SMART circuits are not modelled. Their only effect here is the H that sets
  each link's stage count.
- **Traffic sources.** Cores, caches and memory, and the application traces, are outside the
  RTL. The testbench's packet sources stand in for them.
- **Unused output.** `cb_central_buffer` provides a per-queue non-empty output. The router
  does not use it, and lint reports it as unused.
