# Freedom-condition deadlock avoidance for output-queued mesh NoCs

In a 2D-mesh network-on-chip whose routers keep one queue per
(input port, output port) pair, as output-queued (OQ) and virtual-output-queued
(VOQ) routers do, every queue stands for one *turn*. A packet in the queue from
the south input to the east output is making a south-to-east turn. Classic
deadlock avoidance forbids some turns outright (the turn model; XY routing, for
example, forbids four of the eight). This design forbids nothing in advance. A
router lets a packet go north toward a turn that the "north-last" turn model
would forbid only when a worst-case count shows that the queue holding that
turn in the next router can never overflow. This count is the *freedom
condition*. When the count fails, the packet falls back to XY
dimension-order routing, and only for that one hop. The base algorithm, which
may be fully adaptive and deadlock-prone on its own, stays in charge for every
other decision.

This repository holds synthesizable SystemVerilog for such a network: an
8×8 mesh of 5×5 output-queued routers with 25 FIFOs of 8 × 64 bits each,
single-flit packets, and the "XY/Adaptive" routing. An "XY/O1-Turn" mode can
be selected by a parameter. It also holds self-checking testbenches for
every module.

## The freedom condition

Number the router ports E, S, W, N, C (C is the local node), and write q[i][o]
for the queue from input i to output o. Under north-last, the two forbidden
turns are S→E and S→W: a packet travelling north turns east or west. Both
turns happen in the queues q[S][E] and q[S][W] of the router that the packet
enters from the south.

Take a packet p that arrives at router A, whose base algorithm wants to send it
north to router B, and whose destination lies to the north-east. At B it could
then take the S→E turn. The only queues in A that can feed B's q[S][E] are:

* q[C][N], injected traffic;
* q[S][N], traffic going straight on;
* q[W][N], traffic that turned north at A while travelling east.

q[E][N] cannot feed it: that traffic travels west and, with minimal routes,
never turns east again. The condition checked at A is

    1 + occ(B.q[S][E]) + occ(A.q[C][N]) + occ(A.q[S][N]) + occ(A.q[W][N])  <=  DEPTH

with the mirror image for a north-west destination: B.q[S][W], and A.q[E][N] in
place of A.q[W][N]. If the sum fits, p goes north. Even if every packet ahead
of it ends up in B's restricted queue and that queue stops draining, p still
finds a slot, so p cannot close a cycle of full queues. If the sum does not
fit, p goes east or west, whichever XY routing says. XY never sends a packet
north while an X offset remains, so the fallback never needs the check
itself. Packets going south, or going north with no X offset left, are never
checked: they cannot make a forbidden turn at the next hop.

Three details matter for correctness:

* **Serial evaluation within a cycle.** Up to five packets arrive at A in one
  cycle. The condition assumes they are checked one after another. The router
  fixes the priority order E, S, W, N, C. Packets that higher-priority inputs
  put into A.q[C][N], A.q[S][N] or A.q[W][N] (or A.q[E][N] for the S→W case)
  in the same cycle are added to the sum (`pend_se`, `pend_sw` in
  `freedom_check`). The chain is built from generate-scope signals (`cum_se`,
  `cum_sw`) in `oq_router`.
* **Occupancy links.** B sends the counts of its q[S][E] and q[S][W] down to A
  over two 4-bit buses, the only extra wires that the scheme needs between
  routers. Counts are the registered FIFO counters of the current cycle. A
  packet that leaves a counted queue in the same cycle is still counted, which
  only makes the check more cautious.
* **Whole queues, not destinations.** `occ` is the physical occupancy of a
  queue, not the number of packets in it that really could reach the
  restricted queue. This is the simpler of the two versions of the condition.
  It is sufficient but pessimistic.

## Router organisation (`oq_router`)

```
 in E ─►route─► q[E][E] q[E][S] q[E][W] q[E][N] q[E][C]
 in S ─►route─► q[S][E] ...                          \
 in W ─►route─► ...                                   ├─ out_arbiter per output ─► out E,S,W,N,C
 in N ─►route─► ...                                  /
 in C ─►route─► q[C][E] ... q[C][C]
```

* **Split.** Each input has a `route_unit` that computes three things: the
  base direction, the XY fallback direction, and whether a north move could
  lead to a restricted turn (`chk_se`, `chk_sw`). `freedom_check` decides
  between base and fallback. The packet is written into q[input][sel] in the
  cycle it arrives.
* **Merge.** Each output has a round-robin priority encoder (`out_arbiter`)
  over the five queues that feed it. The grant does not depend on the
  downstream ready, so there is no combinational loop between routers.
* **Timing.** Nothing is pipelined. A packet accepted in cycle t is offered on
  the output in cycle t+1, so each router adds one cycle. From creation in the
  source generator to arrival at the sink, a packet over h hops takes h+2
  cycles with no contention.
* **Flow control.** A link is valid/flit/ready. A router's `in_ready` for an
  input is the "not full" flag of the queue that the offered packet *would* be
  routed to. It therefore depends combinationally on the flit offered by the
  upstream router in the same cycle. The path is upstream queue head →
  arbiter mux → downstream routing → ready → upstream pop. If the chosen queue
  is full, the input stalls. It does not try the other productive direction.
* **All 25 queues are instantiated**, including the U-turn ones (E→E and the
  like) that minimal routing never uses. Synthesis may remove them.

### Routing algorithms (`route_unit`, parameter `ALGO`)

* `ALG_XY_ADAPTIVE` (default). Minimal and fully adaptive. If both an X and a
  Y direction shorten the path, the packet takes the one whose local queue
  (this input to that output) holds fewer packets. A tie goes to X. When the
  freedom condition fails, XY fallback.
* `ALG_XY_O1TURN`. Each packet carries a random one-bit tag chosen at the
  source: XY order or YX order for the whole path. A YX packet that would go
  north against a failing freedom condition takes the XY direction instead,
  for that hop only. The tag is kept, so at the next router the packet tries
  Y first again.

## Mesh (`noc_top`)

Node (x, y) has index y·MESH_W + x. x grows to the east and y to the north.
Each node has a `traffic_gen` on the router's C input and a `packet_sink` on
its C output. Ports on the mesh edge are tied off. The occupancy inputs of the
top row are tied to zero, since no packet goes north from there. A free-running
16-bit counter time-stamps packets. Per-node counters (injected, delivered,
latency sum and maximum, misdelivery flag) and per-cycle router events
(fallback taken, restricted turn approved, adaptive choice of Y, input stall)
are brought out as arrays.

| parameter | default | meaning |
|---|---|---|
| `MESH_W`, `MESH_H` | 8, 8 | mesh size |
| `DEPTH` | 8 | entries per queue (the capacity `cap` in the condition) |
| `ALGO` | `ALG_XY_ADAPTIVE` | base routing algorithm |
| `SEED` | `32'h12345678` | generator seed |

### Packet format (`noc_pkg::flit_t`, 64 bits)

| bits | field |
|---|---|
| 63:60 | `dst_x` |
| 59:56 | `dst_y` |
| 55:52 | `src_x` |
| 51:48 | `src_y` |
| 47 | `yx`, the O1-Turn tag |
| 46:31 | `stamp`, the creation cycle modulo 2^16 |
| 30:0 | `payload`, the source's sequence number |

The 64-bit width is the reference point. The field layout is this design's
own.

### Traffic generators (`traffic_gen`)

The generator creates a packet with probability `inj_rate`/256 in each cycle
in which it is not holding one. It holds the packet until the router accepts
it, so back-pressure throttles the offered load; there is no source queue.
The destination patterns are the following, with a = {y, x}:

| pattern | destination |
|---|---|
| uniform | uniformly random |
| bursty | bursts of 8 packets to one random node |
| bit complement | ~a |
| bit reverse | a with its bits reversed |
| bit rotate | a rotated right by one bit |
| butterfly | a with its MSB and LSB swapped |
| transpose | (y, x) |
| hot spot | uniform, with the centre node drawn four times as often |

These are the usual textbook definitions. The bit patterns assume
power-of-two mesh sides.

## How far it is checked

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_sync_fifo` | random traffic against a reference queue: head, count, full and empty |
| `tb_freedom_check` | the worked example (restricted queue 2, feeders 2+1+3: refused), the exact capacity boundary, 20,000 random cases against the formula |
| `tb_route_unit` | both algorithms against a reference model; every direction minimal; the fallback is never north when a restricted turn is possible |
| `tb_out_arbiter` | round-robin grant order against a reference pointer |
| `tb_oq_router` | 1-cycle latency; stall at 8 entries; F′ pass at capacity and refusal one above, for both turns; serial F′ between two inputs in one cycle; random five-input traffic with order, duplicate and loss checks |
| `tb_traffic_gen` | source, stamp, hold-until-accepted, fixed destinations of the permutations, rates within ±3 %, hot-spot share |
| `tb_packet_sink` | counters and latency arithmetic |
| `tb_noc_top` | 4×4 meshes with XY/Adaptive and XY/O1-Turn under low load, then saturated uniform, hot-spot, transpose, bit-complement and bursty traffic. Requires complete draining (no deadlock, no loss, no misdelivery), and that fallback, approved restricted turns, stalls and adaptive Y choices all occur. Low-load mean latency is 4.57 cycles against 4.5 expected |
| `tb_noc_full` | the default 8×8 mesh at full injection rate, uniform then hot-spot traffic, drains completely. The 8×8 synthetic-traffic study with queues of 16 entries, as set up for the routing evaluation, is not simulated here |

Running at saturation and then draining to zero is a strong practical check of
deadlock freedom, but it is not a proof. The proof belongs to the condition
itself. No baseline algorithm (pure XY, north-last, unrestricted adaptive) is
included, so the throughput and latency numbers that the testbenches print
stand alone.

## Departures and limits

* **Single-flit packets only.** The general condition counts the flits of whole
  multi-flit packets: the head flit carries the packet length, and body flits
  count as zero. It also needs whole-packet forwarding at the output arbiters.
  Neither is built. The router implements the single-flit form.
* **Occupancy buses are 4 bits** for 8-entry queues, that is
  ⌈log2(DEPTH+1)⌉. ⌈log2(cap)⌉ bits cannot represent a full queue of 8.
* Choices that are this design's own:
  * the input priority order E, S, W, N, C for the serial check;
  * the tie-break towards X;
  * round-robin merging;
  * stalling on a full target queue;
  * the packet layout;
  * the generators' burst model and their lack of a source queue.
* Not included: credit-based, pipelined versions of the occupancy links; the
  refined condition that counts only packets able to reach the restricted
  queue; support for misrouting or packets of unknown size. These are
  extensions, not part of the base scheme.

## Simulating

The files depend only on each other, and `noc_pkg.sv` must be read first.
For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/noc_pkg.sv tb/tb_noc_top.sv \
          --top-module tb_noc_top -o sim && ./obj_dir/sim
```

Verilator finds the other modules through `-Irtl` by their file names. To
change the mesh, override `MESH_W`, `MESH_H`, `DEPTH` and `ALGO` on
`noc_top`. Set `MESH_W`/`MESH_H` and `COORD_W` in `noc_pkg` together for
meshes wider than 16 nodes per side.
