# Q-RASP: a Q-learning routed mesh network-on-chip with region-aware cost and shared path experience

Each router in a 2D-mesh network-on-chip keeps a table of learned congestion
estimates ("Q-values"), one per destination and per minimal next-hop
direction, and sends every packet towards the neighbour with the smaller
estimate. The estimates are refreshed by small learning packets that each
downstream router sends back over a dedicated link as soon as a packet
arrives. Two ideas make the learning fast and cheap:

* **Region-aware contention cost.** The cost reported for a hop is not a
  measured latency but a count taken at the moment of arrival in the
  downstream router: occupied input VCs at the arrival port, plus reserved
  output VCs at the chosen output, plus a small weight times the reserved
  output VCs of *all* minimal directions (the "region"). It is available
  immediately, needs only counters, an adder and a small multiplier, and
  has a small range, so Q-values fit in 10 bits.
* **Shared path experience.** Each table row also remembers the route
  (input port, output port) the last packet to that destination took. When
  a packet passes, the cost it saw is valid for every destination whose
  flows use the same route through the router, so the downstream router
  returns learning packets for all of them, not only for the packet's own
  destination. Rarely used destinations keep fresh estimates.

This repository gives the RTL of the router and of an 8x8 mesh built from it,
with self-checking testbenches.

## Configuration

| Item | Value |
|---|---|
| Topology | 8x8 2D mesh, node id = row*8 + col, row 0 at the north edge |
| Router ports | N, E, S, W and the local (PE) port |
| Virtual channels | 4 per port, 4 flits deep each |
| Flit | 128 data bits (+ valid, head, tail, 2-bit VC on the link) |
| Flow control | credits, one per flit |
| Q-value | 10 bits unsigned, 6 integer + 4 fraction bits |
| Learning rate alpha | 179/256 = 0.699 |
| Discount gamma | 230/256 = 0.898 |
| Region weight mu | 2/16 = 0.125 (target 0.1; 4-bit weight) |
| Learning-packet queue | 4 single-flit packets per input port |

All of these are module parameters or package constants
(`rtl/qrasp_pkg.sv`); the defaults are the values above.

## The learning loop, hop by hop

Router x sends a packet for destination d to neighbour y:

1. **Route at x.** The head flit's destination indexes x's table. If d needs
   both a horizontal and a vertical hop, the direction with the smaller
   Q-value wins (ties go horizontal). With one productive direction it is
   taken. The table's Route column for d is set to the route code
   (input port, output port).
2. **Mask at x.** When the head leaves x, x looks up every other destination
   whose Route column holds the same route code and writes that set as a
   64-bit mask into the head flit.
3. **Cost at y.** In the cycle the head is written into y's input buffer, y
   routes it (step 1 at y) and its cost unit computes
   `q_y = (r_i + r_o) + mu * q_r`, where
   * `r_i` is the number of occupied VCs of the arrival port;
   * `r_o` is the number of reserved output VCs at the output y chose;
   * `q_r` is the sum of reserved output VCs over all minimal directions
     from y to d.
4. **Learning packets from y.** y queues `{d, q_y, min Q_y(d,.)}` and, for
   every destination d' in the mask, `{d', q_y, min Q_y(d',.)}`. The queue
   holds 4 packets and sends one per cycle on the learning link back to x.
   Packets that do not fit are dropped, and the primary one goes in first.
5. **Update at x.** Each learning packet from the neighbour in direction o
   updates `Q_x(dest, o)`:

   `Q <- (1 - alpha) Q + alpha (q_y + gamma * min Q_y)`

   East and west packets update the horizontal column, north and south ones
   the vertical column. All four links can update in the same cycle.

Because every cost counts packets competing ahead, Q-values converge to the
contention along the rest of the path, not to a latency. With the limits
used here a Q-value saturates at 63.9375.

### Route codes

The 12 (input, output) pairs of a mesh router are numbered in input-major
order, with outputs in N, E, S, W order and the U-turn skipped:

| in \ out | N | E | S | W |
|---|---|---|---|---|
| N | - | 0 | 1 | 2 |
| E | 3 | - | 4 | 5 |
| S | 6 | 7 | - | 8 |
| W | 9 | 10 | 11 | - |

Packets from the local port get codes 12..15 (local to N, E, S, W). The Route
column is a valid bit plus the 4-bit code.

### Fixed-point arithmetic

`q_update` computes `Q + alpha*(target - Q)` with
`target = q_y + (gamma*est >> 8)`, which is the same update written with one
multiplier fewer. Products are truncated, the target is saturated to 10 bits,
and the result is clamped to 0..1023. Against real-valued arithmetic with
alpha = 0.70 and gamma = 0.90, the error stays below 0.3 (about 5 LSB). Under a
constant cost c the value settles near c/(1-gamma) (117..119 LSB for c = 12),
as the testbench checks.

## Router microarchitecture (`qrasp_router`)

Each input port has a `vc_buffer`, a `cost_unit` and (mesh ports only) a
`learn_queue`. The router shares one `q_table`. Round-robin arbiters
(`rr_arbiter`) do VC and switch allocation.

* **Cycle 0, arrival.** The flit is written into its VC. A head flit is routed
  here, its Route column is written, and its cost and learning packets are
  produced.
* **Cycle 1, VC allocation.** A head flit at the front of its VC asks for an
  output VC. Each output grants one request per cycle and gives it the lowest
  free VC of the allowed set. A VC is free when it is unreserved and all its
  credits have come back.
* **Cycle 2, switch allocation and traversal.** Each input port picks one VC
  that has an output VC with a credit, and each output picks one input. The
  flit leaves and a credit goes back upstream. The tail flit releases the
  output VC.

An unloaded hop therefore takes 3 cycles. From the PE's injection link to
ejection, a packet over h hops takes 3h + 4 cycles. The learning packet for
a head arriving at edge t is on the learning link after edge t+1.

### Deadlock freedom: two VC sets

Routing is minimal and partially adaptive, so both dimension orders can
occur. The VCs of each port are split into two sets:

* **Set 1 (VCs 2-3)** carries packets whose destination row still lies to
  the south. They never move north.
* **Set 0 (VCs 0-1)** carries all other packets. They never move south.

So each set lacks one vertical direction and cannot form a turn cycle. A
packet moves only from set 1 to set 0 (when it reaches its destination
row). The ejection port may use any VC.

### Observability

`ev` is a per-router vector of one-cycle event pulses:

* a Q-value update;
* a shared learning packet queued;
* a learning packet dropped;
* a non-XY routing choice;
* a credit stall;
* a VC-allocation stall;
* an allocation in VC set 0 or in VC set 1.

The testbenches count them.

## Mesh (`qrasp_noc`)

The mesh instantiates 64 routers. Each router's coordinates are strap inputs,
so every tile is the same design. Neighbours are joined by three kinds of
link:

* a flit link in each direction;
* a credit link in each direction;
* a learning link from each router back to its upstream neighbour.

Edge links are tied off. Each node's local port is a top-level port:

* `inj_flit` / `inj_credit` carry traffic from the PE into the router;
* `ej_flit` / `ej_credit` carry traffic from the router to the PE.

A source must start a packet on a VC only when all 4 credits of that VC are
back and its previous packet has ended. A sink returns one credit per flit.

## Departures from the published Q-RASP description, and own choices

* **mu.** It is 0.125 instead of 0.1, because it is held as a 4-bit fraction
  for the 4x4 multiplier.
* **Alpha and gamma.** They are 8-bit fractions (0.699, 0.898).
* **Region cost.** `q_r` sums the reserved VCs of all minimal directions,
  including the chosen one (the equation's form). A sentence in the
  published text instead adds only the non-selected outputs. `q_r` saturates
  at 15.
* **Table size.** The table has 64 rows (own row unused) instead of 63.
* **Route column.** It is 5 bits instead of 3, so route numbers 0..11 and
  the local-port codes fit.
* **Shared-route set.** The upstream router picks the route-sharing
  destinations from its own Route column. It sends them to the downstream
  router as a 64-bit mask in the head flit's data field, so head flits have
  52 payload bits.
* **Pipeline and allocators.** These are not specified by the published description:
  routing at arrival, VC allocation one cycle later, then switch allocation
  and traversal, with round-robin arbiters and atomic VC allocation.
* **VC-set rule.** The split by "still going south" is this design's reading
  of "one set restricts south-first turns, the other north-first turns".
* **Learning queue overflow.** Packets that do not fit are dropped.
* **Learning links.** There is no back-pressure on them.
* **No exploration.** Routing is greedy.
* **Reset.** Q-values reset to 0 and the Route column to invalid.
* **Not modelled.** Clock frequency, voltage, process, power and area are
  not modelled. The processing elements are not part of the RTL.

## Files

| File | Contents |
|---|---|
| `rtl/qrasp_pkg.sv` | sizes, flit / credit / learning-packet / table-row types, route-code function |
| `rtl/cost_unit.sv` | r_i, r_o, q_p, q_r, q_y |
| `rtl/q_update.sv` | fixed-point Q-learning update |
| `rtl/q_table.sv` | Q-values and Route column, minimum selection, estimates, shared-route masks, four update ports |
| `rtl/learn_queue.sv` | learning-packet generation and 4-entry queue |
| `rtl/vc_buffer.sv` | per-VC input FIFOs |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/qrasp_router.sv` | the router |
| `rtl/qrasp_noc.sv` | the 8x8 mesh (top) |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus the mesh test |
| `tb/noc_pe.sv` | behavioural processing element: traffic generator and checking sink |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. For example:

    verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_q_table \
        rtl/qrasp_pkg.sv rtl/q_update.sv rtl/q_table.sv tb/tb_q_table.sv
    ./obj_dir/Vtb_q_table

The router test needs `qrasp_pkg, rr_arbiter, vc_buffer, cost_unit, q_update,
q_table, learn_queue, qrasp_router`. The mesh test adds `qrasp_noc.sv`,
`tb/noc_pe.sv` and `tb/tb_qrasp_noc.sv`.

What the tests check:

* **`tb_cost_unit`** checks every cost term against a reference model over
  random VC states.
* **`tb_q_update`** checks against real arithmetic, exact cases, saturation
  and convergence.
* **`tb_q_table`** checks routing choice, estimates and masks on a 4x4 mesh. It
  includes the four-router example where a packet from node 6 to node 14
  also refreshes the rows of nodes 11 and 15.
* **`tb_learn_queue`** checks ordering, overflow and drop counts against a model.
* **`tb_vc_buffer`** checks FIFO order per VC.
* **`tb_qrasp_router`** checks the centre router of a 3x3 mesh:
  * latency;
  * the mask in the departing head;
  * the learning packets and their cost;
  * adaptive turning after learning;
  * credit stalls.
* **`tb_qrasp_noc`** runs the full 8x8 mesh at default parameters, and
  **`tb_qrasp_noc_4x4`** runs the same test on a 4x4 mesh for quick runs:
  1. It checks zero-load latency on three paths.
  2. It runs five synthetic patterns back to back, 1200 cycles each, with
     packets of 1-8 flits (longer than a VC buffer, so flits wait for credits):
     transpose, bit-reversal, shuffle, butterfly and uniform random.
  3. It drains the network.
  4. It checks that every packet arrived intact and in order, and that each
     mechanism occurred: updates, shared updates, queue drops, non-XY routes,
     credit stalls, VC-allocation stalls, and both VC sets.

The 8x8 mesh compiles to a large model. Building it with verilator takes
about 8 minutes with one compile job, or 4 minutes with `-j 4`; the run
itself takes seconds. The 4x4 test
builds in under a minute.
