# Hermes: fault-tolerant routing for a mesh network-on-chip, in SystemVerilog

Hermes keeps a 2D-mesh network-on-chip running after links break, and loses almost nothing
while the mesh has no faults. Packets normally travel on fast, deadlock-free dimension-order
routes: XY, or in the main configuration (H-O1TURN) XY or YX with equal probability. A packet
only leaves its dimension-order route when the link it needs is broken. It then moves, for the
rest of its trip, to a third virtual channel (VC) that is routed by Up*/Down* tables. Those
tables survive any pattern of link faults. Because a packet can enter the Up*/Down* VC but can
never leave it, the mix of routing functions stays deadlock-free.

The Up*/Down* tables are not computed by software. When a link fails, the routers rebuild the
tables themselves by flooding single-bit flags over a small, separate control network. The
routers are slotted by a global clock so that each router in turn builds a spanning tree
rooted at itself. This repository holds RTL for the router, the reconfiguration logic, a
network interface and an 8x8 mesh that ties them together. It also holds self-checking
testbenches for every block.

## Organisation of the mesh

- `hermes_noc` (top) holds MESH_X x MESH_Y nodes. The default is 8x8, so N = 64.
- Node `n` sits at x = n % MESH_X and y = n / MESH_X. y grows southwards.
- Router ports are numbered 0 = N, 1 = E, 2 = S, 3 = W, 4 = local.
- Each node is a `hermes_router` plus a `network_interface`.
- Neighbours are joined by three kinds of link:
  - a 128-bit flit link, whose register sits at the sender's output;
  - a 3-bit per-VC credit link going back;
  - a 2-bit flag link (DRF, AF) sent on three copies and majority-voted at the receiver by
    `tmr_flag_link`.
- A single `global_clock_counter` is shared by every router.
- Link faults enter as inputs:
  - `link_faulty_h[y*(MESH_X-1)+x]` is the link between (x,y) and (x+1,y);
  - `link_faulty_v[y*MESH_X+x]` is the link between (x,y) and (x,y+1).

  A faulty link is unusable in both directions. Detecting faults is outside this design.
- `flag_lane_fault[n][d]` inverts one copy of a flag link, so tests can exercise the voter.

## The router datapath

`hermes_router` is an input-buffered wormhole router with credit-based flow control. It has
5 ports and 3 VCs per port, with 6-flit buffers (`vc_fifo`). It has four pipeline stages:

| stage | block | what happens |
|---|---|---|
| RC | `input_unit` + `route_compute` | One head flit per input port per cycle, round-robin over idle VCs, gets an output port and output VC. |
| VA | `vc_allocator` | Round-robin per output VC. Only an output VC that no packet holds can be granted. |
| SA | `switch_allocator` | Separable, input-first, round-robin. Needs a credit for the output VC. |
| ST | `crossbar` | Drives the output register, which is the link stage. |

A head flit written into a buffer at clock edge t appears in the output register after edge
t+4. It is written into the next router's buffer at edge t+5, so a hop costs five cycles at
zero load. Body and tail flits follow one per cycle. The output VC is released after the tail
leaves.

### Routing function (`route_compute`)

| VC a packet is in | route |
|---|---|
| VC0 (XY) | X first, then Y |
| VC1 (YX) | Y first, then X |
| VC2 (Up*/Down*) | the port stored in the local routing table for the destination |

- If the dimension-order output link of a VC0 or VC1 packet is faulty, the packet escapes: it
  is re-labelled VC2 and takes the table's port. It never returns to VC0 or VC1.
- A destination without a valid table entry lies in a different, disconnected part of the
  mesh. Such a packet is dropped: its flits are drained and never forwarded, so it cannot block
  a buffer forever.

The network interface chooses VC0 or VC1 for each new packet with a 16-bit LFSR (H-O1TURN). In
`MODE_H_XY` it always uses VC0, which gives the H-XY variant.

## Reconfiguration: the hard part

### Time slots

The global counter is 2*log2(N) bits wide, 12 bits for 64 nodes:

- the upper half names the node whose broadcast window it is (the slot);
- the lower half counts the N cycles of that window.

One full turn of the counter, N^2 cycles (4096), gives every node one window. A node may start a
broadcast only in the first cycle of its own window (`node_id_extractor`).

### Registers per router (`reconfig_ctrl`, `updown_logic`)

- SR, the status register: 0 = normal, 1 = recovering.
- AR, the alert register: 0 = normal, 1 = alert.
- One up/down bit per mesh port: 0 = up, 1 = down.
- A pending-fault bit, set when a link attached to this router newly fails.

### Sequence of a reconfiguration

1. **Initiation.** A node with a pending fault waits for its own window. In the window's first
   cycle it becomes root and does the following:
   - sends DRF (destination-reachable flag) on every healthy port;
   - sends AF (alert flag) on every faulty port;
   - marks all its ports down;
   - sets SR;
   - invalidates its routing table.
2. **Flooding.** Flags hop one router per cycle, because the outputs are registered. A router
   handles only the first DRF it receives in each window (`flag_forwarding`):
   - **Table.** It writes the arrival port into table entry [window's root]. If several ports
     deliver at once, the priority is N > E > S > W. This makes the table point back along
     the tree towards every root.
   - **Forwarding.** A DRF that arrived on a down port goes out on every port. One that arrived
     on an up port goes out only on down ports. The flag is never sent on a port that has
     already received a flag in this window, nor in the last cycle of a window. It goes out as
     AF on faulty ports.
   - **Entering recovery.** If the router was not recovering, this first DRF puts it into
     recovery:
     - SR is set and the table is invalidated;
     - the ports the DRF came in on become up, all other ports become down.
3. **Every node takes its turn.** While recovering, each node broadcasts as root once in its
   own window. So after N^2 cycles every table has an entry for every node it can reach.
4. **Freezing.** While SR is set:
   - the router performs no route computation for head flits, so packets that already hold a
     route drain;
   - the network interface starts no new packets.

   SR clears by itself N^2 cycles after the cycle in which the node joined.

### Partitions and the alert register

AF flags travel on the overlay across a faulty data link. A router that receives an AF while
in normal state sets AR.

A group of routers cut off from the root never sees a DRF. Those routers end up in alert, and
the first of them whose window comes restarts the reconfiguration as root of its own part of
the mesh. Each part then holds table entries only for its own members. Packets addressed across
the cut are dropped at the router where they would need the missing entry.

### Start-up

After reset every router remembers no faults. The ports on the mesh edge are tied faulty, so
they look newly failed. The first node whose window comes therefore configures the whole
network once after reset, which fills all tables; this is node 1 when the counter starts at
0. Until then the network routes fault-free traffic by XY/YX and needs no table.

## Where this RTL departs from, or goes beyond, the source description

- The pipeline is four non-speculative stages. The evaluation of the original work assumed a
  three-stage speculative router. The four-stage form is the one given for the Hermes router
  itself.
- Buffers are 6 flits deep, the figure given for the synthesised router. Its simulations used
  5 flits. `DEPTH` is a parameter.
- The routing table is built from flip-flops rather than an SRAM, because it must be cleared
  in one cycle.
- The following are choices made here where the source is silent:
  - the pending-fault bit;
  - the start-up configuration;
  - dropping packets that have no route;
  - the N > E > S > W priority;
  - not forwarding in a window's last cycle;
  - the flit field layout;
  - the LFSR;
  - the allocators' arbitration.
- Fault detection, the processor tiles and the trace-driven workloads are not included. Link
  status is an input of the top.
- A flit that has already been granted a link when the link fails is still delivered. No data
  corruption is modelled.

## Flit format

`hermes_pkg::flit_t` holds the following fields:

- valid;
- a 2-bit type: head, body, tail or head+tail;
- a 2-bit VC;
- 128 data bits.

The network interface fills the data bits as follows:

| bits | meaning |
|---|---|
| [7:0] | destination |
| [15:8] | source |
| [31:16] | packet sequence number |
| [39:32] | flit index |
| [71:40] | payload word |

The receiver checks that all flits of a packet agree before it reports `rx_ok`.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. For example:

    verilator --binary --timing --assert -Irtl -Itb rtl/hermes_pkg.sv tb/tb_hermes_noc.sv \
        --top-module tb_hermes_noc -o sim && obj_dir/sim

`tb_hermes_noc` runs a 3x3 mesh through a fault walk-through:

1. fault-free traffic;
2. links 4-5 and 7-8 fail, one reconfiguration, then escaping traffic;
3. link 1-2 fails with traffic in flight, which cuts off nodes 2, 5 and 8.

It checks the tables, the port directions and the alerts. It counts every mechanism and fails
if one never happens: reconfiguration, frozen heads, held injection, escape, drop, alert,
TMR-masked flag errors, and deliveries on the XY and on the YX VC.

`tb_hermes_noc_full` uses every default (8x8) for:

- the start-up configuration;
- random traffic;
- one link fault and its 4096-cycle reconfiguration;
- traffic around the fault.

Verilator takes several minutes to build it.

`tb_hermes_router` checks one full-size router:

- the t+4 output timing;
- credit back-pressure;
- root initiation;
- DRF forwarding;
- the recovery length;
- escape, drop and ejection.
