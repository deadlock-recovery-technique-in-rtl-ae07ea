# Deadlock recovery over a global bus in a 4x4 mesh NoC

A network-on-chip that routes with *true fully adaptive routing* (TFAR) sends
each packet along any minimal direction that happens to be free, with no turn
restrictions and no virtual channels. That gives the best use of the mesh under
non-uniform traffic, but it allows cyclic channel dependencies, so deadlocks can
happen. Instead of restricting routing to avoid them, this design detects them
and recovers. Beside the mesh runs one global bus. A router that believes one of
its messages is deadlocked asks a central arbiter for the bus. When it gets the
bus, it moves that whole message across the bus directly to the destination
processing element (PE). Taking one message out of the cycle frees the channels
it held, and the other messages in the cycle can move again.

This repository holds synthesizable SystemVerilog for the whole network: 16
routers, 16 PE receive interfaces, the bus and its arbiter. It also holds a
self-checking testbench for every block and an end-to-end testbench for the
whole network. The PEs themselves are not included. Each tile exposes an
injection channel and a receive channel instead.

## Structure

```
                    +-------------------- global bus (1 flit wide) --------------------+
                    |  driven by the granted router's IB, watched by every PE's OB     |
  bus_arbiter  <-- BR pulses / cancel pulses --  routers  --> IB --> global_bus --> OB  (pe_bus_if)
      |  BG (one-hot) ----------------------->   (x16)                                  (x16)
                                                   |  ejection channel ------------------^
                                                   v
                                        4x4 mesh of router links
```

`noc_top` holds the 4x4 mesh. Node `n` is tile `(x, y) = (n % 4, n / 4)`, and
North is +y. Each tile has:

* a `router`. Each of its five input channels (N, E, S, W and the PE's injection
  channel) has a link controller (`link_ctrl`) and a 4-flit buffer
  (`flit_fifo`). Next come the routing and arbitration unit (`route_arb`) and the
  5x5 switch (`xbar_switch`). Each mesh output has a link controller. The
  ejection output has a buffer and a link controller. Each of the five outputs
  has an inactivity counter (`inact_counter`). The router also holds the
  deadlock rule (`deadlock_detect`), the bus-request controller and the one-flit
  bus input buffer (IB).
* a `pe_bus_if`. It holds the one-flit bus output buffer (OB) and merges the
  messages that reach the PE from the router and from the bus.

One `bus_arbiter` and one `global_bus` are shared by all tiles.

## Flits and channels

All channels are valid/ready streams of `noc_pkg::flit_t`:

| field | bits | meaning |
|---|---|---|
| `ftype` | 2 | `FT_HEAD`, `FT_BODY`, `FT_TAIL`, `FT_HEADTAIL` |
| `dst_x`, `dst_y` | 2 + 2 | destination tile. Routers and PE interfaces use it only in the header. |
| `src_x`, `src_y` | 2 + 2 | source tile. The design does not use it; it helps checking. |
| `data` | 32 | payload |

A message is a header, any number of body flits and a tail. Switching is
wormhole: an output is reserved from the header to the tail. Packets have no
length field, so any length works. The evaluation uses 4 to 10 flits.

A flit moves when `valid && ready`. Each link controller is a one-flit register
stage, so a stream moves at one flit per cycle. A buffer's `in_ready` depends
only on how full it is. This matters: if ready were passed combinationally
through both the link controllers and the buffers, the ready paths of the
routers would join into combinational loops around the mesh.

## Routing and arbitration

For a header at the head of an input buffer, `route_arb` computes the
*requested* outputs. These are the productive minimal directions (one or two of
N/E/S/W), or Local at the destination. Any requested output that no message
holds may be taken. Inputs are served in round-robin order, and each input takes
its lowest-numbered free requested output. Allocation is registered: a header
allocated in cycle t goes through the switch from cycle t+1. The output stays
reserved until the tail has gone through. An input that is being drained onto
the bus is hidden from the allocator.

## Deadlock detection

Each output physical channel has a counter. It is cleared in any cycle in which
a flit crosses the channel's link controller. In every other cycle it counts up.
Bit `FLAG_BIT` of the counter is the flag: it is set once the channel has been
idle for `2**FLAG_BIT` cycles (32 by default). The counter then stops, so the
flag holds until the next transfer.

An input is presumed deadlocked when all three of these hold:

1. its header is at the buffer head and has not been routed;
2. every output it requests is reserved by another message;
3. the flag of every output it requests is set.

Timing: if the last flit crosses the requested output at clock edge t, the flag
is up after edge t+32, and the bus request pulse (BR) is registered at edge t+33.

The flag measures only idle time, not who holds the channel. So a channel that
sat idle before a message reserved it still shows its flag for the one or two
cycles before that message's first flit crosses. A header that requests the
channel in that window is presumed deadlocked, and if the bus happens to be free
it escapes over the bus. The workload runs below show this a few times even at
the lowest load. It costs nothing in correctness. To remove it, clear the
counter when an output is reserved; that is not what the rule above says.

## The bus escape protocol

This is the part that takes the most care. The signals are:

| signal | from -> to | form |
|---|---|---|
| `bus_req` (BR) | router -> arbiter | one-cycle pulse: put this router in the queue |
| `bus_cancel` | router -> arbiter | one-cycle pulse: take this router out of the queue |
| `bus_grant` (BG) | arbiter -> router | level, one-hot: the head of the queue |
| `ib_valid/ib_ready/ib_flit` | router IB <-> bus | the granted router's one-flit buffer |
| `bus_valid/bus_flit`, `ob_ready` | bus <-> every PE's OB | broadcast |

**Router.** The bus controller has three states: IDLE, REQ and SEND.

* IDLE: when any input is presumed deadlocked, the router picks the
  lowest-numbered such input, pulses BR and goes to REQ. A router has at most
  one request outstanding.
* REQ: the input still competes for normal routing. If its header gets an
  output before the grant, the router pulses `bus_cancel` and returns to IDLE.
  This is the *withdrawn* request that `stat_withdrawn` reports. If BG comes
  first, the input is hidden from the allocator from that same cycle on, and the
  router goes to SEND.
* SEND: the router copies the message from that input buffer into the IB, one
  flit per cycle. Flits still coming in from upstream follow the same way. In
  the cycle the tail leaves the IB across the bus, the router pulses
  `bus_cancel` and returns to IDLE.

**Arbiter.** The arbiter keeps router numbers in a first-come first-served
queue. Requests that arrive in the same cycle are queued lowest number first.
A cancel removes the router from wherever it is in the queue. The bus counts as
busy from grant to cancel, so BG is always the head of the queue. A request is
granted in the next cycle if the queue was empty. After the head cancels, the
next router is granted in the next cycle.

**Bus.** A flit crosses the bus only in a cycle in which every OB can take it,
so the broadcast never drops a flit. Every OB captures every bus flit. A header
addressed to the tile marks the rest of that message, up to its tail, as the
tile's own. Any other flit is dropped from the OB in the next cycle, so the bus
runs at one flit per cycle unless the destination PE is slow.

**PE receive side.** The PE takes one message at a time:

* a bus header that arrives while a router message is being received waits in
  the OB until the router message's tail has been taken (`stat_bus_wait`);
* when a bus header and a router header are both waiting, the bus goes first,
  so that the bus is freed for other routers sooner;
* a router message that arrives during a bus message waits in the ejection
  buffer.

`pe_from_bus` tells the PE which path the current flit came by.

## Parameters

| parameter | where | default | origin |
|---|---|---|---|
| `MESH_X`, `MESH_Y` | `noc_pkg` | 4, 4 | evaluation network size |
| `DATA_W` | `noc_pkg` | 32 | chosen here |
| `BUF_DEPTH` | `noc_top`, `router` | 4 flits | chosen here (the source draws multi-slot buffers but gives no size) |
| `CNT_W`, `FLAG_BIT` | `noc_top`, `router` | 6, 5 (threshold 32 cycles) | chosen here; the threshold is the main tuning knob |
| IB and OB size | fixed | 1 flit | as specified |
| `N` | `bus_arbiter`, `global_bus` | 16 | one per router |

The mesh size is fixed in the package because the flit coordinates are sized
from it. To change the mesh, change `MESH_X`, `MESH_Y` and `COORD_W` together.

## What follows the source design and what is chosen here

These follow the source design: the router's blocks and how they connect (link
controllers on both ends of every channel, input buffers, switch, routing and
arbitration, injection and ejection channels, BR, BG and the IB); TFAR without
virtual channels; one idle counter per output physical channel, with one bit
used as the flag; the deadlock rule; the FIFO bus arbiter that removes cancelled
routers from anywhere in the queue; cancelling when a waiting header routes
normally or when the tail has crossed the bus; one-flit IB and OB; and the PE
rules (wait for the router message's tail, bus first on a tie).

These are chosen here: the valid/ready link protocol; buffer depth; flit
layout; the threshold; minimal routing with lowest-index output selection and
round-robin input order; pulses for BR and cancel; one outstanding bus request
per router; the broadcast rule that every OB must be ready; and the PE-side
valid/ready port.

These are not built:

* the bus's other uses (broadcast, multicast, system management);
* segmenting the bus;
* injection limitation;
* the PEs.

The related schemes used for comparison are not built either: XY, West-First
and Odd-Even routing, Disha, and software recovery.

## Limits worth knowing

* **A PE can stall the escape.** A bus message must wait for a router message
  that the PE is already receiving. That router message can, in principle, sit
  behind channels that the escaping message still holds upstream. That would be
  a new deadlock, and the bus cannot break it. The rule is kept as specified.
  It never happened in the tests below, which run past saturation.
* Only one message in the whole network escapes at a time. While the bus is
  busy, other presumed deadlocks wait in the arbiter queue.
* The threshold trades detection delay against false detections. A false
  detection only sends a healthy message over the bus, which is harmless.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_link_ctrl` | order, content, `xfer`, one flit per cycle with one cycle of latency |
| `tb_flit_fifo` | against a queue model, including full and empty |
| `tb_inact_counter` | flag exactly 32 idle cycles after a transfer, and held |
| `tb_deadlock_detect` | the rule on directed and random inputs |
| `tb_xbar_switch` | the crossbar select |
| `tb_route_arb` | wormhole reservation, productive outputs only, pop timing, t+1 allocation |
| `tb_router` | routing; BR exactly 34 cycles after the last transfer (as seen by the testbench); a whole message over the IB; cancel at the tail; a request withdrawn when the header routes |
| `tb_bus_arbiter` | grant against a queue model with random requests and cancels from anywhere in the queue |
| `tb_global_bus` | broadcast and ready rule |
| `tb_pe_bus_if` | message integrity, bus first on a tie, bus header waits behind a router message |
| `tb_noc_top` | the whole network at default parameters (see below) |
| `tb_workloads` | the three evaluation traffic patterns over the injection-rate sweep |

`tb_noc_top` has every tile send 150 packets of 4 to 10 flits as fast as the
network accepts them. Destinations are mixed at random among transpose, bit
reversal, butterfly and uniform random. Every message must arrive whole,
in order and exactly once. The test fails if any of these never happened: a bus
request, a withdrawn request, a delivery over the bus, or a bus header waiting at
a PE. A typical run: 2400 messages in 3660 cycles, 194 of them over the bus, 332
bus requests, 138 withdrawn, 55 bus headers waiting.

The same test shows what the bus is for. With BR and cancel disconnected from
the arbiter, so that the bus is never used, the network deadlocks for good after
74 of the 2400 messages. With the bus, all of them arrive.

`tb_workloads` runs each pattern for 2000 cycles at each rate from 0.01 to 0.07
packets/cycle/tile, then lets the network drain. Tiles that the pattern maps onto
themselves do not inject. Latency is counted from packet creation to tail
arrival. One run gave:

| pattern | rate | avg latency (cycles) | throughput (flits/cycle/tile) | via bus |
|---|---|---|---|---|
| transpose | 0.01 | 26.1 | 0.054 | 3 |
| transpose | 0.04 | 27.3 | 0.209 | 0 |
| transpose | 0.07 | 36.0 | 0.362 | 1 |
| bit reversal | 0.01 | 25.5 | 0.056 | 2 |
| bit reversal | 0.07 | 83.9 | 0.325 | 12 |
| butterfly | 0.01 | 24.6 | 0.034 | 1 |
| butterfly | 0.07 | 68.3 | 0.224 | 0 |

The source reports about 0.38 flits/cycle/tile for transpose at 0.07 from a
cycle-level network simulator, not from RTL. The numbers here are comparable but
not the same experiment: buffer depth, threshold and pipeline depth differ.

### Running

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/noc_pkg.sv tb/tb_noc_top.sv --top-module tb_noc_top
./obj_dir/Vtb_noc_top
```

Replace `tb_noc_top` with any other testbench name. The package must come first.
Everything else is found through `-y rtl`. The full-network tests take well
under a minute to build and a second to run.
