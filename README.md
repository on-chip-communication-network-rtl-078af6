# WiHetNoC: a hybrid wireline/wireless network-on-chip for CPU-GPU chips

Training a convolutional network on a single chip that holds both CPUs and GPUs produces
traffic with two very different shapes. Almost all of it (around 90%) flows between the
many cores and a few memory controllers (MCs), and far more data flows from the MCs back to
the cores than from the cores to the MCs. The GPUs need throughput. The CPUs have much less
traffic but need low latency. In a plain mesh the links next to the MCs become hot spots, and
CPU requests wait behind GPU streams.

WiHetNoC tackles this in two ways:

* **A dedicated wireless channel for CPU-MC traffic.** Every CPU tile and every MC tile has a
  wireless interface (WI) on one mm-wave channel, so a CPU reaches any MC in one hop, however
  far apart they are and however busy the wires are.
* **Wireless shortcuts for GPU-MC traffic.** Four more channels, with six WIs each, sit on
  top of the wireline links. A flit takes a wireless hop only when that path is strictly
  shorter than the wireline-only path. If the WI is busy, the flit stays on the wires.

The WIs on one channel share the medium through a distributed MAC. All WIs run the same
controller in lock-step, and they agree on one sender per transfer without a central arbiter.

This repository holds synthesizable SystemVerilog for the network itself: routers, routing,
WIs and MAC. It also holds a behavioural model of the radio channel and a 64-tile top level
with self-checking testbenches. The cores, caches, memory controllers and DRAM are not
included. Each tile's local router port is brought out to the top level, so those parts can
be attached there.

## The chip this network serves

| | |
|---|---|
| Tiles | 64, on an 8 x 8 grid, one router each |
| Tile kinds | 56 GPU tiles, 4 CPU tiles (the centre tiles 27, 28, 35, 36), 4 MC tiles (18, 21, 42, 45: one near the centre of each quadrant) |
| NoC clock | 2.5 GHz |
| Wireless channels | 5 (centred at 30, 60, 90, 140 and 200 GHz), 16 Gb/s each |
| Channel 0 | CPU-MC only: WIs on the 4 CPU and 4 MC tiles |
| Channels 1-4 | GPU-MC: 6 WIs each, 24 in all |
| Router pipeline | 3 stages per hop; 4 for routers with more than four inter-tile ports |

Tile `t` is at `x = t % 8`, `y = t / 8`. `x` grows to the east and `y` grows to the south.
Every router has the same six ports: 0 local, 1 north, 2 east, 3 south, 4 west, 5 wireless.
All of this is set in `rtl/wihet_pkg.sv`: tile kinds (`kind_of`), channel membership
(`wi_channel`), request slots (`wi_slot`) and the message format.

## Messages

Every message is a single flit (`flit_t`, 46 bits):

| field | bits | meaning |
|---|---|---|
| `dst` | 6 | destination tile |
| `src` | 6 | source tile |
| `cls` | 2 | CPU request, CPU reply, GPU request, GPU reply |
| `payload` | 32 | data |

A frame sent over a wireless channel (`wl_frame_t`, 52 bits) is the flit plus the tile of the
receiving WI. At 16 Gb/s with a 2.5 GHz clock, a frame needs `TX_CYCLES = ceil(52 x 2500 /
16000) = 9` cycles on the channel.

## Routing: when to use a wireless hop

`wihet_route` is pure logic, with one instance per router input. For a destination `d`, a
router at tile `me` does the following:

1. If `d == me`, the flit goes to the local port.
2. If `me` has a WI on channel `c`, the router looks at every other WI `u` on `c`. The wireless
   path costs `1 + dist(u, d)`, where `dist` is the grid (Manhattan) distance. If the best
   such cost is strictly below `dist(me, d)`, the wireless path is *enabled*. The flit then
   goes to port 5, tagged with `u`.
3. If the WI's transmit queue is full (`wl_ok` low), the flit is re-routed over wireline
   instead.
4. Otherwise the flit takes the wireline route: X first, then Y.

The best `u` for each destination is a 64-entry table per router. It is computed from the
floorplan when the design is elaborated, so in hardware it is a lookup. Ties go to the lower
tile number.

Every hop, wired or wireless, strictly reduces the distance to the destination, so a flit
cannot loop. A flit that arrives over the air is never sent over the air again. The best WI
was already chosen, so no WI of the same channel is closer still.

## Router pipeline

`noc_router` has a FIFO on each input (`BUF_DEPTH = 4`) and a round-robin switch allocator on
each output. Every output path is a chain of elastic registers. A register takes a new flit
when it is empty, or when its contents move on in the same cycle. Links use a valid/ready
handshake.

```
cycle t    : flit written into the input FIFO                        (stage 1: buffer write)
cycle t+1  : head routed, output allocated, flit into 1st register    (stage 2)
cycle t+2  : flit into output link register                           (stage 3: traversal)
cycle t+3  : written into the next router's FIFO
```

So one hop takes 3 cycles. A router with more than four inter-tile ports gets one more
register in its output paths, and its hop takes 4 cycles. Inter-tile ports are the grid
neighbours plus the wireless port, so this applies to inner tiles that hold a WI.
`ev_wl_sent` pulses when a flit is allocated to the wireless port. `ev_wl_fallback` pulses
when a flit whose wireless path was enabled leaves on a wireline port.

## The wireless MAC

This part takes the most care to understand. Every WI contains a copy of `wi_mac`. All the
copies on a channel see the same medium, so they step through the same states at the same
time:

```
IDLE ──(any WI raises start)──► REQUEST: N_WI one-cycle slots
                                  slot s: WI with MY_SLOT==s sends 1 if it has a frame
                                  every copy records the OR seen in each slot
                       ──► all copies pick the same winner: round robin, first requester
                           after the previous winner
                       ──► DATA: winner holds its frame on the medium for TX_CYCLES cycles
                                  last cycle: the WI whose tile == frame.tgt stores it
                                  and raises ack if its receive queue has room
                       ──► IDLE (the winner drops the frame only if it was acknowledged)
```

Timing for a WI with `N_WI` peers:

* A frame written into an idle transmit queue at edge `t` is in the receiver's queue at edge
  `t + 1 + N_WI + TX_CYCLES`.
* The frame reaches the receiving router one edge later. On a 6-WI GPU channel that is 17
  cycles; on the 8-WI CPU-MC channel it is 19.

Each request period grants one frame. Contention shows up as `contended` on the MAC and as
`ev_contended` per channel at the top.

`wireless_interface` wraps the MAC with a transmit queue (2 frames) and a receive queue
(4 flits). A full transmit queue drives `tx_ready` low, and the router reads that as "wireless
busy". `wireless_channel` is the behavioural model of the radio: every line is the OR of what
the WIs send. An assertion checks that two WIs never send data at once.

## Files

| file | content |
|---|---|
| `rtl/wihet_pkg.sv` | sizes, flit and frame types, floorplan and WI placement functions |
| `rtl/wihet_route.sv` | routing function |
| `rtl/noc_router.sv` | router |
| `rtl/sync_fifo.sv`, `rtl/rr_arbiter.sv` | helpers: FIFO, round-robin arbiter |
| `rtl/wi_mac.sv` | distributed MAC |
| `rtl/wireless_interface.sv` | WI: queues + MAC + address match |
| `rtl/wireless_channel.sv` | behavioural model of one radio channel (antennas, transceivers, air) |
| `rtl/wihetnoc_top.sv` | 64-tile network |
| `tb/tb_*.sv` | one self-checking testbench per module above |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/wihet_pkg.sv \
    tb/tb_wihetnoc_top.sv --top-module tb_wihetnoc_top -o sim
./obj_dir/sim
```

What each testbench checks:

* `tb_wihet_route`: every destination from three router positions, against distances worked
  out in the testbench.
* `tb_noc_router`: hop latency (3 and 4 cycles), port choice, wireless fallback, round-robin
  order under contention, and stalls.
* `tb_wi_mac`: access latency, data-period length, round-robin order, and retry without an
  acknowledgement.
* `tb_wireless_interface`: end-to-end frame delivery, contention, a full receiver, and
  transmit-queue busy.
* `tb_wireless_channel`: the broadcast lines against ORs computed in the testbench.
* `tb_wihetnoc_top`: the whole 64-tile network at its default parameters. Each GPU and CPU
  sends requests to the MCs. Each MC sends four times as many replies, three quarters of them
  to GPUs. The test checks that every message arrives once, at the right tile and unchanged.
  It also requires that each mechanism happened at least once: a wireless hop, a wireline
  fallback, a contended request period and delivered frames on all five channels, injection
  back-pressure and ejection stalls. Building this testbench with Verilator takes several
  minutes. The simulation itself takes under a second.

## How far this follows the original design, and where it departs

Taken from the design:

* the tile counts and grid
* CPU and MC placement
* the dedicated CPU-MC channel
* five channels at 16 Gb/s
* 24 GPU-MC WIs, 6 per channel
* the three-stage router with its extra arbitration stage
* the rule that a wireless hop is used only when it is strictly shorter
* re-routing over wireline when the WI is busy
* the MAC's request period with one slot per WI and a common selection

Choices made here, where the design gives no detail:

* **Wireline links.** The design's wireline links come from an offline multi-objective
  optimisation: minimum mean and spread of link utilisation, average router degree 4 and at
  most 6 ports per router. The resulting irregular link list is not published. The mesh, which
  has the same number of links (112), stands in for it. So the router here never has more than
  four wireline ports.
* **Routing.** The design uses adaptive layered shortest-path routing, with virtual layers
  that keep an irregular topology deadlock-free. This implementation uses XY routing plus the
  one-hop wireless look-ahead above. It has no virtual channels or layers.
* **WI placement.** The design places the GPU-MC WIs to minimise traffic-weighted hop count.
  Here each GPU-MC channel has one WI next to "its" MC and five on GPU tiles far from it. See
  `wi_channel` in `rtl/wihet_pkg.sv`.
* **MAC details.** The fairness rule is round robin. A start line opens a request period. Each
  grant carries one frame, and the receiver must acknowledge it.
* **Message format and sizes.** Single-flit messages, the 46-bit flit format, and the buffer
  and queue depths.
* **The radio.** It is modelled with zero propagation delay and no bit errors. Energy and area
  are not modelled.

Not included: the cores, L1 caches, network interfaces, L2 banks, memory controllers and DRAM;
the offline optimisation flow; and the CNN workloads themselves. The end-to-end test uses
synthetic traffic with the same many-to-few, reply-heavy shape, not recorded traces.

A known limit: with finite queues and a wireless hop between two wireline segments, the
network is not proven deadlock-free. The original design avoids deadlock with its layered
routing. Under the traffic in `tb_wihetnoc_top` every message is delivered.
