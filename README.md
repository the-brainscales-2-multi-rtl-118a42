# FPGA spike routing for a BrainScaleS-2 multi-chip backplane

BrainScaleS-2 chips emulate spiking neurons in analog circuits that run about
a thousand times faster than biology. One chip holds 512 neurons. Networks
larger than that need spikes to pass between chips. Because the emulation
cannot be paused, the delay of those spikes is the number that matters most.

The routing here goes through FPGAs. Each chip has its own Node-FPGA. Up to
twelve Node-FPGAs on one backplane connect in a star to an Aggregator FPGA,
one multi-gigabit transceiver link each. The scheme is deliberately simple:

- Spikes carry no timestamp on the way. Every path has a fixed length, so the
  delay is known by construction.
- Each spike label is remapped by a full lookup table on leaving its chip and
  again on arriving at the target chip. One bit of each entry is a routing
  enable.
- The Aggregator broadcasts every spike to every destination whose route is
  switched on (all-to-all, static enables).
- Each link carries one 16-bit word per 250 MHz clock cycle. That is enough for
  the highest sustained spike rate a chip can produce.

This repository holds synthesizable SystemVerilog for the spike routing and
for the synchronised experiment start. The RTL covers the Node-FPGA
multi-chip extension and the Aggregator. The top module `bss2_multichip`
wires one backplane together: N nodes and one Aggregator, with N = 12 by
default.

## The parts and how they connect

```
 BSS-2 layer-2 stream (tap)                                 layer-2 link to BSS-2
 3 x {label16, ts8} @125 MHz                                3 x {label16, ts8}
        |                                                         ^
  [async FIFO] drop+count if full                    [async FIFO] + systime[7:0]
        |   (timestamps discarded)                                ^
  [unpacker] 3 -> 1 event/cycle                         [packer] 1 -> up to 3
        |                                                         ^
  [tx LUT 2^16 x {en,15}]                             [rx LUT 2^15 x {en,16}]
        |                                                         ^
  [FIFO] --> [mux] <-- sync request (command)            [demux] -> commands unused
                |                                                 ^
           node transceiver  ======== links ========  node transceiver
                |                                                 ^
  Aggregator, link s:                                Aggregator, link d:
  [demux] -> command FIFO -> system sync logic       [link mux] <- tx spike FIFO
      \-> rx spike FIFO[s][d] for every d with            ^
          route_en[s][d] set  ----------------------> [N:1 round-robin mux]
```

| module | role |
|---|---|
| `bss2_mc_pkg` | widths, link-word framing, command codes, beat types |
| `node_multichip_ext` | the whole Node-FPGA extension, both directions |
| `event_unpacker`, `event_packer` | 3-wide layer-2 beats to single events and back |
| `address_lut` | label lookup with enable bit, Block-RAM style, used both ways |
| `sync_fifo`, `async_fifo` | buffering and every clock-domain crossing |
| `node_link_mux`, `link_demux` | framing onto and off the 16-bit link |
| `sync_request_gen`, `sync_barrier` | the node side of the experiment start |
| `systime_counter` | node system time; its low 8 bits stamp delivered spikes |
| `aggregator`, `rr_mux`, `system_sync_logic` | the Aggregator |
| `bss2_multichip` | one backplane: N nodes and the Aggregator |

## The link word

A transceiver user word is 16 bits wide. Bit 15 says what the word is:

| bit 15 | bits 14..0 |
|---|---|
| 0 | spike, 15-bit link label |
| 1 | command, 15-bit payload; `15'h0001` = sync request |

So the link carries 15 bits of label per spike. That is why the transmit
table maps 16-bit chip labels to 15-bit link labels, and the receive table
maps them back to 16 bits. An idle cycle is a cycle with `tx_valid` low. The
choice of bit 15 as the flag and the command code are this design's own. The
source only says that one bit of the 16 is set aside for commands.

## Node-FPGA, transmit direction

The chip's output spikes already travel to the Node-FPGA as layer-2 beats.
Each beat holds up to three events, every event a 16-bit label and an 8-bit
timestamp, at the 125 MHz system clock (8 ns). The extension only listens in
on that stream. It cannot slow the stream down, so:

1. The timestamps are dropped. The rest of the beat goes into an
   asynchronous FIFO into the 250 MHz transceiver clock. If the FIFO is full,
   the beat is lost and `tx_drop_cnt` counts it. This follows the layer-1 rule
   of small buffers that lose spikes under lasting congestion.
2. `event_unpacker` hands out the valid slots of each beat one per cycle,
   with no gaps between beats.
3. `address_lut` looks the 16-bit label up. The MSB of the entry is the
   enable and the low 15 bits are the link label. Labels with the enable
   clear disappear here. The table has two pipeline stages and stalls as a
   whole when its output is held.
4. A 16-deep FIFO feeds `node_link_mux`. The mux sends a waiting sync-request
   command before any spike. It holds its output register while the
   transceiver is not ready, which is how clock-compensation pauses look from
   the user side.

Note the capacities. The tap can deliver 3 events per 8 ns (375 M/s). The link
takes 250 M/s. A chip that kept sending full beats for long would overflow the
tap FIFO, and the testbenches do this on purpose.

## Node-FPGA, receive direction

`link_demux` splits incoming words. A node has no use for commands from the
Aggregator, so they are thrown away. Spike labels go through the 15 → 17 bit
receive table (enable plus 16-bit chip label). They go into `event_packer`,
which never stalls because the transceiver cannot be stalled. The packer
sends a beat as soon as it holds three events, or in the first cycle without a
new event. A steady stream is packed three to a beat. A lone spike waits only
one cycle. The beats cross into the system clock through an asynchronous
FIFO. If it is full, the beat is counted in `rx_drop_cnt`. Finally the low
eight bits of the node's system time are attached to every event. The beat is
then offered to the layer-2 link with valid/ready (`l2_out`). Merging it with
the user's own spike stream happens outside this RTL.

## The Aggregator's all-to-all fabric

The Aggregator is where traffic from many sources meets, so it deserves the
closest reading.

Every link has its own transceiver clock, `link_clk[s]`. The crossbar runs on
one global clock, `glb_clk`. The crossing happens in the FIFOs:

- **Per source s** (in `link_clk[s]`): a `link_demux`, a command FIFO, and N
  rx spike FIFOs, one for each destination d. A received spike is written, in
  the same cycle, into every FIFO `[s][d]` whose `route_en[s][d]` is set. That
  single write is the broadcast. A spike that finds one of its FIFOs full is
  lost for that destination, and `drop_cnt[s]` counts it.
- **Per destination d** (in `glb_clk`): an `rr_mux` picks one spike per cycle
  from the N FIFOs that hold traffic for d. It searches round-robin, starting
  after the last source it served. The spike goes into a tx spike FIFO that
  crosses into `link_clk[d]`. There a `node_link_mux` with no command input
  frames it for the link.
- **Commands** are read every global cycle. A sync request from link s
  becomes a one-cycle request for `system_sync_logic`. Any other command is
  dropped, so no command ever reaches a destination.

With N = 12 the Aggregator has 144 rx spike FIFOs, each 16 × 15 bits. One FIFO
per (source, destination) pair is this design's reading of the stacked
"rx spike FIFO" with an N-bit enable in the block diagram of the source. It
means a slow or busy destination never holds up any other destination.

The round-robin mux is the only place where sources compete. That is where
latency grows under load. When three sources each send at the full link rate
to one target, the target link delivers one spike per cycle. Each source gets
about a third of that, and the rest is dropped at the rx spike FIFOs. The
testbench checks that received plus dropped equals sent.

`route_en`, `sync_participate` and the two sync periods count as static
configuration. They are used without synchronisers and should only change
while the links are idle.

## Starting the real-time section on all chips at once

All chips must start an experiment within one system clock cycle of each
other. The nodes share a common reference clock, and the Aggregator drives one
sync signal that reaches every node over matched paths. The handshake goes
like this:

1. Each node's playback reaches a barrier command and raises
   `barrier_valid`. `sync_barrier` flips its request level `req_toggle` once.
2. `sync_request_gen` carries that level through three flip-flops into the
   transceiver clock. Each change becomes one `CMD_SYNC_REQ` word on the link.
   A level rather than a pulse is used so that the request survives the
   crossing from the slower clock.
3. `system_sync_logic` in the Aggregator collects the requests of the nodes
   whose `sync_participate` bit is set. One cycle after the last one arrives,
   it flips `sync_signal`.
4. Every node's `sync_barrier` sees the change after a two-flop synchroniser.
   It pulses `barrier_done` three system cycles after the change, and
   playback goes on. The nodes share the clock and the signal arrives at all
   of them alike, so they all continue in the same cycle. The end-to-end test
   checks exactly that.

There are two fault-recovery settings, both in global clock cycles:

- `sync_timeout`: if the set of requests is still incomplete this many cycles
  after its first request, the set is thrown away and `sync_timeout_pulse`
  fires. A dead node then cannot hold a round open forever. 0 switches the
  timeout off.
- `sync_refractory`: for this many cycles after a toggle, requests are
  ignored. Late or repeated requests then cannot start a second toggle.

The source names these two periods but does not say how they act. The rules
above are this design's own. A timeout leaves the nodes that did ask still
waiting at their barrier. Getting them out again is up to the controlling
software, for example with a reset.

## Clock domains and latency

| domain | clock | logic |
|---|---|---|
| node system | 125 MHz (8 ns), shared by all nodes | tap, time stamping, barrier, system time |
| node transceiver | 250 MHz per node | unpacker, lookups, FIFO, mux, demux, packer |
| Aggregator link | 250 MHz per link | demux, writes of the rx FIFOs, reads of the tx FIFO |
| Aggregator global | `glb_clk`, at least as fast as the links | crossbar muxes, sync logic |

Each asynchronous FIFO passes its Gray-coded pointers through two flip-flops.
These crossings are the largest single part of the routing delay.

The testbenches model each transceiver hop as 37 user-clock cycles (148 ns).
That number comes from the published figure of 0.3 µs for two hops. With that
model, the node-to-node delay (tap at the source node to `l2_out` at the
target node) is 49 to 52 system cycles, 0.39 to 0.42 µs. The range covers
receiver rates from 31 to 187 M spikes/s with 3:1 fan-in. The measured system
shows about 0.36 to 0.48 µs for the same path. The round trip through the
chips is not part of this RTL. Congestion in this model adds only a cycle or
two at these rates. The larger tail of the measured system also includes
effects outside the RTL, such as the real transceivers' clock correction and
the layer-2 links.

Sustained rates, from the structure alone:

- each node transmit path and each Aggregator output: one spike per 250 MHz
  cycle;
- the layer-2 tap: three events per system cycle, buffered 16 beats deep;
- each node receive path: up to three events per system cycle towards the
  layer-2 link.

## Design choices not taken from the source

The block structure, the table sizes (2^16 × 16 and 2^15 × 17 bits), the
widths (16, 15, 3 × 24, 8 bits), the clocks (125 and 250 MHz), the
all-to-all fabric with static enables, and the sync protocol with timeout and
refractory periods follow the published description. The following are this
design's own:

- bit 15 of a link word as the command flag, and the command code;
- the MSB of a table entry as the enable;
- all FIFO depths (16) and what happens when they overflow (drop and count);
- the unpacker slot order and the packer flush rule;
- the round-robin policy, and commands going before spikes at the node mux;
- the exact behaviour of timeout and refractory, and the toggle handshake
  across clock domains;
- the table write ports, which use the transceiver clock of their node;
- the system-time width (43 bits) and its load port, which stands in for the
  time alignment with the chip;
- the Aggregator using one FIFO per (source, destination) pair.

## What lies outside this RTL

- The transceivers themselves: 8b10b at 5 Gbit/s, 16-bit user interface.
  These are FPGA hard blocks. `tb/mgt_link_model.sv` stands in for one
  direction of a link in simulation: a fixed latency plus a periodic 2-cycle
  "not ready" pause.
- The BrainScaleS-2 chip, including its layer-1 crossbar and its on-chip
  jitter compensation.
- The existing Node-FPGA blocks: layer-2 link, playback and trace buffers,
  spike streaming, Ethernet.
- The boards, power, system controller and Ethernet switch.

On the top module these interfaces show up as ports: `l2_tap`, `l2_out`,
`barrier_*`, the `*_mgt_*` and `agg_rx_*`/`agg_tx_*` word interfaces, the
table write ports and the configuration inputs. A wrapper for real hardware
connects `node_mgt_tx_*` of node i to `agg_rx_*[i]` through the transceiver
pair, and likewise in the other direction.

## Simulating

Every testbench in `tb/` checks itself. It ends by printing
`TB_RESULT checks=<n> failures=<m>`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/bss2_mc_pkg.sv \
  tb/tb_bss2_multichip.sv --top-module tb_bss2_multichip -o sim
./obj_dir/sim
```

- `tb_<module>` tests each module on its own, against a model written
  independently of it, including cycle counts where the design fixes them.
- `tb_bss2_multichip` runs the whole backplane with four nodes, the size of
  the deployed prototype. It goes through the barrier, 3:1 fan-in at three
  rates, random all-to-all traffic with disabled table entries and a closed
  route, a flood that overflows the tap and Aggregator FIFOs, and a sync
  timeout. It counts each of these mechanisms and fails if one never
  happened.
- `tb_bss2_multichip_full` runs the same test at the default size: 12 nodes,
  full-size tables, and 3 × 10923 ≈ 2^15 spikes per rate, the sample size of
  the published latency measurement. It takes about 15 s.

The Aggregator is written for any N. The source mentions 12 nodes plus 4
extension lanes, which is N = 16. The four-node sequence, set to N = 16,
passes as well, with the same latency.

The shared test sequence is in `tb/tb_multichip_body.svh`.

Variables the tests do not drive start at random values, and the lookup
tables are not reset (like Block RAM). Write every table entry a test will
look up.
