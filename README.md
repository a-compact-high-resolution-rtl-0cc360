# FPGA readout for a silicon-strip muon scattering tracker

A muon scattering tomography tracker measures each cosmic-ray muon twice:
once above and once below the object being imaged. From the change of
direction it learns how strongly the object scatters, which depends on its
atomic number. Each of the two tracking stations here is built from four
silicon-strip modules that come from a particle-physics detector. Each module
has two sensor layers, read out by chains of ABCD front-end chips. The chips
run on a 40 MHz clock and keep every sample in an on-chip pipeline. When a
trigger command arrives, they send the zero-suppressed hit data for the
matching time slot back over serial lines, one bit per clock.

The electronics around those chips is small and cheap: one FPGA board per
tracking station (the *readout board*) and one more board that makes the
trigger (the *trigger controller*). This repository gives synthesizable
SystemVerilog for the logic on both FPGAs, as two boards and one controller
wired together:

```
 scintillator 1 ──┐
 scintillator 2 ──┤  trigger controller        trigger line (toggles)
                  │  AND ─► toggle FF ─────────────────┬──────────────┐
 USB/DEPP bus ────┤  registers, periodic trigger       │              │
                  └◄────────── OR of gates ◄───────────┼─gate───┐     │
                                                       ▼        │     ▼
                                                  readout board 0   readout board 1
                                        command line │  ▲ 8 data lines   (same)
                                                     ▼  │
                                              4 silicon modules
                                                     │
                                         RGMII ──► Ethernet PHY ──► switch ──► PC
```

The top module is `mst_readout_system`. It has one trigger controller and
`NUM_BOARDS = 2` readout boards of `NUM_LINES = 8` serial lines each, which
gives 16 lines for 16 silicon layers. The parts that are not logic are
outside the top, and their signals are its ports:

- the discriminators;
- the module adapter cards;
- the front-end chips themselves;
- the Ethernet PHY;
- the USB bridge.

## One event, step by step

The whole system handles one event at a time. The key signal is a single
*gate*: while it is high, no new trigger can be accepted.

1. **Coincidence.** The two discriminated scintillator signals are ANDed
   (`tc_trigger`). The AND output clocks a toggle flip-flop directly. This is
   because a coincidence is asynchronous to every clock and can be shorter
   than one clock period.
2. **Trigger line.** The trigger line is a level that flips once per trigger,
   not a pulse. This makes it robust over a cable: the receiver only has to
   see that the level changed. The flip is allowed only while the trigger is
   enabled, the controller is in coincidence mode and the OR of all boards'
   gates is low.
3. **Registration.** On each readout board, `trig_sync` registers the line
   with two flip-flops on the 40 MHz clock. Any change of level becomes a
   one-cycle trigger pulse.
4. **Gate and arm.** `readout_ctrl` raises the gate in the next cycle. It arms
   all eight line captures for the current event slot and starts the delay
   counter (`trig_delay`).
5. **Trigger command.** The delay is a configured number of clock cycles. It
   lines the trigger up with the moment the muon's signal reaches the end of
   the front-end pipeline. When it runs out, `abcd_cmd_tx` shifts the 3-bit
   trigger command `110` onto the command line shared by all four modules.
   - From the change on the trigger line to the first command bit there are
     exactly **delay + 6** clock cycles: 2 synchroniser, 1 edge, 1 arm,
     delay + 1 counter, 1 serialiser load.
   - A trigger always goes before any configuration command still waiting.
6. **Capture.** Each `line_capture` looks for the preamble `11101`, then
   stores everything from the preamble onwards into its `event_buffer`:
   preamble, header, hit records and trailer. Bits are packed MSB first into
   16-bit words. It stops after the trailer (a `1` followed by fifteen `0`s)
   and writes the last partial word padded with zeros.
7. **Event complete.** When every enabled line has seen its trailer, the slot
   is complete. The gate drops and the event is queued for Ethernet.

### Buffers and the overwrite rule

Each serial line has a 16 kbit RAM (1024 × 16 bits). It is split into 32
blocks of 512 bits, one per event slot, so 32 events can wait for the
Ethernet link.

The word address inside a block counts modulo 32. A stream longer than 512
bits (a very busy event) wraps round and overwrites the start of its own
block, including the preamble. The receiving software drops an event whose
preamble is missing, so the design does not need a separate error path.
`line_capture` still reports such a wrap on its `wrapped` output.

512 bits holds about 28 isolated hits per line: a 17-bit hit record plus
about 33 bits of preamble, header and trailer. One line carries one silicon
layer.

The gate also stays high in two other cases:

- all 32 slots hold events not yet sent;
- the run is not enabled.

So a trigger is never accepted that could not be stored. A trigger that
arrives while the gate is high is ignored and counted (`trig_ignored`).

## Data packets

`packet_builder` takes up to `MAX_EVENTS = 4` complete events, oldest first,
into one TCP/IP packet. It sends the packet through a small clock-crossing
FIFO to `rgmii_tx`, which adds:

- the 7-byte preamble and the start byte;
- padding to the 60-byte minimum;
- the CRC-32 frame check sequence;
- the 12-byte inter-frame gap.

It drives the PHY with 4-bit nibbles, low nibble first, at 25 MHz
(100BASE-TX).

Each frame has this layout. Multi-byte fields are big-endian, except the FCS.

| bytes | field |
|---|---|
| 0–5 | destination MAC: the sender of the last accepted configuration frame |
| 6–11 | source MAC: `board_mac` input |
| 12–13 | EtherType 0x0800 |
| 14–33 | IPv4 header:<br>- version 4, 20 bytes long;<br>- the ID increments per packet;<br>- DF clear, MF and offset set per fragment;<br>- TTL 64, protocol 6;<br>- correct header checksum;<br>- source `board_ip`, destination the configuring host |
| first fragment only | TCP header, 20 bytes:<br>- source port 5000, destination the configuring port;<br>- **sequence number = ID of the first event in the packet**;<br>- flags PSH+ACK, window 0xFFFF, checksum 0 |
| payload | per event: a 4-byte event ID, then 8 × 64 bytes (line 0 first, 32 words each, big-endian) |

An IP datagram whose payload is longer than `FRAG_BYTES = 1480` is split into
IPv4 fragments. Each fragment goes out as its own Ethernet frame. A 4-event
packet is 2084 bytes, so it needs two fragments.

The event IDs count triggers from the start of the run. Both boards see the
same triggers, so their IDs must agree, and the host compares them to find
lost packets. The design puts the IDs in the headers (the TCP sequence
number) and in the payload (before each event).

## Configuration

Each board works on its own once it has been configured. Configuration
arrives as one TCP/IP frame on the receive side of the RGMII link. The path
is `rgmii_rx`, then a clock-crossing FIFO, then `config_rx`.

A frame is accepted only if all of these hold:

- EtherType IPv4;
- IP version 4 with a 20-byte header;
- protocol TCP with a 20-byte header;
- the payload starts with the protocol number `CFG_PROTO = 0x4D53`;
- the next 4 bytes are the board's own 32-bit `board_id`.

Every other frame is counted in `frames_ignored` and changes nothing. The
receive FCS is not checked: no full Ethernet MAC is built in.

The payload after the protocol number and ID:

| bytes | meaning |
|---|---|
| 0 | flags; bit 0 = run (data taking enabled, gate released) |
| 1 | line mask; bit *i* enables serial line *i* |
| 2–3 | trigger delay in 40 MHz cycles |
| 4 | number of front-end commands *N* |
| then *N* × | length in bits *L* (1–64), then ⌈*L*/8⌉ bytes, first bit in the MSB |

The commands are sent on the command line in order, back to back. These are
the front-end chips' own serial configuration commands. The host builds them;
the FPGA only serialises them. The sender's MAC, IP address and TCP port
become the destination of the data packets.

## Trigger controller

The trigger controller is reached over the 8-bit DEPP port of a USB bridge.
It uses the address-strobe / data-strobe handshake with a `wait`
acknowledge; `depp_regs` synchronises the strobes to its 40 MHz clock.

| address | register |
|---|---|
| 0 | bit 0 enable, bit 1 periodic mode (R/W) |
| 1–3 | period of the periodic trigger in cycles (R/W, default 400000 = 100 Hz) |
| 4–7 | triggers sent (R) |
| 8–11 | coincidences seen, including vetoed ones (R) |

In periodic mode, a counter flips a second toggle flip-flop every `period`
cycles while the gate is low. This periodic trigger is used for threshold
scans. The trigger line is the XOR of the two toggle flip-flops, so the boards
cannot tell which source a trigger came from.

## Clock domains

| domain | blocks |
|---|---|
| `tc_clk` 40 MHz | trigger controller registers and counters |
| the coincidence signal itself | the coincidence toggle flip-flop |
| `rb_clk` 40 MHz, per board | trigger path, captures, buffers, packet builder, config receiver |
| `tx_clk` / `rx_clk` 25 MHz, per board | RGMII transmit and receive |

Each crossing into or out of an RGMII domain uses `async_fifo`, which has
Gray-coded pointers. The gates and counters cross into `tc_clk` through
synchronisers. The DDR output/input cells of a real RGMII interface are
vendor primitives and are not modelled: `txd`/`rxd` carry one nibble per
clock.

## Where this design departs from, or adds to, the tracker it follows

The paper on this tracker describes the behaviour above but not the
encodings. These are this design's own choices:

- the byte layout of data and configuration packets;
- `CFG_PROTO`;
- the DEPP register map;
- 16-bit word packing;
- putting the event ID in the TCP sequence number;
- the zero TCP checksum;
- `MAX_EVENTS`;
- the delay + 6 latency.

These come from the front-end chip and Ethernet standards, not from the
tracker description:

- the preamble and trailer patterns;
- the `110` trigger command;
- the RGMII nibble order and CRC.

**Buffer organisation.** The description has 16 kbit buffers holding 32
events of 512 bits, and 512 bits are needed for 28 hits per *layer*. This
design therefore gives every serial line its own 16 kbit buffer. The same
description gives a 195 kHz Ethernet limit "for the chosen buffer size". That
figure matches about 512 bits per event in *total*, not per line. With one
buffer per line, each event is 8 × 512 bits on the link. This limits the
sustained rate to about 22 kHz per board, below the 30 kHz event rate
reported for beam tests. Bursts of 32 events are taken at full speed either
way.

**Gate.** The gate is additionally held while the ring is full and while
the run is off.

## Files

| file | contents |
|---|---|
| `rtl/mst_pkg.sv` | constants (sizes, front-end patterns), CRC-32 byte step, one's-complement add |
| `rtl/mst_readout_system.sv` | top: trigger controller + boards |
| `rtl/trigger_controller.sv` | `tc_trigger` + `depp_regs`, OR of the gates |
| `rtl/tc_trigger.sv`, `rtl/depp_regs.sv` | coincidence/periodic trigger; DEPP register port |
| `rtl/readout_board.sv` | one board |
| `rtl/trig_sync.sv`, `rtl/trig_delay.sv`, `rtl/abcd_cmd_tx.sv` | trigger receive, delay, command serialiser |
| `rtl/line_capture.sv`, `rtl/event_buffer.sv`, `rtl/readout_ctrl.sv` | per-line capture, per-line RAM, event ring and gate |
| `rtl/packet_builder.sv`, `rtl/rgmii_tx.sv` | data packets, transmit framing |
| `rtl/rgmii_rx.sv`, `rtl/config_rx.sv` | receive, configuration filter |
| `rtl/async_fifo.sv` | dual-clock FIFO |
| `tb/tb_<block>.sv` | one self-checking test per block |
| `tb/tb_readout_rate.sv` | burst and sustained trigger-rate measurement of one board |
| `tb/abcd_model.sv` | behavioural model of one module's two data lines (decodes commands, answers triggers) |
| `tb/abcd_stream_pkg.sv` | builds front-end data streams and the expected buffer contents |
| `tb/eth_tb_pkg.sv`, `tb/eth_sink.sv` | builds configuration frames; receives and decodes data packets |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a hung run as a failure. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
    --timescale 1ns/1ps --top-module tb_mst_readout_system \
    rtl/mst_pkg.sv tb/abcd_stream_pkg.sv tb/eth_tb_pkg.sv tb/tb_mst_readout_system.sv
./obj_dir/Vtb_mst_readout_system
```

Replace the top-module and last file name to run any other test.
`tb_mst_readout_system` runs the top at its default parameters, in about
half a minute. The run goes through these phases:

- configures both boards, with a wrongly addressed frame first;
- sends random detector pulses, including single-detector pulses and
  pulses while the boards are busy;
- switches to periodic mode and back;
- sends a fast burst of long events.

It then checks:

- every trigger reached both boards;
- event IDs agree between the boards;
- every stored word matches what the module models sent.

It also counts these mechanisms and fails if any of them never happened:

- coincidence trigger;
- gate veto;
- periodic trigger;
- mode switch;
- block wrap;
- full ring;
- IP fragmentation.

`tb_readout_board` also checks the delay + 6 cycle command latency on every
trigger.

`tb_readout_rate` triggers one board at its default size again as soon as
its gate drops, with empty events. It measures two rates:

- the burst rate while free slots remain: 625 kHz. Each event takes 64
  cycles: 6 cycles of latency, the command, the model's 20-cycle response
  time and the 33-bit stream.
- the sustained rate once the ring is full: 22.7 kHz, set by the 100 Mb/s
  link.

## Limits

- The front-end chips are represented only by a behavioural model. Its hit
  records are a simplified 19-bit form, so 25 hits per line is the largest
  event that fits its block in the tests.
- No full Ethernet MAC:
  - no ARP;
  - no TCP handshake or retransmission;
  - no check of the receive FCS.
  
  The host is expected to listen for raw frames.
- The 40 MHz clock that each board forwards to its modules goes through
  vendor I/O cells and is not modelled; the module models run on the board
  clock.
- 1000BASE-T operation is not built.
