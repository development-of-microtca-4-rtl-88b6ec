# SDN packet parser and DAC driver for a 10G Ethernet remote DAQ

A tokamak control system needs a few fast analog outputs (for example the command to
a piezo gas valve, updated at 2 kHz) far from the computer that calculates them. Here
the computer does not sit in the same crate as the converters. It publishes each new
output value as a small UDP multicast packet on a 10 Gb/s Ethernet real-time network,
using the ITER SDN (Synchronous Databus Network) protocol. A Zynq-based MicroTCA.4
board with an analog rear module subscribes to the packets. Its FPGA logic turns each
packet into a DAC update, with no software in the path. Because the data go out as
multicast, any number of other hosts can subscribe to the same packets at no extra cost.

This repository holds that FPGA logic in SystemVerilog. It has three parts:

* a three-stage **UDP parser** that picks the board's SDN packets out of the frames
  received by the 10G Ethernet MAC;
* an **SPI-to-DAC converter** that drives the 8-channel, 16-bit DAC of the rear module;
* an **acceptance output**: a digital pulse for each packet taken, used as the time
  reference when measuring latency.

```
 10G Ethernet MAC          UDP parser (udp_parser)                         SPI to DAC converter
 (AXI4-Stream, 64b) --> dmac_parser --> ipv4_udp_parser --> udp_port_parser --AXI4-Lite--> spi_dac_converter --SPI--> 8 x 16-bit DAC
                                                               |  accept
                                                               +--------> accept_do --> digital output (TTL)
```

The top level is `sdn_daq_top`. The Ethernet MAC/PHY, the processor system, the DAC
itself and all analog parts of the board are outside this RTL. The top brings the MAC
stream and the DAC's SPI pins out as ports.

## What is published and what is chosen here

The published description of this system fixes:

* the chain of blocks. The parser has three stages in this order: destination MAC,
  then EtherType/IPv4/UDP, then UDP port. The parser talks to the converter over AXI,
  and the converter talks to the DAC over SPI.
* UDP multicast as the transport.
* the SDN packet: a 48-byte header and a 36-byte payload. The payload carries the value
  of one channel, so each packet updates exactly one channel.
* the DAC: 8 channels, 16 bits, 1 MS/s per channel.
* a digital output pulse when a packet is accepted.
* the measured performance: 2.7 us from the acceptance pulse to the analog output.

It gives nothing below that level. Everything in the following list is therefore a
choice made for this implementation. Each RTL file's opening comment marks these
choices again.

| Item | Choice |
|---|---|
| Stream | AXI4-Stream, 64 bits, 156.25 MHz (the usual 10GBASE-R MAC user side); byte 0 of the frame in `data[7:0]`; `user` on the last beat marks a bad frame |
| Frame | Ethernet II, IPv4 without options, not fragmented, UDP; the SDN header and payload form the UDP payload (126-byte frame, FCS stripped by the MAC) |
| Payload layout | payload bytes 0-1 = channel index, bytes 2-3 = DAC code, both little-endian; bytes 4-35 ignored |
| Addresses accepted | own unicast MAC, or the multicast MAC of the subscribed group (01:00:5E + low 23 bits); destination IP = group or own address |
| Parser to converter | AXI4-Lite, one write of the code to register `4*channel` per packet |
| SPI frame | 24 bits, MSB first: `0011` (write and update), 4-bit channel, 16-bit code; `sclk` idles low, data sampled on the rising edge, `sync_n` low for the frame; `sclk` = clk/4 |
| Channel scheduling | round-robin over pending channels; a newer code replaces one still waiting |
| Acceptance pulse | 156 cycles (1 us) long, restarted by every new packet |

The SDN header is skipped, not checked. The parser picks packets by address and UDP
port, which is how SDN maps topics onto multicast groups. It does not check the topic
identifier or the counter inside the header. The IPv4 header checksum is not
recomputed, because the MAC's FCS check already covers corruption on the link.

## How the parser stages decide without buffering frames

This is the part that most needs explaining. The fields a frame is judged on arrive
over several beats. At 8 bytes per beat, the destination MAC is in beat 0 and the
EtherType in beat 1. The IPv4 protocol byte is in beat 2. The destination IP straddles
beats 3 and 4, and the UDP port is in beat 4. The channel index and code sit in beat
11, at bytes 90-93. A filter that deleted frames would have to hold each frame back
until its verdict was known. These stages do not delete anything. Instead:

1. Each stage passes every beat through a single register slice. This gives one cycle
   of latency and one beat per cycle. Its ready signal is the usual `!m.valid || m_ready`.
2. A helper, `byte_window`, collects the bytes of one field as they go by. It keeps
   the bytes of earlier beats in registers and merges the bytes of the current beat
   combinationally. A field is therefore complete, and can be compared, on the very
   beat that brings its last byte. The helper also reports `full`, meaning every byte
   of the field arrived with its keep bit set.
3. On the frame's last beat, the stage ORs its verdict into the stream's `user` flag.
   The verdict is bad if a field does not match, or if the frame ended before the
   field was complete. A frame the MAC already flagged stays flagged.
4. The last stage, `udp_port_parser`, is the sink. On the last beat it looks at
   `user` and at its own fields: UDP port, UDP length ≥ 8 + 48 + 36, channel < 8.
   It either issues the DAC write and pulses `accept`, or pulses `drop`.

So a frame is never judged before its last beat, whatever its length. Every stage sees
every frame. Only the single decision at the end has any effect.

Byte offsets are counted from the first byte of the destination MAC, and are defined
once in `sdn_pkg`:

| Field | Offset | Stage |
|---|---|---|
| destination MAC | 0 | dmac_parser |
| EtherType (0x0800) | 12 | ipv4_udp_parser |
| version/IHL (0x45) | 14 | ipv4_udp_parser |
| flags/fragment offset (MF = 0, offset = 0) | 20 | ipv4_udp_parser |
| protocol (17) | 23 | ipv4_udp_parser |
| destination IP | 30 | ipv4_udp_parser |
| UDP destination port | 36 | udp_port_parser |
| UDP length (≥ 92) | 38 | udp_port_parser |
| SDN header (48 bytes) | 42 | skipped |
| channel index (LE) | 90 | udp_port_parser |
| DAC code (LE) | 92 | udp_port_parser |

Only one packet is in flight after the parser. While the AXI write of an accepted
packet is unanswered, `udp_port_parser` holds its ready low. The stall then backs up
through the two register slices to the MAC. With the converter in this design the
write is answered in two cycles, so the stall is short. The MAC side needs either a
FIFO or the ability to be held off (the usual AXI4-Stream contract).

## The SPI-to-DAC converter

`spi_dac_converter` is an AXI4-Lite slave with one 16-bit register per channel at
`0x00 + 4*ch`. The registers can be read back. Any other address, or a misaligned one,
answers SLVERR.

* **Write handling.** A write is taken when AW and W are both valid and no B response
  is pending. B follows one cycle later. The write stores the code and marks the
  channel pending.
* **Arbitration.** Whenever the SPI engine is idle, a round-robin arbiter picks a
  pending channel. It starts looking just after the channel it sent last. It then
  clears that channel's pending bit and loads the 24-bit frame.
* **Updating a channel.** The DAC output changes when `sync_n` rises at the end of the
  frame. If a channel is written again while it is still pending, it goes out once,
  with the newest code. If it is written during its own frame, it goes out again.
  Either way, each output ends at the last code written to it. Writes to different
  channels are never lost. This is how the eight outputs run side by side on one SPI
  bus.

A frame holds `sync_n` low for 48·`SCLK_DIV` cycles. It is followed by a gap of
`SCLK_DIV` cycles and one arbitration cycle. At the defaults that is 96 + 2 + 1 = 99
cycles per channel update (0.63 us). This gives about 1.58 M updates/s shared by all
channels. One channel can be driven at the DAC's 1 MS/s rating. All eight at 1 MS/s
each cannot, because a single SPI bus at 39 MHz is the limit.

## Timing

All counts are clock edges at the defaults, for a packet that finds everything idle.
Edge 0 is the edge that takes the packet's last beat.

| Event | Edge | At 156.25 MHz |
|---|---|---|
| `pkt_accept` (or `pkt_drop`) high | after 2 | |
| acceptance DO goes high | after 3 | |
| AXI write taken by the converter | 3 | |
| `sync_n` falls | 4 | |
| `sync_n` rises, DAC output updates | 100 | 0.64 us |

From the acceptance pulse to the end of the DAC frame is therefore 97 cycles, about
0.62 us. The published measurement of 2.7 us also includes DAC and amplifier settling,
and the actual clock and SPI rate on the board. That measurement cannot be split up
from what is published, so this RTL does not try to reproduce the figure.

Load is light at the published operating points:

| Operating point | Time needed |
|---|---|
| Latency test: one single-channel packet per tick of a 10 kHz clock | about 116 of the 15,625 cycles between packets |
| All eight channels updated at every 10 kHz tick | 8 × 16 beats of parsing plus 8 × 99 cycles of SPI, about 950 cycles, 6 % of the tick |
| Valve control loop at 2 kHz | negligible |

## Files

| File | Contents |
|---|---|
| `rtl/sdn_pkg.sv` | stream and AXI4-Lite structs, frame offsets, DAC size |
| `rtl/byte_window.sv` | field capture across beats (helper of the three stages) |
| `rtl/dmac_parser.sv`, `rtl/ipv4_udp_parser.sv`, `rtl/udp_port_parser.sv` | the three parser stages |
| `rtl/udp_parser.sv` | the stages chained |
| `rtl/spi_dac_converter.sv` | register file, arbiter, SPI engine |
| `rtl/accept_do.sv` | acceptance pulse stretcher |
| `rtl/sdn_daq_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking bench per module, plus `tb_workload_sine` |
| `tb/tb_sdn_pkg.sv` | frame builder for the benches, written from the protocol layouts |
| `tb/dac_model.sv` | behavioural model of an 8-channel 16-bit SPI DAC |
| `tb/axil_sink_model.sv` | AXI4-Lite write slave with random wait states |

## Simulating

Every bench ends by printing `TB_RESULT checks=N failures=M`. Each one also has a
watchdog. Build and run one with Verilator 5, for example the end-to-end bench:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/sdn_pkg.sv tb/tb_sdn_pkg.sv tb/tb_sdn_daq_top.sv --top-module tb_sdn_daq_top
./obj_dir/Vtb_sdn_daq_top
```

For another bench, replace the last file and the top name. `rtl/sdn_pkg.sv` must come
first. The benches need `tb/tb_sdn_pkg.sv` too, except `tb_spi_dac_converter` and
`tb_accept_do`.

What the benches establish:

* **Stage benches** (`tb_dmac_parser`, `tb_ipv4_udp_parser`). Each sends directed and
  random frames with random valid and ready throttling. Every output beat is compared
  with its input beat, and the bad-frame flag with a verdict worked out in the bench.
* **`tb_udp_port_parser` and `tb_udp_parser`.** These check:
  - that exactly the good packets produce a write, to the right address and with the
    right code, in order;
  - the two-edge decision latency;
  - the stall;
  - the AXI rule that a valid signal holds until its ready arrives.
* **`tb_spi_dac_converter`.** It checks:
  - every channel, against a DAC model;
  - read-back and the SLVERR cases;
  - the exact `sync_n` timing;
  - the round-robin order, including the wrap-around;
  - that a waiting code is replaced by a newer one;
  - that one channel can be updated at the DAC's 1 MS/s rating.
* **`tb_sdn_daq_top`.** It runs the whole design at its default parameters, checks the
  latency table above, and checks that every DAC update carries an accepted code. It
  also counts each mechanism and fails if one never happens: acceptance, rejection by
  each stage, a MAC-flagged frame, stall, replaced code, reordering, and DO retrigger.
* **`tb_workload_sine`.** It drives eight phase-shifted sine waves, one packet per
  channel per 10 kHz tick, for 2 ms. It checks every output at every tick and the
  burst completion time. A second phase sends single-channel packets at 10 kHz and
  checks each time that the acceptance pulse leads the DAC update by 97 cycles.

The simulator used has two-state logic, so the benches reset or initialise everything
they read.

## Changing it

* **Addresses and port.** MAC, IP, group and port are inputs, meant to be set by the
  processor and held while traffic flows.
* **SPI clock.** `SCLK_DIV` sets the SPI clock (`clk / (2*SCLK_DIV)`). The frame
  format is in `spi_dac_converter`. A different DAC part usually needs changes only
  there.
* **Payload layout.** `OFF_SDN_CH` / `OFF_SDN_VALUE` in `sdn_pkg` move the channel and
  code fields. The little-endian decode is in `udp_port_parser`.
* **Stream width.** The stream width is `DATA_W` in `sdn_pkg`. `byte_window` works for
  any multiple of 8 bits, but the benches assume 64.

## Limits

* Only the analog output path exists. The board also has a 2-channel 18-bit ADC and
  8 TTL inputs and outputs. No logic is given for them, and none is provided here,
  apart from the acceptance pulse.
* VLAN tags and IPv4 options are rejected, not skipped. A sender that adds them will
  not be heard.
* There is no AXI path from the processor to the DAC registers. Only the parser writes
  them.
* Verilator reports `SYNCASYNCNET` on `rst_n`. The reset is asynchronous in the logic
  and appears synchronously only in the `disable iff` of the protocol assertions. No
  circuit is affected.
