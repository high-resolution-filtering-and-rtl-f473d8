# BiDAQ acquisition firmware in SystemVerilog

Cryogenic bolometers for neutrinoless double beta decay searches (CUPID, CROSS)
produce slow signals, tens of Hz to a few kHz wide, on thousands of channels.
The BiDAQ system digitizes them on 12-channel analog-to-digital boards, each
with six 2-channel 24-bit sigma-delta ADCs (AD7175-2) behind a tunable
anti-aliasing filter. FPGA SoC modules on the crate backplane read the boards
and send the data to storage over Gigabit Ethernet. Each module reads 8 boards
(96 channels) at up to 25 ksps per channel. The whole continuous stream is
stored, and triggering is done off-line.

This repository holds RTL for the logic of one such FPGA module:

* it keeps every ADC of every board, in every crate, converting in step;
* it downloads the results over 48 independent SPI lines;
* it packs each channel's samples into its own stream of RTP packets
  (RFC 3550, the real-time transport format used for audio and video);
* it merges the packets into one stream and wraps each packet in a UDP
  datagram in an Ethernet frame, handed byte by byte to the Ethernet MAC.

The structure, the sizes and the packet layout follow the published
description of the BiDAQ system (P. Carniti, C. Gotti, G. Pessina, "High
resolution filtering and digitization system for cryogenic bolometric
detectors"). That description stays at block level. Everything it leaves open
was decided here: the ADC protocol details, counters, encodings, buffering,
handshakes and the register map. The section "What is this design's own"
lists those decisions.

## Data path

```
            ref clock / open-drain start  (daisy chain between modules)
                        |
                  sync_distrib ----- ref_tick, start_pulse -----+
                                                                |
 board b (x8):   +-----------------  board_acq  ---------------------------+
                 |  sync_gen --> SYNC_n (one line, 6 ADCs)  frame, timestamp |
   6 x AD7175 ---|  adc_spi_reader x6 --> mux --> rtp_packetizer ---------- |--+
                 +---------------------------------------------------------+  |
                                                                              |
 gpio_port --- synchronized inputs = auxiliary byte of every sample           |
 csr_regs  --- register bus from the ARM cores                                |
                                                      pkt_arbiter <-----------+
                                                          | 32-bit RTP words
                                                      udp_framer
                                                          | frame bytes -> Ethernet MAC
```

`bidaq_top` is one FPGA module. `board_acq` groups what belongs to one
analog-to-digital board. All other files are the blocks named above, plus the
package `bidaq_pkg`.

## Time base: reference clock, start line and SYNC

Each ADC runs from its own internal clock. What aligns them is the SYNC pin:
each rising edge starts a conversion. All six ADCs of a board share one SYNC
line, so the 12 channels of a board share one sampling rate. Different boards
may run at different rates.

Between modules (and crates) two lines are daisy-chained: a reference clock
of at most 16 MHz and an open-drain start line. Software makes one module the
master by setting `CTRL.is_master`. The master then does two things:

* it divides the 100 MHz system clock by `REF_DIV` (8, giving 12.5 MHz) onto
  the reference line;
* on a `CTRL.start` write it pulls the start line low for `START_LEN` cycles.

A module that is not master drives neither line. It follows whatever drives
them, whether another module or external equipment. Every module, the master
included, synchronizes both lines with two flops and uses only the copies it
reads back. All modules therefore see the same reference edge and the same
start edge with the same latency (`sync_distrib`).

Each board's `sync_gen` counts reference ticks, not system clocks, so boards
on different modules cannot drift apart. On the start pulse every `sync_gen`
pulls SYNC low at once. `SYNC_LOW` (2) ticks later it releases SYNC, which
starts the first conversion. The release repeats every `period` ticks (one
register per board):

| rate | period at 12.5 MHz |
|---|---|
| 25 ksps | 500 ticks |
| 5 ksps | 2500 ticks (reset value) |

At each release `sync_gen` pulses `frame` and sets `sample_cnt` to the index
of the sampling period that begins: 0, 1, 2, ... from the start. The RTP
timestamp is this count, in units of one sample period.

## Reading the ADCs

`adc_spi_reader` serves one AD7175-2. It assumes the converter has been set
to continuous-read mode with the status byte appended. Setting up the
converter is not part of this firmware and no MOSI line is driven.

* Chip select stays low while acquisition runs.
* When a result is ready the ADC pulls DOUT/RDY low. A two-flop copy of the
  line detects this.
* The reader then gives 32 SCLK cycles of `SCLK_DIV` = 5 system clocks each
  (20 MHz). It samples MISO in the cycle that raises SCLK, and the ADC shifts
  on the falling edge.
* The word holds 24 data bits, then the status byte: channel in `[1:0]`,
  error in `[6]`.
* The result is held on a valid/ready port until it is taken. The reader
  waits for DOUT/RDY to return high before it can start again.

A read takes 32 × 5 + about 3 cycles (1.6 µs). One SYNC produces two reads
per ADC, one per channel. That is 3.2 µs out of the 40 µs sampling period at
25 ksps.

In `board_acq` the six readers feed the packetizer through a fixed-priority
multiplexer, one result per cycle. A reader waits at most a few cycles, since
results arrive microseconds apart. Channel `c` of a board is channel `c % 2`
of ADC `c / 2`.

## From samples to packets (`rtp_packetizer`)

This is the part with the most state. There is one packetizer per board.

**Periods and blocks.** A `frame` pulse opens a sampling period. Results that
arrive before the next pulse belong to that period. `SAMPLES_PER_PACKET`
periods (64) make a block. The block is known to be complete only at the SYNC
that follows its last period. The packets of a block therefore start one
sampling period after the last conversion was started.

**Double buffer.** The samples are stored as 32-bit words: the 24-bit result,
then an 8-bit auxiliary byte. In this design the auxiliary byte is the GPIO
input value latched at the period's SYNC. The buffer is
`2 × 12 × 64` words, indexed by half, channel and period. One half fills while
the other is sent.

**Handing a block over.** When a block completes and the read side is idle,
the halves swap. Four things are captured with the block: the timestamp of
its first period, the channel-enable mask, and the per-channel
missing-sample and ADC-error flags.

**Dropped blocks.** If the read side is still sending (the output has been
held off for a whole block time), the new block is dropped. Its half is
reused for the next block, `overrun` pulses for one cycle, and the footers of
the next block that is sent carry the overrun bit. Sequence numbers do not
advance for a dropped block, so the receiver sees a timestamp jump of two or
more blocks with consecutive sequence numbers and the overrun flag.

**Missing samples.** At each SYNC the channels that delivered nothing during
the closing period are marked missing for the block. Their buffer slot keeps
whatever it held before.

**Sending.** The read side walks the channels in order, skipping disabled
ones at one cycle each. For each enabled channel it sends
`SAMPLES_PER_PACKET + 5` words, one per cycle while `o_ready` is high. The
output register is loaded straight from the buffer, so the buffer can be a
block RAM with one read port and a registered output.

Packet format. Byte 0 of each word is in bits `[31:24]`, in network order as
on the wire.

| word | bytes 0..3 | value in this design |
|---|---|---|
| 0 | RTP byte, payload type, sequence number (16 bit) | `0x80` (version 2); marker 0 and 7-bit payload type (register, default 96); one counter per channel, from 0 |
| 1 | timestamp | index of the packet's first sample since start |
| 2 | SSRC identifier | `{ssrc_base[23:0], board × 12 + channel}` |
| 3 | payload header | `{data_format[7:0], board SYNC period[23:0]}` |
| 4 .. N+3 | payload data 0 .. N−1 | `{result[23:0], aux[7:0]}` |
| N+4 | footer (byte 0 only, `o_keep = 4'b1000`, `o_last = 1`) | bit 0 ADC error, bit 1 missing sample, bit 2 block dropped before this one |

Here N = `SAMPLES_PER_PACKET`. The header fields, the 32-bit payload header,
the 24 + 8 bit samples and the closing 8-bit footer are the published layout.
The bit assignments inside the payload header and the footer are this
design's own. The receiver can recover the sampling frequency as
12.5 MHz / period; format code `0x01` means the layout above.

## Merging the boards (`pkt_arbiter`)

The eight board streams are merged packet by packet. An input keeps the
output from its first word to its `o_last` word. Then the grant passes round
robin to the next input that has a word waiting. The output has no register
of its own. An assertion checks that a stalled output word does not change.

The output is a 32-bit word stream with `o_valid`, `o_ready`, `o_data`,
`o_keep` (one bit per byte, bit 3 = byte 0) and `o_last`.

## UDP framing (`udp_framer`)

Each RTP packet becomes one UDP datagram in one Ethernet frame. Every packet
has the same length, 4 × (`SAMPLES_PER_PACKET` + 5) − 3 bytes (273 at the
default). So the IP and UDP lengths are constants. The IPv4 header checksum
can be computed before the payload arrives, and no frame buffer is needed.
The framer sends 42 header bytes, then the packet bytes, byte 0 of each word
first:

| bytes | field | value |
|---|---|---|
| 0–5, 6–11 | destination, source MAC | registers |
| 12–13 | EtherType | 0x0800 |
| 14–33 | IPv4 header, no options | version 4, total length, identification +1 per frame, don't fragment, TTL 64, protocol 17 (UDP), checksum, source and destination IP from registers |
| 34–41 | UDP header | ports from registers (reset 5004), length, checksum 0 (unused, as IPv4 allows) |

The output is a byte stream, `o_valid`/`o_ready`/`o_data[7:0]`, with `o_last`
on the final byte. At one byte per cycle it carries 800 Mbit/s at 100 MHz.
Preamble, FCS and the inter-frame gap are added by the Ethernet MAC, which,
like the PHY and ARP, is not part of this RTL.

## GPIO port (`gpio_port`)

The module has 8 general-purpose lines. Each has an enable bit and a
direction bit. Output bits drive `GPIO_OUT`, for example to trigger a
stabilization pulser. Input bits pass through two flops, for example to carry
a muon-veto flag. Their value at each SYNC becomes the auxiliary byte of that
period's samples, so the flags stay aligned with the data. Disabled bits and
output bits read as 0.

## Registers (`csr_regs`)

The bus is a simple 8-bit-address register bus, standing in for the SoC's
HPS-to-FPGA bridge. A write takes one cycle, and read data comes one cycle
after the read strobe.

| addr | name | contents |
|---|---|---|
| 0x00 | CTRL | [0] run, [1] is_master, [2] start (write 1; one-cycle pulse) |
| 0x04, 0x08, 0x0C | CH_EN0..2 | channel enables 31..0, 63..32, 95..64 |
| 0x10 | SSRC | [23:0] SSRC base |
| 0x14 | FORMAT | [6:0] payload type (reset 96), [15:8] data-format code (reset 0x01) |
| 0x18 / 0x1C / 0x20 | GPIO_EN / GPIO_DIR / GPIO_OUT | per-bit enable, 1 = output, output value |
| 0x24 | GPIO_IN | synchronized inputs (read only) |
| 0x28 | STATUS | [0] running since the last start, [31:16] dropped-block count (read only) |
| 0x2C | PKT_CNT | frames sent (read only) |
| 0x30 / 0x34 | SRC_IP / DST_IP | IPv4 addresses |
| 0x38 | PORTS | [31:16] source, [15:0] destination UDP port (reset 5004 both) |
| 0x40 + 4b | PERIOD[b] | SYNC period of board b, reference ticks (reset 2500) |
| 0x60 / 0x64 | DST_MAC | [31:0] low, [15:0] high 16 bits |
| 0x68 / 0x6C | SRC_MAC | [31:0] low, [15:0] high 16 bits |

To start an acquisition:

1. On every module, write the periods, the channel enables, the SSRC base and
   the addresses and ports.
2. On every module, set `CTRL.run`. On the master also set `CTRL.is_master`.
3. Write `CTRL` with the start bit on the master. All modules start on the
   same reference edge.

Clearing `run` stops SYNC and the readers, and discards the partly filled
block. A block already handed over is still sent.

## Sizes

The `bidaq_top` parameters and their defaults:

| parameter | default | origin |
|---|---|---|
| `NUM_BOARDS` | 8 | boards per module |
| `ADCS_PER_BOARD` | 6 | 12 channels per board / 2 per ADC |
| `SAMPLES_PER_PACKET` | 64 | own choice |
| `SCLK_DIV` | 5 | gives the 20 MHz SPI clock from 100 MHz |
| `REF_DIV` | 8 | 12.5 MHz reference, under the 16 MHz limit |
| `START_LEN` | 16 | own choice |

The 100 MHz system clock is an assumption. At the defaults each board's
double buffer is 2 × 12 × 64 words of 32 bits, 49 152 bits. Eight boards make
393 216 bits of sample memory, which fits easily in the block RAM of a
Cyclone V SoC.

Load at the worst case, 96 channels at 25 ksps:

* samples: 96 × 25 000 × 4 B = 9.6 MB/s;
* on the wire, 96 frames of 315 bytes, plus 24 bytes each of preamble, FCS
  and gap, every 2.56 ms: about 102 Mbit/s;
* capacity: the framer sends 800 Mbit/s, and the link is 1 Gbit/s. In the
  full-size test a block's 96 frames leave in 325 µs of the 2.56 ms.

A CUPID-size system of about 3000 channels at 5 ksps (60 MB/s in total)
needs about 35 modules of 96 channels each, about 15 Mbit/s per module.

## What is this design's own

Each source file's opening comment says which parts follow the published
description. In short, these were decided here:

* the 100 MHz system clock;
* the AD7175-2 read mode and SPI framing;
* counting SYNC periods in reference ticks;
* the SYNC polarity and low time;
* the two-flop synchronizers;
* the master reading back its own lines;
* the double buffer and the drop-a-whole-block overrun policy;
* the choice of `SAMPLES_PER_PACKET`;
* the SSRC layout;
* the payload-header and footer encodings;
* the use of the auxiliary byte for the GPIO inputs;
* per-packet round-robin merging;
* the stream handshakes;
* the UDP/IP header values and the fixed-length, unbuffered framing;
* the register map and reset values.

Not included:

* the analog front end and its filter settings, reached over CAN;
* the ADCs themselves, for which a behavioural model is in `tb/`;
* the ARM software: Python server, MQTT daemons, CAN access;
* the Ethernet MAC and PHY;
* the alternative common-clock synchronization, which the system description
  lists as not yet in firmware;
* calibration and monitoring routines, which are only named.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `adc_spi_reader_tb` | results, channel and error bits against the ADC model, random back-pressure, 32-SCLK transfer time |
| `sync_gen_tb` | exact frame spacing, SYNC low time, sample count, stop and restart with a new period |
| `sync_distrib_tb` | master and slave on one wired line: reference period, start line pulled `START_LEN` cycles, same tick and start cycles in both, slave start command ignored; then both as slaves of an external 13.7 MHz reference and start pulse |
| `gpio_port_tb` | random enable, direction, outputs and inputs against a reference |
| `csr_regs_tb` | reset values, read-back, self-clearing start, status inputs, addresses and ports |
| `pkt_arbiter_tb` | whole packets, per-source order, keep and last, round-robin order |
| `udp_framer_tb` | every header byte, valid IPv4 checksum, identification counting, payload bytes in order, frame length and `o_last`, random gaps and back-pressure |
| `rtp_packetizer_tb` | every word of every packet against a reference model, disabled channels, missing sample, ADC error, forced drop of a block, block latency |
| `bidaq_top_tb` | two modules (master and slave), each with 2 boards, 12 ADC models and 4 samples per packet |
| `bidaq_full_tb` | a full crate: two modules at their default size (16 boards, 96 ADC models, 192 channels), master at 25 ksps and slave at 5 ksps, each output standing for a 1 Gbit/s MAC (one byte per cycle, 24 idle cycles per frame); first SYNC of all 16 boards on one cycle; five blocks of the master and one of the slave, every frame checked |

`bidaq_top_tb` checks that all four boards release their first SYNC on the
same cycle. It also runs boards at different rates, disables a channel,
carries GPIO inputs, and injects an ADC error, a missing channel and a
dropped block. It requires each of these to show in the stream. Module A
gets its addresses and ports through the registers; module B keeps the reset
ports.

`tb/ad7175_model.sv` is a behavioural model of the converter's SPI output.
`tb/udp_frame_checker.sv` checks each frame's headers and re-assembles the
RTP words, which `tb/rtp_stream_checker.sv` then parses and checks.
`tb/bidaq_tb_pkg.sv` holds the sample-value function that the model and the
checkers share.

To run a testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -Itb -y rtl -y tb rtl/bidaq_pkg.sv tb/bidaq_tb_pkg.sv \
    tb/bidaq_top_tb.sv --top-module bidaq_top_tb
./obj_dir/Vbidaq_top_tb +verilator+rand+reset+2
```

Replace `bidaq_top_tb` with any testbench name. The full-size test takes
about 35 s, the others a few seconds. To lint a module:
`verilator --lint-only -Wall -Irtl -y rtl rtl/bidaq_pkg.sv rtl/<module>.sv`.
The remaining lint warnings are unused package constants, and
`SYNCASYNCNET` on `rst_n`. The latter appears because the stream assertion in
`pkt_arbiter` uses the asynchronous reset as its `disable iff` condition.

## Changing it

* **Packet length:** change `SAMPLES_PER_PACKET`. A packet must stay within an
  Ethernet frame: 16 header bytes, 4 bytes per sample and 1 footer byte,
  plus 28 bytes of IP and UDP headers, must not exceed 1500 bytes, which
  allows at most 363 samples. `udp_framer` takes the same parameter.
* **Channel count:** `NUM_BOARDS × ADCS_PER_BOARD × 2` may be at most 96,
  the width of the enable registers.
* **Another system clock:** adjust `SCLK_DIV` (SPI rate) and `REF_DIV`
  (reference clock rate, at most 16 MHz).
