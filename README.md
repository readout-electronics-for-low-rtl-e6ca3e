# PAT card read-out firmware

A gas TPC for a neutrino beam sees very little. The beam spills about once a
second and leaves only tens of tracks, so almost every one of the thousands
of pads is quiet most of the time. This firmware is written for that case. It
does not process the hits in the FPGA. It collects the zero-suppressed hits of
56 front-end cards (FECs) on one PAT (power, aggregation and timing) card. It
merges them into a single stream of 32-bit words, stamps each hit with the
experiment's 64-bit timestamp, and lets the DAQ software pull the words over
the network. Because occupancy is low, a 56-to-1 merge of whole hits through a
small tree of buffers is enough. The design needs no triggers, no feature
extraction and no large memory.

Each FEC carries two SAMPA front-end chips, 32 channels each, so 64 channels
per card. A PAT card reads 56 × 64 = 3584 channels. The same firmware also
runs the card: FEC clocks and sync pulses, monitoring counters, and the I2C
and SPI buses to the chips on the board.

All code is synthesizable SystemVerilog (IEEE 1800-2017). It is in `rtl/`, with
one module or package per file. The top level is `pat_firmware_top`.

## Block diagram

```
56 serial links                                     core clock clk
 fec_bit ──► sampa_decoder ──► l0_buffer ─┐
   (×8 per group)                          ├─► rr_arbiter 8:1 ──► stream_fifo (L1) ─┐
 ...                                       ┘                                       │  ×7 groups
                                                                                   ├─► rr_arbiter 7:1 ──► stream_fifo (L2)
                                                                                   ┘           │
                                                           dune_ts ──► packet_formatter ◄───────┘
                                                                             │
 IPbus (from UDP core) ──► ipbus_fabric ──┬─ 0x000 ccm_regs ◄─── data port ──┘
                                          ├─ 0x100 i2c_master  (SAMPA, SFP, clock synth, EEPROM, PMbus DC/DC ...)
                                          └─ 0x200 spi_master  (configuration flash)
 ccm_regs ──► clock_distribution (clk_ref, 640 MHz) ──► fec_clk / fec_sync / fec_trig  ×7 groups
```

The data path has 56 L0 buffers, 7 L1 buffers and 1 L2 buffer: 64 buffers in
all. The FECs are wired in seven groups of eight. Each group shares one clock
line and one sync line, which chips on the board fan out to its eight cards.
The same grouping sets the first round-robin level.

## The data path and its word formats

This part takes the most care to follow. A hit changes form three times on
its way out.

### 1. On the wire: SAMPA packets

Each FEC sends one serial bit stream, the output of its two daisy-chained
SAMPAs. The stream is a sequence of packets. Each packet is a 50-bit header
followed by N 10-bit samples, where N is a header field. The first bit on the
wire is header bit 0. The header layout is `sampa_hdr_t` in `pat_pkg`:

| bits  | field |
|-------|-------|
| 5:0   | Hamming code |
| 6     | header parity |
| 9:7   | packet type (0 heartbeat, 2 sync, 4 normal data, others trigger-mode / overflow variants) |
| 19:10 | N, the number of 10-bit payload words (0–1023) |
| 24:20 | channel |
| 28:25 | chip address |
| 48:29 | 20-bit bunch-crossing (sample) counter |
| 49    | payload parity |

This layout and the sync header constant `50'h1555540F00113` come from the
SAMPA chip's own serial format. The firmware only needs N, the type, the
channel, the chip and the counter. It does not check the Hamming code or the
parity bits.

### 2. Inside: hits of 32-bit words

`sampa_decoder` is a three-state machine:

- **HUNT**: before it is locked, it slides a 50-bit window over the stream, one
  bit at a time, until the window equals the sync header. That match marks the
  packet boundary.
- **HEADER**: once locked, it reads 50 bits as a header.
- **PAYLOAD**: it then reads N × 10 bits of payload, and goes back to HEADER.

Sync packets and empty packets (N = 0, for example heartbeats) are counted and
dropped. Every other packet becomes one *hit*, and every word of a hit carries
a `last` flag (`stream_word_t`):

| word | content |
|------|---------|
| D0 | `hit_hdr_t`: FEC number [31:26], chip [25:22], channel [21:17], N [16:7], type [6:4], 0 [3:0] |
| D1 | {12'b0, bunch-crossing counter [19:0]} |
| D2… | {2'b0, s2, s1, s0}: three samples per word, the first sample in the low bits; the last word is zero-padded |

So a hit of N samples is `hit_words(N) = 2 + ceil(N/3)` words. That is at most
343 words, for N = 1023. The decoder emits D0 on the clock that takes the last
header bit, and D1 on the next clock. It emits each payload word on the clock
that takes that word's last sample bit. The output has no ready signal,
because a serial link cannot be paused.

### 3. On the network: Ethernet samples

`packet_formatter` reads hits from the L2 buffer and puts three words in front
of each:

| word | content |
|------|---------|
| E0 | `sample_hdr_t`: magic `4'hA` [31:28], FEC [27:22], chip [21:18], channel [17:13], length [12:3], type [2:0] |
| E1 | DUNE timestamp [63:32] |
| E2 | DUNE timestamp [31:0] |

The hit itself follows unchanged (D0, D1, payload). `length` is the number of
hit words after E2, so a reader can step from one sample to the next without
decoding the payload. The timestamp is sampled when E0 leaves. This gives the
alignment time at read-out; D1 keeps the SAMPA's own sample counter.

The DAQ pulls the words through IPbus. Register 0x03 tells it whether words
are waiting and how many are in L2. Each read of register 0x04 returns one
word and removes it. Reading 0x04 when nothing is waiting returns 0.

## Buffering, overflow and the round-robin tree

**L0 (`l0_buffer`, 512 words per FEC)** is a store-and-forward packet FIFO.
Words are written at a tentative pointer. A hit becomes readable only once its
last word is in. If the buffer fills in the middle of a hit, the pointer rolls
back to the last complete hit. The rest of that hit is then thrown away, up to
its last word, and a drop counter goes up. A link that cannot be stalled can
therefore only lose whole hits, and the reader never sees half of one. 512
words hold the longest possible hit (343 words).

**Round-robin stages (`rr_arbiter`)** grant one whole hit at a time. When
idle, a stage picks the next input after the previous grant that has a word
waiting and is not vetoed. It keeps the grant until that hit's `last` word has
passed. The first word moves in the same clock as the grant, so there is no
gap between hits. Each stage has one control register with three fields:

- **enable**: when off, no new hit starts; a hit already in flight finishes;
- **veto mask**: one bit per input, to skip a switched-off or noisy FEC;
- **reset**: a one-clock pulse that clears the grant state.

**L1 and L2 (`stream_fifo`, 1024 and 2048 words)** are plain cut-through
FIFOs with valid/ready. Back-pressure runs all the way back: when the DAQ
stops reading, L2 fills, then the 7:1 stage stops, then the L1 buffers fill,
then the 8:1 stages stop. The L0 buffers then absorb what the links keep
sending, and drop whole hits once they are full. The per-FEC register
0x40+f shows each L0 buffer's fill level and drop count.

The whole data path and IPbus run on one core clock. The merge moves one word
per clock at every level.

## Control: registers, slow-control buses, clocks

`ipbus_fabric` decodes the address of the IPbus slave bus and routes each
access to one slave. An address that matches no slave gets an error reply.
Every slave answers one clock after the strobe.

### `ccm_regs`, base 0x000

| address | access | content |
|---------|--------|---------|
| 0x00 | R | firmware id `0x50415401` |
| 0x01 | RW | FEC clock rate: 0 = 320 MHz, 1 = 160 MHz (reset value), 2 = 80 MHz |
| 0x02 | RW | Ethernet link: write control [15:0]; read {status [31:16], control [15:0]} |
| 0x03 | R | {data waiting [31], 0, L2 fill level [15:0]} |
| 0x04 | R | data port: one output word per read (0 when empty) |
| 0x05 | R | Ethernet samples sent by the formatter (16-bit, wraps) |
| 0x08+g | RW | clock enable of FEC group g (bit 0, reset 1) |
| 0x10+g | W | group g: bit 0 sends a sync pulse, bit 1 a trigger pulse |
| 0x18+r | RW | round-robin stage r (0–6 the groups' 8:1 stages, 7 the 7:1 stage): bit 0 enable, bit 1 reset pulse, [15:8] veto mask |
| 0x20+b | W | logic reset pulse of block b: 0 decoders, 1 L0, 2 L1, 3 L2, 4 formatter, 5 I2C, 6 round-robin stages, 7 SPI |
| 0x28+r | R | hits passed by round-robin stage r (16-bit, wraps) |
| 0x30+g | R | words held in group g's L1 buffer |
| 0x40+f | R | FEC f: {drop count [31:16], L0 fill level [15:0]} |
| 0x80+f | R | FEC f's decoder: {sync packets [31:16], hits [15:0]} since its last reset |

Any other address gets an error reply. The word address is 8 bits wide, so
the map allows at most 64 FECs and at most 8 groups.

### `i2c_master`, base 0x100

This is a byte-level I2C master. Software runs the protocol, so the same
master also serves the PMbus DC/DC converter, the SAMPA configuration, the SFP
modules, the clock synthesiser, the EEPROM, the I2C switches and the port
expanders that switch the FECs on and off. It has three registers:

- **0: prescale** (reset value 100). A quarter SCL period lasts prescale + 1
  clocks.
- **1: command**. Bits [7:0] hold the byte. The remaining bits request the
  steps of a transfer, and several can be set in one write: START (8),
  STOP (9), READ (10), WRITE (11) and NACK (12). NACK sets the acknowledge
  the master sends after a read.
- **2: status**. Bit 0 is busy, bit 1 is the acknowledge received, and [15:8]
  is the byte read.

The master waits while a slave holds SCL low (clock stretching). The pads are
open drain: `scl_oe` and `sda_oe` pull the line low.

### `spi_master`, base 0x200

A byte-level SPI master in mode 0, sending the most significant bit first. It
is used for the configuration flash, so that firmware can be updated remotely.
It has three registers:

- **0: prescale** (reset value 4). A half SCK period lasts prescale + 1
  clocks, so a byte takes 16 × (prescale + 1) clocks.
- **1: chip select**. Held across bytes, so software frames each flash command
  itself.
- **2: data**. A write sends a byte. A read returns {busy [8], last byte
  received [7:0]}.

### `clock_distribution`

This block makes each group's FEC clock, sync line and trigger line from
`clk_ref`, a 640 MHz reference. A free-running 3-bit counter divides the
reference to 320, 160 or 80 MHz. A rate change or a clock enable takes effect
only when the counter is at zero. All divided clocks are low there, so no FEC
ever sees a short clock pulse. A sync or trigger request crosses from the core
clock as a toggle through a two-flop synchroniser. It then produces one pulse
on the group's line, exactly one FEC clock period long, that starts at the
beginning of a period. Every FEC in the group therefore sees it on exactly one
clock edge.

## What is not in this RTL

The top level brings out as ports the parts that are not logic of this design:

- the LVDS receivers that turn each FEC's differential pair into
  `fec_bit`/`fec_bit_valid`;
- the IPbus-over-UDP core and the Ethernet MAC/transceiver behind
  `ipb_in`/`ipb_out`, `link_status` and `link_ctrl`;
- the DUNE timing endpoint that provides `dune_ts` and the clocks;
- the clock synthesiser and the 1:8 fan-out chips;
- the SAMPA chips themselves.

Two read-out options are also left out: the SiTCP (TCP) option and the Aurora
link used for powering over the data cable. Neither was used for the results
this design is based on. The power electronics are not included either. The
testbenches generate the SAMPA serial stream with a behavioural model
(`tb/sampa_stim_pkg.sv`).

## Where this design makes its own choices

- **Round-robin counts.** The block diagram this design follows labels the
  first round-robin level "7:1" (×7) and the second "8:1". It also marks the
  FEC groups "×8". The accompanying text describes seven groups of eight FECs
  and 64 buffers in total. Seven 7:1 stages cannot take 56 inputs, so the RTL
  follows the text: seven groups of eight, seven 8:1 stages, then one 7:1
  stage. `N_GROUPS` and `FECS_PER_GROUP` on the top change the split.
- **SAMPA header layout.** The bit layout and the sync pattern are taken from
  the SAMPA chip's published serial format, not from the design description.
  The decoder expects bit 0 first and ignores the Hamming code and the parity
  bits.
- **Own formats and sizes.** All word formats (D0, D1, E0), the three-samples-
  per-word packing, the buffer depths, the register addresses and bit layouts,
  and the I2C and SPI register interfaces are this design's own.
- **Trigger line.** The trigger line shares the sync register, as bit 1.
- **Monitoring.** The per-FEC "memory content" register gives how full the
  L0 buffer is and how many hits it dropped; it does not give the stored
  words. The telemetry counters (0x05, 0x28+r, 0x30+g, 0x80+f) are this
  design's pick of what to count.
- **PMbus.** PMbus traffic goes through the I2C master. Its alert and
  control lines and its packet error code are left to software or not
  wired.
- **One clock.** The data path and IPbus use a single core clock.
- **FEC clocks.** The FEC clock is divided from a 640 MHz reference in the
  fabric. The original uses the FPGA's internal clock multiplexers.
- **Overflow.** On L0 overflow the design drops whole hits and counts them.
  Nothing is said about overflow in the original.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops. A watchdog ends a run that hangs and
counts it as a failure. With Verilator 5, from the project root:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb \
    rtl/pat_pkg.sv tb/sampa_stim_pkg.sv tb/tb_pat_firmware_top.sv \
    --top-module tb_pat_firmware_top -o sim
./obj_dir/sim
```

To run another block's test, change the testbench name. `tb/sampa_stim_pkg.sv`
is needed only by the decoder and top-level tests.

| testbench | what it checks |
|-----------|----------------|
| `tb_sampa_decoder` | No lock on random line noise, then lock on a sync packet. A mix of data packets from both chips, heartbeats, sync packets and a longest packet (N = 1023), with gaps in `bit_valid`. Every word is compared with a reference model, and the clock of each D0 is checked. |
| `tb_l0_buffer` | (64-word depth) Random hits with a randomly stalling reader; no hit readable before its last word. Then overflow with the reader stopped: exactly the hits that do not fit are dropped whole. Level and drop counters. |
| `tb_stream_fifo` | (16-word depth) Random traffic in and out, ready and full behaviour, level. |
| `tb_rr_arbiter` | (4 inputs) Hits whole and in order, rotation 0,1,2,3,0…, no idle cycle between hits, veto, enable (a hit in flight finishes), output stalls. |
| `tb_packet_formatter` | E0/E1/E2 contents, pass-through of hits, random gaps and output stalls; a hit of W words takes exactly W + 3 clocks. |
| `tb_ipbus_fabric` | Routing to three slaves, error reply for unmapped addresses. |
| `tb_ccm_regs` | Every register, pulse widths, data port pop-on-read. |
| `tb_i2c_master` | Against an I2C slave model with clock stretching: write, repeated-start read with NACK, an address nobody acks, START/STOP counts, SCL period. |
| `tb_spi_master` | Against a mode-0 slave model: bytes in both directions, 8 edges per byte, byte time. |
| `tb_clock_distribution` | Clock periods at all three rates, glitch-free switching, enable, sync/trigger pulse width. |
| `tb_pat_firmware_top` | The whole card at full size (56 FECs, default depths). See below. |
| `tb_noise_run` | A triggered noise run of the whole card at full size, with 55 of the 56 links cabled: one 500-sample waveform on each of 3520 channels, read out while the links send. See below. |

`tb_pat_firmware_top` runs the whole card with every parameter at its default.
It sends random hits of all packet types on all 56 links and reads the output
through the IPbus data port, as the DAQ would. It parses each Ethernet sample
and compares every hit, FEC by FEC, against a reference model. It also makes
each of these happen and checks the result:

- back-pressure into both round-robin levels;
- L0 overflow with whole hits dropped, on a vetoed FEC, with the drop count
  checked;
- a veto that holds hits back until it is lifted;
- a disabled round-robin stage, and a round-robin reset through its
  control register;
- a logic reset that empties the L0 buffers;
- sync and trigger pulses;
- a FEC clock rate change and a stopped FEC clock;
- the telemetry counters, checked against what was sent and read;
- an I2C transfer with NACK;
- an SPI byte;
- error replies.

It runs in seconds with Verilator and makes about 8,800 checks. For each
block, a copy with one deliberate bug was run against its testbench, and every
testbench reported failures.

`tb_noise_run` repeats the noise measurement this card is built for. As on
a fully loaded card of the test stand, 55 of the 56 links are cabled, and the
silent link must never lock. A trigger goes to all seven groups, and every
channel answers with a 500-sample waveform. That makes 605,440 words in all,
sixteen times what the buffers hold. The links send one bit every 8 core
clocks, and the DAQ keeps reading the data port. All 3520 waveforms must
arrive intact, no L0 buffer may drop a hit, and the sums of the samples (the
inputs of an RMS) must match. It takes 2.6 million
clocks, about 15 s with Verilator.

**How far it can be trusted.** Every module compiles with Verilator and with
the slang front end of Yosys, and every testbench passes. The SAMPA interface
has been tested only against the testbench's own model of the SAMPA stream,
not against a real chip. Bit order and header layout are the first things to
check on hardware. The throughput and the buffer sizes have not been measured
against real data rates.

## Sizes

| quantity | value |
|----------|-------|
| FEC links | 56 (7 groups × 8) |
| channels per PAT | 3584 |
| longest hit | 343 words (1023 samples) |
| a 500-sample waveform | 169 words + 3 header words |
| L0 / L1 / L2 depth | 512 / 1024 / 2048 words (`L0_DEPTH`, `L1_DEPTH`, `L2_DEPTH` on the top) |
| total buffering | 37,824 words |

A trigger that records 500 samples on all 3584 channels at once makes about
616,000 words (2.5 MB). That is far more than the buffers hold. Such a run
works without loss only if the DAQ reads at about the rate the links deliver,
as it does in `tb_noise_run`.
Otherwise the L0 buffers drop whole hits and count them. In beam operation,
with about one spill per second and only tens of tracks, this limit is far
away.
