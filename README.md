# An FPGA readout core for RD53 pixel readout chips

The RD53 chips (RD53A, ITkPix, CROC) that read out the pixel detectors of
the ATLAS and CMS upgrades talk to the outside world over two kinds of
links:

- one slow serial **command line** into the chip, at 160 Mbit/s, which carries
  configuration commands and triggers;
- up to four fast **data lanes** out of the chip, at 640 Mbit/s or
  1.28 Gbit/s, using Aurora 64b/66b encoding.

A test system for these chips has to speak both protocols. It has to send
triggers at the right moment. It has to pass every received word to a PC
without interpreting it, so that software can study the data format and find
transmission errors. The BDAQ53 readout system does this on an FPGA board.
The SystemVerilog here is the core of such a firmware: all of its logic except
the vendor I/O primitives and the Ethernet stack. The block structure, the
data flow and the features follow the published description of BDAQ53.
Almost every detail below that structure is this design's own. Section 9
lists these choices.

```
             UDP register access                 TCP data stream
                    |                                  ^
              +-----v------+                     +-----+--------+
              | bus_master |                     | tcp_streamer | 9 bytes / word
              +-----+------+                     +-----^--------+
                    | control bus (8 bit data,         | common FIFO, 8192 x 72 bit
                    | 16 bit address)            +-----+-----+
   +------------+---+-------+---------+------+   | sync_fifo |
   |            |           |         |      |   +-----^-----+
+--v--------+ +-v---------+ +v-------+ +v---+ +v--------+  |  tagged words
|cmd_encoder| |tlu_        | |hitor_  | |tdc | |i2c_     | +-----+-------+
| 160 Mb/s  | |controller | |trigger | |    | |master   | | data_merger | round robin
+--^---+----+ +-^---+-----+ +-^------+ +-+--+ +---------+ +--^---^---^--+
   |   |        |   | trigger  |         |  TDC words        |   |   |
   |   |        |   +---words--|---------|------------------->   |   |
   |   |        |              |         +------------------------>   |
   |   |        +--self trigger+                                     |
   +---|--------trig_out                              lane FIFOs 1024 x 65 bit
       v                                                  ^  (x7)
   cmd_out -> chip                 aurora_rx (x7) <- transceiver words
```

## 1. Parts and files

| file | block |
|---|---|
| `rtl/bdaq_pkg.sv` | shared types: bus request, tagged word, word types, address map, RD53A symbol tables, Aurora constants |
| `rtl/bdaq53_core.sv` | top level: connects everything below |
| `rtl/bus_master.sv` | UDP register access (SiTCP RBCP port) to the control bus |
| `rtl/cmd_encoder.sv` | command memory, sequencer, trigger insertion, 16-bit frame serializer |
| `rtl/aurora_rx.sv` | one data lane: gearbox, block lock, descrambler, frame decoder |
| `rtl/sync_fifo.sv` | block-RAM FIFO, used per lane and as the common FIFO |
| `rtl/data_merger.sv` | tags words with type and channel and merges all sources, round robin |
| `rtl/tcp_streamer.sv` | common FIFO to the TCP byte port; FIFO status registers |
| `rtl/tlu_controller.sv` | Trigger Logic Unit handshakes and the self-trigger input |
| `rtl/hitor_trigger.sv` | self-trigger from the chip's HitOr lines: delay and veto |
| `rtl/tdc.sv` | HitOr pulse width at 640 MHz sampling |
| `rtl/i2c_master.sv` | I2C master for the programmable reference clock |
| `tb/aurora_tx_model.sv` | testbench model of a chip data lane (scrambler, 66-bit blocks, 32-bit words) |
| `tb/i2c_target_model.sv` | testbench model of an I2C target with a byte memory |
| `tb/tb_*.sv` | one self-checking testbench per block, and `tb_bdaq53_core` for the whole core |

One clock runs the whole core. It is nominally 160 MHz: the command line
sends one bit per clock, and the 640 MHz HitOr sampling arrives as 4 samples
per clock. Reset is synchronous and active high.

## 2. The data word

Every word that reaches the PC is 72 bits wide. It goes out as 9 bytes,
most significant byte first:

| bits | field |
|---|---|
| 71:68 | word type: 1 Aurora data frame, 2 Aurora control (user-K) frame, 3 trigger, 4 TDC |
| 67:64 | channel ID: the lane number for Aurora words, 0 otherwise |
| 63:0 | payload |

The payload of each word type:

- **Aurora data and user-K words:** the descrambled 64-bit frame, exactly as
  received. For a user-K frame, bits 63:56 hold the block type.
- **Trigger words:** `{time stamp[31:0], trigger number[31:0]}`. The time stamp
  is a free-running clock counter. The trigger number comes from the internal
  counter, or from the TLU in trigger-data mode.
- **TDC words:** `{rising-edge time[31:0], event number[15:0], overflow, 3'b0,
  width[11:0]}`. Times and widths are in 1/640 MHz units (1.5625 ns).

One Aurora frame fits in one word, so the lanes need no splitting or
reassembly. 72 bits is also the widest block-RAM port of the FPGA family.
Software rebuilds events from this stream. The firmware never interprets chip
data: the only frames it drops are Aurora idle blocks, and it drops those only
while the lane is locked.

## 3. Receiving a lane (`aurora_rx`)

This is the least obvious part of the design. The transceiver recovers the
serial lane and delivers `W` = 32-bit words, with `rx_valid` high once per
word. For a 1.28 Gbit/s lane and a 160 MHz core that is one word every 4th
clock; for a 640 Mbit/s lane, every 8th clock. The earliest bit of a word is
`rx_data[31]`. The receiver works in four stages.

**Gearbox.** Incoming words are appended to a bit buffer of 66 + W bits. As
soon as 66 bits are present, the oldest 66 form a block: `{header[1:0],
payload[63:0]}`, with the header sent first and the payload MSB first. A
*slip* request drops one bit from the buffer, which moves the block boundary
by one bit. With 32-bit words a block arrives every 66/32 words, which is
8.25 clocks at 1.28 Gbit/s.

**Block lock.** The two header bits of a correctly aligned block are always
`01` (data) or `10` (control). When the receiver is not locked, every block
with any other header causes a slip, and `LOCK_COUNT` = 64 valid headers in a
row give lock. Once locked, the receiver drops the lock when `BAD_LIMIT` = 16
invalid headers fall within a window of 64 blocks. These are the 64b/66b lock
rules of IEEE 802.3 clause 49. From any starting offset, lock takes at most
66 slips plus 64 blocks.

**Descrambler.** The payload is self-synchronously scrambled with
x^58 + x^39 + 1. Each payload bit, in transmission order, is XORed with the
received bits 39 and 58 positions earlier. The header is not scrambled. The
descrambler recovers after 58 bits, so it needs no reset or alignment with the
transmitter.

**Decoder.** Header `01` gives a data frame. Header `10` gives a control frame:
if its block type (the first payload byte) is 0x78, it is an idle block and is
dropped. Any other control frame goes out flagged as user-K. The chips send
register read-back in user-K frames. Frames leave one clock after their block
is cut. They leave only while the lane is locked and enabled.

The receiver has no back-pressure. Its lane FIFO (1024 words) absorbs bursts
while the merger serves the other sources. A lane FIFO overflow is sticky and
readable in the lane's status register.

Each lane is its own channel. A chip that uses several lanes appears as
several channel IDs, and software combines them. The bit order within a block
is a convention of this design; the transceiver must be set up to match it.

## 4. Commands and triggers

### Command line (`cmd_encoder`)

The command line carries 16-bit frames, MSB first, one bit per clock. One
frame therefore lasts 16 clocks, which is four 25 ns bunch crossings (BX). At
each frame boundary the encoder picks the next frame in this order of
priority:

1. **A trigger frame**, if a trigger arrived during the frame just sent. Each
   clock of a frame belongs to BX slot `bcnt/4`. The four slots form a 4-bit
   pattern, with the earliest slot as the MSB. The frame is
   `{trigger symbol(pattern), data symbol(tag)}`, where the tag is a 5-bit
   counter.
2. **The next frame of the command sequence**, while a sequence is running.
3. **The sync frame `0x817E`** otherwise.

Software writes the command bytes, already encoded as RD53 symbols, into the
command memory (2048 bytes). It then sets the length and the repeat count and
starts the sequence. Frames of a sequence go out back to back. A trigger
arriving during a sequence delays the sequence by one frame and drops nothing.
The trigger frame starts at the next frame boundary, at most 16 clocks after
the pulse. Its BX position within the frame is kept in the
pattern. All chips share the command line, and a command carries its chip ID,
so one encoder serves up to four chips.

### Trigger sources

- **`tlu_controller`** connects an external Trigger Logic Unit. It has three
  handshake modes:
  - *No handshake:* every rising edge of TRIGGER is a trigger.
  - *Simple:* BUSY rises with the trigger and falls after TRIGGER has fallen.
  - *Trigger data:* BUSY rises with the trigger. After TRIGGER falls, the core
    clocks 15 bits of trigger number out of the TLU. TLU_CLOCK is high for
    `CLKDIV` clocks and low for `CLKDIV` clocks, bits come LSB first, and each
    bit is sampled at the falling edge. BUSY falls after the last bit.

  The same block accepts the HitOr self-trigger. Every accepted trigger goes
  to the command encoder and also becomes a trigger word. A `veto` input
  blocks new triggers and holds BUSY. In the core, veto is driven while the
  common FIFO has fewer than 64 free words.
- **`hitor_trigger`** makes self-triggers from the chip's four HitOr lines.
  Each HitOr line is the OR of the discriminators of all pixels in its part of
  the chip. The enabled lines are ORed, synchronised and edge-detected. An
  accepted edge appears at `trig_out` exactly `DELAY + 3` clocks later: the
  DELAY register sets this, so that the trigger command matches the chip's
  trigger latency. After each accepted edge, a veto window of `VETO` clocks
  ignores further edges and counts them. The delay line holds one bit per
  clock, so several triggers can be in flight at once. If DELAY is raised
  while triggers are in flight, they come out at the new delay.

## 5. TDC (`tdc`)

A deserialiser outside the core samples the HitOr line at 640 MHz and
delivers 4 samples per clock, earliest in bit 3. The TDC walks through the
samples in time order. It measures each high pulse in sample units, 12 bits
wide, saturating at 4095 with an overflow flag. It records the sample time of
the rising edge. A pulse that spans clock boundaries is handled like any
other. If two pulses end within one clock, or a word is still waiting when
the next one is ready, the older word is replaced and the loss is counted.
Measured this way, the charge resolution is much finer than the chip's 4-bit
time-over-threshold.

## 6. Control bus and registers

`bus_master` turns each single-byte UDP access into one bus cycle. The bus
request is a struct `{addr[15:0], wdata[7:0], wr, rd}` that goes to every
block. Each block answers a read one clock after the strobe, with a
registered byte that is zero when the block is not addressed, and the core
ORs all answers together. A write is acknowledged 2 clocks after the request
and a read 3 clocks after it.

| base | block | registers (offset: meaning) |
|---|---|---|
| 0x1000 | cmd_encoder | 0 W start / R ready; 1 trigger enable; 2-3 sequence size in bytes; 4-5 repetitions (0 = 1); 6 R trigger tag; 0x800-0xFFF command memory |
| 0x2000 + 16·n | aurora_rx lane n | 0 enable (reset 1) / R locked, lane-FIFO overflow; 1 R header errors (write clears); 2-3 R frame count |
| 0x3000 | tlu_controller | 0 mode[1:0], TLU enable, self-trigger enable; 1 trigger-number bits (15); 2 TLU clock half period (8); 4-7 R trigger count; 8 R lost words |
| 0x3100 | hitor_trigger | 0 enable, HitOr mask[7:4]; 1 DELAY; 2-3 VETO; 4-5 R accepted; 6-7 R vetoed |
| 0x3200 | tdc | 0 enable; 1-2 R event count; 3 R lost |
| 0x3300 | i2c_master | 0 W start / R ready, nack; 1 target byte (addr<<1 \| R/W); 2 size (1-16); 0x10-0x1F data buffer |
| 0x3400 | tcp_streamer | 0-1 R common FIFO level; 2 R FIFO overflow; 4-7 R bytes sent |

`i2c_master` runs standard-mode I2C: 100 kHz with `CLK_DIV` = 400 at
160 MHz. It sends START, the target byte, and then writes the buffer or reads
into it, with ACK checking, and ends with STOP. A missing ACK ends the
transfer and sets nack. It serves the programmable clock chip on the board.

## 7. Buffers, back-pressure and what fits

`data_merger` grants one source per clock, in round-robin order starting
after the last source granted. That is 160 M words/s, or 10.24 Gbit/s of
payload. Seven lanes at 1.28 Gbit/s carry at most 7 × 1.28 × 64/66 =
8.69 Gbit/s, so the merger keeps up with all lanes at full rate.

The Ethernet side is the bottleneck. `tcp_streamer` writes one byte per clock
(1.28 Gbit/s for 9-byte words), and the SiTCP core behind it normally runs on Gigabit
Ethernet. Full-rate data from all lanes can therefore only be buffered, not
streamed. Real chip lanes carry mostly idle blocks, which are dropped. While
the PC does not keep up, the common FIFO fills up. The TLU controller vetoes
new triggers when fewer than 64 words are free, and the lane FIFOs take up
the rest.

Configurations named in the BDAQ53 description, and whether this core at its
defaults can hold them:

| configuration | needed | built | fits |
|---|---|---|---|
| one chip with up to 4 lanes | 4 lanes | 7 | yes |
| multi-chip readout of up to 4 chips, one lane each | 4 lanes, shared command line | 7 lanes, broadcast command line | yes |
| 4 chips with 4 lanes each | 16 lanes | 7 | no |
| quad modules via a multiplexer card, one quad at a time | 4 lanes | 7 | yes |
| HitOr pulse sampling at 640 MHz | 4 samples per 160 MHz clock | 4 | yes |
| all 7 lanes at 1.28 Gbit/s, sustained, no idle | 8.69 Gbit/s to the PC | about 1 Gbit/s Ethernet | no (buffered only) |

## 8. Simulating

Each testbench checks its block against values it works out independently.
It counts checks, has a watchdog, and ends with a line
`TB_RESULT checks=N failures=M`. Build and run one with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    -Irtl -Itb rtl/bdaq_pkg.sv tb/tb_bdaq53_core.sv \
    --top-module tb_bdaq53_core -o sim && ./obj_dir/sim
```

Verilator finds the other modules in `rtl/` and `tb/` by name. Only the
package is given explicitly. Swap the testbench file and top module for the
other benches (`tb_aurora_rx`, `tb_cmd_encoder`, `tb_sync_fifo`,
`tb_data_merger`, `tb_tcp_streamer`, `tb_tlu_controller`,
`tb_hitor_trigger`, `tb_tdc`, `tb_i2c_master`, `tb_bus_master`).

`tb_bdaq53_core` runs the core at its default size. It configures everything
through the UDP register port. It drives seven lane models that start at
different bit offsets and checks that every frame arrives once, in order,
with the right type and channel. It then runs:

- a command sequence;
- TLU triggers in all three handshake modes; in trigger-data mode the
  trigger number must come back;
- a HitOr self-trigger;
- a TDC measurement;
- an I2C write;
- a back-pressure phase: the TCP port is held full while 9100 frames arrive,
  until the veto rejects a trigger. After release, nothing may be missing.

It counts each of these mechanisms and fails if one never happened. It simulates
about 1 ms of core time in well under a second, after a build of a minute or so.

The block testbenches cover:

- lane lock from an arbitrary bit offset, loss of lock after 16 bad headers and
  re-lock, and the block rate at both lane speeds: 8.25 clocks per frame at
  1.28 Gbit/s and 16.5 at 640 Mbit/s;
- the BX-slot encoding of trigger patterns and sequences interrupted by
  triggers;
- all three TLU handshakes;
- the exact HitOr delay and the veto window;
- TDC widths, saturation and loss counting;
- I2C write, read and NACK;
- FIFO order, level and full behaviour under random traffic;
- merger tagging and fairness;
- TCP byte order and the 9-clocks-per-word rate.

## 9. Relation to the BDAQ53 description

**Taken from the description:**

- the block set and connections: TLU controller, I2C controller, bus master,
  command encoder, Aurora receiver and FIFO buffer on one control bus. Data
  flows from the receivers through the FIFO to the Ethernet core, and control
  flows over UDP.
- the split into a core, and I/O parts (PLL, Ethernet core, transceivers,
  output serialiser) that stay outside the core.
- 7 data lanes at 640 Mbit/s or 1.28 Gbit/s, and the Aurora encoding.
- tagging of every word with a data type header, and of Aurora words with a
  channel ID, before one common FIFO and TCP.
- UDP for control and TCP for data.
- the three TLU handshake methods.
- the HitOr trigger with a configurable latency and veto.
- HitOr pulse-width sampling at 640 MHz.
- readout of up to four chips.

**This design's own choices.** The description gives these blocks' functions
but not their insides:

- the 8-bit control bus and its timing;
- the register maps;
- the 72-bit word format and the type codes;
- the FIFO depths, 1024 words per lane and 8192 common;
- the round-robin merger;
- the memory-driven command sequencer;
- the gearbox, bit order and lock thresholds;
- the TLU bit timing;
- the HitOr delay-line structure;
- the TDC word;
- the I2C controller;
- the FIFO-level veto;
- four HitOr inputs with a mask: the description speaks of one HitOr signal,
  the OR of all pixel discriminators; RD53A brings it out on four lines;
- running everything in one 160 MHz clock domain.

The RD53A command symbols, the sync frame and the Aurora 64b/66b constants
come from the chip and protocol specifications, not from the BDAQ53
description.

**Not included:**

- the transceivers and the command-line output serialiser: the core works on
  their parallel words and its serial bit;
- the system-clock PLL;
- the SiTCP Ethernet core and the Ethernet PHY: the core provides their UDP
  register port and TCP byte port;
- the programmable clock chip, which is only driven over I2C;
- the CDR-bypass clocking option, the SFP+ link and the analog parts of the
  base board;
- hardware channel bonding of the lanes of one chip.
