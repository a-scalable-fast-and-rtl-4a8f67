# A 24-channel arbitrary waveform generator in SystemVerilog

This generator drives 24 analog outputs at once. Each output plays voltage
waveforms that were stored in memory beforehand. It updates at up to
25 million samples per second, with 16-bit resolution. The waveforms are
sent from a computer over USB. A small program, also sent over USB, decides
which waveform each output plays, when, how often, and at what rate. It can
also wait for an external TTL trigger and send a trigger pulse of its own.
The instrument was built for quantum-optics and ion-trap experiments. There,
many electrodes need independent, fast and tightly synchronised voltages.

The key idea is a split between a slow, narrow write path and a fast, wide
read path:

* **Writing is slow and one channel at a time.** Waveform data reaches one
  card's memory byte by byte over an 8-bit bus.
* **Reading is wide and parallel.** All twelve cards read one memory word on
  the same update tick, and every DAC gets a new code from it.

The central controller therefore never moves sample data while a waveform
plays. It only tells every card "start at segment *s*" and "next word".

This RTL describes the digital part of the instrument:

* the control-board FPGA;
* the backplane bus;
* on each of the 12 daughter cards, the card controller (a CPLD in the
  hardware) and the dual-port SRAM.

The DACs and the output amplifiers are behavioural models. They let the
testbenches check the output voltages.

```
 USB µC FIFO ──16──► ┌───────────────────── control-board FPGA (mawg_fpga) ───────────────────┐
                     │ usb_fifo_reader ─► package_decoder ─┬─ write job ─────► sram_writer ─┐ │
                     │                                     ├─ bytes ─► wave_buffer ─┘       │ │
                     │                                     └─ commands ─► cmd_sequencer ◄─┐ │ │
                     │            update_clock_gen (÷div or TTL) ── tick / trig ──────────┘ │ │
                     └──────────────────────────────────────────────┬───────────────────────┘ │
   TTL in ──► (clock or trigger)      TTL out ◄── SendPulse         │ backplane: 10 ctrl,     │
                                                                    │ 8 addr, 8 data           ◄┘
      ┌─────────────────────────────┬───────────────────────────────┴──── … 12 cards
      ▼                             ▼
  daughter_card (card 0)        daughter_card (card 1) …
   card_cpld ─► dpsram 128k×36 ─► 2 × (dac_model ─► opamp_adder_model) ─► 2 outputs
```

## Memory organisation on a daughter card

Each card has one dual-port SRAM of 131072 words × 36 bits:

* **Write port.** The write port (port A) is filled from the backplane.
* **Read port.** The read port (port B) feeds both DACs of the card.
* **Sub-words.** A word holds one sample for each of the card's two
  channels, as two 18-bit sub-words. Each sub-word has 16 code bits and 2
  spare "steering" bits:

| bits of the word | meaning |
|---|---|
| 35, 26 | steering bits of channel 2 |
| 34..27, 25..18 | code of channel 2 (MS byte, LS byte) |
| 17, 8 | steering bits of channel 1 |
| 16..9, 7..0 | code of channel 1 (MS byte, LS byte) |

The steering bits are stored and read like any other bit. They come out of
each card on `steer`, as {35, 26, 17, 8}.

**Segments.** The depth is cut into 16 segments of 8192 words. One segment
holds 8192 × 18 bits = 18432 bytes per channel.

**Address counters.** The controller never sends a full address. It sends
only a 4-bit segment number, which becomes address bits 16..13 (the low 13
bits are zero). After that, both ports count up by themselves, using their
own address counters. The counters do not stop at a segment boundary, so a
waveform longer than 8192 words simply runs on into the following segments.
They stop at the last word of memory and stay there.

In return, a waveform can only start at a segment start. This keeps the
backplane narrow and quiet.

## Getting data in: packages on the USB link

The host writes 16-bit words into the USB micro-controller's FIFO. The FPGA
reads them (`usb_fifo_reader`, one word per cycle at most). The package
decoder then recognises two kinds of package. Every field is one 16-bit
word.

```
data-package:    A5DA  npackets  channel(0..23)  segment(0..15)  data bytes …  5AED
command-package: A5C0  reserved  ncommands  {op,arg[23:16]} arg[15:0]  …  5AED
```

The header values A5DA, A5C0 and 5AED are this design's own. The original
framing words are not published.

**Data-packages.**

* The data bytes come two per word, high byte first.
* They are grouped in packets of 9 bytes. A packet is 72 bits holding four
  18-bit sub-words, the first sub-word in the top bits.
* A sub-word is {steering bit, MS byte, steering bit, LS byte}. That is
  exactly its layout in memory.
* An odd last byte is padded to a full word.

**Command-packages.** Each command is two words: an 8-bit command code with
the top 8 bits of a 24-bit argument, then the low 16 bits of the argument.

**Errors.** A wrong header word, or a missing end word, raises `err` for one
cycle. The decoder then waits for the next start header.

A data-package becomes a write job {channel, segment, packet count} for
`sram_writer`, and a byte stream. The bytes go through `wave_buffer`, a
2048-byte FIFO in block RAM. The USB side can therefore keep streaming while
the writer works through a packet.

The decoder holds a finished job in a staging register while it parses the
next package. This matters when the writer is still busy, or is held back by
a running program: the job already offered stays unchanged until the writer
takes it.

### The write operation over the backplane

`sram_writer` writes one job to one channel:

1. **Address load.** It puts {card = channel/2, segment} on the 8-bit
   backplane address bus and pulses `wr_load`. Only the addressed card loads
   its port-A counter with the segment start.
2. **Gather.** It collects the 9 bytes of a packet.
3. **Write.** For each of the packet's four sub-words, it writes the LS
   lane, then the MS lane. Each lane is 8 data bits plus the ninth bit on
   `wr_bit8`. Lanes 0/1 are used for even channels, lanes 2/3 for odd
   channels, so the other channel's half of each word is left untouched.
   The card counts its address up after the MS lane.

A packet costs 9 cycles to gather and 8 to write, about 17 system cycles in
total. Writing a full channel (131072 samples) therefore takes about
11 ms on the FPGA side. The USB link is the slower stage: the original
instrument needs about 32 ms for one channel.

A job does not start while a program is running. The running program owns
the address bus. A data-package that arrives during a run waits in the
decoder and buffer until the program ends.

## The command sequencer

`cmd_sequencer` plays a program of commands. The codes are:

| code | command | argument | action |
|---|---|---|---|
| 32 | StartSequencer | – | clear the program memory and start storing commands |
| 34 | SetUpdateRate | n | internal update clock = 50 MHz / n (n < 2 is taken as 2, i.e. 25 MHz) |
| 35 | ExtCLK | 1 / 0 | use the TTL input as update clock / use the internal clock |
| 0..15 | StartSegment s | n | play n words of every channel from the start of segment s |
| 16 | Pause | n | wait n update periods |
| 17 | Repeat | i : k | jump back to index i, k times (the block runs k+1 times) |
| 18 | SendPulse | n | drive the TTL output high for n update periods |
| 19 | WaitForPulse | – | wait for a rising edge on the TTL input |
| 41 | EndSequencer | – | close the program and run it |

**Loading a program.**

* SetUpdateRate and ExtCLK configure the clock and act at once.
* The five data-handling commands (StartSegment, Pause, Repeat, SendPulse,
  WaitForPulse) are stored at consecutive indices 0, 1, 2, … in a
  256-entry program memory.
* EndSequencer starts the run once any memory write in progress has
  finished.
* A new StartSequencer aborts a running program.
* At the end of a run, `done` pulses and `running` falls.

**Timing.** The sequencer advances only on update ticks. Each stored
command takes a FETCH tick and a DECODE tick. StartSegment then takes:

* a LOAD tick, which loads all read-port counters with the segment start;
* n READ ticks, which each read one word in every card.

The gap between the last word of one segment and the first word of the next
is therefore exactly 4 update periods: 160 ns at 25 MHz. This is the
segment-switch latency of the instrument. A Pause of n between two segments
stretches that gap to n + 6 periods.

Repeat uses a single loop counter, so repeats cannot be nested. Whether "repeat
k times" means k or k + 1 passes is not published. This design makes k jumps
back, so the block runs k + 1 times.

Example, in the manner of the instrument's documentation:

```
StartSequencer 32:0      SetUpdateRate 34:2     ExtCLK 35:0
0 WaitForPulse 19:0      1 StartSegment 02:7250  2 Pause 16:255
3 StartSegment 05:10500  4 Repeat 17:0:11       5 SendPulse 18:170
EndSequencer 41:0
```

This program waits for a trigger and then plays segment 2 for 7250 samples.
After 255 idle periods it plays 10500 samples from segment 5; these run on
through segment 6. It does this 12 times and ends with a 6.8 µs trigger
pulse. `tb_table2_sequence` runs exactly this program and checks every one of
the 213000 samples.

## Update clock and trigger

`update_clock_gen` makes `tick`, a pulse one system cycle wide, once per
update period:

* **Internal clock.** The 50 MHz system clock is divided by the
  SetUpdateRate argument.
* **External clock.** Each rising edge of the TTL input, after a 2-flop
  synchroniser, gives a tick 3 system cycles later.

The same synchronised edge drives `trig` for WaitForPulse. The TTL input is
therefore either the clock or the trigger, depending on ExtCLK.

The whole design runs in the single 50 MHz clock domain. The update clock
goes to the cards as the one-cycle `tick` line of the backplane, not as a
separate clock.

## DAC clocking on the card: stopped-clock and continued-clock

`card_cpld` makes one DAC clock per channel. The pulse comes one system
cycle after the memory output has changed. At 25 MHz that is the middle of
the update period. Each channel position (first or second DAC of every card)
has a mode, set by `clk_mode`:

* **Stopped-clock (0).** The DAC is clocked only for ticks that brought a
  new word. When the word stream stops, the DAC gets 4 extra "flush" clocks,
  so that its 3.5-cycle pipeline presents the last word. Then the DAC clock
  stops, and the output holds the last sample.
* **Continued-clock (1).** The DAC is clocked on every tick and keeps
  refreshing the last word read.

The flush clocks are this design's own addition. Without them, a
pipelined DAC whose clock stops would never show the last samples. They
repeat the word already latched, so they cause no glitch.

## Output channel models

These models exist only to check the voltages in simulation. They are not
synthesisable.

* **`dac_model`.** A complementary current-output 16-bit DAC with 3.5 clock
  cycles of latency: four register stages on the rising edge, then an
  output register on the falling edge. Its outputs are
  `ioutp = IFS × code / 65535` and `ioutn = IFS − ioutp`, in nA. One code
  step is about 305 nA, so the model keeps the full 16-bit resolution.
* **`opamp_adder_model`.** The two currents cross 50 Ω resistors. The
  op-amp amplifies the difference by 10 and adds the common DC offset. The
  output is clipped to ±10 V. All values are integers in µV.

**Full-scale current.** The published text gives the DAC full-scale current
as "±2 mA". With 50 Ω and a gain of 10 that would give only ±1 V, not the
instrument's ±9–10 V range. The model therefore uses 20 mA, which gives
exactly ±10 V at full scale. `IFS_NA` is a parameter if the other reading is
wanted.

## Backplane bus

The bus has 10 control lines, 8 address lines and 8 data lines. This design
assigns the 10 control lines as follows:

| line | meaning |
|---|---|
| tick | one update period has begun (read side of all cards) |
| rd_load | read port: load segment start, address[3:0] = segment |
| rd_en | read port: read one word and count up |
| clk_mode[1:0] | DAC clock mode of channel position 1 and 2 |
| wr_load | write port of card address[7:4]: load segment start address[3:0] |
| wr_stb | write port: write one 9-bit byte lane |
| wr_lane[1:0] | which of the 4 byte lanes |
| wr_bit8 | ninth bit of the lane |

## Rates and sizes

* **Read bandwidth.** 24 channels × 16 bits × 25 MHz = 9.6 Gbit/s of DAC
  data. The controller itself sends only about 3 bits of control per tick.
* **Memory per channel.** 131072 samples, in 16 segments of 8192.
* **Program memory.** 256 stored commands.
* **Segment switch.** 4 update periods (160 ns at 25 MHz). The fastest
  update rate is 25 MHz.
* **Flip-flops.** Synthesis of the full top gives about 880 flip-flop bits.
  The memory is 12 × 4.7 Mbit, plus the FPGA's small RAMs.

## Departures from the published design and open points

* **Details the hardware description leaves open.** The framing words, the
  command word format, the meaning of each backplane control line, the
  byte order inside a 9-byte packet and the FIFO depth are not published.
  All of these are choices of this design.
* **Program model.** StartSequencer stores, and EndSequencer runs. Commands
  arriving during a run replace the program only when a new StartSequencer
  comes.
* **Time units of commands.** Pause and SendPulse count update periods. The
  description says "clock cycles" without saying which clock.
* **Repeat.** k means k jumps back, and there is no nesting.
* **DAC full-scale current.** 20 mA instead of the printed ±2 mA (see
  above).
* **Mode select.** The controller's 4-bit mode-select input is not
  described; here the clock mode comes in on the 2-bit `clk_mode` port.
* **USB FIFO control.** `usb_sloe_n` and `usb_fifoadr` are constants: one
  FIFO, output always enabled.
* **Not modelled.** These parts have no logic to write: the USB
  micro-controller and its firmware, the configuration memories, the
  isolators, the bus transceivers, the termination and filter network, the
  power supplies, and the host software. The testbenches stand in for the
  USB micro-controller with a FIFO model (`tb/usb_host_model.sv`). They
  build packages the way the host software would.
* **Single clock domain.** The update clock is a tick on the system clock.
  An external TTL clock is therefore quantised to 20 ns. Each of its high
  and low levels must last at least one system cycle.

## Files

| file | contents |
|---|---|
| `rtl/mawg_pkg.sv` | geometry constants, command codes, command and bus types |
| `rtl/mawg_top.sv` | the instrument: FPGA, backplane, 12 daughter cards |
| `rtl/mawg_fpga.sv` | control-board FPGA |
| `rtl/usb_fifo_reader.sv` | USB FIFO read side |
| `rtl/package_decoder.sv` | data/command package parser |
| `rtl/wave_buffer.sv` | block-RAM byte FIFO |
| `rtl/sram_writer.sv` | write operation over the backplane |
| `rtl/update_clock_gen.sv` | update clock divider, external clock, trigger |
| `rtl/cmd_sequencer.sv` | command sequencer |
| `rtl/daughter_card.sv` | one card |
| `rtl/card_cpld.sv` | card controller: select, write strobes, DAC clocks |
| `rtl/dpsram.sv` | 128k × 36 dual-port SRAM with address counters |
| `rtl/dac_model.sv` | behavioural DAC |
| `rtl/opamp_adder_model.sv` | behavioural output amplifier |

Each module has its own self-checking testbench, `tb/tb_<module>.sv`. Three
testbenches run the full instrument at its real size, 12 cards and 128k
words per card:

* **`tb/tb_mawg_top.sv`** runs three programs. It makes every mechanism
  happen at least once and counts each one: waits, pauses, repeats, trigger
  output, both clock modes, flush clocks, external clock, segment-boundary
  crossing, a full buffer, a write held back by a running program, and a
  bad package.
* **`tb/tb_table2_sequence.sv`** runs the example program above at full
  length.
* **`tb/tb_fig9_waveforms.sv`** plays four demonstration waveforms at
  12.5 MHz, 80 ns per sample: a full-scale step, a staircase of 0.6 mV steps,
  a Bessel curve and a triangle. It checks every output voltage level and
  how long it lasts.

`tb/mawg_tb_pkg.sv` builds packages, and `tb/usb_host_model.sv` models the
USB FIFO.

Each testbench prints `TB_RESULT checks=<n> failures=<m>`. Each has a
watchdog. To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/mawg_pkg.sv tb/mawg_tb_pkg.sv \
  tb/tb_mawg_top.sv --top-module tb_mawg_top -Mdir obj_top
./obj_top/Vtb_mawg_top
```

Each full-size run takes a few seconds. Two unit testbenches override a
parameter to stay short: `tb_wave_buffer` uses a 16-byte buffer, and
`tb_dpsram` uses 256 words. All other tests, the full-size ones included,
use the default parameters.
