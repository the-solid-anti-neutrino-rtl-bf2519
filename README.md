# Triggered, zero-suppressed readout for one SoLid detector plane

SoLid is a reactor anti-neutrino detector built from 3200 channels. Each channel is a silicon
photomultiplier sampled at 40 MS/s with 14 bits. Read out in full, that is about 1.8 Tbit/s. The
physics that matters is rare: an inverse beta decay (IBD) happens about once every 20 seconds. It
shows up as a prompt positron signal followed, within some hundreds of microseconds, by a neutron
capture. The neutron capture gives a distinctive light signal: a long train of small pulses.

The readout firmware runs on the FPGA of each 64-channel board. It cuts the data rate by
combining two ideas:

* **Keep a short history of everything, and a long history of what is interesting.** Each channel
  delays its raw samples for 512 samples (12.8 µs). At the end of that delay a zero-suppression
  stage keeps only 16-sample blocks that contain a sample above threshold. Those blocks go into a
  rolling window buffer which, at the dark-noise rate, holds about a millisecond of history.
* **Trigger on the neutron, not the positron.** A per-channel trigger counts pulse peaks in a
  rolling window. A neutron capture produces many peaks, an ordinary gamma or muon only a few.
  When a neutron fires, two things are captured. The full-rate (non-suppressed) samples still in
  the delay line are kept, and these hold the neutron. The suppressed blocks from a window of about
  1 ms centred on the trigger are read out, and these should hold the positron. The neighbouring
  planes are told about the trigger over board-to-board links so that they read out the same
  window. Triggering on the neutron leaves the positron energy spectrum unbiased.

This repository holds synthesizable SystemVerilog for the firmware of one plane. Every block
shown in the firmware diagram has RTL here, except a few parts:

* the ADCs and analog front end;
* the vendor serial I/O and multi-gigabit transceivers;
* the IPbus/UDP/Ethernet engine;
* the two trigger types that are named in the diagram but not described.

## Contents

* [Data path of one channel](#data-path-of-one-channel)
* [Time stamps and the readout window](#time-stamps-and-the-readout-window)
* [Triggers](#triggers)
* [Back pressure and dead time](#back-pressure-and-dead-time)
* [Output formats](#output-formats)
* [Register map](#register-map)
* [Parameters](#parameters)
* [Where this design departs from, or adds to, the paper](#where-this-design-departs-from-or-adds-to-the-paper)
* [Testbenches and simulation](#testbenches-and-simulation)

## Data path of one channel

```
adc_raw ─► adc_deser ─┐
pattern_gen ──────────┼─► source mux ─┬─► latency_buf (512) ─► zs_block ─► window_buf (1536)
playback_buf ─────────┘               │                           ▲              │
                                      └─► chan_trig ──► fire      │ zs_force     ▼
                                                                 (trigger)      cro ─► derand (2048) ─► data_buf
```

The whole design runs on one 40 MHz sample clock (`clk`). Reset is synchronous and active high.

**Deserialiser and descrambler** (`adc_deser`). The ADC sends each channel as a 560 Mbit/s serial
stream, which is 14 bits per sample clock. The vendor I/O serialiser is outside this design. The
module receives one sample period's 14 bits per clock.

* A register-selected bit slip (0–13) finds the word boundary over two consecutive words.
* The ADC's output randomiser is then undone: bits 13..1 are XORed with bit 0, as in the LTM9007
  data sheet.
* Latency is one clock.

**Source multiplexer.** Each channel's input can come from one of three places:

* the ADC;
* a pattern generator (`pattern_gen`), producing a ramp or a constant;
* a playback RAM (`playback_buf`, 256 samples) that is written over IPbus and replayed in a loop.

The selection is common to all channels. These sources exist to test the chain without
detector signals.

**Latency buffer** (`latency_buf`). This delays the stream by exactly `LAT` = 512 clocks. It is a
circular RAM of 511 words with read-before-write, followed by an output register. It gives the
trigger 12.8 µs to decide before data leave the non-suppressed stage.

**Zero suppression** (`zs_block`).

* The delayed stream is cut into blocks of 16 samples, aligned to time stamps divisible by 16.
* A block is kept if any of its samples is strictly above the threshold. It is also kept if the
  trigger forced capture (`zs_force`) during the block, or if suppression is switched off.
* A kept block is re-emitted over the next 16 clocks, one sample per clock, with its time stamp.
  This is why forced capture produces the non-suppressed record of the neutron: every block that
  was in the latency buffer when the trigger fired comes out of ZS unsuppressed.

**Window buffer** (`window_buf`). A ring of 96 block slots (1536 samples), each holding a block
and its time stamp.

* A block becomes visible to the reader only when its last sample has been written.
* When the ring is full, a new block overwrites the oldest one, so the buffer always holds the most
  recent history.
* During a readout the ring is *locked*. New blocks that find it full are then dropped and counted
  (`n_overflow`), so the blocks being read cannot be overwritten.

**Channel readout controller** (`cro`). On a readout request the controller latches the window
`[t_start, t_end]` and walks the window buffer from its oldest block:

* Blocks that end before `t_start` are released unread.
* Blocks that start inside the window are copied to the derandomiser: one header word, then 16
  sample words.
* The walk stops at the first block that starts after `t_end`.

The window reaches 0.5 ms into the future. If the buffer runs empty, the controller therefore
waits until data later than `t_end + 2·16 + 2` have passed zero suppression. This allows for ZS's
one block of re-emission. A trailer word with the block count then closes the channel and `done`
pulses. Whenever the derandomiser is full, the controller stalls.

**Derandomiser** (`derand`). This is a 2048-word first-word-fall-through FIFO per channel. Above
2048 − 64 words it raises back pressure (`bp`). Writes while full are refused, and the readout
controller never attempts one.

**Data buffer** (`data_buf`). This merges the 64 derandomisers into one 8192-word FIFO. It visits
channels in order 0…63. From each channel it moves words, one per clock, up to and including that
channel's trailer. An event therefore appears as channel 0's blocks and trailer, then channel 1's,
and so on. Within 256 words of full, it throttles the trigger.

## Time stamps and the readout window

`timing_ctrl` keeps a 48-bit time stamp `ts` that counts sample clocks. The external `sync_in`
passes through a two-flip-flop synchroniser. Its rising edge restarts `ts` at 0, so all planes
that share the sync share time stamps.

A word presented on `adc_raw` during the clock in which `ts` reads `t − 2` becomes the sample
stamped `t`. One clock is the deserialiser's input register and one its output register. Each
channel labels the samples leaving its latency buffer with `ts − LAT`.

A trigger at time stamp `T` gives the readout window `[T − PRE, T + POST]` with
`PRE = POST = 20000`. At 40 MHz this is the paper's "about 1 ms centred on the trigger". The start
is clamped at 0.

The two kinds of output word carry time stamps of different widths:

* A block header carries only the low 30 bits of its block's time stamp, `ts[29:0]`. These wrap
  every 26.8 s.
* Trigger and event records carry the full 48-bit time stamp.

Because a readout window spans only 40001 samples, the full time stamp of a block can be recovered
from its event record.

## Triggers

**Channel trigger** (`chan_trig`). This runs on the undelayed stream, in parallel with the latency
buffer.

* The pedestal is subtracted from each sample.
* A *peak* is a sample that is above `peak_thr` and is higher than the sample before it and not
  lower than the sample after it. In other words, the discrete derivative turns from positive to
  non-positive.
* Peaks are counted over the last `TWIN` = 256 samples, using a 256-bit shift register and an
  up/down counter.
* `fire` pulses once when the count reaches `npk_thr`. It re-arms only after the count has dropped
  below `npk_thr` again.

**Random trigger** (`rand_trig`). A 32-bit Galois LFSR, with taps 0x80200003, is compared with a
rate register. It fires with probability `rate / 2^32` per clock and gives unbiased samples of the
detector.

**Trigger sequencer** (`trig_seq`). Each clock it forms a request from two sources: a neutron
request (any channel fired, if neutron triggering is enabled), and the random trigger. Neutron
takes precedence. The request is **vetoed**, and counted as vetoed, in any of these cases:

* the header or data buffer throttles;
* the previous trigger is still forcing capture;
* the previous trigger's record has not yet been taken.

An accepted trigger does three things:

1. It pulses `trig` with its type and time stamp.
2. It queues a 64-bit trigger record for the header buffer.
3. It holds `zs_force` for `LAT + BLK` clocks.

**Remote trigger** (`remote_trig`). Each accepted neutron trigger is sent to both neighbour
planes.

* It travels as a link word with an 8-bit marker `0x5A`, 8 spare bits and the 48-bit time stamp.
  The idle word is 0.
* A marker received on an enabled link becomes a *remote* readout request with the neighbour's time
  stamp.
* A trigger that arrives on both links in the same clock with the same stamp counts once.
* Remote requests are never forwarded again, so a trigger spreads exactly one plane each way.
* Received triggers are queued one deep. A second one that arrives before the first is taken is
  counted as lost.

**Readout sequencer** (`ro_seq`). This takes local and remote requests. Each source has a one-deep
pending slot, and local requests go first. One readout runs at a time, and none starts while any
derandomiser asserts back pressure. To start a readout it:

* computes the window;
* pulses `ro_req` with the window to all 64 controllers;
* writes an event record.

The readout ends when every channel has reported `done`. Remote requests read out data but do not
fire `zs_force`, because the neighbour's non-suppressed data are not in this plane.

## Back pressure and dead time

The design has three levels of back pressure:

1. **Derandomiser full.** The channel's readout controller stalls, and no new readout starts while
   any derandomiser is above its high-water mark.
2. **Header or data buffer near full.** This is `throttle`, and it vetoes new triggers.
3. **Window buffer full during a readout.** New blocks are dropped, and this is counted per
   channel.

`deadtime_mon` keeps 32-bit saturating counters of four quantities:

* total clocks;
* clocks with `throttle`;
* clocks with a readout in progress;
* clocks with derandomiser back pressure.

Writing CSR bit 31 clears the counters. Dead time is their ratio to the total.

## Output formats

The data buffer delivers 32-bit words:

| word | bits 31:30 | rest |
|---|---|---|
| block header | `01` | `[29:0]` time stamp of the block's first sample |
| sample | `10` | `[29:24]` channel, `[23:14]` 0, `[13:0]` sample |
| trailer | `11` | `[29:24]` channel, `[23:16]` 0, `[15:0]` number of blocks |

Every block is a header followed by exactly 16 samples. Every event has one trailer per channel,
in channel order.

The header buffer delivers 64-bit records, read as two words with the high word first:

| bits | field |
|---|---|
| 63:60 | tag: `0xA` trigger record, `0xB` event record |
| 59:58 | trigger type: 0 neutron, 1 random, 2 remote |
| 57:48 | spare (0) |
| 47:0 | time stamp of the trigger |

Trigger records come from the trigger sequencer. Event records come from the readout sequencer, one
for each event in the data buffer and in the same order, so the two streams can be matched.

## Register map

The IPbus slave `ctrl_regs` has 32-bit word addresses.

* Each `strobe` is answered one clock later, with a one-clock `ack` together with `rdata`.
* An unknown address answers `err`.
* Reading address 0x11 or 0x13 removes the word read from the header or data buffer.

| addr | access | contents |
|---|---|---|
| 0x00 | rw | CSR: `[1:0]` source (0 ADC, 1 playback, 2 pattern), `[2]` descramble, `[6:3]` bit slip, `[7]` ZS enable, `[8]` random enable, `[9]` neutron enable, `[11:10]` remote link enables, `[12]` pattern mode (0 ramp, 1 constant), `[13]` playback run, `[31]` dead-time clear (self-clearing) |
| 0x01 | rw | ZS threshold (ADC counts) |
| 0x02 | rw | random trigger rate (probability × 2^32 per clock) |
| 0x03 | rw | pedestal for the channel trigger |
| 0x04 | rw | `[13:0]` peak threshold above pedestal, `[24:16]` peaks needed |
| 0x05 | rw | pattern value |
| 0x06 | rw | playback last address |
| 0x07 | w | playback write: `[23:16]` address, `[13:0]` sample |
| 0x10 / 0x11 | r | header words available / header word |
| 0x12 / 0x13 | r | data words available / data word |
| 0x14–0x17 | r | dead time: total, throttled, readout busy, derandomiser back pressure |
| 0x18 / 0x19 | r | time stamp low / high |
| 0x1A | r | syncs seen |
| 0x1B / 0x1C | r | triggers accepted / vetoed |
| 0x1D | r | events read out |
| 0x1E | r | remote triggers received |

After reset, ZS is enabled and everything else is 0. That means the ADC source with no
descrambling, and no triggers enabled.

## Parameters

Parameters of `solid_top`; the defaults are the full-size design:

| parameter | default | meaning | origin |
|---|---|---|---|
| `NCHAN` | 64 | channels per board | paper (64-channel board; an 8-channel prototype also exists) |
| `LAT` | 512 | latency buffer, samples | paper (512 samples, 12.8 µs) |
| `WDEPTH` | 1536 | window buffer, samples | paper (1536 ZS samples) |
| `DDEPTH` | 2048 | derandomiser, words | paper (2048 ZS samples) |
| `BLK` | 16 | ZS block length | this design |
| `TWIN` | 256 | peak-count window, samples | this design |
| `PRE`, `POST` | 20000 | readout window around the trigger, samples | paper (~1 ms centred) |
| `HDEPTH` | 512 | header buffer, records | this design |
| `DBDEPTH` | 8192 | data buffer, words | this design |

The shared types (sample, 48-bit time stamp, trigger, window, record, link word, IPbus buses,
configuration and status bundles) are in `solid_pkg`.

## Where this design departs from, or adds to, the paper

The paper describes the firmware at the level of a block diagram and a few paragraphs. It gives
the following:

* the chain and its sizes: 512-sample latency, 1536-sample ZS window buffer, 2048-sample
  derandomiser;
* block-wise zero suppression with time of arrival;
* the neutron trigger by peak counting in a rolling window;
* the random trigger;
* non-suppressed plus suppressed capture on a neutron trigger;
* about 1 ms of data centred on the trigger;
* trigger exchange with neighbouring planes;
* readout over IPbus;
* the names of the control blocks.

Everything below is this design's own choice:

* ZS block length (16) and alignment; "above threshold" read as strictly greater.
* How non-suppressed capture is done. The trigger forces ZS to keep every block for `LAT + BLK`
  clocks, so both kinds of data travel through the same window buffer and readout.
* The window buffer overwrite policy and the lock during readout.
* The peak definition and the 256-sample counting window.
* Trigger priorities and veto rules. The veto on buffer back pressure follows the "back pressure"
  arrow into the trigger block in the diagram.
* The random trigger's LFSR.
* The link word format and the "forward once" rule for remote triggers.
* All word and record formats, and the register map.
* The descrambler: the LTM9007 randomiser, taken from the ADC's data sheet. The bit slip used for
  word alignment.
* The pattern and playback generators. Only their names are in the diagram.
* A sync edge restarting the time stamp.
* Header and data buffer depths, and all back-pressure thresholds.

The following are not built:

* "Trigger Type 2" and "Trigger Type 3". They are named in the diagram without a description.
* The multi-gigabit transceivers: only their parallel words are ports.
* The IPbus/UDP/Ethernet engine: the top exposes its slave bus.
* The ADCs and analog front end.
* The online filtering on computers.

Not checked against real hardware:

* The ADC bit order on the serial link and the randomiser's exact definition.
* Whether the window buffer's 1536 samples really cover 1 ms at the real dark-count rate over
  threshold. This depends on the threshold.

## Testbenches and simulation

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each testbench does the
following:

* computes its expected values independently of the design;
* has a watchdog;
* ends with a line `TB_RESULT checks=N failures=M`.

`tb_solid_top` is the end-to-end test. It is run by default at reduced size: 4 channels, `LAT`=64,
window buffer 256, derandomiser 512, window ±300. `tb_solid_top_full` runs the same scenario on
`solid_top` with all defaults: 64 channels and ±20000-sample windows.

The scenario feeds every channel scrambled ADC words: pedestal noise, sparse dark counts and, in
chosen channels, neutron-like trains of 25 pulses (the dark-count rate is lowered in the full-size run so that its ±20000-sample events stay small). The expected value of every sample is a hash of
(channel, time stamp), so it is recomputed rather than stored. The testbench then goes through
these steps:

1. It syncs.
2. It configures the plane over IPbus.
3. It injects a neutron train.
4. It sends a trigger on a neighbour link.
5. It switches to the pattern source and fires a random trigger.
6. It switches to the playback source.
7. It turns ZS off and stops reading, so the derandomisers fill and the buffers throttle. Triggers
   in that time are vetoed.
8. It drains everything.

Every word read back is checked:

* channel order and one trailer per channel;
* block counts;
* block alignment;
* every block inside its event's window;
* every sample equal to what was driven at that time stamp.

The testbench fails if any of these mechanisms never happened:

* neutron, random and remote readouts;
* link transmissions;
* forced capture;
* derandomiser back pressure;
* vetoed triggers;
* pattern and playback data;
* window-buffer overwrites;
* any dead-time counter.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/solid_pkg.sv rtl/*.sv tb/tb_solid_top.sv \
          --top-module tb_solid_top -o sim
obj_dir/sim
```

For the full-size run, add `tb/tb_solid_top_full.sv` and use `--top-module tb_solid_top_full`. A
block testbench needs only the package, the block and the modules it instantiates.

Testbenches drive inputs one time unit after the rising clock edge. The simulator is two-state, so
every register that is read is reset.
