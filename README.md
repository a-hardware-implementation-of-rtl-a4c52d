# On-line hit finding, triggering and lossless compression for a LAr-TPC wire read-out board

A liquid-argon TPC records the charge drifting onto thousands of wires as
continuous waveforms: every wire is digitized at 2.5 MHz (one *t-sample* every
400 ns) with 10 bits.  Storing everything is expensive, and most of the time
most wires see only noise.  This RTL implements the digital part of a
32-wire read-out board that attacks both problems on line:

* a **hit finder** on every wire (the *double-rebinning sliding-window*, DR-slw,
  algorithm) that compares a short running average of the signal with a long
  one and raises a PEAK line when the difference stays above a threshold;
* a **majority trigger** that turns the PEAK lines into a board-level Global
  Trigger Output (GTO), usable to trigger on isolated, low-energy events using
  the wire signals alone, and to select regions of interest;
* **lossless difference compression** of the stored waveforms (up to a factor
  4 less data to read out);
* **multi-event circular buffers** that record continuously, freeze on a
  trigger and switch to a fresh buffer, so triggers cause no dead time until
  the readout falls behind.

The hit finder is packaged as a 16-channel chip, `superdaedalus`; the board,
`arianna_board`, uses two of them.  Everything is plain synthesizable
SystemVerilog with no vendor primitives; the buffers are written as arrays and
map to RAM.

## Data flow

```
                         +-------------------- arianna_board ---------------------+
 stream 0 (ch 0..15) ----+--> superdaedalus #0 --PEAK[15:0]--+                    |
   10 bit @ 40 MHz       |                                   +--> board_trigger --+--> GTO
 stream 1 (ch 16..31) ---+--> superdaedalus #1 --PEAK[31:16]-+     (majority,     |
   10 bit @ 40 MHz       |                                   ext ->  source sel)  |
 sync (channel 0) -------+                                              | trigger |
                         |--> data_compressor #0 --> meb lane 0 <-------+         |
                         |--> data_compressor #1 --> meb lane 1 <-------+         |
                         |                     readout_mux --> DAQ stream         |
                         +--------------------------------------------------------+
```

The analog board multiplexes 16 wires onto each 10-bit stream, one channel per
40 MHz clock, so a stream carries one full t-sample of its 16 wires every 16
clocks.  `sync_in` is high for one clock together with the sample of channel 0
(both streams are aligned).  Each stream goes, in parallel, to a hit-finding
chip and to a compressor that feeds one lane of event buffers.

## The hit finder (DR-slw)

Wire signals carry two kinds of noise: a fast component of a few ADC counts
peak to peak with periods below ~10 t-samples, and a slow baseline wander of
~10 counts over ~1500 t-samples.  A real hit from a minimum-ionizing track is
10-30 counts high and ~25 t-samples long.  The hit finder (`sd_rebinning`, one
per wire) therefore averages twice:

```
Qshort(t) = (Q(t) + Q(t-1) + ... + Q(t-7))   / 8      smooths the fast noise
Qlong(t)  = (Q(t) + Q(t-1) + ... + Q(t-127)) / 128    follows the baseline
S(t)      = Qshort(t) - Qlong(t)          (negated when polarity = 1)
```

and a wire *counts* in a t-sample when `S >= Qthr`.  PEAK goes high at the
third consecutive counting t-sample and drops at the first t-sample that does
not count; the persistence requirement suppresses single-sample spikes.

Implementation details that matter when reading the waveforms:

* Both sums are kept as running sums: each new sample is added and the sample
  leaving the window (t-8 or t-128) is subtracted.  The last 128 samples sit in
  a circular buffer with one write and two read ports (t-128 at the write
  pointer, t-8 eight entries behind it), so the update costs two adders per
  wire and no multiplier.
* The averages are the sums shifted right by 3 and 7 bits, i.e. truncated to
  whole ADC counts, and S is a 12-bit signed number.
* After reset the history counts as zero until it is filled, so Qlong ramps up
  from 0 over the first 128 t-samples and S is large and positive meanwhile:
  every wire shows PEAK during that start-up.  Use the external trigger (or
  ignore GTO) for the first 128 t-samples after reset.
* `polarity = 1` flips the sign of S, so the finder fires on falling signals;
  this is meant for induction wires, whose bipolar signals have an undershoot.
* Each wire's unit updates only on its own strobe, once per t-sample; its
  registered outputs change in the clock after the strobe.

Typical settings from running such a detector: Qthr = 5 or 6 ADC counts gives
near-full single-hit efficiency with a fake rate of order 1e-3 per 1024
t-samples.

## From PEAKs to a trigger: stretching and majority

A track crossing many wires at an angle produces PEAKs on neighbouring wires at
different times, so a plain coincidence would miss it.  The last stage of each
chip (`sd_trigger_logic`) therefore *stretches* every PEAK: a per-wire counter
is reloaded while PEAK is high and counts down afterwards; the stretched line is
high while the counter is non-zero.  The stretch is 25, 50, 75 or 125 us
(1000, 2000, 3000 or 5000 clocks at 40 MHz) after the last clock with PEAK
high, and the chip's `PEAK<15:0>` outputs are the stretched lines.

On the board (`board_trigger`), the 32 stretched lines form two groups of 16
(one per chip, about 5 cm of wire plane each).  In each group the number of
high lines is compared with the majority M (`count >= M`), and the two
decisions are ORed into GTO, registered.  Values of M from 3 (isolated
low-energy deposits) to 15 (long tracks) are sensible.  The trigger that
freezes the buffers is the rising edge of the external trigger, of GTO, or of
either (`trig_src`), so a GTO that stays high for the stretch time freezes one
event only.  Coincidences or vetoes between boards are made outside, from the
boards' GTO outputs.

## Buffer word formats

Each compressor (`data_compressor`) turns its 16-wire stream into 16-bit words.
With `d = Q(t) - Q(t-1)` per wire:

| mode | words per t-sample (16 wires) | layout |
|---|---|---|
| raw | 16 | `[15:10]` DAEDALUS field (`[10]` = stretched PEAK of the wire, `[15:11]` = 0), `[9:0]` sample |
| compression 4 | 4 .. 16 | per group of 4 wires: one word `{d(N)[3:0], d(N+1)[3:0], d(N+2)[3:0], d(N+3)[3:0]}` if all `|d| <= 7`, otherwise four *overflow* words |
| full difference | 16 | `{6'b100000, d[9:0]}` for every wire, identical to an overflow word |
| compression 2 | 8 | `{d(N)[7:0], d(N+1)[7:0]}` for wires N, N+1 |

Differences are two's complement.  In compression 4 a nibble can only be
-7..+7, so `1000` in bits 15:12 cannot start a packed word and marks an
overflow word; a decoder tells the two apart by that nibble alone.  The 10-bit
difference is taken modulo 1024, which is lossless: the decoder adds it to the
previous sample modulo 1024.  Compression 2 keeps only 8 bits of the
difference and is lossless only while `|d| <= 127`, which holds for physical
signals but is not checked.  The reference for the first difference after reset
is 0.  Groups are wires 4k..4k+3 of a stream, and the mode is latched at
channel 0 so a t-sample is never split between two formats.

Decoding a t-sample therefore needs the previous t-sample of the same wires.
The first t-sample of a frozen buffer refers to a t-sample that is no longer
stored; a readout that needs absolute values must use raw mode, or the
receiving side must keep the reference (the testbench decodes with the
generated samples).

An overflow group yields four words at once.  They go through an 8-entry FIFO
that drains one word per clock; since at most four words are produced per four
clocks, the output never exceeds one word per clock and needs no
back-pressure.  `out_first` flags the first word of each t-sample.

## Multi-event buffers (MEB)

Each lane has `NBUF = 4` buffers.  One is *active* and written as a circular
buffer of `LEN = 64 << meb_len_sel` t-samples (64 ... 4096, i.e. 25.6 us ...
1.64 ms of drift).  The length of a buffer is latched when writing into it
starts.  Every t-sample occupies a *slot* of up to 16 words plus a word count;
the readout sends only the words that were written, which is where compression
shortens the readout (memory per lane: 4 x 4096 x 16 words of 16 bits).

When a trigger is taken, the active buffer is frozen at the end of the
t-sample being written (at the next `out_first` word), and writing continues
in the next buffer of the ring without losing a sample.  Frozen buffers are
read out oldest first, each from its oldest t-sample to the newest; after the
last word the buffer is released.  A buffer that did not fill before it was
frozen is read from its first t-sample.  One buffer is always being written, so
at most three events wait for readout; a trigger arriving when none is free is
not taken and `trig_lost` pulses.

The board takes a trigger only if both lanes have a free buffer, so both lanes
always hold the same events.  `readout_mux` sends, for each event, all words of
lane 0 and then all words of lane 1 on one 16-bit valid/ready stream;
`daq_lane` tells which lane a word comes from and `daq_last` marks the last
word of the event.  The stream runs at up to one word per clock.

## Programming

Each chip has a small parameter register (`sd_param_regs`), written by putting
the address on `addr`, the value on `thrs`, `rwb = 0` and `strobe = 1` for one
clock while the chip's `csb` is low; with `rwb = 1` the addressed register
appears on `rdata`.

| addr | register | reset |
|---|---|---|
| 0 | threshold Qthr, 8 bit, ADC counts | 6 |
| 1 | polarity, bit 0 (1 = falling signals) | 0 |
| 2 | stretch select, bits 1:0 (25/50/75/125 us) | 1 (50 us) |

The board settings are plain input ports: `comp_mode` (0 raw, 1 compression 4,
2 full difference, 3 compression 2), `meb_len_sel` (0..6), `majority` (M),
`trig_src` (0 external, 1 GTO, 2 either) and `ext_trig`.

## What follows the original description and what is this design's own

Taken from the original description of the system: the 16-channel chip
structure (control logic, 1:16 demultiplexer, 16 rebinning units, stretching
trigger logic, parameter register with RWB/STROBE/ADDR/THRS pins), the 8- and
128-sample sliding windows with add-new/subtract-old update, the threshold
and the 3-sample persistence, the polarity parameter, the four stretch lengths,
the two groups of 16 with OR of the majorities, the GTO, the four buffer
formats with their bit layouts and the +-7 rule, the seven buffer lengths from
64 to 4096 t-samples, and freezing the active buffer on a trigger with release
after readout.

Choices made here where the description is silent: the sync convention; the
register map, widths and reset values; truncating averages and zero-filled
start-up; `S >= Qthr` (the prose says "above", the formula `>=`); the
stretch measured from the end of PEAK and retriggerable; the second stretch
length read as 50 us (the source list repeats 25 us); two's complement
differences; the content of the raw DAEDALUS field; the slot-per-t-sample
buffer layout; four buffers; freezing at a t-sample boundary; dropping
triggers when no buffer is free; taking a trigger only if both lanes can; the
trigger-source select and edge detection; the lane order of the readout; the
reading of the 21-bit serial link as two 10-bit streams plus sync.

Not included: the analog front end (amplifiers, multiplexers, ADCs) and the
decoupling board, which have no digital function here, and the DAQ, which
sits behind the readout port; inter-board coincidence and veto logic, which
lives outside the board.

## Files

| file | content |
|---|---|
| `rtl/sd_pkg.sv` | shared constants and types (formats, register addresses, stretch table) |
| `rtl/sd_control_logic.sv` | channel counter aligned by sync, chip select |
| `rtl/sd_demux.sv` | 1:16 demultiplexer |
| `rtl/sd_rebinning.sv` | DR-slw hit finder of one wire |
| `rtl/sd_trigger_logic.sv` | PEAK stretching |
| `rtl/sd_param_regs.sv` | chip parameter register |
| `rtl/superdaedalus.sv` | 16-channel hit-finding chip |
| `rtl/data_compressor.sv` | four buffer formats |
| `rtl/meb.sv` | multi-event circular buffers of one lane |
| `rtl/board_trigger.sv` | majority, GTO, trigger source |
| `rtl/readout_mux.sv` | merges the two lanes into the DAQ stream |
| `rtl/arianna_board.sv` | the 32-channel board (top) |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_icarino_view.sv` | three boards as one 96-wire view with view-level triggers |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself
(each has a watchdog).  With Verilator 5:

```
verilator --binary --timing -Irtl -y rtl rtl/sd_pkg.sv tb/tb_arianna_board.sv \
          --top-module tb_arianna_board -o sim && ./obj_dir/sim
```

and the same with any other `tb/tb_*.sv`.  The testbenches compare against
models written independently in the testbench: the hit-finder tests recompute
both averages by direct summation over the stored history; the compressor and
board tests decode every word back to samples with a decoder written from the
word layouts and compare with the generated input.

`tb_arianna_board` runs the board at its default sizes (4 buffers of 4096
t-samples per lane): it records a full 4096-t-sample event triggered by GTO
from an inclined track, a partly filled buffer, raw, full-difference and
compression-2 events, a GTO event from a negative-going track after switching
polarity, and a DAQ stall in which the fourth trigger is lost.  It counts each
of these mechanisms and fails if one does not occur.  It takes well under a
second.

`tb_icarino_view` puts three boards side by side as one 96-wire view and forms
the view-level triggers from their GTOs, as external logic would: a muon
trigger (first and third board) and a low-energy trigger (central board, vetoed
when both lateral boards fire).  It checks that tracks parallel to the wire
planes fire all three boards at M = 8, 12 and 15, that a 45-degree track fires
at M = 15 with 50 us stretching, that small deposits in the central board fire
the low-energy trigger at (Qthr, M) = (6, 4) and (5, 3) but not the muon
trigger, that bipolar induction signals fire with polarity 1 at Qthr 5 and
M = 6, and that 4096 t-samples of noise fire nothing at Qthr 6.

## How far to trust it

All modules pass Verilator lint and the Slang front end, and each testbench
was shown to fail on a deliberately broken copy of its module.  The design has
not been run against recorded detector data, so efficiencies and fake rates
are not reproduced here; the timing closure of the 40 MHz clock has not been
studied; and the choices listed above were made without the original firmware
at hand, so bit-level compatibility with existing data files is not claimed.
