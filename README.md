# F1: an eight-channel trigger-matching TDC in SystemVerilog

The F1 is a time-to-digital converter for large particle-physics detectors. Each
of its eight channels stamps the arrival time of a signal edge in bins of 150 ps
(75 ps when channels are paired). Only hits that fall inside a programmable
window around a trigger are kept. It does this with no fast clock at all. A ring
oscillator of 19 delay stages is held by a phase-locked loop against a slow
reference clock (anything from 500 kHz to 40 MHz). Its state at the moment of an
edge gives the fine time. Its period, 5.7 ns, is the only clock the digital core
runs on. A coarse counter of ring periods extends the time stamp to 16 bits,
which is 9.83 µs.

Hits wait in a small buffer per channel. When a trigger arrives, its own time is
measured the same way. Every channel then copies the hits that lie in the window
to its output buffer, behind a header carrying the event number. The chip is
read out over an 8- or 24-bit bus on a separate clock of up to 50 MHz. Three
other modes reuse the same hardware:
- high resolution: two channels per input, half a bin apart;
- pattern ("latch"): four wires per channel, time-stamped as a group;
- common start: plain start-stop measurement without triggers.

This repository holds RTL for the whole chip, a behavioural model of its analog
timing core, and self-checking testbenches for every block.

## Measuring time with a ring

`f1_ring_pll` models the ring: 19 inverting stages of 150 ps each. An odd ring of
inverters oscillates with period 2 × 19 stage delays. It therefore passes
through 38 distinct states per period, one per 150 ps bin. If every odd stage is
re-inverted, the state reads as a thermometer code:
- stages 0..p−1 are high for phase p < 19;
- stages p−19..18 are high for phase p ≥ 19.

`f1_pkg::ring_phase` decodes this code to 0..37, and `phase_taps` is its inverse
(used by testbenches).

`f1_coarse_counter` runs on the ring clock. Besides the period count it keeps
`tbase = 38 × count mod 2^16`, the time of the current period's start in bins. A
complete time stamp is then `tbase + phase`, a plain modulo-2^16 bin count.
Subtracting two stamps gives a time difference in bins, with no special case at
the wrap.

`f1_time_capture` is the only place where the asynchronous world meets the core:
1. The input edge itself clocks a register that freezes the 19 taps and `tbase`,
   and flips a toggle bit.
2. The toggle crosses into the ring clock domain through three flops.
3. Three cycles later, `valid` pulses and `tstamp = tbase_q + ring_phase(taps_q)`
   is presented.

Because of the synchronizer, two edges on one input must be about four ring
periods apart (≈ 23 ns). This matches the specified double pulse resolution of
typically 22 ns. In the model the taps and `tbase` change at the same
instant, so a captured pair is always consistent. In silicon an edge that falls
right at the end of a ring period could pair the new phase with the old coarse
value. The usual cure, a second coarse counter on the opposite half period, is
not modelled here, and neither is metastability of the capture register.

What the model leaves out: the PLL loop is not modelled. The stage delay is fixed
at its locked value, and `locked` rises after four reference-clock edges. The
linearity figures of the real chip (DNL below 0.2 LSB, INL below one bin) are a
property of the analog layout and are not represented.

## The reference time

All reported times are relative to a reference, which can be set in two ways:
- an edge on `ref_reset` (the "reference reset / common start" input), measured
  like a hit;
- a periodic internal reset every N reference-clock cycles (`f1_ref_reset_counter`,
  N set over the setup link, 0 = off).

The reference stamp is kept in `ref_time`. Each channel subtracts it from its
hit stamps (`rel = tstamp − ref_time`). The counters themselves are never
cleared, so a reset costs no time and loses no hit.

A hit that arrives within the three-cycle capture latency before a periodic
reset is taken relative to the new reference. It reads as a small negative time
(up to about −114 bins, i.e. just below 65536).

## Trigger matching

This is the heart of the chip.

**Trigger unit** (`f1_trigger_unit`). A trigger edge is time-stamped like a hit.
Only bits 15:5 are used: 11 bits of 4.8 ns, covering the same 9.83 µs range.
The unit then:
1. computes the trigger time relative to the reference on that scale;
2. subtracts the programmable `trig_offset` (also in 4.8 ns units);
3. stores the resulting window start, with a 6-bit event number, in two 4-deep
   buffers.

A trigger that finds the buffers full is dropped and raises `trigger_lost`. The
event counter still advances, so event numbers stay aligned with the trigger
count outside the chip. The oldest trigger is released when every channel
reports it done.

**Matcher** (`f1_trigger_matcher`, one per channel). The window is
`[start, start + trig_window)` in 4.8 ns units. The matcher waits until the
current time has passed the window end by `MARGIN` = 8 units (38 ns). By then
every hit of the window has left the capture pipeline. It then:
1. writes a header word `{event number[5:0], window start[9:0]}`;
2. walks the hit buffer from its oldest entry:
   - a hit before the window is discarded;
   - a hit inside it is copied to the output buffer;
   - the first hit after the window stops the walk (it may belong to the next
     trigger).

All comparisons are differences modulo 2^11. A difference with bit 10 set counts
as "before the window". The window end must therefore stay within 1024 units
(4.9 µs) of the start.

A hit that waits in the buffer longer than half the range would alias into the
future and block the channel. So, while idle, the matcher drops a head hit that
is more than 4.9 µs old (2.5 µs in high-resolution mode).

**Back-pressure.** A full output buffer stalls its matcher, and the trigger is
not released until all channels are done. Further triggers queue in the 4-deep
buffer, and beyond that are lost. The hit buffer keeps accepting hits while a
matcher stalls. When full, it overwrites its oldest entry and pulses overflow
(sticky on `hit_overflow[c]`). Nothing is ever lost silently between a matched
trigger and the output.

The hit buffer therefore always holds the most recent 16 hits. The rule for
sizing is that 16 hits must cover the trigger latency plus the window. At 6 MHz
per channel that is 2.7 µs of history. At such rates the overflow flag is set
routinely by hits that no trigger wanted.

Because the window lies in the past of the trigger (offset > window + margin is
the usual setting), matching normally starts within a few cycles of the
trigger. The walk moves one word per 5.7 ns cycle.

## The four modes

`cfg.mode` selects the mode for the whole chip (`f1_channel_pair` holds the data
paths). A mode change empties the hit buffers.

| mode | value | channels | bin | data path |
|---|---|---|---|---|
| standard | 0 | 8 | 150 ps | capture → hit buffer (16) → matcher → output buffer (8) |
| high resolution | 1 | 4 | 75 ps | pair sum → joined hit buffer (32) → matcher of the even channel |
| latch | 2 | 8 × 4 wires | 5.7 ns | latch register → hit buffer → matcher |
| common start | 3 | 8 | 150 ps | capture → output buffer directly |

**High resolution.** Input 0 of each even channel also reaches the odd channel
through `f1_half_lsb_delay`, a 75 ps delay (a behavioural model of a delay
element). Both channels measure the same edge. If the edge lies at x bins, they
read floor(x) and floor(x + ½), and the sum of the two is floor(2x): the time in
75 ps units. The pair adds its two relative times and writes the sum to the
pair's hit buffer. The two 16-word halves then form one 32-word buffer, and only
the even channel reports. The matcher compares bits 15:6 of such words. These
hold the same 4.8 ns scale, modulo 2^10.

**Latch (pattern) mode.** Each channel's four inputs feed `f1_wire_latch`:
1. The first rising edge opens a hold interval of `latch_hold` core cycles.
2. Edges on any wire during the interval are collected.
3. At its end the pattern is written to the hit buffer as
   `{current time[15:4], pattern[3:0]}`.

The time is the moment of transfer, with one-period resolution. The wires are
sampled by the core clock, so a pulse shorter than 5.7 ns can be missed.

**Common start.** `ref_reset` acts as the start input. Every hit's time relative
to it goes straight to the output buffer, with no hit buffer and no matching;
trigger edges are ignored. If the output buffer is full, the measurement is lost
and `data_lost` is set.

## Words and readout

| word | bits |
|---|---|
| hit buffer | 16-bit time (standard: bins; high res.: 75 ps units; latch: time[15:4] + pattern) |
| output buffer (`obuf_word_t`) | `{hdr, payload[15:0]}`; header payload = `{event[5:0], start[9:0]}` |
| readout (`ro_word_t`) | `{chan[2:0], hdr, 4'b0, payload[15:0]}` = 24 bits |

`f1_readout_arbiter` takes one word per core cycle from the non-empty output
buffers, round robin. It writes them into `f1_async_fifo`, a 16 × 24
dual-clock FIFO with Gray-coded pointers, into the readout clock domain.

`f1_io_interface` presents one word per `rd_clk` cycle while `rd_en` is high,
with `data_valid` one cycle later. In 8-bit mode (`cfg.bus8`) each word goes out
as three bytes, most significant first, on `data_out[7:0]`. `event_number` is
the event of the word: a header's own number, or for a hit the last header seen
on that channel.

## Configuration

The chip is set up over a three-wire serial link at up to 10 Mbit/s. While
`setup_sen` is high, bits are shifted in on rising `setup_sclk`, MSB first; the
falling `setup_sen` ends the frame. A frame is 24 bits, `{address[7:0],
data[15:0]}`. The link is oversampled by the core clock, so `setup_sclk` must
stay below about a sixth of the core clock (29 MHz).

| address | register | reset |
|---|---|---|
| 0 | `mode[1:0]`, `bus8` (bit 2) | standard, 24-bit |
| 1 | channel enable [7:0] | all on |
| 2 | trigger offset [10:0], 4.8 ns units | 64 |
| 3 | trigger window [10:0], 4.8 ns units | 32 |
| 4 | latch hold time [4:0], core cycles | 10 |
| 5 | internal reset period [15:0], reference clocks | 0 (off) |
| 6 | edge select [7:0], per channel: 1 = trailing edges | 0 (leading) |
| 8–15 | threshold DAC registers 0–7, [7:0] | 0 |

A write to a DAC register loads it into an AD8842 eight-channel DAC through
`f1_dac_interface`:
- a 12-bit word {DAC address = register + 1, value}, MSB first on
  `dac_sdi`/`dac_clk`;
- then a `dac_ld` pulse;
- `dac_clk` = core clock / (2 × `DAC_DIV`) = core clock / 18, about 9.7 MHz.

Writes that arrive while a load is in progress are queued per register.

## Top level (`f1_tdc`)

| pin | dir | meaning |
|---|---|---|
| `rst_n` | in | asynchronous reset of both clock domains |
| `ref_clk` | in | reference clock for the PLL (38.88 MHz in the testbench) |
| `ref_reset`, `trigger` | in | reference reset / common start, trigger (rising edges) |
| `hits[7:0][3:0]` | in | channel inputs; wire 0 in all modes, wires 0–3 in latch mode |
| `setup_sclk/sdata/sen` | in | serial configuration |
| `rd_clk`, `rd_en` | in | readout clock and reader-ready |
| `data_out[23:0]`, `data_valid`, `event_number[5:0]` | out | readout |
| `dac_clk`, `dac_sdi`, `dac_ld` | out | AD8842 |
| `pll_locked`, `core_clk` | out | PLL status and ring clock (observation) |
| `hit_overflow[7:0]`, `trigger_lost`, `data_lost` | out | sticky status |

Parameters (defaults = the chip's sizes):
- `BIN_PS` = 150
- `HB_DEPTH` = 16
- `OB_DEPTH` = 8
- `TB_DEPTH` = 4
- `IF_DEPTH` = 16
- `MARGIN` = 8
- `DAC_DIV` = 9

The input receivers (LVDS/TTL comparators) are analog and are not part of the
RTL; `hits`, `trigger` and `ref_reset` are their logic outputs.

## Where this RTL goes beyond or departs from the published description

The published description gives the block structure, the sizes and the mode
behaviour. The following are this design's own choices or limits:
- Leading or trailing edges are selected per channel by a register bit that
  inverts the inputs before the time capture. Both edges of one pulse cannot
  be measured at once. Changing the bit while an input is high creates one
  edge.
- The trigger time is used at 4.8 ns (bits 15:5), as the 11-bit trigger path
  implies. Window and offset are in the same unit.
- Header format, readout word layout, the walk order of the matcher, `MARGIN`,
  the stale-hit rule and the overwrite-oldest rule of the hit buffer are not
  published; they are chosen here.
- The setup frame and register map, the reset values and the DAC clock rate are
  chosen here.
- The data bus and event number are outputs only.
- The common-start input is the reference reset input.
- In latch mode the time stamp is taken when the pattern is transferred, not
  at the first edge of the group.
- The periodic internal reset is this design's reading of the "reference clock
  reset counter".
- The ring and PLL and the half-bin delay are behavioural models. The PLL loop
  and the analog linearity are not modelled.
- Matching windows must stay below 4.9 µs (2.5 µs at 75 ps).
- A hit within three core cycles before a periodic reset reads as a small
  negative time.

## Verification

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one:
- computes expected values independently (bin grid arithmetic, reference models
  of FIFOs and frames);
- checks cycle latencies where they are specified;
- ends with a `TB_RESULT checks=… failures=…` line.

Highlights:
- `tb_f1_time_capture`: random edges on the ring model, exact bin differences
  and the 3–4 cycle latency.
- `tb_f1_trigger_matcher`: random hits and windows against a reference model,
  including stalls.
- `tb_f1_channel_pair`: all four modes. High resolution is checked bit-exact
  against floor(2t/75 ps).
- `tb_f1_tdc`: end to end at default parameters, using only the chip's pins.
  It runs these phases:
  1. standard-mode matching on all channels;
  2. stall with full output buffers, full interface FIFO and lost triggers;
  3. hit-buffer overflow;
  4. 8-bit readout;
  5. high resolution;
  6. latch patterns;
  7. common start;
  8. periodic internal reset;
  9. DAC loads;
  10. trailing-edge measurement.

  Each mechanism is counted and must occur at least once. It simulates
  about 100 µs in under a second.
- `tb_f1_rate`: the chip at default sizes under the heaviest load foreseen for
  it. Each channel takes 6 MHz of hits, with triggers at 100 kHz, 1 µs latency
  and a 100 ns window. For every trigger and channel, exactly the hits of the
  reported window must come out, and nothing may be lost.

To run a testbench with Verilator (5.x; `--timing` is needed for the ring
model):

```
verilator --binary --timing --assert -Irtl -Itb rtl/f1_pkg.sv tb/tb_f1_tdc.sv \
          --top-module tb_f1_tdc -Mdir obj_tb_f1_tdc -o sim
./obj_tb_f1_tdc/sim
```

All synchronous logic is synthesizable. The ring and the half-bin delay are the
only behavioural code; read without delays, the ring is the combinational
inverter loop it is in silicon.

## Files

- `rtl/f1_pkg.sv`: sizes, modes, word types, configuration record, ring decode.
- `rtl/f1_ring_pll.sv`, `rtl/f1_half_lsb_delay.sv`: behavioural timing core.
- `rtl/f1_coarse_counter.sv`, `rtl/f1_time_capture.sv`,
  `rtl/f1_ref_reset_counter.sv`: time base.
- `rtl/f1_wire_latch.sv`, `rtl/f1_hit_buffer.sv`, `rtl/f1_trigger_unit.sv`,
  `rtl/f1_trigger_matcher.sv`, `rtl/f1_fifo.sv`, `rtl/f1_channel_pair.sv`:
  channels.
- `rtl/f1_readout_arbiter.sv`, `rtl/f1_async_fifo.sv`, `rtl/f1_io_interface.sv`:
  readout.
- `rtl/f1_setup_interface.sv`, `rtl/f1_dac_interface.sv`: configuration and
  thresholds.
- `rtl/f1_tdc.sv`: top level.
- `tb/tb_*.sv`: one testbench per module.
