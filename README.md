# Four-chain merged-delay-line TDC with ones-counter encoding and online code-density calibration

A time-to-digital converter (TDC) in an FPGA measures when a hit arrives in two
parts: a coarse counter gives the number of the system-clock edge, and a
tapped delay line (TDL) interpolates within one clock period. The TDL is a
chain of carry cells. The hit ripples along it, and at every clock edge the
flip-flops next to the cells record how far it has got.

On recent 20 nm FPGAs this simple scheme has two weak points:

* **Bubbles.** The flip-flops do not all see the clock and the carry at the
  same skew, so the latched word is not a clean thermometer code: a 0 can
  appear below a 1. An encoder that looks for the first 0→1 transition
  discards such taps and loses their bins.
* **Wide bins at LAB boundaries.** A carry chain crosses from one logic array
  block (LAB, 10 ALMs = 20 carry cells) into the next every 20 taps. The
  crossing is slow, so one bin in twenty is several times wider than the rest,
  and that spoils the precision.

This design answers both:

1. **Ones-counter encoding.** The fine code is the *number of ones* in the
   latched word, not the position of a transition. A tap latched out of order
   still adds exactly one, so every delay element keeps its own bin.
2. **Four parallel chains per channel.** The same hit drives four 280-tap
   chains at slightly different places. Counting ones over all 4 × 280 = 1120
   bits gives a merged line whose bins are about a quarter as wide. The slow
   LAB crossing of one chain is then split up by taps of the other three.
   Each chain is longer than the 2 ns clock period, so the merged line always
   covers a full period.

The bins are still uneven, so every code is turned into a time by a
calibration table. The table is built online by the **code-density method**.
Hits that are unrelated to the clock fall evenly over the period, so the share
of hits that give code *k* is the width of bin *k*. The design histograms the
codes, rebuilds the table from the histogram, clears it and starts again.

The default configuration is two identical channels with a shared coarse
counter and a 500 MHz system clock. A time interval is the difference of two
timestamps. One channel accepts one hit every two clocks, which is
250 M hits/s.

## Data path of one channel

```
hit ──┬─► tdl_chain #0 (280 taps + flip-flops) ─┐ 280
      ├─► tdl_chain #1 ─────────────────────────┤ 280
      ├─► tdl_chain #2 ─────────────────────────┤ 280     ┌──────────────┐
      └─► tdl_chain #3 ─────────────────────────┴────────►│ ones_counter │ code, valid, tag
                                                  coarse ►│ _encoder     ├──────────┐
coarse_counter ──────────────────────────────────────────►└──────────────┘          ▼
     │                                                                ┌────────────────────┐
     │                                                                │ online_calibration │ fine, tag
     │                                                                └────────┬───────────┘
     └── (tag carried along with the code) ─────────────────────────► timestamp_merge ──► ts
```

| Stage | Module | Latency |
|---|---|---|
| Delay line and tap flip-flops | `tdl_chain` (behavioural model) | latches on each rising edge |
| Ones count and hit detection | `ones_counter_encoder` | 7 clocks |
| Code → fine time | `online_calibration` | 1 clock |
| Coarse and fine combined | `timestamp_merge` | 1 clock |

A timestamp appears 9 clocks after the edge that latched the hit. The coarse
count of that edge travels with the code as a tag, so the timestamp names the
right edge whatever the pipeline depth. `tdc_channel` wires one channel.
`tdc_top` holds two channels and the shared `coarse_counter`.

## Timing convention and timestamp format

The ones count is the number of taps the hit has passed when the clock edge
arrives. It therefore grows with the time the hit has been *travelling*: a
larger code means an earlier hit. The calibrated fine time `fine` is that
travel time as a fraction of the clock period. It has `FINE_W = 12` fractional
bits, so 4096 is one period and one LSB is 0.49 ps. The timestamp is

```
ts = coarse * 2^12 - fine          (44 bits: 32 integer + 12 fractional clock periods)
```

The travel time is counted from the earliest possible code, not from the hit
pin. Each channel's timestamps therefore carry a constant offset, made up of
the entry LUT and routing delay. This offset cancels in the difference of two
hits on the same channel. Between two channels it is a fixed offset, measured
once with a zero interval.

## Hit detection and the 250 M hits/s limit

A hit is new in a sample when the first tap of any chain is 1 and none was 1
in the previous sample. The code is taken from that sample. Two rules follow
for the hit signal:

* It must still be high at the latching edge. The ones count is only the
  travel distance while the chain is filling from the front.
* It must be low at one edge before the next hit.

So a channel takes at most one hit every two clocks: 250 M hits/s at
500 MHz. The encoder and the calibration themselves accept one code per
clock. The test bench's max-rate burst keeps the hit short (it falls 300 ps
after the latching edge), so the previous pulse has left the chain before the
next one is latched.

## Online calibration in detail

`online_calibration` holds two memories of `N_CODES = 1121` entries (codes
0…1120):

* a **histogram**: 19-bit counts, one read port and one write port;
* a **table**: 13-bit fine times, one port for writing and one for lookup.

It cycles through four states:

| State | Duration | Action |
|---|---|---|
| CLEAR | 1121 clocks after reset | zero the histogram |
| ACCUM | until 2^18 hits | histogram read-modify-write in two stages; a code equal to the one being written is forwarded, so back-to-back equal codes count correctly |
| DRAIN | 1 clock | let the last write land |
| SWEEP | 1121 clocks | one code per clock: table[k] = ((2·Σ_{j<k} h[j] + h[k]) · 2^12) >> 19, i.e. the centre of bin k; the bin is cleared |

Notes on the behaviour:

* Every hit is converted through the table, whatever the state. Hits that
  arrive outside ACCUM are not counted.
* The table is rewritten in place, one entry at a time. A lookup always sees
  a whole old or a whole new entry.
* `out_cal` and `ts_cal` stay 0 until the first table exists.
* `table_done` pulses at the end of every rebuild.

**Why 2^18 hits per update.** The table error is statistical: a cumulative
share estimated from N hits has an RMS error of about T/√(6N) over the
period. With N = 2^18 that is about 1.6 ps per channel, well below the
5.45 ps precision reported for the hardware. With 2^14 hits it would be
6.4 ps, and the simulated interval RMS rises to about 8 ps.

## The delay-line model

`tdl_chain` is a simulation model of the carry chain and its flip-flops, not
logic to synthesize. On a real FPGA this structure is placed carry cells with
dedicated routing.

* **Entry.** The hit enters through a LUT, modelled as 150 ps plus a
  per-chain placement offset. In `tdc_channel` the four chains are placed
  41 ps apart, about a quarter of a LAB's delay.
* **Carry cells.** Each cell's delay is spread pseudo-randomly over 2.6 to
  10.4 ps (6.5 ps ± 60 %). Entering each new LAB adds 40 ps.
* **Flip-flops.** Each one gets an extra skew of 0.1 to 8.1 ps, which
  produces bubbles.

A chain is about 2.5 ns long, more than the 2 ns period. The model does not
use one delayed net per tap. It keeps the recent hit edges, and at each clock
edge it computes the level flip-flop *i* latches: the hit level at
t − arrival_i. That is exact for a pure-delay line and keeps a 2240-tap,
two-channel simulation fast. The model has **no jitter**. The simulated
interval RMS of about 2.1–2.7 ps is therefore quantisation and calibration
error only. The hardware's 5.45 ps includes clock and LUT jitter that the
model leaves out.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| clock period | 2000 ps (500 MHz) | design |
| chains per channel `N_CHAINS` / `NCHAINS` | 4 | design |
| taps per chain `TAPS_PER_CHAIN` / `NTAPS` | 280 | design |
| taps per LAB | 20 | design |
| channels `NCH` | 2 | design (two identical channels) |
| encoder group `GROUP` | 20 bits | this implementation |
| fine bits `FINE_W` | 12 | this implementation |
| coarse bits `COARSE_W` | 32 | this implementation |
| hits per table update `2^CAL_LOG2` | 2^18 | this implementation |
| delay-line model delays | see above | this implementation |

The shared constants are in `rtl/tdc_pkg.sv`. `tdc_top` takes `NCH`,
`NCHAINS`, `NTAPS` and `CAL_LOG2_P`. `NCHAINS = 1` gives the single-chain
channel. `tb/tdc_single_chain_tb.sv` runs it with 2^16 hits per table
update. Its code-density histogram shows bins of about 46 ps at codes 20, 40,
60 and so on, against about 6 ps elsewhere. Its zero-interval RMS is about
10.7 ps, several times worse than the four-chain channel.

## Where this RTL departs from, or goes beyond, the described design

* The insides of the ones counter, the calibration and the timestamp merge
  are not specified there. The pipelining, memories, update schedule,
  bin-centre rule, hit-detection rule and all widths are choices made here.
* The flip-flop bank is part of the behavioural delay-line model, not
  separate RTL. In the FPGA these flip-flops belong to the ALMs of the chain.
* The LUT configuration of the carry cells (the masks used to set the ALMs
  into arithmetic mode) is not modelled. Each cell is a pure delay.
* A rising hit propagates as ones. The hit polarity, reset behaviour and
  shared coarse counter are assumptions.
* Clock generation, hit-input buffering and the readout of timestamps to a
  host are outside this RTL. `clk` is a port.

## Files

| File | Content |
|---|---|
| `rtl/tdc_pkg.sv` | shared constants |
| `rtl/tdl_chain.sv` | behavioural delay line with its flip-flops |
| `rtl/ones_counter_encoder.sv` | pipelined ones counter and hit detection |
| `rtl/online_calibration.sv` | code-density histogram, table rebuild, lookup |
| `rtl/timestamp_merge.sv` | coarse − fine timestamp |
| `rtl/coarse_counter.sv` | free-running coarse counter |
| `rtl/tdc_channel.sv` | one four-chain channel |
| `rtl/tdc_top.sv` | two channels and the coarse counter |
| `tb/*_tb.sv` | one self-checking bench per block |
| `tb/tdc_single_chain_tb.sv` | single-chain comparison: wide LAB-boundary bins and worse precision |
| `tb/tdc_top_bench.sv` | end-to-end bench used by `tdc_top_tb` (2^14 hits per update) and `tdc_top_full_tb` (all defaults) |

The end-to-end bench runs in three phases:

1. It calibrates both channels with random-phase hits.
2. It sends a 200-hit burst at one hit every two clocks.
3. It measures intervals of 0, 3.83 ps, 1 ns, 10 ns, 25 ns and 50 ns, 150
   pairs each.

It checks one timestamp per hit, the interval RMS and the interval linearity.
It also requires that a table rebuild, a bubble and a conversion during a
rebuild were each seen at least once.

## Simulating

Every bench prints `TB_RESULT checks=N failures=M` and ends with `$finish`.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tdc_pkg.sv tb/tdc_top_tb.sv --top-module tdc_top_tb
./obj_dir/Vtdc_top_tb
```

Replace `tdc_top_tb` with any other bench name. On a typical machine,
`tdc_top_tb` runs in a few seconds after a build of about 15 s. The full-size
`tdc_top_full_tb` calibrates with 2^18 hits per channel and runs in under a
minute. All files use `` `timescale 1ps/1fs ``, because the delay-line model
works in femtoseconds.
