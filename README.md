# A 50 MS/s time-interleaved ADC built from FPGA inputs and carry-chain TDCs

This design digitises an analogue detector signal without an ADC chip. It uses
only two resistors, two differential FPGA inputs and logic. It is meant for PET
readout, where a scintillator and SiPM pulse must be sampled and its energy
summed on many channels at low cost.

The method turns voltage into time. A 25 MHz clock driven through a series
resistor into the capacitance of an FPGA pad becomes a quasi-triangular ramp.
An LVDS input used as a comparator sets the analogue input against that ramp.
Its output is a pulse once per 40 ns ramp period, and the pulse is longer when
the input is higher. A carry-chain time-to-digital converter (TDC) measures the
pulse width to about 7.8 ps, so the width is the sample.

One ramp gives 25 MS/s. A second ramp, driven by a clock 180 degrees later,
samples 20 ns after the first. Interleaving the two channels gives 50 MS/s.

The RTL here covers the logic of one such converter:
- the two TDCs, with their online calibration;
- the width calculation and the interleaving of the two channels;
- the non-linearity and channel-matching correction;
- the energy integration.

The analogue parts and FPGA primitives stay outside the RTL: the PLL, the
resistors, the comparators and the carry chains. For simulation, a
behavioural model of them is in `tb/afe_tdl_model.sv`.

## Signal chain

```
            ramp 0 deg (25 MHz through R) ──┐
 analogue in ───────────────────────────────┤LVDS cmp├─ carry chain ─┐ tdl_taps0
            ramp 180 deg (25 MHz through R)─┤LVDS cmp├─ carry chain ─┤ tdl_taps1
                                                                     │
 ┌──────────────── tiadc_top (250 MHz) ─────────────────────────────┴──────────┐
 │ tdc ×2 ──► width_calc ──► adc_correction ──────────► energy_integrator      │
 │ (edges,     (widths,       (4096-entry LUT,          (threshold, pedestal,  │
 │  calib.)     merge 2→1)     gain/offset per channel)   16-sample sum)       │
 └──────────────────────────────────────────────────────────────────────────────┘
       hit0/hit1       width_out            sample_out               energy
```

| file | role |
|---|---|
| `rtl/tiadc_pkg.sv` | widths, stream structs (`tdc_hit_t`, `width_smp_t`, `sample_t`) |
| `rtl/tdc.sv` | edge detection, tap encoding, coarse counter, timestamp |
| `rtl/tdc_calib.sv` | bin-by-bin (code density) calibration table |
| `rtl/width_calc.sv` | rise/fall pairing, 2-to-1 interleaving |
| `rtl/adc_correction.sv` | non-linearity table, per-channel gain and offset |
| `rtl/energy_integrator.sv` | pulse energy |
| `rtl/tiadc_top.sv` | the converter |

## From voltage to time (outside the RTL)

The numbers below set the sizes in the RTL. The sampling clock is 25 MHz, so a
ramp period is 40 ns and a pulse lasts from 0 to 40 ns. The series resistor is
90 Ω. The clock swing is 3.3 V, and the usable input range is about 0.8 V to
2.5 V.

The TDC clock is 250 MHz, so one clock period is 4 ns. After calibration, the
fine time is 9 bits per clock period, so one LSB is 4 ns / 512 = 7.8125 ps. A
full 40 ns pulse is 5120 LSB, which is why widths are 13 bits.

With an ideal triangle from 0 to 3.3 V, the usable range maps to pulses of
about 9.7 ns to 30.3 ns. That is 1241 to 3879 LSB, inside the 4096 entries of
the correction table. The real ramp is an RC curve, not a triangle. The
correction table removes that curvature.

## The TDC (`tdc.sv`)

The comparator output runs down a chain of `TAPS` carry cells. On every clock
edge, capture flip-flops register all taps. `taps[0]` is the tap nearest the
input, so the snapshot shows the signal at times further and further back.

The TDC compares `taps[0]` with its value one clock earlier. If they differ, an
edge happened during the last clock period. The edge then sits where the
snapshot first differs from `taps[0]`. The **raw bin** is that tap index minus
one, which is the number of cells the new level has passed beyond tap 0. The
new value of `taps[0]` gives the edge polarity. One TDC therefore measures both
edges of every pulse.

The calibration table turns the raw bin into the fine time `t_f`: how long
before the clock edge the edge happened, in 1/512 of a clock period. A 16-bit
coarse counter runs at 250 MHz, and the timestamp is

    ts = coarse * 512 - t_f        (25 bits, 7.8125 ps per LSB)

Only differences of timestamps are used, so the fixed delay to tap 0 and the
counter's origin cancel.

This encoder has two limits:
- **At most one edge per clock period.** Two edges within one 4 ns period leave
  `taps[0]` unchanged, so the TDC sees neither. This happens for pulses, or
  gaps between pulses, shorter than 4 ns. Such widths are outside the usable
  range anyway.
- **A bubble-free snapshot is assumed.** The first differing tap is taken as
  the edge. A real Kintex-7 chain may need a bubble-tolerant encoder, such as a
  ones-counter over a window.

`hit` is registered two clock edges after the edge that captured the snapshot.

## Bin-by-bin calibration (`tdc_calib.sv`)

The carry cells have unequal delays: in a real chain they differ by a factor of
several. The raw bin is therefore far from a linear time. The converter
calibrates itself with a **code density test**. Suppose edges arrive at random
times with respect to the clock. A bin then receives edges in proportion to its
delay. For a histogram `N_b` of `2^L` edges, the centre of bin `b` lies at

    t_f(b) = (N_0 + ... + N_(b-1) + N_b / 2) * 512 / 2^L
           = (cum_b + N_b/2) >> (L - 9)

Because the edge count is a power of two, dividing by it is a shift.

The block runs in four states:
1. **After reset:** a sweep of `TAPS` clocks loads a table that assumes equal
   taps, `t_f(b) = (2b+1)·256/TAPS`, and clears the histogram.
2. **Idle.**
3. **Collect:** on `cal_start`, or continuously while `cal_continuous` is high,
   the block counts `2^CAL_LOG2_HITS` edges (default 65536) into one counter
   per bin.
4. **Sweep:** `TAPS` clocks. Each step reads one counter, writes `t_f` for that
   bin, adds the count to the running sum and clears the counter.

The table is rewritten in place, so samples taken during the sweep may use a
mix of old and new entries. `cal_ready` rises after the first completed run.

The calibration uses the converter's own edges, so it can run while the
converter runs ("online"). That only works if **the edges are spread evenly
over the clock period**. The design cannot check this, and the user has to
ensure it. Two cases break it:
- **Widths confined to a range that is not a whole number of clock periods.**
  Pulse edges lie at the ramp centre ± w/2. If w/2 covers 3.6 clock periods,
  some bins collect a third more edges than others. In simulation this gave
  width errors of 20 LSB instead of 2 to 5 LSB. Widths uniform over 8 to 32 ns
  (w/2 spans exactly three periods) or a noisy, wide-ranging input give a good
  calibration.
- **Edges lost in a position-dependent way.** Examples are pulses shorter than
  4 ns, or gaps shorter than 4 ns near full scale. Those losses bias the
  histogram as well.

With 320 taps of 7 to 22 ps and 2^16 edges, the test bench measures pulse
widths within ±6 LSB (±47 ps), and the mean error is well under 1 LSB. That
bound is half a tap at each of the two edges plus the statistical error of the
histogram.

The histogram and the table are written as arrays that map to distributed
RAM. That matches the paper's report of LUT RAM use but is not checked against
it.

## Width calculation and interleaving (`width_calc.sv`)

For each channel, the block stores the timestamp of a rising edge. On the next
falling edge it outputs

    width  = ts_fall - ts_rise          (saturated to 8191)
    centre = ts_rise + width / 2

A falling edge with no preceding rising edge, as after reset, is dropped.

The two channels must leave in sampling order. A pulse is centred in its ramp
period and lasts less than one period, so it ends no more than 20 ns after its
centre. The two channels are 20 ns apart. Widths therefore come out of the
TDCs in sampling order; the only exception is when both channels finish a
pulse in the same clock. In that case the block sends the width with the
earlier centre first and holds the other for one clock. A channel cannot
finish two pulses in consecutive clocks, so one holding register is enough.
An assertion checks this.

The ordering argument holds when the timing skew between the channels, plus
half the longer width, stays below 20 ns plus half the shorter width. That is
always true inside the usable range. It can fail for widths near 0 or near
40 ns combined with a few ns of skew. In that case two neighbouring samples of
the merged stream swap. Each channel's own order is never affected.

## Correction (`adc_correction.sv`)

There are three register stages, and there is no stall:

1. **Non-linearity table.** `lut[min(width, 4095)]` has 4096 entries of 13
   bits. The host fills it through the write port. The intended procedure
   follows the paper: apply a series of DC levels across the input range,
   record the widths on `width_out`, and invert that curve into the table.
   The test bench builds the table from the known model curve instead. Widths
   above 4095 (32 ns) read the last entry.
2. **Gain.** The value is multiplied by the coefficient of its own channel.
   Gains are unsigned, with 14 fraction bits, so 16384 means 1.0. One
   multiplier serves both channels, because the merged stream carries at most
   one sample per clock.
3. **Offset.** The signed offset of the channel is added, and negative results
   become 0. The sum cannot exceed 16 bits.

The table is filled from one channel's curve. The other channel's gain and
offset are then chosen to map its linearised values onto the first. This is
the paper's choice: only gain and offset differ between the channels. Phase
(timing skew) mismatch is not corrected. It is meant to be kept small by board
layout and routing constraints.

## Energy integration (`energy_integrator.sv`)

Each sample gives an amplitude:
- `value - pedestal` for positive pulses;
- `pedestal - value` with `neg_polarity` set, for pulses that go below the
  baseline, as an SiPM anode pulse does.

When the amplitude exceeds `threshold`, the block sums that sample and the next
`WINDOW - 1` samples (default 16 samples, 320 ns). It then outputs the signed
24-bit `energy` for one clock and counts the event in `events`. Triggers
inside a window are ignored.

The pedestal and threshold are host settings. A pulse that arrives during a
window is added to that window (pile-up is not separated).

## Top-level interface (`tiadc_top.sv`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | 250 MHz clock, synchronous active-high reset |
| `tdl_taps0`, `tdl_taps1` | in | `TAPS` | registered carry-chain snapshots of channel 0 (0°) and 1 (180°) |
| `cal_start`, `cal_continuous` | in | 1 | start one TDC calibration run / run continuously (both TDCs) |
| `lut_we`, `lut_waddr`, `lut_wdata` | in | 1, 12, 13 | non-linearity table write port |
| `gain`, `offset` | in | 2×16 | per-channel gain (1.0 = 16384) and signed offset |
| `pedestal`, `threshold`, `neg_polarity` | in | 16, 16, 1 | integration settings |
| `cal_busy`, `cal_ready` | out | 2 | per-TDC calibration status |
| `width_out` | out | `width_smp_t` | merged raw widths, for the DC scan that fills the table |
| `sample_out` | out | `sample_t` | corrected 50 MS/s waveform: valid, channel, 16-bit value |
| `energy_valid`, `energy`, `events`, `integ_busy` | out | 1, 24, 32, 1 | event energies |

Latency from the clock edge that registers a snapshot showing a falling edge:
- `width_out`: 3 edges later;
- `sample_out`: 6 edges later, 7 if the width was held.

Parameters and their origin:

| parameter | default | origin |
|---|---|---|
| clock | 250 MHz | paper |
| fine bits, LSB | 9 bits, 7.8125 ps | paper (9 bits, "about 7.8 ps") |
| `LUT_DEPTH` | 4096 | paper |
| pulse width word | 13 bits | follows from the paper's 40 ns maximum |
| `TAPS` | 320 | this design (enough ~15 ps cells to span more than one clock) |
| `CAL_LOG2_HITS` | 16 | this design |
| `WINDOW` | 16 samples | this design |
| table word, gain and offset formats, coarse counter, energy word | 13, 16/Q2.14, 16, 16, 24 bits | this design |

## How far it follows the paper

These parts come from the paper:
- the signal chain (two LVDS comparators, two carry-chain TDCs, width
  calculation, correction, integration);
- the 250 MHz and 25 MHz clocks at 0° and 180°;
- the 9-bit calibrated fine time and online bin-by-bin calibration;
- a 4096-entry non-linearity table;
- gain and offset correction between the two channels, with no phase
  correction;
- the single multiplier.

These parts are this design's own, because the paper names the blocks but does
not describe their insides:
- the edge encoder;
- the code-density formula and the control of the calibration;
- the ordering of the interleaved stream;
- the placement of the table before the gain and offset (taken from the block
  name "non-linearity + gain & offset");
- every word width not listed above;
- the whole energy integrator (trigger, pedestal, window).

These points depart from the paper, or are left open:
- **Table size.** The paper gives the table as "4096 × 4096". Here that is read
  as 4096 entries. The word is 13 bits, not 12, because the paper's waveform
  plots show counts above 4095.
- **Table address.** The width is clipped to 4095, which covers pulses up to
  32 ns. The paper does not say how the 13-bit width is reduced to 12 address
  bits.
- **Resource figures.** The paper lists per-channel resources (3960 LUTs, 1726
  LUT RAM, 5 block RAMs, 1418 flip-flops, 1 DSP, 0.384 W). This RTL has not
  been mapped to a Kintex-7, so those figures are not reproduced or checked.
- **DC scan, spectrum, host link.** The DC scan that fills the table, the
  energy histogram (the spectrum) and the PCIe link to the host are host-side
  or platform parts. They are not built here.

## Simulation

Every testbench is self-checking, has a watchdog, and ends by printing
`TB_RESULT checks=N failures=M`. Each one works out its expected values
independently of the RTL.

| testbench | what it checks |
|---|---|
| `tb/tdc_calib_tb.sv` | reset table; exact table after uneven histograms; sweep length; edges ignored during a sweep; continuous mode |
| `tb/tdc_tb.sv` | front-end model with 320 unequal taps; 2^16-edge calibration; 400 widths within ±6 LSB; mean error below 1 LSB; one hit per edge two clocks later, with the right polarity |
| `tb/width_calc_tb.sv` | 3000 widths across the timestamp wrap; exact values, order and output clock; same-clock pairs in both centre orders; saturation; dropped lone falling edge |
| `tb/adc_correction_tb.sv` | random table and coefficients against a reference; exact latency; clamping at 0; clipping of the table address; table rewrite |
| `tb/energy_integrator_tb.sv` | noisy baseline with random pulses and pile-up, both polarities; exact energies and timing; event counter |
| `tb/tiadc_top_tb.sv` | the whole converter at default parameters (see below) |
| `tb/tiadc_linearity_tb.sv` | energy linearity: SiPM-like pulses of 0.1 to 1.8 V on a 0.7 V offset; INL and resolution |
| `tb/tiadc_sine_tb.sv` | dynamic test: ENOB from a sine fit at 1 and 5 MHz; 50 MS/s rate; value of the gain/offset correction |

`tb/tiadc_top_tb.sv` runs the whole converter at its default parameters. It
uses a quasi-triangular conversion curve, `w = 40 ns · h(u)` with
`h(u) = u + 0.15·u·(1-u)`. Channel 1 has a 3% gain error, a 0.02 offset error
and 3 ns of skew. The test goes through four phases:
1. Both TDCs calibrate on 65536 edges each.
2. A 1 MHz, 1.6 V peak-to-peak sine. Every sample must match the input within
   16 codes (8 mV). Typical error is 7 codes or less.
3. Out-of-range widths, which force same-clock ordering and table clipping.
4. Negative scintillation-like pulses on a 2.4 V baseline. Each energy is
   compared with the same integration of the ideal codes.

The test counts each mechanism: calibration, both channels, strict
alternation, same-clock ordering, table clipping and events. A mechanism that
never happened counts as a failure. The run takes about 2 seconds.

`tb/tiadc_sine_tb.sv` also runs at the default size. It uses the same model
without skew. It fits a sine of known frequency to 2048 consecutive samples of
the merged stream and reports the result as SINAD and ENOB. The model has no
analogue noise, so the limit is the TDC: about 57 to 60 dB, or 9.3 bits at
1 MHz and 9.6 bits at 5 MHz. The test then leaves channel 1's 3% gain and
offset error uncorrected, and ENOB drops to about 5.3 bits. That shows what
the correction does. The test also checks the rate: 2048 samples must take
10235 ± 2 clocks, that is 50 MS/s.

`tb/tiadc_linearity_tb.sv` covers the energy path over a large dynamic range.
It feeds pulses with an instantaneous rise and a 60 ns decay, sitting on a
0.7 V offset, with amplitudes from 100 mV to 1.8 V in 100 mV steps and 16
pulses per step. The input carries 2 mV rms of noise. The integrator runs with
positive polarity and its pedestal at 0.7 V. The test fits a line to the mean
energy against amplitude. With table correction, the worst deviation is below
0.1 % of full scale; the test requires 1 %. The FWHM resolution falls from
about 6 % at 100 mV to 0.3 % at 1.8 V. Those figures reflect only the assumed
noise and the TDC quantisation. Every pulse starts at the same sampling phase.
With an instantaneous rise, pulses at random phases would change the sum by up
to a quarter, because of where the 20 ns sample grid falls on the decay.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/tiadc_pkg.sv rtl/tdc_calib.sv rtl/tdc.sv rtl/width_calc.sv \
  rtl/adc_correction.sv rtl/energy_integrator.sv rtl/tiadc_top.sv \
  tb/afe_tdl_model.sv tb/tiadc_top_tb.sv --top-module tiadc_top_tb
./obj_dir/Vtiadc_top_tb
```

For a block testbench, list the package, the block's files and its testbench.
`afe_tdl_model.sv` is needed only by `tdc_tb` and `tiadc_top_tb`. The model
keeps time in integer picoseconds and advances it by one clock period per
clock, so it needs no simulator delays.

To model a different chain or ramp, change the `TAPS`, `PHASE_PS` and `SEED`
parameters of `afe_tdl_model`, or the curve functions in `tiadc_top_tb`.
