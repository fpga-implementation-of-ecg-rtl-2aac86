# Streaming ECG feature extractor (Pan-Tompkins QRS detection)

This RTL takes a single-lead ECG, one sample per enabled clock. For every heartbeat it reports
three numbers: the width of the QRS complex, the interval between successive R waves (R-R) and
the heart rate. The front end is the classic Pan-Tompkins chain. The raw ECG is cleaned by
subtracting its baseline and band-pass filtering it to 5-15 Hz. It is then differentiated and
squared, so that only steep slopes survive, and the squared slope is integrated over a 32-sample
window. Each QRS complex becomes one smooth positive hump. Adaptive thresholds decide which humps
are beats. Three small units then measure each beat on the integrated signal. Every stage works on
every sample in parallel, so the design keeps up with the ECG as long as the clock is faster than
the sample rate (a few hundred hertz).

The published design was built from a Simulink model and gives the filter equations, the
algorithms for the features and the port list of the detector. It gives no word widths, no
threshold constants and no register timing, so those are this design's own choices. They are
marked as such below and at the top of each source file.

## Signal names

| name | what it is | width |
|---|---|---|
| `In1` | raw ECG sample, signed | 16 |
| SF (`sf`) | band-passed ECG, output of the 5-15 Hz filter | 24, signed |
| SI (`Out1`) | output of the moving-window integrator | 48, zero-extended to 64 on `Out1` |
| T_I, T_F (`thr_i`, `thr_f`) | adaptive thresholds on SI and on \|SF\| | 48 / 24 |
| gate | "this is a beat": SI above T_I and SF has crossed T_F | 1 |

The sample rate `FS` is 200 samples/s (`ecg_pkg::FS`). The filter coefficients are the
Pan-Tompkins ones for 200 Hz, and the 32-sample window is meant to be about 150 ms. All
durations below are given in samples at that rate.

## The detector chain (`qrs_detector`)

```
In1 ─┬─────────────(+)─► bandpass_5_15 ─► derivative ─► squarer ─► mwi ─► SI (Out1)
     └─► lpf_2hz ──(−)┘        │
                               └─► SF
```

| stage | module | equation (n = sample index) | out width |
|---|---|---|---|
| baseline estimate | `lpf_2hz` | s(n) = s(n−1) + (256·x(n) − s(n−1))/16, b = s/256 | 16 |
| baseline removal | `dc_removal` | d(n) = x(n) − b(n−1) | 17 |
| low-pass | `pt_lowpass` | y(n) = 2y(n−1) − y(n−2) + x(n) − 2x(n−6) + x(n−12) | 23 |
| high-pass | `pt_highpass` | y(n) = y(n−1) − x(n)/32 + x(n−16) − x(n−17) + x(n−32)/32 | 24 (= SF) |
| derivative | `derivative` | y(n) = (2x(n) + x(n−1) − x(n−3) − 2x(n−4))/8 | 24 |
| squaring | `squarer` | y(n) = x(n)² | 48 |
| integration | `mwi` | y(n) = (1/32)·Σ_{i=1..32} x(n−i) | 48 (= SI) |

**Exact integer arithmetic.** The published equations have no fixed-point format, so each stage
here keeps every bit it can produce:

- The low-pass has a DC gain of 36 and gains 6 bits.
- The high-pass keeps 32·y exactly in an accumulator and divides by 32 only at its output.
- The derivative divides by 8 at its output.
- The square is full precision.
- The integrator sums 32 taps at full width and then divides by 32.

Every division is an arithmetic right shift, which rounds towards minus infinity. These shifts
are the only rounding in the chain. The two recursive filters (`pt_lowpass`, `pt_highpass`) have
poles on the unit circle that are cancelled by zeros. They are stable only because they are
computed exactly: a wrap-around inside the recursion cancels out of the output. If you narrow
these widths, you must keep that property or replace the filters by their FIR forms.

**The 2 Hz baseline filter** is named but not specified in the source design. It is the simplest
filter with that cut-off: a one-pole exponential average with weight 1/16, whose −3 dB point is
FS/(2π·16) ≈ 2.0 Hz. The state carries 8 extra fraction bits so that it does not stick short of
the input.

**Integrator structure.** The integrator is a literal 32-tap direct-form FIR: a delay line and an
adder tree over all taps, not a running sum. The printed sum runs from i = 1, so it leaves out the
current sample. The integrator output is therefore combinational from the delay line.

**Pipeline timing.** Every other stage registers its output. After the clock edge that takes
`In1` = x(k), the outputs are:

- `sf` = SF(k−2)
- `Out1` = ⌊Σ_{j=5..36} sq(k−j) / 32⌋, where sq is the squared derivative of SF

`ce_out` repeats `clk_enable`.

## Corrections to the printed equations

Two difference equations in the source text disagree with their own transfer functions. The RTL
follows the transfer functions:

- **High-pass.** The text prints `− x(n−16)`. With that sign the filter has a large DC gain. The
  original Pan-Tompkins filter, and the "delay minus moving average" form the text gives, need
  `+ x(n−16)`.
- **Derivative.** The text prints `2x(n) − x(n−1) − x(n−3) + 2x(n−4)`, which is not a
  derivative. The transfer function `(2 + z⁻¹ − z⁻³ − 2z⁻⁴)` is. The transfer function is scaled
  by 1/10 and the difference equation by 1/8. The RTL keeps 1/8 because it is a shift.

The stage after the band-pass is drawn as a "30 Hz high-pass" in the block diagram and described
as the differentiator in the text. The five-point derivative is treated as that stage: it is
linear up to about 30 Hz.

## Thresholds and the beat gate (`adaptive_threshold`, `qrs_threshold`)

This is the part of the design where the source says least and this RTL decides most.

**One threshold unit.** `adaptive_threshold` follows a non-negative signal and finds local peaks.
A local peak is a sample that rose from its predecessor and is not exceeded by its successor.
Each peak is classed as follows:

- A peak above the current threshold is a **signal peak**: SPK ← SPK + (PEAK − SPK)/8.
- Any other peak is a **noise peak**: NPK ← NPK + (PEAK − NPK)/8.

The threshold is T = NPK + (SPK − NPK)/4, the Pan-Tompkins weights. SPK and NPK start at zero, so
the first peaks are all signal peaks. The threshold climbs to about a quarter of the beat height
within a few beats.

**Two units and the gate.** `qrs_threshold` runs one unit on SI and one on |SF|. A beat is passed
to the feature units only while both signals have crossed their thresholds. SF peaks near the
start of the QRS complex, and SI climbs over its threshold somewhat later. So an SF crossing is
remembered (`sf_seen`) until SI drops back below T_I at the end of the complex. The gate is
(SI > T_I) ∧ (`sf_seen` ∨ |SF| > T_F).

**Limitation.** The Pan-Tompkins search-back and its 2 s learning phase are not part of this
design. If a transient far larger than the beats is seen first, SPK starts high. Then every
beat falls below T, so it is classed as a noise peak and NPK moves towards the beat height. T =
NPK + (SPK − NPK)/4 then stays above the beats, and SPK is never updated again. The detector stays
locked out until reset. Release `reset` once the input is steady.

## Feature extraction (`feature_extractor`)

All three units read SI and the gate.

**QRS interval (`qrs_width`).** QRS width is taken as the rise time of SI above its threshold.
The unit moves through three states:

- **IDLE → COUNT** on the first sample where the gate is open and SI rose. The counter starts at 1.
- **COUNT** adds 1 for every further rising sample.
- **COUNT → HOLD** on the first sample that does not rise. The count is published with a
  one-clock `qrs_valid`.
- **HOLD → IDLE** after 20 samples (100 ms), during which the input is ignored so that ripple on
  the falling edge cannot start a new count.

`qrs_active` is high while counting, which gives one rectangular pulse per beat.

**R peak and R-R (`rr_interval`).** The slope p(n) = SI(n) − SI(n−1) is tracked. A sample where p
turns from positive to zero or negative is a local maximum of SI. It is accepted as an R peak
when two conditions hold:

- the gate is open;
- at least 50 samples have passed since the previous accepted peak.

The second rule is this design's reading of a "past 50 samples" test whose exact meaning the
source leaves open. It works as a 250 ms refractory guard, and it removes second maxima inside
one wide or notched complex (`r_rejected` pulses for each). Each accepted peak is stamped with a
free-running 16-bit sample counter. R-R is the difference from the previous stamp, modulo 2¹⁶.
The first peak after reset has no predecessor and gives no R-R value.

Note that the "R peak" is the peak of the integrated signal. It lags the R wave in the raw ECG by
a delay of several tens of samples (filter group delay plus the rise of the window). This does not matter for
R-R, but do not use `r_peak` to time-stamp the raw R wave.

**Heart rate (`heart_rate`).** Heart rate is HR = 60·FS / R-R beats per minute, with the
quotient truncated. A restoring divider computes one quotient bit per clock. 60·FS = 12000 has
14 bits, so `hr_valid` comes 14 clock edges after the edge that takes `rr_valid`. Each new R-R
value starts a division, and the 50-sample guard ensures one always finishes before the next.

`features` (type `ecg_pkg::features_t`) holds the latest {QRS width, R-R, HR}.

## Top level (`ecg_feature_top`)

`ecg_feature_top` connects `qrs_detector` → `qrs_threshold` → `feature_extractor`. It has these
ports:

- **Inputs.** `clk`, an asynchronous active-high `reset`, `clk_enable` (the sample strobe) and a
  16-bit signed `In1`.
- **Outputs.** The detector's `ce_out` and 64-bit `Out1`, plus SF, both thresholds, the gate,
  the threshold-update pulses and every feature with its valid pulse.

`Out1` carries SI (48 bits) in its low bits, so its top 16 bits are always zero. Everything else
that would read the features, such as a host link or a display, is outside this RTL.

Size after generic synthesis, flattened: about 3,100 flip-flop bits and 300 word-level cells. Most
of the flip-flops are the four sample delay lines (12 + 32 + 4 taps of filter history and 32
48-bit integrator taps).

## Choices this design makes

These points are not fixed by the source design and were chosen here:

- **Sample rate.** FS = 200 samples/s.
- **Word widths.** Full precision throughout; see `ecg_pkg`.
- **Baseline filter.** A one-pole 2 Hz low-pass with weight 1/16.
- **Register timing.** Each stage is registered.
- **Reset.** Asynchronous, active high.
- **Threshold constants.** The 1/8 and 1/4 weights, the local-peak rule, the threshold on |SF|,
  and the gate's latching of the SF crossing.
- **Feature rules.**
  - The QRS count is read at the first non-rising sample.
  - The 50-sample guard is a refractory rule.
  - The first beat gives no R-R value.
  - R-R is measured with a 16-bit counter.
- **Heart-rate divider.** A sequential divider.

**If your data is 360 Hz** (as in the MIT-BIH arrhythmia database), the filters' band scales up
to about 9-27 Hz and the window shrinks to 89 ms. Either resample the data to 200 Hz, or
instantiate `ecg_feature_top #(.SAMPLE_RATE(360))` so that heart rate and hold-off are right,
accepting the shifted band. `tb_ecg_360hz` runs the design this way on 30 synthetic beats at
360 Hz, two of them premature, and every beat is found.

**No hardware multipliers for the coefficients.** All filter coefficients are powers of two or
small integers, so they are built from shifts and adds. The only multiplier is the squarer. An
FPGA build from a model-based flow may map these onto DSP blocks instead.

## How far it has been checked

Each module has a self-checking testbench in `tb/`. Each compares the block with a model written
in a different form, not a copy of the RTL:

- The recursive filters are checked against their FIR forms: the low-pass against the triangular
  11-tap response 1 2 3 4 5 6 5 4 3 2 1.
- The whole detector chain is checked sample by sample on a synthetic ECG.
- The feature units are checked on signals with hand-computed answers.
- The divider is checked against integer division.

Random gaps in `clk_enable` check that every stage holds between samples.

`tb_ecg_feature_top` runs the complete design at its default parameters on 24 synthetic beats
(60-100 beats/min), with baseline wander and one artifact. It checks that:

- one R peak is found per beat;
- R-R is within 2 samples of the true spacing;
- HR = ⌊12000/R-R⌋;
- QRS widths are plausible.

It also checks that each mechanism occurs at least once: gate, signal- and noise-peak updates,
hold-off, guard rejection and division.

The design has not been run on recorded ECG data. The thresholds have been checked only on
synthetic beats.

## Simulating

Every file holds one module or package. `rtl/ecg_pkg.sv` must come first, and `tb/ecg_synth_pkg.sv`
(the synthetic ECG generator) is needed by the detector and top testbenches. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ecg_pkg.sv tb/tb_ecg_feature_top.sv \
          --top-module tb_ecg_feature_top -Mdir obj && obj/Vtb_ecg_feature_top
```

Use the same command with any other `tb/tb_<module>.sv`. Verilator finds the other modules
through `-Irtl`. Each testbench ends with the line `TB_RESULT checks=N failures=M` and has a
watchdog.

Useful parameters to change:

- `SAMPLE_RATE` on `ecg_feature_top` (default `ecg_pkg::FS` = 200), which sets the heart-rate
  constant and the 100 ms hold-off.
- `ecg_pkg::RR_GUARD`.
- `mwi #(.N())`, which must stay a power of two.
- The `lpf_2hz` weight `K`.
