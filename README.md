# Second-order level-crossing sampling ADC in SystemVerilog

A conventional SAR converter spends ten comparisons on every sample, even when
the signal is doing nothing more interesting than following a straight line.
For sparse signals such as an ECG, most samples lie on such lines. This design
changes only the digital control logic of a 10-bit SAR converter so that it
first *guesses* each sample by extrapolating the line through the two previous
results, and then *checks* the guess with two comparisons against a window of
+/- Delta around it:

* If the input lies inside the window, the guess is taken as the result, no
  SAR conversion is made and the comparator is switched off for the rest of
  the sampling period.
* If the input leaves the window, the sample is quantized by the ordinary SAR
  search. That sample is a *selected point*: its code leaves the converter
  together with a timestamp, the number of sampling periods since the previous
  selected point. The next sample is quantized as well, so that the next
  extrapolation starts from two measured codes.

The thresholds therefore slope along with the signal (hence "second order":
classic level-crossing converters use fixed levels), and the points that get
quantized are the turning points of the waveform. A receiver that keeps only
the selected points and their timestamps gets far fewer bits than a
Nyquist-rate converter would send.

The RTL here contains the complete digital control logic, synthesizable, plus
behavioural models of the two analog parts (capacitive DAC and dynamic
comparator) so that the whole converter can be simulated from a voltage input
to the two output streams.

## The algorithm, sample by sample

With `y1` the latest result and `y0` the one before (each either predicted or
quantized), and codes in 0..1023:

```
pred  = 2*y1 - y0                      // straight-line extrapolation
upper = clamp(pred + Delta)            // clamp to 0..1023
lower = clamp(pred - Delta)
if (must_quantize)                     // start-up, restart, timestamp limit
    y = SAR(vin)
else if (!(vin > V(upper)) && vin > V(lower))
    y = clamp(pred)                    // prediction succeeded
else
    y = SAR(vin)                       // prediction failed: selected point
    must_quantize next period          // restart the extrapolation
y0 = y1; y1 = y
```

`V(code)` is the DAC level of a code. Because the comparator makes a strict
`>` decision, the window is closed at the top (an input exactly at the upper
level is inside) and open at the bottom.

A predicted result is always within Delta (+1 LSB of quantization) of what a
plain conversion would have given; the Delta-sweep testbench checks this bound
on every predicted sample.

**Rails.** The prediction and both thresholds are clamped to the code range.
The window is built from the unclamped prediction, so when a steep slope
carries the prediction past a rail the window loses one edge but keeps the
other. `upper_clamped`/`lower_clamped` report this.

**Start-up.** After reset there is no history, so the first two periods are
quantized. The first is reported as a selected point with timestamp 0; the
second counts as a restart quantization.

**Timestamp limit.** The timestamp is 10 bits. It is coded as *elapsed periods
minus one*, so 0..1023 stand for 1..1024 periods, which is the largest
interval that 10 bits can describe. If a signal stays predictable for 1024
periods, that period is quantized and reported as a selected point anyway (it
then also triggers a restart quantization), so that the next interval can
still be timed. A receiver rebuilds absolute time as
`t_0 = ts_0` for the first point after reset and `t_k = t_(k-1) + ts_k + 1`
after that, in sampling periods from reset.

## Timing of one sampling period

The control clock runs at 16 kHz and the converter samples at 1 kHz, so each
sampling period has 16 clocks. Their use is fixed:

| phase | predicted period          | failed prediction          | forced quantization |
|------:|---------------------------|----------------------------|---------------------|
| 0     | sample the input          | sample the input           | sample the input    |
| 1     | compare with upper level  | compare with upper level   | comparator off      |
| 2     | compare with lower level, decide | same, decide        | comparator off      |
| 3     | result out, sleep         | SAR bit 9                  | SAR bit 9           |
| 4..12 | sleep                     | SAR bits 8..0              | SAR bits 8..0       |
| 13    | sleep                     | SAR finished               | SAR finished        |
| 14    | sleep                     | result and selected point out | result out       |
| 15    | sleep                     | timer advances             | timer advances      |

("Forced quantization" is a restart, start-up or timestamp-limit period.) The
comparator is therefore enabled for 2 clocks in a predicted period, 12 in a
failed one and 10 in a forced one, against 10 for a plain SAR converter. The
SAR window is reserved in every period, so the output rate never depends on
the signal; only the position of the result inside the period does (phase 3 or
phase 14). The minimum period is N + 5 clocks; `lcs_control` refuses a smaller
`CPS` at elaboration.

Within one clock the control logic changes the DAC code on the rising edge,
the dynamic comparator fires on the falling edge, and its decision is used on
the next rising edge. Both threshold comparisons are made even when the first
one has already failed; this keeps the sequence the same for every period.

## Outputs

`lcs_adc` offers the same information in two forms.

* **Per-period result** (`out_valid`, `out_code`, `out_quantized`,
  `out_kind`): one code per sampling period, predicted or quantized. This is
  what one would feed to a DAC to look at the reconstructed waveform.
  `out_kind` (type `sample_kind_e`) tells why the period was resolved the way
  it was: predicted, failed high, failed low, restart, start-up or timestamp
  limit.
* **Selected points** (`event_valid`, `event_code`, `event_ts`): the
  compressed stream, 10 bits of code plus 10 bits of timestamp per point. The
  restart quantization that follows a failure is not a selected point.

`quant_pulse` pulses for every full SAR quantization, selected or not, and
`vcomp` shows the comparator enable, so the sleep time can be observed.

All of these are one-clock pulses from registers; the data is valid while the
pulse is high.

## Compression and error

The compression factor compares the bits of a plain SAR converter (10 per
period) with the bits of the selected-point stream (20 per point). On the
synthetic 1 Hz, 900 mV peak-to-peak ECG-like waveform used by the testbenches
(P wave, QRS complex and T wave built from straight segments and parabolas,
plus 1 mV of noise), four beats give:

| Delta  | selected points | compression factor | comparator clocks vs plain SAR | RMS error of per-period output | RMS error rebuilt from points (linear interpolation) |
|-------:|----:|------:|------:|------:|------:|
| 10 mV  | 149 | 13.4 | 26.7 % | 2.8 LSB  | 6.5 LSB |
| 25 mV  | 110 | 18.2 | 24.9 % | 7.3 LSB  | 14.6 LSB |
| 50 mV  |  93 | 21.5 | 24.2 % | 15.9 LSB | 25.2 LSB |
| 100 mV |  75 | 26.7 | 23.4 % | 42.4 LSB | 40.8 LSB |
| 200 mV |  57 | 35.1 | 22.6 % | 94.2 LSB | 72.3 LSB |

(The noise is random, so the figures move between simulator seeds, by up to
about 15 % for the larger Delta values.) A
larger Delta gives fewer points, less comparator activity and more error,
which is the trade-off the design is built around. These figures are much
more favourable than what a recorded ECG gives, because the synthetic
waveform is made of nearly straight pieces; the silicon this design follows
reached a compression factor of about 6 on an ECG, and that number depends
entirely on the signal. Power cannot be measured from RTL; the comparator
clock count is given as a stand-in for the analog power that is saved.

## Analog models and units

Voltages are carried as signed 32-bit integers in microvolts (`uvolt_t` in
`lcs_pkg`), not as `real`, so the whole converter goes through the same tools
as the digital logic.

* `lcs_cdac` samples the differential input `vin_p - vin_n` on the rising
  clock edge while `sample` is high and holds it, then drives the comparator
  with *held input - V(code)*, where
  `V(code) = -VREF + floor(code * 2 * VREF / 1024)` and VREF = 0.5 V. One LSB
  is 0.977 mV. No settling, mismatch or noise is modelled.
* `lcs_comparator` decides `vin_p > vin_n` on the falling clock edge while
  `en` (Vcomp) is high and outputs 0 while it is asleep. No offset, noise or
  metastability is modelled.

The SAR search finds the largest code whose DAC level lies below the input.

Delta is given in LSB: 50 mV is 51 LSB, 200 mV is 205 LSB. The Delta input is
10 bits wide, so values up to 1023 LSB (about 1 V) can be set.

## Modules

```
lcs_adc                 complete converter (top)
├── lcs_control         digital control logic: phase sequencer, window
│   │                   decision, history, output registers
│   ├── lcs_predictor   2*y1 - y0 and the +/- Delta window (combinational)
│   ├── sar_logic       10-bit successive-approximation register
│   └── lcs_timer       timestamp counter
├── lcs_cdac            capacitive DAC with input sampling (behavioural model)
└── lcs_comparator      dynamic comparator with enable (behavioural model)
lcs_pkg                 widths, clocks per sample, phase numbers, sample_kind_e,
                        uvolt_t
```

Parameters, all with the converter's own values as defaults:

| parameter | default | meaning |
|-----------|--------:|---------|
| `N`       | 10      | resolution, bits |
| `DW`      | 10      | width of the Delta input (chosen here) |
| `TW`      | 10      | timestamp width |
| `CPS`     | 16      | control clocks per sampling period (16 kHz / 1 kHz) |
| `VREF_UV` | 500000  | full scale +/- 0.5 V differential, microvolts |

Reset (`rst_n`) is asynchronous and active low. The control logic carries
immediate assertions that the comparator is only enabled in the compare and
SAR phases, that results come only in phase 3 or phase N + 4, and that every
selected point is a quantized result.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/lcs_pkg.sv tb/tb_lcs_adc.sv \
          --top-module tb_lcs_adc -Mdir obj_adc
./obj_adc/Vtb_lcs_adc
```

`-Irtl` lets Verilator find each module in `rtl/<name>.sv`; the package is
named first because the modules import it.

| testbench | what it checks |
|-----------|----------------|
| `tb_lcs_predictor` | corner cases and random codes against an integer model of the extrapolation, window and clamp flags |
| `tb_sar_logic` | conversions against an ideal comparator: result, MSB-first trial order, N busy clocks, ignored start while busy |
| `tb_lcs_timer` | timestamp against a period counter, events at every clock of the period including the tick, the limit flag |
| `tb_lcs_cdac` | held input minus DAC level for random inputs and codes; the input is not followed while holding |
| `tb_lcs_comparator` | decision on the falling edge, sleep output, no change on the rising edge |
| `tb_lcs_control` | control logic with an ideal code-domain comparator against a reference model: every period's result and kind, output phase, comparator clocks, selected points and timestamps; flat, ramp, step, noise, rail and Delta = 0 stretches |
| `tb_lcs_adc` | the whole converter at its default parameters on three ECG-like beats at Delta = 50 mV and three at 200 mV, a flat stretch past the timestamp limit and an over-range stretch; every mechanism (prediction, failure high and low, restart, start-up, timestamp limit, clamped window, sleep) must occur |
| `tb_lcs_delta_sweep` | Delta from 10 to 200 mV on four beats: the table above, the +/- Delta error bound, timestamp decoding to absolute time, fewer points for larger Delta |

Each testbench finishes in well under a second of simulation time.

## What follows the source design and what is chosen here

Taken from the design this RTL follows: the 10-bit SAR converter with a
fully differential capacitive DAC and a dynamic comparator; prediction by
linear extrapolation from the two previous results, whether they were
quantized or predicted; the two threshold comparisons, upper first, at
prediction +/- Delta; use of the predicted value on success; full
quantization of the failing sample *and of the next one* on failure; the
quantized code of the failing sample as data output and the interval between
failures as a 10-bit timestamp; a digital pulse for quantization events; the
comparator switched off through its enable while the prediction holds; 1 kHz
sampling with a 16 kHz control clock; a +/- 0.5 V input range.

Chosen here, because the source does not say:

* the phase plan of the 16 clocks, including both comparisons always being
  made and the fixed SAR window;
* counting the timestamp in sampling periods, coding it as elapsed minus one,
  and forcing a selected point when it reaches its limit;
* clamping at the rails and building the window from the unclamped
  prediction;
* start-up behaviour after reset;
* the width of the Delta input (10 bits, in LSB);
* the comparator being off also in the unused clocks of quantized periods;
* the diagnostic outputs `out_kind`, `upper_clamped` and `lower_clamped`;
* an asynchronous active-low reset;
* ideal analog models with microvolt integers.

Not covered: the transistor-level DAC and comparator (the models are ideal),
the pad frame and test structures, the generation of the clock and reference
voltages (the clock is a port), and the bench DAC used to rebuild the waveform
from the output. When idle, the DAC code returns to 0; a low-power
implementation may prefer to hold the last code to avoid switching the
capacitor array.
