# Beamspace channel denoiser for mmWave massive MIMO with low-resolution ADCs

A base station with many antennas and cheap, low-resolution ADCs gets channel estimates that
are corrupted twice: by thermal noise and by quantization distortion. In the mmWave band the
channel is made of a few propagation paths, so after a spatial DFT (the *beamspace*) most of its
energy sits in a few beams, while the two kinds of noise spread evenly over all of them. This
denoiser exploits that. It moves the estimate of one user's channel into beamspace and decides,
beam by beam, whether the beam holds signal or only noise. It keeps the signal beams and rescales
them to undo the ADC's Bussgang gain. It zeros the rest and transforms back.

The threshold for that decision is derived per vector from three quantities that the circuit
estimates blindly from the vector itself: the composite (thermal plus quantization) noise power
per beam D0, the mean channel power P, and the number of active beams qM. No pilot statistics,
iterations over the channel, or matrix inverses are needed. Every step is a sort, a running sum,
a few multiplications, a handful of sequential divisions and table look-ups. The whole chain runs
in about 800 clock cycles for a 64-antenna array.

This RTL implements the published VLSI architecture of this algorithm in SystemVerilog. It
follows the published unit structure: FFT, element-wise square, noise-power estimator made of
a sorting unit and a truncated-mean unit, channel-power and SDNR estimators, activity-rate
estimator, threshold unit, denoising unit and IFFT. Word lengths and algorithm constants also
follow it. Where the publication leaves a unit's insides open, this design makes its own
choices, and they are listed in the last sections.

## 1. The algorithm in the form the hardware computes it

Let `h'` be the M antenna-domain samples of one noisy channel vector and `b = F h'` its
normalized DFT (the beamspace vector, `F` unitary). With `s_m = |b_m|^2`:

1. **Noise power D0 (blind).** Sort `s`. Start from `D = median(s) / ln 2`. This is the median of
   an exponential variable, which is what `s_m` is for a noise-only beam. Then repeat T = 3 times:
   * τ = c·D with c = 2. Take the set S of samples ≤ τ.
   * If |S| < ρ_min, use τ = c'·D with c' = 4 instead.
   * Set D = mean(S) / κ(k), where k is the multiplier used. κ(k) = (1 − e^−k (1 + k)) / (1 − e^−k)
     is the mean of a unit exponential truncated at k, so dividing by it removes the bias of the
     truncated mean.

   The result is D0.
2. **Channel power.** P = max(‖b‖²/M − D0, 0). **SDNR** = P / D0.
3. **Active beams.** This is a moment-matching estimate written with P and D0 so that no squared
   quotient appears:
   `qM = round( 2 M² P² / (Σ s_m² − 2 M D0² − 4 M D0 P) )`, clipped to 1 … M−1.
4. **Threshold.** This is the Bayesian test between "noise only" and "signal plus noise", with
   cost ratio C = 4:
   `η = D0 (1 + qM/(M·SDNR)) · ( ln((1 + M·SDNR/qM)·C) + ln(M − qM) − ln qM )`.
5. **Denoise.** Keep `b_m / α` if `s_m ≥ η`, otherwise 0. Here α = 1 − ρ(b) is the Bussgang
   gain of a b-bit quantizer. Finally apply the inverse normalized DFT.

c, c', C and κ's argument are powers of two, so every "multiply by c" is a shift. 1/ln 2,
1/κ(2), 1/κ(4), 1/m, ln m and 1/α are constants held in tables.

## 2. Data flow and timing of one vector (M = 64)

```
 in (Q8.8) ─► FFT ─► |.|² ─┬─► sorting unit ─► truncated mean ─► channel power ─► SDNR ─┐
                           │          (noise-power estimator, bypassed in prior mode)    │
                           ├─► Σ s² (inside the activity estimator) ◄────────────────────┘
                           │                 │
                           │           activity qM ─► threshold η
                           └─► sample / |.|² buffers ─► keep·1/α or 0 ─► IFFT ─► out (Q8.8)
```

| step | unit (file) | clocks |
|---|---|---|
| load 64 samples | `fft` | 64 |
| transform | `fft` | 192 (+1) |
| stream out, square, sort load | `fft`, `elem_square`, `sorting_unit` | 64 (+1) |
| sorter flush and output | `sorting_unit` | 63 + 64 |
| median, 3 × (threshold walk, mean, correction) | `truncated_mean` | ≈ 15–45, data dependent |
| P, then P/D0 | `channel_power_est`, `sdnr_est` | 1 + 25 |
| qM | `activity_est` | 14 |
| η | `threshold_calc` | 30 |
| read buffers, keep/zero, 1/α | `denoise_unit` | 2 + 64 |
| inverse transform and output | `fft` (inverse) | 64 + 192 + 1 |

Measured from the first input sample to the first output sample:

* 789–823 clocks with the estimators (the published implementation reports 770);
* about 600 clocks with prior knowledge of the noise level (section 7).

Only one vector is in flight at a time. `in_ready` drops with the first beamspace sample and
rises again after the last output sample.

## 3. Number formats

All words are fixed point with 8 fractional bits at the unit boundaries:

| quantity | bits | format | origin |
|---|---|---|---|
| antenna-domain sample in/out (Re, Im) | 16 | Q8.8 signed | published |
| beamspace sample | 10 | Q2.8 signed | published |
| s = \|b\|², D0, P, ‖b‖²/M | 16 | Q8.8 unsigned | published |
| SDNR | 24 | Q16.8 unsigned | published |
| η | 24 | Q16.8 unsigned | this design |
| denoised beamspace sample (after 1/α) | 12 | Q4.8 signed | this design |
| table constants | — | 16 fractional bits | this design |
| FFT internal word | 30 | 8 + 6 guard fractional bits | this design |

A beamspace word saturates at ±2. With the default FFT scaling (1/√M) that means an
antenna-domain input whose beamspace peak exceeds 2.0. Squares saturate at 256. The formats live
in `bcd_pkg`.

The 8 fractional bits of D0 are coarse. A typical D0 is 0.02–0.1, which is only 5–25 LSB, so
the noise estimator carries 4 extra fractional bits internally (section 4).

## 4. The blind noise estimator

This is the heart of the design and its largest unit. It is the pair `sorting_unit` →
`truncated_mean`, wrapped in `noise_power_est`.

**Sorting unit.** A linear systolic chain of M stages. Each clock, a stage compares the value
arriving from its left neighbour with the one it holds. It keeps the smaller and passes the
larger on. No signal spans more than one stage, so the unit is fast at any M.

A three-phase FSM controls it:

1. LOAD: M inputs, one per clock.
2. FLUSH: M−1 clocks, so the last value settles.
3. OUT: M clocks, shifting the chain towards its far end.

Since each stage keeps the smaller value, the far end holds the maximum, and the values leave
largest first. Empty stages carry a flag and simply take what arrives, so no reset value can
enter the sort.

**Truncated-mean unit.** As the sorted values arrive, the unit stores each one at its ascending
rank a, together with the suffix sum `S[a]` (the sum of ranks ≥ a). The sum of the n smallest
values is then `S[0] − S[n]`, and `S[0]/M` is the mean power that P needs (a shift). The
published unit describes prefix sums over an ascending stream; the suffix form is the same
thing for the descending stream this sorter produces.

After the last value:

* **Initial estimate.** D = ((rank M/2−1 + rank M/2) >> 1) · (1/ln 2).
* **Threshold walk.** τ = D << 1 (or << 2 for c'). An index n walks one step per clock: up
  while the value at rank n is ≤ τ, down while the value at rank n−1 is > τ. When it stops,
  n = |S|. The walk starts where the previous iteration stopped (M/2 the first time), so it
  takes only a few steps.
* **Fallback.** If n < RHO_MIN, the walk is repeated with τ = D << 2.
* **Mean.** mean = (S[0] − S[n]) · (1/n), using a table of 1/n for n = 0 … M.
* **Correction.** D = mean · 1/κ. The factor is 1/κ(c') after the fallback, otherwise 1/κ(c).

D and the mean keep 4 fractional bits beyond Q8.8 between iterations, and D0 is rounded to Q8.8
only at the end. Truncating to Q8.8 in every iteration biased D downward by up to one LSB per
pass. With D0 at about 27 LSB, three passes pulled the estimate to 21.

Two facts about ρ_min:

* Its value is not published. The default is M/8.
* With the median start, the first noise set already holds at least M/2 samples. Later sets
  shrink only as D shrinks. So with ρ_min = M/8 the c' fallback practically never happens.

The fallback is fully built and tested at ρ_min = 48 (parameter `RHO_MIN` of `bcd_top`,
`noise_power_est`, `truncated_mean`).

## 5. Channel power, SDNR and the active-beam count

* `channel_power_est`: one subtractor and a clip at zero, registered.
* `sdnr_est`: `seq_divider` with numerator P·2⁸ over D0 and 24 quotient bits. It gives Q16.8 in
  25 clocks and saturates to all ones if D0 = 0.
* `activity_est`:
  * It accumulates Σ s² ((32 + log2 M)-bit) while the squares stream past.
  * On start it forms D0², D0·P and P², and the denominator with shifts for 2M and 4M.
  * It divides 2M²P² (shifted by one extra bit for rounding) by the denominator with a
    (log2 M + 2)-bit sequential division, then rounds to nearest.
  * It clips to 1 … M−1. The clip keeps both logarithms of the threshold finite.
  * A denominator ≤ 0 happens when the vector looks flat, e.g. a single-antenna impulse. It gives
    qM = M−1 and raises `st_den_clip`.

## 6. Threshold arithmetic

`threshold_calc` evaluates η with one division, three tables and a piecewise-linear logarithm:

* **Division.** `qM / (M·SDNR)` goes through `seq_divider`, 24 quotient bits in Q8.16. This is
  the only real division.
* **Tables.**
  * `M·SDNR/qM` uses a 1/qM table.
  * `ln(M−qM)` and `ln qM` come from an ln table indexed by the integer.
* **Logarithm.** y = (1 + M·SDNR/qM)·C is a shift for C = 4. A leading-one detector writes it as
  y = 2^a·x with x ∈ [1, 2). Then `ln y = a·ln 2 + k1[s]·x + k0[s]`, where the chord
  coefficients come from an 8-segment table indexed by the 3 bits below the leading one. The
  chord error is below 0.002.
* **Result.** η = D0·(q + 1)·(ln y + ln(M−qM) − ln qM).
  * A negative η is clipped to 0, which keeps every beam.
  * A saturated quotient (SDNR = 0) gives the largest η, which zeros every beam.

The unit takes 30 clocks; the published implementation reports 3. The difference is the
bit-serial divider. A faster divider would shorten it without touching anything else.

## 7. Denoising and the prior-knowledge mode

`denoise_unit` buffers the 10-bit samples and their squares as they leave `elem_square`. When η
is ready, it reads the buffers out in beam order:

* if `s_m ≥ η`, it multiplies Re and Im by 1/α, giving a 12-bit Q4.8 result;
* otherwise it emits zero.

`out_keep` tells which happened, and `bcd_top` counts the kept beams (`st_kept`).

1/α comes from an 8-entry table addressed by `adc_bits`. The table uses the distortion factors
ρ(b) of the optimal Gaussian quantizer: 0.3634, 0.1175, 0.03454, 0.009497, 0.002499 for
b = 1 … 5, and 2.7207·2^(−2b) beyond. The hardware does not depend on these values. Change
`inv_alpha_q` in `bcd_pkg` for another quantizer model.

If the noise level is known in advance, the blind estimation is unnecessary. The published
architecture leaves the noise-power, channel-power and SDNR estimators out in that case. This
design keeps them and adds a run-time mode instead:

* `prior_en` is sampled with the first input sample of a vector.
* When it is high, D0, P and SDNR are taken from `prior_d0`, `prior_ph` and `prior_sdnr`.
* The noise estimator then receives nothing, and the activity estimator starts right after the
  last square.

This saves about 215 clocks (the published figure is about 35 %).

## 8. FFT and IFFT

The publication does not describe the transform engine. `fft` is the simplest engine that does
the job:

* an in-place radix-2 decimation-in-time transform over a register file of M complex words;
* one butterfly per clock, (M/2)·log2 M clocks;
* bit-reversed load and natural-order output;
* `INVERSE` conjugates the twiddles.

The unitary scaling 1/√M is a right shift in each of the first ⌊log2(M)/2⌋ stages. That is
exact for even log2 M (M = 64 gives 1/8). For odd log2 M (M = 128) the outputs also pass a
1/√2 multiplier on their way out. The inverse is scaled the same way, so FFT then IFFT is the
identity.

Internally the words carry 6 guard bits, and the result is rounded once at the output. Without
them, truncation in the early stages grows through the later unscaled stages to about 14 LSB.
With them the error is ≤ 2 LSB.

## 9. Top-level interface (`bcd_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid`, `in_ready` | in/out | 1 | one antenna sample per accepted clock, M per vector, antenna order |
| `in_re`, `in_im` | in | 16 | noisy channel sample, Q8.8 |
| `adc_bits` | in | 3 | ADC resolution, selects 1/α |
| `prior_en` | in | 1 | use the following three inputs instead of the estimators |
| `prior_d0`, `prior_ph` | in | 16 | known D0, P (Q8.8) |
| `prior_sdnr` | in | 24 | known SDNR (Q16.8) |
| `out_valid`, `out_last` | out | 1 | M consecutive output samples; last one flagged |
| `out_re`, `out_im` | out | 16 | denoised channel sample, Q8.8 |
| `st_d0`, `st_ph`, `st_sdnr`, `st_qm`, `st_eta` | out | 16/16/24/7/24 | estimates of the current vector |
| `st_used_cp`, `st_den_clip`, `st_kept` | out | 1/1/7 | c' fallback taken, activity denominator clipped, beams kept |

The output has no back-pressure. Parameters: `M` (64) and `RHO_MIN` (M/8). All tables are
generated at elaboration from `M` by constant functions in `bcd_pkg` and the units, so there
are no data files.

## 10. Where this RTL departs from the published design

* **Latencies.**
  * Activity estimator: 14 clocks instead of 6.
  * Threshold unit: 30 instead of 3.
  * Whole chain: about 800 clocks instead of 770.
  * FFT/IFFT with squaring: 578 clocks instead of 424.

  The dividers and the FFT are bit- or butterfly-serial because their published organisation
  is not given.
* **Sort order.** The sorter emits largest first, and the truncated mean uses suffix sums in
  place of prefix sums. The result is the same.
* **Correction after the fallback.** The printed algorithm divides by κ(c) after either
  threshold, while the printed unit diagram offers both 1/κ(c) and 1/κ(c'). This design
  follows the diagram and uses κ(c') after the fallback.
* **ρ_min.** M/8, since no value is published.
* **Rounding and clipping of qM.** Round to nearest, clipped to 1 … M−1.
* **Prior mode.** A run-time mode rather than a separate build without the estimators.
* **1/α table.** Taken from the standard quantizer distortion values, which are not printed in
  the publication.
* **M = 128.** Setting `M = 128` builds the larger array: every table, buffer and the FFT
  normalization follow M. It takes 1653–1679 clocks, against the published 1322.
* **Throughput.** One vector at a time. Overlapping vectors, which the published throughput
  figure of f/M implies, is not built.

## 11. Verification

Each unit has a self-checking testbench in `tb/` (`tb_<unit>.sv`). Each one compares against
values computed independently in real arithmetic inside the testbench, checks the unit's latency
in clocks, and stops on a watchdog. It prints `TB_RESULT checks=N failures=F`.

* `tb_fft`, `tb_ifft`: tones and random vectors at M = 64 and M = 128 against a direct DFT
  scaled by 1/√M, ±2 LSB; latency (M/2)·log2 M + 1. Both use the checker `tb/fft_checker.sv`.
* `tb_sorting_unit`: random and tied data against a sorted reference; first output after 2M−1
  clocks.
* `tb_truncated_mean`, `tb_noise_power_est`: a real-valued model of the estimator; two
  instances, the second with RHO_MIN = 48, so the c' fallback is counted.
* `tb_seq_divider`, `tb_sdnr_est`, `tb_channel_power_est`, `tb_elem_square`: exact integer
  references, including division by zero and overflow.
* `tb_activity_est`: exact reference, with the non-positive-denominator case.
* `tb_threshold_calc`: the η formula in real arithmetic, within 1.5 % plus rounding terms.
* `tb_denoise_unit`: every `adc_bits` value, and kept, zeroed and boundary samples.
* `tb_bcd_top`: end to end. It generates sparse channels (two on-grid paths, or four off-grid
  paths), adds Gaussian noise, quantizes with 1- to 4-bit uniform ADCs, and feeds two tops
  (defaults, and RHO_MIN = 48) against a real-valued model of the whole algorithm. It checks:
  * D0, qM and η;
  * the number of kept beams;
  * every output sample (±6 LSB), on vectors with no beam within 3 % of η;
  * the latency.

  It fails unless estimator mode, prior mode, the c' fallback, the clipped activity denominator,
  a vector with all beams removed, and vectors with kept and zeroed beams all occur.
* `tb_bcd_full`: the same flow on a single top with no parameter changed.
* `tb_bcd_m128`: the same flow with M = 128, against a model scaled by 1/√128. It ends with 16
  users' vectors back to back: 28,761 clocks in all, against the published 16 × 1322.

Running a test with plain Verilator:

```
verilator --binary --timing --assert rtl/bcd_pkg.sv rtl/*.sv tb/tb_bcd_top.sv --top tb_bcd_top
./obj_dir/Vtb_bcd_top
```

Each testbench finishes in well under a second of simulation time.

What the tests do not cover:

* channel statistics of a real mmWave channel model, and mean-squared-error or bit-error-rate
  performance;
* timing closure on any technology.
