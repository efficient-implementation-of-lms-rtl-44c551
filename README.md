# Fetal heart rate from a two-lead ECG: LMS maternal-cancellation datapath in FP32

This design estimates the heart rate of a fetus from two ECG leads taken from the mother:
- an **abdominal** lead, which holds both the maternal and the much weaker fetal ECG (FECG);
- a **thoracic** lead, which holds almost only the maternal ECG.

Each lead is first cleaned up. A **least-mean-squares adaptive filter (LMS-AF)** then learns how
the maternal complex appears in one lead from the other. What it cannot predict, its error signal,
is taken as the extracted FECG. A Pan–Tompkins-style detector then:
- sharpens the fetal R waves;
- sets a threshold from the whole record;
- picks the fetal R peaks;
- turns the mean RR interval into beats per minute.

Every signal value is an IEEE-754 single-precision word. All arithmetic is done by instances of
one small combinational floating-point unit (FPU). The LMS-AF comes in two versions, chosen by a
parameter: a fully parallel one that takes one sample per clock, and a series one that reuses
9 FPUs over 2M+1 clocks.

```
abd_in ──► [ low pass ─► notch ─► baseline removal ] ──► x ─┐
                                                            ├─► LMS-AF ──► e = FECG ──► FHR detection ──► fhr
tho_in ──► [ low pass ─► notch ─► baseline removal ] ──► d ─┘              (fecg)       (peaks, th, rate)
```

## Number format and the FPU (`fpu.sv`)

`fpu` is purely combinational. A 2-bit `op` selects one of four operations:

| op | operation | result |
|----|-----------|--------|
| 00 | add | A + B |
| 01 | subtract | A − B |
| 10 | multiply | A × B |
| 11 | compare | `{30'b0, c}` with c = 01 for A>B, 00 for A=B, 10 for A<B |

How it computes:
- **Add.** Aligns the smaller operand by shifting its mantissa right. Then it adds the mantissas
  if the signs agree, or subtracts the smaller mantissa from the larger. Finally it normalises.
- **Subtract.** Adds with B's sign flipped.
- **Multiply.** Adds the exponents and multiplies the 24-bit mantissas.
- **Compare.** Looks at the sign, then the exponent, then the fraction. Two negative numbers are
  therefore ordered by magnitude. The system only ever compares non-negative values
  (sdm, its maxima and thresholds), so this never matters here.

The arithmetic is simpler than full IEEE and is not bit-exact with it:
- every shift and the product **truncate**, with no rounding and no guard bits;
- an exponent field of 0 counts as zero, so denormals are flushed;
- underflow gives +0 and overflow gives infinity;
- NaN and infinity inputs get no special handling.

Expect results within a few units in the last place of a correctly rounded FP32 result. The
testbenches compare against real-valued models with tolerances chosen on that basis.

Each filter owns the FPUs it needs, and the op codes are constants. Synthesis therefore removes
the unused parts of every instance. The variable shifters are written as five fixed-shift stages,
which keeps synthesis of the roughly 150 flattened instances fast.

## Preprocessing (`preprocess.sv` = `butterworth` → `notch` → `baseline_wander`)

Each stage takes a sample with `in_valid` and produces its result one clock later. A channel
therefore has a latency of 3 clocks and accepts a sample every clock.

**Low pass (`butterworth.sv`).** A fourth-order recursive filter:
`O[k] = a·I[k] + b·O[k-1] + c·O[k-2] + d·O[k-3] + e·O[k-4]`, using 5 multipliers and 4 adders.
- The coefficients are the published five-decimal values: a = 0.00308, b = 3.28391, c = −4.08689,
  d = 2.28118, e = −0.48140.
- The filter is meant to cut off at 45 Hz for a 1 kHz sample rate.
- With these rounded values, the DC gain is 0.96, the −3 dB point is near 36 Hz, and the gain at
  45 Hz is 0.46.

**Notch (`notch.sv`).** `O[k] = a·I[k] + b·I[k-1] + c·I[k-2] + d·O[k-1] + e·O[k-2]`.
- This filter is meant to remove 50 Hz mains interference.
- **The published coefficients do not do that.** With a = c = 0.99405, b = −1.31278,
  d = 1.31272 and e = −0.98804, the zeros sit at cos ω = 0.6603, which is 0.1352·fs. That is
  135.2 Hz at 1 kHz.
- The design keeps the published numbers, so mains interference passes through. Its testbench
  checks that the notch is where these coefficients put it.
- To get a 50 Hz notch at 1 kHz, set `NT_B` ≈ −2a·cos(2π·0.05) = −1.8908 and `NT_D` ≈ +1.8908 in
  `fecg_pkg.sv`.

**Baseline wander removal (`baseline_wander.sv`).** Two cascaded moving averages:
- The first averages the last N1 = 200 samples (M1).
- The second averages the last N2 = 200 values of M1 (M2).
- M2 is the slowly moving baseline (breathing, electrode movement), and the output is the input
  minus M2.
- Each mean is a running sum: add the new value ÷ N and subtract the one leaving the window. The
  windows are shift-register memories.
- `baseline_wander` also outputs M2.

## The adaptive filter

Per sample, with x the preprocessed abdominal lead, d the preprocessed thoracic lead, and M = 19
weights:

```
y[n]  = Σ_{i<M} w[i]·x[n-i]
e[n]  = d[n] − y[n]                      ← the extracted FECG (output fecg)
w[i] += β·e[n]·x[n-i]                    β = 2µ = 1.4e-4  (µ = 7e-5)
```

The roles of the two leads follow the source design: the **thoracic lead is the desired signal
and the abdominal lead the filter input**.
- The filter learns to map the abdominal maternal complex onto the thoracic one.
- It cannot map the fetal part, because the thoracic lead has no fetal component.
- So e[n] holds the maternal residue plus an inverted, filtered copy of the fetal ECG.
- This is the reverse of the textbook noise canceller, and it works because the detector only
  looks at squared slopes.

Both x and d pass through scaling multipliers (`SCALE_X`, `SCALE_D`, default 1.0). The weights
start at zero.

**Parallel (`lms_parallel.sv`, the default).**
- Every product, the adder chain, the error and all M weight updates are separate FPUs, 5M+3 = 98
  of them, all working in one clock.
- A sample goes in with `in_valid`, and `e_out` and the new weights are registered on the next
  edge (latency 1).
- It accepts a new sample every clock.

**Series (`lms_series.sv`).** Nine FPUs run a 2M+1-clock schedule per sample:

| clocks | what happens |
|--------|--------------|
| 0 … M−1 | Multiply-accumulate over the taps from x[M−1] down to x[0]. Each x[j] is copied to x[j+1] as it is used, so the delay line has moved down one place when the sum is complete. Going downwards is what makes the in-place copy safe. |
| M | e and β·e are formed. |
| M … 2M−1 | One new weight per clock: w[k] uses x[k+1], the sample that multiplied it. Each weight is written one clock later. |
| 2M | The last weight is written while the next sample enters. |

- `in_ready` is high only in the last clock (or when idle).
- Throughput and latency are one sample per 2M+1 = 39 clocks.

## Heart-rate detection (`fhr_detect.sv` and its four parts)

The threshold rule needs two record-wide averages before any single peak can be judged:
- the mean of the enhanced signal;
- the mean of the maxima above it.

The unit therefore stores the enhanced signal of a whole record (N_SAMPLES = 30000 words of 32
bits) and reads it back twice. A small sequencer steps through these phases:

| phase | source | path | result |
|-------|--------|------|--------|
| COLLECT | live FECG | `peak_enhance` → buffer | sdm and its record mean m1 |
| THRESH | buffer | `local_maxima` (using the final m1) | threshold th (`th_valid`) |
| DETECT | buffer | `local_maxima` → `fetal_peak` (using th) → `fhr_calc` | R peaks, RR intervals |
| RATE | — | `fhr_calc` divides | `fhr`, one-clock `fhr_valid`; back to COLLECT |

- Each pass takes N_SAMPLES clocks plus a few drain clocks.
- `record_open` (`accepting` inside the unit) is low during the passes. FECG samples arriving
  then are not part of any record.
- At 1 kHz input and a 50 MHz clock, the passes take 1.2 ms, so about one sample is lost per record.

**`peak_enhance`.** Computes the difference of consecutive samples and squares it:
`sdiff = (cval − pval)²`.
- sdm is the running mean of the last P = 40 values of sdiff.
- Squaring favours the steep fetal R waves over the blunter maternal residue.
- m1 accumulates sdm/N over the record.

**`local_maxima`.** Walks the record with a location counter:
- While the signal is above m1 and rising, it remembers the latest value and its location.
- When the signal falls below m1, that remembered pair (value pv, location pl) is the top of the
  last peak. It is presented, and pv/N is added to m2.
- After the N-th sample, `th = (m1 + m2)/2`.
- Following the source listing, the pair is re-presented on every sample below m1. m2 therefore
  accumulates it once per such sample, not once per peak.
- th is kept when a pass starts, so the DETECT pass sees the THRESH pass's value.

**`fetal_peak`.** For each (pl, pv) with pv > th, compared with the held peak (R1 location, R2 value):
- If pl is more than MIN_DIST = 200 samples after R1, R1 is confirmed as a peak and the new pair
  is held instead.
- Otherwise the larger of the two is kept.

This removes double detections closer than 200 ms, which is 300 bpm.

**`fhr_calc`.**
- A location different from the last one is a new peak, reported on `peak_valid`/`peak_loc`.
- Intervals between peaks at or after CONV_SAMPLES = 12000 are summed and counted. The earlier
  ones are skipped because the LMS weights are not yet trusted there.
- The rate is `60·FS·count / sum`. A 34-clock restoring divider computes it and truncates to
  whole bpm; with no interval it is 0.
- `rr_count` gives the number of intervals used.

## Top level (`fecg_top.sv`)

| parameter | default | meaning |
|-----------|---------|---------|
| `LMS_ARCH` | `LMS_PARALLEL` | or `LMS_SERIES` |
| `M` | 19 | LMS taps |
| `BETA` | 1.4e-4 | 2µ, FP32 word |
| `SCALE_X`, `SCALE_D` | 1.0 | input scalings (not given by the source) |
| `N1`, `N2` | 200 | baseline windows |
| `P` | 40 | peak-enhancement window |
| `N_SAMPLES` | 30000 | record length |
| `MIN_DIST` | 200 | minimum R–R distance, samples |
| `FS` | 1000 | sample rate, Hz (used only in the bpm formula) |
| `CONV_SAMPLES` | 12000 | first sample counted for the rate |

Ports and timing:
- **Input.** A sample pair `abd_in`/`tho_in` is taken on a rising edge with `in_valid` and
  `in_ready` both high.
- **`in_ready` in parallel mode.** Always high.
- **`in_ready` in series mode.** Low while a pair is inside preprocessing or the filter, so pairs
  are taken at most once every 2M+4 = 42 clocks.
- **`fecg`.** Valid with `fecg_valid`. In parallel mode it is registered on the third rising edge
  after the one that takes the pair; the series filter adds 2M clocks.
- **Detection outputs.** `record_open`, `sdm_valid`/`sdm`, `th`/`th_valid`,
  `peak_valid`/`peak_loc`, `fhr`/`fhr_valid` and `rr_count`. `peak_loc` is counted from the
  first sample of the record.
- **Reset.** `rst_n` is active low and synchronous.

## Workloads

| data | size | fits the defaults? |
|------|------|--------------------|
| Non-invasive FECG database, four records | 1 kHz, 30000 samples | yes: one record is one complete operation of the top |
| DaISy recordings, 8 channels | 250 Hz, 10 s = 2500 samples | no |
| FECGSYN synthetic signals | 1 kHz, length not stated | yes, for records of 30000 samples |

For DaISy:
- At the default 30000-sample record length, the unit never reports a rate.
- It needs `N_SAMPLES = 2500`, `FS = 250` and a smaller `CONV_SAMPLES`.
- `P` and `MIN_DIST` are counted in samples, so at 250 Hz they mean 160 ms and 0.8 s unless
  they are changed too. How the source scaled them is not known.
- The top takes one abdominal and one thoracic channel at a time.

At 250 Hz, the default `MIN_DIST` of 200 samples would also cap the detectable rate at 75 bpm.
No test runs the design at the DaISy rate.

None of these recordings is included. The tests use generated signals instead.

## Where this departs from the source design, and what is assumed

- **Notch coefficients.** Kept as published, so the notch is at 135 Hz, not 50 Hz (see above).
- **Low-pass response.** The rounded coefficients give a −3 dB point near 36 Hz, not 45 Hz.
- **Record buffer and replay passes.** The source runs each detection module over the whole
  record but does not say how they are chained. The buffer, the two passes and the sequencer are
  this design's own.
- **Moving-average windows.** The source's update `sdm = sdm + M[0] − M[P−1]` would make the
  window P−1 long; this design subtracts the value that is P samples old. The baseline stages
  do the same.
- **RR intervals.** An interval counts only when its later peak lies at or after sample 12000.
- **Output format.** The rate is truncated to an integer bpm.
- **FPU details.** Truncation, zero and overflow handling, and the op encoding are not specified
  by the source.
- **Handshakes, reset and initial values.** The valid/ready handshakes, the synchronous reset,
  zero initial weights and state, and the scalings of 1.0 are all this design's choices.
- **Not reproduced.** The source's device results: LUT, flip-flop and power figures, and the
  convergence times on an Artix-7 at 50 MHz. Nor the detection accuracy and heart rates on the
  real databases, since those recordings are not available here.

## Verification

Each module has a self-checking testbench in `tb/`. Each one:
- compares the module against an independent real-valued model or hand-worked expectations;
- checks latency and throughput where the design defines them;
- has a watchdog;
- ends with a `TB_RESULT checks=… failures=…` line.

Shared code:
- `fp_ref_pkg.sv`: FP32↔real conversion and tolerance compare.
- `ecg_synth_pkg.sv`: the synthetic two-lead signal. It has Gaussian maternal (80 bpm) and fetal
  pulses, a broadband component shared by both leads that keeps the LMS-AF well conditioned, slow
  baseline drift, and a 135 Hz tone.

The two system-level tests:
- **`tb_fecg_top`.** Runs a parallel and a series top side by side on an 8000-sample record,
  with the convergence point at 3000 and β = 0.02. It checks:
  - every FECG sample against a real-valued model of the whole chain;
  - the parallel latency and the series pacing;
  - the detected peaks and the rate (160 bpm fetal);
  - that idle input clocks, series stalls, both detection passes, both `fetal_peak` rules and
    the exclusion of early intervals all occur.
- **`tb_fecg_full`.** Leaves every top parameter at its default. It runs one 30000-sample record
  through the parallel design and waits for the rate. The signal amplitude is chosen so that
  β = 1.4e-4 settles well before sample 12000.

Peak detection on the synthetic data is not perfect: a beat is occasionally missed, or an extra
peak is found. The system tests therefore require:
- at least 90% of fetal beats found;
- extra peaks at most 10% of the beat count;
- a rate within 5% of the true rate.

To simulate, for example, the full-size test with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Wno-lint -Wno-style \
  rtl/fecg_pkg.sv tb/fp_ref_pkg.sv tb/ecg_synth_pkg.sv \
  $(ls rtl/*.sv | grep -v fecg_pkg) tb/tb_fecg_full.sv --top-module tb_fecg_full -o sim
./obj_dir/sim
```

Replace `tb_fecg_full` with any other `tb_<module>` to test that module. The full-size test runs
in well under a minute.
