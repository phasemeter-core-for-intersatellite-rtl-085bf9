# A digital phasemeter core for laser heterodyne interferometry

A heterodyne interferometer turns the length changes of an optical link into
phase changes of an electrical beat note. For intersatellite links the beat
note lies between a few MHz and about 25 MHz. Its phase has to be measured
to about a micro-cycle in the presence of a large, Doppler-driven frequency
wander. This core does that measurement. Each ADC channel has its own
all-digital phase-locked loop (ADPLL), which keeps a numerically controlled
oscillator (NCO) locked to the beat note. The NCO's frequency word and phase
word then carry the beat note's frequency and phase. Those words are filtered
and decimated down to a few hertz for telemetry.

The RTL is parameterised SystemVerilog. Its defaults are an 80 MHz sample
clock, four channels and a 12-bit frequency word. All of it is synthesizable
except the testbenches.

## Number format

Every word is a two's-complement integer. An X-bit word with value `v`
stands for `v * 2^-X`. So a full-scale ADC sample lies in `[-1/2, 1/2)`, and
a T-bit phase word counts cycles in units of `2^-T`. With that rule, dropping
bits at the LSB end is just rounding, and adding C sign bits at the MSB end
multiplies the value by `2^-C`. The loop's gain is set this way instead of
with a multiplier.

## One tracking channel (`adpll_channel`)

```
 adc_i (N) ──► x cos ──► round ──► Q (K) ──► 2f low-pass ──► u_d (K+F)
                │                                             │
                │                           sign-extend by C bits (gain 2^-C)
                │                                             ▼
                │                               PI: kp + ki·z^-1/(1-z^-1)
                │                                             │ u_f (K+F+C)
                │                        dithered round to T bits, + f_off
                │                                             ▼
   sin/cos LUT ◄── dithered round to M bits ◄── PA += PIR ◄── PIR (T)
 (M in, M out)                                  phase (T)     frequency (T)

 adc_i ──► x sin ──► round ──► 2f low-pass ──► I = A/4 (K+F)
```

| block | job | latency |
|---|---|---|
| `pd_mixer` | multiply sample by NCO cosine (Q) or sine (I), N+M bits, round to K | 2 |
| `lpf_2f` | remove the 2f term of the mixer product | 2 |
| `pi_servo` | gain `2^-C`, then proportional + integral | 1 |
| `pir_reg` | round u_f to T bits, add preset `f_off`, register as PIR | 2 |
| `nco` | phase accumulator, round phase to M bits, `sincos_lut` | 3 |

With the input register this gives a loop delay of 11 clocks.

**Phase detector.** Let the input be `A·cos(φ)`, with `A ≤ 1/2` in the
scaled units above. Multiplying it by the NCO's cosine, `1/2·cos(ψ)`, gives
`A/4·cos(φ-ψ)` plus a term at twice the beat frequency. The loop locks where
`φ-ψ = π/2`, so the DC part is zero there. Near lock it is proportional to
the phase error, with a slope of `A·π/2` per cycle. The sine mixer gives `A/4`
at lock. After its filter it is the amplitude readout, and a lock indicator.

**2f filter.** The mixer's second-harmonic product sits at twice the beat
frequency and must not reach the servo. `lpf_2f` is two identical
first-order IIR sections: `s += (x - s)·α`, with `α = 2355/2^16`. Each has its
pole at 466 kHz, so the cascade is 3 dB down at 300 kHz. That is the corner
the reference analysis uses. Each section's state keeps 16 extra fraction
bits. Without them a first-order integer filter has a dead band and would
hide small DC offsets. The output is K+F bits wide with unity DC gain.

**Gain and bandwidth.** The open-loop gain at high frequency is
`A·π/2 · kp · 2^-C` per sample. So the unity-gain frequency is about

```
f_ugf ≈ A · kp · 2^-C · fs / 4        (C = 16, fs = 80 MHz: f_ugf ≈ A · kp · 305 Hz)
```

About 40 kHz minimises the total phase noise with the noise sources in the
reference analysis. For that:

| amplitude A | kp | ki (units of 2^-8) |
|---|---|---|
| 0.25 | 524 | 84 |
| 0.20 | 655 | 105 |

`ki` puts the PI zero near 8 kHz. The integral branch keeps `KI_SHIFT = 8`
extra fraction bits, so small integral gains are usable. Both gains are
run-time inputs. They must be scaled for the actual signal amplitude:
the I readout gives it. The integrator and the output saturate rather than
wrap, and `sat_o` reports it. The loop should never reach these limits.

**Frequency word and preset.** The servo output `u_f` is rounded to
`T = 12` bits and added to the per-channel preset `f_off`. The sum is the
phase increment register (PIR), in cycles per sample times `2^12`. One LSB
is `80 MHz/4096 ≈ 19.5 kHz`. `f_off` must be set to the nearest code to the
expected beat frequency, e.g. `round(f/fs·4096)`. The loop has only a few
hundred kHz of pull-in range.

## Dither: why a 12-bit frequency word measures micro-cycles

A 12-bit PIR can only step in 19.5 kHz units, yet the mean frequency is
resolved far better. The loop dithers the PIR between neighbouring codes,
and the phase accumulator integrates that into a phase that follows the input
exactly on average. This only works if every rounding in the loop is unbiased
and its error is not correlated with the signal. So every word shortening
inside the loop goes through `round_dither`:

* Triangular dither of ±1 output LSB is added first. Its scale is rounded
  rather than floored, otherwise the dither itself carries a bias.
* The sum is rounded to nearest.
* An exact half is rounded up or down according to a random tie bit. Plain
  round-half-up has a +½-LSB bias at exact halves. This happens often when few
  bits are dropped.
* Signals saturate. Phases wrap (`SAT` parameter).

`dither_gen` makes the dither from two independent maximal-length LFSRs,
41 and 47 bits long. Each advances 32 steps per clock. Their 32-bit outputs
are subtracted, and the difference of two uniform values is triangular. The
shorter register repeats after `(2^41-1)/80 MHz ≈ 7.6 h`. This keeps the
dither from producing spectral lines in the measurement band. There is one
generator for each rounding point: Q mixer, I mixer, PIR and phase. The
channel number goes into the seeds, so no two of the 16 generators in the
core share a sequence.

## Readout (`phasemeter_core`)

The top level has `NC = 4` channels. Every channel's PIR, PA, Q and I, plus
the PA differences, come out at the full rate. For telemetry these signals are
decimated:

* **PIR**: a zero-extended, 13-bit unsigned word. Its average is the
  frequency with the loop's truncation noise averaged away. Integrating it
  gives phase without ever handling the overflowing PA.
* **PA differences** (`pa_diff`): `PA[k] - PA[0]` for k = 1..3, in cycles
  × `2^12`, wrapping. When two channels see the same laser, their common
  phase ramp cancels here.
* **I and Q**: the amplitude and the residual (untracked) phase error. Q is
  taken before the 2f filter, as in the loop model. It is shifted left by F
  bits so that it has the same scale as the filtered I.

Each of these goes through a `cic_decimator`. This is a third-order CIC:
integrators at the full rate, combs at the output rate. Decimation is by
`2^24`, giving 4.77 Hz. The gain is exactly `2^72`. The outputs keep all
`WI + 72` bits, so nothing is truncated and a DC input reads back exactly.
All CICs share timing, so `dec_valid` is a single strobe.

On each decimated sample, `iq_readout` computes `atan2(Q, I)` and
`sqrt(I²+Q²)` for every channel from the top 32 bits of the decimated I and
Q. It uses a 20-iteration vectoring CORDIC with gain correction. The phase
is in cycles × `2^24` and the amplitude is in I's units (A/4 at lock).
`iq_done` pulses 22 clocks after `dec_valid`. With the default loop this
residual is tiny, and the readout serves as a diagnostic of loop behaviour.

## Parameters

All defaults are in `pm_pkg`.

| name | default | meaning |
|---|---|---|
| `FS_HZ` | 80 MHz | sample clock (documentation only) |
| `N_ADC` (N) | 16 | ADC sample width |
| `M_LUT` (M) | 10 | LUT address and data width |
| `K_PD` (K) | 18 | mixer output width |
| `F_LF` (F) | 8 | extra bits added by the 2f filter |
| `C_GAIN` (C) | 16 | gain reduction, `2^-C` |
| `T_FREQ` (T) | 12 | PIR and PA width |
| `KAPPA_W` | 16 | width of the gain inputs |
| `KI_SHIFT` | 8 | fraction bits of `ki` |
| `LPF_ALPHA` | 2355 | coefficient of each filter section, `/2^16` |
| `DITHER_W` | 32 | dither resolution |
| `CIC_ORDER` | 3 | CIC order |
| `CIC_RLOG2` | 24 | log2 of the decimation ratio |
| `NCH` | 4 | channels |
| `IQ_W`, `PH_W`, `CORDIC_ITER` | 32, 24, 20 | IQ readout widths and iterations |

## Where this follows the reference design and where it does not

These follow the published design:

* the loop topology: Q mixer with cosine, 2f filter, `2^-C` gain by sign
  extension, PI, PIR with preset, phase accumulator, LUT; I mixer with sine;
* the fixed-point scaling rule;
* 80 MHz and a 12-bit PIR;
* a second-order 2f filter with a 300 kHz corner;
* triangular dither from two LFSRs with a repeat time above 10 000 s;
* symmetric rounding with a random tie bit;
* CIC decimation to a few hertz;
* PA-difference readout;
* IQ readout as a diagnostic;
* four channels.

These are this design's own choices, because no value was published:

* the widths N, M, K, F and C;
* the structure and coefficient of the 2f filter (two equal first-order
  sections);
* the LFSR lengths and taps;
* the dither amplitude and the mapping of generators to rounding points;
* the gain encoding;
* saturation in the servo;
* all latencies;
* CIC order 3 with a single-stage ratio of 2^24;
* full-precision CIC outputs;
* CORDIC for the IQ readout;
* channel 0 as the phase reference;
* the asynchronous active-low reset.

Q is taken before its filter and I after. A block diagram that shows only
the phase path taps Q before the filter. A channel diagram draws a filter on
the I arm.

These are not built:

* **Noise shaping of readout truncation together with the CIC filters.** It is
  only cited in the reference design, with no structure, so the CIC outputs
  are left untruncated.
* **A noise-injection point for loop-gain measurement.** Its location is not
  published.
* **An adaptive-corner 2f filter.** It is mentioned only as an option.
* **Automatic gain control.** `kp` and `ki` are inputs and must be set from
  the I readout.
* **The ADC.** It is outside the core, and its samples enter on `adc_i`.
* **Test-signal generators and pilot-tone correction.** These are
  measurement equipment.

## Verification

Each block has a self-checking testbench in `tb/`. It compares against an
independently written model and finishes with a `TB_RESULT` line.

| testbench | what it checks |
|---|---|
| `tb_dither_gen` | bit-exact against a serial LFSR model; triangular shape, zero mean, tie-bit balance |
| `tb_round_dither` | against real-valued rounding; ties, saturation, wrap, unbiased mean |
| `tb_sincos_lut` | every entry within 0.51 LSB of the ideal sine/cosine |
| `tb_nco` | phase ramp; sine/cosine against the phase; unbiased dithered phase |
| `tb_pd_mixer` | product rounding within ±1.5 LSB; unbiased mean |
| `tb_lpf_2f` | every sample bit-exact against an integer model, also for random full-scale input; step response against a real model; exact DC; gain at 30 kHz, 300 kHz (-3 dB) and 12 MHz |
| `tb_pi_servo` | bit-exact against a wide integer model, including saturation |
| `tb_pir_reg` | bit-exact rounding model; preset timing; dithered mean |
| `tb_pa_diff` | exact wrapped differences |
| `tb_cic_decimator` | bit-exact against direct convolution with the box³ kernel; strobe spacing; DC gain |
| `tb_iq_readout` | phase and magnitude over random vectors; latency |
| `tb_adpll_channel` | lock at 6 MHz: mean PIR, phase jitter, amplitude A/4, no saturation; re-lock after a 100 kHz step |
| `tb_adpll_range` | lock at both band edges, 2 MHz and 25 MHz, from a preset one code off |
| `tb_adpll_noise` | 6 MHz tone at -1 dB SNR per sample (75 dB-Hz): 200 000 samples without a cycle slip, mean PIR, I = A/4 |
| `tb_phasemeter_core` | end-to-end three-signal test at decimation 2^10 |
| `tb_phasemeter_full` | the same test with every parameter at its default (decimation 2^24) |

The end-to-end test is the classic three-signal test. Signal A (6 MHz) and
signal B (9 MHz) each wander in frequency by tens of kHz. Channel 2 sees A,
channel 3 sees B, and channels 0 and 1 both see C = A + B (15 MHz). All four
carry noise. Checks:

* after decimation, the PIR combination `A + B - C` is within 0.1 LSB of zero;
* `C - D` is also within 0.1 LSB;
* the PA difference of the two C channels averages to zero;
* the IQ readout gives amplitude A/4 and near-zero residual phase;
* a 50 kHz frequency step is tracked.

The test counts how often each mechanism occurred:

* decimated outputs;
* IQ results;
* locked channels;
* PIR dither steps;
* combination passes;
* null passes;
* checks after the step.

A mechanism that never occurs counts as a failure. At the default
decimation, one full run covers three output samples (50 M clocks). It
takes about 4 minutes in verilator.

To run a testbench:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
  rtl/pm_pkg.sv tb/tb_phasemeter_core.sv --top-module tb_phasemeter_core
./obj_dir/Vtb_phasemeter_core
```

The package goes on the command line first. `-y rtl` finds the modules
by their file names. The top level carries immediate
assertions that all decimated strobes stay aligned. `--assert` turns them on.

## Trust and limits

* The loop runs and locks in simulation. Its tracking, null and
  amplitude results match the expected levels. For example, the
  12-bit-PIR phase jitter is about 0.01 cycle peak to peak at the full rate.
  It averages away after decimation.
* Simulation spans are too short to demonstrate micro-cycle noise at
  millihertz frequencies. Only a hardware run of hours can show that.
* The gain and bandwidth formula assumes the default scaling. If N, M, K, F
  or C are changed, re-derive kp and ki from the `f_ugf` relation above.
* The PA differences are decimated as plain signed numbers. If two channels
  sit near half a cycle apart, the difference wraps between +2047 and -2048
  and its decimated mean is meaningless. Where the channel offsets are not
  well inside ±1/2 cycle, unwrap the full-rate `padiff_o` before filtering.
* At 25 MHz the 2f product (50 MHz) aliases to 30 MHz. It is still well
  above the 300 kHz filter corner.
