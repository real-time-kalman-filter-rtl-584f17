# Real-time Kalman filter for parametric cooling of a levitated nanoparticle

A silica nanoparticle held in an optical trap oscillates along the beam axis
(z) at about 38 kHz. Its position reaches the electronics as a photodetector
voltage that is mostly noise: the z motion spans only about five steps of a
14-bit ADC, sitting on a DC level of some 1600 steps. To cool this motion
parametrically, the trapping-laser power has to be modulated at twice the
oscillation frequency, with a phase locked to the particle's own motion. That
needs a clean, low-latency estimate of where the particle is *now*.

This design gets that estimate from a two-state Kalman filter that models the
particle as a harmonic oscillator. It runs one full predict-and-update
iteration per ADC sample, in seven clock cycles. The estimate then goes
through a short chain that turns it into the laser drive: remove the DC
level, square, delay and normalise. The RTL follows a published experiment
(Setter, Toroš, Ralph and Ulbricht, *Real-Time Kalman Filter: Cooling of an
Optically Levitated Nanoparticle*). That experiment ran the filter on one FPGA
at 3.07 MHz with a 439.56 kHz sample rate (2.275 µs per sample), and the drive
chain on a second FPGA. The paper describes what each stage does but little of
how it is built. Everything below that is not stated there is marked as this
design's own choice.

## Signal chain

```
 ADC code (14 b)  every 7 clocks
   |
   v                                          kalman_board
 kalman_filter ---- 7-cycle iteration ---> z estimate (40 b, Q24.16), v/w estimate
   |
 est_amplifier  x16, clip to 16 b --------> est_dac
   |                                          cooling_board
 dc_remover     leaky integrator, 2^-10 --> AC part + dc_level
   |
 freq_doubler   square --------------------> 2x frequency, 34 b
   |
 delay_line     0..63 samples (phase_delay)
   |
 amplitude_control  x setpoint / running mean --> cool_dac (AOM drive, 16 b)
```

The design has the same two-board layout as the experiment.
`kalman_board` holds a sample timer that raises `adc_strobe` every
`SAMPLE_DIV` (7) cycles, the filter and the amplifier. `cooling_board` holds
the four drive stages. `levitation_feedback_top` joins the two boards. In the
experiment the estimate leaves the first FPGA through a DAC and enters the
second through an ADC. Here `est_dac` is passed on digitally, so the noise of
that analog link is not modelled. The converters, the photodetector, the
modulator (AOM), the fibre amplifier and the lock-in amplifier that cools x
and y are outside the RTL. The top module brings out their signals as plain
ports.

Timing at the defaults, counted from the clock edge that takes the sample:

| signal | edge |
|---|---|
| `kalman_filter.est_valid` | +7 |
| `est_valid` / `est_dac` | +8 |
| `cool_valid` / `cool_dac` | +12 (the cooling board adds 4) |
| next sample | +7 (one sample per iteration, no gap) |

At 3.07 MHz the filter's 7 cycles are exactly one sample period. So the
estimate of sample *n* is ready as sample *n+1* is taken, which is the
one-iteration latency the experiment corrected for when comparing its traces.

## The filter

### Model in rotation form

The state is position z and velocity v. With damping neglected (it is tiny
at the pressures of interest), one sample step Δt advances a harmonic
oscillator of angular frequency ω by

```
[z]     [  cos ωΔt       sin(ωΔt)/ω ] [z]
[v]_t = [ -ω sin ωΔt     cos ωΔt    ] [v]_t-1  + process noise
```

and the ADC measures z plus white noise. In fixed point, the entries ω sin ωΔt
(about 1.2·10^5 s⁻¹) and sin(ωΔt)/ω (about 2·10^-6 s) cannot share one
multiplier format. The RTL therefore keeps the scaled velocity u = v/ω, which
has position units. The matrix then becomes a plain rotation by θ = ωΔt:

```
F = [ cos θ   sin θ ]      θ = 2π · 38 kHz · 2.275 µs = 0.54318 rad
    [-sin θ   cos θ ]      cos θ = 0.85607, sin θ = 0.51686
```

This is the same filter under a change of variables. Only Q₁₁ is rescaled, by
1/ω². The velocity estimate leaves the filter board as `est_u`, in this
scaled form. The four entries are parameters `F00..F11` in Q2.16 (18 bits).
They are fixed when the design is built. The experiment worked the same way:
its filter was generated for 38 kHz, and the trap power was trimmed to keep
the particle at that frequency. To retune for another trap frequency f and
sample period Δt:
`F00 = F11 = round(65536·cos(2πfΔt))`, `F01 = -F10 = round(65536·sin(2πfΔt))`.

### Run-time covariance and the seven-cycle schedule

The filter carries its covariance P (three entries, as P is symmetric) and
recomputes the gain on every sample. It does not freeze a steady-state gain.
The experiment fixed the iteration at seven clock cycles. How the work is
spread over those cycles is this design's choice: every cycle ends in a
register stage, and the slow clock leaves room for wide combinational
multiplies and one divide per cycle.

| cycle | state | work |
|---|---|---|
| 1 | `ST_PX` | x̂⁻ = F x̂ |
| 2 | `ST_PP1` | M = F P |
| 3 | `ST_PP2` | P⁻ = M Fᵀ + Q |
| 4 | `ST_INNOV` | S = P⁻₀₀ + R, y = z_meas − x̂⁻_z |
| 5 | `ST_GAIN` | K = P⁻(:,0) / S (two divides, clipped to 24 bits) |
| 6 | `ST_UX` | x̂ = x̂⁻ + K y |
| 7 | `ST_UP` | P = P⁻ − K P⁻(0,:), output the estimate |

A sample is accepted while the filter is idle or in `ST_UP`, so back-to-back
samples every 7 cycles are sustained. A sample that arrives in any other state
is dropped and flagged on `overrun`. The board's sample timer never does this; the flag
is there for other sample clocks.

### Number formats

| quantity | format | unit |
|---|---|---|
| ADC sample | signed 14 b | ADC step (122 µV) |
| state, covariance, Q, R | signed 40 b, 16 fractional | step, step² |
| F coefficients | signed 18 b, 16 fractional | — |
| Kalman gain | signed 24 b, 16 fractional | — |

Every product is truncated towards −∞ back to its format. All of these widths
are choices of this design; the source says only "fixed-point". The 14-bit
ADC width follows from the 122 µV step over a 2 V input span. Types,
constants and the two multiply helpers are in `kf_pkg`.

### Q and R

In the experiment Q and R were tuned on simulated data and never printed. The
defaults here are Q = diag(0, 0.1) step² (noise on the velocity only, as in
the physical model) and R = 4 step², with P starting at 100·I. With these
values the gain settles at K ≈ (0.145, 0.019). The filter then passes the
38 kHz line with gain 1.000 and no phase shift. A DC input gets through at
0.11: a rotation model has no constant mode, so the constant offset is mostly,
but not entirely, rejected. This residual DC is why a DC remover follows.

## From estimate to laser drive

*DC removal* (`dc_remover`) is a first-order leaky integrator with time
constant 2^`LEAK_SHIFT` = 1024 samples (2.3 ms). The integrator keeps 10
fractional bits. The DC level it outputs is the one held before the current
sample.

*Frequency doubling* (`freq_doubler`) squares the DC-free estimate. For
z = A sin ωt this gives A²/2 − (A²/2) cos 2ωt: a line at 2ω plus a mean.

*Phase* (`delay_line`) delays the doubled signal by `phase_delay` whole
samples. Each sample of delay turns the 2ω line by 2θ = 1.086 rad, so about
5.8 samples make one full turn. The experiment set its delay by trying values
until cooling was strongest. Here the delay is likewise a run-time input. The
buffer is 64 deep and outputs zero until it holds enough samples, so it needs
no clearing at reset.

*Amplitude control* (`amplitude_control`) divides each sample by a running
mean of the doubled signal (leak 2^-10) and multiplies it by `amp_setpoint`.
The output therefore averages to the set point whatever the motion amplitude.
This keeps the modulation depth, and so the cooling rate, constant. The output
is positive and clipped at +32767. The division form is this design's choice;
the source asks only for "a set average amplitude".

## What follows the source and what does not

Taken from the source:
- the two-state harmonic-oscillator model with zero damping and its transition matrix;
- one iteration per sample, seven clock cycles per iteration;
- 38 kHz at 2.275 µs per sample;
- the 122 µV ADC step;
- an amplified estimate out of the filter board;
- the drive stages in this order: leaky-integrator DC removal, squaring, time delay, constant-average amplitude control.

Chosen here:
- all word lengths and rounding;
- the velocity scaling;
- the per-cycle schedule;
- Q, R and the initial P;
- the amplifier gain (×16);
- the leak constants, the delay depth and the sample-granular delay;
- the divide-by-mean gain control;
- synchronous active-low reset;
- dropping a sample that arrives mid-iteration.

The second board's clock and sample rate are not given. Its stages run here
once per filter sample. The analog link between the boards is replaced by a
wire.

## Verification

Each testbench checks its module against values worked out independently of
it and ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it shows |
|---|---|
| `kalman_filter_tb` | bit-exact match with a 64-bit integer model of the same equations over noisy sine input; 7-cycle latency; one sample per 7 cycles sustained; overrun drops a sample without disturbing the state; a clean 40-step sine is tracked within 0.5 step |
| `est_amplifier_tb` | `floor(z·gain)` with clipping and the clip flag |
| `kalman_board_tb` | every `est_dac` and `est_u` equal to the integer filter model (times 16, clipped); strobe every 7 cycles; latency 8; clipping on a 3000-step motion |
| `cooling_board_tb` | every output code equal to an integer model of the four stages, with the delay at 0, 3 and 63; latency 4; DC level, 2ω content, 3-sample phase turn, mean at the set point before and after a 4× amplitude step |
| `dc_remover_tb` | sample-exact leaky integrator; settles on a 1000-step offset and removes it |
| `freq_doubler_tb` | exact squares including −2^16; a sine comes out at twice its frequency |
| `delay_line_tb` | each output equals the input `delay` samples earlier, with the delay changed at run time, including 0 and 63 |
| `amplitude_control_tb` | sample-exact gain control; mean output at the set point before and after a 16× step in input power; clipping |
| `levitation_feedback_top_tb` | whole chain at default parameters with a 1639-step offset and a 6- then 24-step sine: strobe period, latencies of 8 and 12, estimate amplitude (16·A, within 15 %) and phase, velocity estimate in quadrature, DC level (0.11·1639·16), 2ω content, a 3-sample delay turns the 2ω phase by 6θ, mean output at the set point, both clip paths exercised |
| `cooling_loop_tb` | closed loop with a simulated Langevin oscillator (38 kHz, rms 6 steps, ±2 steps of ADC noise) whose stiffness is modulated by `cool_dac` at 2 % depth: with the best delay (3 samples) ⟨z²⟩ falls to about 0.3 of its feedback-off value, and other delays heat the motion, some into runaway |

The closed-loop result shows that the chain cools in the right phase. It does
not reproduce the experiment's temperatures. The particle, the noise and the
modulation depth in that testbench are a model chosen for the test.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/kf_pkg.sv tb/levitation_feedback_top_tb.sv \
    --top-module levitation_feedback_top_tb
./obj_dir/Vlevitation_feedback_top_tb
```

Replace the testbench name to run any other. Every testbench runs its module
at its default parameters and finishes in well under a second of wall time.
`kf_pkg.sv` must be read first: the filter, its amplifier, both boards and
the top import it. The
testbenches use `$urandom` and real-valued `$sin`, but no constrained
randomisation and no external files.

## Changing it

- Another trap frequency or sample rate: recompute `F00..F11` with the formula above. For a different clock, keep `SAMPLE_DIV` at 7 or more.
- Noise tuning: set `Q00`, `Q01`, `Q11` and `R` of `kalman_filter` in (ADC step)² × 2^16.
- Filter-board output scale: set `AMP_GAIN` of `est_amplifier` (Q8.8).
- Feedback phase and strength: `phase_delay` and `amp_setpoint` are run-time inputs. `DELAY_DEPTH`, `LEAK_SHIFT` and `AVG_SHIFT` are parameters of the top and of `cooling_board`.

The assertions in `kalman_filter` check that S > 0 whenever a gain is formed
and that an estimate appears only at the end of an iteration. `kalman_board`
asserts that no sample is dropped when the timer is at least as slow as the
filter.
