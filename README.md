# PID feedback for a radio-frequency reflectometry charge sensor

A semiconductor charge sensor (here a GaN transistor operated near pinch-off,
read out by rf reflectometry) turns a small shift of its effective gate voltage
into a change of the demodulated reflectometry voltage `V_rf`. The sensor is
sensitive only on the steep flank of its response curve. Off the flank `V_rf`
saturates (about ±20 mV in the measured device) and carries no information.
So a sensitive sensor has a narrow range, and slow drifts of the operating
point push it off the flank.

This design closes a loop around the sensor in an FPGA. The loop reads `V_rf`
at 100 MS/s and compares it with a set point `V_s`. A PID controller computes a
correction `u`, which is added to the gate voltage and pushes the sensor back
onto its most sensitive point. While the loop holds `V_rf` at `V_s`, `u` is
equal and opposite to whatever moved the gate. `u` therefore becomes the
sensor's output. Its range is the DAC's ±1.5 V rather than the sensor's ±20 mV,
and the sensor stays at its point of highest sensitivity.

The RTL covers the digital part of the loop: filtering, averaging, error, PID,
disturbance synthesis and the DAC sum. The converters, the rf electronics, the
device and the host computer are outside it. A behavioural model of them
(`tb/plant_model.sv`) closes the loop in simulation.

## Signal chain

```
 adc_data ─► lpf_iir ─► block_averager ─► err_junction ─► pid_controller ─► u ─┐
 (100 MS/s)  5 MHz LP   avg of 9 → T_S     e = V_s − V_rf   u_P+u_I+u_D+u(n−1)   │
                                                                                ▼
                                         pulse_gen ── V_n (step) ──────► dist_adder ─► dac_data
                                                                         u + V_n, saturated
```

Outside the FPGA, the DAC voltage is added to a DC gate bias `V_G` and drives
the device gate. The reflected rf signal is amplified and demodulated to
`V_rf`, which the ADC samples: that closes the loop.

| module | job | latency |
|---|---|---|
| `lpf_iir` | first-order low-pass, anti-aliasing ahead of the PID | 1 clock |
| `block_averager` | mean of `avg_len` samples, one output per block (sets T_S) | 1 clock after last sample |
| `err_junction` | `e(n) = V_s − V_rf(n)`, 17 bits | 1 clock |
| `pid_controller` | the PID difference equations, saturating | 2 clocks |
| `pulse_gen` | repeated step disturbance and a per-trial trigger | registered |
| `dist_adder` | `u + V_n`, saturated to the DAC range | 1 clock |
| `rfpid_top` | wiring, monitor outputs | 6 clocks, last ADC sample of a block to DAC code |

Everything runs on one 100 MHz clock with one ADC sample per clock. With the
default average of 9 samples, the PID updates every 90 ns (T_S = 90 ns). The
6-clock path from the sample that completes an average to the new DAC code fits
inside one T_S. The converters add their own latency, about 100 ns for this
class of instrument, which the plant model includes.

## The controller

The continuous PID law
`u = K_P e + K_I ∫e dt + K_D de/dt` (derivative with a filter time constant
T_F) is discretized with the bilinear transform. This gives:

```
u_P(n) = G_P · e(n)
u_I(n) = G_I · [e(n) + e(n−1)] + u_I(n−1)
u_D(n) = G_D · [e(n) − e(n−1)] − D · u_D(n−1)
u(n)   = u_P(n) + u_I(n) + u_D(n) + u(n−1)

G_I = K_I·T_S/2     G_D = 2·K_D/(T_S + 2·T_F)     D = (T_S − 2·T_F)/(T_S + 2·T_F)
```

The host computes `G_P, G_I, G_D, D` and writes them as signed Q8.16 numbers:
24 bits, 1.0 = 65536, range ±128. The defaults in `rfpid_pkg` are the
operating point used for the step measurements: `G_P = 0.10`, `G_I = 0`,
`G_D = 0.65`, `D = 0.80`. That D follows from T_F = 5 ns and T_S = 90 ns.

**The `u(n−1)` term.** Summing the three terms directly would give the
transfer function `G_P + G_I(1+z⁻¹)/(1−z⁻¹) + G_D(1−z⁻¹)/(1+Dz⁻¹)`. The `u(n)`
line above instead adds `u(n−1)`, so the controller output is the running sum of
the three terms. This RTL follows the accumulated form. It is the form in which
the published setting, with G_I = 0, can still hold a constant correction. After
a 10 mV step, `u` must stay 10 mV away from where it started while the error is
back at zero. Accumulation turns the "P" coefficient into an integral gain and
the "D" path into a filtered proportional path. Read the coefficients that way
when tuning.

**Arithmetic.** The three terms are computed in parallel in one clock from
`e(n)` and `e(n−1)`. Each product is exact, because an integer error times a
Q8.16 coefficient lands on 16 fraction bits. The state `u_I`, `u_D` and `u` is
kept with 16 fraction bits, so slow corrections are not lost to rounding. `u`,
`u_I` and `u_D` are clamped at the DAC full scale (±32767 codes, taken as
±1.5 V), which prevents wind-up. `u_out` is `u` rounded to whole codes, and
`u_sat` flags a clamp. `en = 0` (PID off) clears all state and holds `u` at
zero.

**Why the published coefficients are only stable for a modest loop gain.** With
`D = 0.8`, the derivative filter has its pole at `z = −0.8`. At the PID Nyquist
frequency, with the sign alternating every T_S, the `u_D` path has a gain of
`G_D·2/(1−0.8) = 6.5`. The 5 MHz filter and the 9-sample average attenuate that
frequency only to about 0.45 of its value. If one DAC code of gate voltage moved
`V_rf` by one ADC code, the loop would sit in a limit cycle at 5.6 MHz. The
simulation shows exactly that. The closed loop is well behaved when the
sensor-plus-converter gain, in ADC codes per DAC code, is below about 0.6. The
testbenches use 0.375, which stands for an ADC full scale of 4 V against the
DAC's 1.5 V. A deployment must check this gain: either set the ADC range, or
scale all of `G_P`, `G_I` and `G_D` down by the excess gain.

**Integral term.** The integral path is built and tested, but its default is
off. At this update rate it makes `u` oscillate. The accumulated form already
supplies the integral action.

## Averaging and T_S

`block_averager` sums `avg_len` samples and multiplies by `avg_recip`, which
the host supplies as `round(65536/avg_len)`. It then rounds to the nearest code.
For 9 samples the reciprocal is 3·10⁻⁵ too large, which adds under one code at
full scale. Together with `avg_len`, this block sets the PID update period,
`T_S = avg_len × 10 ns`. Whenever `avg_len` changes, the host must recompute
`G_I`, `G_D` and `D`, because they depend on T_S.

The low-pass filter is a single-pole smoother,
`y += α(x − y)`, with `α` in unsigned Q1.16. For a corner frequency f_c at
100 MS/s, `α = 1 − exp(−2π·f_c/100 MHz)`. The default 17668 (0.2696) gives
5 MHz. `α = 65536` passes samples through unchanged.

## Step disturbance and trials

`pulse_gen` measures the loop's step response from inside the FPGA. It
repeats a trial of `dist_period` clocks. After `dist_delay` clocks it adds
`dist_amp` to the DAC output for `dist_width` clocks, and `trial_start` marks
the start of each trial. The host can average recorded `V_rf` and `u` traces
over many trials, aligned on that trigger. The disturbance enters after the PID,
so to the loop it looks exactly like a gate-voltage shift of the device.

## Settings (`rfpid_pkg::cfg_t`)

| field | meaning | default used in the testbenches |
|---|---|---|
| `pid_en` | loop closed / PID off | per test |
| `vs` | set point, ADC codes | 0 |
| `gp gi gd d` | PID coefficients, Q8.16 | 6554, 0, 42598, 52429 |
| `lpf_alpha` | filter coefficient, Q1.16 | 17668 (5 MHz) |
| `avg_len`, `avg_recip` | samples per average, round(65536/avg_len) | 9, 7282 |
| `dist_en dist_amp dist_delay dist_width dist_period` | step disturbance | −218 codes (−10 mV), timing per test |

DAC and `u` codes are 1.5 V / 2¹⁵ ≈ 45.8 µV each. The ADC code scale depends on
the digitizer range setting, which the set point must use.

The top has no parameters. Its widths come from `rfpid_pkg`: 16-bit samples,
24-bit coefficients and 32-bit pulse counters.

## Verification

Each block has a self-checking testbench that compares it with an independent
reference:

* `tb_lpf_iir`: a floating-point filter, to within 1 code. It also checks exact
  pass-through, the 5 MHz time constant (about 3 samples) and the latency.
* `tb_block_averager`: the exact mean. It also checks one output per block, the
  latency, and the 9-, 4- and 1-sample settings.
* `tb_err_junction`: integer subtraction, including extreme codes.
* `tb_pid_controller`: a floating-point evaluation of the four equations, to
  within 1 code. It covers the published setting and a setting with an integral
  term, at the T_S rhythm and back to back. It also checks the 2-clock latency,
  clamping at ±32767, unwinding, and the off state.
* `tb_pulse_gen`: a reference built from the clock count, checked every clock.
* `tb_dist_adder`: an integer reference with saturation.

Four testbenches close the loop through `tb/plant_model.sv`. In that model the
DAC code plus an external gate signal passes an 11 MHz gate-line low-pass. The
sensor is `V_rf = 20 mV·tanh(V_gate/20 mV)`, with unit slope at the operating
point, followed by the ADC gain, 100 ns of latency and ±2 codes of noise.

* `tb_rfpid_top` runs every setting at its default. With the PID off, a −10 mV
  step shows as a −77-code dip in `V_rf` and `u` stays at 0. With the PID on, the
  same step is cancelled and `u` settles at +217 codes (+10 mV). The testbench
  also checks a set-point change to 16 mV, the update rate of once per 9
  samples, `u` clamping and DAC clipping for a gate offset beyond 1.5 V, and
  recovery afterwards. It counts each of these mechanisms and fails if any of
  them never happens.
* `tb_step_response` sweeps step sizes of 10, 20 and 30 mV at `V_s = 0` and
  16 mV. It checks that `u` takes over the step and that `V_rf` returns to `V_s`,
  and reports the recovery time τ: the time from the step until `V_rf` is back
  within 10 % of its largest deviation.
* `tb_noise_tracking` adds a slow random gate fluctuation with a 1 ms
  correlation time, well below the loop bandwidth. With the PID off, the
  standard deviation of `V_rf` is 8.0 codes. With the PID on it drops to 0.75,
  while `−u` follows the fluctuation with a correlation of 0.99 and the same
  standard deviation. This is the time-domain version of comparing the noise
  spectra of `V_rf` and `u`. The same testbench checks that the default `D`
  equals `(T_S − 2T_F)/(T_S + 2T_F)`.
* `tb_charge_sensing` applies a ±70 mV sine to the gate. With the PID off,
  `V_rf` clips at the sensor's ±20 mV for most of each period. With the PID on,
  `V_rf` stays within 19 codes of zero and `−u` follows the sine to within
  48 codes (2.2 mV) over its whole ±1529-code swing. The period is 500 µs,
  much shorter than the very slow sweep of the original demonstration, to keep
  the simulation short.

Recovery times τ with the model gain of 0.375 (simulation):

| V_s | 10 mV | 20 mV | 30 mV |
|---|---|---|---|
| 0 | 6.0 µs | 6.9 µs | 7.9 µs |
| 16 mV | 10.7 µs | 8.3 µs | 6.7 µs |

τ grows with the step size at `V_s = 0`, and shrinks with it at 16 mV, where
the sensor slope is lower. That matches the published trend. The absolute
values are about three times the roughly 2 µs measured on hardware. τ depends
on the loop gain of the model, which is a guess: a gain of 0.6 gives 3.8 µs at
10 mV. Spectra themselves, and the dependence of the noise in `u` on the set point,
come from analysing recorded traces and are not reproduced.

## Running it

With plain Verilator, from the repository root:

```
verilator --binary --timing --assert --top-module tb_rfpid_top -Irtl -Itb \
  rtl/rfpid_pkg.sv tb/tb_rfpid_top.sv
./obj_dir/Vtb_rfpid_top
```

Verilator finds the other modules through `-Irtl -Itb`, because each one is in
a file of its own name. Replace `tb_rfpid_top` with `tb_step_response`,
`tb_noise_tracking`, `tb_charge_sensing` or a unit test such as
`tb_pid_controller`. `--assert` enables the handshake assertions in `lpf_iir`,
`block_averager` and `pid_controller`. Every testbench ends with a line
`TB_RESULT checks=N failures=M`. Each one runs in under a second.

To change the plant, edit the parameters of `plant_model`: `ADC_GAIN` (loop
gain), `LAT` (converter latency in clocks), `GATE_ALPHA`, `AMP`, `WIDTH` and
`NOISE`.

## Where this departs from, or adds to, the published system

* Only the loop's function and its PID equations are published. The following
  are this design's choices: the filter type (single pole), the averaging
  (boxcar with decimation, chosen so that T_S = 90 ns is 9 samples), the order
  of filter, averager and error junction, the fixed-point formats, the
  saturation, and the PID on/off behaviour.
* The controller follows the accumulated `u(n)` equation, not the transfer
  function written beside it (see above).
* There is no register interface. The host writes the `cfg` record, and reads
  `u` and `V_rf` from monitor ports. Trace recording and averaging over trials
  happen on the host.
* The slow sine used to demonstrate wide-range sensing is applied as an external
  gate signal in the testbench. It is not generated in the FPGA.
* DAC full scale equals the ±1.5 V range of `u`. The ADC scale is left to the
  instrument setting, and the stability limit above depends on it.
