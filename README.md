# Disturbance-observer phase compensation for a solid-state RF driver

The first drift-tube linac tank at LANSCE is fed by a tetrode final amplifier.
A 20 kW water-cooled solid-state amplifier (SSPA) drives the tetrode. The SSPA's
phase wanders by up to about 40 degrees over the first tens of minutes after RF
turn-on, partly because an air-cooled circulator inside it warms up. That drift
sits inside the cavity-field feedback loop and uses up most of the PI
controller's phase margin. The loop then overshoots when it locks at the start
of each RF pulse, and reflected-power trips follow.

The fix is a **disturbance-observer controller (DOBC)** that runs in the same
FPGA, in parallel with the PI loop. The SSPA's phase error is modelled as an
unknown signal `d` added to its input. A nominal model of the amplifier is
inverted to estimate `d` from what goes into the amplifier and what comes out.
The estimate is then subtracted from the drive. The PI controller therefore
sees an amplifier whose phase stays at its nominal value. As a side effect,
the observer also measures the drift, which makes it a useful diagnostic.

This repository holds synthesizable SystemVerilog for that controller. It
covers the PI loop, the observer with its two filter branches, the injection
of the estimate into the drive, and a phase-drift monitor. It also has
self-checking testbenches, including a closed-loop simulation against a
behavioural model of the RF chain.

## Signal flow

```
            +-------------+  u_fb     u                   u + d
 r --->(+)--| PI  (C)     |----->(+)------+-------------->(+)--> SSPA --+--> tetrode, cavity ...
        ^-  +-------------+        ^-     |               ^ d (drift)   |
        |                          |      |                             | y_SSA (measured)
        |                    d_hat |      v                             v
        |                          |   +---------+            +-----------------+
        |                          |   | Q_ob    | Q_ob u     | Q_ob * H_n^-1   |
        |                          |   +---------+--(-)(+)----+-----------------+
        |                          |                  |   Q_ob H_n^-1 y_SSA
        |                          +------------------+
        |                                           d_hat
        +---- y (cavity field, after the decoupler W) <---- cavity pick-up
```

Per I/Q sample:

| quantity | formula | module |
|---|---|---|
| PI output | `u_fb = Kp*(r - y) + Ki*sum(r - y)` | `pi_controller` |
| drive | `u = sat(u_fb - d_hat)`; `d_hat` is used only when `cfg.dob_en` is set | `dobc_top` |
| disturbance estimate | `d_hat = Q_ob H_n^-1 y_SSA - Q_ob u` | `dob` |
| drift reading | `theta_d_hat = angle(Q_ob H_n^-1 y_SSA) - angle(Q_ob u)` | `dob_phase_monitor` |

Two inputs come from outside this design. `y` is the cavity field after the
decoupling post-compensator `W`, which splits the detuned cavity's I/Q
crosstalk into two independent loops. `y_SSA` is the SSPA output as measured
at its coupler. The decoupler, the RF down-converters and the ADC/DAC paths
are not included here.

## The observer, and why the Q-filter has two poles

The nominal amplifier model is a gain, a rotation and a fast first-order
pole:

```
H_n(s) = h_SSA / (tau_SSA s + 1) * R(theta_SSA),     R(a) = [cos a  -sin a; sin a  cos a]
```

Inverting it would need the differentiator `(tau_SSA s + 1)`, which cannot be
built. The observer therefore never computes `H_n^-1` alone. It only computes
the product `Q_ob * H_n^-1`, and the Q-filter is designed to make that product
proper:

```
Q_ob(s)         = 1 / ((tau_SSA s + 1) (tau_q s + 1))
Q_ob H_n^-1(s)  = 1 / (tau_q s + 1) * (1/h_SSA) * R(-theta_SSA)
```

The first pole of `Q_ob` sits exactly on the amplifier's pole and cancels the
zero of the inverse. The second pole sets the observer bandwidth, `1/tau_q` =
2 kHz, which is the bandwidth of the nominal cavity. Below 2 kHz the observer
follows the drift. Above it, detector noise is rejected.

The two branches are therefore built differently, even though they share the
2 kHz pole:

* `qob_filter` (drive branch): two cascaded one-pole sections, first at the
  amplifier pole (`k_ssa`), then at 2 kHz (`k_qob`).
* `qob_hinv` (measurement branch): one 2 kHz section, then a complex multiply
  by `(cos theta_SSA - j sin theta_SSA) / h_SSA`. The multiply undoes the
  amplifier's nominal gain and rotation.

Both branches have exactly two samples of latency, so their difference is
taken on aligned samples. If the model is right and there is no drift, both
branches carry the same signal and `d_hat = 0`. If the amplifier turns its
input by an extra angle `theta_d`, the measurement branch carries
`R(theta_d) Q_ob u`. The difference is then the filtered equivalent of
`d = (R(theta_d) - I) u`. Subtracting it from the drive cancels the drift
inside the observer bandwidth.

The sign convention follows the observer equation: the measured branch is
`+` and the drive branch is `-`. The estimate is subtracted from the PI
output because `d` adds to the drive at the amplifier input.

### Discrete poles

Every pole is the same one-pole section, `iq_lpf1`:

```
s[n+1] = s[n] + k * (x[n] - s[n]),     k = 1 - exp(-2*pi*fc/Fs)
```

`k` is an unsigned Q0.20 number. The state keeps 20 fraction bits below the
sample LSB, so a 2 kHz pole at a 1 MHz sample rate (`k` = 0.0125) has no dead
band. The output is the state rounded to 16 bits.

## Reading the drift

The measurement branch is the drive branch turned by the drift, so the drift
angle is simply the angle between the two branch outputs. `dob_phase_monitor`
runs two pipelined CORDIC vectoring units (`cordic_atan2`, 14 stages). It
subtracts their results as 16-bit binary angles, where 2^16 LSB = 360 degrees,
so the subtraction wraps correctly at +/-180 degrees. A `capture` strobe, for
example at the middle of each RF pulse, freezes the current value in
`theta_captured` for slow read-out. This matches the way the drift was logged
over hours of operation. The CORDIC error is below 0.05 degrees for inputs
above about 2000 LSB.

## Number formats and configuration

All I/Q signals are `iq_t`: a packed pair of signed 16-bit samples, with full
scale = +/-1.0. The run-time configuration is one struct, `dobc_cfg_t`
(in `dobc_pkg`):

| field | format | meaning | how to set it |
|---|---|---|---|
| `loop_en` | 1 bit | loop closed | low: drive 0, PI integrator cleared |
| `dob_en` | 1 bit | subtract `d_hat` from the drive | the observer and monitor run either way |
| `kp` | signed Q5.12 | PI proportional gain | |
| `ki` | signed Q1.16 | PI integral gain per sample | |
| `k_qob` | unsigned Q0.20 | observer-bandwidth pole | `round((1-exp(-2*pi*2000/Fs))*2^20)`, 13094 at 1 MHz (`K_QOB_2KHZ_1MSPS`) |
| `k_ssa` | unsigned Q0.20 | amplifier pole, cancelled by `Q_ob` | same formula at the amplifier's bandwidth; 489173 for 100 kHz at 1 MHz (`K_SSA_100KHZ_1MSPS`) |
| `hinv_c` | signed Q3.14 | `cos(theta_SSA)/h_SSA` | `theta_SSA`, `h_SSA` measured at the operating point |
| `hinv_s` | signed Q3.14 | `sin(theta_SSA)/h_SSA` | |

The sample rate only enters through `k_qob` and `k_ssa`. Any rate can be used
by recomputing them. The sample strobe `sample_valid` may be high every clock
or only now and then: every register advances only when it is high.

Every stage saturates to 16 bits instead of wrapping. The flags
`pi_int_sat`, `pi_out_sat`, `drive_sat` and `dob_sat` report a saturation on
the sample where it happened. The PI integrator is clamped to the sample range
(anti-windup).

## Timing

Latency is counted in sample strobes:

| path | latency |
|---|---|
| `r`, `y` -> `u_fb` | 1 |
| `u_fb`, `d_hat` -> `u` | 1 |
| `u`, `y_SSA` -> `Q_ob u`, `Q_ob H_n^-1 y_SSA` | 2 |
| branches -> `d_hat` | 1 |
| branches -> `theta_d_hat` | 15 (14 CORDIC stages + 1) |
| `capture` -> `theta_captured` | 16 |

All registers are reset to zero by the asynchronous active-low `rst_n`.

## Files

| file | contents |
|---|---|
| `rtl/dobc_pkg.sv` | types, formats, default coefficients, saturation helpers |
| `rtl/iq_lpf1.sv` | one-pole I/Q low-pass (every pole of the observer) |
| `rtl/iq_rotate_scale.sv` | I/Q complex multiply by a gain and rotation |
| `rtl/qob_filter.sv` | `Q_ob`: two-pole Q-filter on the drive |
| `rtl/qob_hinv.sv` | `Q_ob H_n^-1`: 2 kHz pole plus inverse gain and rotation on the measured output |
| `rtl/dob.sv` | disturbance observer |
| `rtl/cordic_atan2.sv` | pipelined CORDIC angle |
| `rtl/dob_phase_monitor.sv` | drift angle and its capture register |
| `rtl/pi_controller.sv` | I/Q PI feedback controller |
| `rtl/dobc_top.sv` | the controller: PI, injection, observer, monitor |
| `tb/rf_plant_model.sv` | behavioural RF chain for closed-loop tests (real arithmetic, simulation only) |
| `tb/tb_*.sv` | self-checking testbenches, one per module plus two system tests |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself through
a watchdog if it hangs.

* `tb_pi_controller`, `tb_qob_filter`, `tb_qob_hinv` compare every sample
  with a bit-exact integer model. They use random data, random coefficients
  and a random sample strobe. `tb_qob_filter` also checks the gain at 2 kHz
  against the analog two-pole response (0.707). `tb_qob_hinv` checks that it
  exactly undoes a nominal amplifier with h = 0.8 and theta = 35 degrees.
* `tb_dob` plays a nominal amplifier and checks that `d_hat` settles to
  additive disturbances. It also checks that `d_hat` settles to disturbances
  caused by phase drifts of +20 and -39 degrees.
* `tb_dob_phase_monitor` checks the angle difference, with its latency and
  capture, against real-valued `atan2` to within 0.05 degrees.
* `tb_dobc_top` closes the loop around `rf_plant_model` with the default
  parameters. The model has a 100 kHz amplifier pole, a nominal amplifier
  phase of 30 degrees, a 2013 Hz cavity and an ideal decoupler. The test runs
  1000-sample RF pulses with drifts of 0, 30, -20 and 39 degrees, with the
  compensation off and on. It also runs an overload pulse that saturates the
  drive and clamps the integrator. It checks four things:
  * the field settles to the set point;
  * the monitor reads the drift within 1.5 degrees (measured: 30.004 and
    39.012 degrees);
  * without the compensation, the PI output has to turn by -30 degrees to
    hold the field;
  * with the compensation, the PI output stays at 0 degrees, because the
    observer has taken the drift out of the PI loop.
* `tb_beam_pulse` reproduces the isotope-production pulse timing: beam on at
  375 us, for 625 us and then for 750 us, with a 30-degree drift. With the
  compensation, the peak phase error of the lock transient after 200 us falls
  from 3.8 to 2.1 degrees. The errors while the beam is on stay inside
  +/-1 % and +/-1 degree (0.91 % and 0.24 degrees).

To run one test with plain Verilator, from the repository root:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dobc_pkg.sv tb/tb_dobc_top.sv --top-module tb_dobc_top -o sim
./obj_dir/sim
```

Every test finishes in well under a second.

## What is taken from the paper and what is not

The paper describes the following, and the RTL follows it:

* the loop structure (PI controller with the observer estimate subtracted
  from its output);
* the observer equation and its signs;
* the nominal amplifier model as gain, rotation and fast pole;
* the two-pole Q-filter whose first pole cancels the inverse model's zero;
* the 2 kHz observer bandwidth;
* reading the drift at mid-pulse.

The following are this design's own choices, because the paper does not give
them:

* the sample rate (1 MHz, used only for the default coefficients);
* all word widths and fixed-point formats, rounding, saturation and
  anti-windup;
* the latencies;
* the discretisation of the poles;
* the amplifier pole (100 kHz default);
* the `loop_en` and `dob_en` behaviour;
* the way the drift angle is computed from the observer (angle difference of
  the two branches, by CORDIC).

The paper states the cavity bandwidth as 2013 Hz in one place. It sets the
observer at "2 kHz, the cavity bandwidth" in another. The RTL default uses
2 kHz.

Known limits and departures:

* The decoupler `W` and the feedforward (beam-loading) controller of the
  complete low-level RF system are not included. The paper refers to other
  work for both, and `y` is expected to be already decoupled. As a result, the
  beam step is absorbed by the PI loop alone.
* The paper shows the compensation improving the beam-loading transient as
  well as the lock transient. In the model plant here it clearly improves the
  lock transient, but the beam-step amplitude error is somewhat larger with it
  (0.91 % against 0.57 % for a 3 % beam-induced field drop). At a 5 % drop the
  compensated loop exceeds the 1 % limit (1.39 %). How much these numbers mean
  depends on the loop gains and the plant, and the paper gives neither.
* The amplifier parameters `h_SSA`, `theta_SSA` and `tau_SSA` must be measured
  on the real system. The observer is only as good as the nominal model loaded
  into `hinv_c`, `hinv_s` and `k_ssa`.
