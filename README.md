# Constant-current lead-acid battery controller with an EKF state-of-charge estimator

This is a digital controller for one 12 V lead-acid battery. It charges or discharges the battery at a constant current that the user chooses, and it tracks the battery's state of charge (SoC) while it does so. It was written from the paper "FPGA Based SoC Estimator and Constant Current Charging/Discharging Controller for Lead-Acid Battery" and implements the FPGA part of that system. The authors did not write this code. Outside the FPGA, the system has:

* a charging converter (gate G1);
* a discharging converter (gate G2) that feeds a load through a relay;
* two voltage sensors and two current sensors, read through an ADC;
* a touch-screen display, where the operator enters the reference current and sees voltage, current and SoC.

Those parts are analogue or bought in. Here they appear only as ports, plus a behavioural model of them used in the system testbenches.

Each loop iteration does the following, in order:

1. Read the reference current `Iref`.
2. Sample the four sensor channels and measure the time `dn` since the previous sample.
3. Update the SoC estimate with an extended Kalman filter (EKF).
4. Present V, I and SoC to the display.
5. Choose charge, discharge or rest from the sign of `Iref`, set the relay, and update the PWM duty cycles with a PID law.
6. Drive the two gates with PWM at those duties.

## Number format

All arithmetic is signed fixed point, 64 bits wide with 40 fraction bits (`bms_pkg::fx_t`). One LSB is 2^-40 ≈ 9.1e-13, and the range is ±8.4e6.

The format has to cover two extremes:

* An SoC step of one 10 ms sample at 10 A on a 100 Ah battery is 2.8e-7. That step must be resolved finely enough that it does not vanish over a 16-hour run: it is about 3e5 LSB.
* Intermediate values reach about 1e5. For example, R·C of the second RC pair is up to about 5e4 s.

Constants are written as reals and converted when the design is elaborated (`fx_const`). Multiplication forms the full 128-bit product and shifts it by 40 (`fx_mul`). Division and e^-x are sequential units, shared where a block needs several of them:

| module | what it does | latency |
|---|---|---|
| `fxp_div` | restoring radix-2 divider over 104 bits. It saturates on overflow and on division by zero. | `W+FRAC+1` = 105 clocks |
| `exp_neg` | e^-x for x ≥ 0. It halves x until x ≤ 0.5, runs a 12-term Taylor series, then squares the result back m times. | `2 + 2m + TERMS` clocks |

## Battery model

The EKF uses a second-order equivalent circuit: an open-circuit voltage `Voc(s)` in series with `R0` and two parallel RC pairs (`R1 C1`, `R2 C2`). The terminal voltage is

    y = Voc(s) + V1 + V2 + I·R0,      I > 0 charges the battery

`ocv_poly` evaluates `Voc(s)` and its derivative with Horner's rule. The polynomial is

    Voc(s) = 11.41 s^5 − 24.38 s^4 + 17.85 s^3 − 5.233 s^2 + 0.928 s + 12.33

with s as a fraction from 0 to 1. The paper does not state the unit of s. Taking s as a fraction gives 12.33 V empty and 12.905 V full. Taking s in percent would give kilovolts.

`ecm_param_lut` holds the five circuit parameters at SoC = 0 %, 10 %, … 100 %. There is one table for charging and one for discharging, because the battery shows hysteresis. The values come from the paper's HPPC (hybrid pulse power characterisation) fits and are converted from mΩ and kF to Ω and F. A row is chosen by rounding 10·s to the nearest integer. There is no interpolation, which is this design's choice. The charging table is used when I ≥ 0.

## The SoC estimator (`ekf_soc`)

The state is x = [s, V1, V2]. For each sample of length dn, with a_k = e^(−dn/(R_k C_k)):

    predict   s⁻  = s + η·dn·I/Q
              Vk⁻ = a_k·Vk + R_k(1 − a_k)·I
              P⁻  = A P Aᵀ + J,            A = diag(1, a1, a2)
    gain      C = [dVoc/ds(s⁻), 1, 1]
              h = P⁻Cᵀ,  S = C·h + R,  K = h / S
    update    ŷ = Voc(s⁻) + V1⁻ + V2⁻ + I·R0
              x⁺ = x⁻ + K(V − ŷ)
              P⁺ = P⁻ − K·hᵀ

The output is scalar, so S is a single number and the only inverse needed is 1/S. A pass runs as a sequence of steps:

1. dn/τ1 and dn/τ2 on the shared divider.
2. Two exponentials.
3. The prediction, including the full 3×3 covariance.
4. Voc and ŷ.
5. 1/S on the divider.
6. The update.

A pass takes about 3·(W+FRAC) + 40 ≈ 350 clocks. The SoC estimate is clamped to [0, 1].

**Where this departs from the paper:**

* **Sign of B.** The paper prints the input matrix with −R_k(1 − a_k). That sign contradicts the paper's own differential equation dV_k/dt = −V_k/(R_k C_k) + I/C_k and its output equation, so the positive sign is used.
* **Predicted output.** The algorithm listing writes the predicted output as the linearised C·x⁻ + D·I. The design uses the nonlinear model output. C is used only for the gain and the covariance.
* **P⁻ in the gain.** The gain equation is printed with P⁻¹ where the prior covariance P⁻ is meant.
* **Values the paper does not give.** These are parameters here:
  * the coulombic efficiency η, default 1;
  * the initial state, default s = 1 and V1 = V2 = 0;
  * the initial covariance P0, default diag(0.01, 1e-4, 1e-4);
  * the process noise J, default diag(1e-10, 1e-7, 1e-7);
  * the measurement noise R, default 0.01 V².
* **Capacity.** Q is 100 Ah, the rating of the battery the paper tested.

## The current controller (`cc_pid_controller`)

One call runs one pass of the control flowchart.

| mode | condition | duties | relay | error |
|---|---|---|---|---|
| charge | Iref > 0 | δ2 = 0; δ1 is regulated | open | e = Iref − I |
| discharge | Iref < 0 | δ1 = 0; δ2 is regulated | closed | e = −(Iref − I) |
| rest | Iref = 0 | δ1 = δ2 = 0 | open | e = 0 |

In charge and discharge, the regulated duty is updated by:

    Δe = e − e_prev,   Σe += e·dn
    δ += Kp·e + Ki·Σe + Kd·Δe/dn,   δ clamped to 0..100 %,   e_prev = e

The law is incremental: δ accumulates its own past value. Each mode has its own error sum. Neither sum is cleared when the mode changes, which is what the flowchart shows. The gains are the paper's:

| mode | Kp | Ki | Kd |
|---|---|---|---|
| charge | 0.18 | 0.0008 | 0.006 |
| discharge | 1 | 0.01 | 0.005 |

I is the battery current, positive into the battery. In discharge both Iref and I are negative. Negating the error there makes a larger discharge demand raise δ2, which is the flowchart's version. The paper's text writes e = Iref − I for both modes; with signed currents that would be positive feedback.

**Constant-voltage top-up.** The paper says that when the battery reaches float voltage, a short constant-voltage phase takes the SoC from about 94 % to 100 %. It gives neither the voltage nor the control law, so this part is the design's own:

1. Once V ≥ V_FLOAT during charging, the controller latches CV mode. V_FLOAT defaults to 16.0 V.
2. In CV it regulates e = V_FLOAT − V with the charging gains, and the charging sum restarts at CV entry.
3. When the SoC estimate reaches SOC_FULL (100 %), it stops charging and raises `full`.
4. It stays stopped until Iref stops being positive.

**Other choices.**

* In rest, e = 0.
* With dn = 0, the derivative term is skipped.
* `clamp_hi` and `clamp_lo` flag a pass whose duty was clamped.
* Timing: a pass takes W+FRAC+4 clocks when it needs the Δe/dn division, otherwise 2 clocks.

## Measurement, timing and PWM

**`adc_scale`** converts four 12-bit codes into volts and amperes. The defaults come from the paper and from the sensor datasheet:

| parameter | default | source |
|---|---|---|
| ADC full scale | 5 V | this design's choice |
| voltage divider | 5:1 | paper |
| current sensor zero | 2.5 V | ACS712-30A datasheet |
| current sensor slope | 66 mV/A | ACS712-30A datasheet |

This gives 25 V and 6.1 mV per code for voltage, and ±37.9 A and 18.5 mA per code for current. The paper does not give the ADC's width or range.

**`sample_timer`** counts clocks between ADC results and outputs dn in seconds, at one clock of resolution.

**`pwm_gen`** is a counter-compare PWM generator:

* The period is CLK_HZ/F_SW clocks: 2500 clocks at the defaults of 50 MHz and 20 kHz.
* The output is high while the counter is below floor(δ·PERIOD/100).
* The threshold reloads only at the start of a period, so a duty change never gives a runt pulse.

The paper does not name a switching frequency. 20 kHz is the rating of its filter inductor.

## The top (`bms_top`)

`bms_top` runs the loop above from a free-running tick every LOOP_CYCLES clocks: 500 000 clocks, or 10 ms at 50 MHz. The paper gives no sampling rate.

The sequencer steps are:

1. `T_WAIT`: wait for the tick.
2. `T_ACQ`: send `adc_start` and wait for `adc_valid`.
3. `T_SCALE`: convert the codes.
4. `T_EKF`: run the estimator.
5. `T_DISP`: latch `disp_v`, `disp_i` and `disp_soc`, and pulse `disp_valid`.
6. `T_PID`: run the controller and hand the new duties to the two PWM generators.

If a tick comes while an iteration is running, it is held and starts the next iteration straight away, and `overrun` counts it. An iteration takes the ADC latency plus about 4·(W+FRAC) + 60 clocks, which is far below the default tick.

| group | ports | meaning |
|---|---|---|
| display side | `iref` | reference current from the display |
| | `disp_v`, `disp_i`, `disp_soc`, `disp_valid` | values shown on the display |
| ADC side | `adc_start`, `adc_valid`, `adc_code[4]` | codes in the order battery V, battery I, load V, load I |
| power stage | `g1`, `g2`, `relay` | gate drives and relay control |
| observation | `mode`, `duty1`, `duty2` | current mode and duties |
| | `pid_clamp_hi`, `pid_clamp_lo`, `cv_full` | clamp flags and the CV `full` flag |
| | `overrun` | count of held ticks |
| | `v_load`, `i_load` | load voltage and current |
| | `soc_var`, `v_pred`, `ecm_row` | SoC variance, predicted voltage, circuit-table row |

Reset is asynchronous and active low, and clears every register.

Concurrent assertions state the rules of the sequencing:

* the estimator, the controller and the shared divider and exponential units are only started when idle;
* G1 and G2 are never high together;
* the two PWM generators stay in phase, so a mode change reaches both gates at the same period boundary.

They are checked in simulation when Verilator is run with `--assert`.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends with `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | checks |
|---|---|
| `fxp_div_tb`, `exp_neg_tb`, `ocv_poly_tb` | results against real arithmetic, plus the stated latencies |
| `ecm_param_lut_tb` | every row of both tables and the rounding between rows |
| `adc_scale_tb` | random codes against the scaling formulas |
| `sample_timer_tb` | random intervals |
| `pwm_gen_tb` | high time, period and reload at the period boundary |
| `cc_pid_controller_tb` | against a real-valued model of the flowchart; it counts mode changes, both clamps, CV entry and `full` |
| `ekf_soc_tb` | against a real-valued EKF, step by step, plus convergence from a wrong initial SoC |

`battery_plant.sv` is a behavioural model of everything outside the FPGA. It averages the two converters over the PWM duty, feeds the same equivalent circuit with the same tables, and models the sensors and a 12-bit ADC with a conversion latency. The system testbenches use it:

| testbench | settings | what it runs |
|---|---|---|
| `bms_top_tb` | compressed time and a 0.02 Ah battery | charge, rest, discharge, a discharge demand beyond what the converter can deliver (upper clamp), a tiny demand (lower clamp), then charge into CV and `full`. It counts each mechanism. |
| `hppc_profile_tb` | compressed time | an HPPC current profile at three SoC steps: −20 A and +15 A pulses, a −10 A step and rests. It checks current tracking, the relay, zero current at rest and the SoC estimate. |
| `bms_top_full_tb` | default parameters: 50 MHz, 20 kHz, 10 ms loop, 100 Ah | 145 loop iterations of discharge, rest and charge at ±10 A. It checks current, relay, mode, the 2500-clock PWM period, no overrun and the SoC estimate. |

The HPPC charge pulse is 15 A rather than 20 A. The model's 24 V charger behind 0.5 Ω cannot push 20 A into a battery at 14.4 V, so at 20 A δ1 sits at 100 %. That is a limit of the model, not of the controller.

To simulate with Verilator 5:

    verilator --binary --timing --assert rtl/bms_pkg.sv rtl/*.sv tb/battery_plant.sv \
              tb/bms_top_tb.sv --top-module bms_top_tb -Mdir build -o sim
    ./build/sim

For a block testbench, swap in its testbench file and top module; `battery_plant.sv` is only needed by the three system testbenches. `bms_pkg.sv` must come first.

## Limits and open points

* **Full-length run.** The paper's full-length run (16 h of 10 A steps on 100 Ah) is 5.8 million loop iterations. It fits the design, but it was simulated only at compressed time and for 145 iterations at full size.
* **Parameter guesses.** V_FLOAT, the noise covariances, the loop rate, the ADC format and the PWM frequency are reasonable guesses, and all are parameters. For a real battery, tune them first.
* **Table lookup.** The circuit table uses the nearest row without interpolation. Near the middle between two rows, the estimator sees a step in R0.
* **Sensor range.** The current sensor range of ±37.9 A bounds the usable currents.
* **Left out.** The converters, sensors, ADC and touch display are not part of the RTL. The offline curve fitting that produced the tables is not part of the RTL either.
