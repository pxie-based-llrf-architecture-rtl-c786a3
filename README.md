# Digital LLRF controller for an 80 MHz heavy-ion accelerating cavity

A low-level RF (LLRF) system has two jobs. It holds the amplitude and phase of the
accelerating field in a cavity at set values, which takes a fast loop. It also keeps the
cavity on resonance as heat and mechanical stress detune it, which takes a slow loop.
This RTL implements both loops for an 80 MHz continuous-wave cavity. It is written in
synthesizable SystemVerilog and follows a published PXIe/FlexRIO test-bench
architecture for heavy-ion linear accelerators.

The architecture rests on three ideas:

* **Undersampling.** The 80 MHz signals are digitised directly at only 50 MS/s, with no
  analog mixing to an intermediate frequency. The carrier folds down to a -20 MHz alias,
  and its amplitude and phase survive the folding.
* **I/Q control.** The field is split into an in-phase part I = A·cos φ and a quadrature
  part Q = A·sin φ, and each part is regulated on its own. The corrected values I′ and
  Q′ drive an analog I/Q modulator. The modulator puts them back onto the 80 MHz
  reference and sends the result to the cavity.
* **A deliberately slowed plant.** A first-order lag network G(z) = 0.002/(z − 0.998)
  follows each controller. It makes the cavity look slow enough to be controlled by a
  loop with a long sample period: the 20 kHz of a loop closed through a real-time CPU,
  or anything faster when the loop is closed entirely in logic, as it is here.

## Signal path

```
 adc_ref ─┬──────────────────────────┐
 adc_vo ──┼─► iq_demod ─► I,Q ─┬─► cordic_phase ─► phase(Vo) ─┐
          │                    └─► amp_calc ─────► |Vo|        ├─► dphi = phase(Vo) − phase(Vi)
 adc_vi ──┼─► iq_demod ─► I,Q ─┬─► cordic_phase ─► phase(Vi) ─┘
          │                    └─► amp_calc ─────► |Vi|  (monitoring)
 adc_vr ──┴─► iq_demod ─► I,Q ───► amp_calc ─────► |Vr|  (monitoring)
                     (acq_fpga: every clock; one word out every cfg.ctrl_div clocks)
                                    │
                               sync_fifo  (stream to the controller)
                                    │
          iq_loop_ctrl:  iq_comp ─► (sp − meas) ─► pid_ctrl ─► lag_filter ─► I′,Q′
                                    │                                   │
                                    │ dphi                         sync_fifo (stream to the DAC side)
                                    ▼                                   │
          tuning_ctrl: mean(dphi − sp) ─► PI ─► rate          dac_driver ─► dac_i, dac_q
                                                  │
                                  stepper_pulse_gen ─► step, dir
```

Everything runs on one clock, the 50 MHz ADC sample clock. Four 14-bit ADC channels
come in:

* the reference from the RF generator;
* the cavity pickup signal V_o;
* the incident wave V_i and the reflected wave V_r, both taken from a bidirectional
  coupler at the cavity input.

Two 14-bit DAC codes go out to the baseband inputs of the modulator. A step/direction
pulse train goes to the tuner motor driver. All run-time settings enter through one
packed struct (`llrf_cfg_t`). All monitoring leaves through another (`llrf_status_t`),
which includes the error signals, the compensated measurement and the last I′/Q′ sent.

The original system spreads this work over several boards: an acquisition FPGA card, a
generation FPGA card and a real-time CPU, linked by DMA or by peer-to-peer PCI Express
streams. Here the boundaries between cards are kept as the two `sync_fifo` streams, so
each side can be moved to its own device later. Only the transport between the devices
would then need to be added.

## Sampling below the carrier

A tone at 80 MHz sampled at 50 MS/s advances by θ = 2π·frac(80/50) = 216° per sample.
That is the same as −144°, a tone at −20 MHz. The negative sign is a spectral inversion:
the phase of the alias turns the opposite way to the phase of the RF signal. The
demodulator is written for θ itself, so this sign is handled without extra logic. The
rule for picking the rate comes from the bandpass-sampling condition:

    (2·f_c − BW)/m ≥ f_s ≥ (2·f_c + BW)/(m+1)

For a narrow band around 80 MHz and m = 3, this allows any f_s from 40 MHz to
53.33 MHz, and 50 MS/s lies inside that range. Clock jitter matters less than it would
in general undersampling, because the carrier is not far above the sample rate.

`iq_demod` follows the classic two-mixer structure:

1. **Reference paths.** The sampled reference drives the I mixer directly. It reaches
   the Q mixer through a 90° shifter (`quad_shift`).
2. **90° shifter.** Only one frequency has to be shifted, so the shifter is a two-tap
   FIR that is exact at that frequency. For x[n] = cos θn:

       sin θn = (x[n−1] − cos θ · x[n]) / sin θ

   The taps are computed at elaboration time from the `F_RF_MHZ` and `F_S_MHZ`
   parameters. At 216° per sample they are −1.376 and −1.701. The formula fails at
   θ = 0° or 180°, which are carriers at a multiple of f_s/2.
3. **Mixer products.** The products hold a baseband term A·R/2·(cos φ, −sin φ) and a
   term at 2θ = 72° per sample, which is f_s/5.
4. **Low-pass filter.** The filter after each mixer is a moving average of 10 samples.
   It has zeros at every multiple of f_s/10, so it removes the f_s/5 term exactly. Its
   gain of 2 undoes the ½ from the mixing. Q is negated so that the outputs are exactly
   I = A·R·cos φ and Q = A·R·sin φ.

The ADC full scale (A = R = 1) maps to 2^17 in the 18-bit I/Q words.

## Phase, amplitude and the detuning measure

* **Phase.** `cordic_phase` is a 16-stage pipelined vectoring CORDIC. Vectors in the left
  half-plane are folded over first, with the angle preset to 180°. The result is a
  16-bit binary angle: 2^16 = 360°, so one LSB is 0.0055°. Wrap-around is free in this
  format.
* **Amplitude.** `amp_calc` is a pipelined restoring square root of I² + Q², giving one
  result bit per stage.
* **Detuning measure.** `acq_fpga` runs a second demodulator and CORDIC on the incident
  wave and outputs the difference dphi = phase(V_o) − phase(V_i). This is the phase of
  the cavity's transfer function. On resonance it is a fixed value: −108° for the
  original test cavity. Detuning by Δf shifts it by atan(2π·Δf·τ), where τ is the
  filling time. This quantity drives the slow loop.
* **Incident and reflected amplitudes.** Two more square-root detectors measure |V_i|
  and, through a third demodulator, |V_r|. They are reported in `status` on the same
  scale as the cavity amplitude and are used for monitoring only. |V_o|/|V_i| is the
  power gain through the cavity. |V_r| is smallest on resonance, which makes it a
  direct check on the tuning loop.

## Control samples and the streams

The detectors run at the full 50 MHz rate. `acq_fpga` writes one `acq_word_t`
(I, Q, A, phase, dphi) to the first stream every `cfg.ctrl_div` clocks.

* A value of 2500 gives the 20 kHz loop rate of the original CPU-based loop.
* The logic controller needs 4 clocks per sample, so any `ctrl_div` ≥ 4 is sustained,
  up to 12.5 MS/s.
* If the stream is full, the word is dropped and `status.acq_overflow` counts it. This
  happens when `ctrl_div` < 4.

`iq_loop_ctrl` works on one sample at a time. It pops a word only when the previous
word has left and the output stream has room, and it reports `status.ctrl_stall` while
a word waits. A full output stream therefore backs up into the input stream and, in the
end, into the overflow counter. Samples are lost only at the acquisition end.
`dac_driver` pops every word it sees, so in normal operation neither stream holds more
than one word.

## The amplitude and phase loop

Each control sample passes through four stages.

1. **Compensation** (`iq_comp`). The sample is multiplied by the complex coefficient
   c + js = g·e^{jα}:

       I_c = c·I − s·Q
       Q_c = s·I + c·Q

   α cancels the phase of the cables, the modulator and the cavity, and g cancels the
   losses. After this step the measured vector lies in the same axes as I′/Q′, so the
   two channels can be controlled independently. The coefficients are calibration
   values set by the host. They are signed 18-bit numbers with 2^14 = 1.0.
2. **PID** (`pid_ctrl`, one per channel, with shared gains). The controller computes
   e = setpoint − measurement and then

       u = (kp·e + Σ ki·e + kd·Δe) / 2^12

   u saturates to 18 bits. The integral is clamped to the output range, so it cannot
   wind up during a saturated transient. `status.sat_i/q` shows when saturation occurs.
3. **Lag network** (`lag_filter`, one per channel). The filter computes
   y[n+1] = A·y[n] + B·u[n] with the state kept to 18 fractional bits, where
   A = round(0.998·2^18) = 261620 and B = 2^18 − A = 524. B is also round(0.002·2^18),
   and choosing B = 2^18 − A makes the DC gain exactly 1. The pole is the `POLE`
   parameter, so a different loop bandwidth is a one-line change. Because of the z⁻¹,
   the output reflects inputs up to the previous sample.
4. **Output** (`dac_driver`). The result (I′, Q′) goes through the second stream. It is
   rounded from 18 to 14 bits, saturated, and held at the DAC until the next sample.
   `cfg.rf_on = 0` forces both codes to zero.

Latency in clocks:

| Path | Clocks |
|---|---|
| ADC sample → I/Q | 4 |
| I/Q → phase | 17 |
| I/Q → amplitude | 19 |
| Stream pop → I′/Q′ pushed | 3 |
| I′/Q′ → DAC code | 2 |

At the 200 kHz control rate of the testbench, the whole digital path is a small part of
one sample period.

The lag pole dominates the loop. With kp = 10 and ki = 0.2, a step settles within 1 %
in about 500 control samples. A large step drives the PID into saturation, because the
DAC range is limited. The 1 % / 1° stability figure often quoted for heavy-ion LLRF is
met in simulation (see below).

## The frequency tuning loop

`tuning_ctrl` works on the wrapped error dphi − `cfg.tune_sp`, which is −108° for the
reference cavity.

* It averages the error over 2^`TUNE_DEC_LOG2` = 32 control samples.
* It feeds the mean to a PI controller: `pid_ctrl` with kd = 0 and a wrapping error.
* The PI output is a signed step-rate command. Which way the motors must turn to
  correct a given error depends on the mechanics, so the sign of the gains sets the
  direction.
* With `cfg.tune_en = 0` the rate is zero, and the PI keeps its integral state.

`stepper_pulse_gen` converts the rate command into a step/direction train with a 28-bit
phase accumulator:

* Step frequency = |rate|·f_clk/2^28, which is 0.186 Hz per unit at 50 MHz.
* Each pulse is 5 µs long (`PULSE_CYC` = 250).
* The minimum spacing between pulses caps the step rate at 100 kHz.
* `dir` changes only between pulses.
* A 32-bit `position` counts the steps issued.

Both tuner motors receive the same train.

## Number formats

| Quantity | Format |
|---|---|
| ADC, DAC samples | 14-bit two's complement |
| I, Q, setpoints, I′, Q′ | 18-bit two's complement, 2^17 = full scale |
| Amplitude | 18-bit unsigned, same scale |
| Phase, dphi, tuning setpoint | 16-bit binary angle, 2^16 = 360° |
| Compensation c, s | 18-bit signed, 2^14 = 1.0 |
| PID/PI gains | 18-bit signed, 2^12 = 1.0 |
| Step rate | 16-bit signed, 2^28 = one step per clock |

`llrf_pkg::deg_to_phase()` converts degrees to a binary angle for parameters and
testbenches.

## Where this RTL departs from the original system

* **Where the controller runs.** The published system was measured with the controller
  running in software on a real-time CPU, with DMA to and from the FPGA cards. It also
  describes a second arrangement, in which the controller runs on the FPGA cards and
  they exchange data over peer-to-peer streams. This RTL is that all-logic arrangement.
  The frequency-loop PI also runs in logic here, whereas the original runs it on the
  CPU.
* **Choices the original leaves open.** The original gives only the structure of most
  blocks. The following are choices of this RTL, noted in each file's header:
  * the 90° shifter method;
  * the filter type and its length;
  * CORDIC depth and word widths;
  * FIFO depth (16) and the flow-control policy;
  * PID form and anti-windup;
  * DAC rounding;
  * averaging in the tuning loop;
  * the stepper pulse scheme.
* **Reflected wave and power levels.** The original test bench also takes in the
  reflected wave and the power levels of the incident and reflected waves. It describes
  no processing for them. Here the reflected wave is demodulated and its amplitude is
  reported; its phase is not computed. The power levels are slow signals, read by a
  separate low-rate acquisition card, and are not inputs here.
* **No host interface.** Monitoring and host access were done with LabVIEW shared
  variables over Ethernet. They are replaced by the plain `cfg`/`status` structs, and a
  register interface is left to the integrator.
* **One clock.** The generation card's DAC runs at up to 1.25 GS/s; here the DAC codes
  change on the system clock, and any interpolation is up to the converter.
* **Filling time.** The original text gives the cavity filling time as both 6 ms and
  6 µs. A Q of about 6000 at 80 MHz points to microseconds, so the testbench cavity
  uses 6 µs. None of the RTL depends on this value.

## Verification

Each module has a self-checking testbench, `tb/tb_<module>.sv`. Each one compares the
module against values computed independently in the testbench: real-valued signal
models, or integer models of the arithmetic. It also checks latencies. Each testbench
ends with the line `TB_RESULT checks=N failures=M`.

`tb/tb_llrf_top.sv` runs the complete design at its default parameters in closed loop
with `tb/cavity_model.sv`. That file is a behavioural model of the analog parts: the
modulator, the 80 MHz cavity (6 µs filling time, −108° on resonance, stepper tuner at
200 Hz per step), a critically coupled input coupler (no reflection on resonance) and
the 14-bit ADCs with noise. The testbench runs about 4.5 million
clocks (90 ms of system time) and checks that:

* the field settles to an I/Q setpoint;
* it follows a 60° phase step;
* a large step drives the PID into saturation and still settles;
* ±3 kHz detuning is removed by the tuner within two steps, in both directions;
* a too-fast control rate overflows the stream and stalls the controller, and the loop
  recovers afterwards;
* the reported incident and reflected amplitudes follow the model, and the reflected
  wave falls once the tuner has brought the cavity back to resonance;
* RF-off zeroes the drive.

`tb/tb_sampling_plans.sv` runs the demodulator under three sampling plans, each with
its own `F_S_MHZ` and filter length:

| Plan | Sample rate | Phase step per sample | Mixer image at | Filter length |
|---|---|---|---|---|
| Undersampling, as built | 50 MS/s | 216° | f_s/5 | 10 |
| Alias at f_s/4, from f_s = 4·f_c/(2m−1) with m = 4 | 45.714 MS/s | 270° | f_s/2 | 4 |
| Oversampling | 250 MS/s | 115.2° | 90 MHz | 25 |

At 250 MS/s, one sample per clock would need a 250 MHz clock.

`tb/tb_lag_filling_time.sv` measures the time constant the lag network adds. It is
500 control samples: 1.5 ms with `ctrl_div` = 150, and 25 ms at the 20 kHz rate.

After each settling phase, both the measured field and the model's true cavity field
must be within 1 % in amplitude and 1° in phase of the setpoint. Each mechanism is
counted, and one that never happens is a failure.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb rtl/llrf_pkg.sv tb/tb_llrf_top.sv \
          --top-module tb_llrf_top -Mdir obj_top
./obj_top/Vtb_llrf_top
```

Replace `llrf_top` with any module name to run that module's testbench. The closed-loop
run takes a few seconds.

## Files

* `rtl/llrf_pkg.sv`: widths, stream word types, the `cfg`/`status` structs.
* `rtl/llrf_top.sv`: the whole system.
* `rtl/acq_fpga.sv`, `iq_demod.sv`, `quad_shift.sv`, `boxcar_lpf.sv`, `cordic_phase.sv`,
  `amp_calc.sv`: acquisition and detection.
* `rtl/sync_fifo.sv`: the streams.
* `rtl/iq_loop_ctrl.sv`, `iq_comp.sv`, `pid_ctrl.sv`, `lag_filter.sv`: the amplitude and
  phase loop.
* `rtl/dac_driver.sv`: the DAC output stage.
* `rtl/tuning_ctrl.sv`, `stepper_pulse_gen.sv`: the frequency loop.
* `tb/`: one testbench per module, the behavioural cavity model, and two testbenches
  for the sampling plans and the lag time constant.
