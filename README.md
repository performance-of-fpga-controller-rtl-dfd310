# Amplitude/phase LLRF controller with built-in tuner control

This is the digital logic of a low-level RF (LLRF) controller for normal-conducting accelerator cavities at a few tens of MHz.
One controller does three jobs:

- It runs up to three RF channels, each phase-locked to the accelerator reference.
- It holds each cavity's field at a set amplitude and phase.
- It keeps one cavity on resonance by driving the stepping motor of its tuner.

Two ideas set it apart from a textbook I/Q controller:

1. **Regulation in polar coordinates.** A CORDIC turns the down-converted I/Q pair into amplitude and phase. Two independent loops regulate those two numbers. A polar NCO turns the regulated amplitude and phase back into an IF drive. The loops are therefore not cross-coupled through the loop delay. There is no loop-phase rotation to calibrate, and the design cannot have the AM-to-PM instability that an I/Q loop with a wrong loop phase can have.
2. **The tuner is controlled in the same FPGA, with no external motion controller.** Tuning is done by three algorithms run in sequence at power-up:
   - positional pretuning;
   - phase comparison;
   - sliding mode extremum seeking, which minimises the reflected power with no setpoint and so does not drift with temperature.

   The sliding mode law has a chatter-reducing refinement called *switching surface skipping*.

Everything runs from one 250 MHz clock, at which the ADCs and the DAC are sampled. The RF reaches the FPGA on a 31.6 MHz IF. The host sets and reads the controller through 48-bit reports.

## Block structure

```
isac_llrf_top
├── hid_regs            48-bit report decoder, settings and readback
├── dpll                reference phase detector + PI loop -> frequency word correction
│   ├── nco, mixer, lowpass x2, cordic_vec
├── llrf_channel  x3    one regulated RF channel
│   ├── nco (LO)        cos / -sin at the channel frequency
│   ├── mixer           ADC x LO -> I, Q at 2x frequency products
│   ├── lowpass x2      first-order IIR, removes the 2*IF product
│   ├── cordic_vec      (I, Q) -> (R, phi)
│   ├── amp_ramp        ramped amplitude setpoint, slowed on high reflected power
│   ├── pid  (amplitude)  setpoint junction + PID + feedforward of the ramp
│   ├── pid  (phase)      setpoint junction + PID, modulo one turn
│   └── nco (output)    polar modulator: (amp, phase) -> IF drive for the DAC
└── tuner_ctrl          one cavity tuner (on channel 0)
    ├── position_pretune  move to a preset step count
    ├── phase_align       move to bring the tuning phase to its setpoint
    ├── sliding_mode      extremum seeking of reflected power, with surface skipping
    ├── rho_estimator     measures the sliding-mode slope parameter rho
    ├── powerup_seq       OFF -> POSITION (RF pulsed) -> PHASE (RF CW) -> SLIDING
    └── stepper_ctrl      step/direction pulses and position counter
```

`llrf_pkg` holds the shared widths, the NCO frequency word, the CORDIC angle table and the structs (channel settings, tuner settings, readback). `cordic_rot` is the rotation-mode CORDIC inside `nco`.

The following parts are outside the logic and appear only as ports of `isac_llrf_top`:

| Part | Ports |
|---|---|
| ADCs | `adc_i[3]`, `ref_adc_i` |
| DACs | `dac_o[3]` |
| Analog down-/up-conversion to the IF | none |
| USB/HID device and the processor that runs it | `rep_i`, `rep_valid_i`, `rep_o`, `rep_valid_o` |
| Reflected-power readback | `pr_i` |
| Motor driver | `step_o`, `dir_o`, `motor_en_o` |

## The regulated channel

A sample goes through the channel like this:

1. **Down-conversion.** The ADC sample x is multiplied by the local NCO's cos and −sin:
   - I = x·cos >>> 13
   - Q = −x·sin >>> 13

   Both products saturate, since −32768·−32768 would overflow.
2. **Filtering.** A first-order IIR low-pass, y += (x − y)/2^K with K = 5, removes the 2·IF product. Its −3 dB point is about 1.2 MHz. About 1/50 rad of 2·IF ripple remains on the phase.
3. **Polar conversion.** `cordic_vec` does a quadrant pre-rotation and then 16 vectoring iterations with 4 guard bits. A final multiply by 1/K (39797/2^16) makes R the true magnitude. The latency is 18 clocks.
   - Phase error is below about 1 LSB + 10430/|v| LSB of a 16-bit turn.
   - Magnitude error is below 0.1 %.
4. **Regulation.** Each loop computes e = set − meas, then

   out = ff + (kp·e + I + kd·Δe)/256, with I += ki·e.

   The gains are unsigned Q8.8.
   - **Amplitude loop:** integrator and output are clamped to [0, 2^18−1].
   - **Phase loop** (`WRAP=1`): the error, integrator and output are all taken modulo one turn. The loop takes the short way round, and a drive phase of +½ turn and −½ turn are the same drive. A clamped phase integrator would stall at ±½ turn.
   - **Open loop:** with `loop_on` clear, the integrator is held at 0 and the output is the feedforward term only.
5. **Feedforward ramp.** While the channel is on, the amplitude setpoint climbs toward its target by `ramp_step` every 2^16 clocks (262 µs).
   - The ramped value is both the PID setpoint and, scaled by `ff_gain`/256, a feedforward term added to the amplitude output.
   - When the reflected power is above `pr_ramp_lvl`, the step is cut to a quarter. A cavity detuned by its own heating is then not driven harder while the tuner catches up.
6. **Polar modulation.** The output `nco` scales the amplitude by 1/K (CORDIC gain) and rotates it by accumulator + phase. The cosine, saturated to 16 bits, goes to the DAC.

From an ADC sample to its effect on the DAC takes about 40 clocks (160 ns).

## Oscillators and the phase-locked loop

Every NCO has a 32-bit phase accumulator clocked at 250 MHz, so its frequency resolution is 0.058 Hz. The default frequency word is the 31.6 MHz IF:

round(31.6/250·2^32) = 542 883 866

Each channel's word can be set separately. `sync_i` clears all accumulators together, so the LO and output NCOs of all channels stay in step.

The DPLL down-converts the reference IF (`ref_adc_i`) with its own NCO, mixer, filters and CORDIC. From the reference phase it forms

corr = kp·φ + (Σ ki·φ)/2^16

The correction is added to the frequency word of the DPLL's NCO and, scaled as described below, of every channel NCO. As a result the whole controller follows the reference frequency, and its phases are measured against the reference.

`locked_o` rises after 1024 consecutive samples with |φ| ≤ 512 LSB (2.8°). The window is wide because of the filter ripple.

The DPLL's own NCO runs at channel 0's frequency word, so the reference is expected at that frequency. A channel at a different frequency needs a proportionally different correction to stay locked. Each channel therefore scales the correction by its `pll_mult`, its frequency divided by the reference frequency, in Q8.8 (reset 1.0). The scaled correction is registered, which adds one clock.

For example, channels at 1×, 2× and 3× a reference use `pll_mult` = 256, 512 and 768.

## Tuner control

The tuner logic updates once per *sample tick* (`TICK_DIV` clocks; 50·10^6 = 200 ms by default). Each algorithm produces a signed velocity command. `stepper_ctrl` turns it into motor steps:

- **Rate.** A 28-bit rate accumulator gives |vel|·250 MHz/2^28 steps/s (0.93 steps/s per unit).
- **Pulse shape.** Step pulses are 10 µs wide and at least 20 µs apart.
- **Direction and position.** `dir_o` gives the sign, and a 32-bit counter keeps the position in steps. The host can clear the counter.

### Positional alignment and phase comparison

`position_pretune` commands vel = gain·(preset − pos)/256, clamped to ±k0. It reports *in position* within ±`pos_tol` steps.

`phase_align` does the same with the *tuning phase*: the drive phase minus the measured cavity phase of channel 0. This is the phase shift the cavity adds to the drive, and it crosses a known value at resonance.

Both algorithms need a setpoint (a step count or a phase) that moves with temperature. They are used only to bring the cavity close to resonance.

### Sliding mode extremum seeking

The reflected power Pr has a minimum at resonance, but where that minimum lies is not known in advance. The tuner speed is

dθ/dt = k0 · sgn(sin(π·s/ε)),  s = Pr + ρ·t

In this law, ρ > 0 sets a target rate of decrease of Pr, and ε is the spacing of the switching surfaces s = nε.

**How the law works.**

- **Moving the right way.** Pr falls. If it falls at least as fast as ρ·t grows, s stays inside one band between two surfaces, sin(πs/ε) keeps its sign, and the tuner keeps going.
- **Moving the wrong way.** Pr rises, s climbs at about 2ρ and soon crosses the next surface. The sign of the sine then flips, and so does the direction.
- **At the minimum.** Pr can fall no further, so s rises at ρ and crosses a surface every ε/ρ. The tuner dithers around the minimum.

The condition for the tuner to slide toward the minimum is dPr/dθ·k0 + ρ < 0. In words, ρ must be smaller than the rate at which full-speed motion on the flank lowers Pr. The wrong-way excursion lasts at most about ε/(2ρ).

**How `sliding_mode` computes it.** Only s/ε modulo 2 matters: the sign of sin(πs/ε) is + in even bands and − in odd ones. So s is never formed. The block keeps x = s/ε mod 2 as an unsigned Q1.16 word:

```
x  = Pr * inv_eps  +  R            (inv_eps = 1/eps, Q0.16)
R += (rho_dt * inv_eps) >> 8       each tick (rho_dt = rho * tick, Q16.8)
```

- **Direction.** Bit 16 of x is the band parity, which gives the direction. A change of parity between ticks is a reversal.
- **No overflow.** R is a 17-bit register that wraps freely. The ρ·t term can grow for hours without overflow, and no reset of t is needed on re-entry.
- **Readback.** x is also the readback value `s_band`: π·s/ε as a fraction of a turn. It is the angle a "wheel" display on the host would show.
- **Tape.** A second, unwrapped copy of the ρt/ε accumulator gives `s_tape` = s/ε in Q16.16, for a moving "tape" display of s. It wraps only after 2^16 bands, and its low 17 bits equal `s_band`. The two displays stand still when ρ and ε suit the cavity.

**Switching surface skipping.** Chatter, meaning frequent useless reversals, wears the motor. Sometimes s comes down close to the *lower* surface of its band, within `skip_lvl` of a band; 0.1 band, the threshold the method was published with, is `skip_lvl` = 6554. This means Pr is falling faster than ρ·t grows, so the tuner is clearly going the right way. In that case the block adds an extra `skip_dt` (in ρ·dt units, scaled the same way) to R. That pushes s back up into the band: it skips off the surface like a stone on water, where the plain law would cross it and reverse needlessly.

The block counts skips and reversals for the host. `skip_lvl = 0` turns skipping off.

On the test plant in `tb_sliding_mode`, skipping reduced the ticks to converge from 335 to 141 and the reversals from 235 to 56.

**Choosing ε and ρ.**

- ε bounds the wrong-way excursion (about ε/(2ρ) ticks).
- ρ must satisfy the sliding condition above.

`rho_estimator` measures ρ for the actual cavity:

1. It swings the tuner at k0 for `rho_swing` steps forward and the same back, on the current flank.
2. It records |ΔPr| for each swing and the total number of ticks.
3. It returns ρ·dt = (|ΔPr_fwd| + |ΔPr_back|)·128/ticks. In Q16.8 this is half the observed Pr rate at full speed.

The factor ½ leaves margin in the sliding condition. Swings start and end on sample ticks, so Pr is read at the tuner's sample rate and every swing counts at least one tick even with a fast motor. If the host writes `rho_dt = 0`, sliding mode uses the last estimate.

**Open loop.** With `sm_open` set, sliding mode still computes s, updates `s_band` and counts reversals, but sends no motion to the tuner. The operator can then watch the wheel and tape aids settle for a choice of ρ and ε before closing the loop.

### Power-up sequence

With `auto_seq` set, `powerup_seq` steps through four states:

| State | RF on channel 0 | Leaves when |
|---|---|---|
| OFF | off | `auto_seq` is set |
| POSITION | pulsed, 1 ms of every 10 ms | the tuner is in position and the cavity amplitude has exceeded `rf_ok_lvl` during a pulse |
| PHASE | CW | Pr has stayed below `pr_sm_lvl` for 5 ticks |
| SLIDING | CW | never; it stays until `auto_seq` is cleared, which returns it to OFF |

Without `auto_seq`, the host picks the mode directly (`man_mode`). A rho estimation, once started, takes over the motor until it finishes.

## Host reports and register map

Every 48-bit report is `{op[47:40], addr[39:32], data[31:0]}`, with op = 1 for write and op = 2 for read. Each report is answered one clock later:

- A write is echoed with the stored value.
- A read returns the register.
- An unknown address or operation answers op = 0, data = 0.

All settings reset to 0, with two exceptions: each channel's frequency word resets to the IF, and its `pll_mult` resets to 256.

| Address | Contents |
|---|---|
| 0x00+16c … 0x0C+16c | channel c settings, in order: amp_set, ph_set, amp kp/ki/kd, phase kp/ki/kd, ramp_step, ff_gain, {rf_on, loop_on}, ftw, pll_mult |
| 0x40 … 0x4E | tuner settings, in order: preset_pos, pos_tol, k0, pos_gain, ph_gain, tune_ph_set, rho_dt, inv_eps, skip_lvl, skip_dt, pr_sm_lvl, pr_ramp_lvl, rf_ok_lvl, rho_swing, {sm_open, man_mode[4:2], auto_seq, motor_en} |
| 0x4F | command pulses: bit 0 clears the position counter, bit 1 starts a rho estimation |
| 0x50 … 0x52 | DPLL kp, ki, enable |
| 0x80+8c … 0x84+8c | channel c readback: amplitude, phase, drive amplitude, drive phase, ramped setpoint |
| 0x98 … 0x9F | tuner readback: position, mode, velocity, s_band, {valid, rho estimate}, skips, reversals, Pr |
| 0xA0 … 0xA2 | DPLL correction, DPLL locked, tuner s/ε (Q16.16, the tape value) |

Mode codes: 0 off, 1 position, 2 phase, 3 sliding, 4 rho estimation.

## Number formats

| Quantity | Format |
|---|---|
| ADC/DAC samples | 16-bit two's complement |
| I, Q, amplitude | 18 bit; amplitude 2^18−1 = DAC full scale |
| Phase | 16-bit fraction of a turn (signed in the loops) |
| NCO accumulator, frequency word | 32-bit fraction of a turn per clock |
| PID gains | unsigned Q8.8 |
| Tuner position | signed 32-bit steps |
| Velocity | signed 16 bit, in 2^-28 of a step per clock |
| Pr | unsigned 16 bit, arbitrary units |
| ρ·dt, skip_dt | Q16.8 Pr units per tick |
| 1/ε | Q0.16 per Pr unit |
| s_band | Q1.16, s/ε mod 2 |
| s_tape | Q16.16, s/ε |

## Where this RTL goes beyond, or departs from, the published description

The published description gives the following:

- the block diagram of the amplitude/phase channel;
- the 250 MHz sampling, the 31.6 MHz IF, three channels per controller and the 48-bit reports;
- the three tuning algorithms, their power-up order and the RF pulsed/CW states;
- the sliding mode law and the idea of surface skipping;
- the ramp slow-down on high reflected power;
- the existence of an internal DPLL, an internal stepper controller and a rho estimation routine.

Everything else is a design choice made here and may differ from the original hardware:

- all word widths;
- the filter type;
- the CORDIC precision;
- the PID form;
- the DPLL's phase detector and loop filter;
- all transition conditions of the sequencer;
- the rho formula;
- the reading of "skip when s < 0.1" as "within 0.1 band of the lower surface";
- the report layout and the register map;
- the stepper pulse timing.

Other departures:

- **One tuner, on channel 0.** How many tuners a controller drives is not stated.
- **Pr is an input word.** How the reflected power is measured is not stated, so it enters as `pr_i`.
- **Tuner tick.** The 200 ms tick is taken from the time unit of the published power-up plot. The actual sampling time is not given.
- **DPLL correction per channel.** It is scaled by a per-channel multiplier (see above). How the original keeps its frequencies phase-locked is not published.
- **Sliding mode open loop.** The original's operator panel offers open and closed loop for sliding mode without saying what open loop does. Here it means "compute but do not move".
- **Not included:**
  - the analog front end (ADCs, DACs, 75 MHz LO, mixers);
  - the USB/HID device and its embedded interpreter, which in the original take about 3 ms per report;
  - the motor driver;
  - the operator GUI, whose wheel and tape displays only need `s_band` and `s_tape`;
  - the I/Q controller used only as a comparison.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Every testbench ends by printing `TB_RESULT checks=N failures=M` and has a watchdog. The reference values are computed in the testbench, independently of the RTL (for example with `$atan2`, `$cos` and exact integer models).

| Testbench | What it checks |
|---|---|
| `tb_mixer`, `tb_lowpass`, `tb_cordic_vec`, `tb_nco` | arithmetic against real-valued models; NCO frequency, phase latency (19 clocks) and amplitude |
| `tb_pid`, `tb_amp_ramp` | gains, clamping, wrap-around, open loop; ramp rate and quarter-rate slow-down |
| `tb_llrf_channel` | one channel closing its loop on a behavioural cavity (`tb/cavity_model.sv`) to the set amplitude and phase |
| `tb_dpll` | lock to an offset reference and the resulting frequency correction |
| `tb_stepper_ctrl`, `tb_position_pretune`, `tb_phase_align` | step rate and pulse spacing, direction, position count; control laws |
| `tb_sliding_mode` | the band arithmetic against a real-valued model; closed-loop convergence with and without skipping |
| `tb_rho_estimator`, `tb_powerup_seq`, `tb_tuner_ctrl` | the estimate; state order and RF gating; the whole tuner on a model cavity, including sliding-mode open loop |
| `tb_hid_regs` | every register through reports |
| `tb_isac_llrf_top` | end to end at short ticks. Configuration by reports, DPLL lock, three regulated channels, then the automatic power-up sequence and a rho estimation on a detuned cavity. It also checks the per-channel scaling of the DPLL correction. It counts each mechanism: lock, RF pulsing, ramp slow-down, each mode change, reversals, skips, estimation, report answers. |
| `tb_isac_llrf_full` | all parameters at their defaults (200 ms tick, 10 µs steps). DPLL lock, ramp and regulation of all channels, then tuner motion at full speed with the step rate checked. The automatic sequence is run only at short ticks. The whole design simulates about 0.8 ms of time per second, so one 200 ms tick costs about four minutes, and the sequence needs at least eight ticks. |

Simulation with Verilator 5 from the project root:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/llrf_pkg.sv tb/tb_sliding_mode.sv --top-module tb_sliding_mode -Mdir obj
./obj/Vtb_sliding_mode
```

Replace the testbench name for any other block. The end-to-end and full-size testbenches run in seconds to a few tens of seconds.

`isac_llrf_top` synthesises with Yosys to about 4 150 cells and 17 000 flip-flop bits, before mapping to a target.
