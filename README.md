# FPGA scanning transfer cavity lock

A scanning transfer cavity lock (STCL) stabilises several lasers against one
reference laser using a single Fabry–Perot cavity whose length is swept
periodically by a piezo. During each sweep every laser produces a
transmission peak at the moment the cavity length matches a multiple of its
half-wavelength. The reference laser is itself stable, so its peaks mark
fixed cavity lengths. A slave laser whose frequency drifts sees its peak move
in time relative to the reference peaks. The lock measures that position
once per sweep and steers the laser so that the peak stays where it belongs.

This repository holds synthesizable SystemVerilog for the firmware of one
FPGA board of such a lock. The board is a Red Pitaya type: a 125 MHz clock,
a 14-bit ADC, two 14-bit DACs and PWM pins. It is written after the
architecture published by Forti et al., "Long-term laser frequency
stabilization with an FPGA-controlled scanning cavity". The paper gives the
structure and the algorithms. Word widths, fixed-point formats, timing
details and the settings interface are this implementation's own choices,
and they are listed below.

## The idea in one picture

```
            scan_cfg                  ┌──────── ramp offset ◄─── PID 0 ◄── S_refL ◄─┐
               │                      │  ┌───── ramp amplitude ◄ PID 1 ◄── S_refR ◄─┤
               ▼                      ▼  ▼                                          │
         ┌──────────┐  ramp ───────────────────────────────► DAC (cavity piezo)     │
         │ ramp_gen │                                                               │
         └────┬─────┘ trig ──► trig_out (to auxiliary boards)                       │
              ▼                                                                     │
        ┌────────────┐  smp_idx                                                    │
 ADC ──►│acq_timebase│────────┐                                                     │
  │     └────────────┘        ▼                                                     │
  │            ┌────────────────────────────┐                                       │
  └───────────►│ 6 x peak_detect            │── S_refL, S_refR ────────────────────┘
               │  0: left reference         │── S_k (k = 0..3) ──► normalizer k ──► PID 2+k ──► PWM k / DAC
               │  1: right reference        │── gates ──► AOM enables (reference = OR of 0 and 1)
               │  2..5: slave lasers 0..3   │
               └────────────────────────────┘
```

Each board has six peak detectors: the two reference peaks and four slave
lasers. The two reference peaks are consecutive resonances of the reference
laser, so they lie exactly one free spectral range (FSR) apart. The
*main* board also generates the scan. It closes two more loops on the
reference peaks:

* the **left** reference peak is held at its setpoint by acting on the scan
  **offset**, which cancels drifts of the mean cavity length;
* the **right** reference peak is held by acting on the scan **amplitude**,
  which fixes the sweep speed and cancels changes of the piezo response.

Slave positions are never used raw. Each one is *normalised* to the two
reference peaks of the same sweep:

    N = (S - S_refL) / (S_refR - S_refL)

This cancels whatever moves all peaks together within one sweep. One PID per
slave drives N to its setpoint. Its output tunes the laser through a PWM pin,
or through a DAC when `dac_sel` routes it there.

An *auxiliary* board (`IS_MAIN = 0`) has no ramp generator and no reference
loops. It receives the scan trigger on `trig_in` and watches the same
photodetector. It finds the reference peaks itself, because it needs them to
normalise its own slave lasers. With several boards, up to four slaves can be
added per board.

## What happens during one sweep

This timing is the part that needs the most care.

1. **Trigger.** `ramp_gen` is a 32-bit phase accumulator. The sweep period is
   2^32/`step` clocks, and the default step 8590 gives 499,996 clocks
   (4.0 ms). In triangle mode the first half of the period rises and is the
   sweep that is measured. The second half brings the piezo back slowly. The
   trigger pulses as the phase wraps, at the start of the rising half. On the
   main board it starts the acquisition, and a 64-clock copy goes out on
   `trig_out`.
2. **Acquisition.** `acq_timebase` restarts a sample index at every trigger.
   It emits one index every `DECIMATION` = 32 clocks, for up to `N_SAMPLES` =
   16384 samples. One record is therefore 4.19 ms, a little longer than the
   4 ms sweep, so the next trigger always ends the record early. This
   retrigger is deliberate: the index always counts from the latest sweep.
   The whole rising half (7812 samples) lies inside the record.
3. **Gating.** Every detector has a time range, given as `center` and
   `size` in samples. While the index is inside the range, the detector's
   `gate` output opens its laser's AOM. Each laser is therefore injected into
   the cavity only around its own resonance, so higher-order modes and
   wandering unlocked lasers cannot disturb another laser's detection. The
   reference AOM is opened by either reference range, which gives the
   reference two windows per sweep. `always_active` keeps a gate open for the
   whole sweep, for example when two lasers must reach a beat-note detector
   at the same time.
4. **Peak search.** Inside its range a detector keeps the largest ADC sample
   and its index. The first strobe past the end of the range closes the
   search, or `acq_end` closes it if the range runs to the end of the record.
   The detector then pulses `done`. If the maximum reached the threshold
   (`height`), the result is `valid` and `pos` takes the new index.
   Otherwise `pos` keeps its old value. Closing at the end of the range,
   rather than at the end of the record, lets the slave loops act within the
   same sweep.
5. **Normalisation.** A `normalizer` waits, within one sweep, until all
   three of its detectors have reported: the slave and both references. The
   right reference normally comes last. It then runs a 29-step restoring
   division of |S − S_refL|·2^14 by (S_refR − S_refL). About 31 clocks after
   the last `done`, it outputs N as signed Q2.14 (16384 = 1.0). The result
   is valid only if all three peaks were valid and the right reference lies
   after the left one.
6. **Control.** Each PID updates exactly once per sweep, on its input's
   `done` pulse, and only if that input is valid and `locking` is set.
   Otherwise it is *halted* and keeps its output (sample and hold). A
   missing slave peak therefore freezes only that laser. A missing reference
   peak freezes both scan loops and every slave loop, because no slave can be
   normalised without it.

A new setting or a new actuator value thus appears roughly one range length
after the peak passes. That is far less than one 4 ms sweep, so the loop
bandwidth is set by the sweep rate and the actuators, not by the logic.

## Number formats

| quantity | type | format |
|---|---|---|
| ADC sample, DAC/PWM value, PID output | `sample_t` | signed 14 bit |
| peak position | `pos_t` | unsigned 14-bit sample index since the trigger |
| PID input and setpoint | `err_t` | signed 16 bit: positions as plain integers, normalised values as Q2.14 |
| gains `kp`, `ki`, `kd` | `gain_t` | signed 16 bit; P and D have 8 fraction bits, I has 12 |
| scan amplitude | `sample_t` | signed Q1.13 of full scale: `ramp = offset + (amplitude*w) >>> 13`, w ∈ [−8192, 8191] |

The PID law, with e = setpoint − input, is

    I   ← clamp(I + ki·e, out_min·2^12, out_max·2^12)
    out ← clamp((kp·e >> 8) + (I >> 12) + (kd·(e − e_prev) >> 8), out_min, out_max)

`ival_wr` loads the integrator with `ival`. This lets a loop be engaged from
the actuator's present value without a jump. For the main board, preload the
offset PID with the manual scan offset and the amplitude PID with the manual
amplitude, then set `offs_from_pid`/`ampl_from_pid` and `locking`.

## Blocks

| file | role |
|---|---|
| `rtl/stcl_pkg.sv` | widths, formats, configuration structs (`scan_cfg_t`, `peak_cfg_t`, `pid_cfg_t`), DAC source enum |
| `rtl/ramp_gen.sv` | triangle (piezo) or sawtooth (AOM scan) generator with offset/amplitude inputs and scan trigger |
| `rtl/acq_timebase.sv` | acquisition record timing: decimated sample index since the trigger, retrigger |
| `rtl/peak_detect.sv` | maximum search in a time range, threshold, sample and hold, AOM gate |
| `rtl/normalizer.sv` | N = (S − L)/(R − L) per slave, validity from all three peaks |
| `rtl/serial_divider.sv` | unsigned restoring divider, one bit per clock |
| `rtl/pid.sv` | once-per-sweep PID with halt, clamps and integrator preset |
| `rtl/pwm_dac.sv` | 14-bit PWM: 8-bit 256-clock PWM plus the 6 low bits spread over 64 periods in bit-reversed order |
| `rtl/stcl_top.sv` | one board: everything above, trigger in/out, DAC routing |

**PWM detail.** The board's stock PWM has 8 bits. Here the upper 8 bits set
the pulse length of each 256-clock period (488 kHz). The lower 6 bits add one
clock to some of the 64 periods of a 2^14-clock frame: period p is lengthened
if bit-reverse(p) is below the low bits. The average over a frame is exactly
the 14-bit code. Because the extra clocks are spread evenly, the ripple stays
at high frequency, where the external RC filter (10 kHz) removes it.

**Frequency jumps.** `slave_src[k]` selects which of the four slave
detectors serves laser k, both for its measurement and for its AOM gate.
Normally it is the identity. A laser that must alternate between two
frequencies can keep a second detector with a range at the other peak
position. To jump, the host writes three settings together:
* point `slave_src[k]` at the second detector;
* write the new setpoint;
* write `ival` plus `ival_wr` with the expected actuator change, as a
  feed-forward step.

The new peak then falls inside the new range, and the loop removes the
remaining error. How the jump is commanded is this implementation's choice;
the paper only says that two detectors can serve one laser.

**AOM scanning.** In the fast mode the cavity length stays fixed and the AOM
drive frequencies are swept instead. `scan_cfg.sawtooth` switches the
generator to a full-period rising sawtooth. `step` = 257,698 gives a 7.5 kHz
sweep. `dac_sel[1] = DAC_RAMP` puts this waveform on the second DAC, which
drives the frequency modulation of the AOM RF sources.

## Settings and ports of `stcl_top`

All settings are plain input ports, normally backed by host-writable
registers (the register bus itself is not part of this RTL). Per detector
(`peak_cfg[i]`): `center`, `size`, `height`, `enabled`, `always_active`. Per
PID (`pid_cfg[i]`, where 0 is left reference → offset, 1 is right reference →
amplitude, and 2..5 are slaves 0..3): `setpoint`, `kp`, `ki`, `kd`,
`out_min`, `out_max`, `ival`, `ival_wr`, `locking`. Scan (`scan_cfg`):
`step` (0 = default), `sawtooth`, `scan_ampl`, `scan_offs`, `ampl_from_pid`,
`offs_from_pid`, and `ext_trigger`, which lets a main board acquire on
`trig_in`. `dac_sel[d]` routes the ramp or one slave PID to DAC d. `slave_src[k]`
selects the detector (slave detector 0..3) that serves laser k. Slave k
always also drives `pwm_out[k]`. Read-back outputs: `ramp`, `scan_rising`,
`peak_pos`, `peak_valid`, `peak_done`, `peak_height`, `norm`, `norm_valid`,
`ctrl_out`, `ctrl_upd`.

Parameters: `IS_MAIN` (1), `N_SAMPLES` (16384), `DECIMATION` (32),
`RAMP_STEP` (8590), `TRIG_LEN` (64). The number of detectors (6) and slaves
(4) is set in `stcl_pkg`. Reset is synchronous and active low. Everything
runs in the single 125 MHz ADC clock domain; only `trig_in` is synchronised.

## What follows the published design and what does not

Taken from the paper:
* the scheme of one board: ramp generator with trigger, peak detectors,
  normaliser, PIDs;
* which reference peak steers the offset and which the amplitude;
* six detectors and four slaves per board;
* 14-bit converters and the 14-bit PWM;
* the 4 ms symmetric triangle with the rising half as the sweep;
* the sawtooth for AOM scanning;
* the threshold, the sample and hold, and halting a slave when a reference
  peak is missing;
* AOM gating during each range, with two windows for the reference;
* the main/auxiliary split with a shared trigger;
* setpoints given from outside, so that host software can add pressure
  compensation.

Choices made here where the paper gives no detail:
* the phase-accumulator generator and its scaling;
* the decimated sub-sampling and the retrigger rule;
* closing a peak search at the end of its range;
* the once-per-sweep PID update and its fixed-point law;
* the Q2.14 normalised format, with saturation;
* an own serial divider in place of a vendor divider core;
* the PWM coarse/fine split;
* the trigger pulse length and synchroniser;
* the DAC routing;
* replacing the register map with ports.

Known differences and open points:
* The published firmware lives inside an existing oscilloscope, PID and
  signal-generator framework. Its trace memory for display and its register
  bus are not reproduced here. Only the acquisition timing that the peak
  detection depends on is built.
* In the AOM-scanning mode a sweep covers only a few percent of an FSR, so it
  holds at most one reference resonance. The paper does not say how slave
  positions are then normalised. This RTL still needs two valid reference
  peaks to update a slave loop. Sweep rate and detection timing do support
  7.5 kHz. `tb_aom_scan` shows this by letting the cavity model place two
  reference resonances inside the sweep.
* The clock frequency, record length and decimation come from the Red Pitaya
  board and the published GUI's record duration (4.194304 ms), not from the
  text.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_ramp_gen` | every sample against a floating-point ideal triangle/sawtooth, trigger at phase wrap, period, saturation, default period 499,996 clocks |
| `tb_acq_timebase` | strobe spacing, index sequence, record length, retrigger |
| `tb_peak_detect` | position of the in-range maximum, out-of-range peaks ignored, threshold, hold, done timing, gate timing, range clipping |
| `tb_normalizer` | 300+ random triples against integer arithmetic, validity rules, pulse order, latency ≤ 31 clocks |
| `tb_pid` | 2000 random updates against a 64-bit model, halt, clamps, preset |
| `tb_pwm_dac` | high time per frame = code, per-period lengths, even spreading of the fine bits |
| `tb_stcl_top` | main + auxiliary board on a behavioural cavity (`cavity_model`), at reduced size (4096 samples, decimation 2, 8000-clock sweep) |
| `tb_stcl_full` | the main board at its default size (4 ms sweeps, 16384 × 32), about 270 sweeps, about 3 minutes |
| `tb_aom_scan` | AOM-scan mode at default size: 7.5 kHz sawtooth sent to the second DAC, 16,667-clock sweeps, one detection and one PID update per sweep, one slave locking and re-locking after a drift within 60 sweeps (about 2 s of simulation) |

The two system testbenches share `stcl_scenario`. It locks both reference
loops and the slave loops, then applies a cavity-length drift and a slave
laser drift, removes the slave light, removes the reference light, drives a
PID into its limit, makes slave B jump to a second detector and back, and
switches to the sawtooth. It checks the DAC routing
on every clock and reports how often each of these mechanisms occurred.
Every mechanism must occur at least once. The cavity model places a
triangular resonance for each gated laser at
`ramp = base + drift + control (+ m·FSR for the reference)`.

Concurrent assertions in `acq_timebase`, `peak_detect` and
`serial_divider` check these rules during every simulation run with
`--assert`:
* strobes come only inside an acquisition;
* a held peak position changes only on a valid result;
* the divider reports a result only at the end of a busy period.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/stcl_pkg.sv tb/tb_stcl_top.sv --top-module tb_stcl_top -o sim
./obj_dir/sim
```

Replace `tb_stcl_top` with any other testbench name.

## How far to trust it

The blocks are checked against independent models, and the closed loop is
checked against a behavioural cavity with ideal, noise-free peaks. No
measurement noise, piezo dynamics or laser frequency response is modelled.
The loop gains in the testbenches are chosen for that model and are not
recommendations for real hardware. Timing closure at 125 MHz has not been
analysed. The widest paths are the 16×17-bit PID products and the ramp
scaling multiply, both single-cycle and combinational.
