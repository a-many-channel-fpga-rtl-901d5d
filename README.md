# A many-channel FPGA control system in SystemVerilog

This is a complete control system for one FPGA running at 100 MHz. The FPGA sits between
16-bit converters and an atomic-physics experiment and runs many feedback loops side by
side. It provides:

- nine fast laser/cavity servos, each with automatic lock acquisition and a slow dither
  lock that removes the lock offset;
- eight temperature servos, each switching a heater through a pulse-width output;
- an arbitrary waveform sequencer for a magneto-optical trap;
- a gated integrator that subtracts the background from fluorescence signals;
- the slow digital I/O and a serial link that changes any parameter at run time.

The design's central idea is that no servo needs a hardware multiplier. Each filter
coefficient is a power of two, optionally corrected by a second shifted term: 1, 1.25, 1.5
or 0.875 times 2^-n. A PID therefore costs only adders and shifters. That is cheap enough to
place many servos on one chip, and short enough to keep the servo path to a few clock
cycles.

## Signal flow at a glance

```
 fast ADC 0..8 ──► cavity_servo ×9 ─────────────────────────────► fast DAC 0..8
 slow ADC 0..8 ──► (transmission / reflection: lock threshold + lock-in)
 slow ADC 11..15 ─► temperature_servo ×8 ─► heater bits ─► shift_register_io ─► 26 outputs
                                                               ◄── 22 inputs
 awg_sequencer ──► laser frequency, intensity, trigger ──────────► fast DAC 9..11
        └─ gate ─► gated_integrator ◄── fast ADC 9 (fluorescence) ─► fast DAC 12..13, result RAM
 serial input ──► param_loader ──► register file ──► every configuration word, slow DAC 0..15
```

`mcfs_top` holds all of this.

- **Converter registers.** Every fast ADC sample passes through one register on entry, and
  every fast DAC sample passes through one register on exit.
- **Slow ADC.** The slow ADC set is captured on `slow_adc_strobe`. That strobe is also the
  temperature servos' update tick: 125 kHz when all 16 channels are converted in turn.
- **Converter interfaces.** The converter chips' own serial/parallel interfaces are not
  part of this RTL. The top exchanges plain 16-bit two's-complement samples.
- **Display.** The touchscreen display is not part of this RTL either. Its inputs are
  ports: lock status, lock enables, dither and temperature-servo state.

## Number formats

| Quantity | Format |
|---|---|
| Converter samples | 16-bit signed (`sample_t`) |
| Error signals inside a servo | 16.9: 16 converter bits and 9 sub-LSB bits (`err_t`, 25 bits) |
| P and I filter words | 16 + 9 + 32 = 57 bits |
| D filter word | 16 + 9 + 16 = 41 bits |

The 9 sub-LSB bits let the dither and the offset correction act below one converter LSB.
The extra internal bits let gains and corner frequencies lie far below the 100 MHz update
rate.

A coefficient (`coef_t`, 9 bits) is `{on, frac[1:0], shift[5:0]}`, with value
`on · 2^-shift · (1 + {0, +1/4, +1/2, -1/8}[frac])`.

Multiplying by a coefficient is `(v + (v >>> k)) >>> shift`. Every right shift in the design
rounds: it adds `2^(s-1)` before shifting by `s`. This rounding removes the bias that plain
truncation would add to every integrator.

## The shift-add PID

A PID (`pid_filter`) is the sum of three filters that run in parallel.

**P and I (`iir_first_order`).** Both compute `y0 = y1 − w·y1 + (G/2)(x0 + x1)`.
- The filter's DC gain is `G/w`.
- For P, `w` is the high-frequency roll-off and `G = w·P`.
- For I, `w` is an optional low-frequency gain cap, and `G = I·T`.
- The register holds `G/2`.

**D (`iir_second_order`).** It computes `y0 = y1 − w²·y1 + dy − γ·dy + (D/2)·dx`, with
`dy = y1 − y2` and `dx = x0 − x2`.
- The gain multiplies only the input difference, and the roll-off terms multiply only the
  outputs. Gain and frequency response are therefore set independently.
- **Truncation guard.** When `dy ≠ 0` but `γ·dy` rounds to zero, `γ·dy` is forced to ±1 LSB
  of the internal word. Without this guard, truncation can stop the damping term from
  acting, and the output can drift until it overflows.
- For the fast servos, `w²` and `γ` are plain powers of two (`FINE_ROLLOFF = 0`). `D/2`
  keeps the two fractional bits.

**Timing.**
- The D output feeds the sum directly: one clock from error to PID output.
- The P+I adder is pipelined, so P and I arrive one clock later.
- A fast servo path is therefore one clock through the ADC register, one or two clocks
  through the PID, and one clock through the DAC register: 30 ns of logic for D, on top of
  the converters' own latency.

**State handling.** All filter words saturate rather than wrap. `en = 0` clears the filter
state; this is how a servo restarts when it locks.

## Laser/cavity servo

`cavity_servo` implements one lock. Its input is a fast error signal, such as a
Hänsch–Couillaud signal. The PID input is that error, plus a dither, plus a slow correction,
all in 16.9. The PID output plus an auto-lock scan, rounded and saturated to 16 bits, goes to
a fast DAC.

### Automatic lock acquisition

- `lock_threshold` compares the cavity transmission (from a slow ADC) with a threshold.
  Reflection mode (`thr_below`) reverses the comparison.
- While the threshold is not passed, the PID is held cleared and `autolock_scan` sweeps
  the output as a triangle between `scan_lo` and `scan_hi`.
- The scan step has 16 fractional bits. The sweep can therefore be slow enough for a
  transmission signal sampled at only 125 kS/s: 1/16 LSB per clock in the tests.
- The threshold signal normally comes from the servo's own slow channel. `trans_ext` and
  `trans_sel` can point it at any slow ADC channel. Two locks can then share one signal,
  for example the power of a sum-frequency beam that both locks should maximise. The same
  signal feeds the lock-in.
- Once the threshold is passed, the PID is enabled and the scan freezes. The PID then
  starts from the point where lock was found.
- The status output distinguishes three states:
  - unlocked;
  - recently locked (for less than `HOLD_CYCLES`, 5 s);
  - steadily locked.

### Dither synthesis

`dither_synth` makes a nearly sinusoidal dither without a sine table.

- A period has 60 coarse steps. Each step lasts `dither_step_len + 1` clocks.
- The frequency is therefore 100 MHz / (60·(len+1)). This spans 1.67 MHz down to below
  100 µHz with the 35-bit length.
- A three-level staircase s(k) is integrated twice, once per coarse step. s(k) is +1 for
  120°, 0 for 60°, −1 for 120°, and 0 for 60°.
- The staircase has no third harmonic. Each integration divides harmonic n by another
  factor of about n. In simulation the integrated waveform has h3 = 0, h5/h1 = 0.008 and
  h7/h1 = 0.003.
- The integrators work in units of 1/60. Their phase-0 values are the periodic solution,
  computed by constant functions in `mcfs_pkg`. They are reloaded every period, so they
  never drift.
- The output is `round(v2 · 2^dither_shift / 256)` in 16.9. At `dither_shift = 8` it peaks
  near ±6000, about ±11.7 LSB.

### Lock-in and correction

`lockin_demod` multiplies the transmission by a demodulation waveform and sums over exactly
one dither period.

- The demodulation waveform has the same three-level shape (−1/0/+1, again free of the
  third harmonic). Each term is therefore an add, a subtract or nothing.
- It produces in-phase and quadrature sums for the 1st, 2nd and 3rd harmonics.
- A period during which the dither was inhibited is discarded. So is the period in which
  lock was acquired.

The first-harmonic in-phase result is integrated once per period into the correction. The
integrator is a first-order shift-add filter, normally with no leak. The integrator runs
only while the servo is locked and `corr_on` is set. The correction shifts the lock point
until the transmission sits at its peak, which cancels the lock offset of the fast error
signal.

**Scaling lockin_shift.** The lock-in sums one sample per clock, so its output scales with
the dither period.
- Set `lockin_shift` to about log2(clocks per period) − 5 to keep the correction loop gain
  unchanged.
- The tests use a shift of 2 for a 120-clock period, and 9 for a 19,200-clock period.

**Dither inhibit.** The `dither_inhibit` input stops all dithers and their lock-ins at once,
for example while fluorescence is detected.

### Two dithers taking turns

Two dither locks that see the same signal disturb each other. An example is a doubling
cavity dithered through its error signal, together with a laser dithered in frequency to
follow that cavity.

- `dither_alternator` lets one chosen pair of servos take turns: one dithers while the other
  is inhibited.
- The turn passes after a set number of completed lock-in results of the active servo, so
  each servo always gets whole dither periods.
- The inhibited servo's correction simply holds its value until its next turn.

## Temperature servos with pulse-width heaters

`temperature_servo` runs the same PID, updated once per slow-ADC sample.

- **Error.** The error is `(setpoint + offset) − reading`, where the reading comes from
  one of the five temperature channels (`adc_sel`).
- **Overall gain.** The PID output, rounded to 16 bits, is multiplied by a 7-bit signed
  gain `mult/16`. This is the only multiplier in the design, and it is small.
- **Preset.** A preset is added to the product. When a servo is switched on, `preset_ramp`
  raises the preset by one unit every `ramp_div + 1` ticks. It enables the PID only once
  the preset target is reached, which avoids a thermal shock.
- **Fixed-coefficient servos.** Two servos take their P/I/D coefficients from registers.
  Six use a constant coefficient set (`FIXED_PID = 1`, `TEMP_FIXED_PID`) and keep only the
  overall gain adjustable, which saves logic.
- **Duty cycle.** The result is a heater on-time in 1/16 of a shift-register tick.
  `vdc_output` turns it into a 1 kHz pulse train on a shift-register output bit.
- **Sub-tick resolution.** One period is 2000 ticks of the 2 MS/s bus. At the start of each
  period the next value of {0, 15, 1, 13, 3, 11, 5, 9, 7, 8, 6, 10, 4, 12, 2, 14}/16 is
  added before truncation.
  - Over 16 periods this gives 16× finer average resolution.
  - The most significant fractional bit toggles every period, and the least significant one
    changes slowly.
  - Example: 1653.25 ticks gives 12 periods of 1653 and 4 of 1654.
- **Staggered periods.** The eight heaters' periods are staggered by 2000/8 ticks. Their
  pulses therefore do not all start together, which spreads the load on a shared heater
  supply.
- **Analog output option.** Any slow DAC can follow a temperature servo instead of its
  register value. It then outputs the servo's drive word divided by two, from 0 to +full
  scale. This turns a temperature servo into a slow servo with an analog output, for
  example for a heater driven by a linear amplifier.

## Waveform sequencer and gated integrator

### awg_sequencer

`awg_sequencer` steps through a table of up to 16 segments rather than replaying stored
samples. This is why its waveforms can be far longer than any memory would allow.

- **Time base.** The time base is the modulation cycle of a built-in `dither_synth`, used
  as the FM source. At `fm_step_len = 32` a cycle is 60 × 33 = 1980 clocks, i.e. 50.5 kHz.
- **Segment contents.** Each segment has:
  - a duration in modulation cycles (24 bits);
  - a load mask and levels for the three channels: laser frequency, laser intensity and a
    two-level trigger;
  - a 16.16 slope added every cycle, for ramps;
  - an FM-enable bit for the frequency channel;
  - the gate for the integrator.
- **FM boundaries.** The FM term is taken relative to its phase-0 value, and segments
  change only on cycle boundaries. The frequency modulation therefore always begins and
  ends without a frequency step.

### gated_integrator

`gated_integrator` sums the fluorescence input over the '+' window. It then sums the
background over the '−' window, which comes after the atoms have been pushed out of the
trap.

When the '−' window closes, it forms two results:
- the difference (signal minus background);
- the change of that difference from the previous cycle. The trap's field gradient is
  reversed every cycle, so this is the trapping-minus-anti-trapping signal.

Both results:
- are written to a 1024-entry RAM that can be read back;
- drive the two monitor DACs, scaled by `2^-mon_shift`.

A 16.6716 ms window is 842 modulation cycles. A whole trap-and-detect cycle fits in a few
segments.

## Slow digital I/O and parameter loading

### shift_register_io

`shift_register_io` serves 26 outputs and 22 inputs through seven pins:
- a 50 MHz shift clock;
- a latch strobe and a load strobe;
- two output chains of 13 bits;
- two input chains of 11 bits.

A frame of 50 clocks refreshes all bits at 2 MS/s. Its end is the tick of the pulse-width
outputs.

Output bits 0..7 are the heater bits of temperature servos 0..7. Bits 8..25 come from a
register.

### param_loader

`param_loader` receives 48-bit frames over a three-wire serial input: a 16-bit address
followed by 32 bits of data. Frames of any other length are dropped.

**Register map.** All registers reset to zero, which means everything is off.

| Address | Contents |
|---|---|
| `0x000 + 8s + w` | cavity servo `s`, word `w` of `cavity_cfg_t` (w = 0 least significant) |
| `0x100 + 8t + w` | temperature servo `t`, word `w` of `temp_cfg_t` |
| `0x200 + 8g + w` | sequencer segment `g`, word `w` (0..5) of `awg_seg_t` |
| `0x300 + k` | slow DAC `k`: bits 15:0 value; bit 19 set = follow temperature servo bits 18:16 |
| `0x310` | shift-register outputs 8..25 |
| `0x311` | sequencer: bit 0 run, bits 5:1 segments used, bits 10:6 FM amplitude |
| `0x312`, `0x313` | FM coarse-step length, bits 31:0 and 34:32 |
| `0x314` | gated-integrator monitor scaling |
| `0x315` | dither alternation: bit 0 on, bits 4:1 and 8:5 the two servos, bits 31:16 lock-in results per turn |

**Field layout.** The packed structs in `rtl/mcfs_pkg.sv` give the field layout, listed
from the most significant bit downwards. The servo-enable bit of a cavity servo is in its
last word (w = 7). Writing that word last therefore arms the servo only once its other
parameters are in place.

## Where the design follows the source and where it chooses

**Taken from the published description.** The following come from the description of the
original system:
- the filter equations, word lengths (57 and 41 bits) and coefficient form;
- the ±1 LSB guard;
- the P+I pipelining;
- the 60-step twice-integrated dither and its third-harmonic-free staircase;
- the three-level lock-in;
- the 5 s lock-status split;
- the 7-bit gain in 1/16 steps;
- the 1/16 VDC sequence, the 2 MS/s bus and the 1 kHz period;
- the 50.5 kHz modulation cycle;
- the gated integrator's two differences;
- the channel counts, and 2 adjustable plus 6 fixed temperature servos;
- taking turns between two dithers;
- a shared threshold/lock-in signal;
- staggered heater pulses;
- slow servos with analog as well as digital outputs.

**This design's own choices.** The following are this design's choices and may differ from
the original:
- **Encodings and wiring:**
  - the register map and serial frame format;
  - the shift-register frame and bit order;
  - the segment table format and its linear ramps;
  - how eight temperature servos share five temperature channels (selection by register);
  - switching dither turns on counted lock-in results;
  - the stagger pattern of the heater periods;
  - the scaling of a temperature servo's drive word onto a slow DAC;
  - saturation of internal words.
- **Scan and ramp:**
  - the triangle shape of the scan;
  - the preset ramp step of one unit.
- **Dither and correction:**
  - the correction uses the first-harmonic in-phase lock-in output;
  - both dither integrations advance once per coarse step, so the amplitude does not
    depend on the frequency;
  - the third-harmonic lock-in windows are quantised to a 3-step grid;
  - a narrow feature at the plateau centre of the published staircase is omitted, because
    any such one- or two-step feature would add a third harmonic.
- **Fixed temperature coefficients.** The fixed temperature PID coefficients are an example
  set: P = 1/2 with roll-off 2^-4, integrator 2^-14, D off.

**Not included:**
- the touchscreen controller;
- the converter chip interfaces;
- USB/Ethernet;
- the analog circuits;
- pipelining one PID across several slow servos. This is suggested as a resource saving;
  here each temperature servo has its own filters;
- a choice of slow ADC sampling patterns (e.g. two channels at 1 MS/s). That belongs to the
  converter interface.

## Verification

Each block has a self-checking testbench in `tb/` that compares it against an independent
model. Each prints `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_iir_first_order` | random inputs and coefficients against a 128-bit reference |
| `tb_iir_second_order` | the same, including the ±1 LSB guard |
| `tb_pid_filter` | P/I/D sum and the one-clock extra P/I latency |
| `tb_lock_threshold` | lock and status timing |
| `tb_autolock_scan` | triangle, limits, hold, fractional step |
| `tb_dither_synth` | period, amplitude, harmonic content |
| `tb_lockin_demod` | I/Q of each harmonic, inhibit |
| `tb_cavity_servo` | closed loop: scan, lock, offset correction, inhibit, loss and relock |
| `tb_preset_ramp`, `tb_vdc_output`, `tb_temperature_servo` | ramp, duty sequence, closed thermal loop |
| `tb_awg_sequencer`, `tb_gated_integrator` | 1980-clock cycle, segments, FM continuity, windows, RAM |
| `tb_shift_register_io`, `tb_param_loader` | bus timing and frames |
| `tb_dither_alternator` | turn-taking against a reference model |
| `tb_mot_cycle` | four trap-detection cycles at real durations (400 ms loading with FM, 16.6716 ms windows), results against sums of the same samples; about 75 s |
| `tb_mcfs_top` | whole system, lock hold time shortened to 200 µs |
| `tb_mcfs_top_full` | whole system, every parameter at its default |

The two system tests share `tb/mcfs_top_env.sv`. That environment:
- loads all parameters over the serial pins;
- models nine cavities, the temperature sensors, the fluorescence and the shift-register
  chains;
- runs about 2 M clocks;
- counts every mechanism: lock on all nine servos (one in reflection mode), lock loss and
  relock, offset removal by the dither lock, inhibit, alternating dithers, an external
  threshold signal, preset ramp, adjustable and fixed temperature servos, sub-tick duty,
  staggered heater periods, a slow DAC following a temperature servo, FM, ramps, gated results, RAM, monitors and static paths.

A test fails if any mechanism never happened. The full-size run takes about 10 s of wall
time in Verilator.

To run a testbench with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal --top-module tb_mcfs_top_full \
  -y rtl -y tb +libext+.sv rtl/mcfs_pkg.sv tb/tb_mcfs_top_full.sv
./obj_dir/Vtb_mcfs_top_full
```

**Lint warnings.** Verilator lint shows only unused-bit warnings. These are the upper bits
of the 64-bit arithmetic temporaries after saturation, and the padding fields of the
configuration words.
