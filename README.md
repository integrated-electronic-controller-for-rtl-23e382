# Dithering feedback controller for self-configuring photonic circuits

A programmable photonic chip is built from many Mach-Zehnder
interferometers (MZIs). Each MZI has thermal phase shifters (heaters), and
each must be tuned so that its light goes fully to one output. The right
heater settings depend on the input light, on temperature and on
fabrication, so they cannot be stored in a table. Instead, every MZI gets
its own feedback loop. A photodiode watches the output that should stay
dark (the drop port). The loop moves the heaters until that photocurrent
reaches a minimum, and keeps it there.

This repository holds the digital core of an 8-channel controller chip for
such loops. One channel serves one MZI: one photodiode input and two heater
outputs. Two chips tune a 16-input beam coupler, a binary tree of 15 MZIs
that gathers a distorted free-space beam into one waveguide. The same
design drives ring resonators (one heater per device) and other devices
that are tuned to an extremum.

The loop needs no model of the device. A small square wave (the *dither*)
is added to each heater, and the photocurrent is multiplied by the same
square wave. The result is proportional to the slope of the device response
with respect to that heater. An integrator drives this slope to zero, so it
settles at the minimum. The two heaters of one MZI use square waves that
are 90 degrees apart. These are orthogonal, so one photodiode separates the
two slopes. All channels share the same pair of square waves.

## Signal path of one channel

```
 photodiode -> TIA + gated integrator -> 10-bit ADC            (analog, off this RTL)
                 ^ gain step (0..5)          | code, 100 kS/s
                 |                           v
            gain_adjust: picks the gain for the next sample,
                         weighted = code << 2*(5 - gain)       (20 bit, ~ photocurrent)
                                             |
            +--------------------------------+-------------------------------+
            v chain A (0 deg dither)                           chain B (90 deg) v
   sq_demod: +/- weighted  (sign = dither state of that sample)            (same)
   loop_integrator: acc += (-/+ demod) >> bw_shift, 24 bit, saturating
   word = acc[23:12]            (working point, proportional to heater power)
   + / - dith_amp               (square-wave dither, clamped to 0..4095)
   sqrt_pwl                     (control word -> DAC code, power becomes linear)
   sat_control                  (code outside [th_lo, th_hi] -> acc to midscale)
            v                                                                v
        12-bit DAC + driver -> heater 1                   12-bit DAC + driver -> heater 2
```

`control_chain` holds one column of this figure. `channel_logic` holds the
gain logic and both chains. `ctrl_asic_top` has eight channels, the sample
timer, the shared `dither_gen`, and the two serial registers.

## Timing of a sample, and why the reference is delayed

The controller works on ADC samples at 100 kS/s. With the default
10 MHz clock, `ctrl_asic_top` makes a `tick` every `CLK_PER_SAMPLE = 100`
clocks and sends it out as `adc_start`:

1. At `tick`, the front-end integration window of the last 10 us closes.
   The ADCs start converting, and the dither generator advances.
   In the same cycle, each channel stores the dither states that were on its
   heaters *during the closed window*. These are the reference bits for
   demodulating that window's sample.
2. The ADCs return all codes with one `adc_valid` pulse before the next
   `tick`. One clock later, `gain_adjust` outputs the weighted sample and
   the gain for the next window.
3. On the next clock, both integrators update. The DAC codes change at
   once. They are combinational from the integrator and the current dither
   state.

The demodulation reference must be the dither state of the window in which
the sample was taken, not the current one. Otherwise the 0-degree dither
leaks into the 90-degree chain, and the two loops disturb each other.

The dither period is `4 * dith_quarter` samples. The default quarter is 2,
so the period is 8 samples (12.5 kHz). A whole number of samples per
quarter keeps the two square waves exactly orthogonal over each period.

**Integrator ripple.** The multiplier does not remove the DC photocurrent.
The DC term adds +DC on one half-period and −DC on the other, and cancels
only over a whole period. Within a period, the working point therefore
swings by about DC·2^−(12+bw_shift) words. At large photocurrents with
`bw_shift = 0`, this swing is tens of words. It shrinks as the loop finds
the minimum, because the DC term itself vanishes there. When a loop must
work at a maximum of a large current, use a larger `bw_shift`.

## Gain steps and sample weighting

The photocurrent at the drop port spans from about 1 mA (untuned) to below
100 nA (tuned), about 50 dB. A 10-bit ADC covers this with six front-end
gains, each 4× above the last. Step 0 is the lowest gain.

After each sample, `gain_adjust` moves one step:

- down, when the code is at full scale (≥ 1023);
- up, when the code is below 128.

The gap between the two thresholds is wider than the ×4 step, so one step
never triggers the opposite step on the next sample. As the current sweeps
up, the codes form a sawtooth between about 256 and 1023.

Each sample is scaled by the inverse of the gain it was taken with:
`weighted = code << 2*(5 - gain)`. This gives a 20-bit value proportional
to the photocurrent, so gain changes do not show up as jumps in the loop.
One consequence is that the loop gain scales with optical power. The loop
slows down as the light on its photodiode falls.

## Square-root compression

Heater power is proportional to V², and the phase shift to power. The loop
works in power units: the control `word` is proportional to heater power.
`sqrt_pwl` maps the word to the DAC code (∝ voltage) with straight segments
between the points x = 4^m, y = 64·2^m (m = 0..5). These points lie on the
exact curve y = 64·√x. In segment m, the slope is 64/(3·2^m), so it halves
each time the input grows by a factor of 4:

```
y = 64*2^m + ((x - 4^m) * 5461) >> (8 + m),    x in [4^m, 4^(m+1)),   y(0) = 0
```

The worst error is about 170 codes (4.2% of full scale) in the middle of
the top segment. The error matters little, because the loop relies only on
monotonicity. `sqrt_en = 0` bypasses the compressor, so the DAC gets the
word directly.

## Saturation control

The heaters span about 4π of phase, so every optimum appears more than once
in their range. Each chain compares its DAC code with `th_lo` and `th_hi`.
When the code leaves this window, the chain puts its integrator back to
midscale (word 2048, half power, about 2π). The loop then locks on an
equivalent optimum, away from the supply rails.

## Modes

Each chain has its own mode:

| mode | code | behaviour |
|---|---|---|
| HOLD   | 0 (and 3) | working point frozen, no dither: heaters at fixed values (loops paused) |
| RUN    | 1 | closed loop |
| MANUAL | 2 | integrator forced to `manual` and driven without dither. Later RUN starts from there. Use it to upload a precomputed configuration or to characterise a device. |

The `minimise` bit selects the sign of the integral gain: 1 seeks a minimum
of the photocurrent (normal use at a drop port), 0 a maximum.

## Serial registers

Both registers use plain synchronous strobes in the system clock domain,
and both shift MSB first.

**Configuration** (`cfg_shift`, `cfg_sdi`, `cfg_load`, `cfg_sdo`), 608 bits:

- Shifting only changes a shadow copy. A `cfg_load` pulse copies it into
  the active configuration in one cycle.
- `cfg_sdo` is the last bit of the shadow copy, so chips can be
  daisy-chained: shift the farthest chip's image first.
- Image layout: `{global[7:0], ch7, …, ch0}`, and `global = dith_quarter`.
- Each channel takes 75 bits, MSB first:

| bits | field |
|---|---|
| 74:73 | chain A mode |
| 72:65 | chain A dither amplitude (control-word LSBs) |
| 64:53 | chain A manual word |
| 52:31 | chain B, same three fields |
| 30 | minimise |
| 29:25 | bw_shift (loop gain 2^−bw_shift) |
| 24 | sqrt_en |
| 23:12 | th_lo (DAC code) |
| 11:0 | th_hi (DAC code) |

Reset values:

- all chains HOLD at word 2048, dither amplitude 32, manual word 2048;
- minimise on, `bw_shift` 4, square root on;
- thresholds 0 and 4095 (window fully open);
- `dith_quarter` 2.

**Monitor** (`mon_capture`, `mon_shift`, `mon_sdi`, `mon_sdo`), 296 bits:

- A `mon_capture` pulse loads `{ch7, …, ch0}`. Each channel is 37 bits:
  `{adc[9:0], gain[2:0], dac_a[11:0], dac_b[11:0]}`.
- `gain` is the step the stored sample was taken with. The photocurrent is
  therefore `adc · 4^−gain` times the full-scale current of step 0.

## Top-level interface (`ctrl_asic_top`)

Parameters: `NCH = 8`, `CLK_PER_SAMPLE = 100`, `ACC_W = 24`.

- `adc_start`: out, one-clock pulse per sample.
- `adc_data[NCH]`: in, 10-bit codes, taken together on `adc_valid`.
  `adc_valid` must come at least one clock after `adc_start` and before the
  next one. An assertion checks the first condition.
- `gain[NCH]`: out, front-end gain steps, 0..5.
- `dac_a[NCH]`, `dac_b[NCH]`: out, 12-bit heater DAC codes.
- `sat_event[NCH]`: out, pulses when a chain's integrator is reset to
  midscale.
- Serial register pins: see above.

## Not in this RTL

The analog parts of a channel are outside this RTL:

- the transimpedance amplifier and gated integrator with switched R_F/R_G;
- the 10-bit successive-approximation ADC;
- the two 12-bit monotonic DACs;
- the 0–6 V, 15 mA heater drivers.

Their digital sides are the top-level ports. The testbenches replace them,
and the photonic chip, with real-valued models (`tb/tb_photonics_pkg.sv`):

- heater phase = π · P / 20 mW, with P = (6 V · code / 4095)² / 400 Ω;
- ideal 50:50 couplers;
- photodiode at 1 A/W;
- ADC full scale 1 mA / 4^gain.

## Design choices not fixed by the source description

The following follow the published description:

- channel count, converter widths and sample rate;
- six ×4 gain steps, with sample weights inverse to the gain;
- square-wave demodulation and integration, with dither superimposed on
  the integrator output before the square root;
- one shared pair of 0/90-degree dithers;
- the piece-wise-linear square root whose slope halves per factor 4;
- two thresholds that reset the integrator to midscale;
- configuration and monitor shift registers.

The following are this design's own choices:

- 10 MHz clock;
- dither period of 8 samples, against "around 10 kHz" in the description;
- demodulation reference delayed by one sample;
- gain thresholds 1023/128, deciding on every sample rather than on an
  averaged power;
- 24-bit saturating accumulator with a shift-based gain;
- dither amplitude in power (word) units, so its voltage swing depends on
  the bias;
- breakpoints of the square root at powers of 4;
- inclusive threshold window;
- mode encoding, register layouts and protocols;
- all reset values.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line.

- `tb_dither_gen`, `tb_gain_adjust`, `tb_sq_demod`, `tb_loop_integrator`,
  `tb_sqrt_pwl` (all 4096 inputs), `tb_sat_control`, `tb_config_sr`,
  `tb_monitor_sr`: each block against an independent reference model.
- `tb_control_chain`: all modes, plus closed-loop minimum and maximum
  search on a quadratic plant, plus the saturation reset.
- `tb_channel_logic`: both chains lock together on a two-heater
  paraboloid. The gain climbs to the top step and steps down when the
  optimum moves, and the monitor data are checked.
- `tb_ctrl_asic_top`: the full 8-channel top at default parameters, on 8
  modelled MZIs with random inputs. It:
  - configures the chip through the serial register;
  - checks every loop drives its photodiode below 1% of its input; locking
    takes 2.4–4.8 ms;
  - reads the monitor register;
  - checks HOLD;
  - sets a MANUAL working point and then relocks;
  - counts every mechanism: lock, relock, gain up and down, saturation
    reset, hold, manual, square-root bypass.
- `tb_ubc16`: two tops with daisy-chained configuration, tuning the
  15-MZI, 4-stage binary-tree beam coupler. Over three random phase
  screens, 96.7–98.0% of the received power reaches the single output, and
  90% is reached within 3.6–9 ms. With the loops in HOLD, a new screen is
  not compensated (1.3% coupling); back in RUN, the loops track it again.
  The source reports about 10 ms for the full mesh.

- `tb_ubc16_turbulence`: the same mesh under a moving wavefront. Each
  antenna's phase wanders by up to about 1 rad at 5–60 Hz, and its power
  by ±20%. Tracking runs for 150 ms, then the heaters are held for 150 ms:

  | | mean coupling | worst dip | samples above −0.3 dB |
  |---|---|---|---|
  | loops running | −0.12 dB | −0.18 dB | 100% |
  | loops paused | −0.98 dB | −1.89 dB | 1.4% |

  The measured chip reached −0.17 dB and 90% with its loops running, and
  −1.15 dB and about 1% with them paused. Those measurements used a
  heat-gun disturbance reaching about 300 Hz; the simulation does not go
  that fast.

To run a testbench with Verilator (from the directory holding `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    --top-module tb_ubc16 rtl/ctrl_pkg.sv tb/tb_photonics_pkg.sv tb/tb_ubc16.sv
./obj_dir/Vtb_ubc16
```

Every testbench finishes within a few seconds.
