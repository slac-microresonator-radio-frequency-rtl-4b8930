# Closed-loop tone tracking for microresonator readout

A superconducting microresonator multiplexer puts thousands of narrow
resonances (a few hundred kHz wide) on one RF line. Each resonance is read by
a probe tone; a sensor signal moves the resonance, and the readout must infer
how far it moved. This RTL implements the digital core of a readout that does
not leave the probe tones where they were put: once per update period it
measures, for every resonance, how far its tone sits from the bottom of the
notch, and moves the tone there. The tone frequency itself becomes the
measurement, and because each tone sits at the point of lowest transmission,
little of the drive power reaches the cryogenic amplifier. That lowers the
linearity needed downstream and lets more resonators share one amplifier
chain.

The design covers, per band of up to 512 resonators:

* synthesis of one drive tone per resonator, plus two optional weak
  calibration sidebands, summed into one complex DAC stream;
* down-conversion of every tone from the ADC stream;
* conversion of each tone's complex amplitude into a frequency error, with a
  calibration that uses the sidebands;
* a per-tone feedback loop that moves the tone;
* a register port through which a host configures channels and reads back
  frequencies, errors and calibration results.

`smurf_top` puts eight such bands side by side, one per DAC/ADC pair, which
gives 8 x 512 = 4096 resonators over 8 x 500 MHz. The data converters, the
serial links to them, the local oscillators, mixers and filters are outside
this RTL. Their sample streams are the top's ports.

## Signal flow of one channel

```
            freq (32 b)                              host registers
   +---------------------------+                   (centre, amplitude, sideband
   |                           v                    offset, gain, coefficient, ctrl)
   |                    +-------------+   tx (18 b cplx)
   |                    |  tone_gen   |------------------> comb_summer --> DAC
   |                    | 3 x dds_nco |                     (all channels)
   |                    +-------------+
   |              lo_main | lo_lo | lo_hi
   |                      v       v       v
   |   ADC (14 b cplx) -> ddc   ddc     ddc        integrate-and-dump over ACC_LEN
   |                      |     S_lo    S_hi
   |                      |       \      /
   |                      |     sideband_ref ------> C_sb  (after 2^CAL_LOG2 windows)
   |                      |                  C = ctrl.use_sb_cal ? C_sb : C_host
   |                S_main v                    |
   |                  freq_error  <-------------+
   |                      | err = Im(S_main * C / 2^34)  (Q16)
   |                      v
   +------------------ loop_filter   f <- f + (gain * err) >>> 4   (closed loop)
                                     f <- centre                  (open loop)
```

All channels of a band share one window counter. The counter defines the
update period of `ACC_LEN` samples. With one complex sample per clock at
625 MS/s, the default `ACC_LEN = 480` gives one update per resonator every
768 ns, i.e. 1.30 MHz.

## Number formats

| Quantity | Format |
|---|---|
| frequency word `freq`, `centre`, `sb_offset` | 32 bit; 2^32 is the complex sample rate. The word is read as signed, so tones from -fs/2 to +fs/2 around the band centre |
| oscillator output | Q1.15 from a 1024-entry cosine table, `round(32767 cos(2 pi i/1024))`; the sine is the same table a quarter turn earlier |
| ADC sample | 14 bit signed I and Q |
| tone sample | 18 bit signed; `amp * table / 2^15` |
| DAC sample | 16 bit signed, saturated sum of all tones of the band |
| window amplitude `S` | 24 bit signed: sum over the window of `adc * conj(lo)`, shifted right by `ACC_SHIFT = 15`, saturated |
| rotation coefficient `C` | 32 bit signed; normalised transmission `t = S * C / 2^34` |
| `err`, `inph` | Q16 (65536 = 1.0), `Im(t)` and `Re(t)` |
| loop gain | 16 bit signed; step = `(gain * err) >>> 4` frequency-word units |

## From complex amplitude to frequency error

This is the least obvious part of the design.

Near a resonance at `f0` the transmission of the line is a circle in the
complex plane:

```
S21(f) = 1 - d / (1 + j x),     x = 2 Q (f - f0) / f0
```

Here `d` is the notch depth. At the bottom of the notch (`x = 0`) S21 is real
and minimal. For small detuning, `Im S21 = d x / (1 + x^2)` is proportional to
`f - f0`. The imaginary part is positive when the tone is above the
resonance. The amplitude the down-converter measures is not S21 itself. It is
`S = A * G * S21`: `A` is the drive amplitude and `G` is the unknown complex
gain of cables, mixers, amplifiers and converter delays. So the measurement
has to be divided by `A*G` before its imaginary part means anything.
`freq_error` does this division as one complex multiplication by a
coefficient `C ≈ 2^34 / (A*G)`. The result is `t ≈ S21`, and `err = Im(t)`.

There are two ways to get `C`:

1. **Host coefficient** (`ctrl.use_sb_cal = 0`). The host writes `C` from an
   earlier characterisation of the line, such as a network-analyser
   measurement or a slow amplitude scan with this readout.
2. **Sideband calibration** (`ctrl.use_sb_cal = 1`). Setting `ctrl.sb_en`
   adds two tones at `f ± sb_offset` with 1/8 of the drive amplitude (-18 dB).
   `sb_offset` is typically half the resonance width. `sideband_ref` adds the
   two sidebands' window amplitudes, `S_lo + S_hi`, over 2^CAL_LOG2 = 16
   windows. Their mean, normalised to the sideband amplitude, approximates
   `G` as if there were no notch. The two points on either flank of the
   circle average to a point on the real axis of the circle, so the phase of
   `G` is exact and the scale is off only by a real factor near `1 - d/2`.
   The block then computes

   ```
   C = 2^32 * conj(S) / |S|^2 ,   S = (1/16) * sum over 16 windows of (S_lo + S_hi)
   ```

   using a restoring divider (`seq_divider`, 64 clocks per component). The
   exponent 2^32 = 2^(34 + 1 - 3) folds in the factor 2 of the mean of two
   sidebands and the factor 8 between drive and sideband amplitudes. The
   coefficient is held when the sidebands are switched off.
   `REG_STATUS[0]` reports that a calibration has completed.

The down-converters in this design integrate over a plain window (see the
channeliser note below). The drive tone's window therefore cannot separate the
drive tone from sidebands only half a line width away. The intended use is:
calibrate with the sidebands on and the loop open, then switch the sidebands
off and close the loop with the stored coefficient. The sideband sum itself
rejects the drive tone exactly when `sb_offset` is a multiple of
`fs / (ACC_LEN * 2^CAL_LOG2)`. At the defaults that is 625 MHz / 7680 =
81.4 kHz. Two steps, 163 kHz, is close to half of a 300 kHz line width.

## The loop

`loop_filter` is a first-order loop: an integrator that adds
`(gain * err) >>> 4` to the tone's frequency word on every update. With the
error slope `k_e` (err units per frequency-word unit, set by the line width
and notch depth), the loop error shrinks by a factor `1 + gain * k_e / 16`
per update. Pick `gain` negative (the error is positive above the resonance)
and about `-0.3 * 16 / k_e`. In the testbenches, a 300 kHz line at 625 MS/s
and depth 0.93 gives `k_e ≈ 0.11` and `gain = -30`. Larger loop factors begin
to interact with the resonator's own ring-down time, about one update period
for a 300 kHz line.

Timing inside a channel: `win_end` marks the last sample of a window. The
three amplitudes are registered 1 clock later, the error 2 clocks later, and
the oscillator runs at the new frequency from 3 clocks after `win_end`
(checked in `tb_tracking_channel`). Phase is continuous across a frequency
change. Clearing `ctrl.closed_loop` puts the tone back on its programmed
centre, which is the open-loop mode.

## Registers

Address = `{band (3 b), channel (9 b), index (4 b)}` at the top,
`{channel, index}` at a band. A write takes effect on the next clock. Reads
are registered: 1 clock at a band, 2 at the top.

| idx | name | access | content |
|---|---|---|---|
| 0 | CENTER | rw | centre / open-loop frequency word |
| 1 | AMP | rw | drive amplitude, 15 bit, DAC LSB |
| 2 | SB_OFF | rw | sideband detuning word |
| 3 | GAIN | rw | signed 16-bit loop gain (read sign-extended) |
| 4, 5 | COEF_RE/IM | rw | host rotation coefficient |
| 6 | CTRL | rw | bit0 tone on, bit1 sidebands on, bit2 closed loop, bit3 use sideband coefficient |
| 8 | FREQ | r | current tone frequency word (the tracked signal) |
| 9 | ERR | r | last frequency error, Q16 |
| 10 | INPH | r | last in-phase value, Q16 |
| 11, 12 | ACOEF_RE/IM | r | coefficient in use |
| 13 | STATUS | r | bit0 sideband calibration completed |

Reset clears every register, so all tones are off.

An amplitude scan for the initial resonator estimates needs no extra
hardware. Set open loop, write `COEF = 2^18 + 0j`, step `CENTER` across the
band, and read `INPH`/`ERR`: with that coefficient they are the raw window
amplitude of the tone.

## Files

| file | block |
|---|---|
| `rtl/smurf_pkg.sv` | widths, sample structs, register map, cosine table |
| `rtl/dds_nco.sv` | phase accumulator + table oscillator |
| `rtl/tone_gen.sv` | drive tone and sidebands of one channel |
| `rtl/ddc_channel.sv` | mix-down and integrate-and-dump of one tone |
| `rtl/seq_divider.sv` | restoring divider used by the calibration |
| `rtl/sideband_ref.sv` | sideband calibration |
| `rtl/freq_error.sv` | rotation and error extraction |
| `rtl/loop_filter.sv` | integrating feedback |
| `rtl/tracking_channel.sv` | one resonator channel with its registers |
| `rtl/comb_summer.sv` | saturating sum of all tones of a band |
| `rtl/smurf_band.sv` | one band: channels, window counter, comb, register port |
| `rtl/smurf_top.sv` | eight bands |

Parameters and their defaults: `NUM_BANDS = 8`, `CHANNELS = 512`,
`ACC_LEN = 480`, `ACC_SHIFT = 15`, `CAL_LOG2 = 4` (top and band), and
`GAIN_SHIFT = 4` (loop_filter). `ACC_SHIFT` must grow with `ACC_LEN` to keep
a full-scale ADC tone inside 24 bits. The rule is
`8191 * 32767 * ACC_LEN / 2^ACC_SHIFT < 2^23`.

## Where this follows the readout it models, and where it does not

Taken from the system description: DDS tone generation; DDC read-back; one
strong tone per resonator with two weak (about 20 dB down) sidebands;
calibration of rotation and scale from the normalised, averaged sideband
amplitudes; rotation so that the quadrature part is the frequency error; a
feedback loop that re-tunes each tone; open- and closed-loop modes; 16-bit
DAC and 14-bit ADC samples; updates at 1.3 MHz per resonator; 8 blocks of
500 MHz and more than 4000 channels in total.

Choices of this design, where the description gives no detail:

* **Channeliser.** Each tone has its own mixer and a plain integrate-and-dump
  window. A production channeliser (for example a polyphase filter bank) has
  much better rejection of neighbouring tones. Here two tones interfere
  unless their frequency difference is a multiple of `fs / ACC_LEN` or they
  are well apart: the first side lobe of the window is -13 dB.
* **Sample stream.** Each band is one complex stream at one sample per clock.
  The real converters run at 2.5 GS/s and exchange pairs of 625 MHz complex
  streams, which would need several samples per clock and a wider datapath.
  The 480-sample window assumes 625 MS/s.
* **Resources.** Every channel has three oscillators, three complex mixers
  and its own loop, fully in parallel. This is simple but large: about 25
  multipliers per channel. A real FPGA implementation would time-share the
  slow per-update arithmetic.
* **Baseband.** Tones are complex baseband around the band centre
  (-250 to +250 MHz at 625 MS/s). The real system places its 500 MHz comb at
  750 MHz to 1.25 GHz before the analog up-conversion.
* The register map, fixed-point formats, -18 dB sideband level, 16-window
  calibration average, integrating loop filter and saturation of the comb
  sum.

Not built:

* the feed-forward update, which predicts resonator motion from a
  MHz-rate flux bias and is described only as under development;
* demodulation of the flux-ramp-modulated sensor signal from the tracked
  frequency;
* the converter links (16 lanes at 12.5 Gb/s), backplane link, memory and
  the bias boards (32 TES bias channels; 20-bit 1 MS/s and 16-bit 50 MS/s
  flux-bias DACs).

## Simulation

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. Build and run one with plain Verilator,
from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_smurf_top -Mdir obj -o sim \
    rtl/smurf_pkg.sv $(ls rtl/*.sv | grep -v smurf_pkg) tb/*.sv
./obj/sim
```

| testbench | what it shows |
|---|---|
| `tb_dds_nco` | cosine/sine against floating point, phase continuity, negative frequencies |
| `tb_tone_gen` | drive tone and sidebands against a floating-point model |
| `tb_ddc_channel` | window sums bit-exact and analytic; a tone one bin away is rejected; one result per window |
| `tb_sideband_ref` | coefficient against `2^32 conj(S)/|S|^2`; nothing happens with sidebands off |
| `tb_freq_error` | complex product and scaling, bit-exact |
| `tb_loop_filter` | integration, open-loop hold, return to centre |
| `tb_comb_summer` | sum and saturation flag |
| `tb_tracking_channel` | one channel through a resonator model: calibration, open loop, closed loop, 3-clock update latency |
| `tb_smurf_band` | 4 channels through a resonator model, all mechanisms below |
| `tb_smurf_top` | 2 bands x 3 channels, 64-sample windows: register readback, window period, sideband calibration, open-loop hold, tracking a resonance step with the sideband and with a host coefficient, lower drive-tone transmission in closed loop, DAC saturation |
| `tb_prototype_tracking` | one band of 12 channels at the default 480-sample window: twelve 300 kHz resonators 6 MHz apart, calibrated, then moved together through a four-step sawtooth in open and in closed loop; every tone must sit on its resonance after each closed-loop step |
| `tb_smurf_top_full` | the default 8 x 512-channel, 480-sample design: calibration and closed-loop tracking of a half-line-width step on four channels in two bands |

`tb/resonator_model.sv` is a behavioural stand-in for the analog chain: DAC,
notch resonators (complex one-pole filters), an arbitrary phase and the ADC.
In the end-to-end tests the closed loop lowers the measured transmission at
the drive tone from about 0.77 to about 0.10 of the off-resonance level. That
is the effect the tracking is built for. Over the twelve-resonator sawtooth
the mean drive-tone transmission falls from 0.55 (open loop) to 0.07 (closed
loop), about 18 dB with this idealised model. For detunings near a full half
width the error curve flattens (`Im S21 = d x/(1+x^2)`), so the loop needs
noticeably more updates to settle from there than the small-signal factor
suggests.

The default-size testbench is slow to build, not to run. Verilator generates
a few hundred MB of C++ for 4096 channels, which takes about 10 minutes to
compile on four cores. The run itself then takes about 30 s.
