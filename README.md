# Real-time phase correction for a four-pick-up beam position and phase monitor

A beam position monitor (BPM) has four pick-ups around the beam pipe. The
beam *phase* has to be taken from the **sum** of all four signals. A single
pick-up's phase depends on where the beam sits; the sum's does not. Each
pick-up has its own analog channel: filters, amplifiers and attenuators. The
delay of each channel changes with its gain setting, by tens of degrees over
a 60 dB range. If the four signals are summed first, these errors mix
according to the unknown signal amplitudes. Undoing them afterwards would
need a table indexed by all four gains and all four phases.

This design avoids that. The front end digitises every channel directly, so
each channel can be corrected *before* the sum. The correction has two steps:

1. Turn the channel's (I, Q) vector back by the delay that was calibrated
   for the current gain.
2. Multiply it by the calibrated gain correction.

Only then are the four channels added. All four channels always run at one
common gain. The calibration is therefore a one-dimensional table per
channel, indexed by that gain, and all of it fits in 256 words of 36 bits.

The RTL follows the method and block structure published by X. Gao, L. Zhao
et al., "Real-Time Phase Correction based on FPGA in the Beam Position and
Phase Measurement System" (IEEE Trans. Nucl. Sci., 2016). That work ran on a
Xilinx Virtex-5 with vendor CORDIC cores. Here everything is plain,
vendor-neutral SystemVerilog, and the details the publication leaves open
were filled in. Each such choice is marked below and in each file's header.

## Signal path

```
 ADC A..D (16 bit, 50 MS/s) ──► iq_demod ──► channel_correction ─┬─► sum_signal ─► phase_calc ─┐
                  │              (x4)        = iq_rotation         │                 (sum)      ├─► beam_phase ─► phase_averager
                  │                          + amplitude_correction│                             │   (sum - MO)    (2^16 samples)
                  │                          + delay to 25 clocks  ├─► amplitude_calc(A,B) ─► position_calc ─► X
                  │                             ▲        ▲         └─► amplitude_calc(C,D) ─► position_calc ─► Y
                  │                      angle  │        │ gain factor
                  │                       correction_lut (256 x 36 bit)
                  │                             ▲ gain setting
                  └─► (I,Q of A..D) ─► gain_control ──► gain (also to the front-end attenuators)
 ADC MO ──────────────► iq_demod ─► delay 26 ─► phase_calc (MO) ───────────────────────────┘
```

Pick-ups are A = right, B = left, C = top and D = bottom. So X comes from A
and B, and Y from C and D. The MO is the master-oscillator reference of the
accelerator: beam phase is measured against it.

Latencies at the 50 MHz sample clock, counted from a sample at the ADC
inputs:

| point | clocks |
|---|---|
| (I, Q) pair | 1 |
| corrected channels | 26 (the correction itself is 25 = 500 ns) |
| summed signal | 27 |
| `amp` (per-channel amplitudes) | 44 |
| `phase_sum` | 46 |
| `beam_phase` | 47 |
| `x`, `y` | 64 |
| `beam_phase_avg` | one pulse per 65 536 beam-phase results |

Every stage is fully pipelined: it takes one sample per clock and gives one
result per clock.

## From ADC samples to (I, Q)

The pick-up signal is a 162.5 MHz carrier, sampled at 50 MHz. Since
162.5 = 3 × 50 + 12.5, it aliases to a 12.5 MHz intermediate frequency with
exactly four samples per period. Written as y[n] = A sin(πn/2 + φ), the
samples run

    I, Q, -I, -Q, I, Q, ...     with I = A sin φ, Q = A cos φ,

so that φ = atan2(I, Q), the phase arctan(I/Q).

`iq_demod` keeps a 2-bit position counter. It pairs each new sample with the
previous one and restores the signs:

| position of new sample | I | Q |
|---|---|---|
| 1 | previous | current |
| 2 | −current | previous |
| 3 | −previous | −current |
| 0 | current | −previous |

One pair therefore leaves per sample, not one per IF period. That is a
choice of this implementation.

The counter starts at reset. The five channels share the reset, so they
share the same phase reference. That reference is arbitrary, but it cancels
in the beam phase, which is a difference to the MO.

## The correction of one channel

### Rotation (`iq_rotation`)

The sample is a point with Q on the horizontal axis and I on the vertical
axis. It is turned counter-clockwise by θ:

    Q' = Q cos θ − I sin θ,      I' = Q sin θ + I cos θ.

The rotation is a pipelined CORDIC:

- A first stage turns the point by ±90° when |θ| > π/2, so any angle in
  [−π, π] is reachable.
- Sixteen micro-rotation stages by ±atan(2⁻ⁱ) follow, one per clock. Their
  angle constants come from the table `ATAN_Q29[i] = round(atan(2⁻ⁱ)·2²⁹)`
  in `bppm_pkg`, rounded down to the working precision.
- The datapath carries 4 guard bits.

The CORDIC gain K = Π√(1+2⁻²ⁱ) ≈ 1.64676 is **not** removed at this stage.
The gain factor of the next stage absorbs it.

### Gain correction (`amplitude_correction`)

Both components are multiplied by the channel's gain factor (unsigned,
Q2.16), then rounded half-up and saturated to 18 bits. The factor travels
down the pipeline beside its sample. When the gain setting changes, each
sample is therefore corrected with one consistent pair of coefficients.

### Padding (`channel_correction`)

The rotation and the multiplier take 20 clocks. A 5-stage delay line pads
the path to 25 clocks, i.e. 500 ns. That is the latency the original
implementation reports, so the two match.

## The calibration memory (`correction_lut`)

This is one 256 × 36-bit RAM, i.e. 9216 bits, half a Virtex-5 block RAM.

- **Address:** `{channel[1:0], gain[5:0]}`, with channel 0..3 = A..D and
  gain 0..63 dB. Only 0..60 is used; write the 60 dB word into 61..63 too.
- **Data:** `{angle[35:18], factor[17:0]}` (struct `lut_word_t`).

For channel c at gain g, the calibration finds the channel delay δ_c(g). This
is the phase the channel adds, measured against the MO with the input set so
that the amplified signal reaches its nominal amplitude. It also finds the
gain error e_c(g): the ratio of actual to nominal amplitude. The words are
then:

    angle  = round( wrap(−δ_c(g)) · 2¹⁵ )             signed Q3.15 radians
    factor = round( 2¹⁶ / (K · e_c(g)) ),  K ≈ 1.64676  unsigned Q2.16

A factor of 2¹⁶/K ≈ 39 797 leaves the amplitude unchanged.

The memory is not initialised. Load it through `lut_wr_en`, `lut_wr_addr`
and `lut_wr_data` before use.

The read side cycles through the four channels at the current gain, one read
per clock, and keeps the words in holding registers. `coef_valid` falls
after any gain change or write. It rises again once all four words have been
re-read, within 5 clocks. Samples that enter during those clocks are
corrected with a mix of old and new words. Samples already in flight were
taken at the old gain but meet the new coefficients. Discard results for
about 70 clocks after any gain change, manual or automatic. `gain_changed`
marks the moment of the change.

The address split, the word layout and the number formats are choices of
this implementation. The publication gives the 18 + 18-bit word and the
9216-bit total, and indexes the table by gain.

### Filling the memory

The publication calibrates with one RF source split into the four inputs.
The same source also gives a synchronous MO signal. Each channel's phase is
measured against the MO at every gain setting, with a network analyser as
reference. The design can take these measurements itself:

1. Feed all four inputs from the split source and select `auto_gain` = 0.
2. For each gain g from 0 to 60 dB, set `manual_gain` = g. Set the source
   level so that the amplified signal has its nominal amplitude A_CON.
3. For each channel k, write the four words for gain g. Channel k gets
   angle 0 and factor 2¹⁶/K. The other channels get factor 0, so the sum
   holds channel k alone.
4. Wait for `coef_valid`, then about 100 clocks more. Average a few hundred
   results:
   - `beam_phase` gives δ_k(g) plus the source-to-MO phase;
   - `amp[k]` gives K · A_CON · e_k(g).
5. Subtract the source-to-MO phase, which the reference instrument gives.
   Then write the final words with the formulas above, and copy the 60 dB
   words into 61..63.

`tb_calibration_workload` runs exactly this procedure on the model front
end. It measures all 244 points to within 0.006° and 0.005 %. With the
table built from those measurements, the beam phase is within 0.004° at
gains of 4, 16, 31 and 45 dB.

## One gain for all four channels (`gain_control`)

The four channels share one gain, chosen so that the strongest channel sits
just below ADC full scale.

The loop measures amplitude as I² + Q² from the demodulated pairs. A raw
sample would read up to 3 dB low, depending on where it falls on the sine.
The loop runs in windows:

1. Over each window of 4096 pairs, it keeps the largest squared amplitude of
   the four channels.
2. At the end of the window it compares that peak with the two thresholds:
   - above 29 205² (0.89 of full scale): the gain drops 1 dB;
   - below 23 197² (0.71 of full scale): the gain rises 1 dB;
   - otherwise the gain stays.
3. The gain stays within 0..60 dB.

The thresholds are about 2 dB apart, more than one step, so the loop
settles.

After each change the next 16 pairs are ignored. Without that pause, the
first window would still contain samples taken at the old gain, and a
falling loop would overshoot by one step.

With `auto_gain` = 0 the setting comes from `manual_gain` (clamped to 60).
This is meant for calibration.

The window, the thresholds, the pause and the manual mode are choices of
this implementation. The 1 dB step over 60 dB follows the example the
publication uses when it sizes the table. The publication states only the rule: same
gain everywhere, strongest signal near full scale.

## Phase, amplitude, position

**Phase.** `phase_calc` runs a vectoring CORDIC (`cordic_vector`, 16 stages,
with a half-plane fold first). It returns atan2(I, Q) as an 18-bit Q3.15
angle. It is used twice: for the summed signal and for the MO.

**Beam phase.** `beam_phase` forms phase_sum − phase_MO and wraps it into
(−π, π]. The MO path has no correction, because its gain and delay are
fixed. Its (I, Q) stream is delayed 26 clocks, so that both phases describe
the same sampling instant.

**Amplitude.** `amplitude_calc` computes K·√(I²+Q²) of the corrected
channels. K is common to both channels and cancels in the ratio.

**Position.** `position_calc` evaluates

    X = Kx · (V_A − V_B)/(V_A + V_B) − X_offset

and the same for Y with C and D:

- A restoring divider gives the ratio with 16 fraction bits, one bit per
  stage.
- The ratio is scaled by the 16-bit `kx`/`ky`, rounded, signed, and the
  24-bit offset is subtracted.
- Units are whatever `kx` is given in, e.g. µm.
- A zero sum gives a zero ratio.

**Average.** `phase_averager` adds 2¹⁶ beam-phase results and outputs the
rounded mean. The publication averages 64k samples for its final values but
does not say where. Here it is done in logic. The average does not unwrap
phases close to ±π.

## Number formats (`bppm_pkg`)

| quantity | format |
|---|---|
| ADC sample | 16-bit signed |
| (I, Q) after demodulation | 2 × 16-bit signed (`iq_adc_t`) |
| corrected (I, Q) | 2 × 18-bit signed, includes CORDIC gain × factor (`iq_cor_t`) |
| summed (I, Q) | 2 × 20-bit signed |
| angles, phases | 18-bit signed radians, 15 fraction bits; π = 102 944 |
| gain factor | 18-bit unsigned, 16 fraction bits |
| gain setting | 6-bit unsigned, dB |
| amplitudes | 19-bit unsigned, × K |
| X, Y | 24-bit signed, units of `kx`/`ky` |

## Top-level ports (`bppm_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | 50 MHz sample clock; synchronous active-low reset |
| `adc_valid` | in | 1 | ADC samples valid (tie high for a free-running ADC) |
| `adc_ch[4]`, `adc_mo` | in | 16 | samples of A, B, C, D and MO |
| `auto_gain`, `manual_gain` | in | 1, 6 | gain mode and manual setting |
| `gain`, `gain_changed` | out | 6, 1 | common gain setting (to the attenuators) and a change pulse |
| `lut_wr_en`, `lut_wr_addr`, `lut_wr_data` | in | 1, 8, 36 | calibration loading |
| `coef_valid` | out | 1 | the coefficients in use match the current gain |
| `kx`, `ky`, `x_offset`, `y_offset` | in | 16, 16, 24, 24 | position scale and offset, quasi-static |
| `pos_valid`, `x`, `y` | out | 1, 24, 24 | beam position |
| `phase_valid`, `phase_sum`, `beam_phase` | out | 1, 18, 18 | phase of the sum (P) and beam phase against MO |
| `amp_valid`, `amp[4]` | out | 1, 19 | corrected amplitudes of A..D, times K (for calibration) |
| `avg_valid`, `beam_phase_avg` | out | 1, 18 | mean of 65 536 beam-phase results |

The analog front end, the ADCs and the sampling clock generator are outside
this RTL. Their digital sides are the ports above.

## Simulating

Each file in `rtl/` holds one module or package. Each testbench in `tb/` is
self-checking and ends with a `TB_RESULT checks=N failures=M` line. With
Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/bppm_pkg.sv \
          tb/tb_bppm_top.sv --top-module tb_bppm_top
obj_dir/Vtb_bppm_top
```

Replace `tb_bppm_top` with any other testbench name.

| testbench | what it checks |
|---|---|
| `tb_iq_demod` | exact (I, Q) recovery with gaps in the valid stream |
| `tb_correction_lut` | 256 random words; coefficients for random gains within 5 clocks; rewrite |
| `tb_iq_rotation` | rotation over the full circle against a floating-point model (±4 LSB); latency 18 |
| `tb_amplitude_correction` | bit-exact rounding and saturation; latency 2 |
| `tb_channel_correction` | rotation × factor (±5 LSB); latency exactly 25 clocks = 500 ns |
| `tb_sum_signal` | exact sums including extremes |
| `tb_phase_calc` | atan2 within 4 LSB + resolution limit of short vectors; latency 19 |
| `tb_amplitude_calc` | K·√(I²+Q²) within 4 LSB; latency 18 |
| `tb_position_calc` | difference-over-sum with corner cases (equal, one zero, both zero); latency 20 |
| `tb_beam_phase` | wrapped difference over the full circle |
| `tb_gain_control` | settling up and down to the predicted gain, clamps, manual mode, one pulse per change |
| `tb_phase_averager` | bit-exact block mean (block size reduced to 64) |
| `tb_bppm_top` | whole design at default parameters (see below) |
| `tb_sweep_workload` | channel A fixed, B/C/D swept 0 to −60 dB, 64k-sample averages |
| `tb_calibration_workload` | calibration through the design at all 61 gains, then the correction with that table |

`tb_bppm_top`, `tb_sweep_workload` and `tb_calibration_workload` drive a
behavioural front end:

- Each channel has its own gain-dependent delay of several tens of
  degrees, with 1-degree steps like attenuator switching.
- Channel B has a large fixed offset beyond 90°.
- Each channel has a gain error.

The first two testbenches load the calibration memory with the inverse of
the model. The third measures it.

`tb_bppm_top` checks every beam-phase, X, Y and amplitude result against
the true values: within 0.05°, 10 units and 0.1 % + 8 LSB. It does this over manual
gain, a switch to automatic gain, automatic steps up and down,
coefficient reloads, quarter-turn rotations, phase wrap-around through ±π,
and the 64k average. It runs about 300 000 clocks in roughly 15 s.

In `tb_sweep_workload` the averaged corrected phase stays within 0.0035°
(two output LSBs) of the truth over the whole 60 dB sweep. That includes
an extra, uncalibrated delay of up to 1.2° in the weak channels. Summing
the same signals without correction would be off by 4° to 13°.

## How far this can be trusted, and where it departs from the original

- **The model is idealised.** The front-end model is a test device. Its
  delays are clean functions of gain. A real channel also shifts phase with
  input amplitude at a fixed gain, by up to about a degree for a signal
  60 dB below its calibration level. No table entry covers this shift,
  here or in the original method. The argument is that weak channels weigh
  little in the sum. `tb_sweep_workload` models a shift of that size, and
  it moves the beam phase by less than 0.005°. Results on hardware depend
  on the quality of the calibration table.
- **Own CORDIC pipelines** replace the vendor CORDIC cores. The correction
  latency was matched to the published 500 ns by padding. Resource use
  therefore differs from the published figures. Generic synthesis gives
  about 1600 flip-flop bits, one 9216-bit memory and 18 multipliers:
  8 for gain correction, 8 for the squares in the gain loop, and 2 for
  position scaling. The published figures are 12 DSP blocks and 7146
  registers.
- **One instance per channel.** The published block diagram draws one
  rotation block and one amplitude-correction block per pair of channels.
  Here every channel has its own instance. The function is the same.
- **Pick-up naming.** The text of the publication assigns A, B, C, D to
  right, left, top and bottom, and its processing diagram forms X from A/B
  and Y from C/D. Its system sketch draws the letters at other positions
  around the pipe. The text and the processing diagram were followed.
- **Own additions.** The gain loop's window, thresholds, pause and manual
  mode; the sliding (I, Q) pairing; the MO delay; the number formats; the
  LUT address layout; and the amplitude outputs used for calibration are
  all choices of this implementation.
- **Not verified:** timing closure at 50 MHz on any FPGA, and operation
  with measured calibration data.
