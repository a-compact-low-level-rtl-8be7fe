# Pulse-to-pulse LLRF logic for a compact C-band electron linac

A compact C-band (5.712 GHz) linac structure has no field probes. The only
signals that show what the RF field is doing are the **klystron forward**
wave and the **cavity reflection**. In an RFSoC-based low-level RF (LLRF)
controller, both are sampled directly at RF and mixed down to baseband by
the converter hard blocks. The controller then needs logic that can:

1. build each RF pulse from a user waveform or a square wave, scaled by a
   complex drive value;
2. measure the klystron forward signal on the flat top of each pulse and move
   the drive amplitude and phase towards user set values, pulse by pulse;
3. deliver the cavity reflection to software, which reads the resonance
   offset from the phase ramp after the pulse ends (Δω = dφ/dt) and retunes
   the converter NCOs;
4. deliver the klystron forward magnitude and phase to software, which
   reshapes the pulse sample by sample.

This repository holds that programmable-logic part as synthesizable
SystemVerilog (IEEE 1800-2017). The top module is `llrf_top`. The following
are outside it and appear only as ports:
- the converters and their mixers, NCOs and decimation/interpolation filters;
- the processor system and its DDR;
- the software.

## Data path at a glance

```
 adc_kf (I/Q, 245.76 MSPS) ─┬─► moving_avg ─► window_avg ─► iq_to_polar ─► fb_update ─► polar_to_iq ─┐
                            │                    (once per pulse)            (drive amp/phase)         │ latched at trig
                            └─► iq_to_polar (per sample) ──┐                                           ▼
                                                           ├─► [dma_src mux] ─► dma_s2mm ─► AXI4 ─► DDR     corr I/Q
 adc_refl (I/Q) ────────────┬──────────────────────────────┘                                           │
                            └─► iq_to_polar ─► refl_phase / refl_mag ports, DMA mode 2                  ▼
 pulse_seq ─► trig, rf_on, idx ─► wave_bram (user waveform, AXI4-Lite) ─► pulse_mod (wave × corr) ─► dac (I/Q)
 axil_regs (AXI4-Lite) ─► configuration of everything above, status back
```

Everything runs on one clock at the baseband data rate of 245.76 MHz, with
one complex sample per clock. No path stalls. All samples are 16-bit signed
I/Q. All phases are 16-bit binary angles, where 65536 counts are 360°, 1 LSB
is about 0.0055°, and the arithmetic wraps naturally.

## The pulse-to-pulse loop

This is the part that takes the most care.

**Measurement.** At each pulse trigger, `moving_avg` and `window_avg` are
cleared:
- `moving_avg` is a 16-sample boxcar on I and Q. It smooths the forward
  signal.
- `window_avg` sums the smoothed samples whose index after the trigger lies
  in `[win_start, win_start + 2^win_log2)`, then divides by shifting.

The window has to sit on the flat top *as the ADC sees it*. `win_start`
therefore also absorbs the round-trip delay from the DAC port to the ADC
port. The reset value is 128 samples starting at sample 200 of a 492-sample
pulse.

The loop averages I/Q first and converts to polar afterwards. That way a
phase near ±180° cannot average to nonsense.

**Decision and update** (`fb_update`, two pipeline stages):

```
amp_err = amp_set - meas_amp                 (18-bit signed)
phs_err = phs_set - meas_phs  (mod 2^16)     (shortest way round the circle)
if |amp_err| < amp_tol and |phs_err| < phs_tol:   drive unchanged   (in_tol = 1)
else:  drive_amp = clamp(drive_amp + (amp_gain * amp_err) >>> 8, amp_lower, amp_upper)
       drive_phs = clamp(drive_phs + (phs_gain * phs_err) >>> 8, phs_lower, phs_upper)
```

The gains are unsigned Q8.8. The phase limits are signed binary angles. The
update is integral: the drive keeps moving until the measured value reaches
the set value, so the loop has no steady-state error.

The tolerance test is joint: the drive is left alone only when *both* errors
are inside their tolerances. Once the field is where it should be, the loop
stops adding quantisation jitter.

Choosing the gain: let `g` be the plant gain from drive amplitude to measured
amplitude. The loop settles in one pulse when `amp_gain/256 = 1/g`. For
example, with `g = 1/40`, `amp_gain = 10240` gives one-pulse settling. Half of
that (as used in the tests) converges in a few pulses without overshoot. The
phase loop has unit plant gain, so `phs_gain = 128` (0.5) behaves the same
way.

When `fb_enable` is low, the drive is `amp_init` / `phs_init` (default 8000 at
0°).

**Application.** `polar_to_iq` turns the drive back into I/Q every clock. The
result is latched at the next pulse trigger, so one pulse always uses a single
drive value, namely the one computed from the pulse before. Timing:
- the measurement is ready about 20 clocks after the window closes (18-clock
  CORDIC, 2-clock update);
- the I/Q conversion takes 19 clocks;
- the pulse period must therefore exceed the window end by about 40 clocks,
  which any realistic period does by orders of magnitude.

## Pulse generation

`pulse_seq` counts `0 … period-1` while `run` is set:
- `trig` marks count 0;
- `rf_on` is high for counts below `pulse_len`;
- `idx` is the count, which is the waveform address.

The defaults are 4,096,000 clocks (60 Hz) and 492 samples (2 µs × 245.76 MHz
= 491.52, rounded up).

`pulse_mod` multiplies the waveform by the latched drive I/Q:
- the waveform comes from `wave_bram` when `use_custom` is set, otherwise it
  is the constant (32767, 0), which is the square wave;
- the multiply is complex, with the waveform in Q1.15;
- the result is rounded and saturated to 16 bits;
- outside the gate the output is zero.

`dac_valid` marks the gate and follows the trigger by 3 clocks. A square-wave
pulse at drive amplitude A has DAC amplitude `A·32767/32768`.

`wave_bram` has 2048 words of `{Q[31:16], I[15:0]}` (8.3 µs at 245.76 MSPS).
It is written over its own AXI4-Lite port at byte address `4·n`, honours
byte strobes, and can be read back.

## Getting data to software

`dma_s2mm` starts a capture of `dma_len` samples at `dma_base` on every
trigger while `dma_enable` is set. The two-bit field `dma_src` (CTRL[5:4])
selects the stream:

| `dma_src` | word `[31:16]`                | word `[15:0]`                   | use                        |
|-----------|-------------------------------|---------------------------------|----------------------------|
| 0         | reflection Q                  | reflection I                    | raw data, frequency tuning |
| 1         | klystron forward phase (BAM)  | klystron forward magnitude      | pulse-shape correction     |
| 2         | reflection phase (BAM)        | reflection magnitude            | frequency tuning           |

In modes 1 and 2, a word is the conversion of the input sample 18 clocks
earlier. Mode 3 behaves like mode 0.

How the stream reaches memory:
- Samples are packed four to a 128-bit beat, so sample `n` lands at byte
  `base + 4n`.
- Beats queue in a 32-entry FIFO and leave as AXI4 INCR bursts of 16 beats
  (256 bytes). A final short burst covers the remainder, and a partial last
  beat carries strobes only for its valid samples.
- Because a beat moves four samples, the bus needs only a little over 25 %
  of cycles with `wready` to keep up.
- `dma_base` must be 256-byte aligned so that no burst crosses a 4 KB page.

`overflow` is a sticky flag, cleared by writing STATUS. It sets when either:
- a beat finds the FIFO full; or
- a trigger arrives before the previous capture has fully drained. That
  trigger's capture is skipped, not merged.

The cavity reflection also goes through its own `iq_to_polar`. Mode 2 of the
DMA captures it, and the `refl_phase` / `refl_mag` ports also carry it per
sample. After the RF pulse ends,
the reflection is the field leaking out of the cavity, which rotates at the
detuning frequency:

```
Δf = (dφ/dn in LSB/sample) / 65536 × 245.76 MHz
```

A 2.08 MHz offset gives about 555 LSB/sample. The unambiguous range is
±122.88 MHz.

## Register map (AXI4-Lite, 32-bit, byte addresses)

| addr | name      | contents                                                      | reset |
|------|-----------|---------------------------------------------------------------|-------|
| 0x00 | CTRL      | [0] fb_enable [1] use_custom [2] dma_enable [3] run [5:4] dma_src | 0 |
| 0x04 | PERIOD    | clocks per pulse period                                        | 4,096,000 |
| 0x08 | PULSE_LEN | samples per pulse                                              | 492 |
| 0x0C | WIN       | [15:0] window start, [19:16] log2 length (max 10)              | 200, 7 |
| 0x10 | AMP_SET   | desired measured amplitude                                     | 0 |
| 0x14 | AMP_GAIN  | Q8.8                                                            | 0 |
| 0x18 | AMP_LIM   | [15:0] lower, [31:16] upper drive amplitude                    | 0, 32767 |
| 0x1C | AMP_TOL   | amplitude tolerance                                            | 0 |
| 0x20 | AMP_INIT  | drive amplitude with feedback off                              | 8000 |
| 0x24 | PHS_SET   | desired measured phase (BAM)                                   | 0 |
| 0x28 | PHS_GAIN  | Q8.8                                                            | 0 |
| 0x2C | PHS_LIM   | [15:0] lower, [31:16] upper drive phase (signed BAM)           | -32768, 32767 |
| 0x30 | PHS_TOL   | phase tolerance                                                | 0 |
| 0x34 | PHS_INIT  | drive phase with feedback off                                  | 0 |
| 0x38 | DMA_BASE  | DDR byte address (256-byte aligned)                            | 0 |
| 0x3C | DMA_LEN   | samples per capture                                            | 2048 |
| 0x80 | STATUS    | [0] in tolerance [1] DMA overflow; any write clears [1]        | – |
| 0x84 | MEAS      | last measured amplitude                                        | – |
| 0x88 | MEAS_PHS  | last measured phase                                            | – |
| 0x8C | DRIVE     | [15:0] drive amplitude, [31:16] drive phase                    | – |
| 0x90 | PULSES    | pulses started                                                 | – |
| 0x94 | UPDATES   | corrections applied (pulses out of tolerance)                  | – |
| 0x98 | DMAS      | captures completed                                             | – |

Both AXI4-Lite slaves use the same protocol engine, `axil_slave`. It accepts
AW and W in either order and holds B and R until they are accepted.

## Numerics of the CORDICs

`iq_to_polar` is a vectoring CORDIC with 16 iterations and a latency of 18
clocks:
- it folds the left half-plane first;
- it keeps 8 guard bits and a 20-bit angle accumulator;
- it removes the CORDIC gain with the constant 39797/2¹⁶;
- the magnitude is within ±3 LSB over the full input range;
- the phase error shrinks with the input magnitude. It is about 5 LSB
  (0.03°) at a magnitude of 16, and 1–2 LSB above 128.

The guard bits matter for the weak signals: the reflection tail after a pulse
and a klystron forward signal at low drive. With only 2 guard bits the phase
error at a magnitude of 256 was about 30 LSB.

`polar_to_iq` is the rotation form, with a latency of 19 clocks:
- it pre-scales the amplitude by 19898/2¹⁵ (1/K);
- it folds phases beyond ±90°;
- the output is within ±3 LSB.

The arctangent table is computed by a function in `llrf_pkg`. It holds
`round(atan(2^-k)/2π · 2^20)`.

## Where this departs from, or adds to, the platform description

- **The order of averaging and conversion.** One description of the loop
  converts to magnitude/phase before averaging, while the loop's flow chart
  averages I/Q first. The flow-chart order is used.
- **Update law, gain format, tolerance test, limits.** The parameter set per
  quantity (set value, correction gain, upper and lower limit) comes from the
  platform. The integral law, the Q8.8 gains, the joint strict-less-than
  tolerance test, applying the limits to the drive, and the extra tolerance
  and initial-drive registers are this design's choices.
- **Moving-average length (16), window placement, waveform depth (2048),
  register map, bus widths, DMA burst/FIFO sizes.** All are this design's
  choices.
- **The pulse timing source.** An internal sequencer is used. An external
  machine trigger would replace `pulse_seq`.
- **One DMA engine with a source select** carries all software streams. Only
  one of them can be captured in a given pulse.
- **The reflection phase.** In the described platform, one description has
  software compute the phase from reflection I/Q, while the tuning flow chart
  places the phase calculation in firmware. Both are offered here:
  - DMA mode 0 delivers raw I/Q;
  - DMA mode 2 delivers the magnitude/phase computed in firmware;
  - the same values are also available as ports.
- **Scope.** The block handles one cavity pair, i.e. one forward signal, one
  reflection and one drive. A full structure with 26 pairs needs one instance
  per pair and, at that channel count, several RFSoCs.

## How far it has been checked

Each module has a self-checking testbench in `tb/`. Each compares against
independently computed values:
- floating-point atan2/sqrt/sin/cos for the CORDICs;
- plain integer arithmetic for the averagers and the update law;
- a byte-addressed memory model with AXI4 rule checks for the DMA;
- a bus-functional model with AXI4-Lite rule checks for the register files.

Each testbench was also run against a deliberately broken copy of its module
and failed.

`tb_llrf_top` closes the loop through `tb/rf_chain_model.sv`, a behavioural
baseband model of the converters, klystron and cavity. The model has a gain
of 1/40, +30° of phase, a 20-clock delay, and a first-order cavity with a
120-sample time constant detuned by +2.08 MHz. With the period shortened
through its register, the test shows:
- the loop converges, holds, and clamps at a lowered upper limit;
- square and custom pulses match `waveform × drive` sample by sample;
- the DMA stores the reflection exactly;
- the overflow flag sets when the period is shorter than the capture, and
  clears on a STATUS write;
- the klystron forward and reflection magnitude/phase captures match
  atan2/sqrt;
- the reflection phase slope yields the 2.08 MHz offset to within 0.1 %,
  both from the port stream and from the phase words read back out of the
  memory model;
- with the model retuned to the 7.5 MHz dual-cell offset, the phase words
  read back still give 7.50 MHz;
- a 1229-sample (5 µs) square pulse, the longest targeted flat top, gates
  the DAC for exactly 1229 samples at a constant drive.

`tb_llrf_full` runs the top with every parameter and every timing register
at its default, over three full 60 Hz periods (12.3 M clocks). It checks:
- the trigger spacing;
- the 492-sample gate;
- a 2048-sample capture;
- a shrinking amplitude error.

Not covered by simulation:
- real converter behaviour;
- back-pressure patterns beyond random `awready`/`wready`;
- AXI error responses, which are ignored by design.

## Simulating

Compile with plain Verilator (5.x). List the package first and let `-y` find
the rest:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/llrf_pkg.sv tb/tb_llrf_top.sv --top-module tb_llrf_top
./obj_dir/Vtb_llrf_top
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`. Typical run
times:
- the unit tests take seconds;
- `tb_llrf_top` simulates about 120 k clocks;
- `tb_pulse_seq` and `tb_llrf_full` each run a full 60 Hz period or more, in
  seconds to tens of seconds.

Top-level parameters:
- `WAVE_DEPTH` (2048);
- `MA_LOG2` (4);
- `DMA_BURST` (16);
- `DMA_FIFO` (32).

Samples are 16 bits and phases are 16-bit binary angles throughout. The
shared types, the register addresses and the default timing live in
`rtl/llrf_pkg.sv`.
