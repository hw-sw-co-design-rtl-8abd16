# PCM-to-PWM converter for a Class-D amplifier: hardware part

A Class-D audio amplifier does not amplify the audio linearly. It switches its
output transistors fully on and off, and the audio is carried in how long each
pulse lasts. That is why it runs at around 90 % efficiency. The digital core of
such an amplifier converts PCM samples (amplitudes) into a PWM pulse train
(widths). Done naively this is not practical. A CD sample has 2^16 levels at
44.1 kHz, so a pulse width with the same resolution would need a counter clock of
2^16 × 44.1 kHz ≈ 2.89 GHz.

The way around this is a chain of four signal-processing stages:

1. **Upsampling**: digital interpolation raises the sample rate.
2. **Linearization**: pre-compensates the harmonic distortion that pulse-width
   modulation itself adds.
3. **Noise shaping**: cuts the number of amplitude levels down to what a PWM
   can resolve at the new rate. The requantization error is fed back, so its
   noise lands above the audio band instead of in it.
4. **Wave generation**: turns each requantized sample into a pulse.

With fewer levels at a higher rate, the PWM clock drops to about 45 MHz.

This code base implements the hardware half of a hardware/software split of
that chain. Stages 1 and 2 are left to a DSP running software. Stage 3 and
stage 4 (a counter, a register and a comparator) are in hardware. That split came out of
a cost/performance study: the DSP alone missed the 4.3 s real-time budget for
a 4.3 s recording, while moving only the noise shaper to hardware met it at
the lowest cost. The RTL here is this code base's own. The split, the stage
functions and the counter-register-comparator structure of the PWM follow the
source design. The internals of the noise shaper, the widths, the FIFO and
the handshake do not come from it, and are marked as this design's choices
below.

## Structure

```
           s_valid/s_ready/s_data                                 pwm_out
  DSP  ───────────────────────────▶ sample_fifo ─▶ noise_shaper ─▶ pwm_gen ───▶ Class-D
 (S0-S3 upsampling,   16-bit PCM     8 words       error feedback   counter,      output
  linearization, in   at 352.8 kS/s                16 → 7 bits      register,     stage
  software)                                                         comparator
                                          ▲             ▲              │
                                          └── pop ──────┴──── load ────┘
```

| file | what it is |
|---|---|
| `rtl/pcm_pwm_pkg.sv` | default sizes shared by the modules |
| `rtl/sample_fifo.sv` | sample buffer between the DSP and the hardware, valid/ready write side |
| `rtl/noise_shaper.sv` | first-order error-feedback requantizer (the "MOLD" stage) |
| `rtl/pwm_gen.sv` | PWM wave generator |
| `rtl/pcm_pwm_hw.sv` | top: the three blocks wired together |

Synthesised with the default sizes, the top is about 42 word-level cells,
41 flip-flop bits and a 128-bit (8 × 16) register array.

## The sample period: who paces whom

The hardware has one timing reference, the PWM period of `2^OUT_W` clocks
(128 at the default `OUT_W = 7`). Everything else is slaved to it. This is the
part of the design to understand before changing anything.

* `pwm_gen` counts 0 … 127 while `en` is high. On the last clock of a period
  (counter = 127) it raises `load` for one clock.
* On the clock edge that ends that cycle, two things happen at once:
  * `pwm_gen`'s width register takes the noise shaper's current output.
  * The noise shaper, strobed by the same `load` (its `step` input), pops the
    next sample from the FIFO and computes the width for the period after.
* The comparator output is registered, so a period's pulse starts on the
  clock after the counter wraps. It lasts exactly `width` clocks, from
  0 (no pulse) to 127 (one clock short of the whole period).

So one sample is consumed per period. A sample popped at the end of period
*k* is computed into a width during period *k+1* and played as a pulse in
period *k+2*. From the pop to the pulse's first clock is 129 clocks. After
`en` rises, the first two periods carry the mid-scale reset width (a 50 %
square wave, i.e. silence).

The arithmetic that ties this to real time (this design's choice of numbers):
128 widths per period × 352.8 kHz (8 × 44.1 kHz upsampled) = 45.1584 MHz.
That is the clock `clk` must run at, and it matches the roughly 45 MHz the
original all-hardware converter ran at. A different upsampling factor or
number of levels changes the required clock in proportion.

Dropping `en` stops the counter at 0 and holds the output low. Nothing is
consumed while `en` is low. The width register and noise-shaper state are
kept, so raising `en` again resumes with the widths already computed.

## The noise shaper

A sample `x` (16-bit two's complement) must become one of 128 widths. With
`S = IN_W − OUT_W = 9` bits dropped, the block keeps the dropped part as an
error `e` (0 … 511) and adds it to the next sample:

```
v[n] = x[n] + e[n-1]
y[n] = floor(v[n] / 512)             -64 … 63, clipped at 63
e[n] = v[n] − 512·y[n]               the 9 low bits of v[n]
duty = y[n] + 64                     offset binary: 64 = silence
```

Rearranged, `512·y[n] = x[n] − (e[n] − e[n−1])`. The output is the input plus
the requantization error passed through `1 − z⁻¹`, a high-pass filter. The
error power moves away from DC, into the band that upsampling has left empty
above the audio, where the loudspeaker and the output filter remove it. A
useful consequence for testing: over any run of samples the errors
telescope. The sum of the outputs times 512 equals the sum of the inputs to
within one 7-bit step (< 512), however long the run. Plain truncation would
drift by up to one step per sample.

Only the top end can overflow. `v` can exceed `+32767` by up to 511, while the
bottom (`−32768 + e`) always floors to −64. On overflow `y` is held at 63 and
the stored error at its maximum, 511. This keeps a sustained full-scale input
from making the error grow without bound. The `clip` output flags such
samples.

First order is the simplest loop that does the job. The source design
describes the stage only by its purpose, so the order, the loop filter and
the rounding (floor) are this design's choices. A higher-order loop would
push more noise out of band at the same clock. It would replace the
single-register `err_q` loop in `noise_shaper.sv` and leave the interfaces
unchanged.

## The sample interface and the FIFO

The DSP writes samples through a plain valid/ready handshake. A sample is
taken on a clock edge where `s_valid` and `s_ready` are both high. While
`s_ready` is low (FIFO full), the writer must keep `s_valid` high and
`s_data` unchanged. `sample_fifo` asserts both rules, and also that nothing
pops an empty FIFO. The 8-word FIFO lets the DSP write in bursts around its
software schedule. The hardware reads it at exactly one word per period.

If a period ends with the FIFO empty, there is an **underrun**. The noise
shaper then processes a zero sample (silence) for that period and pulses
`underrun`, so the output stage still gets a valid pulse train. A DSP that
meets real time never causes one once the FIFO has been primed. `fifo_level`
shows the occupancy.

A word written on an edge can be read from the next cycle on. The FIFO is
first-word-fall-through: the noise shaper sees the oldest word without
requesting it first.

## Parameters

| parameter | default | meaning | constraint |
|---|---|---|---|
| `IN_W` | 16 | sample width (CD audio) | `IN_W > OUT_W` |
| `OUT_W` | 7 | width bits; period = 2^OUT_W clocks | ≥ 2 |
| `DEPTH` | 8 | FIFO words | power of two |

`OUT_W` fixes both the number of levels and the PWM period. The required clock
is `2^OUT_W × (upsampled sample rate)`.

## Verification

Each testbench checks itself and ends with a `TB_RESULT checks=N failures=M`
line. They use no files.

| testbench | what it shows |
|---|---|
| `tb/pwm_gen_tb.sv` | a `load` every 128 clocks; each period's high time equals the width loaded, as one run from the period start, including 0 and 127; output idle while `en` is low |
| `tb/noise_shaper_tb.sv` | every output, `clip` and `underrun` against an integer model of the equations above; the telescoping bound over random, DC and ramp inputs; clipping at both full scales |
| `tb/sample_fifo_tb.sv` | data order, `level`, `wr_ready`, `rd_valid` against a queue, with the FIFO driven full (writer stalled) and empty |
| `tb/pcm_pwm_hw_tb.sv` | the whole chain at default sizes, 3000 samples. A cycle-level model predicts `pwm_out` on every clock, plus `fifo_level`, `s_ready`, `clip` and `underrun`. DSP rates vary so the FIFO both fills (stall) and runs dry (underrun); full-scale stretches clip; `en` is dropped and raised once. Each of the four must happen at least once. |
| `tb/audio_stream_tb.sv` | a full 4.3 s recording's worth of samples (1,517,040 at 352.8 kHz, a two-tone signal at −4 dBFS peak), about 194 M clocks and 2 minutes of simulation. Checked only from the measured pulse widths: no underrun with a DSP that keeps up, and every block of 8 widths adds up to its 8 inputs within one 7-bit step |

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    rtl/pcm_pwm_pkg.sv tb/pcm_pwm_hw_tb.sv --top-module pcm_pwm_hw_tb
obj_dir/Vpcm_pwm_hw_tb
```

Swap in another testbench file and top name for the others. All of them run
at the RTL's default sizes.

## What this design leaves out, and where it departs

* **Upsampling and linearization are not here.** In this split they are DSP
  software. Their algorithms (interpolation factors, filter coefficients, the
  distortion compensation) are not specified by the source design. The 8×
  upsampling factor used above to size the clock is an assumption.
* **The DSP, the system bus and the power output stage are outside.** The
  hardware stops at the `s_valid/s_ready/s_data` port on one side and at
  `pwm_out` on the other. A bus bridge would drive the sample port; which bus
  it is was never fixed.
* **Streaming instead of a sequential schedule.** The source model runs its
  six stages one after another per sample, as a program state machine. Here
  the hardware runs continuously at the PWM rate, and the FIFO decouples it
  from the DSP's schedule.
* **Choices not taken from the source:**
  * 7-bit widths and the 45.1584 MHz clock;
  * first-order error feedback with floor rounding and the clip rule;
  * the trailing-edge pulse shape and the registered output;
  * the FIFO depth and handshake;
  * silence on underrun;
  * synchronous active-low reset to mid-scale.

  If the output stage needs a different pulse (centred or double-edged, for
  example), only the comparator in `pwm_gen.sv` changes.
