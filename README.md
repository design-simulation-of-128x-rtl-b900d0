# A 128x interpolation filter for sigma-delta audio DACs

A sigma-delta audio DAC does not turn PCM samples into a voltage directly. It first
raises the sample rate a lot, then a noise shaper squeezes the words down to one bit
and pushes the quantisation noise out of the audio band. After that a 1-bit DAC and an
analog low-pass filter produce the output. This repository holds the first of those
parts, the interpolator. It takes 16-bit PCM at fs = 44.1 kHz (CD audio) and delivers
the same signal at 128 fs = 5.6448 MHz. The copies of the spectrum that plain up-sampling
leaves at fs, 2fs, ... 127fs are removed.

The design is a SystemVerilog implementation of the interpolator architecture published
as "Design & Simulation of 128x Interpolator Filter" (R. Sinha, Sonika). That paper gives
the architecture, the stage ratios and the stop-band targets. It does not give
coefficients, word lengths or timing, and its own hardware was generated by a filter
design tool. All of those details are this design's own. The section
[What follows the paper and what does not](#what-follows-the-paper-and-what-does-not)
separates the two.

## Why three stages

A single FIR filter that up-samples by 128 would need a pass band of about 0.4 fs at a
rate of 128 fs. That is a transition band of roughly 1/600 of the output rate, which
means thousands of taps. The work is split instead:

```
 fs            2 fs            4 fs                          128 fs
 16 bit        17 bit          18 bit                        20 bit
--> [ HBF1  ^2 ] --> [ HBF2  ^2 ] --> [ CIC sinc^5  ^32 ] -->
     47-tap          47-tap           5 combs, zero-stuffer,
     half-band       half-band        5 integrators
```

- **HBF1** does the sharp filtering: its pass band ends at 0.39 fs and its stop band
  starts at 0.61 fs. The sharpness is paid for at the lowest rate.
- **HBF2** runs at 2 fs. The signal now fills only the lower half of its band, so the
  same filter is more than sharp enough.
- **CIC** raises the rate by 32. After HBF2 the only images left are narrow bands
  around multiples of 4 fs. A sinc^5 response has deep nulls exactly there. It needs
  no multipliers and no coefficients: five subtractors at 4 fs and five adders at 128 fs.

Half-band filters suit up-sampling by 2 particularly well. Every second tap except the
centre tap is zero, so only 24 of the 47 taps need a multiplier.

## The half-band stages (`hb_interp`)

### Polyphase form

Up-sampling by 2 means putting a zero between samples and then low-pass filtering.
Most products in that filter involve an inserted zero. The rest split into two phases
for each input sample x[k]:

```
y[2k]   = sum_{i=0..23} c[i] * x[k-i]     FIR branch (the new, interpolated point)
y[2k+1] = x[k-11]                         centre tap, exactly 1.0 (an original sample)
```

So every second output sample is an input sample passed through unchanged, delayed to
line up with the branch. The other output sample is computed from the 24 non-zero
taps. The module keeps a 24-word delay line and forms the 24 products in parallel.
Two stages therefore use 48 multipliers. On each request it emits the two phases
alternately, FIR branch first.

### Coefficients

The taps are in `interp_pkg` as 16-bit signed Q1.15 words. Only the first half is
listed, because the filter is symmetric: c[i] = c[23-i].

```
c[0..11] = -8, 26, -66, 144, -278, 495, -832, 1348, -2156, 3543, -6558, 20726   (/ 2^15)
```

How they were made:

1. A 47-tap equiripple low-pass was designed with the Parks-McClellan (Remez)
   algorithm. Its band edges are 0.195 and 0.305 cycles per sample at the filter's
   output rate, symmetric about a quarter of that rate.
2. The taps at even distances from the centre were forced to 0, and the centre tap
   to 0.5.
3. Everything was multiplied by the interpolation gain 2, so the centre tap becomes
   1.0, and rounded to 16 bits.

After quantisation the filter has 82.6 dB of stop-band attenuation above 0.61 times
its Nyquist frequency. The pass-band ripple is under 0.001 dB. The branch taps sum to
exactly 2^15, so both phases have a DC gain of 1.0. Both stages use the same taps.

### Word lengths, rounding, clipping

Data keep 15 fraction bits all the way through the half-band stages, and each stage
adds one integer guard bit: 16 bits into HBF1, 17 bits out of it, 18 bits out of HBF2.
The branch sum is kept at full precision (37 bits). It is rounded half up to 15
fraction bits and then saturated to the output width.

The guard bit is not always enough. The magnitudes of the 24 taps add up to 2.21, so
an input whose signs line up with the taps can drive the branch past ±2. In HBF1 that
input is a legal 16-bit sequence, and the clip then happens. The module flags it on
`sat`, which appears on the top as `hb_sat[0]`.

In HBF2 a clip cannot happen. Half its taps meet HBF1's original samples, which are at
most 1.0. The other half meet HBF1's branch outputs, which are at most 2.21. Each half
of the taps sums to about 1.10, so the total stays below 3.5, under HBF2's limit of
4.0. The saturation logic is kept in HBF2 only so that both stages share one module.

## The CIC stage (`cic_interp`)

The transfer function is `H(z) = ((1 - z^-RM) / (1 - z^-1))^N`, with R = 32, M = 1 and
N = 5. It is built the usual way for interpolation:

- N comb sections `c = x[k] - x[k-1]` at the input rate (4 fs). They are combinational,
  and their result is registered.
- A zero-stuffer. The first high-rate cycle after a new comb result feeds that result
  to the integrators; the next 31 cycles feed zero.
- N integrator sections `s[n] = s[n-1] + x[n]` at 128 fs. Each is one register.

**Why N = 5.** The first side lobe of a sinc response is about 13.26 dB down per
section. The target for this stage is 65 dB, and five sections give 66.3 dB.

**Register width.** Every register is W = 18 + 5·log2(32) - log2(32) = 38 bits wide.
That is the Hogenauer bound for the last integrator of an interpolator. Every output
phase has a gain of at most R^(N-1) = 2^20 and only non-negative taps, so the final
value always fits in 38 bits. Overflow inside the comb and integrator registers wraps
around and cancels out, as it should in a CIC. Nothing saturates.

**Output.** The output is the top 20 of the 38 bits. This truncation divides by 2^18:
2^20 removes the CIC's DC gain, and 2 extra bits are kept. The 20-bit output therefore
has 17 fraction bits (Q3.17), and the whole filter has a DC gain of exactly 1.

**Droop.** The sinc^5 pass band droops, by 0.002 dB at 1 kHz and 0.66 dB at 17 kHz.
This design does not compensate for it.

## Timing: one clock and strobes

Everything runs from one clock at the output rate. `clk_enable` is a clock enable:
while it is low no register changes anywhere, so the cascade stalls cleanly and may be
clocked faster than 128 fs. `rate_ctrl` counts enabled cycles modulo 128 and issues
strobes for the lower rates. The CIC integrators step on every enabled cycle.

| enabled cycle (mod 128) | event |
|---|---|
| 0 | `ce_in`: `filter_in` is loaded into HBF1 |
| 1, 65 | HBF1 emits y1[2k] (branch), then y1[2k+1] (original sample) |
| 2, 66 | HBF2 loads that output |
| 3, 35, 67, 99 | HBF2 emits a phase |
| 4, 36, 68, 100 | the CIC comb chain takes it |
| 5, 37, 69, 101 | the comb result enters the integrators (zero-stuffer) |
| every cycle | the integrators step, and `ce_out` pulses on the next cycle |

The offsets of 1 and 3 cycles make sure a stage's registered output has reached the
next stage before that stage is asked for output. In every stage the strobes and the
valid flags count only on enabled cycles. That makes the output a fixed function of
the number of enabled cycles, however `clk_enable` is toggled.

**Latency.** Take the output computed on enabled cycle n, which is presented with
`ce_out` on the following clock. It equals the reference filter output of index n - 9,
counted at 128 fs from the `ce_in` cycle of the first sample. Four of those cycles come
from the strobe offsets and the two half-band output registers, and five from the
integrator registers. On top of this come the group delays of the filters:
11.5 input periods for HBF1, 5.75 for HBF2 and 0.6 for the CIC. The total is about
2295 output cycles (0.41 ms at 44.1 kHz).

## Top-level interface (`interp128`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, at least 128 fs (5.6448 MHz for 44.1 kHz audio) |
| `rst` | in | 1 | synchronous reset, active high, clears all state and the rate counter |
| `clk_enable` | in | 1 | clock enable; hold it high for one output per clock |
| `filter_in` | in | 16 | signed PCM sample, Q1.15; taken on the cycle `ce_in` is high |
| `ce_in` | out | 1 | high on the enabled cycle that takes `filter_in`, every 128 enabled cycles, the first right after reset |
| `filter_out` | out | 20 | signed output, Q3.17 (value = `filter_out` / 2^17) |
| `ce_out` | out | 1 | `filter_out` holds a new sample |
| `hb_sat` | out | 2 | a one-cycle flag when HBF1 (bit 0) or HBF2 (bit 1) clipped |

Parameters: `IN_W` (16), `HB1_W` (17), `HB2_W` (18), `CIC_N` (5), `CIC_R` (32),
`CIC_M` (1), `OUT_W` (20). `rate_ctrl`'s period follows as 4·`CIC_R`. It must be a
multiple of 4 and at least 16, so `CIC_R` must be at least 4.

## Files

| file | content |
|---|---|
| `rtl/interp_pkg.sv` | half-band taps, phase type, stage ratios |
| `rtl/rate_ctrl.sv` | modulo-128 counter and stage strobes |
| `rtl/hb_interp.sv` | polyphase half-band interpolator by 2 (used twice) |
| `rtl/cic_interp.sv` | CIC interpolator: combs, zero-stuffer, integrators |
| `rtl/interp128.sv` | top: rate controller, HBF1, HBF2, CIC |
| `tb/*_tb.sv` | self-checking testbenches, one per module, plus a spectral test |

## Verification

Each testbench compares the design with a model written from the filter definitions,
not from the RTL structure. Each ends by printing `TB_RESULT checks=N failures=M`.

- `rate_ctrl_tb` tracks enabled cycles in software and predicts every strobe, with
  random stalls. It also checks the rates: 1, 2 and 4 strobes per 128 enabled cycles.
- `hb_interp_tb` builds the reference by inserting zeros and convolving with the full
  47-tap impulse response, zeros included. It compares 800 outputs and the clip flag,
  using random data plus runs of the worst-case sign pattern, which produce 12 clips.
  The enable stalls at random.
- `cic_interp_tb` builds the reference as the zero-stuffed input convolved with a box
  of 32 ones convolved with itself five times. It compares a full 38-bit instance
  exactly and the default 20-bit instance on its top bits, using full-scale steps and
  random data.
- `interp128_tb` runs the whole cascade at its default parameters. The inputs are 200
  samples: a 1 kHz sine at 0.9 of full scale, random data, and a clipping pattern. The
  enable is dropped at random on about one cycle in eight. Every one of the 25,600
  outputs must match the chained reference bit for bit at latency 9. The test also
  checks the input request rate, the stage output counts and the sine's peak amplitude
  (within 0.5 %). It requires each of these to happen at least once: a stall, both
  phases of both half-band stages, zero-stuffed cycles, and an HBF1 clip.
- `interp128_image_tb` interpolates 1 kHz and 17 kHz tones at half of full scale. It
  measures the output with a single-bin DFT at the tone and at all 126 image
  frequencies k·fs ± f0 up to 64 fs. The tone gain must equal the computed CIC droop
  within 0.01 dB. Images the half-band stages remove must be at least 80 dB down, and
  images around multiples of 4 fs at least 65 dB down. Results:

  | tone | gain | worst half-band image | worst CIC image |
  |---|---|---|---|
  | 1 kHz | -0.002 dB | -96.1 dB at 43.1 kHz | -143.5 dB at 706.6 kHz |
  | 17 kHz | -0.664 dB (droop -0.665) | -89.8 dB at 27.1 kHz | -97.2 dB at 159.4 kHz |

To run one with Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module interp128_tb \
    rtl/interp_pkg.sv rtl/rate_ctrl.sv rtl/hb_interp.sv rtl/cic_interp.sv \
    rtl/interp128.sv tb/interp128_tb.sv
./obj_dir/Vinterp128_tb
```

The package must come first on the command line. Every testbench finishes in well
under a second of simulation time. Lint with `verilator --lint-only -Wall`; the only
remaining warnings are package constants that a given module does not use.

## What follows the paper and what does not

Taken from the paper:

- a 128x interpolator for sigma-delta audio DACs, 44.1 kHz in and 5.6448 MHz out;
- the cascade: half-band x2, half-band x2, comb/sinc x32, with the same half-band
  filter in both stages;
- the half-band principle: original samples pass through, and the points between them
  come from the non-zero taps;
- the CIC structure: combs at the low rate, then a zero-stuffer, then integrators at
  the high rate;
- the stop-band targets: 80 dB for each half-band stage and 65 dB for the CIC;
- the multiplier count: 48 for the two half-band stages, which the 47-tap choice here
  reproduces.

Chosen here, because the paper does not give them:

- **Half-band taps and filter length.** The paper's taps came from a design tool and
  are not published. The taps here meet its 80 dB target with 82.6 dB.
- **Number of CIC sections.** The paper's drawing of the CIC shows three sections as
  an example. Three sections reach only about 40 dB, so five are used to meet the 65 dB
  target.
- **All word lengths.** Input 16 bits (CD audio), output 20 bits, one guard bit per
  half-band stage, 38-bit CIC registers.
- **Arithmetic details.** Rounding and saturation in the half-band stages, truncation
  at the CIC output.
- **Clocking and timing.** The single clock with a clock enable, the strobe schedule,
  the synchronous active-high reset, and the resulting latency.
- **Port names.** They follow the usual conventions of generated filter HDL.

Outside this design, though the DAC needs them: the sigma-delta modulator (noise
shaper), the 1-bit DAC and the analog low-pass filter. Connect the modulator to
`filter_out` and `ce_out`.

The source reports an FPGA implementation with 1037 slice registers, 384 LUTs and a
34.584 MHz maximum clock. This RTL was not synthesised for that device, so those
figures do not apply to it directly.

## Changing the design

- **Different half-band filter.** Replace `HB_COEF_HALF` in `interp_pkg`. The
  structure assumes 47 taps with the centre at branch position 11 (`HB_CDLY`). A
  different length needs `HB_NTAP` and `HB_CDLY` changed together: `HB_NTAP` = (L+1)/2
  and `HB_CDLY` = (L-3)/4 for a length L = 4m-1. Update the tap tables in the
  testbenches to match.
- **Wider input** (for example 24-bit words). Set `IN_W`. The stage widths follow, and
  the CIC width grows with them. `OUT_W` then still takes the top bits. To keep unity
  gain, widen `OUT_W` by the same amount.
- **Another CIC ratio or order.** Set `CIC_R` (a power of 2) and `CIC_N`. The rate
  controller's period follows. The output keeps the top `OUT_W` bits of the CIC, so
  the Q3.17 scaling and unity gain hold only for R = 32 and N = 5; for other values
  the gain is R^(N-1) / 2^(W - OUT_W). The top-level testbench assumes 32 and 5 in its
  reference model and its latency of 9.
