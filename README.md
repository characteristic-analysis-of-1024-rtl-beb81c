# A pipelined 1024-point radix-2 FFT/IFFT processor with programmable twiddle quantization

This is synthesizable SystemVerilog for a streaming fast Fourier transform processor built to
study finite word-length effects. One data path computes both the forward transform (FFT) and
the inverse transform (IFFT) of 1024-point complex frames. Its twiddle factors can be quantized
on purpose, to a programmable number of bits and with either of two characteristics:

* **uniform**: the fixed-point model, with a constant step of 2^-b;
* **floating-point**: the step is relative to the magnitude. The value is split into an
  exponent and a mantissa M in [1/2, 1), only M is rounded to b bits, and the exponent is
  applied again.

The effect of a given resolution on transform accuracy can then be measured on the real data
path. The structure is the classical one for this size: one radix-2 decimation-in-time (DIT)
butterfly per stage, ten stages in a pipeline, and a shuffling unit between two stages that
re-pairs the results.

## Data flow

```
 serial x[n] ──► input_stage ──► fft_stage 0 ──► fft_stage 1 ──► … ──► fft_stage 9 ──► output_stage ──► serial X[k]
 (1 per clock)   scale, bit-     span 1           span 2                 span 512        merge two
                 reverse, demux  (two paths, one pair per clock, throughout)             paths
```

| module         | role |
|----------------|------|
| `fft_pkg`      | constants (defaults N = 1024, widths), the control struct `ctrl_t`, the quantizer mode `qmode_e` |
| `input_stage`  | collects a frame, scales it by 1/N for the IFFT, emits it in bit-reversed order as two paths |
| `fft_stage`    | twiddle generator → quantizer → conjugation (IFFT) → butterfly → shuffler |
| `twiddle_gen`  | table of cos/sin(π·i/L) for one stage, computed at elaboration |
| `quantizer`    | uniform or floating-point round-to-nearest quantizer with enable |
| `butterfly`    | y0 = a + W·b, y1 = a − W·b with registered outputs |
| `shuffler`     | delay–switch–delay commutator between two stages |
| `delay_line`   | fixed-length shift register (used by the shuffler) |
| `output_stage` | turns the two result paths back into one natural-order stream |
| `fft_ifft_top` | wires everything together |

## Interface of `fft_ifft_top`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `inverse` | in | 1 | 0 = FFT, 1 = IFFT |
| `q_en` | in | 1 | quantize the twiddle factors |
| `q_mode` | in | 1 | `Q_UNIFORM` or `Q_FLOAT` |
| `q_bits[s]` | in | 5 each | resolution b of stage s (static, see below) |
| `in_valid`, `in_re`, `in_im` | in | 1, 16, 16 | one complex sample per clock at most, natural order |
| `out_valid`, `out_sof` | out | 1 | result valid; marks X[0] of a frame |
| `out_index` | out | 10 | k of the result on `out_re`/`out_im` |
| `out_inverse` | out | 1 | the frame was an IFFT |
| `out_re`, `out_im` | out | 37 each | result with 10 fraction bits |
| `overflow` | out | 1 | input overrun (sticky; cannot happen at ≤ 1 sample per clock) |

Every 1024 valid input samples form one frame. Gaps between samples are allowed.
`inverse`, `q_en` and `q_mode` are sampled with a frame's first sample and then travel down the
pipeline next to the data. They may therefore change from one frame to the next, even while
frames are back to back. `q_bits` is not carried along: it is a static setting of each stage's
quantizer. Change it only while the pipeline is empty.

Results come out one per clock in natural order, k = 0 … 1023. Both directions use the same
number format, with 10 fraction bits:

* FFT: `out = X[k]·2^10`, where X[k] = Σ x[n]·e^(−j2πkn/N). The transform is unscaled.
* IFFT: `out = x[n]·2^10`, where x[n] = (1/N)·Σ X[k]·e^(+j2πkn/N).

Divide `out_re`/`out_im` by 1024 to get the plain value.

## Number formats and why nothing overflows

A sample enters as a 16-bit integer. The input stage places it in a 37-bit word with 10
fraction bits:

* FFT: the word holds x·2^10, which is x itself.
* IFFT: the word holds x unshifted, which means x/1024.

So the 1/N input scaling that the inverse transform needs costs nothing and loses nothing. The
10 fraction bits also give the fixed-point arithmetic headroom below the input LSB.

The FFT is not scaled stage by stage. Instead the word has 11 integer guard bits. A frame's
components are bounded by N·√2·max|x| ≤ 2^10·1.42·2^15, i.e. 2^35.5 in word units once the
fraction bits are counted, and a 37-bit word holds ±2^36. The width is derived as
`DW = IW + 2·LOG2N + 1` in `fft_pkg::data_width`, so the same argument holds for other sizes.

Twiddle factors are 16-bit words with 14 fraction bits (1.0 = 16384). In the butterfly, the
product W·b is rounded to the nearest data LSB before the add/subtract. Without quantization the
relative RMS error of a 1024-point transform against double precision is about 4–5·10^-5.

## The pipeline ordering (the part that takes the most thought)

Each stage handles one pair of samples per clock, so a frame of N samples takes N/2 clocks in
every stage. Number the positions of the bit-reversed frame m = 0 … N−1. Stage s combines
positions m and m + 2^s, where bit s of m is 0. It multiplies by W_N^e with
e = (m mod 2^s)·N/2^(s+1), which is the same as W_{2L}^i with L = 2^s and i = m mod 2^s. After
the last stage, position k holds X[k].

What keeps the design small is the order in which pairs are presented:

* At stage s, the pair at time t (0 … N/2−1) is the one whose m, with bit s removed, reads t.
  The upper path carries bit s = 0 and the lower path bit s = 1.
* The twiddle index is therefore simply the low s bits of t. Each stage keeps only the 2^s
  factors it uses: 1 + 2 + … + 512 = 1023 table entries in all.
* Going from stage s to stage s+1 swaps two things: the path bit (which used to be m's bit s)
  and time bit s (which used to be m's bit s+1). The `shuffler` does this swap with a
  delay–switch–delay structure, D = 2^s:
  * the lower path is delayed by D clocks;
  * when bit s of the time index is 1, the two paths are crossed, otherwise they pass straight;
  * the upper path is then delayed by D clocks.

  Pairs come out in the same time order D clocks later. The control side band (valid,
  start of frame, FFT/IFFT, quantizer settings) goes through a delay line of the same length.
* At stage 0, t is m with bit 0 dropped. The upper input is therefore x[rev9(t)] and the lower
  input is x[rev9(t) + 512], where rev9 reverses the 9 bits of t. The input stage produces
  exactly this. It stores each frame in one half of a ping-pong buffer, and each buffer is
  split into a low and a high half-frame bank. Both samples of a pair can then be read in the
  same clock.
* At the last stage, t = k and the two paths carry X[k] and X[k+512]. The output stage sends
  X[k] straight on. It parks X[k+512] in a 512-word buffer and plays it out during the next
  512 clocks.

Because the butterflies run at two samples per clock and the input arrives at one, the input
stage always finishes reading a buffer (512 clocks) long before the other one fills (1024
clocks). The output stage likewise always finishes playing out before the next frame reaches
it. Neither end needs back-pressure.

Timing rules inside the pipeline:

* Within a frame the N/2 pairs must be consecutive.
* Between frames there may be any gap.
* While a stage is idle its shuffler passes straight. That is exactly what the tail of the
  previous frame needs.

## Latency and throughput

* The first result X[0] of a frame appears LOG2N + N/2 + 2 clocks after the clock that
  accepted the frame's last sample: 524 clocks for N = 1024. This is made up of:
  * 2 clocks in the input stage;
  * 1 clock per butterfly;
  * 2^s clocks in the shuffler of stage s;
  * 1 clock in the output stage.
* A frame then streams out in N clocks.
* With continuous input the output is continuous as well: one result per clock.
* The ten butterflies together compute a 1024-point transform in 512 clocks.

## The quantizer

`quantizer` works on one twiddle component, a 16-bit value with 14 fraction bits. It applies
the rule to the magnitude and then restores the sign, so quantization never breaks the symmetry
between W and its conjugate.

* `Q_UNIFORM`: round to the nearest multiple of 2^-b, ties away from zero. For b ≥ 14 nothing
  changes.
* `Q_FLOAT`: find the leading one of the magnitude. This gives 2^e·M with M in [1/2, 1).
  Round M to b bits by rounding at bit (lead + 1 − b), then keep the exponent. The step
  therefore scales with the value. Small factors such as sin(π/512) keep their relative
  accuracy, where the uniform quantizer would flush them to zero. Use b ≥ 1.
* Results are saturated to the 16-bit range. This only matters for inputs near full scale,
  which twiddles never reach.

Each stage has two quantizers, one for cos and one for sin. They sit between the twiddle table
and the conjugation. The IFFT uses W* = cos + j·sin, the FFT uses W = cos − j·sin. Quantization
is applied only to the twiddle factors; the data path is never quantized beyond its fixed word.

Measured at N = 1024 (relative RMS error against double precision; the IFFT figures are
within a few percent of these):

| bits | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | off |
|------|---|---|---|---|---|---|---|---|---|----|-----|
| uniform | 0.35 | 0.20 | 0.098 | 0.040 | 0.027 | 0.015 | 0.0059 | 0.0028 | 0.0012 | 0.00055 | 0.00004 |
| floating-point | 0.32 | 0.16 | 0.084 | 0.035 | 0.026 | 0.0096 | 0.0053 | 0.0025 | 0.0011 | 0.00053 | 0.00004 |

The floating-point characteristic is slightly better at every resolution. The error roughly
halves per added bit.

## How closely this follows the published design

Taken from the published description:

* the radix-2 DIT butterfly and its equations;
* one butterfly per stage, ten stages for 1024 points;
* a pipeline register after the add/subtract;
* a shuffling unit between consecutive butterflies;
* per-stage twiddle factors and a per-stage quantizer with a statically preset resolution;
* the FFT/IFFT select, with the IFFT using conjugate twiddles and an input scaled by N;
* the quantizer enable;
* uniform and floating-point quantizer models, round to nearest;
* bit-reversal routing with a demultiplexer into two paths at the input, and a multiplexer
  at the output.

Choices made here where the description is silent:

* all word widths and the fixed-point format;
* the commutator form of the shuffling unit;
* the ping-pong input buffer and the natural-order output serializer;
* the tie rule and the saturation of the quantizer;
* a separate control line selecting the quantizer characteristic;
* reset and timing behaviour.

Points to be aware of:

* **IFFT scaling.** The description speaks of scaling the IFFT input "by N". The design
  divides by N, because that is what makes the inverse transform correct.
* **Floating point.** The original work modelled a floating-point data path in a simulation
  environment. Here the data path is fixed-point with enough guard bits that it adds no
  overflow and almost no rounding error. The "floating-point" behaviour lives in the twiddle
  quantizer, which is where the quantization under study is applied.
* **Where quantization is applied.** The description also mentions quantizing the signal
  input. That is not built: quantization is applied to the twiddle factors only.
* **Resolution limit.** With 14 twiddle fraction bits, resolutions above 14 bits cannot be
  distinguished from no quantization. Raise `TW`/`TF` for more.

## Simulating

Each module is in `rtl/<name>.sv`; the package must be read first. For example, the end-to-end
test at N = 64:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/fft_pkg.sv tb/tb_fft_ifft_top.sv \
          --top-module tb_fft_ifft_top && ./obj_dir/Vtb_fft_ifft_top
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops.

| testbench | what it checks |
|-----------|----------------|
| `tb_quantizer` | both characteristics, all resolutions, against real arithmetic |
| `tb_twiddle_gen` | 16- and 512-entry tables against cos/sin |
| `tb_butterfly` | random butterflies, one-clock latency |
| `tb_shuffler` | the re-pairing permutation, back-to-back frames and gaps |
| `tb_fft_stage` | one stage with FFT, IFFT and both quantizers |
| `tb_input_stage` | bit-reversed demux, 1/N scaling, frame buffering |
| `tb_output_stage` | natural-order merge |
| `tb_fft_ifft_top` | N = 64 end to end against a DFT; all mechanisms (FFT/IFFT switching, quantizer off/uniform/float, back-to-back and gapped frames); latency |
| `tb_fft_ifft_full` | the default 1024-point processor, FFT and IFFT, against a DFT |
| `tb_bit_sweep` | 1024 points, both characteristics, 1–10 bits, FFT and IFFT; prints the table above |

To change the transform size, set `LOG2N` on `fft_ifft_top`; the data width follows. `IW`
sets the sample width, and `TW`/`TF` set the twiddle width and its fraction bits.
