# Statically quantized pipelined radix-2 FFT/IFFT processor

This design is a 1024-point FFT/IFFT processor built to study one trade-off: how
much precision the twiddle factors really need. Every one of its ten radix-2
stages carries a quantizer on its twiddle factors. The quantizer's resolution is
set statically, stage by stage, and can be switched on or off for each frame. An
output stage compares every result with an ideal, unquantized transform supplied
from outside. Per frame, it then gives the sums needed for the mean, the variance
and the signal-to-quantization-noise ratio (SQNR) of the error. Sweeping the
resolution shows how the error falls as twiddle bits are added. This is the
constraint analysis the architecture was proposed for: choosing a word length
from the SQNR a design can accept.

The RTL follows a published description of the architecture: a radix-2
decimation-in-time (DIT) butterfly, a ten-stage pipeline with a shuffling unit
between butterflies, twiddle generators and quantizers in every stage, FFT/IFFT
and quantizer-enable control lines, and input and output stages. That
description is a block-level simulation model in floating point. It gives no
word lengths, clocking, memory organisation or handshakes, so all of these are
this design's own choices. They are marked as such below and in the head
comment of each file.

## Block structure

```
            in_valid/in_ready, in_re, in_im (16 b)      sel_ifft, q_enable
                              |                                |
                      +-------v--------------------------------v-----+
                      | input_stage: switches latched per frame,     |
                      | IFFT 1/N scaling, ping-pong bit-reversal     |
                      +----------------------+-----------------------+
                                             | sample_t, 1 per clock
 q_bits[0] ->  fft_stage D=1   (twiddle_rom, 2x quantizer, conj, butterfly, shuffle_unit)
 q_bits[1] ->  fft_stage D=2
   ...             ...
 q_bits[9] ->  fft_stage D=512
                                             | res_pre (natural order)
                      +----------------------v-----------------------+
 ref_re, ref_im ----> | output_stage: error = result - reference,    |
 (ideal transform)    | per-frame sums of error, |error|^2, |ref|^2  |
                      +----------------------------------------------+
                         res_s, err_re/err_im, stats_valid, err_sum_*, err_energy, ref_energy
```

| File | Role |
|---|---|
| `rtl/fft_pkg.sv` | widths, the `sample_t` struct, quantizer mode enum, twiddle formulas |
| `rtl/quantizer.sv` | uniform or mantissa (floating-point) quantizer of one twiddle component |
| `rtl/twiddle_rom.sv` | constant table of the D twiddle factors one stage needs |
| `rtl/butterfly.sv` | radix-2 DIT butterfly: Xe + W·Xo and Xe − W·Xo |
| `rtl/shuffle_unit.sv` | D-word delay-feedback buffer with its demultiplexer and multiplexer |
| `rtl/fft_stage.sv` | one pipeline stage, built from the four blocks above |
| `rtl/input_stage.sv` | input handshake, control switches, scaling, bit reversal |
| `rtl/output_stage.sv` | comparison with the ideal result and error statistics |
| `rtl/fft_top.sv` | the processor |

The ideal transform is not part of the hardware. It is the reference that the
quantized processor is measured against, so it enters on `ref_re`/`ref_im`. The
testbenches compute it as a direct DFT in double precision.

## Number formats

| Quantity | Format |
|---|---|
| input sample | 16-bit signed fraction, Q1.15 |
| internal data (`data_t`) | 38-bit signed integer; LSB weight 2^-(15+LOG2N) |
| twiddle factor (`tw_t`) | 16-bit signed, 14 fraction bits; +1.0 = 16384 |
| error sums | 88 bits |

There is no scaling inside the pipeline. On entry, an FFT sample is shifted left
by LOG2N bits. An IFFT sample is not shifted, which divides it by N with no
rounding at all. The 38-bit word holds the N·√2 growth of a full 1024-point FFT
of a full-scale input, plus guard bits. The only rounding in the datapath is
therefore at the butterfly's product W·Xo. That product is rounded half up to
the 38-bit grid, and its error is far below anything the twiddle quantizer
causes. In the full-size test with the quantizer off, the error energy relative
to the signal is about 2·10⁻⁹.

Results are in natural order and share the input's LSB weight 2^-(15+LOG2N):

- FFT outputs are the unnormalised sums X[k] = Σ x[n]·W_N^{kn}.
- IFFT outputs include the 1/N factor.

## The serial decimation-in-time pipeline

The input stage delivers each frame in bit-reversed order, one sample per clock.
Stage s (s = 1 … 10) joins samples D = 2^(s−1) apart, using W_{2D}^k with
k = 0 … D−1. For N = 1024, stage 1 joins neighbours with W = 1 and stage 10
joins samples 512 apart. After stage 10 the results are in natural order.

The butterfly of a stage needs two samples that arrive D clocks apart. It
produces two results at once, but the next stage wants them one at a time, in
order. A shuffling unit solves both problems with one buffer of D words. Each
stage runs a counter of the sample's position in its frame; the counter restarts
on the frame's `sof` flag. Within every block of 2D samples:

| position in block | buffer is written with | stage sends out |
|---|---|---|
| 0 … D−1 (phase 0) | the incoming sample | the word leaving the buffer: a difference from the previous block |
| D … 2D−1 (phase 1) | the butterfly difference Xe − W·Xo | the butterfly sum Xe + W·Xo |

In phase 1 the word leaving the buffer is the sample that arrived D clocks
earlier (Xe). The incoming sample is Xo. The twiddle index is k = position mod D.

Each output index therefore leaves the stage exactly D clocks after the input
with the same index arrived. With the output register added, the latency is D+1
clocks. Example for D = 2:

```
clock   0   1   2    3    4    5    6    7    8
in      a0  a1  a2   a3   a4   a5   a6   a7
out                  S02  S13  D02  D13  S46  S57  ...
```

(Sij = ai + W·aj, Dij = ai − W·aj, leaving one clock after the butterfly
forms them.)

The buffer is a circular memory with one read and one write port at the same
address, read before write. Its pointer runs freely, since any word written is
read back exactly D clocks later.

The pipeline never stalls. Once out of reset, every stage shifts one sample per
clock. Each sample carries its own flags:

- `valid`: the sample holds data.
- `sof`: first sample of a frame.
- `ifft`: the frame is an inverse transform.
- `qen`: the frame uses quantized twiddles.

The flags, not global state, tell each stage how to treat the sample. The FFT
and IFFT direction and the quantizer enable can therefore change from one frame
to the next while earlier frames are still in flight. The last frame drains
because the input stage keeps sending empty slots.

Total latency, from the input stage's first sample of a frame to the first
result on `res_pre`, is Σ(2^(s−1)+1) = N − 1 + LOG2N. That is 1033 clocks at
1024 points. Results then follow at one per clock. `res_s` and `err_*` come one
clock after `res_pre`. The statistics of a frame come one clock after its last
result.

## Input stage

- **Switches.** `sel_ifft` and `q_enable` are sampled with the first sample of
  each input frame and stay with that frame.
- **Reordering.** A ping-pong memory of two N-word banks. The writer fills one
  bank in natural order while the reader empties the other at bit-reversed
  addresses.
- **Read slots.** The reader runs in fixed slots of N clocks. A slot reads a bank
  only if that bank was complete when the slot began. Otherwise the slot sends N
  invalid samples, so frame boundaries stay aligned through the whole pipeline.
- **Backpressure.** The input is a valid/ready handshake. `in_ready` falls when
  both banks are waiting to be read. This happens when frames arrive back to
  back but not aligned with the read slots. The writer then waits at most one
  slot.
- **Latency.** A frame's first sample leaves 2 to N+1 clocks after its last
  sample was accepted.

## Twiddle quantization

Each stage quantizes the real and imaginary parts of its twiddle factor, then
conjugates the factor for IFFT frames, then feeds the butterfly. The
resolution b of stage s is `q_bits[s-1]`. It is static configuration: change it
only while the pipeline is empty. The quantizer takes effect only in frames with
`qen` set. Two characteristics are available through the `QMODE` parameter of
`fft_top`.

**Q_FLOAT (default): mantissa quantization.** Write a component as
x = 2^e·M with ½ ≤ |M| < 1. The quantizer keeps M to b fraction bits:
Q(x) = 2^e·round(M·2^b)/2^b. The hardware is the classic compressor, uniform
quantizer and expander:

1. A leading-one detector finds e.
2. The magnitude is rounded at bit e − b.
3. The sign is put back.

The relative error is bounded by 2^-b whatever the size of the component.
Small components, such as sin of small angles in the late stages, keep their
relative precision.

**Q_UNIFORM: uniform quantization.** Q(x) = q·round(x/q) with q = 2^-b. The
absolute error is bounded by q/2. Components smaller than q/2 become zero.

In both modes:

- Rounding is to nearest, ties away from zero.
- Magnitudes are clamped at 1.0.
- A value of b that leaves nothing to remove (b ≥ 14 uniform, or b above the
  component's significant bits) passes the table value unchanged.

The tables themselves hold the twiddle factors rounded to 14 fraction bits.
That is the finest resolution available.

Worked values (+1.0 = 16384):

| x | b | uniform | mantissa |
|---|---|---|---|
| 12000 | 2 | 12288 | 12288 |
| 300 | 2 | 0 | 256 |
| −3000 | 3 | −2048 | −3072 |

## Inverse transform

The IFFT uses the same butterflies with conjugated twiddle factors. The 1/N
factor of the inverse DFT is applied exactly at the input, as described under
Number formats.

## Output stage and error statistics

Each result is compared with the reference sample driven in the same clock. The
testbenches drive the reference from the `res_pre` index and frame. For each
frame the output stage accumulates:

- `err_sum_re`, `err_sum_im`: Σ(result − reference). Divide by N for the mean.
- `err_energy`: Σ|result − reference|². Divide by N for the mean square; the
  variance is that minus |mean|².
- `ref_energy`: Σ|reference|².

The SQNR in dB is 10·log10(ref_energy / err_energy). Square roots, divisions and
logarithms are left to whatever reads the sums. `stats_valid` pulses for one
clock when a frame's sums are ready, and `stats_ifft` tells which kind of frame
they belong to.

## Measured behaviour

From the testbenches (random two-tone signals near ¾ full scale, error energy
over signal energy):

| size | quantizer | FFT | IFFT |
|---|---|---|---|
| 32 points | off | 3.4·10⁻¹⁰ | 4.0·10⁻¹⁰ |
| 32 points | mantissa, b = 4 | 3.8·10⁻⁴ | 3.8·10⁻⁴ |
| 1024 points | off | 2.1·10⁻⁹ | 2.2·10⁻⁹ |
| 1024 points | mantissa, b = 8 | 2.5·10⁻⁶ | 2.5·10⁻⁶ |

Resolution sweep at 1024 points (FFT of a two-tone signal, the same b in all ten
stages, error energy over signal energy against the ideal DFT):

| b | mantissa | uniform |
|---|---|---|
| off | 1.3·10⁻⁹ | 1.3·10⁻⁹ |
| 1 | 1.5·10⁻¹ | 1.3·10⁻¹ |
| 2 | 2.9·10⁻² | 4.5·10⁻² |
| 4 | 1.3·10⁻³ | 2.0·10⁻³ |
| 6 | 2.2·10⁻⁴ | 3.1·10⁻⁴ |
| 8 | 4.7·10⁻⁶ | 5.9·10⁻⁶ |
| 10 | 5.0·10⁻⁷ | 4.1·10⁻⁷ |

The error falls by roughly a factor of four per added bit, which is about 6 dB of
SQNR per bit. Over most of the range the mantissa quantizer is the more
accurate, because it keeps relative precision on the small twiddle components.

## Where this design departs from the described architecture

- **Fixed point, not floating point.** The described model computes in double
  precision and quantizes the twiddle mantissas. Here the datapath is 38-bit
  fixed point wide enough to be exact apart from one rounding per butterfly.
  The twiddle tables have 14 fraction bits, so resolutions above 14 bits cannot
  be studied.
- **Quantizer on the twiddles only.** The control line described enables
  quantization of the twiddle factors. Data are not quantized.
- **Shuffling unit.** Only its purpose and its demultiplexer and multiplexer are
  described. The delay-feedback form (one D-word buffer per stage) is this
  design's choice.
- **Ideal reference outside.** The reference transform and the displays of the
  simulation model are not hardware. The reference enters through a port; the
  displays are replaced by the error and statistics outputs.
- **Resolution wiring.** The described stages pass a signal and three control
  lines from one to the next. Here the direction and the quantizer enable ride
  along with every sample as flags. The static resolution goes to each stage
  directly, as its own entry of `q_bits`.
- **Own choices.** The handshake, the per-sample flags, the read slots, the
  rounding rules, the clamp and the 5-bit resolution field are this design's.
- **Test signal from outside.** The described input stage also generates the
  1024-point test sequence. Here samples come in through the input port.

## Simulation

Everything is plain SystemVerilog-2017 and runs with Verilator 5. Packages go
first on the command line. For the end-to-end test at 32 points:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fft_top \
  rtl/fft_pkg.sv tb/tb_fft_model_pkg.sv rtl/quantizer.sv rtl/twiddle_rom.sv \
  rtl/butterfly.sv rtl/shuffle_unit.sv rtl/fft_stage.sv rtl/input_stage.sv \
  rtl/output_stage.sv rtl/fft_top.sv tb/tb_fft_top.sv
./obj_dir/Vtb_fft_top
```

Every testbench ends with a line `TB_RESULT checks=N failures=F`.

| Testbench | What it checks |
|---|---|
| `tb_quantizer` | both characteristics against a real-valued model for b = 0…15; error bounds; worked values |
| `tb_twiddle_rom` | every entry of a 4- and a 512-entry table against cos/sin |
| `tb_butterfly` | random operands against 64-bit integer arithmetic |
| `tb_shuffle_unit` | write and output routing in both phases |
| `tb_fft_stage` | a D = 4 stage over six frames: FFT/IFFT, quantized or not, and latency |
| `tb_input_stage` | bit-reversed order, scaling, per-frame switches, gaps, backpressure, start latency |
| `tb_output_stage` | per-sample errors and per-frame sums |
| `tb_fft_top` | 32 points, 8 frames: bit-exact against an integer model, statistics, latency N+LOG2N−1, and counts of FFT, IFFT, quantized and unquantized frames, mode switches, stalls and empty slots |
| `tb_fft_top_full` | the same at the default 1024 points, four frames |
| `tb_fft_quant_sweep` | 1024 points, b = 1…10 with both quantizer types, bit-exact, trend of the error |

`tb/tb_fft_model_pkg.sv` holds the reference models:

- the quantizers in real arithmetic;
- an integer DIT FFT with the processor's formats;
- a direct DFT in double precision.

To change the size, set `LOG2N` on `fft_top`. The widths in `fft_pkg` are sized
for up to `MAX_LOG2N` = 10; raise it for larger transforms. To change the
twiddle precision, set `TW_W` in `fft_pkg`; `TW_FRAC` follows as `TW_W` − 2.
