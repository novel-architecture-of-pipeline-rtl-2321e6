# 8-point radix-2² SDF FFT with a digit-slicing, multiplier-less twiddle multiplier

This is a streaming 8-point FFT that takes one complex sample per clock and
delivers one frequency bin per clock. It has no hardware multiplier anywhere.
The pipeline is the radix-2² single-path delay-feedback (SDF) structure, so
only one stage needs a general complex multiplication. That multiplication is
built from three real "digit-slicing" multipliers. Each one cuts the 16-bit
data word into four 4-bit digits, forms each digit's product with the twiddle
constant by selecting shifted copies of the constant, and adds the four digit
products after fixed shifts. The structure follows the paper *Novel
Architecture of Pipeline Radix 2² SDF FFT Based on Digit-Slicing Technique*
(Algnabi, Aldaamee, Teymourzadeh, Othman, Islam). Where the paper leaves a
detail open, the choice made here is stated below.

## Data path

```
 in ──► Butterfly I ──► Butterfly II ──► complex multiplier ──► Butterfly I ──► out
        FIFO 4           FIFO 2, ×(−j)    3 digit-slicing        FIFO 1
                                          multipliers + ROM
          ▲                 ▲                   ▲                   ▲
          └──────── fft_ctrl (modulo-8 frame counter) ──────────────┘
```

| module | role |
|---|---|
| `fft8_r22sdf_top` | the pipeline above |
| `butterfly1` | radix-2 SDF butterfly with a feedback FIFO of `L` words (L = 4 and L = 1) |
| `butterfly2` | same with L = 2, plus the multiplier-free ×(−j) rotation |
| `complex_multiplier` | (a_r + j a_i)(b_r + j b_i) with three real multipliers |
| `ds_multiplier` | digit-slicing shift-and-add real multiplier |
| `twiddle_rom` | 10-bit twiddle words, addressed by stream position |
| `fft_ctrl` | frame counter; all butterfly controls, ROM address, `out_valid`, `out_index` |
| `fft_pkg` | word formats, pipeline offsets, rounding and saturation helpers |

### Number format and scaling

Samples are 16-bit two's complement with 15 fraction bits (Q1.15). Each
butterfly divides both its outputs by two, rounding half up, so a word never
grows. The one case that would reach +1.0 (32767 − (−32768), halved and
rounded) is clipped to 32767. With three butterflies in the path, the output
is **X[k] / 8**, where X is the DFT of the input frame.

## How the SDF pipeline schedules a frame

This is the part that takes most effort to follow. Each butterfly holds the
first half of a block in its FIFO, then combines it with the second half as it
arrives:

* **Fill phase** (control = 0): the incoming sample goes into the FIFO. The
  word leaving the FIFO goes to the output. That word is a difference saved
  during the previous compute phase.
* **Compute phase** (control = 1): the FIFO head x[n] meets the incoming
  x[n+L]. (x[n] + x[n+L])/2 goes out, and (x[n] − x[n+L])/2 goes back into the
  FIFO, to leave during the next fill phase.

For a butterfly with a FIFO of L words, the control is bit log2(L) of the
index of the sample it currently receives. For one frame x0..x7 entering the
first Butterfly I (L = 4), the output stream is

```
s0 s1 s2 s3 d0 d1 d2 d3      s_n = (x_n + x_{n+4})/2,  d_n = (x_n − x_{n+4})/2
```

Butterfly II (L = 2) pairs positions 0 with 2 and 1 with 3 in each group of
four. In the second group (d2, d3) the partner must first be multiplied by −j.
That is the radix-2² trick: the twiddle W8² = −j of a normal radix-2 pipeline
becomes a free rotation. Multiplying by −j maps (re, im) to (im, −re). The
butterfly therefore swaps the real and imaginary inputs and exchanges the
adder and subtracter on the imaginary path, so no negation is needed:

```
head + (−j)·in = (head.re + in.im) + j(head.im − in.re)
head − (−j)·in = (head.re − in.im) + j(head.im + in.re)
```

The rotation is active when both of its controls are 1: c2 = bit 1 (the
butterfly's own compute phase) and c1 = bit 2 (second half of the frame). Its
output stream z0..z7 then goes through the multiplier. Stream position z is
multiplied by W8^e, with

| z | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| e | 0 | 0 | 0 | 2 | 0 | 1 | 0 | 3 |

that is, e = z[0] · bitrev(z[2:1]). The last Butterfly I (L = 1) combines
neighbours. Results leave in bit-reversed order: **X0 X4 X2 X6 X1 X5 X3 X7**.

### Timing

One counter drives everything. Sample x[n] of every frame must enter while
the counter reads n, so the first sample of the first frame enters in the
first clock after reset is released, and frames follow back to back. Every
stage adds registers:

| point in the pipeline | sees element 0 of its stream at clock |
|---|---|
| first Butterfly I input | 0 |
| Butterfly II input | 5 (4 clocks of FIFO fill + 1 output register) |
| twiddle ROM address | 7 (the ROM read is registered) |
| complex multiplier input | 8 |
| last Butterfly I input | 12 (multiplier latency 4) |
| output | 14 |

Each control is the counter minus that offset (`fft_pkg::OFF_*`). For the
frame whose x0 enters at clock c, the result at output position r leaves at
clock c + 14 + r. `out_valid` rises 14 clocks after reset and stays high.
`out_index` gives k = bitrev(r). There is no input handshake and no stall:
the pipeline accepts a sample every clock. To retime a stage, change its
latency constant in `fft_pkg`. The controls follow automatically.

## The digit-slicing multiplier

A Q1.15 word A is split into four 4-bit digits, A = Σ 2^(4k)·A_k. A_3 is the
signed top digit: its MSB has weight −8. The constant B is the twiddle factor
in Q1.15, arithmetically shifted right by 6, so it fits a 10-bit ROM word
(Q1.9). Each digit product A_k·B needs no multiplier: every bit A_(k,j)
selects B<<j or 0, and the four selections are added. The sign bit's
selection is subtracted. Bringing the product back to 15 fraction bits needs
a shift of 4k − 9 on digit k:

| digit | shift |
|---|---|
| A_3 | << 3 |
| A_2 | >> 1 |
| A_1 | >> 5 |
| A_0 | >> 9 |

Right shifts are arithmetic and truncate. The four shifted digit products are
added. Example: 0.925 × 0.7071 with A = 0x7666 and B = 0x5A82 >>> 6 = 362
gives 7·362·8 + ⌊6·362/2⌋ + ⌊6·362/32⌋ + ⌊6·362/512⌋ = 21429, which is
0.654 (the exact product is 0.6541).

`ds_multiplier` is parameterised by digit size `P`, digit count `SLICES`,
constant width `B_W` and constant fraction bits `B_FRAC`. The shift of digit
k is always `P*k − B_FRAC`. It has two register stages: digit sums, then the
final adder.

## Complex multiplier and word growth

The twiddle product uses the three-multiplier identity

```
real = b_r(a_r − a_i) + a_i(b_r − b_i)
imag = b_i(a_r + a_i) + a_i(b_r − b_i)
```

Here a is the data, sliced as operand A, and b is the twiddle constant. Three
widths do not fit the 16/10-bit formats, and the paper does not say how it
handles them. This design resolves them as follows:

* a_r ± a_i needs 17 bits. It is halved (truncating) so that the sliced
  operand stays four 4-bit digits. The two products that use it are doubled
  again in the output adders. This costs at most about one LSB.
* b_r − b_i needs 11 bits (for W8¹ it is 362 + 363 = 725). The multiplier for
  a_i(b_r − b_i) therefore takes an 11-bit constant.
* The result is saturated to 16 bits. For inputs of magnitude |a| < 1,
  |a·W| < 1 and saturation never acts.

Latency is 4 clocks: pre-adders, two multiplier stages, output adders.

## Twiddle ROM

`twiddle_rom` computes the exponent e from the address and looks up one of
four words. Each word is round(32768·W) clipped to 32767, then >>> 6:

| e | W8^e | (re, im) |
|---|---|---|
| 0 | 1 | (511, 0) |
| 1 | (1 − j)/√2 | (362, −363) |
| 2 | −j | (0, −512) |
| 3 | −(1 + j)/√2 | (−363, −363) |

+1 cannot be held in this format, so W8⁰ is 511/512. Every bin that passes
through the multiplier with W⁰ comes out 0.2 % small. For example, the
constant input 0.05 gives 0x0661 instead of 0x0666. Together with the
truncating shifts, this sets the accuracy. Over the test frames, the worst
deviation from the exact DFT/8 is 66.5 LSB (about 0.2 % of full scale) for
inputs up to full scale.

## Where this RTL departs from, or adds to, the paper

* The −j rotation is drawn in the paper's structure diagram as a box between
  the first two butterflies. The paper's description of Butterfly II places
  it inside that butterfly, as swap multiplexers. This RTL does the latter.
* The only complex multiplier is the one between Butterfly II and the last
  butterfly. Its W8² = −j position also goes through the general multiplier,
  because the paper does not say that position is special-cased.
* These are this design's own choices, as the paper gives no detail:
  * rounding mode (half up)
  * halving of the 17-bit pre-sums
  * 11-bit b_r − b_i constant
  * saturation
  * all pipeline registers and the resulting latency
  * synchronous active-high reset
  * the stream-position-addressed ROM
  * `out_valid`/`out_index`
* The paper names only an "N log2 N counter" for control. Here one 3-bit
  counter with per-stage offsets generates every control.
* The paper's published behavioural simulation shows 0x0666 for the first
  output of its ramp input. This RTL gives 0x0661, because W⁰ is held as
  511/512 (see above). The paper's remaining printed output values could not
  be read reliably, so they were not compared.
* The paper's FPGA figures (669 MHz and 14,854 equivalent gates on a
  Virtex-4) are for the authors' Verilog. They say nothing about this code,
  which has not been through FPGA place and route.
* Only the 8-point configuration is implemented. The butterflies and the
  multiplier are parameterised. The controller, the ROM exponent formula and
  the top are written for N = 8.

## Simulating

Each testbench in `tb/` is self-checking. It ends with
`TB_RESULT checks=N failures=M`, and a watchdog stops it if it hangs. The
reference models live in `tb/fft_ref_pkg.sv`. They use integers and reals,
one frame at a time, and share no code with the RTL:
* a bit-exact model of the flow graph
* the digit-slicing sum
* the twiddle words computed from cos/sin
* a floating-point DFT

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
  rtl/fft_pkg.sv tb/fft_ref_pkg.sv tb/tb_fft8_r22sdf_top.sv \
  --top-module tb_fft8_r22sdf_top -Mdir obj
./obj/Vtb_fft8_r22sdf_top
```

Replace the testbench name to run another one. `-y` lets Verilator find each
module in the file of the same name. The full 400-frame run takes well under
a second.

| testbench | what it checks |
|---|---|
| `tb_fft8_r22sdf_top` | 400 back-to-back frames. The first is the paper's ramp 0.1 0.2 0.3 0.4 −0.3 −0.2 −0.1 0. Then come an impulse, a constant, full-scale frames and random frames. Each output is checked bit-exactly against the flow-graph model and within 80 LSB of DFT/8. It also checks `out_valid`/`out_index` timing, and counts the fill and compute phases, the −j rotations and the non-trivial twiddles. |
| `tb_butterfly1` | L = 4 and L = 1 against pairwise sums and differences, including the clipping corner |
| `tb_butterfly2` | L = 2 with the −j rotation against a true complex rotation |
| `tb_complex_multiplier` | the bit-exact model, and the exact product within 0.4 % + 8 LSB; latency 4 |
| `tb_ds_multiplier` | 10- and 11-bit constants, the 0.925 × 0.7071 example, ±full scale; latency 2 |
| `tb_twiddle_rom` | all addresses against cos/sin; read latency 1 |
| `tb_fft_ctrl` | every control output against its formula, and a second reset |
