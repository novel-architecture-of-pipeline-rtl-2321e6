// complex_multiplier: twiddle multiplication with three real multipliers.
//
// Computes (ar + j ai)(br + j bi) as the paper's three-multiplier form
//   real = br (ar - ai) + ai (br - bi)
//   imag = bi (ar + ai) + ai (br - bi)
// where a is the data sample (Q1.15) and b the twiddle word from the ROM
// (10-bit Q1.9). The three real products are digit-slicing multiplier-less
// units (ds_multiplier) with the data as the sliced operand A and the
// twiddle as the constant B. Pre-adders form ar - ai, ar + ai and br - bi.
//
// Word growth, this design's choices (the paper does not give them):
//   * ar - ai and ar + ai need 17 bits; to keep the sliced operand at the
//     paper's four 4-bit blocks they are halved (arithmetic shift, truncating)
//     and the two products that use them are doubled again at the output
//     adders;
//   * br - bi needs 11 bits, so that multiplier's constant is 11 bits wide;
//   * the output is saturated to 16 bits. For inputs of magnitude below 1
//     the product magnitude stays below 1 and saturation does not act.
//
// Timing: din and tw are sampled together; dout follows 4 clocks later
// (pre-adder register, 2-stage ds_multiplier, output adder register),
// one result per clock. Reset synchronous, active high.
module complex_multiplier
  import fft_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  cplx_t    din,
  input  twiddle_t tw,
  output cplx_t    dout
);

  localparam int unsigned PW = 20;   // product width, 15 fraction bits

  // Stage 0: pre-adders.
  sample_t                diff_h, sum_h, ai_q;
  logic signed [TW_W-1:0] br_q, bi_q;
  logic signed [TW_W:0]   bd_q;      // br - bi, 11 bits

  always_ff @(posedge clk) begin
    if (rst) begin
      diff_h <= '0; sum_h <= '0; ai_q <= '0;
      br_q <= '0; bi_q <= '0; bd_q <= '0;
    end else begin
      diff_h <= sample_t'(({din.re[DATA_W-1], din.re} - {din.im[DATA_W-1], din.im}) >> 1);
      sum_h  <= sample_t'(({din.re[DATA_W-1], din.re} + {din.im[DATA_W-1], din.im}) >> 1);
      ai_q   <= din.im;
      br_q   <= tw.re;
      bi_q   <= tw.im;
      bd_q   <= {tw.re[TW_W-1], tw.re} - {tw.im[TW_W-1], tw.im};
    end
  end

  // Stages 1-2: the three digit-slicing multipliers.
  logic signed [PW-1:0] t1, t2, t3;

  ds_multiplier #(.B_W(TW_W),   .B_FRAC(9), .OUT_W(PW)) u_mul_r (
    .clk, .rst, .a(diff_h), .b(br_q), .p(t1));    // br (ar - ai) / 2
  ds_multiplier #(.B_W(TW_W+1), .B_FRAC(9), .OUT_W(PW)) u_mul_c (
    .clk, .rst, .a(ai_q),   .b(bd_q), .p(t2));    // ai (br - bi)
  ds_multiplier #(.B_W(TW_W),   .B_FRAC(9), .OUT_W(PW)) u_mul_i (
    .clk, .rst, .a(sum_h),  .b(bi_q), .p(t3));    // bi (ar + ai) / 2

  // Stage 3: output adders.
  logic signed [31:0] re_w, im_w;
  always_comb begin
    re_w = 32'(t1) * 2 + 32'(t2);
    im_w = 32'(t3) * 2 + 32'(t2);
  end

  always_ff @(posedge clk) begin
    if (rst) dout <= '0;
    else begin
      dout.re <= sat16(re_w);
      dout.im <= sat16(im_w);
    end
  end

endmodule
