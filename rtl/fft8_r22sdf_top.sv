// fft8_r22sdf_top: 8-point pipelined radix-2^2 DIF single-path
// delay-feedback FFT with a digit-slicing multiplier-less twiddle multiplier.
//
// Data path, in the order of the paper's structure diagram:
//   Butterfly I (FIFO 4) -> Butterfly II (FIFO 2, built-in -j)
//   -> complex multiplier (twiddle ROM) -> Butterfly I (FIFO 1)
// The -j rotation that the structure diagram draws between the first two
// butterflies is done inside Butterfly II by its swap multiplexers, as the
// paper's Butterfly II description has it. All control comes from fft_ctrl.
//
// Interface: one complex sample per clock on in_re/in_im, Q1.15, frames of
// 8 back to back, the first sample of the first frame in the first clock
// after reset is released. Results leave one per clock on out_re/out_im in
// bit-reversed frequency order, out_index giving k; out_valid rises
// OFF_OUT = 14 clocks after reset and stays high. If x[0] of a frame
// enters at clock c (c = 0 being the first clock after reset), the result
// at output position r (k = bitrev(r)) of that frame leaves at clock
// c + 14 + r, so the latency from x[0] to X[0] is 14 clocks.
// Every butterfly halves its results, so out = DFT(x) / 8.
// Reset synchronous, active high.
module fft8_r22sdf_top
  import fft_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  sample_t          in_re,
  input  sample_t          in_im,
  output sample_t          out_re,
  output sample_t          out_im,
  output logic             out_valid,
  output logic [LOG2N-1:0] out_index
);

  logic             bf1_c1, bf2_c1, bf2_c2, bf3_c1;
  logic [LOG2N-1:0] tw_addr;
  cplx_t            x_in, s1, s2, s3, s4;
  twiddle_t         tw;

  always_comb begin
    x_in.re = in_re;
    x_in.im = in_im;
  end

  fft_ctrl u_ctrl (
    .clk, .rst, .bf1_c1, .bf2_c1, .bf2_c2, .tw_addr, .bf3_c1,
    .out_valid, .out_index
  );

  butterfly1 #(.L(4)) u_bf1 (.clk, .rst, .c1(bf1_c1), .din(x_in), .dout(s1));

  butterfly2 #(.L(2)) u_bf2 (.clk, .rst, .c1(bf2_c1), .c2(bf2_c2), .din(s1), .dout(s2));

  twiddle_rom u_rom (.clk, .addr(tw_addr), .tw);

  complex_multiplier u_cmul (.clk, .rst, .din(s2), .tw, .dout(s3));

  butterfly1 #(.L(1)) u_bf3 (.clk, .rst, .c1(bf3_c1), .din(s3), .dout(s4));

  always_comb begin
    out_re = s4.re;
    out_im = s4.im;
  end

endmodule
