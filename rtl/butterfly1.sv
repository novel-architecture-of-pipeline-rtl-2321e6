// butterfly1: radix-2 single-path delay-feedback butterfly ("Butterfly I").
//
// A feedback FIFO of L complex words (a shift register) pairs sample n with
// sample n+L of the same input stream. Control c1 has two phases, as the
// paper describes:
//   c1 = 0  the input is written into the FIFO and the word leaving the FIFO
//           (a difference kept from the previous phase) goes to the output;
//   c1 = 1  the adder and subtracter work: (head + in)/2 goes to the output
//           and (head - in)/2 is written back into the FIFO.
// Both results are halved with round-half-up so the word stays 16 bits (the
// paper divides by two at every butterfly and rounds; the rounding mode is
// this design's choice). c1 must be 0 for L samples, then 1 for L samples,
// i.e. bit log2(L) of the sample index of this butterfly's input stream.
//
// Timing: dout is registered, one clock after the input it belongs to; the
// sum of the first pair leaves L+1 clocks after the first input. Reset is
// synchronous, active high, and clears the FIFO and the output register.
module butterfly1
  import fft_pkg::*;
#(
  parameter int unsigned L = 4   // feedback FIFO depth (4 and 1 in the 8-point FFT)
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  c1,
  input  cplx_t din,
  output cplx_t dout
);

  cplx_t fifo [L];     // fifo[L-1] is the oldest word
  cplx_t head, push, out_d;

  always_comb begin
    head = fifo[L-1];
    if (c1) begin
      out_d.re = half_add(head.re, din.re);
      out_d.im = half_add(head.im, din.im);
      push.re  = half_sub(head.re, din.re);
      push.im  = half_sub(head.im, din.im);
    end else begin
      out_d = head;
      push  = din;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(L); i++) fifo[i] <= '0;
      dout <= '0;
    end else begin
      fifo[0] <= push;
      for (int i = 1; i < int'(L); i++) fifo[i] <= fifo[i-1];
      dout <= out_d;
    end
  end

endmodule
