// butterfly2: radix-2 single-path delay-feedback butterfly with the trivial
// -j rotation of the radix-2^2 algorithm ("Butterfly II").
//
// Works like butterfly1 (feedback FIFO of L words, fill phase when c2 = 0,
// add/subtract phase when c2 = 1, results halved with round-half-up), and
// adds the MUXim stage of the paper: when both control signals c1 and c2 are
// 1 the incoming sample must be multiplied by -j. That is done without a
// multiplier: the real and imaginary parts of the input are swapped and, on
// the imaginary path, the adder and subtracter exchange roles, since
//   -j (br + j bi) = bi - j br,
//   head + (-j)in = (head.re + in.im) + j (head.im - in.re),
//   head - (-j)in = (head.re - in.im) + j (head.im + in.re).
// c2 is bit log2(L) and c1 bit log2(L)+1 of the sample index of this
// butterfly's input stream, so -j applies to the last quarter of each frame.
//
// Timing: dout registered, one clock after its input. Reset is synchronous,
// active high, and clears the FIFO and the output register.
module butterfly2
  import fft_pkg::*;
#(
  parameter int unsigned L = 2   // feedback FIFO depth (2 in the 8-point FFT)
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  c1,
  input  logic  c2,
  input  cplx_t din,
  output cplx_t dout
);

  cplx_t fifo [L];     // fifo[L-1] is the oldest word
  cplx_t head, push, out_d;
  logic  cc;           // multiply the input by -j

  always_comb begin
    cc   = c1 & c2;
    head = fifo[L-1];
    if (!c2) begin
      out_d = head;
      push  = din;
    end else if (cc) begin
      out_d.re = half_add(head.re, din.im);
      out_d.im = half_sub(head.im, din.re);
      push.re  = half_sub(head.re, din.im);
      push.im  = half_add(head.im, din.re);
    end else begin
      out_d.re = half_add(head.re, din.re);
      out_d.im = half_add(head.im, din.im);
      push.re  = half_sub(head.re, din.re);
      push.im  = half_sub(head.im, din.im);
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
