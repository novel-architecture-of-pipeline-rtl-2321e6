// twiddle_rom: twiddle factors for the multiplier between Butterfly II and
// the last Butterfly I of the 8-point radix-2^2 SDF FFT.
//
// The multiplier sees the Butterfly II output stream in the order
// z = 4*g1 + 2*g0 + n3 (g = output group of the radix-2^2 stage, n3 = index
// inside the group). Following the 8-point flow graph the sample must be
// multiplied by W8^e with e = n3 * (k1 + 2*k2), where (k1,k2) of group g is
// the bit reverse of g; that gives e = 0,0,0,2,0,1,0,3 for z = 0..7.
// The ROM word is the Q1.15 constant arithmetically shifted right by 6,
// i.e. a 10-bit Q1.9 number, as the paper stores it:
//   W8^e = cos(2*pi*e/8) - j sin(2*pi*e/8)
//   Q1.15 value = round(32768 * c), clipped to 32767, then >>> 6
//   e=0: ( 511,    0)   e=1: ( 362, -363)
//   e=2: (   0, -512)   e=3: (-363, -363)
// The value for 1.0 is 511/512 because +1 cannot be held in Q1.15.
//
// Interface: addr = stream position z; tw = twiddle of that position.
// Timing: synchronous read, tw is valid one clock after addr.
module twiddle_rom
  import fft_pkg::*;
(
  input  logic                 clk,
  input  logic [LOG2N-1:0]     addr,
  output twiddle_t             tw
);

  // Exponent e of W8^e for stream position addr.
  logic [1:0] e;
  always_comb e = addr[0] ? {addr[1], addr[2]} : 2'd0;

  twiddle_t rom_d;
  always_comb begin
    unique case (e)
      2'd0: rom_d = '{re:  10'sd511, im:  10'sd0};
      2'd1: rom_d = '{re:  10'sd362, im: -10'sd363};
      2'd2: rom_d = '{re:  10'sd0,   im:  10'sh200};  // -512
      2'd3: rom_d = '{re: -10'sd363, im: -10'sd363};
    endcase
  end

  always_ff @(posedge clk) tw <= rom_d;

endmodule
