// fft_ctrl: frame counter and control generator of the 8-point pipeline.
//
// A modulo-8 counter counts input samples from reset: sample x[n] of every
// frame enters while the counter reads n. Each stage needs the index of the
// sample it currently sees in its own input stream, which is the counter
// minus that stage's pipeline offset (fft_pkg::OFF_*); the control bits are
// bits of those indices:
//   bf1_c1          bit 2 of the first Butterfly I's index (FIFO of 4)
//   bf2_c1, bf2_c2  bits 2 and 1 of the Butterfly II index (FIFO of 2)
//   tw_addr         position in the multiplier stream, one clock early for
//                   the synchronous ROM
//   bf3_c1          bit 0 of the last Butterfly I's index (FIFO of 1)
// A second counter, saturating, raises out_valid once the first result of
// the first frame reaches the output (OFF_OUT clocks after reset); from then
// on one result leaves per clock. out_index is the frequency index k of the
// current result: outputs come in bit-reversed order X0 X4 X2 X6 X1 X5 X3 X7.
// The paper only names a counter; deriving every control from one counter
// with fixed offsets is this design's choice. Reset synchronous, active high.
// An assertion checks that out_valid, once high, stays high until reset.
module fft_ctrl
  import fft_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  output logic             bf1_c1,
  output logic             bf2_c1,
  output logic             bf2_c2,
  output logic [LOG2N-1:0] tw_addr,
  output logic             bf3_c1,
  output logic             out_valid,
  output logic [LOG2N-1:0] out_index
);

  logic [LOG2N-1:0] cnt;
  logic [4:0]       age;   // clocks since reset, saturating at OFF_OUT

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0;
      age <= '0;
    end else begin
      cnt <= cnt + 1'b1;
      if (age != 5'(OFF_OUT)) age <= age + 1'b1;
    end
  end

  logic [LOG2N-2:0] i_bf2;   // Butterfly II index without its unused bit 0
  logic [LOG2N-1:0] i_out;
  always_comb begin
    i_bf2     = (LOG2N-1)'((cnt - LOG2N'(OFF_BF2)) >> 1);
    i_out     = cnt - LOG2N'(OFF_OUT);
    bf1_c1    = cnt[2];
    bf2_c1    = i_bf2[1];
    bf2_c2    = i_bf2[0];
    tw_addr   = cnt - LOG2N'(OFF_ROM);
    bf3_c1    = cnt[0] ^ 1'(OFF_BF3 % 2);   // bit 0 of cnt - OFF_BF3
    out_valid = (age == 5'(OFF_OUT));
    out_index = bitrev3(i_out);
  end

  // Once results flow they flow every clock until the next reset.
  a_valid_stays: assert property (@(posedge clk) disable iff (rst) out_valid |=> out_valid);

endmodule
