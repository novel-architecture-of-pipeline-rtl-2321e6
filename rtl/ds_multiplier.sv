// ds_multiplier: digit-slicing, multiplier-less real multiplier.
//
// Multiplies a data word A (two's complement, SLICES*P bits, Q1.15 by
// default) by a constant B (two's complement, B_W bits with B_FRAC fraction
// bits; the 10-bit Q1.9 twiddle word by default) using only shifts and adds.
// A is cut into SLICES blocks of P bits (four blocks of four bits, as in the
// paper). Inside each block every bit A(k,j) selects B<<j or 0, and the
// selected terms are added; in the top block the most significant bit is the
// two's complement sign and carries weight -2^(P-1), so its term is
// subtracted. Each block sum is then shifted by P*k - B_FRAC places so that
// the result keeps 15 fraction bits: with the defaults that is <<3, >>1, >>5
// and >>9 for blocks 3, 2, 1 and 0, the shifts printed in the paper's block
// diagram. Right shifts are arithmetic and truncate, as the paper's diagram
// names them. The four shifted block sums are added to form the product.
//
// Interface: a, b sampled every clock; p is the product in the same Q.15
// scale as A, OUT_W bits wide (wide enough that it cannot overflow).
// Timing: two register stages (block sums, then the final adder), so p
// follows a/b by exactly 2 clock cycles; full throughput, one product per
// clock. The pipeline split is this design's choice; the paper gives none.
// Reset is synchronous and active high and clears both stages.
module ds_multiplier #(
  parameter int unsigned P      = 4,   // bits per slice
  parameter int unsigned SLICES = 4,   // number of slices of A
  parameter int unsigned B_W    = 10,  // constant width
  parameter int unsigned B_FRAC = 9,   // constant fraction bits
  parameter int unsigned OUT_W  = 20   // product width (15 fraction bits)
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic signed [P*SLICES-1:0]    a,
  input  logic signed [B_W-1:0]         b,
  output logic signed [OUT_W-1:0]       p
);

  localparam int unsigned PS_W  = B_W + P + 1;         // block-sum width
  localparam int unsigned ACC_W = OUT_W + P*SLICES;    // final adder width

  logic signed [PS_W-1:0] blk_d [SLICES];
  logic signed [PS_W-1:0] blk_q [SLICES];
  logic signed [ACC_W-1:0] acc;

  // Block adders: A(k,j)=1 selects B<<j, else 0.
  always_comb begin
    logic signed [PS_W-1:0] bx;
    bx = PS_W'(b);
    for (int k = 0; k < int'(SLICES); k++) begin
      blk_d[k] = '0;
      for (int j = 0; j < int'(P); j++) begin
        if (a[k*P+j]) begin
          if (k == int'(SLICES) - 1 && j == int'(P) - 1)
            blk_d[k] = blk_d[k] - (bx <<< j);   // sign bit, weight -2^(P-1)
          else
            blk_d[k] = blk_d[k] + (bx <<< j);
        end
      end
    end
  end

  // Block shifts and final adder.
  always_comb begin
    logic signed [ACC_W-1:0] ext;
    int sh;
    acc = '0;
    for (int k = 0; k < int'(SLICES); k++) begin
      ext = ACC_W'(blk_q[k]);
      sh  = int'(P) * k - int'(B_FRAC);
      if (sh >= 0) acc = acc + (ext <<< sh);
      else         acc = acc + (ext >>> (-sh));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < int'(SLICES); k++) blk_q[k] <= '0;
      p <= '0;
    end else begin
      for (int k = 0; k < int'(SLICES); k++) blk_q[k] <= blk_d[k];
      p <= acc[OUT_W-1:0];
    end
  end

endmodule
