// tb_fft8_r22sdf_top: end-to-end test of the 8-point radix-2^2 SDF FFT at
// its default (and only) configuration.
//
// Streams frames back to back, one sample per clock, starting in the first
// clock after reset: first the ramp used in the design's published
// behavioural simulation (0.1 0.2 0.3 0.4 -0.3 -0.2 -0.1 0, imaginary part
// zero), then an impulse, a constant, full-scale real frames and random
// frames of magnitude below 1. Every output is checked
//   * bit-exactly against fft8_ref (frame-at-a-time model of the flow graph),
//   * against a floating point DFT/8 within TOL LSBs,
//   * for timing: out_valid low for the first 14 clocks, then high, and the
//     result of output position r of frame f in clock 14 + 8f + r, with
//     out_index = bitrev(r).
// The test also counts how often each mechanism occurred: fill and
// add/subtract phases of the Butterfly I stages, the -j swap of Butterfly II
// and multiplications by twiddles other than W^0. One that never happens is
// a failure.
module tb_fft8_r22sdf_top;
  import fft_ref_pkg::*;

  localparam int NFRAMES = 400;
  localparam int LAT     = 14;
  localparam int TOL     = 80;   // LSBs; twiddle quantization, see README

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic signed [15:0] in_re, in_im, out_re, out_im;
  logic       out_valid;
  logic [2:0] out_index;

  fft8_r22sdf_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fill = 0, n_bfly = 0, n_negj = 0, n_twid = 0, n_fill3 = 0, n_bfly3 = 0;
  real max_err = 0.0;

  ci_t frames[NFRAMES][8];

  // Watchdog.
  initial begin
    repeat (NFRAMES * 8 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  always @(posedge clk) if (!rst) begin
    if (dut.u_bf1.c1) n_bfly++; else n_fill++;
    if (dut.u_bf3.c1) n_bfly3++; else n_fill3++;
    if (dut.u_bf2.cc) n_negj++;
    if (dut.u_rom.e != 2'd0) n_twid++;
  end

  function automatic int mag_rand(int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    static int ramp[8] = '{32'h0ccd, 32'h199a, 32'h2666, 32'h3333,
                    -32'sh2666, -32'sh199a, -32'sh0ccd, 0};
    ci_t y[8];
    real yr[8], yi[8];
    ci_t cur[8];
    // Build the frames.
    for (int n = 0; n < 8; n++) begin
      frames[0][n].re = ramp[n];           frames[0][n].im = 0;
      frames[1][n].re = (n == 0) ? 16000 : 0; frames[1][n].im = (n == 0) ? -12000 : 0;
      frames[2][n].re = 20000;             frames[2][n].im = -9000;
      frames[3][n].re = (n % 2 == 1) ? -32768 : 32767; frames[3][n].im = 0;
      frames[4][n].re = -32768;            frames[4][n].im = 0;
      frames[5][n].re = 0;                 frames[5][n].im = (n < 4) ? 32767 : -32768;
    end
    for (int f = 6; f < NFRAMES; f++)
      for (int n = 0; n < 8; n++) begin
        frames[f][n].re = mag_rand(23000);
        frames[f][n].im = mag_rand(23000);
      end

    in_re = '0; in_im = '0;
    repeat (3) @(posedge clk);
    for (int t = 0; t < NFRAMES * 8 + LAT; t++) begin
      @(negedge clk);
      rst = 1'b0;
      // Outputs during clock t.
      if (t < LAT) check(!out_valid, $sformatf("out_valid early at t=%0d", t));
      else begin
        int f, r, k;
        f = (t - LAT) / 8;
        r = (t - LAT) % 8;
        k = bitrev3(r);
        fft8_ref(frames[f], y);
        dft8(frames[f], yr, yi);
        check(out_valid, $sformatf("out_valid low at t=%0d", t));
        check(out_index == 3'(k), $sformatf("out_index %0d, expected %0d at t=%0d", out_index, k, t));
        check(int'(out_re) == y[r].re && int'(out_im) == y[r].im,
              $sformatf("frame %0d X[%0d] = (%0d,%0d), model (%0d,%0d)", f, k,
                        out_re, out_im, y[r].re, y[r].im));
        check(rabs(real'(out_re) - yr[k]) <= TOL && rabs(real'(out_im) - yi[k]) <= TOL,
              $sformatf("frame %0d X[%0d] = (%0d,%0d), DFT/8 (%f,%f)", f, k,
                        out_re, out_im, yr[k], yi[k]));
        if (rabs(real'(out_re) - yr[k]) > max_err) max_err = rabs(real'(out_re) - yr[k]);
        if (rabs(real'(out_im) - yi[k]) > max_err) max_err = rabs(real'(out_im) - yi[k]);
        if (f == 0 && r < 2)
          $display("ramp frame X[%0d] = %h %h", k, out_re, out_im);
      end
      // Input for clock t.
      if (t < NFRAMES * 8) begin
        in_re = 16'(frames[t / 8][t % 8].re);
        in_im = 16'(frames[t / 8][t % 8].im);
      end else begin
        in_re = '0; in_im = '0;
      end
    end
    // First result of the ramp frame as printed in the published simulation.
    $display("max |error| against DFT/8: %f LSB", max_err);
    $display("mechanisms: bf1 fill=%0d add/sub=%0d, bf3 fill=%0d add/sub=%0d, -j=%0d, twiddle!=1: %0d",
             n_fill, n_bfly, n_fill3, n_bfly3, n_negj, n_twid);
    check(n_fill > 0 && n_bfly > 0, "Butterfly I phases");
    check(n_fill3 > 0 && n_bfly3 > 0, "last Butterfly I phases");
    check(n_negj > 0, "-j swap never used");
    check(n_twid > 0, "non-trivial twiddle never used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
