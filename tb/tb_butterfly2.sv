// tb_butterfly2: self-checking test of the SDF Butterfly II (FIFO depth 2)
// with its built-in -j rotation.
//
// A random stream enters one sample per clock with c2 = bit 1 and c1 = bit 2
// of the sample index, as in the 8-point FFT. In each group of four samples
// x[i] is paired with x[i+2]; in the second group of every eight the partner
// is first multiplied by -j in the reference, by an actual complex rotation
// (re, im) -> (im, -re). Expected: (x[i] + p)/2 one clock after the partner
// p enters, (x[i] - p)/2 two clocks later, rounded half up with +32768
// clipped. The number of -j operations is counted and must be above zero.
module tb_butterfly2;
  import fft_ref_pkg::*;
  import fft_pkg::*;

  localparam int NS = 4000;

  logic clk = 1'b0, rst = 1'b1;
  logic c1, c2;
  cplx_t din, dout;

  butterfly2 dut (.clk, .rst, .c1, .c2, .din, .dout);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_negj = 0;

  initial begin
    repeat (NS + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  ci_t x[NS];
  ci_t expv[int];

  initial begin
    din = '0; c1 = 1'b0; c2 = 1'b0;
    repeat (2) @(posedge clk);
    for (int t = 0; t <= NS; t++) begin
      @(negedge clk);
      rst = 1'b0;
      if (t > 0 && (t <= 2 || expv.exists(t))) begin
        ci_t e;
        e = expv.exists(t) ? expv[t] : '{0, 0};
        check(int'(dout.re) == e.re && int'(dout.im) == e.im,
              $sformatf("t=%0d out=(%0d,%0d) exp=(%0d,%0d)", t, dout.re, dout.im, e.re, e.im));
      end
      if (t == NS) break;
      x[t].re = (t % 89 == 6) ? -32768 : int'($urandom_range(65535)) - 32768;
      x[t].im = (t % 89 == 7) ? 32767 : int'($urandom_range(65535)) - 32768;
      din.re = 16'(x[t].re); din.im = 16'(x[t].im);
      c2 = t[1];
      c1 = t[2];
      if (c2) begin
        ci_t p, s, d;
        p = x[t];
        if (c1) begin
          // Complex multiplication by -j.
          int tmp;
          tmp = p.re; p.re = p.im; p.im = -tmp;
          n_negj++;
        end
        s.re = hadd(x[t-2].re, p.re); s.im = hadd(x[t-2].im, p.im);
        d.re = hsub(x[t-2].re, p.re); d.im = hsub(x[t-2].im, p.im);
        expv[t + 1] = s;
        expv[t + 3] = d;
      end
    end
    check(n_negj > 0, "-j rotation used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
