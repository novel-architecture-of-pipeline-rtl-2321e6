// tb_complex_multiplier: self-checking test of the three-multiplier complex
// multiplier. Each clock a random data sample (components within +/-23000,
// magnitude below 1) and one of the four ROM twiddles W8^0..W8^3 are applied;
// 4 clocks later the result must equal cmul_ref bit for bit and lie within
// 0.4 % of |a| plus 8 LSB of the exact complex product a * W (the twiddle
// words are quantized to 10 bits). Directed cases check the latency and
// full-scale inputs.
module tb_complex_multiplier;
  import fft_ref_pkg::*;
  import fft_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  cplx_t din, dout;
  twiddle_t tw;

  complex_multiplier dut (.clk, .rst, .din, .tw, .dout);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (6000) @(posedge clk);
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

  ci_t qa[$];
  int  qe[$], due[$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic apply(int re, int im, int e);
    ci_t w;
    w = tw_ref(e);
    @(negedge clk);
    din.re = 16'(re); din.im = 16'(im);
    tw.re = 10'(w.re); tw.im = 10'(w.im);
    qa.push_back('{re, im}); qe.push_back(e); due.push_back(cyc + 4);
  endtask

  always @(negedge clk) if (!rst && due.size() > 0 && due[0] == cyc) begin
    ci_t a, r;
    int  e;
    real ang, xr, xi, mag;
    void'(due.pop_front());
    a = qa.pop_front(); e = qe.pop_front();
    r = cmul_ref(a, tw_ref(e));
    check(int'(dout.re) == r.re && int'(dout.im) == r.im,
          $sformatf("a=(%0d,%0d) e=%0d out=(%0d,%0d) ref=(%0d,%0d)", a.re, a.im, e,
                    dout.re, dout.im, r.re, r.im));
    ang = -2.0 * 3.14159265358979323846 * real'(e) / 8.0;
    xr  = real'(a.re) * $cos(ang) - real'(a.im) * $sin(ang);
    xi  = real'(a.re) * $sin(ang) + real'(a.im) * $cos(ang);
    mag = $sqrt(real'(a.re) * real'(a.re) + real'(a.im) * real'(a.im));
    check(rabs(real'(dout.re) - xr) <= 0.004 * mag + 8.0 &&
          rabs(real'(dout.im) - xi) <= 0.004 * mag + 8.0,
          $sformatf("a=(%0d,%0d) e=%0d out=(%0d,%0d) exact (%f,%f)", a.re, a.im, e,
                    dout.re, dout.im, xr, xi));
  end

  initial begin
    din = '0; tw = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // Latency: (0.5 + 0.25j) * W^1 appears after exactly 4 clocks.
    apply(16384, 8192, 1);
    void'(qa.pop_front()); void'(qe.pop_front()); void'(due.pop_front());
    @(negedge clk) din = '0; tw = '0;
    repeat (3) begin
      check(dout == '0, "result too early");
      @(negedge clk);
    end
    check(dout != '0 && int'(dout.re) == cmul_ref('{16384, 8192}, tw_ref(1)).re,
          "result not present after 4 clocks");
    @(negedge clk);
    check(dout == '0, "result held too long");
    // Full-scale and random.
    apply(32767, 0, 1);  apply(-32768, 0, 2);  apply(0, -32768, 3);
    apply(23170, 23170, 1); apply(-23170, 23170, 3);
    for (int i = 0; i < 3000; i++)
      apply(int'($urandom_range(46000)) - 23000, int'($urandom_range(46000)) - 23000,
            int'($urandom_range(3)));
    repeat (5) apply(0, 0, 0);
    repeat (5) @(negedge clk);
    check(due.size() == 0, "results left unchecked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
