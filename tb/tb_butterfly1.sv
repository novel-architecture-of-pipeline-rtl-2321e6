// tb_butterfly1: self-checking test of the SDF Butterfly I at FIFO depths 4
// and 1 (the two depths of the 8-point FFT).
//
// A random stream (full 16-bit range) enters one sample per clock with c1 =
// bit log2(L) of the sample index. For each pair (x[i], x[i+L]) of a block
// of 2L samples the expected results are worked out from the definition:
// (x[i] + x[i+L]) / 2 one clock after x[i+L] enters, and (x[i] - x[i+L]) / 2
// L clocks after that (it waits in the FIFO), both rounded half up with
// +32768 clipped. Before the first differences are due the output is the
// cleared FIFO, 0.
module tb_butterfly1;
  import fft_ref_pkg::*;
  import fft_pkg::*;

  localparam int NS = 4000;

  logic clk = 1'b0, rst = 1'b1;
  logic c1_4, c1_1;
  cplx_t din, dout4, dout1;

  butterfly1 #(.L(4)) dut4 (.clk, .rst, .c1(c1_4), .din, .dout(dout4));
  butterfly1 #(.L(1)) dut1 (.clk, .rst, .c1(c1_1), .din, .dout(dout1));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fill = 0, n_bfly = 0;

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
  ci_t exp4[int], exp1[int];

  function automatic ci_t bsum(ci_t a, ci_t b);
    ci_t r;
    r.re = hadd(a.re, b.re); r.im = hadd(a.im, b.im);
    return r;
  endfunction
  function automatic ci_t bdif(ci_t a, ci_t b);
    ci_t r;
    r.re = hsub(a.re, b.re); r.im = hsub(a.im, b.im);
    return r;
  endfunction

  initial begin
    din = '0; c1_4 = 1'b0; c1_1 = 1'b0;
    repeat (2) @(posedge clk);
    for (int t = 0; t <= NS; t++) begin
      @(negedge clk);
      rst = 1'b0;
      // Outputs of the previous clock's input.
      if (t > 0) begin
        ci_t e4, e1;
        e4 = exp4.exists(t) ? exp4[t] : '{0, 0};
        e1 = exp1.exists(t) ? exp1[t] : '{0, 0};
        if (t <= 4 || exp4.exists(t))
          check(int'(dout4.re) == e4.re && int'(dout4.im) == e4.im,
                $sformatf("L=4 t=%0d out=(%0d,%0d) exp=(%0d,%0d)", t, dout4.re, dout4.im, e4.re, e4.im));
        if (t <= 1 || exp1.exists(t))
          check(int'(dout1.re) == e1.re && int'(dout1.im) == e1.im,
                $sformatf("L=1 t=%0d out=(%0d,%0d) exp=(%0d,%0d)", t, dout1.re, dout1.im, e1.re, e1.im));
      end
      if (t == NS) break;
      x[t].re = (t % 97 == 5) ? -32768 : int'($urandom_range(65535)) - 32768;
      x[t].im = (t % 97 == 1) ? 32767 : int'($urandom_range(65535)) - 32768;
      din.re = 16'(x[t].re); din.im = 16'(x[t].im);
      c1_4 = t[2];
      c1_1 = t[0];
      if (c1_4) begin
        n_bfly++;
        exp4[t + 1]     = bsum(x[t - 4], x[t]);
        exp4[t + 4 + 1] = bdif(x[t - 4], x[t]);
      end else n_fill++;
      if (c1_1) begin
        exp1[t + 1]     = bsum(x[t - 1], x[t]);
        exp1[t + 1 + 1] = bdif(x[t - 1], x[t]);
      end
    end
    check(n_fill > 0 && n_bfly > 0, "both c1 phases used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
