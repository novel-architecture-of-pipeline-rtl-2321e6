// tb_twiddle_rom: checks every ROM word against W8^e computed from cos/sin
// (rounded to Q1.15, clipped, shifted right by 6), where the exponent for
// stream position z is e = n3 * (k1 + 2*k2) taken from the 8-point flow
// graph: e = 0,0,0,2,0,1,0,3 for z = 0..7. Also checks the one-clock read
// latency.
module tb_twiddle_rom;
  import fft_ref_pkg::*;
  import fft_pkg::*;

  logic clk = 1'b0;
  logic [2:0] addr;
  twiddle_t tw;

  twiddle_rom dut (.clk, .addr, .tw);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    static int e[8] = '{0, 0, 0, 2, 0, 1, 0, 3};
    ci_t w;
    for (int rep = 0; rep < 3; rep++)
      for (int z = 0; z < 8; z++) begin
        @(negedge clk) addr = 3'(z);
        @(negedge clk);
        w = tw_ref(e[z]);
        check(int'(tw.re) == w.re && int'(tw.im) == w.im,
              $sformatf("z=%0d tw=(%0d,%0d) expected (%0d,%0d)", z, tw.re, tw.im, w.re, w.im));
        // Address change must not show before the next clock edge.
        addr = 3'(z + 1);
        #1 check(int'(tw.re) == w.re && int'(tw.im) == w.im, "ROM output changed without a clock");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
