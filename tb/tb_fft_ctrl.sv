// tb_fft_ctrl: checks every control output of the frame counter against
// values computed from the number of clocks since reset t:
//   bf1_c1 = bit 2 of t, bf2_c1/bf2_c2 = bits 2/1 of t-5, tw_addr = t-7,
//   bf3_c1 = bit 0 of t-12 (all modulo 8), out_valid = (t >= 14),
//   out_index = bit reverse of (t-14) mod 8.
// A second reset in the middle checks that the counter restarts.
module tb_fft_ctrl;
  import fft_ref_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic bf1_c1, bf2_c1, bf2_c2, bf3_c1, out_valid;
  logic [2:0] tw_addr, out_index;

  fft_ctrl dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (500) @(posedge clk);
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

  function automatic int md8(int v);
    return ((v % 8) + 8) % 8;
  endfunction

  task automatic run(int n);
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      rst = 1'b0;
      check(bf1_c1 == 1'((t >> 2) & 1), $sformatf("bf1_c1 t=%0d", t));
      check(bf2_c1 == 1'((md8(t - 5) >> 2) & 1) && bf2_c2 == 1'((md8(t - 5) >> 1) & 1),
            $sformatf("bf2 controls t=%0d", t));
      check(int'(tw_addr) == md8(t - 7), $sformatf("tw_addr t=%0d", t));
      check(bf3_c1 == 1'(md8(t - 12) & 1), $sformatf("bf3_c1 t=%0d", t));
      check(out_valid == (t >= 14), $sformatf("out_valid t=%0d", t));
      if (t >= 14)
        check(int'(out_index) == bitrev3(md8(t - 14)), $sformatf("out_index t=%0d", t));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    run(100);
    @(negedge clk) rst = 1'b1;
    repeat (2) @(posedge clk);
    run(60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
