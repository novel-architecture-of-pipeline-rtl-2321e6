// tb_ds_multiplier: self-checking test of the digit-slicing multiplier.
//
// Two instances: the default one (10-bit Q1.9 constant, the ROM word) and an
// 11-bit-constant one as used for br - bi in the complex multiplier. Each
// clock a new random A and B are applied; the product 2 clocks later must
// equal ds_ref (the slice-sum definition evaluated on integers) and lie
// within 4 LSB of A*B/512. Directed cases: the published example
// 0.925 x 0.7071 (A = 0x7666, B = 0x5A82 >>> 6 = 362) whose result 21429
// (0.654) matches the 0.654 shown for the digit-slicing path; the extremes
// of A and B; and the latency (result absent after 1 clock, present after 2).
module tb_ds_multiplier;
  import fft_ref_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic signed [15:0] a;
  logic signed [9:0]  b;
  logic signed [10:0] b11;
  logic signed [19:0] p, p11;

  ds_multiplier dut (.clk, .rst, .a, .b, .p);
  ds_multiplier #(.B_W(11)) dut11 (.clk, .rst, .a, .b(b11), .p(p11));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
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

  int ea[$], eb[$], eb11[$], due[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic apply(int av, int bv, int b11v);
    @(negedge clk);
    a = 16'(av); b = 10'(bv); b11 = 11'(b11v);
    ea.push_back(av); eb.push_back(bv); eb11.push_back(b11v); due.push_back(cyc + 2);
  endtask

  // Compare 2 clocks after application.
  always @(negedge clk) if (!rst && due.size() > 0 && due[0] == cyc) begin
    int av, bv, b11v, ref_p, ref11;
    void'(due.pop_front());
    av = ea.pop_front(); bv = eb.pop_front(); b11v = eb11.pop_front();
    ref_p = ds_ref(av, bv);
    ref11 = ds_ref(av, b11v);
    check(int'(p) == ref_p, $sformatf("a=%0d b=%0d p=%0d ref=%0d", av, bv, p, ref_p));
    check(int'(p11) == ref11, $sformatf("a=%0d b11=%0d p=%0d ref=%0d", av, b11v, p11, ref11));
    check(rabs(real'(p) - real'(av) * real'(bv) / 512.0) <= 4.0,
          $sformatf("a=%0d b=%0d p=%0d far from exact product", av, bv, p));
  end

  initial begin
    a = '0; b = '0; b11 = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // Latency: one value, then zeros.
    @(negedge clk); a = 16'h7666; b = 10'sd362; b11 = 11'sd724;
    @(negedge clk); a = '0; b = '0; b11 = '0;
    check(p == 20'sd0, "product appeared after 1 clock");
    @(negedge clk);
    check(p == 20'sd21429, $sformatf("published example: p=%0d, expected 21429", p));
    $display("0.925 x 0.7071 -> %0d = %f", p, real'(p) / 32768.0);
    @(negedge clk);
    check(p == 20'sd0, "product held longer than 1 clock");
    // Streaming.
    apply(32'h7666, 362, 724);
    apply(-32768, -512, -1024);
    apply(-32768, 511, 1023);
    apply(32767, -512, -1024);
    apply(32767, 511, 1023);
    apply(-1, 1, 1);
    apply(-4096, 362, 725);
    for (int i = 0; i < 2000; i++)
      apply(int'($urandom_range(65535)) - 32768, int'($urandom_range(1023)) - 512,
            int'($urandom_range(2047)) - 1024);
    repeat (3) apply(0, 0, 0);
    repeat (3) @(negedge clk);
    check(due.size() == 0, "results left unchecked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
