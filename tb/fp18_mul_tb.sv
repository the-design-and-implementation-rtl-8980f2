// fp18_mul_tb - self-checking test of the fp18 multiplier.
// Drives directed cases (zeros, ones, round-to-even ties, overflow
// saturation, underflow flush) and 20000 random operand pairs, and compares
// every product bit for bit with a once-rounded double-precision product.
module fp18_mul_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  fp18_t a, b, p, exp_p;
  int checks = 0, failures = 0;
  int n_sat = 0, n_flush = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp18_mul dut (.a(a), .b(b), .p(p));

  task automatic check(fp18_t x, fp18_t y);
    a = x; b = y;
    @(posedge clk);
    exp_p = ref_mul(x, y);
    checks++;
    if (exp_p.exp == '1 && exp_p.man == '1) n_sat++;
    if (exp_p == FP_ZERO && x.exp != 0 && y.exp != 0) n_flush++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h * %h : got %h (%g) expected %h (%g)", x, y, p, fp2real(p), exp_p, fp2real(exp_p));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(real2fp(1.0), real2fp(1.0));
    check(real2fp(1.5), real2fp(-2.0));
    check(real2fp(3.0), FP_ZERO);
    check(FP_ZERO, real2fp(-7.25));
    check(real2fp(-0.3), real2fp(-0.7));
    check(real2fp(1.0 + 1.0/2048), real2fp(1.0 + 1.0/2048));    // rounding
    check(real2fp(4.0e9), real2fp(4.0e9));                       // saturate
    check(real2fp(1.0e-9), real2fp(1.0e-9));                     // flush
    // exact products always pass, so random operands do the real work
    for (int i = 0; i < 10000; i++) check(rand_fp(16, 46), rand_fp(16, 46));
    for (int i = 0; i < 10000; i++) check(rand_fp(0, 63), rand_fp(0, 63));
    if (n_sat == 0 || n_flush == 0) begin
      failures++;
      $display("saturation (%0d) or flush (%0d) never exercised", n_sat, n_flush);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
