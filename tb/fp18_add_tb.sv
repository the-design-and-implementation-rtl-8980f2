// fp18_add_tb - self-checking test of the fp18 adder/subtractor.
// Drives directed cases (cancellation to zero, x +/- 0, ties, carries,
// saturation) and 30000 random operand pairs with both values of sub, with
// exponent differences from 0 to beyond the significand width, and compares
// every result bit for bit with a once-rounded double-precision sum.
module fp18_add_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  fp18_t a, b, s, exp_s;
  logic  sub;
  int checks = 0, failures = 0;
  int n_cancel = 0, n_sub = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp18_add dut (.a(a), .b(b), .sub(sub), .s(s));

  task automatic check(fp18_t x, fp18_t y, bit op);
    a = x; b = y; sub = op;
    @(posedge clk);
    exp_s = ref_add(x, y, op);
    checks++;
    if (op) n_sub++;
    if (x.exp != 0 && y.exp != 0 && (x.sign ^ y.sign ^ op) && exp_s.exp + 2 < x.exp) n_cancel++;
    if (s !== exp_s) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h %s %h : got %h (%g) expected %h (%g)", x, op ? "-" : "+", y,
                 s, fp2real(s), exp_s, fp2real(exp_s));
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
    fp18_t x;
    check(real2fp(1.0), real2fp(1.0), 1'b0);
    check(real2fp(1.0), real2fp(1.0), 1'b1);          // exact zero
    check(real2fp(2.5), FP_ZERO, 1'b1);
    check(FP_ZERO, real2fp(2.5), 1'b1);
    check(FP_ZERO, FP_ZERO, 1'b0);
    check(real2fp(1.0), real2fp(1.0/4096), 1'b0);     // tie, round to even
    check(real2fp(1.0 + 1.0/2048), real2fp(1.0/4096), 1'b0);
    check(real2fp(1.0), real2fp(0.99951171875), 1'b1); // deep cancellation
    check(real2fp(3.0e9), real2fp(3.0e9), 1'b0);      // saturate
    for (int i = 0; i < 10000; i++) begin             // close exponents
      x = rand_fp(20, 40);
      check(x, rand_fp(int'(x.exp) - 2 < 1 ? 1 : int'(x.exp) - 2, int'(x.exp) + 2), 1'($urandom));
    end
    for (int i = 0; i < 10000; i++) check(rand_fp(15, 47), rand_fp(15, 47), 1'($urandom));
    for (int i = 0; i < 10000; i++) check(rand_fp(0, 63), rand_fp(0, 63), 1'($urandom));
    if (n_cancel == 0 || n_sub == 0) begin
      failures++;
      $display("cancellation (%0d) or subtraction (%0d) never exercised", n_cancel, n_sub);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
