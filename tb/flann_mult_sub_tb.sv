// flann_mult_sub_tb - self-checking test of one multiplication sub-block.
// Drives 2000 random vectors of 11 expansion values and 11 weights into an
// 11-wide sub-block (the size of the last published sub-block) and checks
// every product lane bit for bit against once-rounded double-precision
// products, so a swapped or dropped lane is caught.
module flann_mult_sub_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  localparam int unsigned N = 11;

  fp18_t [N-1:0] s, w, p;
  fp18_t         e;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  flann_mult_sub #(.N(N)) dut (.s(s), .w(w), .p(p));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < int'(N); i++) begin
        s[i] = rand_fp(25, 33);
        w[i] = rand_fp(25, 36);
      end
      @(posedge clk);
      for (int i = 0; i < int'(N); i++) begin
        e = ref_mul(s[i], w[i]);
        checks++;
        if (p[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d: %h * %h got %h expected %h", i, s[i], w[i], p[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
