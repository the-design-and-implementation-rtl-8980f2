// fp18_sum_tree_tb - self-checking test of the fp18 adder tree.
// Sums 11 random fp18 words (the size of the last published group) 2000
// times and compares with the same halving order computed by once-rounded
// double-precision additions; also checks a 1-word tree passes its word.
module fp18_sum_tree_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  localparam int unsigned N = 11;

  fp18_t [N-1:0] in;
  fp18_t [0:0]   in1;
  fp18_t         sum, sum1, e;
  fp18_t         v[];
  int checks = 0, failures = 0, n_effsub = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp18_sum_tree #(.N(N)) dut  (.in(in),  .sum(sum));
  fp18_sum_tree #(.N(1)) dut1 (.in(in1), .sum(sum1));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v = new[N];
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < int'(N); i++) begin
        in[i] = rand_fp(26, 36);
        v[i]  = in[i];
      end
      in1[0] = in[0];
      @(posedge clk);
      e = sum_tree(v, 0, N, n_effsub);
      checks += 2;
      if (sum !== e) begin
        failures++;
        if (failures < 10) $display("FAIL sum got %h (%g) expected %h (%g)", sum, fp2real(sum), e, fp2real(e));
      end
      if (sum1 !== in[0]) failures++;
    end
    if (n_effsub == 0) begin
      failures++;
      $display("no effective subtraction exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
