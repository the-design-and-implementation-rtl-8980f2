// flann_mult_tb - self-checking test of the registered multiplication block.
// Feeds 300 random vectors of 51 expansions and 51 weights through the default
// block, with random idle cycles, and checks one cycle later out_valid, that
// hit travels with the data, and all 51 products bit for bit.
module flann_mult_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  localparam int unsigned NE = 51;

  logic           clk = 0, rst, in_valid, in_hit, out_valid, out_hit;
  fp18_t [NE-1:0] in_s, w, out_p, exp_p;
  bit             exp_hit;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  flann_mult dut (.clk, .rst, .in_valid, .in_hit, .in_s, .w, .out_valid, .out_hit, .out_p);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; in_valid = 0; in_hit = 0; in_s = '0; w = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 300; t++) begin
      in_valid = 1'($urandom);
      in_hit   = 1'($urandom);
      for (int i = 0; i < int'(NE); i++) begin
        in_s[i] = rand_fp(26, 33);
        w[i]    = rand_fp(24, 36);
        exp_p[i] = ref_mul(in_s[i], w[i]);
      end
      exp_hit = in_hit;
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("FAIL valid"); end
      if (in_valid) begin
        checks++;
        if (out_hit !== exp_hit) failures++;
        for (int i = 0; i < int'(NE); i++) begin
          checks++;
          if (out_p[i] !== exp_p[i]) begin
            failures++;
            if (failures < 10) $display("FAIL p[%0d] got %h expected %h", i, out_p[i], exp_p[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
