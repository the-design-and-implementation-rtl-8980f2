// flann_adder_tb - self-checking test of the registered addition block.
// Feeds 500 random vectors of 51 products through the default block and
// checks, one cycle later, out_valid, hit and the sum bit for bit against the
// published grouping: the 10/10/10/10/11 products of each multiplication
// sub-block summed first, then the five partial sums, each by halving.
module flann_adder_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  localparam int unsigned NSUB = 5, SUBN = 10, NE = 51;

  logic           clk = 0, rst, in_valid, in_hit, out_valid, out_hit;
  fp18_t [NE-1:0] in_p;
  fp18_t          out_y, exp_y;
  fp18_t          v[], part[];
  int checks = 0, failures = 0, n_effsub = 0;
  always #5 clk = ~clk;

  flann_adder dut (.clk, .rst, .in_valid, .in_hit, .in_p, .out_valid, .out_hit, .out_y);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v = new[NE];
    part = new[NSUB];
    rst = 1; in_valid = 0; in_hit = 0; in_p = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 500; t++) begin
      in_valid = 1'b1;
      in_hit   = 1'($urandom);
      for (int i = 0; i < int'(NE); i++) begin
        in_p[i] = rand_fp(27, 35);
        v[i]    = in_p[i];
      end
      for (int j = 0; j < int'(NSUB); j++)
        part[j] = sum_tree(v, j * SUBN, (j == NSUB - 1) ? SUBN + 1 : SUBN, n_effsub);
      exp_y = sum_tree(part, 0, NSUB, n_effsub);
      @(posedge clk); #1;
      checks += 3;
      if (out_valid !== 1'b1)  failures++;
      if (out_hit !== in_hit)  failures++;
      if (out_y !== exp_y) begin
        failures++;
        if (failures < 10) $display("FAIL y got %h (%g) expected %h (%g)", out_y, fp2real(out_y), exp_y, fp2real(exp_y));
      end
    end
    in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid !== 1'b0) failures++;
    if (n_effsub == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
