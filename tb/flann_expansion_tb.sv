// flann_expansion_tb - self-checking test of the registered expansion block.
// Streams the 13 table voltages back to back, with misses and idle cycles
// between them, through the default 51-output block and checks, one cycle
// after each valid input, out_valid, out_hit and all 51 expansions against
// v, sin(m pi v), cos(m pi v) (m = 1..25) computed here. Also checks the
// published sub-block boundaries by value: output 10 is cos(5 pi v) (first
// of E2) and output 50 is cos(25 pi v) (11th of E5).
module flann_expansion_tb;
  import fp18_pkg::*;

  localparam int unsigned NE = 51;

  logic           clk = 0, rst, in_valid, out_valid, out_hit;
  fp18_t          in_v;
  fp18_t [NE-1:0] out_s;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;
  always #5 clk = ~clk;

  flann_expansion dut (.clk, .rst, .in_valid, .in_v, .out_valid, .out_hit, .out_s);

  function automatic fp18_t expect_fn(int k, real x);
    if (k == 0) return real2fp(x);
    if (k % 2 == 1) return real2fp($sin(((k + 1) / 2) * 3.14159265358979 * x));
    return real2fp($cos((k / 2) * 3.14159265358979 * x));
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one sample: drive for a cycle, check the registered result
  task automatic sample(bit valid, real x, bit key);
    in_valid = valid;
    in_v     = key ? real2fp(x) : real2fp(x + 0.0123);
    @(posedge clk); #1;
    checks++;
    if (out_valid !== valid) begin failures++; $display("FAIL out_valid"); end
    if (!valid) return;
    checks++;
    if (out_hit !== key) begin failures++; $display("FAIL hit for %g", x); end
    if (key) n_hit++; else n_miss++;
    for (int k = 0; k < int'(NE); k++) begin
      checks++;
      if (out_s[k] !== (key ? expect_fn(k, x) : FP_ZERO)) begin
        failures++;
        if (failures < 10) $display("FAIL s[%0d] at %g: %h", k, x, out_s[k]);
      end
    end
    if (key) begin
      checks += 2;
      if (out_s[10] !== real2fp($cos(5.0 * 3.14159265358979 * x)))  failures++;
      if (out_s[50] !== real2fp($cos(25.0 * 3.14159265358979 * x))) failures++;
    end
  endtask

  initial begin
    rst = 1; in_valid = 0; in_v = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int p = 0; p < int'(NPTS_DEF); p++) sample(1, LVDT_V[p], 1);
    for (int p = 0; p < int'(NPTS_DEF); p++) begin
      sample(1, LVDT_V[p], 0);
      sample(0, 0.0, 0);
      sample(1, LVDT_V[NPTS_DEF - 1 - p], 1);
    end
    if (n_hit == 0 || n_miss == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
