// flann_exp_sub_tb - self-checking test of the expansion look-up sub-block.
// Instantiates the first (E1, functions 0..9) and the last (E5, functions
// 40..50) published sub-blocks, applies the fp18 code of each of the 13
// measured voltages and checks hit and every output against sin/cos values
// computed here from the voltage; then applies 500 random words that are not
// table points and checks that hit is low and all outputs are +0.
module flann_exp_sub_tb;
  import fp18_pkg::*;

  fp18_t          v;
  fp18_t [9:0]    s1;
  fp18_t [10:0]   s5;
  logic           hit1, hit5, is_key;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  flann_exp_sub #(.FIRST(0),  .COUNT(10)) dut1 (.v(v), .s(s1), .hit(hit1));
  flann_exp_sub #(.FIRST(40), .COUNT(11)) dut5 (.v(v), .s(s5), .hit(hit5));

  // expected expansion k at voltage x, written out from the series
  // v, sin(pi v), cos(pi v), sin(2 pi v), cos(2 pi v), ...
  function automatic fp18_t expect_fn(int k, real x);
    if (k == 0) return real2fp(x);
    if (k % 2 == 1) return real2fp($sin(((k + 1) / 2) * 3.14159265358979 * x));
    return real2fp($cos((k / 2) * 3.14159265358979 * x));
  endfunction

  task automatic cmp(fp18_t got, fp18_t exp_v, string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h expected %h", what, got, exp_v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < int'(NPTS_DEF); p++) begin
      v = real2fp(LVDT_V[p]);
      @(posedge clk);
      checks += 2;
      if (!hit1 || !hit5) begin failures++; $display("FAIL no hit for point %0d", p); end
      for (int k = 0; k < 10; k++) cmp(s1[k], expect_fn(k, LVDT_V[p]), $sformatf("E1[%0d] pt %0d", k, p));
      for (int k = 0; k < 11; k++) cmp(s5[k], expect_fn(40 + k, LVDT_V[p]), $sformatf("E5[%0d] pt %0d", k, p));
    end
    for (int t = 0; t < 500; t++) begin
      v = fp18_t'($urandom);
      is_key = 1'b0;
      for (int p = 0; p < int'(NPTS_DEF); p++) if (v == real2fp(LVDT_V[p])) is_key = 1'b1;
      if (is_key) continue;
      @(posedge clk);
      checks++;
      if (hit1 || hit5 || s1 != '0 || s5 != '0) begin
        failures++;
        if (failures < 10) $display("FAIL miss %h gave hit/outputs", v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
