// flann_fe_sweep_tb - compensation with 11, 25, 51 and 61 functional
// expansions over the 13 measured LVDT points.
//
// A FLANN with F expansions uses v, sin/cos(m pi v) for m = 1..(F-1)/2. The
// default 51-expansion compensator can run F = 11 and F = 25 by giving the
// unused basis functions zero weight; F = 61 needs a sixth expansion
// sub-block, so a second instance is built with NSUB = 6. For each F the
// weights are trained here by LMS (start at 1, eta = 0.02, 2000 passes, only
// the F used weights adapt), rounded to fp18, and the 13 voltages are run
// through the hardware. Checks: every output equals the bit-exact model, the
// result comes 3 cycles after the input, F = 51 and F = 61 compensate to
// within 0.1 mm everywhere, and fewer expansions compensate worse (the worst
// error with 11 expansions exceeds that with 51).
module flann_fe_sweep_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  localparam int unsigned NPTS = 13, SUBN = 10;
  localparam real ETA = 0.02;

  logic clk = 0, rst;
  always #5 clk = ~clk;

  logic           v51, v61, ov51, ov61, h51, h61;
  fp18_t          in_v, y51, y61;
  fp18_t [50:0]   w51;
  fp18_t [60:0]   w61;

  flann_compensator                 dut51 (.clk, .rst, .in_valid(v51), .in_v, .w(w51),
                                           .out_valid(ov51), .out_hit(h51), .out_y(y51));
  flann_compensator #(.NSUB(6))     dut61 (.clk, .rst, .in_valid(v61), .in_v, .w(w61),
                                           .out_valid(ov61), .out_hit(h61), .out_y(y61));

  int checks = 0, failures = 0, effsub = 0;
  real maxerr[4];

  function automatic real feat(int k, real x);
    if (k == 0) return x;
    if (k % 2 == 1) return $sin(((k + 1) / 2) * 3.14159265358979 * x);
    return $cos((k / 2) * 3.14159265358979 * x);
  endfunction

  // LMS-trained fp18 weights for ne basis functions of which f are used
  function automatic void train(int ne, int f, ref fp18_t wq[]);
    real wr[], s[];
    real y, e;
    wr = new[ne]; s = new[ne]; wq = new[ne];
    foreach (wr[k]) wr[k] = (k < f) ? 1.0 : 0.0;
    for (int it = 0; it < 2000; it++)
      for (int p = 0; p < int'(NPTS); p++) begin
        y = 0.0;
        for (int k = 0; k < f; k++) begin s[k] = feat(k, LVDT_V[p]); y += s[k] * wr[k]; end
        e = LVDT_X[p] - y;
        for (int k = 0; k < f; k++) wr[k] += ETA * e * s[k];
      end
    foreach (wr[k]) wq[k] = real2fp(wr[k]);
  endfunction

  function automatic fp18_t model_y(int ne, real x, const ref fp18_t wq[]);
    fp18_t p[], part[];
    int nsub = (ne - 1) / SUBN;
    p = new[ne]; part = new[nsub];
    for (int k = 0; k < ne; k++) p[k] = ref_mul(real2fp(feat(k, x)), wq[k]);
    for (int j = 0; j < nsub; j++)
      part[j] = sum_tree(p, j * SUBN, (j == nsub - 1) ? SUBN + 1 : SUBN, effsub);
    return sum_tree(part, 0, nsub, effsub);
  endfunction

  task automatic run(int idx, int f);
    fp18_t wq[];
    fp18_t got, exp_y;
    real   err;
    int    ne = (f == 61) ? 61 : 51;
    train(ne, f, wq);
    if (ne == 61) foreach (wq[k]) w61[k] = wq[k];
    else          foreach (wq[k]) w51[k] = wq[k];
    maxerr[idx] = 0.0;
    for (int p = 0; p < int'(NPTS); p++) begin
      in_v = real2fp(LVDT_V[p]);
      if (ne == 61) v61 = 1; else v51 = 1;
      @(posedge clk); #1;
      v51 = 0; v61 = 0;
      repeat (2) @(posedge clk);
      #1;
      got   = (ne == 61) ? y61 : y51;
      exp_y = model_y(ne, LVDT_V[p], wq);
      checks += 2;
      if (((ne == 61) ? ov61 : ov51) !== 1'b1) begin failures++; $display("FAIL F=%0d latency", f); end
      if (got !== exp_y) begin
        failures++;
        $display("FAIL F=%0d x=%g got %h expected %h", f, LVDT_X[p], got, exp_y);
      end
      err = fp2real(got) - LVDT_X[p];
      if (err < 0) err = -err;
      if (err > maxerr[idx]) maxerr[idx] = err;
      @(posedge clk); #1;
    end
    $display("F=%0d expansions: worst compensated error %0.4f mm", f, maxerr[idx]);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; v51 = 0; v61 = 0; in_v = '0; w51 = '0; w61 = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    run(0, 11);
    run(1, 25);
    run(2, 51);
    run(3, 61);
    checks += 3;
    if (maxerr[2] > 0.1) failures++;
    if (maxerr[3] > 0.1) failures++;
    if (!(maxerr[0] > maxerr[2])) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
