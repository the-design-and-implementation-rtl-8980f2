// flann_compensator_tb - end-to-end test of the FLANN compensator at its
// default size (51 expansions, 13 table points).
//
// 1. Training, in double precision here: the 51 weights start at 1 and are
//    adapted by the LMS rule w <- w + eta * (d - y) * s, with d the
//    displacement (mm) at which each voltage was measured, eta = 0.02, for
//    2000 passes over the 13 points. The trained weights are rounded to fp18
//    and put on the weight port.
// 2. Inference: the 13 voltages are streamed in, first back to back, then
//    mixed with idle cycles and with voltages that are not table points.
//    For each valid input the test checks that the result comes out exactly
//    3 cycles later, that out_hit tells table points from others, and that
//    out_y equals, bit for bit, a reference built here from the same steps
//    (expansion rounded to fp18, once-rounded products, the design's adder
//    order). It also checks that every compensated output is within 0.1 mm
//    of the true displacement, i.e. that the sensor plus compensator is
//    linear over the whole +/-30 mm range.
// Counted mechanisms, each of which must occur: table hit, table miss,
// back-to-back samples, idle cycles in the stream, and additions of opposite
// signs (subtractions) inside the adder tree.
module flann_compensator_tb;
  import fp18_pkg::*;
  import fp18_ref_pkg::*;

  localparam int unsigned NSUB = 5, SUBN = 10, NE = 51, NPTS = 13;
  localparam int unsigned LAT = 3;
  localparam real         ETA = 0.02;
  localparam real         TOL_MM = 0.1;

  logic           clk = 0, rst, in_valid, out_valid, out_hit;
  fp18_t          in_v, out_y;
  fp18_t [NE-1:0] w;
  always #5 clk = ~clk;

  flann_compensator dut (.clk, .rst, .in_valid, .in_v, .w, .out_valid, .out_hit, .out_y);

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_b2b = 0, n_idle = 0, n_effsub = 0;
  real max_err = 0.0;
  longint cycle = 0;

  // expected results, queued in input order
  typedef struct { fp18_t y; bit hit; real x; longint t_in; } exp_t;
  exp_t q[$];

  always @(posedge clk) cycle <= cycle + 1;

  function automatic real feat(int k, real x);
    if (k == 0) return x;
    if (k % 2 == 1) return $sin(((k + 1) / 2) * 3.14159265358979 * x);
    return $cos((k / 2) * 3.14159265358979 * x);
  endfunction

  // bit-exact model of one sample through the three stages
  function automatic fp18_t model_y(real x, ref int effsub);
    fp18_t p[], part[];
    p = new[NE];
    part = new[NSUB];
    for (int k = 0; k < int'(NE); k++) p[k] = ref_mul(real2fp(feat(k, x)), w[k]);
    for (int j = 0; j < int'(NSUB); j++)
      part[j] = sum_tree(p, j * SUBN, (j == NSUB - 1) ? SUBN + 1 : SUBN, effsub);
    return sum_tree(part, 0, NSUB, effsub);
  endfunction

  task automatic drive(bit valid, int pt, bit key);
    in_valid = valid;
    if (valid) begin
      in_v = key ? real2fp(LVDT_V[pt]) : real2fp(LVDT_V[pt] + 0.0371);
      q.push_back('{y: key ? model_y(LVDT_V[pt], n_effsub) : FP_ZERO, hit: key,
                    x: LVDT_X[pt], t_in: cycle});
    end
    @(posedge clk); #1;
  endtask

  // output checker
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      exp_t e;
      real err;
      checks += 3;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e = q.pop_front();
        if (cycle - e.t_in != LAT) begin
          failures++;
          $display("FAIL latency %0d", cycle - e.t_in);
        end
        if (out_hit !== e.hit) begin failures++; $display("FAIL hit"); end
        if (out_hit) n_hit++; else n_miss++;
        if (out_y !== e.y) begin
          failures++;
          $display("FAIL y at x=%g: got %h (%g) expected %h (%g)", e.x, out_y, fp2real(out_y), e.y, fp2real(e.y));
        end
        if (e.hit) begin
          checks++;
          err = fp2real(out_y) - e.x;
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          if (err > TOL_MM) begin
            failures++;
            $display("FAIL x=%g mm compensated to %g mm", e.x, fp2real(out_y));
          end
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real wr[NE];
    real s[NE];
    real y, e;

    // LMS training (offline part of the method)
    foreach (wr[k]) wr[k] = 1.0;
    for (int it = 0; it < 2000; it++)
      for (int p = 0; p < int'(NPTS); p++) begin
        y = 0.0;
        foreach (s[k]) begin s[k] = feat(k, LVDT_V[p]); y += s[k] * wr[k]; end
        e = LVDT_X[p] - y;
        foreach (wr[k]) wr[k] += ETA * e * s[k];
      end
    foreach (wr[k]) w[k] = real2fp(wr[k]);

    rst = 1; in_valid = 0; in_v = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // back to back over the whole range
    for (int p = 0; p < int'(NPTS); p++) begin
      drive(1, p, 1);
      if (p > 0) n_b2b++;
    end
    // mixed stream: idle cycles and off-table voltages
    for (int p = NPTS - 1; p >= 0; p--) begin
      drive(0, 0, 0); n_idle++;
      drive(1, p, 1);
      drive(1, p, 0);
    end
    repeat (LAT + 2) drive(0, 0, 0);

    foreach (q[i]) begin failures++; $display("FAIL missing output"); end
    $display("hits=%0d misses=%0d back_to_back=%0d idle=%0d tree_subtractions=%0d max_error=%0.4f mm",
             n_hit, n_miss, n_b2b, n_idle, n_effsub, max_err);
    if (n_hit == 0 || n_miss == 0 || n_b2b == 0 || n_idle == 0 || n_effsub == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
