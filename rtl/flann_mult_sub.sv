// flann_mult_sub - one multiplication sub-block of the FLANN.
//
// N fp18 multipliers side by side: p[i] = s[i] * w[i], each expanded signal
// times its trained neural weight. With the published sizes four sub-blocks
// have N = 10 and one has N = 11.
//
// Combinational, zero latency. Ports: s, w (N fp18 words each), p (N products).
module flann_mult_sub
  import fp18_pkg::*;
#(
  parameter int unsigned N = SUBN_DEF
) (
  input  fp18_t [N-1:0] s,
  input  fp18_t [N-1:0] w,
  output fp18_t [N-1:0] p
);

  for (genvar i = 0; i < N; i++) begin : g_mul
    fp18_mul u_mul (.a(s[i]), .b(w[i]), .p(p[i]));
  end

endmodule
