// flann_compensator - FLANN inverse model of an LVDT, the non-linearity
// compensator placed after the sensor (top level).
//
// The demodulated LVDT voltage v arrives as an 18-bit floating-point word and
// leaves as the estimated displacement y = sum_k w_k * phi_k(v), also fp18,
// where phi_k are the 51 trigonometric basis functions v, sin(m pi v),
// cos(m pi v), m = 1..25 (order in fp18_pkg) and w_k the trained weights.
// Three stages, as published: expansion (look-up tables, flann_expansion),
// multiplication (51 fp18 multipliers, flann_mult) and addition (50 fp18
// adders, flann_adder). Each stage ends in a register, so one sample can
// enter every clock and y appears 3 cycles after in_v (this timing is this
// design's choice).
//
// The expansion tables hold only the input points they were built for (the
// 13 measured voltages by default). An input that is not one of them gives
// out_hit = 0 and y = +0.
//
// Weights w come in on a port: they are learned offline (LMS) and must be
// stable while samples are in flight. Training is not part of this block.
//
// Ports: clk, rst (synchronous, active high), in_valid/in_v (fp18 sample),
// w (NE fp18 weights), out_valid/out_y (fp18 estimate), out_hit (sample found
// in the table).
module flann_compensator
  import fp18_pkg::*;
#(
  parameter int unsigned NSUB = NSUB_DEF,
  parameter int unsigned SUBN = SUBN_DEF,
  parameter int unsigned NE   = NSUB * SUBN + 1,
  parameter int unsigned NPTS = NPTS_DEF,
  parameter real         VIN [NPTS] = LVDT_V
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  fp18_t           in_v,
  input  fp18_t [NE-1:0]  w,
  output logic            out_valid,
  output logic            out_hit,
  output fp18_t           out_y
);

  logic           e_valid, e_hit, m_valid, m_hit;
  fp18_t [NE-1:0] e_s, m_p;

  flann_expansion #(
    .NSUB(NSUB), .SUBN(SUBN), .NE(NE), .NPTS(NPTS), .VIN(VIN)
  ) u_exp (
    .clk, .rst, .in_valid, .in_v,
    .out_valid (e_valid), .out_hit (e_hit), .out_s (e_s)
  );

  flann_mult #(.NSUB(NSUB), .SUBN(SUBN), .NE(NE)) u_mult (
    .clk, .rst,
    .in_valid (e_valid), .in_hit (e_hit), .in_s (e_s), .w,
    .out_valid (m_valid), .out_hit (m_hit), .out_p (m_p)
  );

  flann_adder #(.NSUB(NSUB), .SUBN(SUBN), .NE(NE)) u_add (
    .clk, .rst,
    .in_valid (m_valid), .in_hit (m_hit), .in_p (m_p),
    .out_valid, .out_hit, .out_y
  );

endmodule
