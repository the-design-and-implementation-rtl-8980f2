// flann_mult - multiplication block (stage 2 of the FLANN datapath).
//
// Multiplies the NE = NSUB*SUBN + 1 expanded signals (51 by default) by their
// weights with NSUB multiplication sub-blocks of SUBN multipliers, the last
// having SUBN+1 (published: four of 10 and one of 11), one sub-block behind
// each expansion sub-block.
//
// The weights come in on a port: they are the result of the offline LMS
// training and are held outside this block, which is this design's choice
// (no weight storage is described). The products are registered (one cycle
// latency) when in_valid is high; in_hit travels with them, and out_valid
// follows in_valid one cycle later. Synchronous active-high reset clears
// out_valid only.
module flann_mult
  import fp18_pkg::*;
#(
  parameter int unsigned NSUB = NSUB_DEF,
  parameter int unsigned SUBN = SUBN_DEF,
  parameter int unsigned NE   = NSUB * SUBN + 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic            in_hit,
  input  fp18_t [NE-1:0]  in_s,
  input  fp18_t [NE-1:0]  w,
  output logic            out_valid,
  output logic            out_hit,
  output fp18_t [NE-1:0]  out_p
);

  fp18_t [NE-1:0] p;

  for (genvar j = 0; j < NSUB; j++) begin : g_sub
    localparam int unsigned CNT = (j == NSUB - 1) ? SUBN + 1 : SUBN;
    flann_mult_sub #(.N(CNT)) u_sub (
      .s (in_s[j*SUBN +: CNT]),
      .w (w[j*SUBN +: CNT]),
      .p (p[j*SUBN +: CNT])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    if (in_valid) begin
      out_p   <= p;
      out_hit <= in_hit;
    end
  end

endmodule
