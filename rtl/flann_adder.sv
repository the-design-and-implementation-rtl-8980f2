// flann_adder - addition block (stage 3 of the FLANN datapath).
//
// Sums the NE = NSUB*SUBN + 1 weighted expansions (51 by default) into the
// compensator output y with NE - 1 two-input fp18 adders (50 by default, the
// published count). As drawn in the published block diagram, each
// multiplication sub-block's products are first added among themselves
// (SUBN-1 adders, SUBN for the last sub-block), and a final adder tree
// combines the NSUB partial sums. Inside each group the tree splits its inputs
// into halves (fp18_sum_tree); that order, which decides the rounding, is this
// design's choice. The adders are used for addition only; the sign of each
// product carries the subtraction.
//
// Registered output (one cycle latency) when in_valid is high; in_hit travels
// with the sum and out_valid follows in_valid. Synchronous active-high reset
// clears out_valid only.
module flann_adder
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
  input  fp18_t [NE-1:0]  in_p,
  output logic            out_valid,
  output logic            out_hit,
  output fp18_t           out_y
);

  fp18_t [NSUB-1:0] part;
  fp18_t            y;

  for (genvar j = 0; j < NSUB; j++) begin : g_grp
    localparam int unsigned CNT = (j == NSUB - 1) ? SUBN + 1 : SUBN;
    fp18_sum_tree #(.N(CNT)) u_grp (.in(in_p[j*SUBN +: CNT]), .sum(part[j]));
  end

  fp18_sum_tree #(.N(NSUB)) u_final (.in(part), .sum(y));

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    if (in_valid) begin
      out_y   <= y;
      out_hit <= in_hit;
    end
  end

endmodule
