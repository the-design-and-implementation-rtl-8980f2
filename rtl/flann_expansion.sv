// flann_expansion - expansion block (stage 1 of the FLANN datapath).
//
// Expands one fp18 input voltage into NE = NSUB*SUBN + 1 basis values
// (51 by default) with NSUB expansion sub-blocks: sub-blocks 0..NSUB-2 give
// SUBN outputs each and the last gives SUBN+1, so with the defaults E1..E4
// give 10 and E5 gives 11, as published. Every sub-block sees the same input,
// like a demultiplexer fanning one value out to many. Sub-block j covers basis
// functions j*SUBN onwards (order in fp18_pkg): E1 = v, sin(pi v) .. sin(5 pi v),
// ..., E5 = cos(20 pi v) .. sin(25 pi v) and, as its 11th output, cos(25 pi v).
//
// The outputs are registered (one cycle latency): when in_valid is high the
// expansions, and hit (all sub-blocks found the input in their table), are
// captured, and out_valid follows in_valid one cycle later. Synchronous,
// active-high reset clears out_valid only. The register stage is this
// design's choice; the published design gives no timing.
module flann_expansion
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
  output logic            out_valid,
  output logic            out_hit,
  output fp18_t [NE-1:0]  out_s
);

  fp18_t [NE-1:0]   s;
  logic  [NSUB-1:0] hit;

  for (genvar j = 0; j < NSUB; j++) begin : g_sub
    localparam int unsigned CNT = (j == NSUB - 1) ? SUBN + 1 : SUBN;
    flann_exp_sub #(
      .FIRST(j * SUBN), .COUNT(CNT), .NPTS(NPTS), .VIN(VIN)
    ) u_sub (
      .v   (in_v),
      .s   (s[j*SUBN +: CNT]),
      .hit (hit[j])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    if (in_valid) begin
      out_s   <= s;
      out_hit <= &hit;
    end
  end

endmodule
