// flann_exp_sub - one expansion sub-block (E1..E5) of the FLANN.
//
// A look-up table that turns one fp18 input voltage v into COUNT consecutive
// basis values, basis functions FIRST .. FIRST+COUNT-1 of the order defined in
// fp18_pkg (v, sin(pi v), cos(pi v), sin(2 pi v), ...). As in the published
// design the table only knows a fixed set of input points (by default the 13
// measured LVDT voltages): the input word is compared with the fp18 code of
// every point, and on a match the stored fp18 values of the expansions at
// that point are driven out and hit is raised. On a miss the outputs are +0
// and hit is low. The table is computed at elaboration from the point list
// with $sin/$cos and rounded to fp18, so changing VIN re-targets the table.
// Using the exact decimal voltage (not its fp18 rounding) for the sin/cos
// arguments is this design's choice.
//
// Combinational, zero latency. Ports: v (fp18 input), s (COUNT fp18 outputs,
// s[0] is basis FIRST), hit (input matched a table point).
module flann_exp_sub
  import fp18_pkg::*;
#(
  parameter int unsigned FIRST = 0,
  parameter int unsigned COUNT = 10,
  parameter int unsigned NPTS  = NPTS_DEF,
  parameter real         VIN [NPTS] = LVDT_V
) (
  input  fp18_t              v,
  output fp18_t [COUNT-1:0]  s,
  output logic               hit
);

  fp18_t [NPTS-1:0]            keys;
  fp18_t [NPTS-1:0][COUNT-1:0] tbl;

  // table contents, fixed at elaboration
  for (genvar i = 0; i < NPTS; i++) begin : g_pt
    localparam fp18_t KEY = real2fp(VIN[i]);
    assign keys[i] = KEY;
    for (genvar j = 0; j < COUNT; j++) begin : g_fn
      localparam fp18_t VAL = real2fp(basis(int'(FIRST + j), VIN[i]));
      assign tbl[i][j] = VAL;
    end
  end

  always_comb begin
    s   = '0;
    hit = 1'b0;
    for (int i = 0; i < int'(NPTS); i++) begin
      if (v == keys[i]) begin
        s   = tbl[i];
        hit = 1'b1;
      end
    end
  end

endmodule
