// fp18_mul - 18-bit floating-point multiplier (the "M" cells of the
// multiplication stage).
//
// Combinational. The two 12-bit significands (hidden one restored) are
// multiplied into a 24-bit product, which is normalised by at most one
// position; the 11 fraction bits are then rounded to nearest, ties to even,
// using a guard bit and a sticky bit. The exponent is ea + eb - bias, plus one
// if the product was >= 2 or if rounding carried out of the significand.
// A zero operand gives +0; an exponent below 1 flushes to +0 and one above 63
// saturates to the largest magnitude (format in fp18_pkg).
//
// The paper names a floating-point multiplier and the reference it follows
// but gives no internals; this is a plain correctly rounded multiplier.
//
// Ports: a, b (fp18 operands), p (fp18 product). No clock; zero latency.
module fp18_mul
  import fp18_pkg::*;
(
  input  fp18_t a,
  input  fp18_t b,
  output fp18_t p
);

  logic [2*(MAN_W+1)-1:0] prod;
  logic [MAN_W-1:0]       frac;
  logic [MAN_W:0]         frac_r;     // rounded fraction with carry-out
  logic                   guard, sticky, rnd;
  logic signed [EXP_W+2:0] e;        // result exponent before range check

  always_comb begin
    prod = {1'b1, a.man} * {1'b1, b.man};
    e    = $signed({3'b000, a.exp}) + $signed({3'b000, b.exp}) - (EXP_W+3)'(BIAS);
    if (prod[2*MAN_W+1]) begin
      frac   = prod[2*MAN_W   -: MAN_W];
      guard  = prod[MAN_W];
      sticky = |prod[MAN_W-1:0];
      e      = e + 1;
    end else begin
      frac   = prod[2*MAN_W-1 -: MAN_W];
      guard  = prod[MAN_W-1];
      sticky = |prod[MAN_W-2:0];
    end
    rnd    = guard & (sticky | frac[0]);
    frac_r = {1'b0, frac} + {{MAN_W{1'b0}}, rnd};
    if (frac_r[MAN_W]) e = e + 1;     // 1.111..1 rounded up to 10.000..0

    p.sign = a.sign ^ b.sign;
    p.exp  = EXP_W'(e);
    p.man  = frac_r[MAN_W-1:0];
    if (a.exp == 0 || b.exp == 0 || e < 1) p = FP_ZERO;
    else if (e > (EXP_W+3)'(EMAX))                     p = '{sign: a.sign ^ b.sign, exp: '1, man: '1};
  end

endmodule
