// fp18_add - 18-bit floating-point adder/subtractor (the "A" cells of the
// addition stage).
//
// Combinational; computes a + b when sub = 0 and a - b when sub = 1.
// The operand of larger magnitude is chosen as x, the other (y) is shifted
// right by the exponent difference into a significand carrying three extra
// bits (guard, round, sticky), with all bits shifted past them ORed into the
// sticky bit. The significands are then added or subtracted, the result is
// normalised (one place right after a carry, or left by its count of leading
// zeros after a cancellation), and rounded to nearest, ties to even. An exact
// zero result is +0; an exponent below 1 flushes to +0 and one above 63
// saturates to the largest magnitude (format in fp18_pkg).
//
// The paper names a floating-point adder/subtractor and the reference it
// follows but gives no internals; this is a plain correctly rounded adder.
//
// norm[SW-1] is the normalised hidden one and is never read (lint notes it).
//
// Ports: a, b (fp18 operands), sub (1: subtract b), s (fp18 result).
// No clock; zero latency.
module fp18_add
  import fp18_pkg::*;
(
  input  fp18_t a,
  input  fp18_t b,
  input  logic  sub,
  output fp18_t s
);

  localparam int unsigned SW = MAN_W + 4;  // hidden one, fraction, G, R, S

  fp18_t           bb, x, y;
  logic [SW-1:0]   mx, my, my_sh;
  logic [SW:0]     sum;
  logic [SW-1:0]   norm;
  logic [MAN_W:0]  frac_r;
  logic            eff_sub, stk, guard, sticky, rnd;
  logic [EXP_W-1:0]      d;           // x.exp - y.exp, never negative
  logic signed [EXP_W+2:0] e;         // result exponent before range check
  logic [3:0]            lz;          // leading zeros of the sum

  always_comb begin
    bb      = b;
    bb.sign = b.sign ^ sub;

    // x gets the larger magnitude
    if ({a.exp, a.man} >= {bb.exp, bb.man}) begin x = a;  y = bb; end
    else                                    begin x = bb; y = a;  end

    mx = {1'b1, x.man, 3'b000};
    my = {1'b1, y.man, 3'b000};
    d  = x.exp - y.exp;

    // align y, collecting shifted-out bits into the sticky bit
    if (d >= EXP_W'(SW)) begin
      my_sh = '0;
      stk   = 1'b1;
    end else begin
      my_sh = my >> d;
      stk   = |(my & ((SW'(1) << d) - SW'(1)));
    end
    my_sh[0] = my_sh[0] | stk;

    eff_sub = x.sign ^ y.sign;
    sum     = eff_sub ? ({1'b0, mx} - {1'b0, my_sh}) : ({1'b0, mx} + {1'b0, my_sh});

    // normalise
    e  = $signed({3'b000, x.exp});
    lz = '0;
    for (int i = 0; i < int'(SW); i++)      // priority encoder: highest one wins
      if (sum[i]) lz = 4'(int'(SW) - 1 - i);
    if (sum[SW]) begin
      norm = {sum[SW:2], sum[1] | sum[0]};
      e    = e + 1;
    end else begin
      norm = sum[SW-1:0] << lz;
      e    = e - $signed({5'b00000, lz});
    end

    // round to nearest even
    guard  = norm[2];
    sticky = norm[1] | norm[0];
    rnd    = guard & (sticky | norm[3]);
    frac_r = {1'b0, norm[SW-2:3]} + {{MAN_W{1'b0}}, rnd};
    if (frac_r[MAN_W]) e = e + 1;

    s.sign = x.sign;
    s.exp  = EXP_W'(e);
    s.man  = frac_r[MAN_W-1:0];

    if (y.exp == 0) begin
      s = (x.exp == 0) ? FP_ZERO : x;     // x +/- 0
    end else if (x.exp == 0) begin
      s = y;                               // unreachable: |x| >= |y|
    end else if (sum == '0 || e < 1) begin
      s = FP_ZERO;
    end else if (e > (EXP_W+3)'(EMAX)) begin
      s = '{sign: x.sign, exp: '1, man: '1};
    end
  end

endmodule
