// fp18_pkg - number format and constants shared by the FLANN compensator.
//
// All datapath values are 18-bit floating-point words. The 18-bit width is the
// published one; the split of the word is this design's own choice, since no
// field layout is given for it:
//   [17]    sign
//   [16:11] biased exponent, 6 bits, bias 31
//   [10:0]  fraction, 11 bits, hidden leading one
// An exponent field of 0 means zero (no subnormals, only +0 is produced).
// There is no infinity or NaN: results that overflow saturate to the largest
// magnitude, results that underflow flush to +0. Rounding is to nearest, ties
// to even.
//
// The package also holds the default look-up points: the 13 demodulated LVDT
// voltages of the measured characteristic (-30 mm .. +30 mm in 5 mm steps),
// and the order of the trigonometric basis functions:
//   k = 0            : v
//   k odd  (1,3,..)  : sin(((k+1)/2) * pi * v)
//   k even (2,4,..)  : cos((k/2) * pi * v)
// so 51 basis values are v, sin/cos(pi v) .. sin/cos(25 pi v).
//
// real2fp/fp2real/basis are constant functions: the RTL calls them only at
// elaboration to build its tables; testbenches call them at run time.
package fp18_pkg;

  localparam int unsigned EXP_W = 6;
  localparam int unsigned MAN_W = 11;
  localparam int          BIAS  = 31;
  localparam int          EMAX  = (1 << EXP_W) - 1;

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } fp18_t;

  localparam fp18_t FP_ZERO = '0;

  // Default FLANN size: five expansion sub-blocks, four of 10 outputs and
  // the last of 11, for 51 functional expansions.
  localparam int unsigned NSUB_DEF  = 5;
  localparam int unsigned SUBN_DEF  = 10;

  // Look-up points: the measured LVDT output voltages (V).
  localparam int unsigned NPTS_DEF = 13;
  localparam real LVDT_V [NPTS_DEF] = '{
    -5.185, -5.017, -4.717, -4.039, -2.896, -1.494, 0.001,
     1.462,  1.810,  3.962,  4.799,  5.225,  5.276};
  // Displacement (mm) at which each voltage was measured.
  localparam real LVDT_X [NPTS_DEF] = '{
    -30.0, -25.0, -20.0, -15.0, -10.0, -5.0, 0.0,
      5.0,  10.0,  15.0,  20.0,  25.0, 30.0};

  localparam real PI = 3.14159265358979323846;

  // Basis function k of the trigonometric expansion, evaluated at v.
  function automatic real basis(int k, real v);
    int m;
    if (k == 0) return v;
    m = (k + 1) / 2;
    if (k % 2 == 1) return $sin(m * PI * v);
    return $cos(m * PI * v);
  endfunction

  // Round a real number to the nearest fp18 word (ties to even).
  function automatic fp18_t real2fp(real r);
    fp18_t f;
    real   a, m;
    int    e, be;
    longint fl;
    if (r == 0.0) return FP_ZERO;
    f.sign = (r < 0.0);
    a = f.sign ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a <  1.0) begin a = a * 2.0; e--; end
    m  = a * real'(1 << MAN_W);          // in [2048, 4096)
    fl = longint'($rtoi(m));
    if ((m - real'(fl) > 0.5) || ((m - real'(fl) == 0.5) && fl[0])) fl++;
    if (fl == (1 << (MAN_W + 1))) begin fl = 1 << MAN_W; e++; end
    be = e + BIAS;
    if (be < 1) return FP_ZERO;
    if (be > EMAX) return '{sign: f.sign, exp: '1, man: '1};
    f.exp = EXP_W'(be);
    f.man = MAN_W'(fl);
    return f;
  endfunction

  // Value of an fp18 word.
  function automatic real fp2real(fp18_t f);
    real r;
    if (f.exp == 0) return 0.0;
    r = 1.0 + real'(f.man) / real'(1 << MAN_W);
    for (int i = 0; i < int'(f.exp) - BIAS; i++) r = r * 2.0;
    for (int i = 0; i < BIAS - int'(f.exp); i++) r = r / 2.0;
    return f.sign ? -r : r;
  endfunction

endpackage
