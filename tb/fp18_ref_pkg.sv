// fp18_ref_pkg - reference arithmetic for the testbenches.
//
// Each operation is done on the exact real values of the fp18 operands (in
// double precision, where products and sums of 12-bit significands are exact
// or far finer than one fp18 step) and then rounded once to fp18. A correctly
// rounded hardware unit must reproduce these results bit for bit.
// sum_tree mirrors the adder-tree order of the design: a list of n words is
// split into its first n/2 and its last n - n/2 words, each half is summed the
// same way, and the two halves are added.
package fp18_ref_pkg;
  import fp18_pkg::*;

  function automatic fp18_t ref_mul(fp18_t a, fp18_t b);
    if (a.exp == 0 || b.exp == 0) return FP_ZERO;
    return real2fp(fp2real(a) * fp2real(b));
  endfunction

  function automatic fp18_t ref_add(fp18_t a, fp18_t b, bit sub);
    real rb;
    rb = sub ? -fp2real(b) : fp2real(b);
    return real2fp(fp2real(a) + rb);
  endfunction

  // Random fp18 word with its exponent field in [elo, ehi].
  function automatic fp18_t rand_fp(int elo, int ehi);
    fp18_t f;
    f.sign = 1'($urandom);
    f.exp  = EXP_W'(elo + int'($urandom % (ehi - elo + 1)));
    f.man  = MAN_W'($urandom);
    return f;
  endfunction

  // Sum of v[lo .. lo+n-1] in the design's tree order; counts the additions
  // whose operands have opposite signs (effective subtractions).
  function automatic fp18_t sum_tree(const ref fp18_t v[], input int lo, input int n,
                                     ref int n_effsub);
    fp18_t l, r;
    if (n == 1) return v[lo];
    l = sum_tree(v, lo, n / 2, n_effsub);
    r = sum_tree(v, lo + n / 2, n - n / 2, n_effsub);
    if (l.exp != 0 && r.exp != 0 && l.sign != r.sign) n_effsub++;
    return ref_add(l, r, 1'b0);
  endfunction
endpackage
