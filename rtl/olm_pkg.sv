// olm_pkg: types and width rules shared by the online (most-significant-digit-first)
// multiplier RTL.
//
// Digits are radix-2 signed digits in {-1,0,1}, carried as a pair of bits
// {plus, minus} whose difference is the digit value: 10 = +1, 01 = -1, 00 = 0.
// The code 11 never occurs on a well-formed stream; every consumer treats it as 0.
//
// Fixed-point conventions (all two's complement):
//   * operand registers (x[j], y[j]) hold 2 integer bits and up to N fraction bits;
//   * residual vectors (v, ws, wc) hold 2 integer bits and up to N+3 fraction bits.
// Narrower quantities are kept most-significant-bit aligned in these containers and the
// unused low bits are constant zero.
//
// ss_width() is the working-precision profile of the reduced-precision serial-serial
// multiplier: the number of fraction bits of v[j] kept in iteration j. It grows by one
// bit per iteration (j+7) until it reaches p+3, from iteration p-3 on it drops by three
// bits per iteration (the three least-significant slices hit by the truncation error are
// not built), and in the last delta iterations it drops by one bit per iteration (the
// residual is only shifted). For n=16, p=13 this gives 4,5,...,16,16,13,10,9,8,7, the
// widths of the worked example of the design.
package olm_pkg;

  typedef struct packed {
    logic p;  // plus bit
    logic m;  // minus bit
  } sd_t;


  function automatic logic sd_is_neg(sd_t d);
    return d.m & ~d.p;
  endfunction

  function automatic logic sd_is_pos(sd_t d);
    return d.p & ~d.m;
  endfunction

  function automatic logic sd_is_nz(sd_t d);
    return d.p ^ d.m;
  endfunction

  // p = ceil((2n + delta + t) / 3), delta = 3, t = 2
  function automatic int ss_p_default(int n);
    return (2 * n + 3 + 2 + 2) / 3;
  endfunction

  // fraction bits of v[j] in the reduced-precision serial-serial multiplier
  function automatic int ss_width(int j, int n, int p);
    int jj;
    int w;
    jj = (j <= n - 4) ? j : n - 4;  // last input iteration
    w = jj + 7;
    if (jj >= p - 3 && (p + 3 - 3 * (jj - (p - 3))) < w) w = p + 3 - 3 * (jj - (p - 3));
    if (j > n - 4) w = w - (j - (n - 4));
    return w;
  endfunction

  function automatic int imin(int a, int b);
    return (a < b) ? a : b;
  endfunction

endpackage
