// kan_pkg: shared fixed-point helpers and B-spline table arithmetic for the
// online-learning KAN kernel.
//
// Fixed-point numbers are signed two's-complement codes with a given number of
// fractional bits (a <W,I> format has W-I fractional bits). Every narrowing
// assignment in the datapath goes through fx_round_sat, which rounds to
// nearest with ties to even (convergent rounding) and saturates to the target
// width, the behaviour of an ap_fixed type declared with convergent rounding
// and saturation. Intermediate products and sums are carried exactly in a
// 128-bit signed word before that single rounding step.
//
// The B-spline helpers evaluate the uniform (cardinal) B-spline of order S in
// exact integer arithmetic from the truncated-power formula
//   M_S(x) = 1/S! * sum_{j=0}^{S+1} (-1)^j C(S+1,j) (x-j)_+^S ,
// so the basis tables in bspline_lut are elaboration-time constants with no
// external data file. They run only at elaboration.
package kan_pkg;

  localparam int unsigned ACC_W = 128;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Round a code with vf fractional bits to tf fractional bits (ties to even)
  // and saturate it to a signed tw-bit range. Returns the sign-extended code.
  function automatic acc_t fx_round_sat(acc_t v, int vf, int tf, int tw);
    acc_t q, rem, half, maxv, minv;
    int   sh;
    sh = vf - tf;
    if (sh <= 0) begin
      q = v <<< (-sh);
    end else begin
      q    = v >>> sh;
      rem  = v - (q <<< sh);
      half = acc_t'(1) <<< (sh - 1);
      if (rem > half || (rem == half && q[0])) q = q + acc_t'(1);
    end
    maxv = (acc_t'(1) <<< (tw - 1)) - acc_t'(1);
    minv = -(acc_t'(1) <<< (tw - 1));
    if (q > maxv) q = maxv;
    else if (q < minv) q = minv;
    return q;
  endfunction

  // True when the rounded value of v does not fit a signed tw-bit code.
  function automatic logic fx_overflows(acc_t v, int vf, int tf, int tw);
    acc_t wide;
    wide = fx_round_sat(v, vf, tf, ACC_W - 2);
    return wide != fx_round_sat(v, vf, tf, tw);
  endfunction

  function automatic longint binom(longint n, longint k);
    longint c;
    c = 1;
    for (longint i = 1; i <= k; i++) c = c * (n - k + i) / i;
    return c;
  endfunction

  function automatic longint ipow(longint b, longint e);
    longint p;
    p = 1;
    for (longint i = 0; i < e; i++) p = p * b;
    return p;
  endfunction

  function automatic longint fact(longint n);
    longint p;
    p = 1;
    for (longint i = 2; i <= n; i++) p = p * i;
    return p;
  endfunction

  // Numerator of B_r (deriv=0) or dB_r/dxi (deriv=1) at the midpoint of LUT
  // bin u, xi = (2u+1)/2^(f+1). r=0 is the leftmost active basis of the cell.
  function automatic longint bspl_num(longint s, longint f, longint r, longint u, longint deriv);
    longint du, n, y, sum;
    du  = longint'(1) <<< (f + 1);
    n   = 2 * u + 1;
    sum = 0;
    for (longint j = 0; j <= s + 1; j++) begin
      y = n + (s - r - j) * du;
      if (y > 0) begin
        if (j % 2 == 0) sum = sum + binom(s + 1, j) * ipow(y, s - deriv);
        else            sum = sum - binom(s + 1, j) * ipow(y, s - deriv);
      end
    end
    return sum;
  endfunction

  // Matching denominator: s! * du^s for values, (s-1)! * du^(s-1) for slopes.
  function automatic longint bspl_den(longint s, longint f, longint deriv);
    return fact(s - deriv) * ipow(longint'(1) <<< (f + 1), s - deriv);
  endfunction

  // num/den rounded to the nearest integer, ties to even (den > 0).
  function automatic longint div_round_even(longint num, longint den);
    longint q, rem;
    q   = num / den;
    rem = num - q * den;
    if (rem < 0) begin
      q   = q - 1;
      rem = rem + den;
    end
    if (2 * rem > den || (2 * rem == den && (q % 2 != 0))) q = q + 1;
    return q;
  endfunction

  // Table entry as a signed ww-bit code with wf fractional bits. The value is
  // scaled by scale_num/scale_den (1 for B, 1/H for dB/dx).
  function automatic longint lut_code(longint s, longint f, longint r, longint u, longint deriv,
                                      longint scale_num, longint scale_den,
                                      longint wf, longint ww);
    longint c, lim;
    c   = div_round_even(bspl_num(s, f, r, u, deriv) * scale_num * (longint'(1) <<< wf),
                         bspl_den(s, f, deriv) * scale_den);
    lim = (longint'(1) <<< (ww - 1)) - 1;
    if (c > lim) c = lim;
    if (c < -lim - 1) c = -lim - 1;
    return c;
  endfunction

endpackage
