// kan_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL helpers.
//
//  * rnd_sat: drops sh fractional bits by exact integer division with
//    round-half-to-even, then saturates to a signed tw-bit code.
//  * bval/bder: B-spline basis values and derivatives of a cell from the
//    Cox-de Boor recursion (iterative, in real arithmetic), converted to codes
//    with an explicit tie test; the RTL uses the truncated-power formula in
//    integers instead.
//  * grid_k/grid_u/grid_clamp: cell and bin of an input by plain integer
//    division; the RTL uses a reciprocal multiply.
package kan_ref_pkg;

  typedef logic signed [127:0] big_t;

  function automatic big_t rnd_sat(big_t v, int sh, int tw);
    big_t d, q, r, lim;
    d = big_t'(1) << sh;
    q = v / d;
    r = v % d;
    if (r < 0) begin
      q = q - 1;
      r = r + d;
    end
    if (2 * r > d || (2 * r == d && q[0])) q = q + 1;
    lim = (big_t'(1) << (tw - 1));
    if (q > lim - 1) q = lim - 1;
    if (q < -lim)    q = -lim;
    return q;
  endfunction

  // Cox-de Boor for integer knots 0,1,2,...: N_{i,d}(x), i = 0..d_max.
  function automatic real cdb(int i, int d, real x);
    real n [0:15];
    for (int j = 0; j < 16; j++) n[j] = (x >= j && x < j + 1) ? 1.0 : 0.0;
    for (int e = 1; e <= d; e++)
      for (int j = 0; j + e < 15; j++)
        n[j] = (x - j) / e * n[j] + (j + e + 1 - x) / e * n[j + 1];
    return n[i];
  endfunction

  function automatic real bval(int s, int r, real xi);
    return cdb(r, s, xi + s);
  endfunction

  function automatic real bder(int s, int r, real xi);
    return cdb(r, s - 1, xi + s) - cdb(r + 1, s - 1, xi + s);
  endfunction

  function automatic longint real_code(real v, int wf, int ww);
    real    y, fl, fr;
    longint c, lim;
    y  = v * (2.0 ** wf);
    fl = $floor(y);
    fr = y - fl;
    c  = longint'(fl);
    if (fr > 0.5 + 1e-9) c = c + 1;
    else if (fr > 0.5 - 1e-9 && (c % 2 != 0)) c = c + 1;
    lim = (longint'(1) << (ww - 1));
    if (c > lim - 1) c = lim - 1;
    if (c < -lim) c = -lim;
    return c;
  endfunction

  function automatic real xi_of(int u, int f);
    return (u + 0.5) / (2.0 ** f);
  endfunction

  function automatic longint lut_b(int s, int f, int r, int u, int wf, int ww);
    return real_code(bval(s, r, xi_of(u, f)), wf, ww);
  endfunction

  // slope per input unit: dB/dxi * G / (span * 2^-xf)
  function automatic longint lut_db(int s, int f, int r, int u, int g, int xf,
                                    longint span, int wf, int ww);
    return real_code(bder(s, r, xi_of(u, f)) * g * (2.0 ** xf) / span, wf, ww);
  endfunction

  function automatic longint grid_t(longint x, longint lo, longint hi, int g, int f);
    longint a;
    a = x - lo;
    if (a < 0) return 0;
    if (a >= hi - lo) return (longint'(g) << f) - 1;
    return (a * g * (longint'(1) << f)) / (hi - lo);
  endfunction

  function automatic int grid_k(longint x, longint lo, longint hi, int g, int f);
    return int'(grid_t(x, lo, hi, g, f) >> f);
  endfunction

  function automatic int grid_u(longint x, longint lo, longint hi, int g, int f);
    return int'(grid_t(x, lo, hi, g, f) % (longint'(1) << f));
  endfunction

  function automatic bit grid_clamp(longint x, longint lo, longint hi);
    return (x < lo) || (x >= hi);
  endfunction

endpackage
