// kan_pkg: constants and elaboration-time functions shared by the KAN
// systolic-array accelerator.
//
// The default sizes are those of the accelerator configuration evaluated in
// the paper: a 16x16 weight-stationary array, grid size G = 5, cubic
// B-splines (P = 3), 8-bit coefficients, 2^8 table entries per knot interval
// and 3-bit B-spline table values.
//
// The functions below compute, in exact integer arithmetic, the contents of
// the quantized B-spline half-table (see bspline_lut). The canonical uniform
// B-spline of degree P on knots 0,1,...,P+1 is
//     B(x) = 1/P! * sum_{j=0}^{P+1} (-1)^j * C(P+1,j) * max(0, x-j)^P
// The table samples it at the middle of each of the 2^K sub-steps of a knot
// interval, x_u = (u + 1/2) / 2^K, and stores
//     code(u) = round( B(x_u) / B((P+1)/2) * (2^B_BITS - 1) )
// i.e. min-max uniform quantization of [0, peak] to B_BITS unsigned bits
// (zero point 0). Working with the numerator X = x * 2^(K+1) keeps every
// quantity an integer; the common factor 1/(P! 2^((K+1)P)) cancels in the
// ratio. The 64-bit arithmetic holds for P <= 3 with K_BITS <= 10 and
// B_BITS <= 16 (largest product about 2^58).
package kan_pkg;

  // Paper's main configuration.
  parameter int unsigned G_DEF        = 5;   // grid intervals
  parameter int unsigned P_DEF        = 3;   // spline degree
  parameter int unsigned K_BITS_DEF   = 8;   // table entries per knot interval = 2^K
  parameter int unsigned B_BITS_DEF   = 3;   // B-spline table value width
  parameter int unsigned W_BITS_DEF   = 8;   // coefficient width
  parameter int unsigned ROWS_DEF     = 16;  // array rows    (input neurons per tile)
  parameter int unsigned COLS_DEF     = 16;  // array columns (output neurons per tile)
  // This design's own choices.
  parameter int unsigned ACC_BITS_DEF  = 32;   // partial sum / accumulator width
  parameter int unsigned ACC_DEPTH_DEF = 1024; // accumulator buffer entries

  // Number of knot intervals of the stored half-support: ceil((P+1)/2).
  function automatic int unsigned half_intervals(int unsigned p);
    return (p + 2) / 2;
  endfunction

  // Width of the knot-interval index of an activation code. The code covers
  // the extended grid [t_0, t_{G+2P}), i.e. G+2P intervals.
  function automatic int unsigned idx_bits(int unsigned g, int unsigned p);
    return $clog2(g + 2 * p);
  endfunction

  function automatic longint binom(longint n, longint k);
    longint r;
    r = 1;
    for (longint i = 1; i <= k; i++) r = r * (n - k + i) / i;
    return r;
  endfunction

  // (P! * 2^((K+1)P)) * B(X / 2^(K+1))
  function automatic longint bspline_num(longint x, longint p, longint k_bits);
    longint acc, d, pw;
    longint step;
    step = longint'(1) << (k_bits + 1);
    acc  = 0;
    for (longint j = 0; j <= p + 1; j++) begin
      d = x - j * step;
      if (d > 0) begin
        pw = 1;
        for (longint e = 0; e < p; e++) pw = pw * d;
        if (j % 2 == 0) acc = acc + binom(p + 1, j) * pw;
        else            acc = acc - binom(p + 1, j) * pw;
      end
    end
    return acc;
  endfunction

  // Quantized table value at table address u (midpoint sampling).
  function automatic int unsigned bspline_code(longint u, longint p,
                                               longint k_bits, longint b_bits);
    longint n, nmax, qmax;
    n    = bspline_num(2 * u + 1, p, k_bits);
    nmax = bspline_num((p + 1) << k_bits, p, k_bits);
    qmax = (longint'(1) << b_bits) - 1;
    return int'((2 * n * qmax + nmax) / (2 * nmax));
  endfunction

endpackage
