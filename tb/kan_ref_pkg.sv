// kan_ref_pkg: reference models for the testbenches, written independently
// of the RTL. B-spline values come from the Cox-de Boor recursion evaluated
// in floating point on the integer knots 0..P+1 (bottom-up, degree by
// degree), then quantized with min-max scaling to [0, peak] and round to
// nearest. The RTL instead uses an exact integer closed form.
package kan_ref_pkg;

  // Canonical uniform B-spline of degree p on knots 0..p+1, at x.
  function automatic real bspline(real x, int p);
    real b [0:15];
    for (int i = 0; i <= p; i++) b[i] = (x >= i && x < i + 1) ? 1.0 : 0.0;
    for (int d = 1; d <= p; d++)
      for (int i = 0; i <= p - d; i++)
        b[i] = (x - i) / d * b[i] + (i + d + 1 - x) / d * b[i+1];
    return b[0];
  endfunction

  // Quantized table value of B(s + (frac + 1/2) / 2^k).
  function automatic int bcode(int s, int frac, int p, int k, int hb);
    real x, v, peak;
    x    = s + (frac + 0.5) / (2.0 ** k);
    v    = bspline(x, p);
    peak = bspline((p + 1) / 2.0, p);
    return $rtoi(v / peak * ((2.0 ** hb) - 1) + 0.5);
  endfunction

  // Contribution of one connection: sum over the non-zero basis functions
  // of activation code {j, frac}, with coefficients w[0..g+p-1].
  function automatic longint conn(int j, int frac, int w [], int g, int p, int k, int hb);
    longint acc;
    acc = 0;
    if (j >= g + 2 * p) return 0;
    for (int s = 0; s <= p; s++) begin
      int bi;
      bi = j - s;
      if (bi >= 0 && bi < g + p) acc += longint'(w[bi]) * bcode(s, frac, p, k, hb);
    end
    return acc;
  endfunction

endpackage
