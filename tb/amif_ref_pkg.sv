// amif_ref_pkg: reference model used by the testbenches. It recomputes the
// AMIF of a window from scratch, in floating point, straight from the
// definition
//   AMIF(l) = sum over cells v*log2(v/(vA*vB))
//           = sum_cells f(v) - sum_bins f(vA) - sum_bins f(vB),  f(c) = c*log2 c
// with histogram A over x[t-L-M+1 .. t-L], histogram B over the same range
// shifted by l and AB over the pairs (x[i], x[i+l]). It shares no code with
// the design, whose incremental fixed-point result must match within the
// rounding of its log2 table.
package amif_ref_pkg;

  function automatic real flog(input int c);
    if (c <= 0) return 0.0;
    return real'(c) * $ln(real'(c)) / $ln(2.0);
  endfunction

  // Level of a raw sample for offset lo and right shift sh, clamped to 0..n-1.
  function automatic int scale_bin(input int x, input int lo, input int sh, input int n);
    int d;
    d = x - lo;
    if (d < 0) return 0;
    d = d >>> sh;
    if (d > n - 1) return n - 1;
    return d;
  endfunction

  // AMIF(l) of the window ending with sample lv[t] (t = newest index).
  function automatic real amif_ref(const ref int lv[$], input int t, input int l,
                                   input int lmax, input int m, input int n);
    int ab[];
    int ha[];
    int hb[];
    bit seen[];
    real s;
    int first;
    ab   = new[n*n];
    seen = new[n*n];
    ha   = new[n];
    hb   = new[n];
    first = t - lmax - m + 1;
    for (int i = first; i < first + m; i++) begin
      ha[lv[i]]++;
      hb[lv[i+l]]++;
      ab[lv[i]*n + lv[i+l]]++;
    end
    s = 0.0;
    for (int i = first; i < first + m; i++) begin
      int c;
      c = lv[i]*n + lv[i+l];
      if (!seen[c]) begin
        seen[c] = 1'b1;
        s += flog(ab[c]);
      end
    end
    for (int k = 0; k < n; k++) s -= flog(ha[k]) + flog(hb[k]);
    return s;
  endfunction

  // First l in 1..lmax-1 with s[l-1] < s[l] (s[0] is lag 1); lmax if none.
  function automatic int first_min_real(const ref real s[], input int lmax);
    for (int l = 1; l < lmax; l++) if (s[l-1] < s[l]) return l;
    return lmax;
  endfunction

  // Smallest gap between neighbouring values up to and including the
  // first-minimum decision: below the model tolerance the decision is a tie.
  function automatic real first_min_margin(const ref real s[], input int lmax);
    real mg;
    mg = 1.0e30;
    for (int l = 1; l < lmax; l++) begin
      real g;
      g = s[l] - s[l-1];
      if (g < 0) g = -g;
      if (g < mg) mg = g;
      if (s[l-1] < s[l]) break;
    end
    return mg;
  endfunction

endpackage
