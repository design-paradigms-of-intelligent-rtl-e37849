// dflc_ref_pkg -- reference model of the fuzzy controller for the
// testbenches.  It evaluates the controller the long way: every rule of the
// complete rule base (N_MF^N_IN of them), with the degree of every MF of
// every input computed directly from the MF edges of dflc_pkg, the firing
// strength as MIN (or normalised PROD) and the weighted average truncated
// toward zero.  It shares only the knowledge base (MF edges and singleton
// values) with the design, not its active-rule machinery.
package dflc_ref_pkg;
  import dflc_pkg::*;

  // degree of MF j of input k at x
  function automatic int mu(input int n_mf, input int in_w, input int k, input int j, input int x);
    int f;
    // falling edge: overlap region j, between MF j and MF j+1
    if (j <= n_mf - 2 && x > mf_left(n_mf, in_w, k, j)) begin
      if (x >= mf_right(n_mf, in_w, k, j)) return 0;
      f = ((x - mf_left(n_mf, in_w, k, j)) * mf_slope(n_mf, in_w, k, j)) >>> SLOPE_FRAC;
      return (f >= 255) ? 0 : 255 - f;
    end
    // rising edge: overlap region j-1, between MF j-1 and MF j
    if (j >= 1 && x < mf_right(n_mf, in_w, k, j - 1)) begin
      if (x <= mf_left(n_mf, in_w, k, j - 1)) return 0;
      f = ((x - mf_left(n_mf, in_w, k, j - 1)) * mf_slope(n_mf, in_w, k, j - 1)) >>> SLOPE_FRAC;
      return (f >= 255) ? 255 : f;
    end
    return 255;   // plateau
  endfunction

  typedef int ivec_t [];

  // full-rule-base inference; use_prod selects the PROD connective
  function automatic int infer(input int n_in, input int n_mf, input int in_w,
                               input ivec_t x, input bit use_prod,
                               output int num, output int den);
    int nr, rest, w, d, m;
    nr = n_rules(n_mf, n_in);
    num = 0; den = 0;
    for (int i = 0; i < nr; i++) begin
      rest = i;
      w = 255;
      for (int k = 0; k < n_in; k++) begin
        d = rest % n_mf;
        rest = rest / n_mf;
        m = mu(n_mf, in_w, k, d, x[k]);
        if (k == 0) w = m;
        else if (use_prod) w = (w * m) >> 8;
        else if (m < w) w = m;
      end
      num += w * singleton(n_mf, n_in, i);
      den += w;
    end
    if (den == 0) return 0;
    return num / den;   // SystemVerilog integer division truncates toward zero
  endfunction
endpackage
