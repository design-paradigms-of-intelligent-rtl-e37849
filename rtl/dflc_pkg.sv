// dflc_pkg -- shared sizes, types and the built-in knowledge base of the
// parameterized digital fuzzy logic controller (DFLC).
//
// The controller is a zero-order Takagi-Sugeno fuzzy inference engine: each
// input is covered by N_MF trapezoidal or triangular membership functions
// (MFs) of which at most two overlap at any point, every rule has a constant
// (singleton) consequent, the rule antecedents are joined by MIN, each
// singleton is weighted by its rule's firing strength (PROD implication) and
// the output is the weighted average of the singletons.
//
// The default sizes are the main configuration of the design: four 12-bit
// inputs, seven MFs per input with 8-bit degrees of truth, a rule base of
// 7^4 = 2401 singletons and one 12-bit output. Because two MFs overlap, only
// 2^4 = 16 rules can be active for an input set, and the core processes one
// active rule per clock.
//
// Membership functions.  The MFs of an input are described by the N_MF-1
// overlap regions between neighbouring MFs.  Region r spans [L_r, R_r]: below
// L_r, MF r is fully true (255); between L_r and R_r, MF r falls linearly to
// 0 while MF r+1 rises as its complement (the two degrees always add up to
// 255); above R_r, MF r+1 is fully true up to L_{r+1}.  Triangular MFs have
// R_r = L_{r+1}; trapezoidal ones leave a plateau between them.  The degree of
// MF r inside the region is 255 - ((x - L_r) * slope_r >> SLOPE_FRAC) with
// slope_r = floor(255 * 2^SLOPE_FRAC / (R_r - L_r)).
//
// Knowledge base of this release (the design's own choice, as a worked
// example; change mf_left/mf_right/singleton to load another controller):
//   * MF centres c_j = j * (2^IN_W - 1) / (N_MF - 1);
//   * inputs 0 and 1: triangles, L_r = c_r, R_r = c_{r+1};
//   * inputs 2 and more: trapezoids, L_r = c_r + d, R_r = c_{r+1} - d with
//     d = (c_1 - c_0) / 6;
//   * singleton of the rule with MF indices (d_0 .. d_{n-1}):
//       s = ((2*S - Smax) * 1980) / Smax + ((sum_k (2k+3)*d_k) mod 13) - 6,
//     S = sum_k w_k d_k, w = 5, 3, 2, 1, 1, ..., Smax = (N_MF-1) * sum_k w_k,
//     which stays inside -1986 .. +1986.
// The rule index of (d_0 .. d_{n-1}) is sum_k d_k * N_MF^k.
//
// Widths follow the block diagram of the original core: the singleton is a
// 12-bit signed number (the product with an 8-bit strength is 21 bits), the
// numerator accumulator is 25 bits and the denominator accumulator 12 bits.
package dflc_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int DEF_N_IN       = 4;    // inputs
  localparam int DEF_IN_W       = 12;   // input resolution
  localparam int DEF_N_MF       = 7;    // membership functions per input
  localparam int DEF_ALPHA_W    = 8;    // degree of truth resolution
  localparam int DEF_SING_W     = 12;   // singleton (consequent) resolution
  localparam int DEF_OUT_W      = 12;   // output resolution
  localparam int SLOPE_W    = 16;   // MF slope word
  localparam int SLOPE_FRAC = 12;   // fractional bits of the slope

  localparam int ALPHA_MAX  = (1 << DEF_ALPHA_W) - 1;

  // Antecedent connective (Eq. 2 of the design: min or product)
  typedef enum logic {AND_MIN = 1'b0, AND_PROD = 1'b1} and_method_e;
  // Divider implementation selected in the defuzzifier
  typedef enum logic {DIV_ARRAY = 1'b0, DIV_PPA = 1'b1} div_type_e;

  // ceil(log2(n)) with a minimum of 1
  function automatic int clog2m1(input int n);
    int r;
    r = 1;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  // n_mf ** n_in
  function automatic int n_rules(input int n_mf, input int n_in);
    int r;
    r = 1;
    for (int k = 0; k < n_in; k++) r = r * n_mf;
    return r;
  endfunction

  // ---------------------------------------------------- membership functions
  function automatic int mf_centre(input int n_mf, input int in_w, input int j);
    return (j * ((1 << in_w) - 1)) / (n_mf - 1);
  endfunction

  function automatic int mf_margin(input int n_mf, input int in_w, input int k);
    if (k < 2) return 0;
    return (mf_centre(n_mf, in_w, 1) - mf_centre(n_mf, in_w, 0)) / 6;
  endfunction

  // left edge of overlap region r of input k
  function automatic int mf_left(input int n_mf, input int in_w, input int k, input int r);
    return mf_centre(n_mf, in_w, r) + mf_margin(n_mf, in_w, k);
  endfunction

  // right edge of overlap region r of input k
  function automatic int mf_right(input int n_mf, input int in_w, input int k, input int r);
    return mf_centre(n_mf, in_w, r + 1) - mf_margin(n_mf, in_w, k);
  endfunction

  function automatic int mf_slope(input int n_mf, input int in_w, input int k, input int r);
    return (ALPHA_MAX << SLOPE_FRAC) / (mf_right(n_mf, in_w, k, r) - mf_left(n_mf, in_w, k, r));
  endfunction

  // ------------------------------------------------------------- rule base
  function automatic int singleton(input int n_mf, input int n_in, input int rule);
    int s, smax, wsum, nl, d, rest;
    s = 0; wsum = 0; nl = 0; rest = rule;
    for (int k = 0; k < n_in; k++) begin
      int w;
      w = (k == 0) ? 5 : (k == 1) ? 3 : (k == 2) ? 2 : 1;
      d = rest % n_mf;
      rest = rest / n_mf;
      s = s + w * d;
      wsum = wsum + w;
      nl = nl + (2 * k + 3) * d;
    end
    smax = (n_mf - 1) * wsum;
    return ((2 * s - smax) * 1980) / smax + (nl % 13) - 6;
  endfunction

  // --------------------------------------------------- pipeline depths
  // Depth of each component pipeline register (CPR) of the core, numbered
  // as in the block diagram.  The path synchronisation registers (PSR) and
  // CPR7 are derived from these so that all paths meet (see fpga_fc).
  typedef struct packed {
    logic [3:0] cpr1;   // after the address generator
    logic [3:0] cpr2;   // after the consequent mapper
    logic [3:0] cpr3;   // after the MF generator
    logic [3:0] cpr4;   // after the rule selector
    logic [3:0] cpr5;   // after the AND method
    logic [3:0] cpr6;   // after the multiplier
    logic [3:0] cpr8;   // after the signed accumulator
    logic [3:0] cpr9;   // after the divider
  } cpr_depths_t;

  localparam cpr_depths_t CPR_DEFAULT = '{cpr1: 4'd1, cpr2: 4'd1, cpr3: 4'd1, cpr4: 4'd1,
                                          cpr5: 4'd1, cpr6: 4'd1, cpr8: 4'd1, cpr9: 4'd1};

  // PSR3: select bits wait long enough for the MF generator's CPR3 (PSR1
  // keeps at least one register, which absorbs the ROM lookup)
  function automatic int psr3_depth(input cpr_depths_t d);
    int t;
    t = int'(d.cpr3) - int'(d.cpr1) - int'(d.cpr2);
    return (t > 1) ? t : 1;
  endfunction

  // clock (after the input-register edge) at which rule 0 meets the selector
  function automatic int sel_time(input cpr_depths_t d);
    return 1 + int'(d.cpr1) + int'(d.cpr2) + psr3_depth(d);
  endfunction

  // PSR1: inputs and regions wait so that CPR3 changes exactly at sel_time
  function automatic int psr1_depth(input cpr_depths_t d);
    return sel_time(d) - int'(d.cpr3);
  endfunction

  // PSR2: singleton and first-rule flag wait for the firing strength
  function automatic int psr2_depth(input cpr_depths_t d);
    return psr3_depth(d) + int'(d.cpr4) + int'(d.cpr5);
  endfunction

  // CPR7: the denominator sum waits for the numerator (one accumulator and
  // CPR6 behind it) and its CPR8
  function automatic int cpr7_depth(input cpr_depths_t d);
    return int'(d.cpr6) + int'(d.cpr8);
  endfunction

  // Clocks from the edge that loads an input set into the input register
  // to the edge that loads its result into the output register: the rule
  // clocks plus the pipeline (2^4 + 11 = 27 by default).  The divider adds
  // one internal stage and the output register one more.
  function automatic int core_latency(input int n_in, input cpr_depths_t d);
    return (1 << n_in) + sel_time(d) + int'(d.cpr4) + int'(d.cpr5) + int'(d.cpr6)
           + int'(d.cpr8) + int'(d.cpr9) + 2;
  endfunction

endpackage
