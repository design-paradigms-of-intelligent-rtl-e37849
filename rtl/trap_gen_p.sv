// trap_gen_p -- arithmetic trapezoidal / triangular MF generator.
//
// For every input it evaluates the degree of truth of the first of the two
// active MFs from the region parameters {L, R, slope}:
//     x <= L      : 255
//     x >= R      : 0
//     otherwise   : 255 - ((x - L) * slope >> SLOPE_FRAC), clamped at 0.
// The degree of the second active MF is the complement (255 - alpha) and is
// formed later by rule_sel_p.  alpha_val packs one 8-bit degree per input,
// input 0 in the low byte.  Combinational.
module trap_gen_p
  import dflc_pkg::*;
#(
  parameter int N_IN    = dflc_pkg::DEF_N_IN,
  parameter int IN_W    = dflc_pkg::DEF_IN_W,
  parameter int ALPHA_W = dflc_pkg::DEF_ALPHA_W,
  localparam int PW     = 2 * IN_W + SLOPE_W
) (
  input  logic [N_IN-1:0][IN_W-1:0]    ip_data,
  input  logic [N_IN-1:0][PW-1:0]      mf_param,
  output logic [N_IN-1:0][ALPHA_W-1:0] alpha_val
);
  localparam logic [ALPHA_W-1:0] AMAX = '1;

  always_comb begin
    for (int k = 0; k < N_IN; k++) begin
      logic [IN_W-1:0]         l, r;
      logic [SLOPE_W-1:0]      s;
      logic [IN_W+SLOPE_W-1:0] prod;
      logic [IN_W+SLOPE_W-SLOPE_FRAC-1:0] fall;
      {l, r, s} = mf_param[k];
      prod = (IN_W+SLOPE_W)'(ip_data[k] - l) * s;
      fall = prod[IN_W+SLOPE_W-1:SLOPE_FRAC];
      if (ip_data[k] <= l)
        alpha_val[k] = AMAX;
      else if (ip_data[k] >= r || fall >= (IN_W+SLOPE_W-SLOPE_FRAC)'(AMAX))
        alpha_val[k] = '0;
      else
        alpha_val[k] = AMAX - fall[ALPHA_W-1:0];
    end
  end
endmodule
