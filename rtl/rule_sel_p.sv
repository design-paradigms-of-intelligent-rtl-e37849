// rule_sel_p -- per-rule degree selection.
//
// For the rule in flight, sel[k] says whether input k uses the first (0) or
// the second (1) of its two active MFs.  The first MF's degree is alpha_k;
// the second's is its complement 255 - alpha_k, because neighbouring MFs of
// this design add up to full truth in their overlap.  Combinational.
module rule_sel_p #(
  parameter int N_IN    = dflc_pkg::DEF_N_IN,
  parameter int ALPHA_W = dflc_pkg::DEF_ALPHA_W
) (
  input  logic [N_IN-1:0]              sel,
  input  logic [N_IN-1:0][ALPHA_W-1:0] ip_data,
  output logic [N_IN-1:0][ALPHA_W-1:0] op_data
);
  always_comb begin
    for (int k = 0; k < N_IN; k++) op_data[k] = sel[k] ? ~ip_data[k] : ip_data[k];
  end
endmodule
