// andor_meth_p -- antecedent connective.
//
// Combines the degrees of the N_IN antecedents of a rule into its firing
// strength: the minimum (AND_MIN, the default, Goedel t-norm) or the product
// (AND_PROD), where each partial product is renormalised to ALPHA_W bits by
// dropping its low ALPHA_W bits.  Combinational.
module andor_meth_p
  import dflc_pkg::*;
#(
  parameter int          N_IN       = dflc_pkg::DEF_N_IN,
  parameter int          ALPHA_W    = dflc_pkg::DEF_ALPHA_W,
  parameter and_method_e AND_METHOD = AND_MIN
) (
  input  logic [N_IN-1:0][ALPHA_W-1:0] ip_data,
  output logic [ALPHA_W-1:0]           op_data
);
  always_comb begin
    logic [2*ALPHA_W-1:0] p;
    op_data = ip_data[0];
    for (int k = 1; k < N_IN; k++) begin
      if (AND_METHOD == AND_MIN) begin
        if (ip_data[k] < op_data) op_data = ip_data[k];
      end else begin
        p = op_data * ip_data[k];
        op_data = p[2*ALPHA_W-1:ALPHA_W];
      end
    end
  end
endmodule
