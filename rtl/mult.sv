// mult -- implication multiplier.
//
// Multiplies a rule's signed singleton by its unsigned firing strength
// (product implication).  The strength is zero-extended by one bit before a
// signed multiply, so the full-precision result is XS_W + XU_W + 1 bits
// (12 + 8 + 1 = 21 by default).  Combinational.
module mult #(
  parameter int XS_W = dflc_pkg::DEF_SING_W,
  parameter int XU_W = dflc_pkg::DEF_ALPHA_W
) (
  input  logic signed [XS_W-1:0]      x_signed,
  input  logic        [XU_W-1:0]      x_unsigned,
  output logic signed [XS_W+XU_W:0]   y
);
  assign y = x_signed * $signed({1'b0, x_unsigned});
endmodule
