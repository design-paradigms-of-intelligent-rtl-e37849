// int_uns -- unsigned accumulator (denominator of the weighted average).
//
// Sums the firing strengths of the rules of one input set, restarting with
// x when `clear` is high.  Behaves like int_sig, unsigned: 8-bit strengths,
// 16 rules, 12-bit sum by default.  One cycle latency.
module int_uns #(
  parameter int IN_W  = 8,
  parameter int OUT_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [IN_W-1:0]  x,
  output logic [OUT_W-1:0] y
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     y <= '0;
    else if (clear) y <= OUT_W'(x);
    else            y <= y + OUT_W'(x);
  end
endmodule
