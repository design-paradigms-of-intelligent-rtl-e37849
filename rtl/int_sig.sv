// int_sig -- signed accumulator (numerator of the weighted average).
//
// Sums the weighted singletons of the rules of one input set.  On a clock
// with `clear` high the accumulator restarts with x (first rule of a new
// set); otherwise x is added.  y is the register itself, so the complete sum
// of a set is on y during the cycle in which the next set's first product
// arrives with `clear`.  OUT_W = IN_W + log2(rules per set) avoids overflow
// (21 + 4 = 25 by default).  One cycle latency.
module int_sig #(
  parameter int IN_W  = 21,
  parameter int OUT_W = 25
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     y <= '0;
    else if (clear) y <= OUT_W'(x);
    else            y <= y + OUT_W'(x);
  end
endmodule
