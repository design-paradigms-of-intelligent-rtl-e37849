// div_array_tb -- divides random signed 25-bit dividends by random 12-bit
// divisors (plus the extremes and the divisor 0) and checks the quotient,
// truncated toward zero and cut to 12 bits, one clock after the operands.
module div_array_tb;
  timeunit 1ns; timeprecision 1ps;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic clk = 0, rst_n = 0;
  logic signed [24:0] x;
  logic [11:0] y;
  logic signed [11:0] q;
  div_array dut (.clk, .rst_n, .X(x), .Y(y), .op(q));
  always #5 clk = ~clk;
  initial begin
    x = '0; y = 12'd1;
    #12 rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      int e, xv, yv;
      @(negedge clk);
      case (i % 5)
        0: begin yv = $urandom_range(1, 4095); xv = yv * ($urandom_range(0, 4095) - 2048)
                 + $urandom_range(0, yv - 1) * ((i & 8) != 0 ? 1 : -1); end
        1: begin yv = $urandom_range(128, 4080); xv = $urandom_range(0, 2 * 522240 * 16) - 522240 * 16; end
        2: begin yv = (i % 3 == 0) ? 0 : 1; xv = (i & 16) != 0 ? -16777216 : 16777215; end
        default: begin yv = $urandom_range(1, 4095); xv = $urandom_range(0, 33554431) - 16777216; end
      endcase
      x = 25'(xv); y = 12'(yv);
      e = (yv == 0) ? 0 : int'(12'(xv / yv));
      e = (e >= 2048) ? e - 4096 : e;
      @(posedge clk); #1;
      `CHECK(int'(q) == e, ("%0d / %0d = %0d expected %0d", xv, yv, q, e))
    end
    `TB_FINISH
  end
  initial begin #200us; failures++; `TB_FINISH end
endmodule
