// int_uns_tb -- accumulates random 8-bit strengths in groups of 16 and
// checks each complete sum, including the all-255 maximum of 4080.
module int_uns_tb;
  timeunit 1ns; timeprecision 1ps;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, clear = 0;
  logic [7:0] x;
  logic [11:0] y;
  int_uns dut (.clk, .rst_n, .clear, .x, .y);
  always #5 clk = ~clk;
  initial begin
    int sum;
    x = '0; sum = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 16 * 50; i++) begin
      @(negedge clk);
      clear = (i % 16 == 0);
      if (clear && i > 0) `CHECK(int'(y) == sum, ("sum %0d expected %0d", y, sum))
      x = (i < 16) ? 8'd255 : 8'($urandom);
      sum = clear ? int'(x) : sum + int'(x);
    end
    `TB_FINISH
  end
  initial begin #100us; failures++; `TB_FINISH end
endmodule
