// int_sig_tb -- accumulates random signed 21-bit products in groups of 16,
// restarted by `clear`, and checks each complete sum (on y in the clear
// cycle) against a sum kept here; the extremes are included.
module int_sig_tb;
  timeunit 1ns; timeprecision 1ps;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, clear = 0;
  logic signed [20:0] x;
  logic signed [24:0] y;
  int_sig dut (.clk, .rst_n, .clear, .x, .y);
  always #5 clk = ~clk;
  initial begin
    int sum, prev;
    x = '0; sum = 0; prev = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 16 * 50; i++) begin
      @(negedge clk);
      clear = (i % 16 == 0);
      if (clear && i > 0) `CHECK(int'(y) == sum, ("sum %0d expected %0d", y, sum))
      x = (i < 32) ? (i < 16 ? -21'sd522240 : 21'sd521985) : 21'($urandom_range(0, 1044480)) - 21'sd522240;
      sum = clear ? int'(x) : sum + int'(x);
    end
    `TB_FINISH
  end
  initial begin #100us; failures++; `TB_FINISH end
endmodule
