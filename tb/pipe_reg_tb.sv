// pipe_reg_tb -- checks that a 3-deep, 10-bit pipe_reg delays random data by
// exactly three enabled clocks, holds while `en` is low, clears on reset, and
// that DEPTH = 0 is a wire.
module pipe_reg_tb;
  timeunit 1ns; timeprecision 1ps;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, en = 0;
  logic [9:0] d, q3, q0;
  logic [9:0] hist[$];
  pipe_reg #(.WIDTH(10), .DEPTH(3)) dut (.clk, .rst_n, .en, .d, .q(q3));
  pipe_reg #(.WIDTH(10), .DEPTH(0)) dw  (.clk, .rst_n, .en, .d, .q(q0));
  always #5 clk = ~clk;
  initial begin
    d = '0;
    #12 `CHECK(q3 == 0, ("reset value %0d", q3))
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      d  = 10'($urandom);
      `CHECK(q0 == d, ("depth 0 not a wire"))
      if (en) hist.push_back(d);
      @(posedge clk); #1;
      if (en && hist.size() > 3) void'(hist.pop_front());
      if (hist.size() > 3 || (en && hist.size() == 3 && i > 5))
        `CHECK(q3 == hist[0], ("cycle %0d q=%0d expected %0d", i, q3, hist[0]))
    end
    `TB_FINISH
  end
  initial begin #100us; failures++; `TB_FINISH end
endmodule
