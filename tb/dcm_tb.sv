// dcm_tb -- checks the clock manager model: rst_n stays low while rst is
// high and rises after lock, clkfx has a 10 ns period and clkdv 160 ns, and
// every clkdv rising edge falls on a clkfx rising edge.
module dcm_tb;
  timeunit 1ns; timeprecision 1ps;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic clk = 0, rst = 1, clkdv, clkfx, rst_n;
  dcm dut (.clk, .rst, .clkdv, .clkfx, .rst_n);
  always #6.667 clk = ~clk;
  realtime tf, td;
  int nfx = 0;
  always @(posedge clkfx) nfx++;
  initial begin
    #200 `CHECK(rst_n == 0, ("rst_n released during rst"))
    rst = 0;
    #200 `CHECK(rst_n == 1, ("rst_n not released after lock"))
    repeat (10) begin
      @(posedge clkfx); tf = $realtime;
      @(posedge clkfx); `CHECK($realtime - tf > 9.99 && $realtime - tf < 10.01, ("clkfx period %0t", $realtime - tf))
      @(posedge clkdv); td = $realtime;
      #0.001 `CHECK(clkfx == 1 && ($realtime - 0.001 - tf) == 10.0 * $rtoi((td - tf) / 10.0 + 0.5), ("clkdv not aligned"))
      @(posedge clkdv); `CHECK($realtime - td > 159.9 && $realtime - td < 160.1, ("clkdv period %0t", $realtime - td))
    end
    `TB_FINISH
  end
  initial begin #100us; failures++; `TB_FINISH end
endmodule
