// control_logic_p_tb -- checks that load/ready_in pulse once every 16 clocks,
// that r2_load follows each load by exactly 27 clocks, and that ready_out is
// high in the clock after each r2_load and never otherwise.
module control_logic_p_tb;
  timeunit 1ns; timeprecision 1ps;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic clk = 0, rst_n = 0;
  logic load, r2_load, ready_in, ready_out;
  control_logic_p dut (.clk, .rst_n, .load, .r2_load, .ready_in, .ready_out);
  always #5 clk = ~clk;
  int cyc = 0, last = -1, nload = 0, nr2 = 0;
  int loads[$];
  logic r2_prev = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    `CHECK(ready_in == load, ("ready_in differs from load"))
    `CHECK(ready_out == r2_prev, ("ready_out at cycle %0d", cyc))
    r2_prev <= r2_load;
    if (load) begin
      if (last >= 0) `CHECK(cyc - last == 16, ("load period %0d", cyc - last))
      else `CHECK(cyc == 15, ("first load at cycle %0d", cyc))
      last = cyc; nload++;
      loads.push_back(cyc);
    end
    if (r2_load) begin
      nr2++;
      `CHECK(loads.size() > 0 && cyc - loads.pop_front() == 27, ("r2_load latency"))
    end
  end
  initial begin
    #22 rst_n = 1;
    repeat (16 * 30) @(posedge clk);
    `CHECK(nload >= 29 && nr2 >= 28, ("loads %0d r2 %0d", nload, nr2))
    `TB_FINISH
  end
  initial begin #100us; failures++; `TB_FINISH end
endmodule
