// addr_gen_p_tb -- holds random region addresses for 16-clock periods and
// checks that rule j of each period has MF index r_k + bit k of j, select
// bits j, and that int_zer marks rule 0 only.
module addr_gen_p_tb;
  timeunit 1ns; timeprecision 1ps;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic clk = 0, rst_n = 0;
  logic [3:0][2:0] fs, ga;
  logic [3:0] sel;
  logic zer;
  addr_gen_p dut (.clk, .rst_n, .fs_start_addr(fs), .gen_addr(ga), .sel, .int_zer(zer));
  always #5 clk = ~clk;
  int n_rules = 0;
  initial begin
    logic [3:0][2:0] f;
    for (int k = 0; k < 4; k++) f[k] = 3'($urandom_range(0, 5));
    fs = f;                         // counter is 0 in the first clock
    #12 rst_n = 1;
    for (int set = 0; set < 40; set++) begin
      for (int j = 0; j < 16; j++) begin
        @(posedge clk); #1;
        `CHECK(zer == (j == 0), ("int_zer at rule %0d", j))
        `CHECK(sel == 4'(j), ("sel %0d at rule %0d", sel, j))
        for (int k = 0; k < 4; k++)
          `CHECK(ga[k] == f[k] + 3'(j >> k & 1), ("rule %0d input %0d addr %0d", j, k, ga[k]))
        n_rules++;
        if (j == 15) begin  // next set: applied in the counter-0 clock
          for (int k = 0; k < 4; k++) f[k] = 3'($urandom_range(0, 5));
          fs = f;
        end
      end
    end
    `CHECK(n_rules == 640, ("rules %0d", n_rules))
    `TB_FINISH
  end
  initial begin #100us; failures++; `TB_FINISH end
endmodule
