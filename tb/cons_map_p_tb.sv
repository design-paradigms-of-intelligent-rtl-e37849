// cons_map_p_tb -- checks the rule address for every one of the 2401 MF index
// combinations against an independent base-7 count.
module cons_map_p_tb;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic [3:0][2:0] a;
  logic [11:0] o;
  cons_map_p dut (.addr_in(a), .addr_out(o));
  initial begin
    int n;
    n = 0;
    for (int d3 = 0; d3 < 7; d3++) for (int d2 = 0; d2 < 7; d2++)
      for (int d1 = 0; d1 < 7; d1++) for (int d0 = 0; d0 < 7; d0++) begin
        a = {3'(d3), 3'(d2), 3'(d1), 3'(d0)};
        #1 `CHECK(int'(o) == n, ("addr %0d expected %0d", o, n))
        n++;
      end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
