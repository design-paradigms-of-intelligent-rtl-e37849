// ars_p_tb -- sweeps every 12-bit input code on all four inputs and checks
// the selected overlap region against a linear search over the MF edges.
module ars_p_tb;
  import dflc_pkg::*;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic [3:0][11:0] ip;
  logic [3:0][2:0]  fs;
  ars_p dut (.ip_data(ip), .fs_start_addr(fs));
  initial begin
    for (int x = 0; x < 4096; x++) begin
      for (int k = 0; k < 4; k++) ip[k] = 12'((x + 997 * k) % 4096);
      #1;
      for (int k = 0; k < 4; k++) begin
        int v, e;
        v = (x + 997 * k) % 4096;
        e = 0;
        // region = last overlap whose left edge has been reached
        for (int r = 0; r < 6; r++) if (v >= mf_left(7, 12, k, r)) e = r;
        `CHECK(int'(fs[k]) == e, ("input %0d x=%0d region %0d expected %0d", k, v, fs[k], e))
      end
    end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
