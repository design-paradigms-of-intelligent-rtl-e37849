// andor_meth_p_tb -- checks the MIN connective (default) and the normalised
// PROD connective on random and corner-case degree sets.
module andor_meth_p_tb;
  import dflc_pkg::*;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic [3:0][7:0] d;
  logic [7:0] omin, oprod;
  andor_meth_p dmin (.ip_data(d), .op_data(omin));
  andor_meth_p #(.AND_METHOD(AND_PROD)) dprod (.ip_data(d), .op_data(oprod));
  initial begin
    for (int i = 0; i < 2000; i++) begin
      int m, p;
      d = (i < 4) ? {4{8'(i * 85)}} : 32'($urandom);
      #1;
      m = 255; p = int'(d[0]);
      for (int k = 0; k < 4; k++) if (int'(d[k]) < m) m = int'(d[k]);
      for (int k = 1; k < 4; k++) p = (p * int'(d[k])) / 256;
      `CHECK(int'(omin) == m, ("min %0d expected %0d", omin, m))
      `CHECK(int'(oprod) == p, ("prod %0d expected %0d", oprod, p))
    end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
