// trap_gen_p_tb -- drives hand-made region parameters (a triangle edge, a
// steep edge and a wide one) and random inputs, and checks each degree
// against the piecewise-linear definition computed with integers here.
module trap_gen_p_tb;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic [3:0][11:0] x;
  logic [3:0][39:0] p;
  logic [3:0][7:0]  a;
  trap_gen_p dut (.ip_data(x), .mf_param(p), .alpha_val(a));
  int L[4] = '{682, 1000, 2000, 3300};
  int R[4] = '{1365, 1020, 3900, 4000};
  initial begin
    for (int k = 0; k < 4; k++) p[k] = {12'(L[k]), 12'(R[k]), 16'((255 * 4096) / (R[k] - L[k]))};
    for (int i = 0; i < 3000; i++) begin
      for (int k = 0; k < 4; k++) x[k] = (i < 8) ? 12'(i[0] ? L[k] : R[k]) : 12'($urandom);
      #1;
      for (int k = 0; k < 4; k++) begin
        int v, e, f;
        v = int'(x[k]);
        f = ((v - L[k]) * ((255 * 4096) / (R[k] - L[k]))) / 4096;
        if (v <= L[k]) e = 255;
        else if (v >= R[k] || f >= 255) e = 0;
        else e = 255 - f;
        `CHECK(int'(a[k]) == e, ("in %0d x=%0d alpha %0d expected %0d", k, v, a[k], e))
      end
    end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
