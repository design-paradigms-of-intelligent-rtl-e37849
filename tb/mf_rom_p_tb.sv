// mf_rom_p_tb -- checks the region words {L, R, slope} of every input and
// region against the MF set: uniform centres j*4095/6, triangles on inputs
// 0 and 1, trapezoids with a 113-code margin on inputs 2 and 3.
module mf_rom_p_tb;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic [3:0][2:0]  a;
  logic [3:0][39:0] d;
  mf_rom_p dut (.addr(a), .data(d));
  initial begin
    for (int r = 0; r < 6; r++) begin
      for (int k = 0; k < 4; k++) a[k] = 3'((r + k) % 6);
      #1;
      for (int k = 0; k < 4; k++) begin
        int rr, m, l, rt;
        rr = (r + k) % 6;
        m = (k >= 2) ? 682 / 6 : 0;
        l = rr * 4095 / 6 + m;
        rt = (rr + 1) * 4095 / 6 - m;
        `CHECK(int'(d[k][39:28]) == l, ("in %0d reg %0d L=%0d exp %0d", k, rr, d[k][39:28], l))
        `CHECK(int'(d[k][27:16]) == rt, ("in %0d reg %0d R=%0d exp %0d", k, rr, d[k][27:16], rt))
        `CHECK(int'(d[k][15:0]) == (255 * 4096) / (rt - l), ("in %0d reg %0d slope %0d", k, rr, d[k][15:0]))
      end
    end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
