// s_rom_p_tb -- reads all 2401 singletons and compares them with the
// closed-form rule base (recomputed here from the MF indices), and checks
// that addresses past the rule base read 0.
module s_rom_p_tb;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic [11:0] addr;
  logic signed [11:0] data;
  s_rom_p dut (.addr, .data);
  initial begin
    for (int i = 0; i < 4096; i++) begin
      int d[4], s, nl, e;
      s = 0; nl = 0;
      for (int k = 0; k < 4; k++) begin
        d[k] = (i / (7 ** k)) % 7;
        nl += (2 * k + 3) * d[k];
      end
      s = 5 * d[0] + 3 * d[1] + 2 * d[2] + d[3];
      e = (i < 2401) ? ((2 * s - 66) * 1980) / 66 + (nl % 13) - 6 : 0;
      addr = 12'(i);
      #1 `CHECK(int'(data) == e, ("rule %0d: %0d expected %0d", i, data, e))
    end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
