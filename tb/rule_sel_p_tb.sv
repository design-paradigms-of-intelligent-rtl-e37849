// rule_sel_p_tb -- for random degrees and every select pattern, input k must
// give alpha_k when its select bit is 0 and 255 - alpha_k when it is 1.
module rule_sel_p_tb;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic [3:0] sel;
  logic [3:0][7:0] ipd, opd;
  rule_sel_p dut (.sel, .ip_data(ipd), .op_data(opd));
  initial begin
    for (int i = 0; i < 400; i++) begin
      ipd = 32'($urandom);
      sel = 4'(i);
      #1;
      for (int k = 0; k < 4; k++)
        `CHECK(int'(opd[k]) == (sel[k] ? 255 - int'(ipd[k]) : int'(ipd[k])), ("i=%0d k=%0d", i, k))
    end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
