// mult_tb -- signed 12-bit singleton times unsigned 8-bit strength over
// random values and the extremes (-2048, 2047, 0, 255).
module mult_tb;
  `include "tb_check.svh"
  `TB_COUNTERS
  logic signed [11:0] xs;
  logic [7:0] xu;
  logic signed [20:0] y;
  mult dut (.x_signed(xs), .x_unsigned(xu), .y);
  initial begin
    for (int i = 0; i < 3000; i++) begin
      xs = (i < 4) ? (i[0] ? 12'sd2047 : -12'sd2048) : 12'($urandom);
      xu = (i < 4) ? (i[1] ? 8'd255 : 8'd1) : 8'($urandom);
      #1 `CHECK(int'(y) == int'(xs) * int'(xu), ("%0d*%0d=%0d", xs, xu, y))
    end
    `TB_FINISH
  end
  initial begin #1ms; failures++; `TB_FINISH end
endmodule
