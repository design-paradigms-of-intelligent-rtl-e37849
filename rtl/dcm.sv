// dcm -- behavioural model of the FPGA's digital clock manager (not
// synthesizable; the real part is a vendor clock macro).
//
// The board clock `clk` (75 MHz) is divided by 12 to clkdv (6.25 MHz) and
// clkdv is multiplied by 16 to clkfx (100 MHz), which clocks the whole DFLC.
// The model makes clkfx from its own half period CLKFX_HALF_PS and derives
// clkdv from it (FX_PER_DV clkfx periods per clkdv period), so the two are
// phase-locked exactly as the real outputs are; it does not measure `clk`
// except to count LOCK_CYCLES of it after `rst` falls before releasing
// rst_n (the "locked" output), which is deasserted on a clkfx rising edge.
// Ports: clk, rst (active high) in; clkdv, clkfx, rst_n out.
// A synthesis tool that ignores delays sees clkfx without a driver; that is
// expected of this model, which is replaced by the vendor primitive in an
// implementation.
module dcm #(
  parameter int unsigned CLKFX_HALF_PS = 5000,
  parameter int          FX_PER_DV     = 16,
  parameter int          LOCK_CYCLES   = 4
) (
  input  logic clk,
  input  logic rst,
  output logic clkdv,
  output logic clkfx,
  output logic rst_n
);
  timeunit 1ps;
  timeprecision 1ps;

  int   lock_cnt;
  int   dv_cnt;
  logic locked;

  initial clkfx = 1'b0;
  always #(CLKFX_HALF_PS) clkfx = ~clkfx;

  always @(posedge clk or posedge rst) begin
    if (rst) begin
      lock_cnt <= 0;
      locked   <= 1'b0;
    end else if (lock_cnt < LOCK_CYCLES) begin
      lock_cnt <= lock_cnt + 1;
    end else begin
      locked   <= 1'b1;
    end
  end

  initial rst_n = 1'b0;
  always @(posedge clkfx) rst_n <= locked;

  initial begin
    clkdv  = 1'b0;
    dv_cnt = 0;
  end
  always @(posedge clkfx) begin
    if (dv_cnt == FX_PER_DV / 2 - 1) begin
      dv_cnt <= 0;
      clkdv  <= ~clkdv;
    end else begin
      dv_cnt <= dv_cnt + 1;
    end
  end
endmodule
