// dflc_chip -- top level of the fuzzy controller chip.
//
// Binds the clock manager, the input register R1, the DFLC core, the output
// register R2 and the control logic.  The board clock (75 MHz) enters the
// clock manager, which makes the 100 MHz core clock clkfx and the 6.25 MHz
// input sampling clock clkdv (1/16 of clkfx) and releases rst_n once locked.
// Everything else runs on clkfx.
//
// Interface and timing: an external device drives ip[0..N_IN-1] (unsigned
// IN_W-bit values).  In the cycle in which ready_in is high, R1 takes the
// set on the next clkfx edge; this happens every 2^N_IN clocks (160 ns),
// in step with clkdv.  The result for that set is loaded into R2
// dflc_pkg::core_latency clocks later (2^N_IN + 11 = 27 clocks, 270 ns, at
// the default pipeline depths CPR), and ready_out is high for one clock
// after the load; op (signed OUT_W bits) holds the result until the next one.
// clkdv_out and clkfx_out bring the two clocks out for the data source.
module dflc_chip
  import dflc_pkg::*;
#(
  parameter int N_IN    = dflc_pkg::DEF_N_IN,
  parameter int IN_W    = dflc_pkg::DEF_IN_W,
  parameter int N_MF    = dflc_pkg::DEF_N_MF,
  parameter int ALPHA_W = dflc_pkg::DEF_ALPHA_W,
  parameter int SING_W  = dflc_pkg::DEF_SING_W,
  parameter int OUT_W   = dflc_pkg::DEF_OUT_W,
  parameter cpr_depths_t CPR = CPR_DEFAULT
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [N_IN-1:0][IN_W-1:0] ip,
  output logic signed [OUT_W-1:0]   op,
  output logic                      r_in,
  output logic                      r_out,
  output logic                      clkdv_out,
  output logic                      clkfx_out
);
  localparam int N_ACT   = 1 << N_IN;
  localparam int LATENCY = core_latency(N_IN, CPR);

  logic clkx, clkdv, rst_n;
  logic load, r2_load;
  logic [N_IN-1:0][IN_W-1:0] ip_r;
  logic signed [OUT_W-1:0]   core_op;

  dcm u0_dcm (.clk, .rst, .clkdv, .clkfx(clkx), .rst_n);

  pipe_reg #(.WIDTH(N_IN*IN_W), .DEPTH(1)) r1 (
    .clk(clkx), .rst_n, .en(load), .d(ip), .q(ip_r));

  fpga_fc #(.N_IN(N_IN), .IN_W(IN_W), .N_MF(N_MF), .ALPHA_W(ALPHA_W),
            .SING_W(SING_W), .OUT_W(OUT_W), .CPR(CPR)) u1_fc (
    .clk(clkx), .rst_n, .ip(ip_r), .op(core_op));

  pipe_reg #(.WIDTH(OUT_W), .DEPTH(1)) r2 (
    .clk(clkx), .rst_n, .en(r2_load), .d(core_op), .q(op));

  control_logic_p #(.N_ACT(N_ACT), .LATENCY(LATENCY)) u2_ctrl (
    .clk(clkx), .rst_n, .load, .r2_load, .ready_in(r_in), .ready_out(r_out));

  assign clkdv_out = clkdv;
  assign clkfx_out = clkx;
endmodule
