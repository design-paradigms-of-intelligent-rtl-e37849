// fpga_fc_tb -- runs the DFLC core without the chip wrapper, in four builds:
//   c0  default: 4 inputs, 7 MFs, MIN connective, restoring array divider
//   c1  the same with the non-restoring divider
//   c2  the same with the PROD connective
//   c3  the robot path-tracker build: 2 inputs, 9 triangular MFs, 81 rules
// A new input set is applied every 2^N_IN clocks, in the clock in which the
// core's rule counter is 0 (as the chip's input register would), and the
// output 2^N_IN + 10 clocks after that set was applied must equal the
// full-rule-base reference (the chip's output register adds the 11th).
module fpga_fc_tb;
  timeunit 1ns; timeprecision 1ps;
  import dflc_pkg::*;
  import dflc_ref_pkg::*;
  `include "tb_check.svh"
  `TB_COUNTERS
  localparam int NSETS = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0][11:0] ip4;
  logic [1:0][11:0] ip2;
  logic signed [11:0] op0, op1, op2, op3, op4;

  // deeper component registers; the derived registers must keep the paths
  // aligned and the latency must follow core_latency
  localparam cpr_depths_t DEEP = '{cpr1: 4'd2, cpr2: 4'd1, cpr3: 4'd6, cpr4: 4'd2,
                                   cpr5: 4'd1, cpr6: 4'd2, cpr8: 4'd3, cpr9: 4'd2};
  localparam int LAT0 = core_latency(4, CPR_DEFAULT);
  localparam int LAT4 = core_latency(4, DEEP);

  fpga_fc c0 (.clk, .rst_n, .ip(ip4), .op(op0));
  fpga_fc #(.DIV_TYPE(DIV_PPA)) c1 (.clk, .rst_n, .ip(ip4), .op(op1));
  fpga_fc #(.AND_METHOD(AND_PROD)) c2 (.clk, .rst_n, .ip(ip4), .op(op2));
  fpga_fc #(.N_IN(2), .N_MF(9)) c3 (.clk, .rst_n, .ip(ip2), .op(op3));
  fpga_fc #(.CPR(DEEP)) c4 (.clk, .rst_n, .ip(ip4), .op(op4));

  int n = 0;                   // clock edges since reset release
  int e_min[$], e_prod[$], e_trk[$], e_deep[$];
  int n_neg = 0, n_pos = 0;

  // The core's rule counter is (n-1) mod 2^N_IN in the clock before edge n,
  // so a set taken on an edge with n mod 2^N_IN = 0 meets rule 0 next.
  always @(posedge clk) if (rst_n) begin
    int v[], num, den;
    n = n + 1;
    if (n % 16 == 0) begin
      logic [3:0][11:0] s4;
      v = new[4];
      for (int k = 0; k < 4; k++) begin
        s4[k] = 12'($urandom);
        v[k] = int'(s4[k]);
      end
      ip4 <= s4;
      e_min.push_back(infer(4, 7, 12, v, 1'b0, num, den));
      e_deep.push_back(e_min[$]);
      e_prod.push_back(infer(4, 7, 12, v, 1'b1, num, den));
    end
    if (n % 4 == 0) begin
      logic [1:0][11:0] s2;
      v = new[2];
      for (int k = 0; k < 2; k++) begin
        s2[k] = 12'($urandom);
        v[k] = int'(s2[k]);
      end
      ip2 <= s2;
      e_trk.push_back(infer(2, 9, 12, v, 1'b0, num, den));
    end
  end

  // op holds the result of the set taken at edge m from edge m + 2^N_IN + 10
  always @(negedge clk) if (rst_n) begin
    if (n >= 16 + 26 && (n - 26) % 16 == 0) begin
      int a, b;
      a = e_min.pop_front(); b = e_prod.pop_front();
      `CHECK(int'(op0) == a, ("c0 op %0d expected %0d", op0, a))
      `CHECK(int'(op1) == a, ("c1 op %0d expected %0d", op1, a))
      `CHECK(int'(op2) == b, ("c2 op %0d expected %0d", op2, b))
      if (a < 0) n_neg++; else if (a > 0) n_pos++;
    end
    if (n >= 16 + LAT4 - 1 && (n - LAT4 + 1) % 16 == 0) begin
      int d;
      d = e_deep.pop_front();
      `CHECK(int'(op4) == d, ("c4 op %0d expected %0d", op4, d))
    end
    if (n >= 4 + 14 && (n - 14) % 4 == 0) begin
      int c;
      c = e_trk.pop_front();
      `CHECK(int'(op3) == c, ("c3 op %0d expected %0d", op3, c))
    end
  end

  initial begin
    `CHECK(LAT0 == 27, ("default latency %0d", LAT0))
    `CHECK(core_latency(2, CPR_DEFAULT) == 15, ("tracker latency"))
    `CHECK(LAT4 == 35, ("deep latency %0d", LAT4))
    ip4 = '0; ip2 = '0;
    #22 rst_n = 1;
    repeat (NSETS * 16 + 40) @(posedge clk);
    `CHECK(n_neg > 0 && n_pos > 0, ("results of both signs: %0d %0d", n_neg, n_pos))
    `TB_FINISH
  end
  initial begin #((NSETS * 16 + 200) * 10ns); failures++; `TB_FINISH end
endmodule
