// dflc_chip_tb -- end-to-end test of the fuzzy controller chip at its
// default sizes (4 inputs x 12 bits, 7 MFs, 2401 rules, 12-bit output).
//
// A data source follows the chip's handshake: whenever ready_in is high it
// puts the next input set on ip, which the chip takes on the following core
// clock edge.  Each ready_out pulse delivers one result, which is compared
// with the full-rule-base reference model.  The test also checks
//   * the input rate: one set every 16 core clocks, in step with clkdv;
//   * the latency: 27 core clocks (270 ns) from the edge that takes a set to
//     the edge that loads its result (ready_out is seen one clock after);
//   * the clock manager: core clock period 10 ns, clkdv period 160 ns,
// and counts how often the mechanisms of the design were exercised: each of
// the six overlap regions selected, MF plateaus and edges hit, negative and
// positive results, both extreme input codes.  A mechanism never seen counts
// as a failure.
module dflc_chip_tb;
  timeunit 1ns;
  timeprecision 1ps;
  import dflc_pkg::*;
  import dflc_ref_pkg::*;
  `include "tb_check.svh"
  `TB_COUNTERS

  localparam int NSETS = 400;
  localparam int NI = DEF_N_IN, IW = DEF_IN_W, NM = DEF_N_MF;

  logic clk = 0, rst = 1;
  logic [NI-1:0][IW-1:0] ip;
  logic signed [DEF_OUT_W-1:0] op;
  logic r_in, r_out, clkdv_out, clkfx_out;

  dflc_chip dut (.clk, .rst, .ip, .op, .r_in, .r_out, .clkdv_out, .clkfx_out);

  always #6.667 clk = ~clk;        // 75 MHz board clock

  // ---- bookkeeping on the core clock
  int cyc = 0;
  always @(posedge clkfx_out) cyc <= cyc + 1;

  int exp_q[$];
  int load_cyc_q[$];
  int sent = 0, got = 0;
  int n_region[NM-1];
  int n_plateau = 0, n_edge = 0, n_neg = 0, n_pos = 0, n_min = 0, n_max = 0;
  int last_load = -1, n_rate_ok = 0;

  function automatic logic [IW-1:0] pick(input int i, input int k);
    int c;
    case (i % 8)
      0: return IW'(0);
      1: return IW'((1 << IW) - 1);
      2: return IW'(mf_left(NM, IW, k, $urandom_range(0, NM - 2)));
      3: return IW'(mf_right(NM, IW, k, $urandom_range(0, NM - 2)));
      default: begin c = $urandom_range(0, (1 << IW) - 1); return IW'(c); end
    endcase
  endfunction

  task automatic account(input logic [NI-1:0][IW-1:0] s);
    int x, r;
    for (int k = 0; k < NI; k++) begin
      x = int'(s[k]);
      r = 0;
      for (int j = 1; j <= NM - 2; j++) if (x >= mf_left(NM, IW, k, j)) r = j;
      n_region[r]++;
      if (x <= mf_left(NM, IW, k, r) || x >= mf_right(NM, IW, k, r)) n_plateau++;
      else n_edge++;
      if (x == 0) n_min++;
      if (x == (1 << IW) - 1) n_max++;
    end
  endtask

  // ---- data source: new set presented while ready_in is high
  always @(posedge clkfx_out) begin
    if (r_in) begin
      int v[];
      int num, den, e;
      v = new[NI];
      for (int k = 0; k < NI; k++) v[k] = int'(ip[k]);
      e = infer(NI, NM, IW, v, 1'b0, num, den);
      begin
        exp_q.push_back(e);
        load_cyc_q.push_back(cyc);
        account(ip);
        if (last_load >= 0) `CHECK(cyc - last_load == 16, ("input period %0d", cyc - last_load))
        last_load = cyc;
      end
      sent++;
      for (int k = 0; k < NI; k++) ip[k] <= pick(sent, k);
    end
  end

  // ---- result sink
  always @(posedge clkfx_out) begin
    if (r_out && exp_q.size() > 0) begin
      int e, lc;
      e = exp_q.pop_front();
      lc = load_cyc_q.pop_front();
      got++;
      `CHECK(int'(op) == e, ("set %0d: op=%0d expected %0d", got, op, e))
      // ready_out is seen one clock after the R2 load edge
      `CHECK(cyc - lc == 27 + 1, ("set %0d latency %0d cycles", got, cyc - lc - 1))
      if (e < 0) n_neg++;
      if (e > 0) n_pos++;
    end
  end

  // ---- clock manager periods
  realtime t_fx, t_dv;
  initial begin
    @(posedge clkfx_out); t_fx = $realtime;
    @(posedge clkfx_out);
    `CHECK($realtime - t_fx > 9.99 && $realtime - t_fx < 10.01, ("clkfx period %0t", $realtime - t_fx))
    @(posedge clkdv_out); t_dv = $realtime;
    @(posedge clkdv_out);
    `CHECK($realtime - t_dv > 159.9 && $realtime - t_dv < 160.1, ("clkdv period %0t", $realtime - t_dv))
  end

  initial begin
    for (int k = 0; k < NI; k++) ip[k] = IW'(1000 * k + 100);
    repeat (3) @(posedge clk);
    rst = 0;
    wait (got >= NSETS);
    for (int r = 0; r < NM - 1; r++) `CHECK(n_region[r] > 0, ("region %0d never selected", r))
    `CHECK(n_plateau > 0, ("no input on an MF plateau"))
    `CHECK(n_edge > 0, ("no input on an MF edge"))
    `CHECK(n_neg > 0, ("no negative result"))
    `CHECK(n_pos > 0, ("no positive result"))
    `CHECK(n_min > 0 && n_max > 0, ("extreme input codes not applied"))
    $display("sets=%0d regions=%p plateau=%0d edge=%0d neg=%0d pos=%0d", got, n_region,
             n_plateau, n_edge, n_neg, n_pos);
    `TB_FINISH
  end

  initial begin
    #(NSETS * 200ns + 5us);
    failures++;
    $display("watchdog: only %0d results", got);
    `TB_FINISH
  end
endmodule
