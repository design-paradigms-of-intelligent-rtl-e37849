// fpga_fc -- the parameterized DFLC soft core (fuzzification, inference and
// defuzzification pipeline).
//
// Every 2^N_IN clocks the core takes one input set `ip` (held stable by the
// chip's input register) and produces the zero-order Takagi-Sugeno output
//     op = sum_i w_i * s_i / sum_i w_i
// over the 2^N_IN active rules i, where w_i is the MIN of the rule's
// antecedent degrees and s_i its singleton.  One active rule is processed
// per clock.
//
// Datapath (register stages named as in the original block diagram; E+n is
// n clocks after the edge that loaded the input set, rule j of the set sits
// j clocks behind rule 0):
//   fuzzification   ars_p finds each input's overlap region (comb. on ip).
//                   PSR1 (3 deep) delays ip and the regions; mf_rom_p and
//                   trap_gen_p compute the first MF degree of each input;
//                   CPR3 registers it (E+4, held for the whole set).
//   inference       addr_gen_p emits rule j's MF indices at E+1+j; CPR1;
//                   cons_map_p forms the rule-base address; CPR2; s_rom_p
//                   reads the singleton into PSR2 and rule_sel's select bits
//                   into PSR3 (E+4+j); rule_sel_p picks alpha or 255-alpha
//                   per input; CPR4; andor_meth_p takes the MIN; CPR5
//                   (E+6+j).  PSR2 is 3 deep so the singleton meets it.
//   defuzzification mult forms w*s; CPR6 (E+7+j); int_uns sums w (E+7+j)
//                   and int_sig sums w*s (E+8+j), both restarted by the
//                   first-rule flag.  CPR7 (2 deep) and CPR8 catch the two
//                   complete sums at E+24 (default sizes); the divider
//                   (1 internal stage) and CPR9 follow, so op holds the
//                   result from E+26 and the chip's output register takes
//                   it at E+27: 16 rule clocks plus 11 pipeline clocks.
//   Widths: degrees 8, singleton 12 signed, product 21, numerator 25,
//   denominator 12, output 12 signed (truncated toward zero).
// The times above are for the default depths.  The CPR parameter sets the
// depth of each component pipeline register (CPR1..6, 8, 9; every depth at
// least 1); PSR1..3 and CPR7 are then derived in dflc_pkg so that the paths
// still meet, and dflc_pkg::core_latency gives the resulting latency that
// the chip's control logic uses.  AND_METHOD selects MIN or PROD, DIV_TYPE
// the divider.
module fpga_fc
  import dflc_pkg::*;
#(
  parameter int          N_IN       = dflc_pkg::DEF_N_IN,
  parameter int          IN_W       = dflc_pkg::DEF_IN_W,
  parameter int          N_MF       = dflc_pkg::DEF_N_MF,
  parameter int          ALPHA_W    = dflc_pkg::DEF_ALPHA_W,
  parameter int          SING_W     = dflc_pkg::DEF_SING_W,
  parameter int          OUT_W      = dflc_pkg::DEF_OUT_W,
  parameter and_method_e AND_METHOD = AND_MIN,
  parameter div_type_e   DIV_TYPE   = DIV_ARRAY,
  parameter cpr_depths_t CPR        = CPR_DEFAULT
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_IN-1:0][IN_W-1:0]    ip,
  output logic signed [OUT_W-1:0]      op
);
  localparam int RW   = clog2m1(N_MF);
  localparam int AW   = clog2m1(n_rules(N_MF, N_IN));
  localparam int PW   = 2 * IN_W + SLOPE_W;
  localparam int PRW  = SING_W + ALPHA_W + 1;          // product width
  localparam int NUMW = PRW + N_IN;                    // numerator width
  localparam int DENW = ALPHA_W + N_IN;                // denominator width
  localparam int PSR1_D = psr1_depth(CPR);
  localparam int PSR2_D = psr2_depth(CPR);
  localparam int PSR3_D = psr3_depth(CPR);
  localparam int CPR7_D = cpr7_depth(CPR);

  // ------------------------------------------------------ fuzzification
  logic [N_IN-1:0][RW-1:0]      fs_start_addr, fs_d;
  logic [N_IN-1:0][IN_W-1:0]    ip_d;
  logic [N_IN-1:0][PW-1:0]      mf_param;
  logic [N_IN-1:0][ALPHA_W-1:0] alpha, alpha_q;

  ars_p #(.N_IN(N_IN), .IN_W(IN_W), .N_MF(N_MF)) u1_ars (
    .ip_data(ip), .fs_start_addr(fs_start_addr));

  pipe_reg #(.WIDTH(N_IN*(IN_W+RW)), .DEPTH(PSR1_D)) psr1 (
    .clk, .rst_n, .en(1'b1), .d({ip, fs_start_addr}), .q({ip_d, fs_d}));

  mf_rom_p #(.N_IN(N_IN), .IN_W(IN_W), .N_MF(N_MF)) u8_mf_rom (
    .addr(fs_d), .data(mf_param));

  trap_gen_p #(.N_IN(N_IN), .IN_W(IN_W), .ALPHA_W(ALPHA_W)) u9_trap_gen (
    .ip_data(ip_d), .mf_param, .alpha_val(alpha));

  pipe_reg #(.WIDTH(N_IN*ALPHA_W), .DEPTH(int'(CPR.cpr3))) cpr3 (
    .clk, .rst_n, .en(1'b1), .d(alpha), .q(alpha_q));

  // ----------------------------------------------------------- inference
  logic [N_IN-1:0][RW-1:0] gen_addr, gen_addr_q;
  logic [N_IN-1:0]         sel, sel_1, sel_2, sel_3;
  logic                    int_zer, zer_1, zer_2, zer_5, zer_6;
  logic [AW-1:0]           rule_addr, rule_addr_q;
  logic signed [SING_W-1:0] sing, sing_q;
  logic [N_IN-1:0][ALPHA_W-1:0] rule_alpha, rule_alpha_q;
  logic [ALPHA_W-1:0]      theta, theta_q;

  addr_gen_p #(.N_IN(N_IN), .N_MF(N_MF)) u2_addr_gen (
    .clk, .rst_n, .fs_start_addr, .gen_addr, .sel, .int_zer);

  pipe_reg #(.WIDTH(N_IN*RW+N_IN+1), .DEPTH(int'(CPR.cpr1))) cpr1 (
    .clk, .rst_n, .en(1'b1), .d({gen_addr, sel, int_zer}), .q({gen_addr_q, sel_1, zer_1}));

  cons_map_p #(.N_IN(N_IN), .N_MF(N_MF)) u3_cons_map (
    .addr_in(gen_addr_q), .addr_out(rule_addr));

  pipe_reg #(.WIDTH(AW+N_IN+1), .DEPTH(int'(CPR.cpr2))) cpr2 (
    .clk, .rst_n, .en(1'b1), .d({rule_addr, sel_1, zer_1}), .q({rule_addr_q, sel_2, zer_2}));

  s_rom_p #(.N_IN(N_IN), .N_MF(N_MF), .SING_W(SING_W)) u4_s_rom (
    .addr(rule_addr_q), .data(sing));

  // PSR2: singleton and first-rule flag wait for the firing strength
  pipe_reg #(.WIDTH(SING_W+1), .DEPTH(PSR2_D)) psr2 (
    .clk, .rst_n, .en(1'b1), .d({sing, zer_2}), .q({sing_q, zer_5}));

  // PSR3: select bits to the rule selector
  pipe_reg #(.WIDTH(N_IN), .DEPTH(PSR3_D)) psr3 (
    .clk, .rst_n, .en(1'b1), .d(sel_2), .q(sel_3));

  rule_sel_p #(.N_IN(N_IN), .ALPHA_W(ALPHA_W)) u10_rule_sel (
    .sel(sel_3), .ip_data(alpha_q), .op_data(rule_alpha));

  pipe_reg #(.WIDTH(N_IN*ALPHA_W), .DEPTH(int'(CPR.cpr4))) cpr4 (
    .clk, .rst_n, .en(1'b1), .d(rule_alpha), .q(rule_alpha_q));

  andor_meth_p #(.N_IN(N_IN), .ALPHA_W(ALPHA_W), .AND_METHOD(AND_METHOD)) u11_andor (
    .ip_data(rule_alpha_q), .op_data(theta));

  pipe_reg #(.WIDTH(ALPHA_W), .DEPTH(int'(CPR.cpr5))) cpr5 (
    .clk, .rst_n, .en(1'b1), .d(theta), .q(theta_q));

  // ----------------------------------------------------- defuzzification
  logic signed [PRW-1:0]  prod, prod_q;
  logic signed [NUMW-1:0] num, num_q;
  logic [DENW-1:0]        den, den_q;
  logic signed [OUT_W-1:0] quo;

  mult #(.XS_W(SING_W), .XU_W(ALPHA_W)) u5_mult (
    .x_signed(sing_q), .x_unsigned(theta_q), .y(prod));

  pipe_reg #(.WIDTH(PRW+1), .DEPTH(int'(CPR.cpr6))) cpr6 (
    .clk, .rst_n, .en(1'b1), .d({prod, zer_5}), .q({prod_q, zer_6}));

  int_uns #(.IN_W(ALPHA_W), .OUT_W(DENW)) u12_int_uns (
    .clk, .rst_n, .clear(zer_5), .x(theta_q), .y(den));

  int_sig #(.IN_W(PRW), .OUT_W(NUMW)) u6_int_sig (
    .clk, .rst_n, .clear(zer_6), .x(prod_q), .y(num));

  pipe_reg #(.WIDTH(DENW), .DEPTH(CPR7_D)) cpr7 (
    .clk, .rst_n, .en(1'b1), .d(den), .q(den_q));

  pipe_reg #(.WIDTH(NUMW), .DEPTH(int'(CPR.cpr8))) cpr8 (
    .clk, .rst_n, .en(1'b1), .d(num), .q(num_q));

  if (DIV_TYPE == DIV_ARRAY) begin : g_div_array
    div_array #(.X_W(NUMW), .Y_W(DENW), .Q_W(OUT_W)) u7_div (
      .clk, .rst_n, .X(num_q), .Y(den_q), .op(quo));
  end else begin : g_div_ppa
    div_ppa #(.X_W(NUMW), .Y_W(DENW), .Q_W(OUT_W)) u13_div (
      .clk, .rst_n, .divd(num_q), .divs(den_q), .op(quo));
  end

  pipe_reg #(.WIDTH(OUT_W), .DEPTH(int'(CPR.cpr9))) cpr9 (
    .clk, .rst_n, .en(1'b1), .d(quo), .q(op));
endmodule
