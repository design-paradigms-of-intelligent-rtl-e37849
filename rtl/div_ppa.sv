// div_ppa -- non-restoring array divider, the alternative divider of the
// defuzzifier (chosen with fpga_fc's DIV_TYPE parameter).
//
// Same function, interface widths and latency as div_array: op = divd / divs
// for a signed dividend and an unsigned divisor, truncated toward zero and
// cut to Q_W bits, 0 when divs = 0.  Each row adds or subtracts the divisor
// depending on the sign of the partial remainder, so no restoring
// multiplexer is needed; the quotient bit of a row is 1 when the new
// remainder is not negative.  A register after the first SPLIT rows gives
// one clock of latency.
module div_ppa #(
  parameter int X_W   = 25,
  parameter int Y_W   = 12,
  parameter int Q_W   = 12,
  parameter int SPLIT = X_W / 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [X_W-1:0] divd,
  input  logic        [Y_W-1:0] divs,
  output logic signed [Q_W-1:0] op
);
  typedef struct packed {
    logic                  neg;
    logic [Y_W-1:0]        y;
    logic [X_W-1:0]        a;
    logic [X_W-1:0]        q;
    logic signed [Y_W+1:0] rem;
  } nr_state_t;

  function automatic nr_state_t row(input nr_state_t s);
    nr_state_t o;
    logic signed [Y_W+1:0] t, yy;
    o  = s;
    yy = $signed({2'b00, s.y});
    t  = {s.rem[Y_W:0], s.a[X_W-1]};
    o.a = s.a << 1;
    if (s.rem[Y_W+1]) t = t + yy;
    else              t = t - yy;
    o.q   = {s.q[X_W-2:0], ~t[Y_W+1]};
    o.rem = t;
    return o;
  endfunction

  nr_state_t s0, s1, s1_q, s2;

  always_comb begin
    s0.neg = divd[X_W-1];
    s0.y   = divs;
    s0.a   = divd[X_W-1] ? X_W'(-divd) : X_W'(divd);
    s0.q   = '0;
    s0.rem = '0;
    s1 = s0;
    for (int i = 0; i < SPLIT; i++) s1 = row(s1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_q <= '0;
    else        s1_q <= s1;
  end

  always_comb begin
    s2 = s1_q;
    for (int i = SPLIT; i < X_W; i++) s2 = row(s2);
    if (s2.y == '0)  op = '0;
    else if (s2.neg) op = Q_W'(-s2.q);
    else             op = Q_W'(s2.q);
  end
endmodule
