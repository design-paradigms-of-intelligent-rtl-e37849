// div_array -- restoring array divider for the defuzzifier.
//
// Computes op = X / Y for a signed X_W-bit dividend (sum of weighted
// singletons) and an unsigned Y_W-bit divisor (sum of firing strengths).
// The quotient is truncated toward zero and cut to its low Q_W bits; for the
// weighted average it always lies inside the singleton range, so nothing is
// lost.  Y = 0 gives 0.
//
// Structure: the magnitude of X goes through X_W rows; each row shifts the
// next dividend bit into the partial remainder, subtracts Y and keeps the
// difference if it is not negative (quotient bit 1) or restores the old
// remainder (quotient bit 0).  A register after the first SPLIT rows splits
// the array into two pipeline stages.  Latency: 1 clock from X/Y to op
// (op is combinational from that register).
module div_array #(
  parameter int X_W   = 25,
  parameter int Y_W   = 12,
  parameter int Q_W   = 12,
  parameter int SPLIT = X_W / 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [X_W-1:0] X,
  input  logic        [Y_W-1:0] Y,
  output logic signed [Q_W-1:0] op
);
  typedef struct packed {
    logic           neg;
    logic [Y_W-1:0] y;
    logic [X_W-1:0] a;    // remaining dividend bits, MSB first
    logic [X_W-1:0] q;
    logic [Y_W:0]   rem;
  } div_state_t;

  // one restoring row
  function automatic div_state_t row(input div_state_t s);
    div_state_t o;
    logic [Y_W+1:0] t;
    o = s;
    t = {s.rem, s.a[X_W-1]};
    o.a = s.a << 1;
    if (t >= {2'b00, s.y}) begin
      t = t - {2'b00, s.y};
      o.q = {s.q[X_W-2:0], 1'b1};
    end else begin
      o.q = {s.q[X_W-2:0], 1'b0};
    end
    o.rem = t[Y_W:0];
    return o;
  endfunction

  div_state_t s0, s1, s1_q, s2;

  always_comb begin
    s0.neg = X[X_W-1];
    s0.y   = Y;
    s0.a   = X[X_W-1] ? X_W'(-X) : X_W'(X);
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
