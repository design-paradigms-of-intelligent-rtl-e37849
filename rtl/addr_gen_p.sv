// addr_gen_p -- active rule address generator.
//
// A free-running counter of N_IN bits enumerates the 2^N_IN active rules of
// the current input set, one per clock.  Bit k of the count chooses, for
// input k, the first (r_k) or the second (r_k + 1) of its two overlapping
// membership functions; the chosen MF indices form the rule's antecedent
// address gen_addr.  The counter bits are also output as `sel` (used later
// to pick the matching degree of truth), and int_zer marks the first rule of
// a set so that the defuzzifier's accumulators restart.
//
// Timing: all outputs are registered.  The counter is reset together with
// the chip's control logic, so count 0 is the first cycle after the input
// register has loaded a new set: rule 0 appears one cycle later (the 2nd
// cycle of the set) and rule 2^N_IN - 1 in cycle 2^N_IN + 1.
module addr_gen_p
  import dflc_pkg::*;
#(
  parameter int N_IN = dflc_pkg::DEF_N_IN,
  parameter int N_MF = dflc_pkg::DEF_N_MF,
  localparam int RW  = clog2m1(N_MF)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_IN-1:0][RW-1:0] fs_start_addr,
  output logic [N_IN-1:0][RW-1:0] gen_addr,
  output logic [N_IN-1:0]         sel,
  output logic                    int_zer
);
  logic [N_IN-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      gen_addr <= '0;
      sel      <= '0;
      int_zer  <= 1'b0;
    end else begin
      cnt     <= cnt + 1'b1;
      sel     <= cnt;
      int_zer <= (cnt == '0);
      for (int k = 0; k < N_IN; k++) gen_addr[k] <= fs_start_addr[k] + RW'(cnt[k]);
    end
  end
endmodule
