// cons_map_p -- consequent address mapping.
//
// Converts the MF indices (d_0 .. d_{N_IN-1}) of a rule into the linear
// address of its singleton in the rule base, sum_k d_k * N_MF^k (input 0 is
// the least significant digit).  With the default sizes the address runs
// from 0 to 2400 and is 12 bits wide.  Combinational.
module cons_map_p
  import dflc_pkg::*;
#(
  parameter int N_IN = dflc_pkg::DEF_N_IN,
  parameter int N_MF = dflc_pkg::DEF_N_MF,
  localparam int RW  = clog2m1(N_MF),
  localparam int AW  = clog2m1(n_rules(N_MF, N_IN))
) (
  input  logic [N_IN-1:0][RW-1:0] addr_in,
  output logic [AW-1:0]           addr_out
);
  always_comb begin
    int acc;
    acc = 0;
    for (int k = N_IN - 1; k >= 0; k--) acc = acc * N_MF + int'(addr_in[k]);
    addr_out = AW'(acc);
  end
endmodule
