// ars_p -- active rule selection.
//
// With at most two overlapping membership functions per input, an input value
// x lies in one overlap region r (0 .. N_MF-2) and only MFs r and r+1 can be
// non-zero.  This block finds r for every input in parallel by comparing x
// against the left edges L_1 .. L_{N_MF-2} of the regions: r is the number of
// left edges that x has reached.  The region indices ("fuzzy set start
// addresses") select the MF parameters and seed the rule address generator,
// so that only the 2^N_IN active rules are visited instead of the whole rule
// base.  Purely combinational; input k occupies slice k of both ports.
module ars_p
  import dflc_pkg::*;
#(
  parameter int N_IN = dflc_pkg::DEF_N_IN,
  parameter int IN_W = dflc_pkg::DEF_IN_W,
  parameter int N_MF = dflc_pkg::DEF_N_MF,
  localparam int RW  = clog2m1(N_MF)
) (
  input  logic [N_IN-1:0][IN_W-1:0] ip_data,
  output logic [N_IN-1:0][RW-1:0]   fs_start_addr
);
  always_comb begin
    for (int k = 0; k < N_IN; k++) begin
      fs_start_addr[k] = '0;
      for (int j = 1; j <= N_MF - 2; j++) begin
        if (int'(ip_data[k]) >= mf_left(N_MF, IN_W, k, j)) fs_start_addr[k] = RW'(j);
      end
    end
  end
endmodule
