// mf_rom_p -- membership function parameter ROM.
//
// For every input k and its overlap region addr[k] it returns a 40-bit word
// {L (12 bits), R (12 bits), slope (16 bits)}: the left and right edge of the
// region and the slope with which the first MF falls across it (see
// dflc_pkg for the encoding and the built-in MF set).  Input k's word is
// slice k of `data`; 4 inputs give the 160-bit bus of the default core.
// Combinational.
module mf_rom_p
  import dflc_pkg::*;
#(
  parameter int N_IN = dflc_pkg::DEF_N_IN,
  parameter int IN_W = dflc_pkg::DEF_IN_W,
  parameter int N_MF = dflc_pkg::DEF_N_MF,
  localparam int RW  = clog2m1(N_MF),
  localparam int PW  = 2 * IN_W + SLOPE_W
) (
  input  logic [N_IN-1:0][RW-1:0] addr,
  output logic [N_IN-1:0][PW-1:0] data
);
  always_comb begin
    for (int k = 0; k < N_IN; k++) begin
      data[k] = '0;
      for (int r = 0; r < N_MF - 1; r++) begin
        if (int'(addr[k]) == r)
          data[k] = {IN_W'(mf_left(N_MF, IN_W, k, r)),
                     IN_W'(mf_right(N_MF, IN_W, k, r)),
                     SLOPE_W'(mf_slope(N_MF, IN_W, k, r))};
      end
    end
  end
endmodule
