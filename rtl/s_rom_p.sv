// s_rom_p -- singleton (rule consequent) ROM.
//
// One signed SING_W-bit singleton per rule of the complete rule base
// (N_MF^N_IN entries, 2401 by default).  The table is computed at
// elaboration from dflc_pkg::singleton, so a different controller is loaded
// by changing that function.  Combinational read; the register after the
// ROM belongs to the surrounding pipeline.  Addresses beyond the rule base
// read 0.
module s_rom_p
  import dflc_pkg::*;
#(
  parameter int N_IN   = dflc_pkg::DEF_N_IN,
  parameter int N_MF   = dflc_pkg::DEF_N_MF,
  parameter int SING_W = dflc_pkg::DEF_SING_W,
  localparam int NR    = n_rules(N_MF, N_IN),
  localparam int AW    = clog2m1(NR)
) (
  input  logic [AW-1:0]            addr,
  output logic signed [SING_W-1:0] data
);
  typedef logic signed [SING_W-1:0] rom_t [NR];

  function automatic rom_t build();
    rom_t t;
    for (int i = 0; i < NR; i++) t[i] = SING_W'(singleton(N_MF, N_IN, i));
    return t;
  endfunction

  localparam rom_t ROM = build();

  assign data = (int'(addr) < NR) ? ROM[addr] : '0;
endmodule
