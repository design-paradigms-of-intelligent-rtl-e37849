// control_logic_p -- input/output sequencing of the DFLC chip.
//
// The core needs N_ACT = 2^N_IN clocks per input set (one per active rule).
// A free-running modulo-N_ACT counter, reset with the core, raises `load`
// in the last cycle of every rule period: the input register R1 takes the
// next input set on that edge and the core's rule counter starts the new set
// in the following cycle.  `load` is also the ready_in strobe that tells the
// data source the set on the inputs has been taken.
//
// A LATENCY-deep shift register follows each load; when it comes out
// (`r2_load`) the result of that set is at the core output and R2 takes it.
// ready_out is high for the one cycle after R2 has been loaded.  LATENCY is
// counted from the R1 edge to the R2 edge (16 + 11 = 27 clocks by default).
// Assertions state the strobe rules.  Pulse strobes are the design's choice for the handshake; the original only
// names ready_in and ready_out.
module control_logic_p #(
  parameter int N_ACT   = 16,
  parameter int LATENCY = 27
) (
  input  logic clk,
  input  logic rst_n,
  output logic load,
  output logic r2_load,
  output logic ready_in,
  output logic ready_out
);
  localparam int CW = $clog2(N_ACT);

  logic [CW-1:0]      cnt;
  logic [LATENCY-1:0] sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      sh        <= '0;
      ready_out <= 1'b0;
    end else begin
      cnt       <= (int'(cnt) == N_ACT - 1) ? '0 : cnt + 1'b1;
      sh        <= {sh[LATENCY-2:0], load};
      ready_out <= r2_load;
    end
  end

  assign load     = (int'(cnt) == N_ACT - 1);
  assign ready_in = load;
  assign r2_load  = sh[LATENCY-1];

  // handshake rules: strobes last one clock, ready_out follows each R2 load
  a_load_single: assert property (@(posedge clk) disable iff (!rst_n) load |=> !load);
  a_ready_out:   assert property (@(posedge clk) disable iff (!rst_n) r2_load |=> ready_out);
  a_out_single:  assert property (@(posedge clk) disable iff (!rst_n) ready_out |=> !ready_out);
endmodule
