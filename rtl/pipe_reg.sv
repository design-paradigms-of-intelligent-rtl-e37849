// pipe_reg -- a chain of DEPTH registers, WIDTH bits wide.
//
// Used for every register of the DFLC datapath: the component pipeline
// registers (CPR) after each block, the path synchronisation registers (PSR)
// that delay one path so that it meets another, and the chip's input and
// output registers.  Every stage shifts when `en` is high; DEPTH = 0 is a
// plain wire.  Reset is asynchronous and active low and clears all stages
// (the design's choice; the original only states that all registers are
// reset by rst_n).  Latency: DEPTH clock cycles.
module pipe_reg #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else if (en) begin
        stage[0] <= d;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end
endmodule
