// regfile: 32 x 32-bit register file with two read ports and one write port.
//
// Reads are combinational: RD1 = x[A1], RD2 = x[A2], and register 0 always
// reads as 0. A write of WD3 into x[A3] happens on the rising edge of clk when
// WE3 is 1. A write to register 0 is stored but never read. This follows the
// published register file; the 6 ns read delay used there to model the
// hardware in simulation is left out, since it is not synthesizable, and the
// clock periods that cover it are set by the phase decoder. The registers are
// not reset (as published); software initialises them before use.
module regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     WE3,
  input  logic [$clog2(NREGS)-1:0] A1, A2, A3,
  input  logic [WIDTH-1:0]         WD3,
  output logic [WIDTH-1:0]         RD1, RD2
);

  logic [WIDTH-1:0] rf [NREGS];

  always_ff @(posedge clk) begin
    if (WE3) rf[A3] <= WD3;
  end

  assign RD1 = (A1 != '0) ? rf[A1] : '0;
  assign RD2 = (A2 != '0) ? rf[A2] : '0;

endmodule
