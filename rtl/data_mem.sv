// data_mem: word-aligned data memory of DEPTH 32-bit words.
//
// Read is combinational: rd = RAM[a[AW+1:2]]. A write of wd happens on the
// rising edge of clk when we is 1. The two low address bits are ignored
// (word access only, as LW and SW are the only memory instructions) and the
// address wraps modulo the memory size. The word organisation and the write
// on the clock edge follow the published data memory; its 4 ns simulated
// read delay is left out (it is covered by the long LW clock period) and the
// size of 64 words, equal to the instruction memory, is this design's choice.
// The memory is not reset.
module data_mem #(
  parameter int unsigned DEPTH = 64
) (
  input  logic        clk,
  input  logic        we,
  input  logic [31:0] a,
  input  logic [31:0] wd,
  output logic [31:0] rd
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0] RAM [DEPTH];

  always_ff @(posedge clk) begin
    if (we) RAM[a[AW+1:2]] <= wd;
  end

  assign rd = RAM[a[AW+1:2]];

endmodule
