// instruction_mem: read-only instruction store of DEPTH 32-bit words.
//
// Combinational read. The address is a byte address that must be even. At a
// word boundary (addr[1] = 0) instr is the word itself; at a halfword
// boundary (addr[1] = 1) instr is the upper half of that word followed by the
// lower half of the next word, so a 32-bit instruction may start at any
// halfword and 16-bit compressed instructions can be packed. A compressed
// instruction occupies instr[15:0]; the upper half is then ignored. Addresses
// wrap modulo the memory size.
//
// The 64-word size and the combinational word-organised array follow the
// published instruction memory. The published design argues for a byte
// addressable instruction memory so that PC+2 works, while its listing
// indexes whole words only; the halfword-aligned fetch here is this design's
// way of doing what that argument asks for. A program is loaded from
// INIT_FILE (hex, one word per line) when the name is not empty, otherwise by
// writing the array RAM from a testbench.
module instruction_mem #(
  parameter int unsigned DEPTH     = 64,
  parameter string       INIT_FILE = ""
) (
  input  logic [31:0] addr,
  output logic [31:0] instr
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0]   RAM [DEPTH];
  logic [AW-1:0] w, w_next;

  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, RAM);
  end

  assign w      = addr[AW+1:2];
  assign w_next = w + 1'b1;

  assign instr = addr[1] ? {RAM[w_next][15:0], RAM[w][31:16]} : RAM[w];

endmodule
