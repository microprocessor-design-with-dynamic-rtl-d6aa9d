// next_pc: program counter register and next-address logic.
//
// The PC register loads pc_next on the rising edge of the processor clock and
// is cleared to 0 by rst (asynchronous, because the processor clock is held
// high while the clock source is in reset). pc_plus is PC+4 for a 32-bit
// instruction and PC+2 for a compressed one (comp = 0); it is also the link
// value JAL writes back. A taken branch (pc_src) goes to PC + branch_off; a
// jump goes to jump_target and has priority over the branch. The two adders
// and the cascade of PC-source multiplexers follow the published next-PC
// block; the order of the two multiplexers and the asynchronous reset are
// this design's choices.
module next_pc (
  input  logic        clk,
  input  logic        rst,
  input  logic        comp,         // 1: base (+4), 0: compressed (+2)
  input  logic        pc_src,       // taken branch
  input  logic        jump,
  input  logic [31:0] branch_off,
  input  logic [31:0] jump_target,
  output logic [31:0] pc,
  output logic [31:0] pc_plus
);

  logic [31:0] pc_plus2, pc_plus4, pc_branch, pc_next;

  assign pc_plus2  = pc + 32'd2;
  assign pc_plus4  = pc + 32'd4;
  assign pc_plus   = comp ? pc_plus4 : pc_plus2;
  assign pc_branch = pc + branch_off;

  always_comb begin
    if (jump)        pc_next = jump_target;
    else if (pc_src) pc_next = pc_branch;
    else             pc_next = pc_plus;
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) pc <= '0;
    else     pc <= pc_next;
  end

endmodule
