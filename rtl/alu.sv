// alu: eight-operation arithmetic and logic unit.
//
// Combinational. ALUControl selects AND, OR, XOR, ADD, SUB, SLT, SLL or SRL
// (encoding in cpu_pkg). SLT gives 1 when SrcA < SrcB as unsigned numbers and
// 0 otherwise. Shifts move SrcA by SrcB[4:0] places, filling with zeros. zero
// is 1 only for a subtraction whose operands are equal (BEQ); it is 0 for all
// other operations. Operations, encoding and the zero rule follow the
// published ALU, including its unsigned comparison.
module alu
  import cpu_pkg::*;
(
  input  logic [31:0] SrcA, SrcB,
  input  alu_op_t     ALUControl,
  output logic [31:0] ALU_out,
  output logic        zero
);

  always_comb begin
    zero = 1'b0;
    unique case (ALUControl)
      ALU_AND: ALU_out = SrcA & SrcB;
      ALU_OR:  ALU_out = SrcA | SrcB;
      ALU_XOR: ALU_out = SrcA ^ SrcB;
      ALU_ADD: ALU_out = SrcA + SrcB;
      ALU_SUB: begin
        ALU_out = SrcA - SrcB;
        zero    = (SrcA == SrcB);
      end
      ALU_SLT: ALU_out = (SrcA < SrcB) ? 32'd1 : 32'd0;
      ALU_SLL: ALU_out = SrcA << SrcB[4:0];
      ALU_SRL: ALU_out = SrcA >> SrcB[4:0];
      default: ALU_out = '0;
    endcase
  end

endmodule
