// decoder: main decoder and ALU decoder of the controller.
//
// Combinational. It first looks at instr[1:0]: when both bits are 1 the
// instruction is a 32-bit base instruction and comp is 1, otherwise it is a
// 16-bit compressed instruction and comp is 0. Base instructions are decoded
// from the 7-bit opcode (and funct3/funct7 for R-type, ADDI), compressed ones
// from {funct3, op} = {instr[15:13], instr[1:0]} and, for the register-register
// group, funct2 = instr[6:5].
//
// Supported: ADD SUB SLL SLT XOR SRL OR AND, LW, SW, ADDI, BEQ, JAL (13 base)
// and C.SUB C.XOR C.OR C.AND, C.LW, C.SW, C.JAL (7 compressed). Every other
// encoding decodes to a no-operation: no register or memory write, no
// branch or jump.
//
// The control levels follow the published truth table except in two cells
// that contradict the stated meaning of the signals and the published test
// results: LW has MemtoReg = 1 (the loaded word is written back) and ADDI has
// ALUSrc = 1 (the immediate is the second ALU operand). Don't-care cells are
// driven to 0. SLT uses the ALU's unsigned comparison. rd_sel, which picks the
// compressed destination register field, is this design's addition.
module decoder
  import cpu_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;
  logic [4:0] op_c;
  logic [1:0] funct2_c;

  assign opcode   = instr[6:0];
  assign funct3   = instr[14:12];
  assign funct7   = instr[31:25];
  assign op_c     = {instr[15:13], instr[1:0]};
  assign funct2_c = instr[6:5];

  function automatic alu_op_t rtype_op(input logic [2:0] f3, input logic [6:0] f7);
    unique case (f3)
      3'b000:  return f7[5] ? ALU_SUB : ALU_ADD;
      3'b001:  return ALU_SLL;
      3'b010:  return ALU_SLT;
      3'b100:  return ALU_XOR;
      3'b101:  return ALU_SRL;
      3'b110:  return ALU_OR;
      3'b111:  return ALU_AND;
      default: return ALU_ADD;   // 3'b011 (SLTU) is not supported
    endcase
  endfunction

  always_comb begin
    ctrl             = '0;
    ctrl.alu_control = ALU_ADD;
    ctrl.rd_sel      = RD_BASE;
    ctrl.comp        = (instr[1:0] == 2'b11);

    if (ctrl.comp) begin
      unique case (opcode)
        OP_RTYPE: begin
          ctrl.reg_write   = 1'b1;
          ctrl.alu_control = rtype_op(funct3, funct7);
        end
        OP_LOAD: begin
          ctrl.imm_c      = 1'b1;
          ctrl.reg_write  = 1'b1;
          ctrl.alu_src    = 1'b1;
          ctrl.mem_to_reg = 1'b1;
        end
        OP_STORE: begin
          ctrl.alu_src   = 1'b1;
          ctrl.mem_write = 1'b1;
        end
        OP_BEQ: begin
          if (funct3 == 3'b000) begin
            ctrl.branch      = 1'b1;
            ctrl.alu_control = ALU_SUB;
          end
        end
        OP_JAL: begin
          ctrl.reg_write = 1'b1;
          ctrl.jump      = 1'b1;
        end
        OP_ADDI: begin
          if (funct3 == 3'b000) begin
            ctrl.imm_c     = 1'b1;
            ctrl.reg_write = 1'b1;
            ctrl.alu_src   = 1'b1;
          end
        end
        default: ;
      endcase
    end else begin
      ctrl.rd_sel = RD_C_HI;
      unique case (op_c)
        CK_ALU: begin
          if (instr[12:10] == 3'b011) begin
            ctrl.reg_write = 1'b1;
            unique case (funct2_c)
              2'b00: ctrl.alu_control = ALU_SUB;
              2'b01: ctrl.alu_control = ALU_XOR;
              2'b10: ctrl.alu_control = ALU_OR;
              2'b11: ctrl.alu_control = ALU_AND;
            endcase
          end
        end
        CK_LW: begin
          ctrl.reg_write  = 1'b1;
          ctrl.alu_src    = 1'b1;
          ctrl.mem_to_reg = 1'b1;
          ctrl.rd_sel     = RD_C_LO;
        end
        CK_SW: begin
          ctrl.alu_src   = 1'b1;
          ctrl.mem_write = 1'b1;
        end
        CK_JAL: begin
          ctrl.reg_write = 1'b1;
          ctrl.jump      = 1'b1;
          ctrl.rd_sel    = RD_RA;
        end
        default: ;
      endcase
    end
  end

endmodule
