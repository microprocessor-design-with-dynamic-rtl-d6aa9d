// extend: the immediate extension units of the datapath.
//
// Combinational. From the instruction it builds three values:
//  * imm_ext, the second ALU operand for loads, stores and ADDI. Base
//    instructions sign-extend either the I-type field instr[31:20]
//    (imm_c = 1) or the S-type field {instr[31:25], instr[11:7]} (imm_c = 0).
//    Compressed C.LW/C.SW zero-extend their word offset
//    {instr[5], instr[12:10], instr[6], 2'b00}.
//  * branch_off, the BEQ offset: the B-type field {instr[31], instr[7],
//    instr[30:25], instr[11:8]} sign-extended and shifted left by 1.
//  * jump_target, the JAL destination. Base: the J-type field {instr[31],
//    instr[19:12], instr[20], instr[30:21]} shifted left by 1 and
//    sign-extended. Compressed C.JAL: the C.J field of instr[12:2]
//    (imm[11|4|9:8|10|6|7|3:1|5]) zero-extended and shifted left by 1.
// comp (1 = base instruction) picks the base or the compressed value.
//
// As in the published datapath the jump destination is the extended
// immediate itself, not PC plus the immediate: the published test program's
// JAL at address 36 encodes 44 and lands on 44. Zero extension of the
// compressed fields, the shift by 1 and the reordering of bits follow the
// published description; the exact field layouts are those of the RISC-V
// base and compressed formats.
module extend (
  input  logic [31:0] instr,
  input  logic        comp,         // 1: base, 0: compressed
  input  logic        imm_c,        // base immediate: 1 I-type, 0 S-type
  output logic [31:0] imm_ext,
  output logic [31:0] branch_off,
  output logic [31:0] jump_target
);

  logic [11:0] imm_i, imm_s, imm_b;
  logic [19:0] imm_j;
  logic [10:0] imm_cj;
  logic [6:0]  imm_cls;

  assign imm_i   = instr[31:20];
  assign imm_s   = {instr[31:25], instr[11:7]};
  assign imm_b   = {instr[31], instr[7], instr[30:25], instr[11:8]};
  assign imm_j   = {instr[31], instr[19:12], instr[20], instr[30:21]};
  assign imm_cj  = {instr[12], instr[8], instr[10:9], instr[6], instr[7],
                    instr[2], instr[11], instr[5:3]};
  assign imm_cls = {instr[5], instr[12:10], instr[6], 2'b00};

  always_comb begin
    if (comp) imm_ext = imm_c ? {{20{imm_i[11]}}, imm_i} : {{20{imm_s[11]}}, imm_s};
    else      imm_ext = {25'b0, imm_cls};
  end

  assign branch_off = {{19{imm_b[11]}}, imm_b, 1'b0};

  always_comb begin
    if (comp) jump_target = {{11{imm_j[19]}}, imm_j, 1'b0};
    else      jump_target = {20'b0, imm_cj, 1'b0};
  end

endmodule
