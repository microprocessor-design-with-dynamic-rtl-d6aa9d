// datapath: the execution hardware of the single-cycle core.
//
// It joins three sub-blocks. The next-PC block holds the PC and computes the
// next address. The register-file block is the 32 x 32 register file with a
// multiplexer in front of each address input: for base instructions A1, A2
// and A3 come from instr[19:15], instr[24:20] and instr[11:7]; for compressed
// instructions from the 3-bit fields instr[9:7] and instr[4:2], zero-extended
// to 5 bits (so they name x0..x7). The write-back multiplexer selects the link
// address for jumps, the data-memory word for loads and the ALU result
// otherwise. The ALU block is the ALU with the SrcB multiplexer choosing RD2
// or the extended immediate.
//
// Everything is combinational between two rising edges of clk except the PC
// and the register file, which update on that edge. alu_result is the data
// memory address (dataaddr) and write_data (RD2) its write data.
//
// The structure follows the published datapath. The compressed destination
// register follows the RISC-V compressed formats (rd_sel from the decoder):
// instr[9:7] for C.AND/C.OR/C.XOR/C.SUB, instr[4:2] for C.LW and x1 for C.JAL;
// this selection is this design's addition.
module datapath
  import cpu_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  ctrl_t       ctrl,
  input  logic        pc_src,
  input  logic [31:0] instr,
  input  logic [31:0] read_data,   // data-memory read data
  output logic [31:0] pc,
  output logic [31:0] alu_result,  // dataaddr
  output logic [31:0] write_data,
  output logic        zero
);

  logic [31:0] imm_ext, branch_off, jump_target, pc_plus;
  logic [31:0] rd1, rd2, src_b, result;
  logic [4:0]  a1, a2, a3;

  next_pc u_next_pc (
    .clk         (clk),
    .rst         (rst),
    .comp        (ctrl.comp),
    .pc_src      (pc_src),
    .jump        (ctrl.jump),
    .branch_off  (branch_off),
    .jump_target (jump_target),
    .pc          (pc),
    .pc_plus     (pc_plus)
  );

  extend u_extend (
    .instr       (instr),
    .comp        (ctrl.comp),
    .imm_c       (ctrl.imm_c),
    .imm_ext     (imm_ext),
    .branch_off  (branch_off),
    .jump_target (jump_target)
  );

  // Register address multiplexers with zero extension of compressed fields.
  assign a1 = ctrl.comp ? instr[19:15] : {2'b00, instr[9:7]};
  assign a2 = ctrl.comp ? instr[24:20] : {2'b00, instr[4:2]};

  always_comb begin
    unique case (ctrl.rd_sel)
      RD_BASE: a3 = instr[11:7];
      RD_C_HI: a3 = {2'b00, instr[9:7]};
      RD_C_LO: a3 = {2'b00, instr[4:2]};
      RD_RA:   a3 = 5'd1;
    endcase
  end

  always_comb begin
    if (ctrl.jump)            result = pc_plus;
    else if (ctrl.mem_to_reg) result = read_data;
    else                      result = alu_result;
  end

  regfile u_regfile (
    .clk (clk),
    .WE3 (ctrl.reg_write),
    .A1  (a1),
    .A2  (a2),
    .A3  (a3),
    .WD3 (result),
    .RD1 (rd1),
    .RD2 (rd2)
  );

  assign src_b = ctrl.alu_src ? imm_ext : rd2;

  alu u_alu (
    .SrcA       (rd1),
    .SrcB       (src_b),
    .ALUControl (ctrl.alu_control),
    .ALU_out    (alu_result),
    .zero       (zero)
  );

  assign write_data = rd2;

endmodule
