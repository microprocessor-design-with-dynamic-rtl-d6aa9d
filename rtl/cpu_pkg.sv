// cpu_pkg: types and constants shared by the single-cycle RV32 core with a
// dynamic clock source and mixed 16/32-bit instructions.
//
// The ALUControl encoding is the one of the eight-operation ALU (000 AND ...
// 111 SRL). Opcodes are the RISC-V base opcodes the core decodes; the
// compressed instructions are identified by the 5-bit key {instr[15:13],
// instr[1:0]} (funct3 and quadrant), which is how the phase decoder keys its
// table. The shift values 2, 6 and 8 set the clock period to (value+1) master
// clock periods. The ctrl_t struct bundles the decoder outputs of the control
// truth table plus the register-destination selector this design adds for the
// compressed formats.
package cpu_pkg;

  typedef enum logic [2:0] {
    ALU_AND = 3'b000,
    ALU_OR  = 3'b001,
    ALU_XOR = 3'b010,
    ALU_ADD = 3'b011,
    ALU_SUB = 3'b100,
    ALU_SLT = 3'b101,
    ALU_SLL = 3'b110,
    ALU_SRL = 3'b111
  } alu_op_t;

  // Base opcodes (instr[6:0]).
  localparam logic [6:0] OP_RTYPE = 7'b0110011;
  localparam logic [6:0] OP_LOAD  = 7'b0000011;
  localparam logic [6:0] OP_STORE = 7'b0100011;
  localparam logic [6:0] OP_BEQ   = 7'b1100011;
  localparam logic [6:0] OP_JAL   = 7'b1101111;
  localparam logic [6:0] OP_ADDI  = 7'b0010011;

  // Compressed keys {funct3, op}.
  localparam logic [4:0] CK_ALU = 5'b10001;  // C.SUB/C.XOR/C.OR/C.AND
  localparam logic [4:0] CK_SW  = 5'b11000;  // C.SW
  localparam logic [4:0] CK_LW  = 5'b01000;  // C.LW
  localparam logic [4:0] CK_JAL = 5'b00101;  // C.JAL

  // Shift values of the phase decoder.
  localparam logic [3:0] SHIFT_SHORT = 4'd2;  // JAL: 3 master periods
  localparam logic [3:0] SHIFT_MID   = 4'd6;  // ALU, store, branch: 7 periods
  localparam logic [3:0] SHIFT_LONG  = 4'd8;  // LW: 9 periods

  // Which register field feeds the write address A3.
  typedef enum logic [1:0] {
    RD_BASE  = 2'b00,  // instr[11:7]
    RD_C_HI  = 2'b01,  // zero-extended instr[9:7]  (rd'/rs1' of CA)
    RD_C_LO  = 2'b10,  // zero-extended instr[4:2]  (rd' of CL)
    RD_RA    = 2'b11   // x1, link register of C.JAL
  } rd_sel_t;

  typedef struct packed {
    logic    comp;       // 1: 32-bit base instruction, 0: 16-bit compressed
    logic    reg_write;
    logic    imm_c;      // base immediate: 1 I-type instr[31:20], 0 S-type
    logic    alu_src;    // 0: RD2, 1: extended immediate
    logic    branch;
    logic    mem_write;
    logic    mem_to_reg;
    logic    jump;
    alu_op_t alu_control;
    rd_sel_t rd_sel;
  } ctrl_t;

endpackage
