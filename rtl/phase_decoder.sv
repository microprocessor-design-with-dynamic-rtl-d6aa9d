// phase_decoder: chooses the length of the next clock period from the
// instruction being executed.
//
// Combinational. A base instruction (instr[1:0] == 2'b11) is classified by its
// 7-bit opcode, a compressed one by op_c = {instr[15:13], instr[1:0]}. Load
// word, the longest path (register read, ALU, data-memory read), gets shift
// value 8; JAL, which barely uses the datapath, gets 2; every other
// instruction, and anything unknown, gets 6. While rst is high the output is
// held at 6 so that the clock runs without a valid instruction. The shift
// value is consumed by phase_shift, which makes a period of shift_value+1
// master clock periods (18, 6 and 14 ns at a 500 MHz master clock).
//
// The table and the reset value follow the published decoder. That listing
// selects the compressed case on the 7-bit opcode although its comparison
// constants are 5-bit op_c keys; here the compressed case is selected on op_c,
// which is what the constants encode.
module phase_decoder
  import cpu_pkg::*;
(
  input  logic [6:0] opcode,       // instr[6:0]
  input  logic [4:0] op_c,         // {instr[15:13], instr[1:0]}
  input  logic       rst,
  output logic [3:0] shift_value
);

  always_comb begin
    if (rst) begin
      shift_value = SHIFT_MID;
    end else if (opcode[1:0] == 2'b11) begin
      unique case (opcode)
        OP_RTYPE: shift_value = SHIFT_MID;
        OP_STORE: shift_value = SHIFT_MID;
        OP_LOAD:  shift_value = SHIFT_LONG;
        OP_ADDI:  shift_value = SHIFT_MID;
        OP_BEQ:   shift_value = SHIFT_MID;
        OP_JAL:   shift_value = SHIFT_SHORT;
        default:  shift_value = SHIFT_MID;
      endcase
    end else begin
      unique case (op_c)
        CK_ALU:  shift_value = SHIFT_MID;
        CK_SW:   shift_value = SHIFT_MID;
        CK_LW:   shift_value = SHIFT_LONG;
        CK_JAL:  shift_value = SHIFT_SHORT;
        default: shift_value = SHIFT_MID;
      endcase
    end
  end

endmodule
