// controller: the decoder plus the AND gate that takes a conditional branch.
//
// Combinational. pc_src = branch & zero: a BEQ is taken when the ALU's
// subtraction of the two source registers gives zero. All other control
// signals pass from the decoder to the datapath and data memory; mem_write
// goes to the data memory. The split into decoder and AND gate follows the
// published controller.
module controller
  import cpu_pkg::*;
(
  input  logic [31:0] instr,
  input  logic        zero,      // ALU zero flag
  output ctrl_t       ctrl,
  output logic        pc_src     // 1: take the branch target
);

  decoder u_decoder (
    .instr (instr),
    .ctrl  (ctrl)
  );

  assign pc_src = ctrl.branch & zero;

endmodule
