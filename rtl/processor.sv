// processor: controller and datapath of the single-cycle core.
//
// The controller decodes the instruction from the instruction memory and
// drives the datapath; the datapath returns the ALU zero flag for BEQ. Toward
// the memories the processor presents the instruction address pc, the data
// address (the ALU result), the write data and the write enable, and takes the
// instruction and the data-memory read word. One instruction completes per
// period of clk; the PC, the register file and the data memory all update on
// its rising edge. This partition follows the published design.
module processor
  import cpu_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] instr,
  input  logic [31:0] read_data,
  output logic [31:0] pc,
  output logic [31:0] dataaddr,
  output logic [31:0] write_data,
  output logic        mem_write
);

  ctrl_t ctrl;
  logic  zero, pc_src;

  controller u_controller (
    .instr  (instr),
    .zero   (zero),
    .ctrl   (ctrl),
    .pc_src (pc_src)
  );

  datapath u_datapath (
    .clk        (clk),
    .rst        (rst),
    .ctrl       (ctrl),
    .pc_src     (pc_src),
    .instr      (instr),
    .read_data  (read_data),
    .pc         (pc),
    .alu_result (dataaddr),
    .write_data (write_data),
    .zero       (zero)
  );

  assign mem_write = ctrl.mem_write;

endmodule
