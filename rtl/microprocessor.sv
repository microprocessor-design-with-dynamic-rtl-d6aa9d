// microprocessor: single-cycle RV32 subset core with a dynamic clock source
// and mixed 32/16-bit instructions.
//
// The master clock CLK (500 MHz in the published design) drives only the
// dynamic clock source. Its phase decoder looks at the instruction the
// instruction memory presents at the current PC and its phase shifter turns
// CLK into the processor clock clk whose period is 3, 7 or 9 master periods
// (6, 14 or 18 ns): short for JAL, long for LW, medium for everything else.
// The processor, the PC, the register file and the data memory all run on
// clk, so each instruction completes in a period sized for its own path.
//
// rst is synchronous to CLK for the clock source and clears the PC
// asynchronously; hold it for at least two CLK periods. Execution starts at
// address 0 after rst falls. Outputs are for observation: the generated
// clock, the current shift value, PC, instruction, the ALU result (data
// address) and the data-memory write port.
//
// The partition (clock source, processor, two memories) and the connections
// follow the published top level and block diagram. The memory sizes are
// parameters: 64 instruction words as published, 64 data words chosen here.
// rst is deliberately used synchronously (clock-source counter) and
// asynchronously (PC), because the processor clock does not toggle while the
// clock source is held in reset; lint reports this mixed use.
module microprocessor #(
  parameter int unsigned IMEM_WORDS = 64,
  parameter int unsigned DMEM_WORDS = 64,
  parameter string       IMEM_INIT  = ""
) (
  input  logic        CLK,          // master clock
  input  logic        rst,
  output logic        clk,          // dynamic processor clock
  output logic [3:0]  shift_value,
  output logic [31:0] pc,
  output logic [31:0] instr,
  output logic [31:0] dataaddr,
  output logic [31:0] write_data,
  output logic        mem_write
);

  logic [31:0] read_data;

  dynamic_clock_source u_clock (
    .CLK         (CLK),
    .rst         (rst),
    .instr       (instr),
    .shift_value (shift_value),
    .clk         (clk)
  );

  processor u_processor (
    .clk        (clk),
    .rst        (rst),
    .instr      (instr),
    .read_data  (read_data),
    .pc         (pc),
    .dataaddr   (dataaddr),
    .write_data (write_data),
    .mem_write  (mem_write)
  );

  instruction_mem #(
    .DEPTH     (IMEM_WORDS),
    .INIT_FILE (IMEM_INIT)
  ) u_imem (
    .addr  (pc),
    .instr (instr)
  );

  data_mem #(
    .DEPTH (DMEM_WORDS)
  ) u_dmem (
    .clk (clk),
    .we  (mem_write),
    .a   (dataaddr),
    .wd  (write_data),
    .rd  (read_data)
  );

endmodule
