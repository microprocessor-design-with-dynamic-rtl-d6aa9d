// dynamic_clock_source: the per-instruction clock generator.
//
// The phase decoder turns the instruction currently presented by the
// instruction memory into a shift value; the phase shifter divides the master
// clock CLK by shift_value+1 to make the processor clock clk. Since the
// instruction changes right after a rising edge of clk, each instruction gets
// a period matched to its own critical path: 6, 14 or 18 ns with a 500 MHz
// master clock. Both parts follow the published design; the wrapper itself is
// only their connection.
module dynamic_clock_source (
  input  logic        CLK,          // master clock
  input  logic        rst,
  input  logic [31:0] instr,        // instruction being executed
  output logic [3:0]  shift_value,
  output logic        clk           // processor clock
);

  phase_decoder u_phase_decoder (
    .opcode      (instr[6:0]),
    .op_c        ({instr[15:13], instr[1:0]}),
    .rst         (rst),
    .shift_value (shift_value)
  );

  phase_shift u_phase_shift (
    .CLK         (CLK),
    .rst         (rst),
    .shift_value (shift_value),
    .clk         (clk)
  );

endmodule
