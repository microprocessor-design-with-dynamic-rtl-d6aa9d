// tb_datapath: the datapath driven with hand-written control words.
// Ten instructions (ADDI, ADD, SW, LW, C.AND, C.LW, a taken BEQ, C.JAL, JAL)
// are presented one per clock with the control values of the truth table;
// the testbench plays the data memory for the two loads. It checks the ALU
// result and store data of each instruction, the PC after it and the final
// register contents, all worked out by hand.
`timescale 1ns/1ps
module tb_datapath;
  import cpu_pkg::*;
  logic        clk = 0, rst = 0, pc_src, zero;
  ctrl_t       ctrl;
  logic [31:0] instr, read_data, pc, alu_result, write_data;
  int checks = 0, failures = 0;

  datapath dut (.*);

  assign pc_src = ctrl.branch & zero;

  localparam int N = 10;
  logic [31:0] prog [N] = '{32'h00500093, 32'h00700113, 32'h002081b3, 32'h0030a1a3,
                            32'h00802283, 32'h00008d6d, 32'h000040d0, 32'h00210663,
                            32'h00002835, 32'h02c0046f};
  logic [12:0] cw [N] = '{
    {8'b1111_0000, 3'b011, 2'd0},   // ADDI x1,x0,5
    {8'b1111_0000, 3'b011, 2'd0},   // ADDI x2,x0,7
    {8'b1100_0000, 3'b011, 2'd0},   // ADD  x3,x1,x2
    {8'b1001_0100, 3'b011, 2'd0},   // SW   x3,3(x1)
    {8'b1111_0010, 3'b011, 2'd0},   // LW   x5,8(x0)
    {8'b0100_0000, 3'b000, 2'd1},   // C.AND x2,x3
    {8'b0101_0010, 3'b011, 2'd2},   // C.LW x4,4(x1)
    {8'b1000_1000, 3'b100, 2'd0},   // BEQ  x2,x2,+12
    {8'b0100_0001, 3'b011, 2'd3},   // C.JAL 60
    {8'b1100_0001, 3'b011, 2'd0}    // JAL  x8,44
  };
  logic [31:0] rdata   [N] = '{0, 0, 0, 0, 32'hcafe, 0, 32'h77, 0, 0, 0};
  int          exp_alu [N] = '{5, 7, 12, 8, 8, 4, 9, 0, -1, -1};
  int          exp_pc  [N] = '{4, 8, 12, 16, 20, 22, 24, 36, 60, 44};

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    for (int k = 0; k < 32; k++) dut.u_regfile.rf[k] = '0;
    ctrl = '0; instr = '0; read_data = '0;
    #1 rst = 1;
    #1 rst = 0;
    for (int k = 0; k < N; k++) begin
      instr = prog[k]; ctrl = ctrl_t'(cw[k]); read_data = rdata[k];
      #4;
      if (exp_alu[k] >= 0) check(alu_result, 32'(exp_alu[k]), $sformatf("ALU #%0d", k));
      if (k == 3) check(write_data, 32'd12, "store data");
      if (k == 7) check({31'd0, pc_src}, 32'd1, "branch taken");
      #1 clk = 1;
      #1 check(pc, 32'(exp_pc[k]), $sformatf("pc after #%0d", k));
      #4 clk = 0;
    end
    check(dut.u_regfile.rf[1], 32'd38,     "x1 link of C.JAL");
    check(dut.u_regfile.rf[2], 32'd4,      "x2");
    check(dut.u_regfile.rf[3], 32'd12,     "x3");
    check(dut.u_regfile.rf[4], 32'h77,     "x4 from C.LW");
    check(dut.u_regfile.rf[5], 32'hcafe,   "x5 from LW");
    check(dut.u_regfile.rf[8], 32'd64,     "x8 link of JAL");
    check(dut.u_regfile.rf[6], 32'd0,      "x6 untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
