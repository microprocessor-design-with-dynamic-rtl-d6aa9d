// tb_extend: immediate formats.
// Directed vectors come from hand-assembled instructions with known
// immediates (positive and negative I, S, B and J immediates, the largest
// C.LW offset, C.JAL targets); random vectors check the I-type and S-type
// sign extension against arithmetic shifts of the instruction word.
`timescale 1ns/1ps
module tb_extend;
  logic [31:0] instr, imm_ext, branch_off, jump_target;
  logic        comp, imm_c;
  int checks = 0, failures = 0;

  extend dut (.*);

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    comp = 1; imm_c = 1;
    instr = 32'h00500093; #1 check(imm_ext, 32'd5, "ADDI 5");
    instr = 32'h80000093; #1 check(imm_ext, 32'hfffff800, "ADDI -2048");
    imm_c = 0;
    instr = 32'hfe112ea3; #1 check(imm_ext, 32'hfffffffd, "SW -3");
    instr = 32'h00402023; #1 check(imm_ext, 32'd0, "SW 0");
    instr = 32'hfe110ce3; #1 check(branch_off, 32'hfffffff8, "BEQ -8");
    instr = 32'h00520463; #1 check(branch_off, 32'd8, "BEQ +8");
    instr = 32'h02c0046f; #1 check(jump_target, 32'd44, "JAL 44");
    instr = 32'hffdff06f; #1 check(jump_target, 32'hfffffffc, "JAL -4");
    comp = 0;
    instr = 32'h00005df0; #1 check(imm_ext, 32'd124, "C.LW 124");
    instr = 32'h00004054; #1 check(imm_ext, 32'd4, "C.LW 4");
    instr = 32'h00002ffd; #1 check(jump_target, 32'd2046, "C.JAL 2046");
    instr = 32'h00002835; #1 check(jump_target, 32'd60, "C.JAL 60");
    comp = 1;
    for (int n = 0; n < 300; n++) begin
      instr = $urandom;
      imm_c = 1; #1 check(imm_ext, 32'($signed(instr) >>> 20), "random I");
      imm_c = 0; #1 check(imm_ext, (32'($signed(instr) >>> 25) << 5) | 32'(instr[11:7]), "random S");
    end
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
