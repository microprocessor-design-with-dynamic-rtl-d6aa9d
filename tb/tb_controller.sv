// tb_controller: the branch AND gate and the decoder behind it.
// pc_src must be 1 only for BEQ with the ALU zero flag set.
`timescale 1ns/1ps
module tb_controller;
  import cpu_pkg::*;
  logic [31:0] instr;
  logic        zero, pc_src;
  ctrl_t       ctrl;
  int checks = 0, failures = 0;

  controller dut (.*);

  task automatic one(input logic [31:0] i, input logic z, input logic exp_src,
                     input logic exp_branch, input logic exp_we);
    instr = i; zero = z;
    #1;
    checks += 3;
    if (pc_src !== exp_src)         begin failures++; $display("FAIL pc_src %h z=%0d", i, z); end
    if (ctrl.branch !== exp_branch) begin failures++; $display("FAIL branch %h", i); end
    if (ctrl.reg_write !== exp_we)  begin failures++; $display("FAIL reg_write %h", i); end
  endtask

  initial begin
    one(32'h00520463, 1'b1, 1'b1, 1'b1, 1'b0);   // BEQ, equal
    one(32'h00520463, 1'b0, 1'b0, 1'b1, 1'b0);   // BEQ, not equal
    one(32'hfe110ce3, 1'b1, 1'b1, 1'b1, 1'b0);   // BEQ backwards, equal
    one(32'h40410333, 1'b1, 1'b0, 1'b0, 1'b1);   // SUB with zero result
    one(32'h002081b3, 1'b1, 1'b0, 1'b0, 1'b1);   // ADD
    one(32'h02c0046f, 1'b1, 1'b0, 1'b0, 1'b1);   // JAL
    one(32'h00008d1d, 1'b1, 1'b0, 1'b0, 1'b1);   // C.SUB with zero result
    one(32'h00402023, 1'b0, 1'b0, 1'b0, 1'b0);   // SW
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
