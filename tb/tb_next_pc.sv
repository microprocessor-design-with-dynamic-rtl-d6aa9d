// tb_next_pc: PC sequencing.
// Checks asynchronous reset to 0, PC+4 and PC+2 steps (and the matching
// link value), a taken branch to PC+offset and a jump to an absolute target
// that wins over a simultaneous branch.
`timescale 1ns/1ps
module tb_next_pc;
  logic        clk = 0, rst = 0, comp = 1, pc_src = 0, jump = 0;
  logic [31:0] branch_off = 0, jump_target = 0, pc, pc_plus;
  int checks = 0, failures = 0;

  next_pc dut (.*);

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %0d exp %0d", what, got, exp); end
  endtask

  task automatic tick();
    #5 clk = 1; #5 clk = 0;
  endtask

  initial begin
    #1 rst = 1;
    #1 check(pc, 0, "reset without clock");
    rst = 0;
    comp = 1; #1 check(pc_plus, 4, "pc_plus base");
    tick(); check(pc, 4, "+4");
    comp = 0; #1 check(pc_plus, 6, "pc_plus compressed");
    tick(); check(pc, 6, "+2");
    tick(); check(pc, 8, "+2 again");
    comp = 1; pc_src = 1; branch_off = 32'd20;
    tick(); check(pc, 28, "branch +20");
    branch_off = 32'hfffffff4;
    tick(); check(pc, 16, "branch -12");
    jump = 1; jump_target = 32'd44;
    tick(); check(pc, 44, "jump wins over branch");
    pc_src = 0; jump_target = 32'd100; comp = 0;
    tick(); check(pc, 100, "compressed jump");
    jump = 0;
    tick(); check(pc, 102, "+2 after jump");
    #2 rst = 1; #1 check(pc, 0, "asynchronous reset");
    rst = 0;
    for (int n = 0; n < 50; n++) begin
      logic [31:0] pc_old;
      pc_old = pc;
      comp = 1'($urandom); pc_src = 1'($urandom); jump = 1'($urandom);
      branch_off = {$urandom} & 32'hfffffffe; jump_target = $urandom;
      #1;
      tick();
      check(pc, jump ? jump_target : pc_src ? pc_old + branch_off : pc_old + (comp ? 4 : 2),
            "random step");
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
