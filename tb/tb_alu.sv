// tb_alu: every operation on directed and random operands.
// Expected results are computed here from the operation definitions; zero
// must be 1 only for a subtraction of equal operands.
`timescale 1ns/1ps
module tb_alu;
  import cpu_pkg::*;
  logic [31:0] SrcA, SrcB, ALU_out;
  alu_op_t     ALUControl;
  logic        zero;
  int checks = 0, failures = 0;

  alu dut (.*);

  task automatic one(input logic [31:0] a, input logic [31:0] b, input logic [2:0] op);
    logic [31:0] r;
    logic        z;
    SrcA = a; SrcB = b; ALUControl = alu_op_t'(op);
    #1;
    z = 1'b0;
    case (op)
      3'd0: r = a & b;
      3'd1: r = a | b;
      3'd2: r = a ^ b;
      3'd3: r = a + b;
      3'd4: begin r = a - b; z = (a == b); end
      3'd5: r = (a < b) ? 1 : 0;
      3'd6: r = a << b[4:0];
      3'd7: r = a >> b[4:0];
    endcase
    checks += 2;
    if (ALU_out !== r) begin failures++; $display("FAIL op%0d %h %h -> %h exp %h", op, a, b, ALU_out, r); end
    if (zero !== z)    begin failures++; $display("FAIL zero op%0d %h %h", op, a, b); end
  endtask

  initial begin
    for (int op = 0; op < 8; op++) begin
      one(32'd7, 32'd12, 3'(op));
      one(32'd5, 32'd5, 3'(op));
      one(32'hffff_fff0, 32'd4, 3'(op));
      one(32'd4, 32'hffff_fff0, 3'(op));
      one(32'h8000_0001, 32'd33, 3'(op));
      for (int n = 0; n < 200; n++) one($urandom, $urandom, 3'(op));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
