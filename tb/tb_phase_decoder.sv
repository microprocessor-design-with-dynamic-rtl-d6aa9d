// tb_phase_decoder: exhaustive check of the shift-value table.
// Every 7-bit opcode and every 5-bit compressed key is applied with rst low,
// and a sample with rst high; the expected value comes from the published
// table (8 for loads, 2 for jumps, 6 for everything else and under reset).
`timescale 1ns/1ps
module tb_phase_decoder;
  logic [6:0] opcode;
  logic [4:0] op_c;
  logic       rst;
  logic [3:0] shift_value;
  int checks = 0, failures = 0;

  phase_decoder dut (.*);

  function automatic logic [3:0] expected(input logic [6:0] op, input logic [4:0] k, input logic r);
    if (r) return 4'd6;
    if (op[1:0] == 2'b11) begin
      if (op == 7'h03) return 4'd8;
      if (op == 7'h6f) return 4'd2;
      return 4'd6;
    end
    if (k == 5'h08) return 4'd8;
    if (k == 5'h05) return 4'd2;
    return 4'd6;
  endfunction

  initial begin
    for (int r = 0; r < 2; r++)
      for (int o = 0; o < 128; o++)
        for (int k = 0; k < 32; k += (r ? 7 : 1)) begin
          opcode = 7'(o); op_c = 5'(k); rst = 1'(r);
          #1;
          checks++;
          if (shift_value !== expected(opcode, op_c, rst)) begin
            failures++;
            if (failures < 10)
              $display("FAIL op=%b op_c=%b rst=%0d got %0d", opcode, op_c, rst, shift_value);
          end
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
