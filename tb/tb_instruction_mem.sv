// tb_instruction_mem: word and halfword-aligned fetches.
// One instance is filled from the array, the other from a small hex file.
// At a word address the word itself must come out; at address 4k+2 the
// upper half of word k below the lower half of word k+1, wrapping at the
// end of the memory.
`timescale 1ns/1ps
module tb_instruction_mem;
  logic [31:0] addr, instr, addr2, instr2;
  logic [31:0] model [64];
  int checks = 0, failures = 0;

  instruction_mem dut (.addr(addr), .instr(instr));
  instruction_mem #(.INIT_FILE("tb/imem_test.hex")) dut_file (.addr(addr2), .instr(instr2));

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    for (int k = 0; k < 64; k++) begin
      model[k] = $urandom;
      dut.RAM[k] = model[k];
    end
    for (int k = 0; k < 64; k++) begin
      addr = 32'(4 * k); #1 check(instr, model[k], "word fetch");
      addr = 32'(4 * k + 2); #1 check(instr, {model[(k + 1) % 64][15:0], model[k][31:16]}, "halfword fetch");
    end
    addr = 32'd256; #1 check(instr, model[0], "wrap");
    addr2 = 32'd0;  #1 check(instr2, 32'h00500093, "file word 0");
    addr2 = 32'd8;  #1 check(instr2, 32'h01938d45, "file word 2");
    addr2 = 32'd10; #1 check(instr2, 32'h00300193, "file halfword 10");
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
