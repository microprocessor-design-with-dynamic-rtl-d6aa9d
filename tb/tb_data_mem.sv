// tb_data_mem: random word writes and reads against a model array.
// Writes take effect on the rising clock edge when we is 1; reads are
// combinational and ignore the two low address bits.
`timescale 1ns/1ps
module tb_data_mem;
  logic        clk = 0, we = 0;
  logic [31:0] a = 0, wd = 0, rd;
  logic [31:0] model [64];
  int checks = 0, failures = 0;

  data_mem dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int k = 0; k < 64; k++) begin
      @(negedge clk); we = 1; a = 32'(4 * k); wd = $urandom; model[k] = wd;
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we = 1'($urandom); a = {24'd0, 8'($urandom)}; wd = $urandom;
      #1;
      checks++;
      if (rd !== model[a[7:2]]) begin failures++; $display("FAIL read %0d", a); end
      @(posedge clk);
      if (we) model[a[7:2]] = wd;
      #1;
      checks++;
      if (rd !== model[a[7:2]]) begin failures++; $display("FAIL after write %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
