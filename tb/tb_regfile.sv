// tb_regfile: random writes and reads against a model array.
// Writes happen only on a rising clk edge with WE3 high; register 0 must
// always read 0; both read ports are combinational.
`timescale 1ns/1ps
module tb_regfile;
  logic        clk = 0, WE3 = 0;
  logic [4:0]  A1 = 0, A2 = 0, A3 = 0;
  logic [31:0] WD3 = 0, RD1, RD2;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  regfile dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int k = 0; k < 32; k++) model[k] = '0;
    // initialise every register
    for (int k = 0; k < 32; k++) begin
      @(negedge clk); A3 = 5'(k); WD3 = 32'(k) * 32'h01010101; WE3 = 1;
      model[k] = (k == 0) ? '0 : WD3;
    end
    @(negedge clk); WE3 = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      WE3 = 1'($urandom_range(0, 1));
      A3 = 5'($urandom); WD3 = $urandom;
      A1 = 5'($urandom); A2 = 5'($urandom);
      #1;
      checks += 2;
      if (RD1 !== model[A1]) begin failures++; $display("FAIL RD1 x%0d", A1); end
      if (RD2 !== model[A2]) begin failures++; $display("FAIL RD2 x%0d", A2); end
      @(posedge clk);
      if (WE3 && A3 != 0) model[A3] = WD3;
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
