// tb_phase_shift: checks the generated clock for each shift value.
// For shift values 2..15 it measures, in master cycles, the period between
// rising edges of clk (expected shift_value+1) and the high time (expected
// shift_value/2). It also checks that reset holds clk high and restarts the
// count, so that the first period after reset is shift_value+2 master
// cycles counted from the release edge.
`timescale 1ns/1ps
module tb_phase_shift;
  logic       CLK = 0, rst = 1, clk;
  logic [3:0] shift_value = 4'd6;
  int checks = 0, failures = 0;
  int ncyc = 0;

  phase_shift dut (.*);

  always #1 CLK = ~CLK;
  always @(posedge CLK) ncyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int t_rise, t_fall, t_rise2, t0;
    repeat (3) @(negedge CLK);
    check(clk == 1'b1, "clk high during reset");
    for (int s = 2; s < 16; s++) begin
      shift_value = 4'(s);
      rst = 1'b1;
      repeat (4) @(negedge CLK);
      rst = 1'b0;
      t0 = ncyc;
      @(posedge clk); t_rise = ncyc;
      check(t_rise - t0 == s + 2, $sformatf("s=%0d first period %0d", s, t_rise - t0));
      @(negedge clk); t_fall = ncyc;
      @(posedge clk); t_rise2 = ncyc;
      check(t_rise2 - t_rise == s + 1, $sformatf("s=%0d period %0d", s, t_rise2 - t_rise));
      check(t_fall - t_rise == s / 2, $sformatf("s=%0d high %0d", s, t_fall - t_rise));
      @(posedge clk);
      check(ncyc - t_rise2 == s + 1, $sformatf("s=%0d second period", s));
    end
    // change of shift value right after a rising edge sets that period
    rst = 1'b0;
    shift_value = 4'd6;
    @(posedge clk);
    #0.1 shift_value = 4'd8;
    t0 = ncyc;
    @(posedge clk);
    check(ncyc - t0 == 9, "period follows the new shift value 8");
    #0.1 shift_value = 4'd2;
    t0 = ncyc;
    @(posedge clk);
    check(ncyc - t0 == 3, "period follows the new shift value 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
