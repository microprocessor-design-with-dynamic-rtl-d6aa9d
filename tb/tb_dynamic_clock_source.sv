// tb_dynamic_clock_source: clock periods for instruction classes.
// After each rising edge of clk the testbench presents a new instruction
// (LW, JAL, ADD, C.LW, C.JAL, C.AND, SW, BEQ, ADDI) and checks that the next
// period is 18, 6 or 14 ns with a 2 ns master clock.
`timescale 1ns/1ps
module tb_dynamic_clock_source;
  logic        CLK = 0, rst = 1, clk;
  logic [31:0] instr = 32'h00000013;
  logic [3:0]  shift_value;
  int checks = 0, failures = 0;

  dynamic_clock_source dut (.*);

  always #1 CLK = ~CLK;

  localparam int N = 9;
  logic [31:0] prog [N] = '{32'h00002283, 32'h02c0046f, 32'h002081b3, 32'h00004054,
                            32'h00002835, 32'h00008d6d, 32'h00402023, 32'h00428463,
                            32'h00500093};
  int exp_ns [N] = '{18, 6, 14, 18, 6, 14, 14, 14, 14};

  initial begin
    realtime t;
    repeat (3) @(negedge CLK);
    rst = 1'b0;
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      #0.1 instr = prog[k];
      t = $realtime;
      @(posedge clk);
      checks++;
      if (($realtime - t) < exp_ns[k] - 0.5 || ($realtime - t) > exp_ns[k] + 0.5) begin
        failures++;
        $display("FAIL instr %h period %0t exp %0d ns", prog[k], $realtime - t, exp_ns[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
