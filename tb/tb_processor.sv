// tb_processor: controller and datapath on a fixed 10 ns clock.
// The testbench plays both memories (halfword-addressed instruction store,
// word data store) and runs a packed mixed-width program. The core is
// single-cycle, so the program must reach its final self-jump at address 80
// after exactly 21 clocks (21 instructions are executed before it); final registers and data words are compared with
// values worked out by hand.
`timescale 1ns/1ps
module tb_processor;
  logic        clk = 0, rst = 1, mem_write;
  logic [31:0] instr, read_data, pc, dataaddr, write_data;
  logic [31:0] imem [32];
  logic [31:0] dmem [16];
  int checks = 0, failures = 0;

  processor dut (.*);

  always #5 clk = ~clk;

  assign instr     = pc[1] ? {imem[pc[6:2] + 5'd1][15:0], imem[pc[6:2]][31:16]} : imem[pc[6:2]];
  assign read_data = dmem[dataaddr[5:2]];
  always @(posedge clk) if (mem_write) dmem[dataaddr[5:2]] <= write_data;

  logic [31:0] prog [21] = '{
    32'h00500093, 32'h00c00113, 32'h01938d45, 32'h92330030, 32'hc0500030,
    32'h04634054, 32'h03130052, 32'h8ea50630, 32'h00428463, 32'h0020a333,
    32'h003253b3, 32'h41b38d1d, 32'h8de90011, 32'h03932835, 32'h000004d0,
    32'h00137333, 32'h0030e333, 32'h00602423, 32'h00802383, 32'h40138333,
    32'h0500006f
  };
  int exp_x [8] = '{0, 54, 8, 8, 40, 45, 8, 62};

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int cycles;
    for (int k = 0; k < 32; k++) imem[k] = (k < 21) ? prog[k] : '0;
    for (int k = 0; k < 16; k++) dmem[k] = '0;
    for (int k = 0; k < 32; k++) dut.u_datapath.u_regfile.rf[k] = '0;
    #12 rst = 0;
    cycles = 0;
    while (pc != 32'd80 && cycles < 100) begin
      @(posedge clk);
      #1 cycles++;
    end
    check(cycles, 21, "clocks to reach the final jump");
    repeat (3) @(posedge clk);
    #1 check(pc, 80, "self-jump holds");
    for (int k = 1; k < 8; k++)
      check(dut.u_datapath.u_regfile.rf[k], 32'(exp_x[k]), $sformatf("x%0d", k));
    check(dmem[1], 40, "data word 1");
    check(dmem[2], 62, "data word 2");
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
