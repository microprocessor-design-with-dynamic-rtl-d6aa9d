// tb_decoder: control signals of every supported instruction and of a few
// unsupported ones (which must decode to a no-operation). The expected rows
// restate the control truth table (with LW writing back the loaded word and
// ADDI taking the immediate) for the base and the compressed forms.
`timescale 1ns/1ps
module tb_decoder;
  import cpu_pkg::*;
  logic [31:0] instr;
  ctrl_t       ctrl;
  int checks = 0, failures = 0;

  decoder dut (.*);

  typedef struct {
    string       name;
    logic [31:0] ins;
    logic [7:0]  bits;     // comp reg_write imm_c alu_src branch mem_write mem_to_reg jump
    logic [2:0]  alu;
    logic [1:0]  rd;
  } row_t;

  localparam int N = 23;
  row_t rows [N] = '{
    '{"ADD",   32'h002081b3, 8'b1100_0000, 3'b011, 2'd0},
    '{"SUB",   32'h40410333, 8'b1100_0000, 3'b100, 2'd0},
    '{"SLL",   32'h00309233, 8'b1100_0000, 3'b110, 2'd0},
    '{"SLT",   32'h0020a333, 8'b1100_0000, 3'b101, 2'd0},
    '{"XOR",   32'h001141b3, 8'b1100_0000, 3'b010, 2'd0},
    '{"SRL",   32'h003253b3, 8'b1100_0000, 3'b111, 2'd0},
    '{"OR",    32'h0030e333, 8'b1100_0000, 3'b001, 2'd0},
    '{"AND",   32'h00137333, 8'b1100_0000, 3'b000, 2'd0},
    '{"LW",    32'h00802283, 8'b1111_0010, 3'b011, 2'd0},
    '{"SW",    32'h00402023, 8'b1001_0100, 3'b011, 2'd0},
    '{"ADDI",  32'h00500093, 8'b1111_0000, 3'b011, 2'd0},
    '{"BEQ",   32'h00520463, 8'b1000_1000, 3'b100, 2'd0},
    '{"JAL",   32'h02c0046f, 8'b1100_0001, 3'b011, 2'd0},
    '{"C.SUB", 32'h00008d1d, 8'b0100_0000, 3'b100, 2'd1},
    '{"C.XOR", 32'h00008ea5, 8'b0100_0000, 3'b010, 2'd1},
    '{"C.OR",  32'h00008d45, 8'b0100_0000, 3'b001, 2'd1},
    '{"C.AND", 32'h00008d6d, 8'b0100_0000, 3'b000, 2'd1},
    '{"C.LW",  32'h00004054, 8'b0101_0010, 3'b011, 2'd2},
    '{"C.SW",  32'h0000c050, 8'b0001_0100, 3'b011, 2'd1},
    '{"C.JAL", 32'h00002835, 8'b0100_0001, 3'b011, 2'd3},
    '{"zero",  32'h00000000, 8'b0000_0000, 3'b011, 2'd1},
    '{"LUI",   32'h000002b7, 8'b1000_0000, 3'b011, 2'd0},
    '{"C.SRLI",32'h00008005, 8'b0000_0000, 3'b011, 2'd1}
  };

  initial begin
    for (int k = 0; k < N; k++) begin
      instr = rows[k].ins;
      #1;
      checks++;
      if ({ctrl.comp, ctrl.reg_write, ctrl.imm_c, ctrl.alu_src, ctrl.branch,
           ctrl.mem_write, ctrl.mem_to_reg, ctrl.jump} !== rows[k].bits) begin
        failures++;
        $display("FAIL %s control %b exp %b", rows[k].name,
                 {ctrl.comp, ctrl.reg_write, ctrl.imm_c, ctrl.alu_src, ctrl.branch,
                  ctrl.mem_write, ctrl.mem_to_reg, ctrl.jump}, rows[k].bits);
      end
      checks++;
      if (ctrl.alu_control !== rows[k].alu) begin
        failures++;
        $display("FAIL %s ALUControl %b exp %b", rows[k].name, ctrl.alu_control, rows[k].alu);
      end
      checks++;
      if (ctrl.rd_sel !== rows[k].rd) begin
        failures++;
        $display("FAIL %s rd_sel %0d exp %0d", rows[k].name, ctrl.rd_sel, rows[k].rd);
      end
    end
    // comp must follow instr[1:0] for any instruction
    for (int n = 0; n < 200; n++) begin
      instr = $urandom;
      #1;
      checks++;
      if (ctrl.comp !== (instr[1:0] == 2'b11)) begin failures++; $display("FAIL comp %h", instr); end
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
