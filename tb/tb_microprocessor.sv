// tb_microprocessor: end-to-end test of the whole core at its default size.
//
// Part 1 runs the published nine-register test program word by word as
// listed (one instruction per 32-bit slot; the compressed C.AND at 28 leaves
// a zero halfword at 30, which decodes as a compressed no-operation). It
// checks the ALU output of each instruction, the length of each clock period
// (18 ns for LW, 6 ns for JAL, 14 ns otherwise, with a 2 ns master clock), the
// final register values and the stored data word against the numbers given
// with that program.
//
// Part 2 resets the running core, loads a packed mixed-width program (32-bit
// instructions at halfword addresses, every supported compressed instruction,
// taken and untaken BEQ, SLL/SRL/SLT/OR/XOR/AND/SUB, SW/LW, JAL) and runs it in
// lock step with a reference instruction-set model written here from the
// instruction definitions. After every instruction it compares the PC, the
// clock period and the whole register file; at the end the data memory.
// It counts each mechanism (the three clock periods, compressed execution,
// PC+2, taken and untaken branch, jump, load, store, reset while running) and
// fails any that never occurred.
//
// Part 3 generates four random programs of supported base and compressed
// instructions (forward branches and jumps only, ending in a self-jump) and
// runs each in lock step with the same reference model.
`timescale 1ns/1ps
module tb_microprocessor;

  logic        CLK = 1'b0;
  logic        rst = 1'b0;
  logic        clk;
  logic [3:0]  shift_value;
  logic [31:0] pc, instr, dataaddr, write_data;
  logic        mem_write;

  int checks = 0, failures = 0;

  microprocessor dut (.*);

  always #1 CLK = ~CLK;   // 500 MHz master clock

  // Values of the instruction in flight, sampled mid master-cycle.
  logic [31:0] s_pc, s_instr, s_dataaddr;
  logic [3:0]  s_shift;
  always @(negedge CLK) begin
    s_pc = pc; s_instr = instr; s_dataaddr = dataaddr; s_shift = shift_value;
  end

  // Master cycles per processor-clock period.
  int ncyc = 0, last_rise = 0, period = 0, retired = 0;
  always @(posedge CLK) ncyc++;
  // Called right after each rising edge of clk.
  task automatic measure_period();
    period    = ncyc - last_rise;
    last_rise = ncyc;
    retired++;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------------
  // Memory access helpers
  // ---------------------------------------------------------------------
  task automatic clear_state();
    for (int k = 0; k < 64; k++) begin
      dut.u_imem.RAM[k] = '0;
      dut.u_dmem.RAM[k] = '0;
    end
    for (int k = 0; k < 32; k++) dut.u_processor.u_datapath.u_regfile.rf[k] = '0;
  endtask

  function automatic logic [31:0] dut_reg(input int k);
    return (k == 0) ? 32'd0 : dut.u_processor.u_datapath.u_regfile.rf[k];
  endfunction

  task automatic do_reset();
    @(negedge CLK) rst = 1'b1;
    repeat (4) @(negedge CLK);
    rst = 1'b0;
  endtask

  // ---------------------------------------------------------------------
  // Reference model
  // ---------------------------------------------------------------------
  logic [31:0] m_imem [64];
  logic [31:0] m_dmem [64];
  logic [31:0] m_x    [32];
  logic [31:0] m_pc;

  // mechanism counters
  int n_p18 = 0, n_p6 = 0, n_p14 = 0, n_comp = 0, n_pc2 = 0, n_taken = 0,
      n_untaken = 0, n_jump = 0, n_load = 0, n_store = 0, n_reset_run = 0;

  function automatic logic [15:0] m_half(input logic [31:0] a);
    logic [31:0] w;
    w = m_imem[a[7:2]];
    return a[1] ? w[31:16] : w[15:0];
  endfunction

  // Execute one instruction; returns the expected period in master cycles.
  task automatic m_step(output int cycles);
    logic [31:0] ins, nxt, a, b, res, addr;
    logic [4:0]  rd;
    logic        wr;
    ins = {m_half(m_pc + 32'd2), m_half(m_pc)};
    wr = 1'b0; rd = '0; res = '0;
    cycles = 7;
    if (ins[1:0] == 2'b11) begin
      nxt = m_pc + 32'd4;
      a = m_x[ins[19:15]]; b = m_x[ins[24:20]];
      case (ins[6:0])
        7'b0110011: begin
          wr = 1'b1; rd = ins[11:7];
          case (ins[14:12])
            3'd0: res = ins[30] ? a - b : a + b;
            3'd1: res = a << b[4:0];
            3'd2: res = {31'd0, a < b};
            3'd4: res = a ^ b;
            3'd5: res = a >> b[4:0];
            3'd6: res = a | b;
            3'd7: res = a & b;
            default: res = a + b;
          endcase
        end
        7'b0010011: if (ins[14:12] == 3'd0) begin
          wr = 1'b1; rd = ins[11:7];
          res = a + {{20{ins[31]}}, ins[31:20]};
        end
        7'b0000011: begin
          wr = 1'b1; rd = ins[11:7]; cycles = 9; n_load++;
          addr = a + {{20{ins[31]}}, ins[31:20]};
          res = m_dmem[addr[7:2]];
        end
        7'b0100011: begin
          addr = a + {{20{ins[31]}}, ins[31:25], ins[11:7]};
          m_dmem[addr[7:2]] = b; n_store++;
        end
        7'b1100011: if (ins[14:12] == 3'd0) begin
          if (a == b) begin
            nxt = m_pc + {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
            n_taken++;
          end else n_untaken++;
        end
        7'b1101111: begin
          wr = 1'b1; rd = ins[11:7]; res = m_pc + 32'd4; cycles = 3; n_jump++;
          nxt = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
        end
        default: ;
      endcase
    end else begin
      nxt = m_pc + 32'd2; n_comp++; n_pc2++;
      a = m_x[{2'b0, ins[9:7]}]; b = m_x[{2'b0, ins[4:2]}];
      addr = a + {25'd0, ins[5], ins[12:10], ins[6], 2'b00};
      case ({ins[15:13], ins[1:0]})
        5'b10001: if (ins[12:10] == 3'b011) begin
          wr = 1'b1; rd = {2'b0, ins[9:7]};
          case (ins[6:5])
            2'd0: res = a - b;
            2'd1: res = a ^ b;
            2'd2: res = a | b;
            2'd3: res = a & b;
          endcase
        end
        5'b01000: begin
          wr = 1'b1; rd = {2'b0, ins[4:2]}; res = m_dmem[addr[7:2]]; cycles = 9; n_load++;
        end
        5'b11000: begin
          m_dmem[addr[7:2]] = b; n_store++;
        end
        5'b00101: begin
          wr = 1'b1; rd = 5'd1; res = m_pc + 32'd2; cycles = 3; n_jump++;
          nxt = {20'd0, ins[12], ins[8], ins[10:9], ins[6], ins[7], ins[2], ins[11],
                 ins[5:3], 1'b0};
        end
        default: ;
      endcase
    end
    if (wr && rd != 0) m_x[rd] = res;
    m_pc = nxt;
  endtask

  // ---------------------------------------------------------------------
  // Part 1: published test program
  // ---------------------------------------------------------------------
  localparam int N1 = 12;
  logic [31:0] t2_words [12] = '{
    32'b00000000010100000000000010010011,  //  0 ADDI R1,R0,5
    32'b00000000011100000000000100010011,  //  4 ADDI R2,R0,7
    32'b00000000001000001000000110110011,  //  8 ADD  R3,R1,R2 (*)
    32'b00000000010100000000001000010011,  // 12 ADDI R4,R0,5
    32'b00000000010000000010000000100011,  // 16 SW   R4,0(R0)
    32'b00000000000000000010001010000011,  // 20 LW   R5,0(R0)
    32'b01000000010000010000001100110011,  // 24 SUB  R6,R2,R4
    32'b00000000000000001000110101101101,  // 28 C.AND R2,R3
    32'b00000000000100010000001110110011,  // 32 ADD  R7,R2,R1
    32'b00000010110000000000010001101111,  // 36 JAL  R8,44
    32'b00000000000001110000010010110011,  // 40 ADD  R9,R7,R0 (skipped)
    32'b00000000000101000000010100110011   // 44 ADD  R10,R8,R1
  };
  // (*) The published listing prints rs1 = 00010 (R2) for this word, which
  // contradicts its own mnemonic and its expected result 12; rs1 = R1 here.
  // retired sequence: pc, period in master cycles, ALU output (-1: don't care)
  int exp_pc  [N1] = '{0, 4, 8, 12, 16, 20, 24, 28, 30, 32, 36, 44};
  int exp_cyc [N1] = '{7, 7, 7, 7, 7, 9, 7, 7, 7, 7, 3, 7};
  int exp_alu [N1] = '{5, 7, 12, 5, 0, 0, 2, 4, -1, 9, -1, 45};

  // ---------------------------------------------------------------------
  // Part 2: packed mixed-width program (see comments for the layout)
  // ---------------------------------------------------------------------
  //  0 ADDI x1,x0,5     4 ADDI x2,x0,12    8 C.OR x2,x1      10 ADDI x3,x0,3
  // 14 SLL x4,x1,x3    18 C.SW x4,4(x0)   20 C.LW x5,4(x0)  22 BEQ x5,x4,+8
  // 26 ADDI x6,x0,99   30 C.XOR x5,x1     32 BEQ x4,x5,+8   36 SLT x6,x1,x2
  // 40 SRL x7,x4,x3    44 C.SUB x2,x7     46 XOR x3,x2,x1   50 C.AND x3,x2
  // 52 C.JAL 60        54 ADDI x7,x0,77   58 (zero)         60 AND x6,x6,x1
  // 64 OR x6,x1,x3     68 SW x6,8(x0)     72 LW x7,8(x0)    76 SUB x6,x7,x1
  // 80 JAL x0,80 (stays here)
  localparam int NB = 21;
  logic [31:0] prog_b [NB] = '{
    32'h00500093, 32'h00c00113, 32'h01938d45, 32'h92330030, 32'hc0500030,
    32'h04634054, 32'h03130052, 32'h8ea50630, 32'h00428463, 32'h0020a333,
    32'h003253b3, 32'h41b38d1d, 32'h8de90011, 32'h03932835, 32'h000004d0,
    32'h00137333, 32'h0030e333, 32'h00602423, 32'h00802383, 32'h40138333,
    32'h0500006f
  };


  // ---------------------------------------------------------------------
  // Encoders for the random programs (standard RISC-V field layouts; JAL
  // and C.JAL carry the absolute destination)
  // ---------------------------------------------------------------------
  function automatic logic [31:0] e_r(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                      input logic [2:0] f3, input logic [4:0] rd);
    return {f7, rs2, rs1, f3, rd, 7'b0110011};
  endfunction
  function automatic logic [31:0] e_i(input logic [11:0] imm, input logic [4:0] rs1,
                                      input logic [2:0] f3, input logic [4:0] rd,
                                      input logic [6:0] op);
    return {imm, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] e_s(input logic [11:0] imm, input logic [4:0] rs2, rs1);
    return {imm[11:5], rs2, rs1, 3'b010, imm[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] e_b(input logic [12:0] off, input logic [4:0] rs2, rs1);
    return {off[12], off[10:5], rs2, rs1, 3'b000, off[4:1], off[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] e_j(input logic [20:0] t, input logic [4:0] rd);
    return {t[20], t[10:1], t[11], t[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [15:0] e_ca(input logic [1:0] f2, input logic [2:0] rd, rs2);
    return {6'b100011, rd, f2, rs2, 2'b01};
  endfunction
  function automatic logic [15:0] e_cl(input logic [2:0] f3, input logic [6:0] off,
                                       input logic [2:0] rs1, r2);
    return {f3, off[5:3], rs1, off[2], off[6], r2, 2'b00};
  endfunction
  function automatic logic [15:0] e_cj(input logic [11:0] t);
    return {3'b001, t[11], t[4], t[9:8], t[10], t[6], t[7], t[3:1], t[5], 2'b01};
  endfunction

  logic [7:0] rbytes [256];

  task automatic put(input int a, input logic [31:0] w, input int n);
    for (int k = 0; k < n; k++) rbytes[(a + k) % 256] = w[8*k +: 8];
  endtask

  // Fill 0..247 with random supported instructions, end with JAL x0,248.
  // Branch and jump targets are the starts of later instructions.
  task automatic gen_program();
    int kinds [128];
    int addr  [129];
    int n, a;
    logic [2:0] f3s [7] = '{3'd0, 3'd1, 3'd2, 3'd4, 3'd5, 3'd6, 3'd7};
    for (int k = 0; k < 256; k++) rbytes[k] = '0;
    n = 0; a = 0;
    while (a < 244) begin
      kinds[n] = $urandom_range(0, 10);
      addr[n]  = a;
      a += (kinds[n] >= 7) ? 2 : 4;
      n++;
    end
    addr[n] = 248;
    for (int i = 0; i < n; i++) begin
      int tgt, j;
      a   = addr[i];
      j   = i + $urandom_range(1, 4);
      tgt = addr[(j > n) ? n : j];
      case (kinds[i])
        0, 1: begin
          logic [2:0] f3;
          f3 = f3s[$urandom_range(0, 6)];
          put(a, e_r((f3 == 0 && $urandom_range(0, 1)) ? 7'h20 : 7'h00, 5'($urandom_range(0, 7)),
                     5'($urandom_range(0, 7)), f3, 5'($urandom_range(0, 7))), 4);
        end
        2: put(a, e_i(12'($urandom), 5'($urandom_range(0, 7)), 3'd0, 5'($urandom_range(0, 7)),
                      7'b0010011), 4);
        3: put(a, e_i(12'(4 * $urandom_range(0, 63)), 5'd0, 3'd2, 5'($urandom_range(0, 7)),
                      7'b0000011), 4);
        4: put(a, e_s(12'(4 * $urandom_range(0, 63)), 5'($urandom_range(0, 7)), 5'd0), 4);
        5: put(a, e_b(13'(tgt - a), 5'($urandom_range(0, 7)), 5'($urandom_range(0, 7))), 4);
        6: put(a, e_j(21'(tgt), 5'($urandom_range(0, 7))), 4);
        7, 8: put(a, {16'd0, e_ca(2'($urandom), 3'($urandom), 3'($urandom))}, 2);
        9: put(a, {16'd0, e_cl($urandom_range(0, 1) ? 3'b010 : 3'b110,
                               7'(4 * $urandom_range(0, 31)), 3'd0, 3'($urandom))}, 2);
        default: put(a, {16'd0, e_cj(12'(tgt))}, 2);
      endcase
    end
    put(248, e_j(21'd248, 5'd0), 4);
  endtask

  int base;
  int exp_cycles;
  logic [31:0] pc_before;

  initial begin
    // ---------------- part 1 ----------------
    clear_state();
    for (int k = 0; k < N1; k++) dut.u_imem.RAM[k] = t2_words[k];
    do_reset();
    @(posedge clk);                       // end of first instruction
    base = ncyc;
    measure_period();
    for (int k = 0; k < N1; k++) begin
      if (k > 0) begin
        @(posedge clk);
        measure_period();
      end
      check(s_pc == 32'(exp_pc[k]), $sformatf("part1 #%0d pc %0d exp %0d", k, s_pc, exp_pc[k]));
      if (k > 0)
        check(period == exp_cyc[k],
              $sformatf("part1 #%0d period %0d cycles exp %0d", k, period, exp_cyc[k]));
      if (exp_alu[k] >= 0)
        check(s_dataaddr == 32'(exp_alu[k]),
              $sformatf("part1 #%0d ALU %0d exp %0d", k, s_dataaddr, exp_alu[k]));
      if (k > 0) begin
        if (period == 9) n_p18++;
        if (period == 3) n_p6++;
        if (period == 7) n_p14++;
      end
    end
    #0.5;
    begin
      int exp_r [11] = '{0, 5, 4, 12, 5, 5, 2, 9, 40, 0, 45};
      for (int k = 1; k <= 10; k++)
        check(dut_reg(k) == 32'(exp_r[k]),
              $sformatf("part1 R%0d = %0d exp %0d", k, dut_reg(k), exp_r[k]));
      check(dut.u_dmem.RAM[0] == 32'd5, "part1 data memory word 0");
    end
    $display("part1: %0d periods after the first, %0d ns with the dynamic clock, %0d ns at a fixed 18 ns",
             N1 - 1, 2 * (ncyc - base), (N1 - 1) * 18);

    // ---------------- part 2 ----------------
    // Reset while the core is running, then load the packed program.
    repeat (5) @(posedge CLK);
    rst = 1'b1;
    n_reset_run++;
    #0.5;
    check(pc == 32'd0, "pc cleared by reset while running");
    repeat (2) @(negedge CLK);
    check(shift_value == 4'd6, "shift value held at 6 during reset");
    clear_state();
    for (int k = 0; k < NB; k++) dut.u_imem.RAM[k] = prog_b[k];
    for (int k = 0; k < 64; k++) begin
      m_imem[k] = dut.u_imem.RAM[k];
      m_dmem[k] = '0;
    end
    for (int k = 0; k < 32; k++) m_x[k] = '0;
    m_pc = '0;
    do_reset();
    base = ncyc;
    begin
      int at_end, steps;
      at_end = 0; steps = 0;
      while (at_end < 3 && steps < 200) begin
        @(posedge clk);
        measure_period();
        steps++;
        pc_before = m_pc;
        check(s_pc == m_pc, $sformatf("part2 pc %0d exp %0d", s_pc, m_pc));
        m_step(exp_cycles);
        if (steps > 1) begin
          check(period == exp_cycles,
                $sformatf("part2 pc %0d period %0d exp %0d", pc_before, period, exp_cycles));
          if (period == 9) n_p18++;
          if (period == 3) n_p6++;
          if (period == 7) n_p14++;
        end
        #0.5;
        begin
          bit same;
          same = 1'b1;
          for (int k = 1; k < 32; k++)
            if (dut_reg(k) != m_x[k]) begin
              same = 1'b0;
              $display("  x%0d = %0d exp %0d", k, dut_reg(k), m_x[k]);
            end
          check(same, $sformatf("part2 registers after pc %0d", pc_before));
        end
        if (pc_before == 32'd80) at_end++;
      end
      $display("part2: %0d instructions in %0d ns, %0d ns at a fixed 18 ns",
               steps, 2 * (ncyc - base), 18 * steps);
    end
    for (int k = 0; k < 4; k++)
      check(dut.u_dmem.RAM[k] == m_dmem[k],
            $sformatf("part2 data word %0d = %0d exp %0d", k, dut.u_dmem.RAM[k], m_dmem[k]));
    // a few spot values, worked out by hand
    check(dut_reg(6) == 32'd8 && dut_reg(7) == 32'd62 && dut_reg(1) == 32'd54,
          "part2 final x1/x6/x7");


    // ---------------- part 3: random mixed-width programs ----------------
    for (int p = 0; p < 4; p++) begin
      int at_end, steps, bad;
      at_end = 0; steps = 0; bad = 0;
      gen_program();
      @(negedge CLK) rst = 1'b1;
      clear_state();
      for (int k = 0; k < 64; k++) begin
        dut.u_imem.RAM[k] = {rbytes[4*k+3], rbytes[4*k+2], rbytes[4*k+1], rbytes[4*k]};
        m_imem[k] = dut.u_imem.RAM[k];
        m_dmem[k] = '0;
      end
      for (int k = 0; k < 32; k++) m_x[k] = '0;
      m_pc = '0;
      do_reset();
      while (at_end < 2 && steps < 400) begin
        @(posedge clk);
        measure_period();
        steps++;
        pc_before = m_pc;
        if (s_pc != m_pc) bad++;
        m_step(exp_cycles);
        if (steps > 1 && period != exp_cycles) bad++;
        #0.5;
        for (int k = 1; k < 32; k++) if (dut_reg(k) != m_x[k]) bad++;
        if (pc_before == 32'd248) at_end++;
      end
      for (int k = 0; k < 64; k++) if (dut.u_dmem.RAM[k] != m_dmem[k]) bad++;
      check(bad == 0, $sformatf("random program %0d: %0d mismatches in %0d steps", p, bad, steps));
      check(at_end == 2, $sformatf("random program %0d reached its end", p));
      $display("random program %0d: %0d instructions", p, steps);
    end

    // ---------------- mechanisms ----------------
    $display("mechanisms: 18ns=%0d 6ns=%0d 14ns=%0d compressed=%0d pc+2=%0d taken=%0d untaken=%0d jump=%0d load=%0d store=%0d reset_running=%0d",
             n_p18, n_p6, n_p14, n_comp, n_pc2, n_taken, n_untaken, n_jump, n_load, n_store, n_reset_run);
    check(n_p18 > 0, "LW period seen");
    check(n_p6 > 0, "JAL period seen");
    check(n_p14 > 0, "medium period seen");
    check(n_comp > 0, "compressed instruction executed");
    check(n_pc2 > 0, "PC+2 step");
    check(n_taken > 0, "branch taken");
    check(n_untaken > 0, "branch not taken");
    check(n_jump > 0, "jump");
    check(n_load > 0, "load");
    check(n_store > 0, "store");
    check(n_reset_run > 0, "reset while running");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #60000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
