# A single-cycle RV32 subset core with a per-instruction clock period

A single-cycle processor must run at a clock period that covers its slowest
instruction, even though most instructions finish far sooner. This design
gives every instruction a clock period sized for its own critical path. A
small decoder looks at the instruction being executed and picks one of three
period lengths; a counter stretches a fast master clock to that length. Load
word, which goes through the register file, the ALU and the data memory, gets
the longest period; JAL, which hardly touches the datapath, the shortest;
everything else a medium one.

The same core also executes 16-bit RISC-V compressed instructions mixed with
32-bit base instructions. The PC steps by 2 or by 4, and the instruction
memory can fetch at any halfword address.

The RTL is SystemVerilog-2017. It synthesises: there are no delays, no
latches, and the memories are arrays.

## Clock generation: how the period follows the instruction

The processor does not receive the master clock. Its clock `clk` comes from
`dynamic_clock_source`, which has two parts.

**Phase decoder** (`phase_decoder`, combinational). It turns the current
instruction into a 4-bit *shift value*:

| instruction class                          | key used                          | shift value | period at 500 MHz master |
|--------------------------------------------|-----------------------------------|-------------|--------------------------|
| LW, C.LW                                   | opcode `0000011`, {f3,op} `01000` | 8           | 9 × 2 ns = 18 ns         |
| JAL, C.JAL                                 | opcode `1101111`, {f3,op} `00101` | 2           | 3 × 2 ns = 6 ns          |
| R-type, ADDI, SW, BEQ, C.ALU, C.SW, others | —                                 | 6           | 7 × 2 ns = 14 ns         |
| while `rst` = 1                            | —                                 | 6           | —                        |

A base instruction (bits [1:0] = `11`) is keyed by its 7-bit opcode. A
compressed one is keyed by {instr[15:13], instr[1:0]}, which is its funct3
and its quadrant.

**Phase shifter** (`phase_shift`). A 4-bit counter runs on the master clock
`CLK`. It counts 0, 1, …, *s* and then wraps to 0, so one period of `clk`
lasts *s*+1 master cycles. `clk` is a register: it is 1 while the counter is
below *s*/2 and 0 otherwise. The high phase is therefore the shorter one:
3 of 7 cycles for *s* = 6, and 4 of 9 for *s* = 8.

**The timing loop.** This is the part that makes the scheme work, and the
part most easily broken when the design is changed.

1. `clk` rises on the master edge at which the counter steps from 0 to 1.
2. On that edge the PC, the register file and the data memory update. The
   new PC reaches the instruction memory, and the new instruction reaches
   the phase decoder. All of this is combinational within the same master
   cycle.
3. From then on the counter compares against the new shift value. The next
   rising edge of `clk` comes *s*<sub>new</sub>+1 master cycles after the
   last one.

So the period that ends an instruction is the one that instruction chose.
The testbenches check this against the table above for every instruction.

The shift value must be at least 2. With 0 or 1, `clk` never rises; an
assertion in `phase_shift` catches that.

**Reset.** `rst` is synchronous to `CLK`. It holds the counter at 0, and from
the second master edge of reset onwards this keeps `clk` high. While `rst`
is high the phase decoder outputs 6. The PC is cleared asynchronously by the
same `rst`, because no rising edge of `clk` arrives during reset. Hold `rst`
for at least two master cycles. After release, the first instruction (at
address 0) runs for *s*+2 master cycles, and then the normal rhythm starts.
(Verilator reports `rst` as used both synchronously and asynchronously. This
is deliberate.)

The periods are fixed by the decoder table. They are not measured from the
circuit. The 6/14/18 ns figures come from simulated delays that were assumed
in the source description: a 6 ns register-file read, a 4 ns data-memory read
and an ALU transfer delay, with LW's path at 16 ns the longest. This RTL
leaves those delays out. To retarget the design, re-derive the three shift
values from real timing and edit `SHIFT_SHORT/MID/LONG` in `cpu_pkg`.

## Instruction set

| base (32-bit) | compressed (16-bit)             |
|---------------|---------------------------------|
| ADD SUB SLL SLT XOR SRL OR AND | C.SUB C.XOR C.OR C.AND |
| ADDI          |                                 |
| LW SW         | C.LW C.SW                       |
| BEQ           |                                 |
| JAL           | C.JAL                           |

All encodings are the standard RISC-V ones. Every other encoding executes as
a no-operation: no register or memory write, PC+4 (base) or PC+2 (compressed),
medium period. In particular an all-zero halfword is a 2-byte no-operation.

Points where the behaviour differs from standard RV32IC:

- **JAL and C.JAL jump to an absolute address.** The destination is the
  sign-extended J-type immediate, shifted left by 1; for C.JAL it is the
  zero-extended C.J immediate, shifted left by 1. It is *not* PC plus that
  value. So `JAL x8, 44` encoded with immediate 44 goes to address 44. The
  link value is PC+4, or PC+2 for C.JAL, which writes x1.
- **BEQ is PC-relative**, as in RISC-V.
- **Compressed register fields name x0–x7.** The 3-bit fields are
  zero-extended, not offset by 8. `C.AND` encoded `1000110101101101` works on
  x2 and x3.
- **Compressed C.LW/C.SW offsets** are zero-extended word offsets (0–124).
- **SLT compares unsigned** (it behaves like RISC-V SLTU). SLTU and SRA are
  not decoded: funct3 `011` acts as ADD, and SRA as SRL.

## Datapath and control

```
microprocessor
├── dynamic_clock_source ── phase_decoder, phase_shift
├── processor
│   ├── controller ── decoder  (+ AND gate: pc_src = branch & zero)
│   └── datapath
│       ├── next_pc    PC register, +2/+4 adders, branch adder, PC muxes
│       ├── extend     immediate reordering, zero/sign extension, <<1
│       ├── regfile    32 x 32, 2 read / 1 write
│       └── alu        AND OR XOR ADD SUB SLT SLL SRL, zero flag
├── instruction_mem    64 words, fetch at any halfword address
└── data_mem           64 words, word access
```

`decoder` produces a `ctrl_t` struct (see `cpu_pkg`) with these fields:

- `comp`: 1 for a 32-bit instruction, 0 for a compressed one.
- `reg_write`.
- `imm_c`: immediate format, 1 = I-type, 0 = S-type.
- `alu_src`: 1 = the immediate is SrcB.
- `branch`, `mem_write`.
- `mem_to_reg`: 1 = write back the loaded word.
- `jump`, `alu_control`.
- `rd_sel`: which field is the destination register.

| instr  | reg_write | imm_c | alu_src | branch | mem_write | mem_to_reg | jump | ALU |
|--------|-----------|-------|---------|--------|-----------|------------|------|-----|
| R-type | 1 | 0 | 0 | 0 | 0 | 0 | 0 | from funct3/funct7 |
| LW     | 1 | 1 | 1 | 0 | 0 | 1 | 0 | ADD |
| SW     | 0 | 0 | 1 | 0 | 1 | 0 | 0 | ADD |
| BEQ    | 0 | 0 | 0 | 1 | 0 | 0 | 0 | SUB |
| JAL    | 1 | 0 | 0 | 0 | 0 | 0 | 1 | —   |
| ADDI   | 1 | 1 | 1 | 0 | 0 | 0 | 0 | ADD |

Don't-care entries are driven to 0. Compressed instructions use the row of
their base counterpart, with `comp` = 0. For C.SUB, C.XOR, C.OR and C.AND the
ALU operation comes from funct2, instr[6:5].

Each register address has a multiplexer controlled by `comp`:

- A1 is instr[19:15], or instr[9:7] for a compressed instruction.
- A2 is instr[24:20], or instr[4:2] for a compressed instruction.
- A3 is instr[11:7] for a base instruction. For a compressed instruction it
  is instr[9:7] for the CA group, instr[4:2] for C.LW, and x1 for C.JAL.

The write-back value is the link address for jumps, the data word for loads,
and the ALU result otherwise. The data memory address is the ALU result, and
its write data is RD2.

## Memories and program layout

`instruction_mem` holds 32-bit words. At a word address it returns that word.
At address 4k+2 it returns the upper half of word k as the low 16 bits, and
the lower half of word k+1 as the high 16 bits. Any mix of 16- and 32-bit
instructions can therefore be packed in little-endian order. Load a program
in one of two ways:

- through the `IMEM_INIT` parameter, a hex file with one word per line, read
  with `$readmemh`;
- by writing `u_imem.RAM[]` from a testbench.

`data_mem` is word-addressed; address bits [1:0] are ignored. Neither memory
nor the register file is reset. Both memories wrap modulo their size.

A program can also be laid out one instruction per 32-bit word, with each
compressed instruction in the low half of its word. This layout still works:
the zero upper half then runs as a compressed no-operation.

## Measured behaviour

`tb_microprocessor` runs a nine-register demonstration program laid out one
instruction per word:

```
ADDI R1,R0,5
ADDI R2,R0,7
ADD R3,R1,R2
ADDI R4,R0,5
SW R4,0(R0)
LW R5,0(R0)
SUB R6,R2,R4
C.AND R2,R3
ADD R7,R2,R1
JAL R8,44
(ADD R9, skipped)
ADD R10,R8,R1
```

These checks pass:

- **ALU outputs:** 5, 7, 12, 5, 0, 0, 2, 4, 9, –, 45.
- **Final registers:** R1=5, R2=4, R3=12, R4=5, R5=5, R6=2, R7=9, R8=40,
  R9 not written, R10=45.
- **Data memory:** word 0 = 5.
- **Periods:** 18 ns for the LW, 6 ns for the JAL, 14 ns for all the rest.
- **Total time:** the eleven periods after the first take 150 ns. At a
  fixed 18 ns clock the same periods would take 198 ns.

The saving grows with the share of JAL-class instructions. A JAL period is a
third the length of an LW period.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_phase_decoder` | every opcode and compressed key, with and without reset |
| `tb_phase_shift` | period (*s*+1) and high time (*s*/2) for *s* = 2…15; the first period after reset; a change of *s* right after an edge |
| `tb_dynamic_clock_source` | 18/6/14 ns periods for base and compressed instructions of each class |
| `tb_decoder`, `tb_controller` | every control field for all supported instructions and a few unsupported ones; the branch gate |
| `tb_alu`, `tb_extend`, `tb_regfile`, `tb_data_mem`, `tb_instruction_mem`, `tb_next_pc` | directed and random vectors against models written in the testbench |
| `tb_datapath` | ten instructions under hand-written control words |
| `tb_processor` | a packed mixed-width program on a fixed clock; final state; exactly one clock per instruction |
| `tb_microprocessor` | the whole chip at its default size; details below |

`tb_microprocessor` runs in these phases:

1. It runs the program above.
2. It resets the core while it is running.
3. It runs a packed mixed-width program in lock step with a reference
   instruction-set model. The program has 32-bit instructions at halfword
   addresses, every compressed instruction, taken and untaken branches,
   loads, stores and jumps. After every instruction the testbench compares
   the PC, the period and the whole register file.
4. It generates four random programs from the supported instructions and
   runs each in lock step with the same model. Their branch and jump targets
   are the starts of later instructions, and each program ends in a
   self-jump.

It also counts each mechanism and fails if one never happened: the three
period lengths, compressed execution, the PC+2 step, taken and untaken
branch, jump, load, store, and reset while running.

With Verilator 5 (run from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert --top-module tb_microprocessor \
    -Irtl -y rtl +libext+.sv rtl/cpu_pkg.sv tb/tb_microprocessor.sv -o sim
./obj_dir/sim
```

Replace the top-module name and file to run another testbench.
`tb_instruction_mem` reads `tb/imem_test.hex` by a path relative to that
directory.

## How far to trust it, and where it departs from the description it implements

The clock-source modules follow their source description closely: the
decoder table, the counter and its comparison, and the reset value. So do
the register file and the ALU. The datapath structure follows the described
block diagram. Where the description was silent, RISC-V conventions were
used. Where it contradicted itself, the choices were these:

- **Control table.** The printed control table gives LW MemtoReg = 0 and
  ADDI ALUSrc = 0. Both contradict the stated meaning of those signals and
  the expected results of the demonstration program. Here LW writes back
  the loaded word and ADDI uses its immediate.
- **Comp bit.** The description states once that compressed instructions
  have both low bits set. That is the reverse of RISC-V, and the reverse of
  its own phase-decoder listing. The RISC-V rule is used: `11` means 32-bit.
- **Phase-decoder listing.** The listing selects its compressed case on the
  7-bit opcode although the constants are 5-bit {funct3, op} keys. Here the
  case is selected on the 5-bit key.
- **Phase-shifter reset.** The phase shifter's reset and count were two
  processes driving one counter. Here they are merged, with reset taking
  priority.
- **Instruction fetch.** The source argues for a byte-addressed instruction
  memory, but its memory code fetches whole words only. With word-only
  fetch, PC+2 cannot reach the second half of a word. The fetch here works
  at any halfword address.
- **SLT direction.** The ALU text says SLT is 1 when A > B, while the
  listing computes A < B, unsigned. The listing is followed.
- **Demonstration program.** The printed binary of its third instruction
  encodes `ADD R3,R2,R2`. The mnemonic and the expected result 12 say
  `ADD R3,R1,R2`, so the testbench uses the latter. A stated final value of
  R2 = 2 is inconsistent with the rest of the program; R2 = 4 is expected.
- **This design's own choices:**
  - the compressed destination-field selection (`rd_sel`);
  - a separate B-type bit order for the branch offset;
  - the priority of the jump over the branch at the PC multiplexers;
  - the asynchronous PC reset;
  - no-operation decoding of unsupported encodings;
  - a data-memory size of 64 words.
- **Left out:**
  - the simulated register-file, ALU and data-memory delays;
  - gating the data-memory clock for instructions that do not use it,
    which was proposed only as a future idea.
