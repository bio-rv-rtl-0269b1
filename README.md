# Bio-RV: a multi-cycle RISC-V controller core with an external load port

Bio-RV is a deliberately small 32-bit RISC-V processor meant to sit in an
implantable-device SoC (a pacemaker, or a TinyML accelerator it configures) as
an always-on control processor. It trades speed for simplicity: there is no
pipeline, one memory holds both program and data, and a single ALU does every
addition, including PC + 4 and branch targets. Each instruction takes three to
five clock cycles.

What sets it apart from a textbook multi-cycle core is how it is brought up.
The chip's pins let a tester write any word of the on-chip memory and read it
back, without the core running. An **Instruction Enable (IE)** pin gates
execution. So firmware can be loaded, checked, started, stopped and inspected
through a handful of pins. No debug module and no clock gating are needed.

This RTL reconstructs that design at the register-transfer level from the
published description and datapath diagram. Every module header says what
comes from that description and what was chosen here.

## Block structure

```
                 +--------------------------------------------+
 reset, ie ----->| biorv_controller  (FSM + ALU/imm decoders) |
                 +--------------------------------------------+
                        | ctrl_t bundle        ^ op, funct3, funct7[5], Zero
                        v                      |
                 +--------------------------------------------+
                 | biorv_datapath                             |
                 |  PC, OldPC, Instr, A, WriteData, ALUOut,   |
                 |  Data registers; biorv_regfile;            |
                 |  biorv_extend; biorv_alu; muxes            |
                 +--------------------------------------------+
                    | Adr, WriteData, MemWrite      ^ RD
                    v                               |
 write_data,  +-----------------+   A/WD/WE   +-----------+
 xed, iea, -->| biorv_ext_port  |------------>| biorv_mem |---> read_data
 ied, xwe,    | (address DFF +  |             | 4 kB      |
 mem_write    |  3 muxes)       |             +-----------+
              +-----------------+
```

| File | Contents |
|---|---|
| `rtl/biorv_pkg.sv` | opcodes, ALU codes, mux selects, FSM states, the `ctrl_t` control bundle |
| `rtl/biorv_controller.sv` | control unit: multi-cycle FSM, ALU decoder, immediate-format decoder, IE handling |
| `rtl/biorv_datapath.sv` | PC and the non-architectural registers, operand and result muxes |
| `rtl/biorv_regfile.sv` | 32 x 32 register file, x0 = 0 |
| `rtl/biorv_alu.sv` | add / sub / and / or / slt and the Zero flag |
| `rtl/biorv_extend.sv` | I, S, B, J immediates |
| `rtl/biorv_mem.sv` | unified memory: asynchronous read, synchronous write |
| `rtl/biorv_ext_port.sv` | external address register and the address, write-data and write-enable muxes |
| `rtl/biorv_top.sv` | the chip |

## Chip pins

| Pin | Width | Use |
|---|---|---|
| `clk` | 1 | clock. The published chip runs at 50 MHz. |
| `reset` | 1 | active high, asynchronous. Clears the PC and returns the FSM to Fetch. Memory and registers are not cleared. |
| `ie` | 1 | Instruction Enable. When low, the core stays idle in Fetch. |
| `write_data` | 32 | external bus. Carries an address (with `xed`) or a data word (with `ied`). |
| `xed` | 1 | loads `write_data` into the external address register on the clock edge |
| `iea` | 1 | memory address: 0 = core, 1 = external address register |
| `ied` | 1 | memory write data: 0 = core, 1 = `write_data` |
| `xwe` | 1 | memory write enable: 0 = core's MemWrite, 1 = the `mem_write` pin |
| `mem_write` | 1 | external write enable, used when `xwe` = 1 |
| `read_data` | 32 | the memory's read port, live (asynchronous) |

## Programming, observing and running

The memory sees the core's signals or the pins' signals, one at a time.
`iea`, `ied` and `xwe` each switch one of the memory's three inputs. Because
the one `write_data` bus carries both address and data, writing a word takes
two clock edges.

```
 edge 1:  xed=1                      write_data = byte address  (address latched)
 edge 2:  iea=1 ied=1 xwe=1 mem_write=1  write_data = word      (word written)
```

To read a word, latch its address as in edge 1. Then hold `iea=1`, `xwe=1`
and `mem_write=0`. `read_data` shows the word in the same cycle, because the
memory read is combinational. In this observation mode nothing can be
written.

Start-up sequence:

1. Keep `ie = 0` and `reset = 0`, and load the program from byte address 0.
2. Pulse `reset` high. The PC goes to 0 and the FSM to Fetch.
3. Release `reset`, return `iea`, `ied` and `xwe` to 0, and raise `ie`. The
   first fetch happens on the next rising edge.

**Stopping.** In this design IE is sampled only in the Fetch state. If `ie`
falls in the middle of an instruction, that instruction finishes. The core
then waits in Fetch with PC pointing at the next instruction. No register,
memory or PC write happens while it waits. Raising `ie` again resumes
execution exactly where it stopped. The core therefore always stops on an
instruction boundary. This is this design's reading of "IE low halts
execution". The published description does not say what happens in the
middle of an instruction.

Hand the memory to the pins only after the core has reached Fetch. This takes
at most four cycles after `ie` falls. Otherwise a store still in flight would
be overridden by the pins. An assertion in `biorv_top` flags `xwe = 1` in a
cycle where the core itself is storing.

## Multi-cycle execution

The FSM uses the standard multi-cycle RISC-V state sequence. Its cycle counts
match the published figures exactly: 5 cycles for `lw`, 3 for `beq`, and 4
for everything else.

| Instruction | States | Cycles |
|---|---|---|
| `lw` | Fetch, Decode, MemAdr, MemRead, MemWB | 5 |
| `sw` | Fetch, Decode, MemAdr, MemWrite | 4 |
| R-type | Fetch, Decode, ExecuteR, ALUWB | 4 |
| I-type | Fetch, Decode, ExecuteI, ALUWB | 4 |
| `jal` | Fetch, Decode, JAL, ALUWB | 4 |
| `beq` | Fetch, Decode, BEQ | 3 |
| other | Fetch, Decode | 2 (no-op) |

The single ALU is the subtle part, because every state reuses it:

* **Fetch:** `Instr <= mem[PC]` and `OldPC <= PC`. The ALU computes PC + 4,
  and it goes straight into PC through `Result = ALUResult`.
* **Decode:** the ALU computes `OldPC + imm`, and ALUOut keeps it. For `beq`
  and `jal` this is the target. For other instructions the value is unused.
* **BEQ:** the ALU subtracts the two registers. If Zero is set, PC takes the
  target from ALUOut.
* **JAL:** PC takes ALUOut (the target). In the same cycle the ALU computes
  `OldPC + 4`. ALUWB then writes that value to `rd`.
* **Loads and stores:** MemAdr leaves the address in ALUOut. `AdrSrc = 1`
  then puts ALUOut on the memory address for one cycle. A load's word goes
  through the Data register and is written back one cycle later.

A worked example, `lw x5, 8(x2)` at address 0x40 with x2 = 0x100. Each row
is one clock cycle; the right column is what the rising edge at its end
stores.

| Cycle | State | Memory address | ALU computes | Stored at the edge |
|---|---|---|---|---|
| 1 | Fetch | PC = 0x40 | PC + 4 = 0x44 | Instr = lw, OldPC = 0x40, PC = 0x44 |
| 2 | Decode | PC | OldPC + 8 (unused) | A = x2, WriteData = x5 (unused), ALUOut |
| 3 | MemAdr | PC | A + 8 = 0x108 | ALUOut = 0x108 |
| 4 | MemRead | ALUOut = 0x108 | (don't care) | Data = mem[0x108] |
| 5 | MemWB | PC | (don't care) | x5 = Data |

The A, WriteData, ALUOut and Data registers load on every edge, as drawn in
the source diagram. Only PC (PCWrite) and the OldPC/Instr pair (IRWrite) have
enables. The mux input orders and the control-signal names match that
diagram:

* SrcA = {PC, OldPC, A}
* SrcB = {WriteData, ImmExt, 4}
* Result = {ALUOut, Data, ALUResult}

## Instruction set

The implemented instructions are:

* R-type: `add sub and or slt`
* I-type: `addi andi ori slti`
* `lw`, `sw`, `beq`, `jal`

This is the subset the design description lists: R-type, I-type, `lw`, `sw`,
`jal` and `beq`. With a 3-bit ALU-control bus, these are the ALU operations
that fit. The same description also calls the core "RV32I". Full RV32I
(shifts, `xor`, `lui`, `auipc`, `jalr`, the other branches, and byte and
halfword accesses) is **not** built. Any instruction outside the subset runs
as a 2-cycle no-op and leaves no architectural effect.

Memory is word-addressed through bits [11:2] of the byte address. Accesses
wrap modulo 4 kB, and the two low bits are ignored.

## Where this departs from, or goes beyond, the source

* **Memory size.** The text says four kilobytes. The tables print "4 kb". This
  RTL uses 4 kB (1024 words), set by the `MEM_BYTES` and `SIZE_BYTES`
  parameters.
* **XED.** The diagram shows XED entering the external address register but
  not how. Here it is a load enable on the core clock.
* **IE mid-instruction.** The core finishes the running instruction before it
  stops (see above).
* **Reset.** The reset is asynchronous. It clears only the PC and the FSM.
  The register file and the external address register are not reset.
* **Flip-flop count.** The published FPGA figure is 235 flip-flops. The
  diagram followed here has seven 32-bit datapath registers plus the 32-bit
  external address register. After synthesis, unused bits are trimmed (for
  example the low PC bits that never change). How the published figure was
  reached is not described.
* **Average CPI.** The published average CPI of 5 cannot follow from 3 to 5
  cycles per instruction unless nearly every instruction is a load. The
  per-instruction counts are what this RTL reproduces.
* **Not RTL.** The pad ring, the 180 nm layout and the surrounding pacemaker
  or accelerator blocks (pacing, sensing, EGM, telemetry, battery monitor,
  systolic array) are context only. None of them is designed here.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line.

* `biorv_tb_pkg.sv` holds RV32I instruction encoders and a small
  instruction-set reference model. The model is written independently of the
  RTL and returns each instruction's expected cycle cost. The package also has
  a random program generator. The generated programs branch and jump forward
  only and end in a `jal x0, 0` self-loop.
* `biorv_alu_tb`, `biorv_extend_tb`, `biorv_regfile_tb`, `biorv_mem_tb` and
  `biorv_ext_port_tb` check their module against reference values, using
  corner and random stimuli.
* `biorv_controller_tb` checks the following for every instruction:
  * the cycle count
  * the number of RegWrite, MemWrite, IRWrite and PCWrite cycles
  * the ALU operation and the immediate format
  * the Fetch selects
  * IE idling, stopping in the middle of an instruction, and reset

  It covers `beq` both taken and not taken, in directed and random cases.
* `biorv_datapath_tb` runs 20 random programs on controller + datapath,
  against a memory model. It compares the PC and the cycle count with the
  reference model at every fetch, and all memory at the end.
* `biorv_top_tb` uses the chip at its default size and drives only its pins.
  For each of four programs it:
  * loads all 1024 words through the external port
  * reads them back in observation mode
  * resets and runs the program in lock-step with the reference model
  * stops it once with IE and resumes it
  * reads the whole memory back and compares it

  It counts every mechanism: external write, observation read, reset start,
  IE stop/resume, each instruction class, branch taken and not taken, and
  unsupported instruction. It fails if any of them never happens. It finishes
  in about a second.

To run one testbench with Verilator (from the folder that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal --top-module biorv_top_tb \
    -y rtl -y tb +libext+.sv rtl/biorv_pkg.sv tb/biorv_tb_pkg.sv tb/biorv_top_tb.sv
obj_dir/Vbiorv_top_tb
```

Replace `biorv_top_tb` with any other testbench name. Every module in `rtl/`
also lints on its own with `verilator --lint-only -Wall`, with
`rtl/biorv_pkg.sv` read first. The only warnings are style warnings: unused
signals, and `reset` used both as an asynchronous reset and in an
assertion's `disable iff`.

## Changing it

* **Memory size.** Set `MEM_BYTES` on `biorv_top`. The address index width
  follows from it.
* **More instructions.** Add an opcode to `biorv_pkg`, a case in
  `supported()` and in the state logic of `biorv_controller`, and an ALU code
  if needed. The reference model in `tb/biorv_tb_pkg.sv` and the program
  generator need the same addition.
* **Other IE semantics.** To make IE freeze the core in any state, gate the
  state register and give the A, WriteData, ALUOut and Data registers an
  enable. Without that enable, a frozen MemRead state would clobber ALUOut.
