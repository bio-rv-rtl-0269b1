// biorv_tb_pkg -- testbench helpers for Bio-RV: RV32I instruction encoders
// and an instruction-set reference model with the paper's cycle costs.
//
// The encoders build machine words straight from the RISC-V specification's
// field layouts. The reference model (iss_step) executes one instruction of
// the supported subset on a word array and returns the number of clock
// cycles the multi-cycle core should take for it (lw 5; R-type, I-type, sw,
// jal 4; beq 3; anything else is a 2-cycle no-op). It is written
// independently of the RTL and is what the end-to-end tests compare with.
package biorv_tb_pkg;

  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd);
    return {f7, rs2, rs1, f3, rd, 7'b0110011};
  endfunction

  function automatic logic [31:0] enc_i(logic [6:0] opc, int imm, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd);
    logic [31:0] i = imm;
    return {i[11:0], rs1, f3, rd, opc};
  endfunction

  function automatic logic [31:0] enc_s(int imm, logic [4:0] rs2, logic [4:0] rs1);
    logic [31:0] i = imm;
    return {i[11:5], rs2, rs1, 3'b010, i[4:0], 7'b0100011};
  endfunction

  function automatic logic [31:0] enc_b(int imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3 = 3'b000);
    logic [31:0] i = imm;
    return {i[12], i[10:5], rs2, rs1, f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] enc_j(int imm, logic [4:0] rd);
    logic [31:0] i = imm;
    return {i[20], i[10:1], i[11], i[19:12], rd, 7'b1101111};
  endfunction

  function automatic logic [31:0] ADD (logic [4:0] rd, rs1, rs2); return enc_r(7'h00, rs2, rs1, 3'b000, rd); endfunction
  function automatic logic [31:0] SUB (logic [4:0] rd, rs1, rs2); return enc_r(7'h20, rs2, rs1, 3'b000, rd); endfunction
  function automatic logic [31:0] SLT (logic [4:0] rd, rs1, rs2); return enc_r(7'h00, rs2, rs1, 3'b010, rd); endfunction
  function automatic logic [31:0] OR  (logic [4:0] rd, rs1, rs2); return enc_r(7'h00, rs2, rs1, 3'b110, rd); endfunction
  function automatic logic [31:0] AND (logic [4:0] rd, rs1, rs2); return enc_r(7'h00, rs2, rs1, 3'b111, rd); endfunction
  function automatic logic [31:0] XOR (logic [4:0] rd, rs1, rs2); return enc_r(7'h00, rs2, rs1, 3'b100, rd); endfunction
  function automatic logic [31:0] ADDI(logic [4:0] rd, rs1, int imm); return enc_i(7'b0010011, imm, rs1, 3'b000, rd); endfunction
  function automatic logic [31:0] SLTI(logic [4:0] rd, rs1, int imm); return enc_i(7'b0010011, imm, rs1, 3'b010, rd); endfunction
  function automatic logic [31:0] ORI (logic [4:0] rd, rs1, int imm); return enc_i(7'b0010011, imm, rs1, 3'b110, rd); endfunction
  function automatic logic [31:0] ANDI(logic [4:0] rd, rs1, int imm); return enc_i(7'b0010011, imm, rs1, 3'b111, rd); endfunction
  function automatic logic [31:0] LW  (logic [4:0] rd, rs1, int imm); return enc_i(7'b0000011, imm, rs1, 3'b010, rd); endfunction
  function automatic logic [31:0] SW  (logic [4:0] rs2, rs1, int imm); return enc_s(imm, rs2, rs1); endfunction
  function automatic logic [31:0] BEQ (logic [4:0] rs1, rs2, int imm); return enc_b(imm, rs2, rs1); endfunction
  function automatic logic [31:0] JAL (logic [4:0] rd, int imm); return enc_j(imm, rd); endfunction

  // Instruction classes, for counting what a test exercised
  typedef enum int {C_LW, C_SW, C_R, C_I, C_JAL, C_BEQ_T, C_BEQ_NT, C_NOP, C_NUM} iclass_e;

  function automatic int sext(logic [31:0] v, int bits);
    return int'($signed(v << (32 - bits))) >>> (32 - bits);
  endfunction

  // Executes the instruction at pc. Returns its cycle cost; cls gets its class.
  function automatic int iss_step(ref logic [31:0] mem[], ref logic [31:0] x[32],
                                  ref logic [31:0] pc, output iclass_e cls);
    logic [31:0] ins = mem[(pc >> 2) % mem.size()];
    logic [6:0]  opc = ins[6:0];
    logic [2:0]  f3  = ins[14:12];
    logic [4:0]  rd  = ins[11:7];
    logic [31:0] a   = x[ins[19:15]];
    logic [31:0] b   = x[ins[24:20]];
    logic [31:0] r;
    int          cyc;
    int          immi = sext(32'(ins[31:20]), 12);
    int          imms = sext(32'({ins[31:25], ins[11:7]}), 12);
    int          immb = sext(32'({ins[31], ins[7], ins[30:25], ins[11:8], 1'b0}), 13);
    int          immj = sext(32'({ins[31], ins[19:12], ins[20], ins[30:21], 1'b0}), 21);
    logic [31:0] npc = pc + 4;
    bit          wr  = 0;
    cls = C_NOP; cyc = 2;
    if (opc == 7'b0110011 && (f3 == 3'b000 || ins[31:25] == 7'h00) &&
        (ins[31:25] == 7'h00 || ins[31:25] == 7'h20) &&
        f3 inside {3'b000, 3'b010, 3'b110, 3'b111}) begin
      case (f3)
        3'b000: r = ins[30] ? a - b : a + b;
        3'b010: r = ($signed(a) < $signed(b)) ? 1 : 0;
        3'b110: r = a | b;
        default: r = a & b;
      endcase
      wr = 1; cls = C_R; cyc = 4;
    end else if (opc == 7'b0010011 && f3 inside {3'b000, 3'b010, 3'b110, 3'b111}) begin
      case (f3)
        3'b000: r = a + immi;
        3'b010: r = ($signed(a) < immi) ? 1 : 0;
        3'b110: r = a | immi;
        default: r = a & immi;
      endcase
      wr = 1; cls = C_I; cyc = 4;
    end else if (opc == 7'b0000011 && f3 == 3'b010) begin
      r = mem[((a + immi) >> 2) % mem.size()];
      wr = 1; cls = C_LW; cyc = 5;
    end else if (opc == 7'b0100011 && f3 == 3'b010) begin
      mem[((a + imms) >> 2) % mem.size()] = b;
      cls = C_SW; cyc = 4;
    end else if (opc == 7'b1100011 && f3 == 3'b000) begin
      if (a == b) begin npc = pc + immb; cls = C_BEQ_T; end
      else cls = C_BEQ_NT;
      cyc = 3;
    end else if (opc == 7'b1101111) begin
      r = pc + 4; npc = pc + immj; wr = 1; cls = C_JAL; cyc = 4;
    end
    if (wr && rd != 0) x[rd] = r;
    pc = npc;
    return cyc;
  endfunction

  // Random test program: n instructions at word 0, then "jal x0, 0" (a
  // self-loop that marks the end). Registers x1..x7 are set first; branches
  // and jumps only go forward, so every program ends. Loads and stores use
  // x0 as base and reach words data_base .. data_base+63 (byte offsets below
  // 2048). Every supported instruction appears, plus xor as an unsupported
  // one. Returns the byte address of the final self-loop.
  function automatic int gen_prog(ref logic [31:0] mem[], input int n, input int data_base);
    int k, pc;
    for (int r = 1; r <= 7; r++) mem[r-1] = ADDI(r[4:0], 0, $urandom_range(15));
    k = 7;
    while (k < n) begin
      logic [4:0] rd  = 5'($urandom_range(7));
      logic [4:0] rs1 = 5'($urandom_range(7));
      logic [4:0] rs2 = 5'($urandom_range(7));
      int imm = int'($urandom_range(63)) - 32;
      int off = data_base + 4 * int'($urandom_range(63));
      int fwd = 4 * int'($urandom_range(1, 4));
      if (k + fwd / 4 >= n) fwd = 4;
      case ($urandom_range(14))
        0: mem[k] = ADD(rd, rs1, rs2);
        1: mem[k] = SUB(rd, rs1, rs2);
        2: mem[k] = AND(rd, rs1, rs2);
        3: mem[k] = OR(rd, rs1, rs2);
        4: mem[k] = SLT(rd, rs1, rs2);
        5: mem[k] = ADDI(rd, rs1, imm);
        6: mem[k] = ANDI(rd, rs1, imm);
        7: mem[k] = ORI(rd, rs1, imm);
        8: mem[k] = SLTI(rd, rs1, imm);
        9: mem[k] = LW(rd, 0, off);
        10: mem[k] = SW(rs2, 0, off);
        11: mem[k] = BEQ(rs1, ($urandom_range(1) ? rs1 : rs2), fwd);
        12: mem[k] = BEQ(rs1, rs2, fwd);
        13: mem[k] = JAL(rd, fwd);
        default: mem[k] = XOR(rd, rs1, rs2);
      endcase
      k++;
    end
    mem[n] = JAL(0, 0);
    pc = 4 * n;
    return pc;
  endfunction

endpackage
