// biorv_controller_tb -- self-checking test of biorv_controller.
// Presents each supported instruction (and an unsupported one) to the
// control unit as the instruction register would, runs it from Fetch back
// to Fetch and checks: the number of cycles (lw 5; R, I, sw, jal 4; beq 3;
// unsupported 2), how many cycles assert RegWrite, MemWrite, IRWrite and
// PCWrite, the ALU operation chosen for the execute step, the immediate
// format, and the Fetch-cycle selects (PC + 4 into PC). Also checks that
// with IE low the FSM idles in Fetch with all writes off, that a running
// instruction finishes when IE drops, and that RESET returns it to Fetch.
module biorv_controller_tb;
  import biorv_pkg::*;
  import biorv_tb_pkg::*;

  logic        clk = 0, reset, ie, funct7b5, zero;
  logic [6:0]  op;
  logic [2:0]  funct3;
  ctrl_t       ctrl;
  state_e      state_o;
  int checks = 0, failures = 0;

  biorv_controller dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // Run one instruction; the FSM must be in Fetch on entry.
  task automatic run(string name, logic [31:0] ins, logic z, int exp_cyc, int exp_rw,
                     int exp_mw, int exp_pcw, int exp_alu, int exp_imm);
    int cyc = 0, rw = 0, mw = 0, irw = 0, pcw = 0, alu = -1, imm = -1;
    op = ins[6:0]; funct3 = ins[14:12]; funct7b5 = ins[30]; zero = z;
    chk({name, " starts in fetch"}, state_o, S_FETCH);
    do begin
      #1;
      if (cyc == 0) begin
        chk({name, " fetch srcA=PC"}, ctrl.alu_src_a, SRCA_PC);
        chk({name, " fetch srcB=4"}, ctrl.alu_src_b, SRCB_FOUR);
        chk({name, " fetch result=ALUResult"}, ctrl.result_src, RES_ALURESULT);
        chk({name, " fetch adr=PC"}, ctrl.adr_src, 0);
      end
      if (state_o inside {S_MEMADR, S_EXECUTER, S_EXECUTEI, S_BEQ}) alu = ctrl.alu_control;
      if (state_o == S_DECODE) imm = ctrl.imm_src;
      rw += ctrl.reg_write; mw += ctrl.mem_write; irw += ctrl.ir_write; pcw += ctrl.pc_write;
      @(posedge clk); cyc++;
      #1;
    end while (state_o != S_FETCH && cyc < 20);
    chk({name, " cycles"}, cyc, exp_cyc);
    chk({name, " RegWrite"}, rw, exp_rw);
    chk({name, " MemWrite"}, mw, exp_mw);
    chk({name, " IRWrite"}, irw, 1);
    chk({name, " PCWrite"}, pcw, exp_pcw);
    if (exp_alu >= 0) chk({name, " ALUControl"}, alu, exp_alu);
    if (exp_imm >= 0) chk({name, " ImmSrc"}, imm, exp_imm);
    @(negedge clk);
  endtask

  initial begin
    reset = 1; ie = 0; op = 0; funct3 = 0; funct7b5 = 0; zero = 0;
    repeat (2) @(negedge clk);
    reset = 0;
    // IE low: idle in Fetch, nothing written
    op = OP_REG;
    repeat (10) begin
      @(negedge clk);
      chk("idle state", state_o, S_FETCH);
      chk("idle writes", {ctrl.pc_write, ctrl.ir_write, ctrl.reg_write, ctrl.mem_write}, 0);
    end
    ie = 1;
    //                                          cyc rw mw pcw alu      imm
    run("lw",   LW(1, 2, 8),         0,        5,  1, 0, 1,  ALU_ADD, IMM_I);
    run("sw",   SW(1, 2, 8),         0,        4,  0, 1, 1,  -1,      IMM_S);
    run("add",  ADD(1, 2, 3),        0,        4,  1, 0, 1,  ALU_ADD, -1);
    run("sub",  SUB(1, 2, 3),        0,        4,  1, 0, 1,  ALU_SUB, -1);
    run("and",  AND(1, 2, 3),        0,        4,  1, 0, 1,  ALU_AND, -1);
    run("or",   OR(1, 2, 3),         0,        4,  1, 0, 1,  ALU_OR,  -1);
    run("slt",  SLT(1, 2, 3),        0,        4,  1, 0, 1,  ALU_SLT, -1);
    run("addi", ADDI(1, 2, -3),      0,        4,  1, 0, 1,  ALU_ADD, IMM_I);
    run("addi f7", ADDI(1, 2, -1024), 0,       4,  1, 0, 1,  ALU_ADD, IMM_I);
    run("andi", ANDI(1, 2, 3),       0,        4,  1, 0, 1,  ALU_AND, IMM_I);
    run("ori",  ORI(1, 2, 3),        0,        4,  1, 0, 1,  ALU_OR,  IMM_I);
    run("slti", SLTI(1, 2, 3),       0,        4,  1, 0, 1,  ALU_SLT, IMM_I);
    run("jal",  JAL(1, 64),          0,        4,  1, 0, 2,  -1,      IMM_J);
    run("beq taken",     BEQ(1, 2, 16), 1,     3,  0, 0, 2,  ALU_SUB, IMM_B);
    run("beq not taken", BEQ(1, 2, 16), 0,     3,  0, 0, 1,  ALU_SUB, IMM_B);
    run("xor unsupported", XOR(1, 2, 3), 0,    2,  0, 0, 1,  -1,      -1);
    run("bad opcode", 32'h0000_0000, 0,        2,  0, 0, 1,  -1,      -1);
    // random branches: PCWrite in the BEQ state must follow Zero
    repeat (60) begin
      automatic logic z = 1'($urandom_range(1));
      run(z ? "beq random taken" : "beq random not taken", BEQ(5'($urandom), 5'($urandom), 8),
          z, 3, 0, 0, z ? 2 : 1, ALU_SUB, IMM_B);
    end
    // IE dropped in the middle of lw: lw completes, then the FSM idles
    op = OP_LOAD; funct3 = 3'b010; funct7b5 = 0;
    @(negedge clk); @(negedge clk); ie = 0;    // now in MemAdr
    repeat (3) @(negedge clk);
    chk("lw finished after IE drop", state_o, S_FETCH);
    repeat (5) begin
      @(negedge clk);
      chk("stopped", state_o, S_FETCH);
      chk("stopped writes", {ctrl.pc_write, ctrl.ir_write, ctrl.reg_write, ctrl.mem_write}, 0);
    end
    // reset in the middle of an instruction
    ie = 1; op = OP_REG;
    @(negedge clk); @(negedge clk);
    chk("mid-instruction", state_o != S_FETCH, 1);
    reset = 1; #1; chk("reset to fetch", state_o, S_FETCH);
    @(negedge clk); reset = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
