// biorv_extend_tb -- self-checking test of biorv_extend.
// Builds instructions with the encoders of biorv_tb_pkg from random
// immediates and checks that the extender returns the same immediate, for
// each of the I, S, B and J formats.
module biorv_extend_tb;
  import biorv_pkg::*;
  import biorv_tb_pkg::*;

  logic [31:0] ins, imm;
  imm_src_e    src;
  int checks = 0, failures = 0;

  biorv_extend dut (.instr(ins[31:7]), .imm_src(src), .imm_ext(imm));

  task automatic check(imm_src_e s, logic [31:0] word, int exp);
    src = s; ins = word;
    #1;
    checks++;
    if (imm !== exp) begin
      failures++;
      $display("FAIL %s ins=%h imm=%h exp=%h", s.name(), word, imm, exp);
    end
  endtask

  initial begin
    int v;
    check(IMM_I, ADDI(1, 2, -1), -1);
    check(IMM_I, ADDI(1, 2, 2047), 2047);
    check(IMM_I, ADDI(1, 2, -2048), -2048);
    check(IMM_S, SW(3, 4, -4), -4);
    check(IMM_B, BEQ(1, 2, -4096), -4096);
    check(IMM_B, BEQ(1, 2, 4094), 4094);
    check(IMM_J, JAL(0, -1048576), -1048576);
    check(IMM_J, JAL(0, 1048574), 1048574);
    repeat (500) begin
      v = $urandom_range(4095) - 2048;           check(IMM_I, LW($urandom, $urandom, v), v);
      v = $urandom_range(4095) - 2048;           check(IMM_S, SW($urandom, $urandom, v), v);
      v = ($urandom_range(4095) - 2048) * 2;     check(IMM_B, BEQ($urandom, $urandom, v), v);
      v = ($urandom_range(1048575) - 524288) * 2; check(IMM_J, JAL($urandom, v), v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
