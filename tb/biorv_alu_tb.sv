// biorv_alu_tb -- self-checking test of biorv_alu.
// Applies directed corner cases and random operands to every operation and
// compares ALUResult and Zero with values computed here from the operation's
// definition (signed comparison via $signed).
module biorv_alu_tb;
  import biorv_pkg::*;

  logic [31:0] a, b, y;
  logic        z;
  alu_op_e     op;
  int checks = 0, failures = 0;

  biorv_alu dut (.src_a(a), .src_b(b), .alu_control(op), .alu_result(y), .zero(z));

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x1, logic [31:0] x2);
    case (o)
      ALU_ADD: return x1 + x2;
      ALU_SUB: return x1 - x2;
      ALU_AND: return x1 & x2;
      ALU_OR:  return x1 | x2;
      ALU_SLT: return {31'b0, $signed(x1) < $signed(x2)};
      default: return 32'h0;
    endcase
  endfunction

  task automatic check(alu_op_e o, logic [31:0] x1, logic [31:0] x2);
    logic [31:0] e;
    op = o; a = x1; b = x2;
    #1;
    e = model(o, x1, x2);
    checks++;
    if (y !== e || z !== (e == 0)) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h y=%h z=%b exp=%h", o.name(), x1, x2, y, z, e);
    end
  endtask

  initial begin
    static alu_op_e ops[5] = '{ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_SLT};
    static logic [31:0] corner[6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h7FFF_FFFF, 32'h8000_0000, 32'h1234_5678};
    foreach (ops[i]) foreach (corner[j]) foreach (corner[k]) check(ops[i], corner[j], corner[k]);
    repeat (2000) check(ops[$urandom_range(4)], $urandom, $urandom);
    // equal operands for the beq compare
    repeat (50) begin automatic logic [31:0] v = $urandom; check(ALU_SUB, v, v); end
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
