// biorv_alu -- 32-bit ALU of the Bio-RV core.
//
// Combinational. Computes ALUResult from SrcA and SrcB under the 3-bit
// ALUControl code (add, sub, and, or, signed set-less-than) and raises Zero
// when the result is zero; the control unit uses Zero to resolve beq. The
// same adder serves address generation, PC+4, branch and jump targets, so the
// design needs no separate adders, as the paper's multi-cycle organisation
// intends. The operation set is the one needed by the instruction subset the
// paper lists (R-type, I-type, lw, sw, jal, beq); the code assignment is this
// design's own choice (see biorv_pkg). An unused code yields zero.
module biorv_alu
  import biorv_pkg::*;
(
  input  logic [XLEN-1:0] src_a,
  input  logic [XLEN-1:0] src_b,
  input  alu_op_e         alu_control,
  output logic [XLEN-1:0] alu_result,
  output logic            zero
);

  logic [XLEN-1:0] sum;
  logic            sub;
  logic            overflow;

  // One adder/subtractor: subtract by adding the inverted operand plus one
  assign sub      = (alu_control == ALU_SUB) || (alu_control == ALU_SLT);
  assign sum      = src_a + (sub ? ~src_b : src_b) + {{(XLEN-1){1'b0}}, sub};
  assign overflow = (src_a[XLEN-1] ^ sum[XLEN-1]) &
                    ~(src_a[XLEN-1] ^ src_b[XLEN-1] ^ sub);

  always_comb begin
    unique case (alu_control)
      ALU_ADD, ALU_SUB: alu_result = sum;
      ALU_AND:          alu_result = src_a & src_b;
      ALU_OR:           alu_result = src_a | src_b;
      ALU_SLT:          alu_result = {{(XLEN-1){1'b0}}, sum[XLEN-1] ^ overflow};
      default:          alu_result = '0;
    endcase
  end

  assign zero = (alu_result == '0);

endmodule
