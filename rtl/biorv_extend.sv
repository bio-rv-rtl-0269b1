// biorv_extend -- immediate generator of the Bio-RV core.
//
// Combinational. Takes instruction bits [31:7] and, under ImmSrc, assembles
// and sign-extends the RV32I immediate of the I (addi, lw), S (sw),
// B (beq) or J (jal) format into ImmExt. The input slice Instr[31:7] and the
// 2-bit ImmSrc select are as printed on the Bio-RV datapath diagram; the bit
// shuffles are those of the RISC-V specification; the ImmSrc code values
// are this design's own choice (see biorv_pkg).
module biorv_extend
  import biorv_pkg::*;
(
  input  logic [31:7]     instr,
  input  imm_src_e        imm_src,
  output logic [XLEN-1:0] imm_ext
);

  always_comb begin
    unique case (imm_src)
      IMM_I: imm_ext = {{20{instr[31]}}, instr[31:20]};
      IMM_S: imm_ext = {{20{instr[31]}}, instr[31:25], instr[11:7]};
      IMM_B: imm_ext = {{20{instr[31]}}, instr[7], instr[30:25], instr[11:8], 1'b0};
      IMM_J: imm_ext = {{12{instr[31]}}, instr[19:12], instr[20], instr[30:21], 1'b0};
      default: imm_ext = '0;
    endcase
  end

endmodule
