// biorv_datapath -- multi-cycle datapath of the Bio-RV core.
//
// Follows the Bio-RV datapath diagram register for register:
//   PC      program counter, loaded from Result when PCWrite is high,
//           cleared by RESET (asynchronous, active high);
//   OldPC / Instr
//           PC of the fetched instruction and the instruction itself,
//           loaded from PC and the memory read data when IRWrite is high;
//   A / WriteData
//           the two register-file read values, one cycle later;
//   ALUOut  the ALU result, one cycle later;
//   Data    the memory read data, one cycle later.
// A, WriteData, ALUOut and Data load on every clock edge, as drawn.
// Multiplexers (input order as printed): memory address Adr = AdrSrc ?
// Result : PC; SrcA = {PC, OldPC, A}; SrcB = {WriteData, ImmExt, 4};
// Result = {ALUOut, Data, ALUResult}. Register-file addresses are
// Instr[19:15], Instr[24:20] and Instr[11:7]; WD3 is Result. The single ALU
// serves every addition, so there is no separate PC or branch adder.
//
// Interface: ctrl comes from biorv_controller; read_data is the memory's
// asynchronous read port; adr and write_data go to the memory (through the
// external load port). op, funct3, funct7b5 and zero return to the control
// unit. The MemWrite field of ctrl is not used here: it goes from the
// control unit to the memory through the external load port.
module biorv_datapath
  import biorv_pkg::*;
(
  input  logic            clk,
  input  logic            reset,
  input  ctrl_t           ctrl,
  input  logic [XLEN-1:0] read_data,
  output logic [XLEN-1:0] adr,
  output logic [XLEN-1:0] write_data,
  output logic [6:0]      op,
  output logic [2:0]      funct3,
  output logic            funct7b5,
  output logic            zero,
  output logic [XLEN-1:0] pc_o
);

  logic [XLEN-1:0] pc, old_pc, instr;
  logic [XLEN-1:0] rd1, rd2, a_reg;
  logic [XLEN-1:0] imm_ext, src_a, src_b, alu_result, alu_out, data, result;

  // PC register with enable
  always_ff @(posedge clk or posedge reset) begin
    if (reset)              pc <= '0;
    else if (ctrl.pc_write) pc <= result;
  end

  // OldPC and instruction register
  always_ff @(posedge clk) begin
    if (ctrl.ir_write) begin
      old_pc <= pc;
      instr  <= read_data;
    end
  end

  // Non-architectural registers, loaded every cycle
  always_ff @(posedge clk) begin
    a_reg      <= rd1;
    write_data <= rd2;
    alu_out    <= alu_result;
    data       <= read_data;
  end

  biorv_regfile u_rf (
    .clk (clk),
    .we3 (ctrl.reg_write),
    .a1  (instr[19:15]),
    .a2  (instr[24:20]),
    .a3  (instr[11:7]),
    .wd3 (result),
    .rd1 (rd1),
    .rd2 (rd2)
  );

  biorv_extend u_ext (
    .instr   (instr[31:7]),
    .imm_src (ctrl.imm_src),
    .imm_ext (imm_ext)
  );

  always_comb begin
    unique case (ctrl.alu_src_a)
      SRCA_PC:    src_a = pc;
      SRCA_OLDPC: src_a = old_pc;
      SRCA_REG:   src_a = a_reg;
      default:    src_a = '0;
    endcase
    unique case (ctrl.alu_src_b)
      SRCB_REG:  src_b = write_data;
      SRCB_IMM:  src_b = imm_ext;
      SRCB_FOUR: src_b = 32'd4;
      default:   src_b = '0;
    endcase
  end

  biorv_alu u_alu (
    .src_a       (src_a),
    .src_b       (src_b),
    .alu_control (ctrl.alu_control),
    .alu_result  (alu_result),
    .zero        (zero)
  );

  always_comb begin
    unique case (ctrl.result_src)
      RES_ALUOUT:    result = alu_out;
      RES_DATA:      result = data;
      RES_ALURESULT: result = alu_result;
      default:       result = '0;
    endcase
  end

  assign adr      = ctrl.adr_src ? result : pc;
  assign op       = instr[6:0];
  assign funct3   = instr[14:12];
  assign funct7b5 = instr[30];
  assign pc_o     = pc;

endmodule
