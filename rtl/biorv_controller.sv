// biorv_controller -- control unit of the Bio-RV multi-cycle core.
//
// A Moore FSM steps every instruction through the states below and drives
// the datapath's enables and multiplexer selects (the ctrl_t bundle). Its
// inputs are the instruction fields op (Instr[6:0]), funct3 (Instr[14:12])
// and funct7_5 (Instr[30]), the ALU's Zero flag, the active-high RESET and
// the Instruction Enable IE, all as printed on the datapath diagram.
//
//   lw    : Fetch, Decode, MemAdr, MemRead, MemWB        5 cycles
//   sw    : Fetch, Decode, MemAdr, MemWrite              4 cycles
//   R-type: Fetch, Decode, ExecuteR, ALUWB               4 cycles
//   I-type: Fetch, Decode, ExecuteI, ALUWB               4 cycles
//   jal   : Fetch, Decode, JAL, ALUWB                    4 cycles
//   beq   : Fetch, Decode, BEQ                           3 cycles
//
// These cycle counts are the paper's. The state sequence is the classic
// multi-cycle RISC-V organisation that the paper's datapath reproduces (one
// ALU computes PC+4 in Fetch and the branch target in Decode).
//
// Execution control: RESET (asynchronous, active high) returns the FSM to
// Fetch. In Fetch the FSM waits, with every write enable low, as long as IE
// is low; with IE high it fetches on the next rising edge. A running
// instruction is always completed, so lowering IE stops the core at the next
// instruction boundary and raising it again resumes from the saved PC. That
// IE acts only in Fetch is this design's choice: the paper says IE is part
// of the control logic and that holding it low stops execution.
//
// Instructions outside the supported subset (add, sub, and, or, slt, addi,
// andi, ori, slti, lw, sw, beq, jal) retire as two-cycle no-ops.
module biorv_controller
  import biorv_pkg::*;
(
  input  logic       clk,
  input  logic       reset,
  input  logic       ie,
  input  logic [6:0] op,
  input  logic [2:0] funct3,
  input  logic       funct7b5,
  input  logic       zero,
  output ctrl_t      ctrl,
  output state_e     state_o
);

  state_e     state, state_n;
  alu_class_e alu_class;
  logic       pc_update, branch;

  // ---------------------------------------------------------------- decode
  function automatic logic supported(logic [6:0] o, logic [2:0] f3, logic f7b5);
    unique case (o)
      OP_LOAD, OP_STORE: return f3 == 3'b010;
      OP_BRANCH:         return f3 == 3'b000;
      OP_JAL:            return 1'b1;
      OP_IMM:            return f3 inside {3'b000, 3'b010, 3'b110, 3'b111};
      OP_REG:            return (f3 == 3'b000) || (f3 inside {3'b010, 3'b110, 3'b111} && !f7b5);
      default:           return 1'b0;
    endcase
  endfunction

  // --------------------------------------------------------------- state reg
  always_ff @(posedge clk or posedge reset) begin
    if (reset) state <= S_FETCH;
    else       state <= state_n;
  end

  always_comb begin
    state_n = state;
    unique case (state)
      S_FETCH:    state_n = ie ? S_DECODE : S_FETCH;
      S_DECODE: begin
        if (!supported(op, funct3, funct7b5)) state_n = S_FETCH;
        else unique case (op)
          OP_LOAD, OP_STORE: state_n = S_MEMADR;
          OP_REG:            state_n = S_EXECUTER;
          OP_IMM:            state_n = S_EXECUTEI;
          OP_JAL:            state_n = S_JAL;
          OP_BRANCH:         state_n = S_BEQ;
          default:           state_n = S_FETCH;
        endcase
      end
      S_MEMADR:   state_n = (op == OP_LOAD) ? S_MEMREAD : S_MEMWRITE;
      S_MEMREAD:  state_n = S_MEMWB;
      S_MEMWB:    state_n = S_FETCH;
      S_MEMWRITE: state_n = S_FETCH;
      S_EXECUTER: state_n = S_ALUWB;
      S_EXECUTEI: state_n = S_ALUWB;
      S_JAL:      state_n = S_ALUWB;
      S_ALUWB:    state_n = S_FETCH;
      S_BEQ:      state_n = S_FETCH;
      default:    state_n = S_FETCH;
    endcase
  end

  // ----------------------------------------------------------- FSM outputs
  always_comb begin
    pc_update            = 1'b0;
    branch               = 1'b0;
    alu_class            = ALUOP_ADD;
    ctrl.adr_src         = 1'b0;
    ctrl.mem_write       = 1'b0;
    ctrl.ir_write        = 1'b0;
    ctrl.reg_write       = 1'b0;
    ctrl.result_src      = RES_ALUOUT;
    ctrl.alu_src_a       = SRCA_PC;
    ctrl.alu_src_b       = SRCB_REG;
    unique case (state)
      S_FETCH: begin
        ctrl.ir_write   = ie;
        pc_update       = ie;
        ctrl.alu_src_a  = SRCA_PC;
        ctrl.alu_src_b  = SRCB_FOUR;
        ctrl.result_src = RES_ALURESULT;
      end
      S_DECODE: begin            // ALUOut <= OldPC + imm (branch target)
        ctrl.alu_src_a  = SRCA_OLDPC;
        ctrl.alu_src_b  = SRCB_IMM;
      end
      S_MEMADR: begin
        ctrl.alu_src_a  = SRCA_REG;
        ctrl.alu_src_b  = SRCB_IMM;
      end
      S_MEMREAD: begin
        ctrl.adr_src    = 1'b1;
        ctrl.result_src = RES_ALUOUT;
      end
      S_MEMWB: begin
        ctrl.result_src = RES_DATA;
        ctrl.reg_write  = 1'b1;
      end
      S_MEMWRITE: begin
        ctrl.adr_src    = 1'b1;
        ctrl.result_src = RES_ALUOUT;
        ctrl.mem_write  = 1'b1;
      end
      S_EXECUTER: begin
        ctrl.alu_src_a  = SRCA_REG;
        ctrl.alu_src_b  = SRCB_REG;
        alu_class       = ALUOP_FUNC;
      end
      S_EXECUTEI: begin
        ctrl.alu_src_a  = SRCA_REG;
        ctrl.alu_src_b  = SRCB_IMM;
        alu_class       = ALUOP_FUNC;
      end
      S_JAL: begin               // PC <= target, ALUOut <= OldPC + 4
        ctrl.alu_src_a  = SRCA_OLDPC;
        ctrl.alu_src_b  = SRCB_FOUR;
        ctrl.result_src = RES_ALUOUT;
        pc_update       = 1'b1;
      end
      S_ALUWB: begin
        ctrl.result_src = RES_ALUOUT;
        ctrl.reg_write  = 1'b1;
      end
      S_BEQ: begin               // compare, PC <= ALUOut (target) if equal
        ctrl.alu_src_a  = SRCA_REG;
        ctrl.alu_src_b  = SRCB_REG;
        ctrl.result_src = RES_ALUOUT;
        alu_class       = ALUOP_SUB;
        branch          = 1'b1;
      end
      default: ;
    endcase
  end

  assign ctrl.pc_write = pc_update | (branch & zero);

  // ----------------------------------------------------------- ALU decoder
  always_comb begin
    unique case (alu_class)
      ALUOP_ADD: ctrl.alu_control = ALU_ADD;
      ALUOP_SUB: ctrl.alu_control = ALU_SUB;
      default: begin
        unique case (funct3)
          3'b000:  ctrl.alu_control = (op[5] && funct7b5) ? ALU_SUB : ALU_ADD;
          3'b010:  ctrl.alu_control = ALU_SLT;
          3'b110:  ctrl.alu_control = ALU_OR;
          3'b111:  ctrl.alu_control = ALU_AND;
          default: ctrl.alu_control = ALU_ADD;
        endcase
      end
    endcase
  end

  // ------------------------------------------------- immediate-format decoder
  always_comb begin
    unique case (op)
      OP_STORE:  ctrl.imm_src = IMM_S;
      OP_BRANCH: ctrl.imm_src = IMM_B;
      OP_JAL:    ctrl.imm_src = IMM_J;
      default:   ctrl.imm_src = IMM_I;
    endcase
  end

  assign state_o = state;

  // No write reaches memory or the register file while the core waits.
  a_idle_quiet: assert property (@(posedge clk) disable iff (reset)
      (state == S_FETCH && !ie) |-> !(ctrl.pc_write || ctrl.ir_write ||
                                      ctrl.reg_write || ctrl.mem_write));

endmodule
