// biorv_pkg -- types and constants shared by the Bio-RV core.
//
// Holds the RV32I opcodes of the supported instruction subset, the ALU
// operation codes carried on the 3-bit ALUControl bus, the immediate formats
// selected by ImmSrc, the multiplexer selects of the multi-cycle datapath and
// the state encoding of the main controller FSM. The control signal names
// (PCWrite, AdrSrc, MemWrite, IRWrite, ResultSrc, ALUControl, ALUSrcA,
// ALUSrcB, ImmSrc, RegWrite) and the mux input orders are those printed on
// the Bio-RV datapath diagram; the numeric encodings of opcodes follow the
// RISC-V specification; ALU codes, ImmSrc codes and state codes are this
// design's own choice.
package biorv_pkg;

  localparam int unsigned XLEN = 32;

  // RV32I major opcodes used by the supported subset
  typedef enum logic [6:0] {
    OP_LOAD   = 7'b0000011,  // lw
    OP_IMM    = 7'b0010011,  // addi, slti, ori, andi
    OP_STORE  = 7'b0100011,  // sw
    OP_REG    = 7'b0110011,  // add, sub, slt, or, and
    OP_BRANCH = 7'b1100011,  // beq
    OP_JAL    = 7'b1101111   // jal
  } opcode_e;

  // ALUControl[2:0]
  typedef enum logic [2:0] {
    ALU_ADD = 3'b000,
    ALU_SUB = 3'b001,
    ALU_AND = 3'b010,
    ALU_OR  = 3'b011,
    ALU_SLT = 3'b101
  } alu_op_e;

  // ImmSrc[1:0]
  typedef enum logic [1:0] {
    IMM_I = 2'b00,
    IMM_S = 2'b01,
    IMM_B = 2'b10,
    IMM_J = 2'b11
  } imm_src_e;

  // ALUSrcA[1:0]: 00 PC, 01 OldPC, 10 register A (printed mux order)
  typedef enum logic [1:0] {
    SRCA_PC    = 2'b00,
    SRCA_OLDPC = 2'b01,
    SRCA_REG   = 2'b10
  } srca_e;

  // ALUSrcB[1:0]: 00 WriteData (register B), 01 ImmExt, 10 constant 4
  typedef enum logic [1:0] {
    SRCB_REG  = 2'b00,
    SRCB_IMM  = 2'b01,
    SRCB_FOUR = 2'b10
  } srcb_e;

  // ResultSrc[1:0]: 00 ALUOut, 01 Data, 10 ALUResult
  typedef enum logic [1:0] {
    RES_ALUOUT    = 2'b00,
    RES_DATA      = 2'b01,
    RES_ALURESULT = 2'b10
  } result_src_e;

  // ALUOp from the main FSM to the ALU decoder
  typedef enum logic [1:0] {
    ALUOP_ADD  = 2'b00,
    ALUOP_SUB  = 2'b01,
    ALUOP_FUNC = 2'b10
  } alu_class_e;

  // Main FSM states
  typedef enum logic [3:0] {
    S_FETCH     = 4'd0,
    S_DECODE    = 4'd1,
    S_MEMADR    = 4'd2,
    S_MEMREAD   = 4'd3,
    S_MEMWB     = 4'd4,
    S_MEMWRITE  = 4'd5,
    S_EXECUTER  = 4'd6,
    S_ALUWB     = 4'd7,
    S_EXECUTEI  = 4'd8,
    S_JAL       = 4'd9,
    S_BEQ       = 4'd10
  } state_e;

  // Control bundle from the control unit to the datapath
  typedef struct packed {
    logic        pc_write;
    logic        adr_src;     // 0: PC, 1: Result
    logic        mem_write;
    logic        ir_write;
    result_src_e result_src;
    alu_op_e     alu_control;
    srca_e       alu_src_a;
    srcb_e       alu_src_b;
    imm_src_e    imm_src;
    logic        reg_write;
  } ctrl_t;

endpackage
