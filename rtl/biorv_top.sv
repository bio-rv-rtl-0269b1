// biorv_top -- the Bio-RV chip: multi-cycle RV32I-subset core, unified
// instruction/data memory and the external load/observe port.
//
// Pins (as on the chip's pad diagram): clk; reset (active high); ie
// (Instruction Enable); write_data[31:0] (external WriteData); mem_write,
// xwe, ied, xed, iea (external programming controls, one bit each); and
// read_data[31:0], the memory's asynchronous read port.
//
// Programming mode (ie = 0, reset = 0, core idle in Fetch):
//   cycle 1: xed = 1, write_data = byte address   -> address register
//   cycle 2: iea = ied = xwe = mem_write = 1,
//            write_data = word                    -> memory
// Observation: iea = xwe = 1, mem_write = 0; read_data shows the word at the
// latched address in the same cycle.
// Execution mode: pulse reset (PC <- 0), release it, drop iea/ied/xwe and
// raise ie; the core fetches from address 0 on the next rising edge. With
// ie low the core stops at the next instruction boundary; raising ie again
// resumes.
// The core takes 3 cycles for beq, 4 for R-type, I-type, sw and jal and 5
// for lw. The controller's state and the datapath's PC are internal nets
// with no pin of their own (the published pin list has none); testbenches
// reach them hierarchically (u_ctrl.state, u_dp.pc).
module biorv_top
  import biorv_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 4096
) (
  input  logic            clk,
  input  logic            reset,
  input  logic            ie,
  input  logic [XLEN-1:0] write_data,
  input  logic            mem_write,
  input  logic            xwe,
  input  logic            ied,
  input  logic            xed,
  input  logic            iea,
  output logic [XLEN-1:0] read_data
);

  ctrl_t           ctrl;
  state_e          state;
  logic [6:0]      op;
  logic [2:0]      funct3;
  logic            funct7b5, zero;
  logic [XLEN-1:0] core_adr, core_wd, pc;
  logic [XLEN-1:0] mem_adr, mem_wd;
  logic            mem_we;

  biorv_controller u_ctrl (
    .clk      (clk),
    .reset    (reset),
    .ie       (ie),
    .op       (op),
    .funct3   (funct3),
    .funct7b5 (funct7b5),
    .zero     (zero),
    .ctrl     (ctrl),
    .state_o  (state)
  );

  biorv_datapath u_dp (
    .clk        (clk),
    .reset      (reset),
    .ctrl       (ctrl),
    .read_data  (read_data),
    .adr        (core_adr),
    .write_data (core_wd),
    .op         (op),
    .funct3     (funct3),
    .funct7b5   (funct7b5),
    .zero       (zero),
    .pc_o       (pc)
  );

  biorv_ext_port u_xport (
    .clk             (clk),
    .ext_write_data  (write_data),
    .ext_mem_write   (mem_write),
    .xwe             (xwe),
    .ied             (ied),
    .xed             (xed),
    .iea             (iea),
    .core_adr        (core_adr),
    .core_write_data (core_wd),
    .core_mem_write  (ctrl.mem_write),
    .mem_adr         (mem_adr),
    .mem_write_data  (mem_wd),
    .mem_we          (mem_we)
  );

  biorv_mem #(.SIZE_BYTES(MEM_BYTES)) u_mem (
    .clk (clk),
    .we  (mem_we),
    .a   (mem_adr),
    .wd  (mem_wd),
    .rd  (read_data)
  );

  // Pin protocol: the pins may take the memory's write enable (xwe = 1)
  // only while the core is not itself storing, i.e. after IE has been low
  // long enough for the core to reach Fetch.
  a_no_write_conflict: assert property (@(posedge clk) disable iff (reset)
      !(xwe && ctrl.mem_write))
    else $error("external write enable taken while the core is storing");

endmodule
