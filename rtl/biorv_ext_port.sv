// biorv_ext_port -- external load/observe port of the Bio-RV chip.
//
// This is what lets a tester program and inspect the unified memory from the
// chip pins without running the core. It sits between the core and the
// memory and consists of:
//   * an address register (the "DFF" of the datapath diagram) that captures
//     the 32-bit external WriteData bus on a rising clock edge while XED is
//     high; it holds the external memory address;
//   * the address multiplexer: IEA = 0 gives the core's Adr, IEA = 1 the
//     captured external address;
//   * the write-data multiplexer: IED = 0 gives the core's WriteData
//     (register B), IED = 1 the external WriteData bus;
//   * the write-enable multiplexer: XWE = 0 gives the core's MemWrite,
//     XWE = 1 the external MemWrite pin.
// The three select pins, the DFF and the mux input orders are as printed on
// the datapath diagram. Which of XED's possible roles drives the DFF is not
// printed; it is taken here as the DFF's load enable (clocked by clk), which
// is this design's choice. The address register has no reset.
//
// Loading one word therefore takes two clock edges: one with XED = 1 and the
// address on WriteData, one with IEA = IED = XWE = MemWrite = 1 and the data
// on WriteData. Observation (IEA = XWE = 1, MemWrite = 0) shows the word at
// the captured address on the memory's asynchronous read port.
module biorv_ext_port
  import biorv_pkg::*;
(
  input  logic            clk,
  // chip pins
  input  logic [XLEN-1:0] ext_write_data,  // WriteData, 32-bit
  input  logic            ext_mem_write,   // MemWrite pin
  input  logic            xwe,             // select external write enable
  input  logic            ied,             // select external write data
  input  logic            xed,             // load external address register
  input  logic            iea,             // select external address
  // from the core
  input  logic [XLEN-1:0] core_adr,
  input  logic [XLEN-1:0] core_write_data,
  input  logic            core_mem_write,
  // to the memory
  output logic [XLEN-1:0] mem_adr,
  output logic [XLEN-1:0] mem_write_data,
  output logic            mem_we
);

  logic [XLEN-1:0] ext_adr;

  always_ff @(posedge clk) begin
    if (xed) ext_adr <= ext_write_data;
  end

  assign mem_adr        = iea ? ext_adr        : core_adr;
  assign mem_write_data = ied ? ext_write_data : core_write_data;
  assign mem_we         = xwe ? ext_mem_write  : core_mem_write;

endmodule
