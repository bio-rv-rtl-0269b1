// biorv_regfile -- 32 x 32-bit integer register file of the Bio-RV core.
//
// Two combinational read ports (A1 -> RD1, A2 -> RD2) and one write port
// (A3, WD3) written on the rising clock edge when WE3 is high. Register x0
// always reads zero and ignores writes, as RV32I requires. The port names
// are those printed on the Bio-RV datapath diagram. The registers are not
// reset (the paper says nothing of it); software must write a register
// before reading it.
module biorv_regfile
  import biorv_pkg::*;
(
  input  logic            clk,
  input  logic            we3,
  input  logic [4:0]      a1,
  input  logic [4:0]      a2,
  input  logic [4:0]      a3,
  input  logic [XLEN-1:0] wd3,
  output logic [XLEN-1:0] rd1,
  output logic [XLEN-1:0] rd2
);

  logic [XLEN-1:0] rf [1:31];

  always_ff @(posedge clk) begin
    if (we3 && a3 != 5'd0) rf[a3] <= wd3;
  end

  assign rd1 = (a1 == 5'd0) ? '0 : rf[a1];
  assign rd2 = (a2 == 5'd0) ? '0 : rf[a2];

endmodule
