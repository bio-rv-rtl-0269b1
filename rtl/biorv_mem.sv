// biorv_mem -- unified instruction/data memory of the Bio-RV chip.
//
// One word-organised memory holds both program and data (Von Neumann
// organisation), as the paper specifies. Reads are asynchronous: RD shows
// the word at address A in the same cycle. Writes are synchronous: WD is
// stored at A on the rising clock edge when WE is high. Only whole 32-bit
// words are accessed (lw/sw); the byte address A is word-aligned by dropping
// its two low bits and wraps modulo the memory size. The default size,
// 4 kB (1024 words), is the paper's program-memory size. The contents are
// not reset, so a program loaded through the external port survives a core
// reset.
module biorv_mem
  import biorv_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 4096
) (
  input  logic            clk,
  input  logic            we,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] wd,
  output logic [XLEN-1:0] rd
);

  localparam int unsigned WORDS = SIZE_BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [XLEN-1:0] ram [WORDS];
  logic [AW-1:0]   idx;

  assign idx = a[AW+1:2];

  always_ff @(posedge clk) begin
    if (we) ram[idx] <= wd;
  end

  assign rd = ram[idx];

endmodule
