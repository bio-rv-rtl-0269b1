// biorv_datapath_tb -- self-checking test of biorv_datapath.
// The datapath is driven by the control unit (biorv_controller) and served
// by a plain memory array kept in this testbench (asynchronous read, write
// on the clock edge). Random programs from biorv_tb_pkg::gen_prog run to
// their final self-loop while the instruction-set reference model steps in
// lock-step: at every instruction fetch the PC must equal the model's, and
// the cycles since the previous fetch must equal the model's cycle cost.
// At the end every register (read back through a store) and every data word
// must equal the model's.
module biorv_datapath_tb;
  import biorv_pkg::*;
  import biorv_tb_pkg::*;

  localparam int WORDS = 512;
  localparam int DATA  = 1024;   // byte address of the data area

  logic        clk = 0, reset, ie;
  ctrl_t       ctrl;
  state_e      state;
  logic [6:0]  op;
  logic [2:0]  funct3;
  logic        funct7b5, zero;
  logic [31:0] adr, write_data, read_data, pc;
  logic [31:0] ram [WORDS];
  int checks = 0, failures = 0;

  biorv_controller u_ctrl (.clk, .reset, .ie, .op, .funct3, .funct7b5, .zero,
                           .ctrl, .state_o(state));
  biorv_datapath   dut    (.clk, .reset, .ctrl, .read_data, .adr, .write_data,
                           .op, .funct3, .funct7b5, .zero, .pc_o(pc));

  assign read_data = ram[adr[10:2]];
  always_ff @(posedge clk) if (ctrl.mem_write) ram[adr[10:2]] <= write_data;

  always #5 clk = ~clk;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic run_program(int n);
    logic [31:0] m[] = new[WORDS];
    logic [31:0] x[32];
    logic [31:0] ipc;
    int halt, cost, cyc;
    iclass_e cls;
    foreach (m[i]) m[i] = $urandom;
    halt = gen_prog(m, n, DATA);
    // store x1..x7 after the self-loop? No: append stores before it.
    for (int r = 1; r <= 7; r++) m[n + r - 1] = SW(r[4:0], 0, DATA + 256 + 4 * r);
    m[n + 7] = JAL(0, 0);
    halt = 4 * (n + 7);
    foreach (m[i]) ram[i] = m[i];
    foreach (x[i]) x[i] = 0;
    ipc = 0;
    reset = 1; ie = 0;
    @(negedge clk); reset = 0; ie = 1;
    cost = 0; cyc = 0;
    forever begin
      @(posedge clk);
      // the edge that ends a Fetch with IE high starts a new instruction
      if (state == S_FETCH) begin
        chk("cycles of previous instruction", cyc, cost);
        chk("pc at fetch", pc, ipc);
        if (ipc == halt) break;
        cost = iss_step(m, x, ipc, cls);
        cyc = 0;
      end
      cyc++;
    end
    for (int i = 0; i < WORDS; i++) chk($sformatf("mem[%0d]", i), ram[i], m[i]);
  endtask

  initial begin
    reset = 1; ie = 0;
    repeat (2) @(negedge clk);
    repeat (20) run_program(120);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
