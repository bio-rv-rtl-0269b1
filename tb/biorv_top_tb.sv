// biorv_top_tb -- end-to-end test of the Bio-RV chip at its default size
// (4 kB unified memory), driven only through the chip pins.
//
// For each of several random programs (biorv_tb_pkg::gen_prog) it
//   1. programs the whole memory through the external port (XED cycle to
//      latch the address, then IEA/IED/XWE/MemWrite cycle to write the word)
//      with IE low, and reads every word back in observation mode;
//   2. pulses RESET, raises IE and lets the core run to the program's final
//      self-loop, comparing in lock-step with the instruction-set reference
//      model: PC at every fetch and the cycle count of every instruction
//      (lw 5; R, I, sw, jal 4; beq 3);
//   3. part-way through, lowers IE for a while and checks that the core
//      stops at an instruction boundary, keeps its PC and resumes;
//   4. lowers IE and reads the whole memory back through the pins, which
//      must match the reference model's memory.
// It counts how often each mechanism happened (external write, observation
// read, reset start, IE stop/resume, each instruction class, branch taken
// and not taken, unsupported instruction) and fails if one never did.
module biorv_top_tb;
  import biorv_pkg::*;
  import biorv_tb_pkg::*;

  localparam int WORDS = 1024;
  localparam int DATA  = 1024;   // byte address of the data area

  logic        clk = 0, reset, ie, mem_write, xwe, ied, xed, iea;
  logic [31:0] write_data, read_data;
  int checks = 0, failures = 0;
  int n_ext_wr = 0, n_ext_rd = 0, n_reset = 0, n_pause = 0;
  int n_cls [C_NUM];

  biorv_top dut (.*);

  always #10 clk = ~clk;   // 50 MHz

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic pins_idle();
    mem_write = 0; xwe = 0; ied = 0; xed = 0; iea = 0; write_data = 0;
  endtask

  task automatic ext_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk); pins_idle(); xed = 1; write_data = a;
    @(negedge clk); pins_idle(); iea = 1; ied = 1; xwe = 1; mem_write = 1; write_data = d;
    @(negedge clk); pins_idle();
    n_ext_wr++;
  endtask

  task automatic ext_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); pins_idle(); xed = 1; write_data = a;
    @(negedge clk); pins_idle(); iea = 1; xwe = 1; mem_write = 0;
    #1 d = read_data;
    n_ext_rd++;
  endtask

  task automatic run_program(int n, int seed);
    logic [31:0] m[] = new[WORDS];
    logic [31:0] x[32];
    logic [31:0] ipc, d, held_pc;
    int halt, cost, cyc, nins, pause_at;
    iclass_e cls;
    void'($urandom(seed));
    foreach (m[i]) m[i] = $urandom;
    void'(gen_prog(m, n, DATA));
    for (int r = 1; r <= 7; r++) m[n + r - 1] = SW(r[4:0], 0, DATA + 256 + 4 * r);
    m[n + 7] = JAL(0, 0);
    halt = 4 * (n + 7);
    // 1. programming mode
    ie = 0; reset = 0;
    for (int i = 0; i < WORDS; i++) ext_write(4 * i, m[i]);
    for (int i = 0; i < WORDS; i++) begin
      ext_read(4 * i, d);
      chk("readback after load", d, m[i]);
    end
    // 2. execution mode
    foreach (x[i]) x[i] = 0;
    ipc = 0;
    @(negedge clk); pins_idle(); reset = 1;
    @(negedge clk); reset = 0;
    chk("PC cleared by reset", dut.u_dp.pc, 0);
    n_reset++;
    ie = 1;
    cost = 0; cyc = 0; nins = 0;
    pause_at = $urandom_range(10, n / 2);
    forever begin
      @(posedge clk);
      if (dut.u_ctrl.state == S_FETCH && ie) begin
        chk("cycles of previous instruction", cyc, cost);
        chk("pc at fetch", dut.u_dp.pc, ipc);
        if (ipc == halt) break;
        cost = iss_step(m, x, ipc, cls);
        n_cls[cls]++;
        cyc = 0;
        nins++;
        if (nins == pause_at) begin
          // 3. stop with IE low while this instruction runs, then resume
          cyc++;                      // the fetch edge just seen
          @(negedge clk); ie = 0;
          repeat (cost + 10) begin
            @(posedge clk);
            if (!(dut.u_ctrl.state == S_FETCH && !ie)) cyc++;
          end
          held_pc = dut.u_dp.pc;
          chk("stopped in fetch", dut.u_ctrl.state, S_FETCH);
          chk("stopped at next PC", held_pc, ipc);
          repeat (10) @(posedge clk);
          chk("PC held while stopped", dut.u_dp.pc, held_pc);
          @(negedge clk); ie = 1;
          n_pause++;
          continue;
        end
      end
      cyc++;
    end
    // 4. observe
    @(negedge clk); ie = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      ext_read(4 * i, d);
      chk($sformatf("memory word %0d after run", i), d, m[i]);
    end
  endtask

  initial begin
    foreach (n_cls[i]) n_cls[i] = 0;
    pins_idle();
    reset = 1; ie = 0;
    repeat (2) @(negedge clk);
    reset = 0;
    for (int p = 0; p < 4; p++) run_program(150, 1 + p);
    $display("mechanisms: ext_write=%0d observe=%0d reset_start=%0d ie_pause=%0d",
             n_ext_wr, n_ext_rd, n_reset, n_pause);
    $display("mechanisms: lw=%0d sw=%0d R=%0d I=%0d jal=%0d beq_taken=%0d beq_not_taken=%0d unsupported=%0d",
             n_cls[C_LW], n_cls[C_SW], n_cls[C_R], n_cls[C_I], n_cls[C_JAL],
             n_cls[C_BEQ_T], n_cls[C_BEQ_NT], n_cls[C_NOP]);
    foreach (n_cls[i]) begin
      checks++;
      if (n_cls[i] == 0) begin failures++; $display("FAIL instruction class %0d never ran", i); end
    end
    checks += 4;
    if (n_ext_wr == 0 || n_ext_rd == 0 || n_reset == 0 || n_pause == 0) begin
      failures++;
      $display("FAIL a control mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
