// biorv_regfile_tb -- self-checking test of biorv_regfile.
// Random writes and reads against a reference array; checks that x0 reads
// zero even after a write, that a write lands on the rising edge only and
// that WE3 low leaves the register unchanged.
module biorv_regfile_tb;
  logic        clk = 0;
  logic        we3;
  logic [4:0]  a1, a2, a3;
  logic [31:0] wd3, rd1, rd2;
  logic [31:0] ref_rf [32];
  int checks = 0, failures = 0;

  biorv_regfile dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    we3 = 0; a1 = 0; a2 = 0; a3 = 0; wd3 = 0;
    // initialise every register
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); we3 = 1; a3 = r[4:0]; wd3 = $urandom;
      ref_rf[r] = (r == 0) ? 32'h0 : wd3;
    end
    @(negedge clk); we3 = 0;
    repeat (1000) begin
      @(negedge clk);
      we3 = $urandom_range(1); a3 = $urandom; wd3 = $urandom;
      a1 = $urandom; a2 = $urandom;
      #1;
      chk("rd1 before edge", rd1, ref_rf[a1]);
      chk("rd2 before edge", rd2, ref_rf[a2]);
      @(posedge clk);
      if (we3 && a3 != 0) ref_rf[a3] = wd3;
      #1;
      chk("rd1 after edge", rd1, ref_rf[a1]);
      chk("rd2 after edge", rd2, ref_rf[a2]);
    end
    @(negedge clk); we3 = 1; a3 = 0; wd3 = 32'hDEAD_BEEF; a1 = 0; a2 = 0;
    @(negedge clk); chk("x0", rd1, 0); chk("x0", rd2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
