// biorv_mem_tb -- self-checking test of biorv_mem at its default 4 kB size.
// Fills every word, then mixes random writes and reads against a reference
// array. Checks that reads are asynchronous (data visible in the same cycle
// the address changes), writes take effect only on the clock edge with WE
// high, and the two low address bits are ignored.
module biorv_mem_tb;
  localparam int WORDS = 1024;
  logic        clk = 0;
  logic        we;
  logic [31:0] a, wd, rd;
  logic [31:0] ref_m [WORDS];
  int checks = 0, failures = 0;

  biorv_mem dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%h got=%h exp=%h", what, a, got, exp);
    end
  endtask

  initial begin
    we = 0; a = 0; wd = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); we = 1; a = i * 4; wd = $urandom; ref_m[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < WORDS; i++) begin
      a = i * 4 + $urandom_range(3); #1; chk("fill read", rd, ref_m[i]);
    end
    repeat (2000) begin
      @(negedge clk);
      we = $urandom_range(1); a = $urandom_range(WORDS * 4 - 1); wd = $urandom;
      #1;
      chk("async read", rd, ref_m[a[11:2]]);
      @(posedge clk);
      if (we) ref_m[a[11:2]] = wd;
      #1;
      chk("after edge", rd, ref_m[a[11:2]]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
