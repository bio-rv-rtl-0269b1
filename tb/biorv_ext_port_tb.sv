// biorv_ext_port_tb -- self-checking test of biorv_ext_port.
// Checks that the address register loads the external bus only on a clock
// edge with XED high and holds otherwise, and that IEA, IED and XWE each
// choose between the core's and the external address, write data and write
// enable, in every combination.
module biorv_ext_port_tb;
  logic        clk = 0;
  logic [31:0] ext_write_data, core_adr, core_write_data, mem_adr, mem_write_data;
  logic        ext_mem_write, xwe, ied, xed, iea, core_mem_write, mem_we;
  logic [31:0] latched;
  int checks = 0, failures = 0;

  biorv_ext_port dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    xed = 0; iea = 0; ied = 0; xwe = 0; ext_mem_write = 0; core_mem_write = 0;
    ext_write_data = 0; core_adr = 0; core_write_data = 0;
    @(negedge clk); xed = 1; ext_write_data = 32'h0000_0ABC; latched = 32'h0000_0ABC;
    @(negedge clk); xed = 0;
    repeat (500) begin
      @(negedge clk);
      xed = $urandom_range(1); iea = $urandom_range(1); ied = $urandom_range(1);
      xwe = $urandom_range(1); ext_mem_write = $urandom_range(1);
      core_mem_write = $urandom_range(1);
      ext_write_data = $urandom; core_adr = $urandom; core_write_data = $urandom;
      #1;
      chk("adr", mem_adr, iea ? latched : core_adr);
      chk("wd",  mem_write_data, ied ? ext_write_data : core_write_data);
      chk("we",  {31'b0, mem_we}, {31'b0, xwe ? ext_mem_write : core_mem_write});
      @(posedge clk);
      if (xed) latched = ext_write_data;
      #1;
      chk("adr after edge", mem_adr, iea ? latched : core_adr);
    end
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
