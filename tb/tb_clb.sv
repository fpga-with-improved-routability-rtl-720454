// tb_clb: combinational output follows the LUT at once; registered output takes the LUT
// value at the next rising clock edge; reset clears the flip-flop.
`timescale 1ns/1ps
module tb_clb;
  int checks = 0, failures = 0;
  int cycles = 0;
  logic clk = 0, rst;
  logic [63:0] lut;
  logic [5:0] mask, in;
  logic reg_sel, out;
  logic prev;

  clb dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wait (cycles == 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; reg_sel = 0; lut = '0; mask = '1; in = '0;
    @(negedge clk);
    // registered output under reset
    reg_sel = 1; lut = '1; @(negedge clk);
    check(out == 0, "reset holds flip-flop at 0");
    rst = 0;
    prev = 1;   // the next rising edge loads lut = all ones
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      lut = {$urandom, $urandom}; mask = 6'($urandom); in = 6'($urandom);
      reg_sel = 1'($urandom);
      #1;
      if (reg_sel) check(out == prev, "registered: previous cycle's value until the edge");
      else         check(out == lut[in & mask], "combinational output");
      @(posedge clk); #1;
      if (reg_sel) check(out == lut[in & mask], "registered: value after the edge");
      prev = lut[in & mask];
    end
    lut = '1; mask = '0; reg_sel = 1; @(posedge clk); #1 check(out == 1, "ff set");
    rst = 1; #1 check(out == 0, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
