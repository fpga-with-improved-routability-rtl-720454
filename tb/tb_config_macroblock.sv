// tb_config_macroblock: writes the 9 words of a macroblock through the select lines,
// checks that a write needs row, column, word and strobe together, that q shows word w
// at bits 8w+7:8w, and that read data appear only for the selected word.
`timescale 1ns/1ps
module tb_config_macroblock;
  int checks = 0, failures = 0;
  logic row_sel, col_sel, we, re;
  logic [8:0] word_sel;
  logic [7:0] wdata, rdata;
  logic [71:0] q;
  logic [7:0] model [9];

  config_macroblock dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(bit r, bit c, int w, bit wr, logic [7:0] d);
    row_sel = r; col_sel = c; word_sel = 9'(1) << w; wdata = d; #1;
    we = wr; #2; we = 0; #1;
    row_sel = 0; col_sel = 0; word_sel = '0; #1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    row_sel = 0; col_sel = 0; word_sel = '0; we = 0; re = 0; wdata = 0;
    for (int w = 0; w < 9; w++) begin
      model[w] = 8'($urandom);
      access(1, 1, w, 1, model[w]);
    end
    for (int n = 0; n < 300; n++) begin
      int w;
      bit r, c, wr;
      logic [7:0] d;
      w = $urandom_range(0, 8); r = 1'($urandom); c = 1'($urandom); wr = 1'($urandom);
      d = 8'($urandom);
      access(r, c, w, wr, d);
      if (r && c && wr) model[w] = d;
      for (int k = 0; k < 9; k++)
        check(q[8*k +: 8] == model[k], $sformatf("q word %0d = %h exp %h", k, q[8*k +: 8], model[k]));
      // readback
      w = $urandom_range(0, 8); r = 1'($urandom); c = 1'($urandom);
      row_sel = r; col_sel = c; word_sel = 9'(1) << w; re = 1; #1;
      check(rdata == ((r && c) ? model[w] : 8'h00), $sformatf("read w=%0d r=%b c=%b got %h", w, r, c, rdata));
      re = 0; #1;
      check(rdata == 8'h00, "rdata idle");
      row_sel = 0; col_sel = 0; word_sel = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
