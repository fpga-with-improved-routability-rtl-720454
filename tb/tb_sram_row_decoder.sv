// tb_sram_row_decoder: all addresses with the decoder enabled and disabled.
`timescale 1ns/1ps
module tb_sram_row_decoder;
  int checks = 0, failures = 0;
  logic en;
  logic [4:0] addr;
  logic [18:0] row_sel;

  sram_row_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 32; a++) begin
        logic [18:0] exp;
        en = 1'(e); addr = 5'(a); #1;
        exp = '0;
        if (e == 1 && a < 19) exp[a] = 1'b1;
        checks++;
        if (row_sel !== exp) begin
          failures++;
          $display("FAIL en=%0d addr=%0d got %b", e, a, row_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
