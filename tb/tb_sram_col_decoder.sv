// tb_sram_col_decoder: all column and word addresses with the decoder enabled and
// disabled; out-of-range words select no column.
`timescale 1ns/1ps
module tb_sram_col_decoder;
  int checks = 0, failures = 0;
  logic en;
  logic [4:0] addr;
  logic [3:0] word_addr;
  logic [18:0] col_sel;
  logic [8:0] word_sel;

  sram_col_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 32; a++)
        for (int w = 0; w < 16; w++) begin
          logic [18:0] ec;
          logic [8:0] ew;
          en = 1'(e); addr = 5'(a); word_addr = 4'(w); #1;
          ec = '0; ew = '0;
          if (e == 1 && w < 9) begin
            ew[w] = 1'b1;
            if (a < 19) ec[a] = 1'b1;
          end
          checks++;
          if (col_sel !== ec || word_sel !== ew) begin
            failures++;
            $display("FAIL en=%0d addr=%0d word=%0d got %b %b", e, a, w, col_sel, word_sel);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
