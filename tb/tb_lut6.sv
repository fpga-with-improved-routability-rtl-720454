// tb_lut6: random tables, masks and inputs against out = lut[in & mask].
`timescale 1ns/1ps
module tb_lut6;
  int checks = 0, failures = 0;
  logic [63:0] lut;
  logic [5:0] mask, in;
  logic out;

  lut6 dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      lut = {$urandom, $urandom};
      mask = (n < 64) ? 6'h3f : 6'($urandom);
      in = (n < 64) ? 6'(n) : 6'($urandom);
      #1;
      checks++;
      if (out !== lut[in & mask]) begin
        failures++;
        $display("FAIL lut=%h mask=%b in=%b out=%b", lut, mask, in, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
