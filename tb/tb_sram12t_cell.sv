// tb_sram12t_cell: checks the 12T cell word model: writes only while W_en is high and
// W_en_n low, holds afterwards, and drives the read lines only while R_en is high and
// R_en_n low.
`timescale 1ns/1ps
module tb_sram12t_cell;
  int checks = 0, failures = 0;
  logic [7:0] write, read, q;
  logic w_en, w_en_n, r_en, r_en_n;
  logic [7:0] model;

  sram12t_cell #(.WIDTH(8)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_en = 0; w_en_n = 1; r_en = 0; r_en_n = 1; write = 8'h00;
    // first write establishes a known value
    #1 w_en = 1; w_en_n = 0; write = 8'h5a; #1 w_en = 0; w_en_n = 1; model = 8'h5a;
    for (int n = 0; n < 200; n++) begin
      logic [7:0] d;
      int op;
      d  = 8'($urandom);
      op = $urandom_range(0, 3);
      write = d;
      case (op)
        0: begin w_en = 1; w_en_n = 0; model = d; end   // proper write
        1: begin w_en = 1; w_en_n = 1; end              // complements disagree: no write
        default: begin w_en = 0; w_en_n = 1; end        // no write
      endcase
      #1;
      w_en = 0; w_en_n = 1;
      write = ~d;                                       // data changing after the write
      #1;
      check(q == model, $sformatf("hold op=%0d q=%h exp=%h", op, q, model));
      r_en = $urandom_range(0, 1); r_en_n = $urandom_range(0, 1);
      #1;
      check(read == ((r_en && !r_en_n) ? model : 8'h00),
            $sformatf("read r_en=%b r_en_n=%b read=%h", r_en, r_en_n, read));
    end
    // transparent while enabled
    w_en = 1; w_en_n = 0; write = 8'hc3; #1 check(q == 8'hc3, "transparent 1");
    write = 8'h3c; #1 check(q == 8'h3c, "transparent 2");
    w_en = 0; w_en_n = 1; #1 write = 8'hff; #1 check(q == 8'h3c, "latched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
