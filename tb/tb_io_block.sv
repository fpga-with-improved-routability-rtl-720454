// tb_io_block: output track selection, output and input enables (block bit, OE pin,
// configuration done) against a reference model.
`timescale 1ns/1ps
module tb_io_block;
  int checks = 0, failures = 0;
  logic [4:0] out_sel, track;
  logic cfg_oe, cfg_ie, global_oe, fabric_en, pad_in;
  logic pad_out, pad_oe, pad_ie, to_fabric;

  io_block dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int t;
      bit e_out, e_oe, e_ie, e_fab;
      t = $urandom_range(0, 4);
      out_sel = 5'(1 << t); track = 5'($urandom);
      {cfg_oe, cfg_ie, global_oe, fabric_en, pad_in} = 5'($urandom);
      #1;
      e_out = track[t];
      e_oe  = cfg_oe && global_oe && fabric_en;
      e_ie  = cfg_ie && fabric_en;
      e_fab = e_ie && pad_in;
      checks++;
      if (pad_out !== e_out || pad_oe !== e_oe || pad_ie !== e_ie || to_fabric !== e_fab) begin
        failures++;
        $display("FAIL n=%0d got %b%b%b%b exp %b%b%b%b", n, pad_out, pad_oe, pad_ie, to_fabric,
                 e_out, e_oe, e_ie, e_fab);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
