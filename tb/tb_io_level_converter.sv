// tb_io_level_converter: the output path reaches the pad 2.2 ns after IN_Low changes
// and the keeper holds the pad when ENLH is low; the input path reaches OUT_Low 1 ns
// after the pad changes and gives 0 when ENHL is low.
`timescale 1ns/1ps
module tb_io_level_converter;
  int checks = 0, failures = 0;
  logic in_low, enlh, out_high, out_high_oe, enhl, in_high, out_low;

  io_level_converter dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL at %0t: %s", $realtime, what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_low = 0; enlh = 1; enhl = 1; in_high = 0;
    #10;
    check(out_high == 0 && out_high_oe == 1 && out_low == 0, "initial");
    for (int n = 0; n < 20; n++) begin
      bit v;
      v = ~out_high;
      in_low = v;
      #2.1 check(out_high == ~v, "level-up not yet at 2.1 ns");
      #0.2 check(out_high == v, "level-up done at 2.3 ns");
      #5;
      in_high = ~in_high;
      #0.9 check(out_low == ~in_high, "level-down not yet at 0.9 ns");
      #0.2 check(out_low == in_high, "level-down done at 1.1 ns");
      #5;
    end
    // driver off: keeper holds the last value
    begin
      bit held;
      held = out_high;
      enlh = 0; #3;
      check(out_high_oe == 0, "driver disabled");
      in_low = ~held; #5;
      check(out_high == held, "keeper holds pad");
    end
    // input path disabled
    in_high = 1; enhl = 0; #3;
    check(out_low == 0, "input disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
