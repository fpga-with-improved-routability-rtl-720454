// tb_fpga_core: the fabric with its configuration memory, configured through the
// decoded select lines.
//   1. Every word of all 19x19 macroblocks is written with an address-dependent
//      pattern and read back.
//   2. A configuration is loaded: the CLB of the bottom-right tile toggles its
//      flip-flop (LUT = NOT of its own output, fed back through its HCB) and drives
//      right-hand pad 15; pad 0 is looped back to itself through a track of the
//      left-edge HCB.
//   3. Checks: pads stay off while fabric_en is low; the toggle has period 2 cycles;
//      the loop-back follows pad 0; the OE input gates the pad enables.
`timescale 1ns/1ps
module tb_fpga_core;
  import fpga_pkg::*;
  import bitstream_pkg::*;

  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst, fabric_en, global_oe, we, re;
  logic [18:0] row_sel, col_sel;
  logic [8:0] word_sel;
  logic [7:0] wdata, rdata;
  logic [23:0] pad_in, pad_out, pad_oe, pad_ie;
  bitstream bs;

  fpga_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(int r, int c, int w, logic [7:0] d);
    row_sel = 19'(1) << r; col_sel = 19'(1) << c; word_sel = 9'(1) << w; wdata = d;
    #1 we = 1; #1 we = 0;
  endtask

  task automatic rdb(int r, int c, int w, output logic [7:0] d);
    row_sel = 19'(1) << r; col_sel = 19'(1) << c; word_sel = 9'(1) << w;
    #1 re = 1; #1 d = rdata; re = 0;
  endtask

  function automatic logic [7:0] pat(int r, int c, int w);
    return 8'((r * 37) ^ (c * 11) ^ (w * 101) ^ 8'h5a);
  endfunction

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    logic [7:0] d;
    logic [63:0] lut;
    rst = 1; fabric_en = 0; global_oe = 1; we = 0; re = 0;
    row_sel = '0; col_sel = '0; word_sel = '0; wdata = '0; pad_in = '0;
    // 1. memory
    for (int r = 0; r < 19; r++)
      for (int c = 0; c < 19; c++)
        for (int w = 0; w < 9; w++) wr(r, c, w, pat(r, c, w));
    bad = 0;
    for (int r = 0; r < 19; r++)
      for (int c = 0; c < 19; c++)
        for (int w = 0; w < 9; w++) begin
          rdb(r, c, w, d);
          if (d != pat(r, c, w)) bad++;
        end
    check(bad == 0, $sformatf("readback mismatches %0d of 3249", bad));
    #1 check(rdata == 8'h00, "no read data without read strobe");
    // 2. configuration
    bs = new();
    for (int n = 0; n < 64; n++) lut[n] = ~n[3];
    bs.clb(15, 15, lut, 6'b001000, 1);  // out = NOT in[3]
    bs.cb_drv_a(15, 16, 0);       // CLB output on track 0 of its HCB
    bs.cb_pin(15, 16, 0, 0);      // in[3] <- track 0
    bs.io(15, 0, 1, 0);           // right pad 15 (next to HCB (15,16)) shows track 0
    bs.io(0, 1, 1, 1);            // left pad 0: input and output on track 1
    bs.cb_drv_a(1, 0, 1);         // HCB (1,0): side A is pad 0
    for (int r = 0; r < 19; r++)
      for (int c = 0; c < 19; c++)
        for (int w = 0; w < 9; w++) wr(r, c, w, bs.word(r, c, w));
    row_sel = '0; col_sel = '0; word_sel = '0;
    #2;
    check(pad_oe == '0 && pad_ie == '0, "pads off before configuration is complete");
    // 3. run
    @(negedge clk); fabric_en = 1; rst = 0;
    #1 check(pad_oe == 24'h008001, $sformatf("pad enables %h", pad_oe));
    check(pad_ie == 24'h000001, "pad 0 input enabled");
    begin
      logic last;
      int toggles;
      toggles = 0;
      @(negedge clk) last = pad_out[15];
      for (int n = 0; n < 40; n++) begin
        @(negedge clk);
        if (pad_out[15] != last) toggles++;
        last = pad_out[15];
        pad_in[0] = 1'($urandom);
        #1 check(pad_out[0] == pad_in[0], "loop-back of pad 0");
      end
      check(toggles == 40, $sformatf("toggle flip-flop changed %0d times in 40 cycles", toggles));
    end
    global_oe = 0; #1 check(pad_oe == '0, "OE low disables all pads");
    global_oe = 1; rst = 1; #1 check(pad_out[15] == 0, "reset clears flip-flop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
