// tb_fpga_top: the whole chip at its full size, driven only through its pins.
//
// A bitstream with two user circuits is built and loaded over the asynchronous
// configuration bus in page mode (RAS_n once per row, CAS_n per column, BAS_n and a
// WE_n pulse per word), then read back in full over CDATA.
//   * 4-bit counter (4 CLBs, tiles (0..3, 0)), the smallest design of the published
//     measurements. Bit k is CLB k, registered, q_k <= q_k XOR (q_0 & .. & q_k-1). Its
//     own output returns through its VCB; lower bits arrive on tracks 0..3 of the
//     vertical channel to its right, which run straight through three switch blocks.
//     Bit k leaves on GPIO k. At a 100 MHz GCLK bit k must toggle every 2^k cycles
//     (50, 25, 12.5 and 6.25 MHz).
//   * A combinational path HIP2 -> CLB (tile (0,2)) -> GPIO10 that turns through three
//     Wilton switch blocks (L->B, T->R, L->B) and runs straight through four more. The
//     LUT inverts its input 3; input 0 carries the same signal but is masked off, and the
//     LUT entries with input 0 set are 1, so a missing mask would show.
// The test then turns the OE pin off and on, reprograms the path's LUT to a buffer
// (CPROG high again: CDONE drops, fabric in reset), and pulses RESET_n. Every
// mechanism is counted and a failure is counted for any that never happened.
`timescale 1ns/1ps
module tb_fpga_top;
  import fpga_pkg::*;
  import bitstream_pkg::*;

  int checks = 0, failures = 0, cycles = 0;
  logic gclk = 0, reset_n, oe, cprog, cdone, ras_n, bas_n, cas_n, we_n, re_n, cdata_oe;
  logic [7:0] cdata_in, cdata_out;
  logic [15:0] gpio_in, gpio_out, gpio_oe;
  logic [7:0] hip_in, hip_out, hip_oe;
  bit run_clk = 0;
  bitstream bs;
  int dummy;

  // mechanism counters
  int n_write = 0, n_page_row = 0, n_read = 0, n_count = 0, n_comb = 0, n_mask = 0;
  int n_oe_off = 0, n_reprog = 0, n_reset = 0, n_user_mode = 0;

  fpga_top dut (.*);

  always #5 if (run_clk) gclk = ~gclk;   // 100 MHz
  always @(posedge gclk) cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL at %0t: %s", $realtime, what); end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- configuration bus, page mode ----
  task automatic load_row(int r, bit do_read, ref int bad);
    cdata_in = 8'(r); #2 ras_n = 0; #3;
    n_page_row++;
    for (int c = 0; c < 19; c++) begin
      cdata_in = 8'(c); #2 cas_n = 0; #3;
      for (int w = 0; w < 9; w++) begin
        cdata_in = 8'(w); #2 bas_n = 0; #3;
        if (do_read) begin
          re_n = 0; #3;
          if (!cdata_oe || cdata_out != bs.word(r, c, w)) bad++;
          n_read++;
          re_n = 1; #2;
        end else begin
          cdata_in = bs.word(r, c, w); #1 we_n = 0; #3 we_n = 1; #1;
          n_write++;
        end
        bas_n = 1; #2;
      end
      cas_n = 1; #2;
    end
    ras_n = 1; #2;
  endtask

  task automatic load_all(bit do_read);
    int bad;
    bad = 0;
    for (int r = 0; r < 19; r++) load_row(r, do_read, bad);
    if (do_read) check(bad == 0, $sformatf("readback mismatches: %0d of 3249", bad));
  endtask

  // ---- the user circuits ----
  function automatic void build(bit path_inverts);
    logic [63:0] lut;
    int t;
    bs = new();
    // 4-bit counter: CLB k at fabric position (2k+1, 1)
    for (int k = 0; k < 4; k++) begin
      int i;
      logic [5:0] mask;
      i = 2 * k + 1;
      mask = 6'b000001;
      for (int m = 0; m < k; m++) mask[3 + m] = 1'b1;
      for (int n = 0; n < 64; n++) begin
        logic carry;
        carry = 1'b1;
        for (int m = 0; m < k; m++) carry &= n[3 + m];
        lut[n] = n[0] ^ carry;
      end
      bs.clb(i, 1, lut, mask, 1);
      bs.cb_drv_a(i - 1, 1, 0);               // own output on track 0 of the VCB above
      bs.cb_pin(i - 1, 1, 0, 0);              // in[0] <- own output
      bs.cb_drv_a(i, 2, k);                   // output on track k of the HCB to the right
      for (int m = 0; m < k; m++) bs.cb_pin(i, 2, m, m);   // in[3+m] <- q_m
      bs.cb_drv_b(i, 0, 0);                   // output on track 0 of the HCB to the left
      bs.io(k, 0, 1, 0);                      // GPIO k shows it
    end
    for (int s = 2; s <= 6; s += 2)
      for (int k = 0; k < 4; k++) void'(bs.sb(s, 2, SIDE_T, k, SIDE_B));
    // combinational path from HIP2 (I/O 18, next to VCB (0,5)) to GPIO10
    bs.io(18, -1, 0, 1);
    bs.cb_drv_b(0, 5, 2);                     // pad onto track 2
    bs.cb_pin(0, 5, 0, 2);                    // in[0] <- the same signal (masked off)
    t = bs.sb(0, 6, SIDE_L, 2, SIDE_B);       // turn down
    bs.cb_pin(1, 6, 0, t);                    // in[3]
    for (int n = 0; n < 64; n++) lut[n] = n[0] ? 1'b1 : (path_inverts ? ~n[3] : n[3]);
    bs.clb(1, 5, lut, 6'b001000, 0);
    bs.cb_drv_a(1, 6, 3);                     // output on track 3 of HCB (1,6)
    t = bs.sb(2, 6, SIDE_T, 3, SIDE_B);       // straight down
    t = bs.sb(4, 6, SIDE_T, t, SIDE_R);       // turn right
    for (int j = 8; j <= 14; j += 2) t = bs.sb(4, j, SIDE_L, t, SIDE_R);
    t = bs.sb(4, 16, SIDE_L, t, SIDE_B);      // turn down at the right edge
    bs.io(10, t, 1, 0);                       // GPIO10, next to HCB (5,16)
  endfunction

  task automatic check_path(bit inverts);
    for (int n = 0; n < 8; n++) begin
      hip_in[2] = 1'(n);
      #10;
      check(gpio_out[10] == (inverts ? ~hip_in[2] : hip_in[2]),
            $sformatf("path hip2=%b gpio10=%b", hip_in[2], gpio_out[10]));
      n_comb++;
      if (hip_in[2]) n_mask++;   // in[0] is 1 here: only the mask keeps the result right
    end
  endtask

  task automatic check_counter(int ncyc);
    int toggles [4];
    logic [3:0] last, exp;
    foreach (toggles[k]) toggles[k] = 0;
    @(negedge gclk);
    last = gpio_out[3:0];
    for (int n = 0; n < ncyc; n++) begin
      @(negedge gclk);
      exp = last + 4'd1;
      check(gpio_out[3:0] == exp, $sformatf("counter %0d exp %0d", gpio_out[3:0], exp));
      for (int k = 0; k < 4; k++) if (gpio_out[k] != last[k]) toggles[k]++;
      last = gpio_out[3:0];
      n_count++;
    end
    for (int k = 0; k < 4; k++)
      check(toggles[k] == ncyc >> k, $sformatf("bit %0d toggled %0d times in %0d cycles",
                                                k, toggles[k], ncyc));
  endtask

  initial begin
    // RESET_n starts high and falls, so the asynchronous resets see an edge
    reset_n = 1; oe = 1; cprog = 0; ras_n = 1; bas_n = 1; cas_n = 1; we_n = 1; re_n = 1;
    cdata_in = 0; gpio_in = '0; hip_in = '0;
    run_clk = 1;   // GCLK runs throughout; the fabric is held in reset until CDONE
    #5 reset_n = 0;
    #20 reset_n = 1;
    #10 cprog = 1;
    build(1);
    load_all(0);
    load_all(1);
    check(cdone == 0, "CDONE low while programming");
    check(gpio_oe == '0 && hip_oe == '0, "pads off while programming");
    #10 cprog = 0;
    #10;
    check(cdone == 1, "CDONE after programming");
    n_user_mode++;
    check(gpio_oe == 16'h040f && hip_oe == '0, $sformatf("pad enables %h %h", gpio_oe, hip_oe));
    check(gpio_out[3:0] <= 4'd2, $sformatf("counter starts from 0, got %0d", gpio_out[3:0]));
    check_counter(64);
    check_path(1);
    // OE pin
    oe = 0; #5 check(gpio_oe == '0, "OE low: pads off"); n_oe_off++;
    oe = 1; #5 check(gpio_oe == 16'h040f, "OE high again");
    // reprogram the path's LUT to a buffer
    cprog = 1; #5;
    check(cdone == 0, "CDONE drops on reprogramming");
    check(gpio_oe == '0, "pads off while reprogramming");
    build(0);
    load_row(2, 0, dummy);   // row of macroblock (2, 6) = CLB at fabric (1, 5)
    #10 cprog = 0; #10;
    n_reprog++;
    check(cdone == 1, "CDONE after reprogramming");
    check_path(0);
    check_counter(20);
    // RESET_n
    @(negedge gclk) reset_n = 0; #1;
    check(gpio_out[3:0] == 0 || cdone == 0, "reset");
    check(cdone == 0, "RESET_n drops CDONE");
    n_reset++;
    reset_n = 1;
    run_clk = 0;
    $display("mechanisms: writes=%0d page_rows=%0d reads=%0d counts=%0d comb=%0d mask=%0d oe_off=%0d reprogram=%0d reset=%0d user_mode=%0d",
             n_write, n_page_row, n_read, n_count, n_comb, n_mask, n_oe_off, n_reprog, n_reset, n_user_mode);
    check(n_write > 0 && n_page_row > 0 && n_read > 0 && n_count > 0 && n_comb > 0 && n_mask > 0
          && n_oe_off > 0 && n_reprog > 0 && n_reset > 0 && n_user_mode > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
