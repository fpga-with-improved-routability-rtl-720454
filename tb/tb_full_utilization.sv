// tb_full_utilization: every one of the 64 CLBs in use, on the full-size chip.
//
// The published chip ran designs up to 100 % logic utilization (64 of 64 CLBs). Those
// designs are not available, so this test builds a circuit that uses every CLB and
// needs routing in all directions: a 64-stage shift register that snakes through the
// array. Column c of tiles runs down for even c and up for odd c:
//   * down: CLB (i, j) drives the VCB below it (side B) and CLB (i+2, j) reads that
//     VCB - no switch block;
//   * up: CLB (i, j) drives its HCB, the track goes straight up through one switch
//     block to the HCB of CLB (i-2, j), which reads it (tracks 0/1 alternate by row);
//   * between columns, at the bottom or top row, the output goes through the VCB
//     above, straight through one switch block (L->R) and into the next column's VCB.
// HIP0 feeds the first stage; the last stage (tile (0,7)) drives GPIO8. Every LUT is a
// buffer of one input, all outputs registered. A random bit stream on HIP0 must appear
// on GPIO8 exactly 64 GCLK cycles later (100 MHz GCLK).
`timescale 1ns/1ps
module tb_full_utilization;
  import fpga_pkg::*;
  import bitstream_pkg::*;

  int checks = 0, failures = 0;
  logic gclk = 0, reset_n, oe, cprog, cdone, ras_n, bas_n, cas_n, we_n, re_n, cdata_oe;
  logic [7:0] cdata_in, cdata_out;
  logic [15:0] gpio_in, gpio_out, gpio_oe;
  logic [7:0] hip_in, hip_out, hip_oe;
  bitstream bs;
  int n_clbs = 0, n_sb = 0;

  fpga_top dut (.*);

  always #5 gclk = ~gclk;

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

  task automatic write_all();
    for (int r = 0; r < 19; r++) begin
      cdata_in = 8'(r); #2 ras_n = 0; #3;
      for (int c = 0; c < 19; c++) begin
        cdata_in = 8'(c); #2 cas_n = 0; #3;
        for (int w = 0; w < 9; w++) begin
          cdata_in = 8'(w); #2 bas_n = 0; #3;
          cdata_in = bs.word(r, c, w); #1 we_n = 0; #3 we_n = 1; #1;
          bas_n = 1; #2;
        end
        cas_n = 1; #2;
      end
      ras_n = 1; #2;
    end
  endtask

  // buffer of input x, registered
  function automatic void buf_clb(int i, int j, int x);
    logic [63:0] lut;
    for (int n = 0; n < 64; n++) lut[n] = n[x];
    bs.clb(i, j, lut, 6'(1 << x), 1);
    n_clbs++;
  endfunction

  function automatic void build();
    bs = new();
    // first stage input: HIP0 (I/O 16, next to VCB (0,1)) on track 0
    bs.io(16, -1, 0, 1);
    bs.cb_drv_b(0, 1, 0);
    for (int c = 0; c < 8; c++) begin
      int j;
      j = 2 * c + 1;
      for (int row = 0; row < 8; row++) begin
        int i, t;
        i = (c % 2 == 0) ? 2 * row + 1 : 15 - 2 * row;   // position along the snake
        // ---- input of this stage ----
        if (c == 0 && row == 0) begin
          bs.cb_pin(0, 1, 0, 0); buf_clb(i, j, 0);          // from HIP0
        end else if (row == 0) begin
          // entered from the previous column through the VCB at the top or bottom
          int vi;
          vi = (c % 2 == 0) ? 0 : 14;
          bs.cb_pin(vi, j, 0, 1); buf_clb(i, j, 0);
        end else if (c % 2 == 0) begin
          bs.cb_pin(i - 1, j, 0, 0); buf_clb(i, j, 0);      // from the CLB above
        end else begin
          t = ((i + 1) / 2) % 2;                             // track of the stage below
          bs.cb_pin(i, j + 1, 0, t); buf_clb(i, j, 3);      // from the CLB below
        end
        // ---- output of this stage ----
        if (row == 7) begin
          if (c == 7) begin
            bs.cb_drv_a(i, j + 1, 2);                        // last stage: HCB (1,16) track 2
            bs.io(8, 2, 1, 0);                               // GPIO8
          end else begin
            int vi;
            vi = (c % 2 == 0) ? 14 : 0;                      // VCB above the stage
            bs.cb_drv_a(vi, j, 1);
            void'(bs.sb(vi, j + 1, SIDE_L, 1, SIDE_R)); n_sb++;
          end
        end else if (c % 2 == 0) begin
          bs.cb_drv_b(i + 1, j, 0);                          // VCB below, side B
        end else begin
          t = ((i - 1) / 2) % 2;
          bs.cb_drv_a(i, j + 1, t);                          // own HCB
          void'(bs.sb(i - 1, j + 1, SIDE_B, t, SIDE_T)); n_sb++;
        end
      end
    end
  endfunction

  initial begin
    bit hist [$];
    reset_n = 1; oe = 1; cprog = 0; ras_n = 1; bas_n = 1; cas_n = 1; we_n = 1; re_n = 1;
    cdata_in = 0; gpio_in = '0; hip_in = '0;
    #5 reset_n = 0;
    #20 reset_n = 1;
    #10 cprog = 1;
    build();
    check(n_clbs == 64, $sformatf("%0d CLBs used", n_clbs));
    write_all();
    #10 cprog = 0;
    #10 check(cdone == 1, "configured");
    check(gpio_oe == 16'h0100, $sformatf("only GPIO8 drives, got %h", gpio_oe));
    for (int n = 0; n < 400; n++) begin
      @(negedge gclk);
      if (n >= 64) check(gpio_out[8] == hist[n - 64], $sformatf("cycle %0d: bit out of stage 64", n));
      hip_in[0] = 1'($urandom);
      hist.push_back(hip_in[0]);
    end
    // latency must be exactly 64: a one-cycle shift must not also match
    begin
      int match63;
      match63 = 0;
      for (int n = 0; n < 50; n++) begin
        @(negedge gclk);
        if (gpio_out[8] == hist[hist.size() - 63]) match63++;
        hip_in[0] = 1'($urandom);
        hist.push_back(hip_in[0]);
      end
      check(match63 < 45, "output is not 63 cycles behind");
    end
    $display("stages=%0d straight-through switch blocks=%0d", n_clbs, n_sb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
