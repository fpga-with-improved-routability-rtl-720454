// bitstream_pkg: builds configuration images for the testbenches of the fabric.
//
// A bitstream object holds the 72 configuration bits of every macroblock of the matrix,
// img[r][c], all zero to start with (every switch open, every driver off). Helper
// functions set the fields of a block at fabric position (i, j), which lives in
// macroblock (i+1, j+1); the field layout is the one in fpga_pkg. sb() closes the Wilton
// switch from track t on one side to the other side and returns the track reached there,
// so a route can be followed switch block by switch block.
`timescale 1ns/1ps
package bitstream_pkg;
  import fpga_pkg::*;

  localparam int unsigned G = 2 * TILES + 3;

  class bitstream;
    logic [CFG_BITS-1:0] img [G][G];

    function new();
      foreach (img[r, c]) img[r][c] = '0;
    endfunction

    function void clb(int i, int j, logic [63:0] lut, logic [5:0] mask, bit regd);
      img[i+1][j+1][CLB_LUT_LSB +: 64] = lut;
      img[i+1][j+1][CLB_MASK_LSB +: 6] = mask;
      img[i+1][j+1][CLB_REG_BIT]       = regd;
    endfunction

    function void cb_pin(int i, int j, int pin, int track);
      img[i+1][j+1][CB_SEL_LSB + pin * CHAN_W +: CHAN_W] = CHAN_W'(1 << track);
    endfunction

    function void cb_drv_a(int i, int j, int track);
      img[i+1][j+1][CB_DRVA_LSB + track] = 1'b1;
    endfunction

    function void cb_drv_b(int i, int j, int track);
      img[i+1][j+1][CB_DRVB_LSB + track] = 1'b1;
    endfunction

    function int sb(int i, int j, side_e from, int t, side_e to);
      for (int p = 0; p < SB_PAIRS; p++) begin
        if (sb_pair_a(p) == from && sb_pair_b(p) == to) begin
          img[i+1][j+1][p * CHAN_W + t] = 1'b1;
          return int'(wilton_track(from, to, t, CHAN_W));
        end
        if (sb_pair_a(p) == to && sb_pair_b(p) == from) begin
          int u;
          u = int'(wilton_track(from, to, t, CHAN_W));
          img[i+1][j+1][p * CHAN_W + u] = 1'b1;
          return u;
        end
      end
      return -1;
    endfunction

    // I/O position k: 0..7 left, 8..15 right, 16..23 top.
    function void io(int k, int track, bit oe, bit ie);
      int r, c;
      if (k < TILES)          begin r = 2 * k + 2;             c = 0;                   end
      else if (k < 2 * TILES) begin r = 2 * (k - TILES) + 2;   c = G - 1;               end
      else                    begin r = 0;                     c = 2 * (k - 2*TILES) + 2; end
      if (track >= 0) img[r][c][track] = 1'b1;
      img[r][c][IO_OE_BIT] = oe;
      img[r][c][IO_IE_BIT] = ie;
    endfunction

    function logic [7:0] word(int r, int c, int w);
      return img[r][c][8*w +: 8];
    endfunction
  endclass

endpackage
