// fpga_top: the FPGA chip.
//
// The configuration logic latches row, word and column addresses from the
// asynchronous byte-wide configuration bus (CDATA, RAS_n, BAS_n, CAS_n, WE_n, RE_n,
// CPROG); the row and column decoders turn them into select lines for the 19x19 matrix
// of configuration macroblocks inside the core; readback data leaves on CDATA. After
// configuration (CPROG falls, CDONE rises) the 8x8-tile fabric runs on GCLK and talks
// to the outside through 16 GPIO and 8 host-interface (HIP) pads, each behind a
// 1.2 V / 3.3 V level converter.
//
// Pads. A bidirectional pin is shown as three signals: *_in (value driven onto the pin
// from outside), *_out (value the chip drives) and *_oe (the chip drives). CDATA is
// shown the same way. GPIO k is core I/O position k, HIP k is position 16 + k (see
// fpga_core). The level converters model their published delays (2.2 ns out, 1 ns in);
// the configuration pins are shown without level conversion.
//
// The block diagram (configuration logic, row and column decoders, 8x8 tiles, pin list)
// is the published one; OE acting as a global output enable for GPIO and HIP is this
// implementation's choice. Clock distribution (H-tree and grid) is a plain wire here.
`timescale 1ns/1ps
module fpga_top
  import fpga_pkg::*;
#(
  parameter int unsigned NTILES = TILES,
  parameter int unsigned W      = CHAN_W,
  localparam int unsigned NIO   = 3 * NTILES,
  localparam int unsigned NGPIO = 2 * NTILES,
  localparam int unsigned NHIP  = NTILES
) (
  input  logic             gclk,       // GCLK
  input  logic             reset_n,    // RESET_n
  input  logic             oe,         // OE: global pad output enable
  // configuration bus
  input  logic             cprog,      // CPROG
  output logic             cdone,      // CDONE
  input  logic             ras_n,      // RAS_n
  input  logic             bas_n,      // BAS_n
  input  logic             cas_n,      // CAS_n
  input  logic             we_n,       // WE_n
  input  logic             re_n,       // RE_n
  input  logic [7:0]       cdata_in,   // CDATA0-7, host side
  output logic [7:0]       cdata_out,  // CDATA0-7, chip side
  output logic             cdata_oe,
  // user pads
  input  logic [NGPIO-1:0] gpio_in,    // GPIO0-15
  output logic [NGPIO-1:0] gpio_out,
  output logic [NGPIO-1:0] gpio_oe,
  input  logic [NHIP-1:0]  hip_in,     // HIP0-7
  output logic [NHIP-1:0]  hip_out,
  output logic [NHIP-1:0]  hip_oe
);

  localparam int unsigned G = 2 * NTILES + 3;

  logic [ADDR_W-1:0]    row_addr, col_addr;
  logic [WADDR_W-1:0]   word_addr;
  logic                 dec_en, wr, rd, fabric_rst;
  logic [G-1:0]         row_sel, col_sel;
  logic [CFG_WORDS-1:0] word_sel;
  logic [7:0]           rdata;
  logic [NIO-1:0]       pad_in, pad_out, pad_oe, pad_ie;
  logic [NIO-1:0]       pin_in, pin_out, pin_oe;

  config_ctrl u_cfg (
    .reset_n   (reset_n),
    .cprog     (cprog),
    .ras_n     (ras_n),
    .bas_n     (bas_n),
    .cas_n     (cas_n),
    .we_n      (we_n),
    .re_n      (re_n),
    .cdata_in  (cdata_in),
    .row_addr  (row_addr),
    .col_addr  (col_addr),
    .word_addr (word_addr),
    .dec_en    (dec_en),
    .wr        (wr),
    .rd        (rd),
    .cdata_oe  (cdata_oe),
    .cdone     (cdone),
    .fabric_rst(fabric_rst)
  );

  sram_row_decoder #(.ROWS(G)) u_rowdec (
    .en     (dec_en),
    .addr   (row_addr),
    .row_sel(row_sel)
  );

  sram_col_decoder #(.COLS(G), .WORDS(CFG_WORDS)) u_coldec (
    .en       (dec_en),
    .addr     (col_addr),
    .word_addr(word_addr),
    .col_sel  (col_sel),
    .word_sel (word_sel)
  );

  fpga_core #(.NTILES(NTILES), .W(W)) u_core (
    .clk      (gclk),
    .rst      (fabric_rst),
    .fabric_en(cdone),
    .global_oe(oe),
    .row_sel  (row_sel),
    .col_sel  (col_sel),
    .word_sel (word_sel),
    .we       (wr),
    .re       (rd),
    .wdata    (cdata_in),
    .rdata    (rdata),
    .pad_in   (pad_in),
    .pad_out  (pad_out),
    .pad_oe   (pad_oe),
    .pad_ie   (pad_ie)
  );

  assign cdata_out = rdata;

  assign pin_in = {hip_in, gpio_in};

  for (genvar k = 0; k < NIO; k++) begin : g_pad
    io_level_converter u_lvl (
      .in_low     (pad_out[k]),
      .enlh       (pad_oe[k]),
      .out_high   (pin_out[k]),
      .out_high_oe(pin_oe[k]),
      .enhl       (pad_ie[k]),
      .in_high    (pin_in[k]),
      .out_low    (pad_in[k])
    );
  end

  assign gpio_out = pin_out[NGPIO-1:0];
  assign gpio_oe  = pin_oe[NGPIO-1:0];
  assign hip_out  = pin_out[NIO-1:NGPIO];
  assign hip_oe   = pin_oe[NIO-1:NGPIO];

endmodule
