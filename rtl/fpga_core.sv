// fpga_core: the programmable fabric with its configuration memory.
//
// Layout. The NTILES x NTILES tiles (8x8) plus one extra row and column of routing form
// an N x N array of positions (N = 2*NTILES+1 = 17), with position (i, j) counted from
// the top-left corner:
//   (even, even)  Wilton switch block
//   (odd,  odd)   CLB
//   (even, odd)   VCB: connection block on a horizontal channel, between the switch
//                 blocks on its left (end 0) and right (end 1); side A is the CLB below,
//                 side B the CLB above
//   (odd,  even)  HCB: connection block on a vertical channel, between the switch
//                 blocks above (end 0) and below (end 1); side A is the CLB on its left,
//                 side B the CLB on its right
// A tile is the CLB at (2r+1, 2c+1) with the VCB above it, the HCB to its right and the
// SB at the upper right. A CLB takes inputs 2:0 from its VCB and inputs 5:3 from its
// HCB; its output can be driven onto the tracks of all four CBs around it.
// A ring of I/O positions surrounds the array, giving the G x G (19x19) macroblock
// matrix: macroblock (r, c) = position (r-1, c-1). I/O blocks sit in the ring next to
// the edge connection blocks: pad k < NTILES on the left (next to HCB (2k+1, 0)),
// pad NTILES+k on the right (next to HCB (2k+1, N-1)) and pad 2*NTILES+k on top (next
// to VCB (0, 2k+1)). Their input enters the fabric as the edge CB's side-B or side-A
// block output. The bottom ring has no pads.
//
// Configuration. Every macroblock of the matrix, used or not, has a config_macroblock
// of 9 x 8 bits, selected by its row and column line and written/read through the
// shared byte bus; rdata is the OR of all macroblocks' read data (only the selected one
// is non-zero). The bit layout of each block type is in fpga_pkg.
//
// Timing. Routing and LUTs are combinational; CLB flip-flops use clk and are held in
// reset by rst. While fabric_en is low no CB driver or pad is enabled.
//
// Circuit warnings: the fabric necessarily contains combinational loops (a track can
// reach itself through switch blocks, and a CLB can feed itself through routing). A legal
// configuration routes every net as a tree from one driver, which cuts all of them.
//
// The tile contents, the 8x8 array and the 19x19 x 9-byte memory are the published
// architecture; the coordinates, pin assignment and pad placement are this
// implementation's choices.
`timescale 1ns/1ps
module fpga_core
  import fpga_pkg::*;
#(
  parameter int unsigned NTILES = TILES,
  parameter int unsigned W      = CHAN_W,
  localparam int unsigned N     = 2 * NTILES + 1,
  localparam int unsigned G     = N + 2,
  localparam int unsigned NIO   = 3 * NTILES
) (
  input  logic                 clk,        // global clock
  input  logic                 rst,        // CLB flip-flop reset
  input  logic                 fabric_en,  // configuration complete
  input  logic                 global_oe,  // chip OE pin
  // configuration bus, after the decoders
  input  logic [G-1:0]         row_sel,
  input  logic [G-1:0]         col_sel,
  input  logic [CFG_WORDS-1:0] word_sel,
  input  logic                 we,
  input  logic                 re,
  input  logic [7:0]           wdata,
  output logic [7:0]           rdata,
  // pads, core side
  input  logic [NIO-1:0]       pad_in,
  output logic [NIO-1:0]       pad_out,
  output logic [NIO-1:0]       pad_oe,
  output logic [NIO-1:0]       pad_ie
);

  // ---------------- configuration memory ----------------
  logic [CFG_BITS-1:0] cfg      [G][G];
  logic [7:0]          mb_rdata [G][G];

  for (genvar r = 0; r < G; r++) begin : g_mrow
    for (genvar c = 0; c < G; c++) begin : g_mcol
      config_macroblock #(.WORDS(CFG_WORDS)) u_mb (
        .row_sel (row_sel[r]),
        .col_sel (col_sel[c]),
        .word_sel(word_sel),
        .we      (we),
        .re      (re),
        .wdata   (wdata),
        .rdata   (mb_rdata[r][c]),
        .q       (cfg[r][c])
      );
    end
  end

  always_comb begin
    rdata = '0;
    for (int r = 0; r < G; r++)
      for (int c = 0; c < G; c++)
        rdata |= mb_rdata[r][c];
  end

  // ---------------- fabric ----------------
  logic [W-1:0]       sb_in     [N][N][4];
  logic [W-1:0]       sb_out    [N][N][4];
  logic [W-1:0]       cb_e0_out [N][N];
  logic [W-1:0]       cb_e1_out [N][N];
  logic [W-1:0]       cb_trk    [N][N];
  logic [CB_PINS-1:0] cb_pin    [N][N];
  logic               clb_out   [N][N];
  logic [NIO-1:0]     io_to_fab;

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      if ((i % 2 == 0) && (j % 2 == 0)) begin : g_sb
        assign sb_in[i][j][SIDE_L] = (j > 0)     ? cb_e1_out[i][j-1] : '0;
        assign sb_in[i][j][SIDE_R] = (j < N - 1) ? cb_e0_out[i][j+1] : '0;
        assign sb_in[i][j][SIDE_T] = (i > 0)     ? cb_e1_out[i-1][j] : '0;
        assign sb_in[i][j][SIDE_B] = (i < N - 1) ? cb_e0_out[i+1][j] : '0;
        wilton_sb #(.W(W)) u_sb (
          .cfg     (cfg[i+1][j+1][SB_PAIRS*W-1:0]),
          .side_in (sb_in[i][j]),
          .side_out(sb_out[i][j])
        );
      end else if ((i % 2 == 1) && (j % 2 == 1)) begin : g_clb
        clb #(.K(LUT_K)) u_clb (
          .clk    (clk),
          .rst    (rst),
          .lut    (cfg[i+1][j+1][CLB_LUT_LSB +: (1 << LUT_K)]),
          .mask   (cfg[i+1][j+1][CLB_MASK_LSB +: LUT_K]),
          .reg_sel(cfg[i+1][j+1][CLB_REG_BIT]),
          .in     ({cb_pin[i][j+1], cb_pin[i-1][j]}),
          .out    (clb_out[i][j])
        );
      end else begin : g_cb
        logic a_out, b_out;
        logic [W-1:0] e0_in, e1_in;
        if (i % 2 == 0) begin : g_vcb
          // horizontal channel: ends are the SBs left and right
          assign e0_in = sb_out[i][j-1][SIDE_R];
          assign e1_in = sb_out[i][j+1][SIDE_L];
          if (i == N - 1) begin : g_bottom
            assign a_out = 1'b0;
          end else begin : g_a
            assign a_out = clb_out[i+1][j];
          end
          if (i == 0) begin : g_top
            assign b_out = io_to_fab[2*NTILES + j/2];
          end else begin : g_b
            assign b_out = clb_out[i-1][j];
          end
        end else begin : g_hcb
          // vertical channel: ends are the SBs above and below
          assign e0_in = sb_out[i-1][j][SIDE_B];
          assign e1_in = sb_out[i+1][j][SIDE_T];
          if (j == 0) begin : g_left
            assign a_out = io_to_fab[i/2];
          end else begin : g_a
            assign a_out = clb_out[i][j-1];
          end
          if (j == N - 1) begin : g_right
            assign b_out = io_to_fab[NTILES + i/2];
          end else begin : g_b
            assign b_out = clb_out[i][j+1];
          end
        end
        conn_block #(.W(W), .PINS(CB_PINS)) u_cb (
          .sel     (cfg[i+1][j+1][CB_SEL_LSB +: CB_PINS*W]),
          .drv_a   (cfg[i+1][j+1][CB_DRVA_LSB +: W]),
          .drv_b   (cfg[i+1][j+1][CB_DRVB_LSB +: W]),
          .en      (fabric_en),
          .a_out   (a_out),
          .b_out   (b_out),
          .end0_in (e0_in),
          .end1_in (e1_in),
          .end0_out(cb_e0_out[i][j]),
          .end1_out(cb_e1_out[i][j]),
          .track   (cb_trk[i][j]),
          .pin     (cb_pin[i][j])
        );
      end
    end
  end

  // ---------------- I/O ring ----------------
  for (genvar k = 0; k < NIO; k++) begin : g_io
    localparam int unsigned SIDE = k / NTILES;      // 0 left, 1 right, 2 top
    localparam int unsigned IDX  = k % NTILES;
    localparam int unsigned MR   = (SIDE == 2) ? 0 : 2 * IDX + 2;
    localparam int unsigned MC   = (SIDE == 0) ? 0 : (SIDE == 1) ? G - 1 : 2 * IDX + 2;
    localparam int unsigned CI   = (SIDE == 2) ? 0 : 2 * IDX + 1;
    localparam int unsigned CJ   = (SIDE == 0) ? 0 : (SIDE == 1) ? N - 1 : 2 * IDX + 1;
    io_block #(.W(W)) u_io (
      .out_sel  (cfg[MR][MC][W-1:0]),
      .cfg_oe   (cfg[MR][MC][IO_OE_BIT]),
      .cfg_ie   (cfg[MR][MC][IO_IE_BIT]),
      .global_oe(global_oe),
      .fabric_en(fabric_en),
      .track    (cb_trk[CI][CJ]),
      .pad_in   (pad_in[k]),
      .pad_out  (pad_out[k]),
      .pad_oe   (pad_oe[k]),
      .pad_ie   (pad_ie[k]),
      .to_fabric(io_to_fab[k])
    );
  end

endmodule
