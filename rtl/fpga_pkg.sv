// fpga_pkg: sizes, configuration-bit layout and the Wilton track permutation shared by
// the FPGA fabric.
//
// The fabric is an 8x8 array of tiles. Each tile holds a CLB, a horizontal connection
// block (HCB), a vertical connection block (VCB) and a Wilton switch block (SB). Together
// with one extra row and column of routing and a ring of I/O positions this gives a
// 19x19 matrix of "macroblocks"; every macroblock owns 9 configuration words of 8 bits.
// The tile count, the 19x19 matrix, the 9 x 8-bit words and the 6-input LUT are the
// published architecture. The channel width of 5 tracks, the 3 CLB input pins per
// connection block and the bit layouts below are this implementation's choices.
`timescale 1ns/1ps
package fpga_pkg;

  parameter int unsigned TILES     = 8;             // 8x8 tiles
  parameter int unsigned CHAN_W    = 5;             // routing tracks per channel
  parameter int unsigned LUT_K     = 6;             // LUT inputs
  parameter int unsigned CB_PINS   = 3;             // CLB input pins served by one CB
  parameter int unsigned CFG_WORDS = 9;             // words per macroblock
  parameter int unsigned CFG_BITS  = CFG_WORDS * 8; // 72 configuration bits per macroblock
  parameter int unsigned ADDR_W    = 5;             // row / column address width
  parameter int unsigned WADDR_W   = 4;             // word address width

  // Sides of a switch block.
  typedef enum logic [1:0] {SIDE_L = 2'd0, SIDE_T = 2'd1, SIDE_R = 2'd2, SIDE_B = 2'd3} side_e;

  // ---- CLB configuration (72 bits) ----
  // bits 63:0  LUT contents, bit n is the output for masked input value n
  // bits 69:64 input mask, 1 = input used (AND gate open)
  // bit  70    output select, 1 = registered (flip-flop) output, 0 = combinational
  // bit  71    unused
  localparam int unsigned CLB_LUT_LSB  = 0;
  localparam int unsigned CLB_MASK_LSB = 64;
  localparam int unsigned CLB_REG_BIT  = 70;

  // ---- Connection block configuration ----
  // bits 3*W-1:0      one-hot track select of CLB input pin p at bits p*W +: W
  // bits 4*W-1:3*W    tri-state driver enables, side-A block output onto track t
  // bits 5*W-1:4*W    tri-state driver enables, side-B block output onto track t
  localparam int unsigned CB_SEL_LSB  = 0;
  localparam int unsigned CB_DRVA_LSB = CB_PINS * CHAN_W;
  localparam int unsigned CB_DRVB_LSB = CB_DRVA_LSB + CHAN_W;

  // ---- Switch block configuration ----
  // Six side pairs, W switches each: bit p*W + t closes the switch between track t of
  // SB_PAIR_A[p] and track wilton_track(SB_PAIR_A[p], SB_PAIR_B[p], t) of SB_PAIR_B[p].
  localparam int unsigned SB_PAIRS = 6;

  function automatic side_e sb_pair_a(int unsigned p);
    case (p)
      0, 1, 2: return SIDE_L;
      3, 4:    return SIDE_T;
      default: return SIDE_R;
    endcase
  endfunction

  function automatic side_e sb_pair_b(int unsigned p);
    case (p)
      0:       return SIDE_T;
      1:       return SIDE_R;
      2:       return SIDE_B;
      3:       return SIDE_R;
      4:       return SIDE_B;
      default: return SIDE_B;
    endcase
  endfunction

  // Wilton permutation as defined by the VPR place-and-route tool: the track on side
  // `to` reached from track t on side `from` in a channel of w tracks. Straight
  // connections keep the track number; each turn rotates it differently, which is what
  // lets a net change tracks as it turns.
  function automatic int unsigned wilton_track(side_e from, side_e to, int unsigned t,
                                               int unsigned w);
    int unsigned r;
    r = t;
    unique case (from)
      SIDE_L: case (to)
                SIDE_T:  r = (w - t) % w;
                SIDE_B:  r = (w + t - 1) % w;
                default: r = t;
              endcase
      SIDE_R: case (to)
                SIDE_T:  r = (w + t - 1) % w;
                SIDE_B:  r = (2 * w - 2 - t) % w;
                default: r = t;
              endcase
      SIDE_B: case (to)
                SIDE_L:  r = (t + 1) % w;
                SIDE_R:  r = (2 * w - 2 - t) % w;
                default: r = t;
              endcase
      SIDE_T: case (to)
                SIDE_L:  r = (w - t) % w;
                SIDE_R:  r = (t + 1) % w;
                default: r = t;
              endcase
    endcase
    return r;
  endfunction

  // ---- I/O block configuration ----
  // bits W-1:0 one-hot track select for the pad output, bit W output enable,
  // bit W+1 input enable.
  localparam int unsigned IO_OE_BIT = CHAN_W;
  localparam int unsigned IO_IE_BIT = CHAN_W + 1;

endpackage
