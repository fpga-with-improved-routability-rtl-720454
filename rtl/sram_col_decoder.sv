// sram_col_decoder: drives one of the configuration column lines and one of the word
// lines inside the selected macroblock.
//
// Decodes the latched column address into a one-hot select over the COLS columns of the
// macroblock matrix, and the latched word address into a one-hot select over the WORDS
// words of a macroblock. Out-of-range addresses and en low select nothing (neither
// columns nor words). Purely combinational. Named in the chip's block diagram; putting
// the word decode here is this implementation's choice.
`timescale 1ns/1ps
module sram_col_decoder
  import fpga_pkg::*;
#(
  parameter int unsigned COLS  = 2 * TILES + 3,
  parameter int unsigned WORDS = CFG_WORDS
) (
  input  logic               en,        // decoder enable
  input  logic [ADDR_W-1:0]  addr,      // column address
  input  logic [WADDR_W-1:0] word_addr, // word address inside the macroblock
  output logic [COLS-1:0]    col_sel,   // one-hot column lines
  output logic [WORDS-1:0]   word_sel   // one-hot word lines
);

  logic word_ok;

  always_comb begin
    word_ok = en && (word_addr < WADDR_W'(WORDS));
    col_sel  = '0;
    word_sel = '0;
    for (int c = 0; c < COLS; c++)
      if (word_ok && addr == ADDR_W'(c)) col_sel[c] = 1'b1;
    for (int w = 0; w < WORDS; w++)
      if (word_ok && word_addr == WADDR_W'(w)) word_sel[w] = 1'b1;
  end

endmodule
