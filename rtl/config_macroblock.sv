// config_macroblock: the configuration store of one macroblock of the 19x19 matrix.
//
// It holds 9 words of 8 bits, built from 12T SRAM cells. A word is written while the
// macroblock's row line, its column line, the word's select line and the write strobe
// are all high; it is read back onto rdata while row, column, word and the read strobe
// are high. rdata is 0 when the macroblock is not being read, so the read data of all
// macroblocks can be ORed into the shared readback bus. All 72 stored bits are visible
// on q, word w at bits 8*w +: 8, and drive the block the macroblock configures.
//
// Nothing is clocked: the write is level-sensitive, as the configuration bus is
// asynchronous. 9 words x 8 bits per macroblock follow the published design; the
// select-line arrangement is this implementation's.
`timescale 1ns/1ps
module config_macroblock
  import fpga_pkg::*;
#(
  parameter int unsigned WORDS = CFG_WORDS
) (
  input  logic               row_sel,   // row line from the row decoder
  input  logic               col_sel,   // column line from the column decoder
  input  logic [WORDS-1:0]   word_sel,  // one-hot word select from the column decoder
  input  logic               we,        // write strobe
  input  logic               re,        // read strobe
  input  logic [7:0]         wdata,     // write data (CDATA)
  output logic [7:0]         rdata,     // read data, 0 when not selected
  output logic [WORDS*8-1:0] q          // stored configuration
);

  logic [WORDS-1:0] w_en, r_en;
  logic [7:0]       rd_bits [WORDS];

  for (genvar w = 0; w < WORDS; w++) begin : g_word
    assign w_en[w] = row_sel & col_sel & word_sel[w] & we;
    assign r_en[w] = row_sel & col_sel & word_sel[w] & re;
    sram12t_cell #(.WIDTH(8)) u_cells (
      .write (wdata),
      .w_en  (w_en[w]),
      .w_en_n(~w_en[w]),
      .r_en  (r_en[w]),
      .r_en_n(~r_en[w]),
      .read  (rd_bits[w]),
      .q     (q[8*w +: 8])
    );
  end

  always_comb begin
    rdata = '0;
    for (int w = 0; w < WORDS; w++) rdata |= rd_bits[w];
  end

endmodule
