// sram_row_decoder: drives one of the configuration row lines.
//
// Turns the latched row address into a one-hot row select over the ROWS rows of the
// macroblock matrix. No line is high when en is low or when the address is past the
// last row. Purely combinational. The decoder is named in the chip's block diagram;
// its function is the obvious one and its encoding (binary address) is this
// implementation's choice.
`timescale 1ns/1ps
module sram_row_decoder
  import fpga_pkg::*;
#(
  parameter int unsigned ROWS = 2 * TILES + 3
) (
  input  logic              en,     // decoder enable
  input  logic [ADDR_W-1:0] addr,   // row address
  output logic [ROWS-1:0]   row_sel // one-hot row lines
);

  always_comb begin
    row_sel = '0;
    for (int r = 0; r < ROWS; r++)
      if (en && addr == ADDR_W'(r)) row_sel[r] = 1'b1;
  end

endmodule
