// sram12t_cell: the 12-transistor SRAM cell of the fabric; WIDTH cells side by side
// share their enable lines (a configuration word is WIDTH = 8 of them).
//
// The cell has a write port (Write data, W_en and its complement W_en_n) and a separate
// read port (R_en and R_en_n driving the Read line). It needs no precharge and no clock:
// while W_en is high (and W_en_n low) the stored bit follows Write, and it holds when
// W_en falls. The read port drives Read only while R_en is high (and R_en_n low); a
// disabled cell leaves the Read line to the other cells of the word, modelled here as a
// 0 so that the lines of several cells can be ORed. The stored value is always visible
// on q, which drives the LUT or routing switch the bit configures.
//
// The Verilator linter reports that it finds no latch in the always_latch block when the two
// enables arrive as complements of one net (as in config_macroblock); the block is a
// latch all the same, and the warning is left standing.
//
// The port names follow the cell schematic. Storing with a level-sensitive latch is this
// model's reading of "not clocked"; the transistor-level inverter pair is not modelled.
`timescale 1ns/1ps
module sram12t_cell #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] write,   // write bit lines
  input  logic             w_en,    // write enable
  input  logic             w_en_n,  // write enable, complement
  input  logic             r_en,    // read enable
  input  logic             r_en_n,  // read enable, complement
  output logic [WIDTH-1:0] read,    // read bit line contributions (0 when not enabled)
  output logic [WIDTH-1:0] q        // stored bits
);

  always_latch begin
    if (w_en && !w_en_n) q = write;
  end

  assign read = (r_en && !r_en_n) ? q : '0;

endmodule
