// io_block: programmable fabric side of one GPIO or host-interface (HIP) pad.
//
// An I/O block sits in the ring around the tile array, next to an edge connection
// block. Output: a one-hot set of switches (out_sel) picks one track of that CB, and the
// pad driver is enabled when the block's own enable bit (cfg_oe) and the chip-wide OE
// pin are both high. Input: when cfg_ie is high the level-converted pad value enters the
// fabric as the "block output" that the edge CB can drive onto its tracks; otherwise the
// fabric sees 0. cfg_ie also drives the ENHL enable of the level converter. Purely
// combinational.
//
// The pads and their level converters are published; the ring placement, the
// configuration bits and the use of the OE pin as a global output enable are this
// implementation's choices.
`timescale 1ns/1ps
module io_block
  import fpga_pkg::*;
#(
  parameter int unsigned W = CHAN_W
) (
  input  logic [W-1:0] out_sel,     // track driving the pad
  input  logic         cfg_oe,      // output enable bit
  input  logic         cfg_ie,      // input enable bit
  input  logic         global_oe,   // chip OE pin
  input  logic         fabric_en,   // fabric configured (CDONE)
  input  logic [W-1:0] track,       // tracks of the adjacent edge CB
  input  logic         pad_in,      // from the level converter (OUT_Low)
  output logic         pad_out,     // to the level converter (IN_Low)
  output logic         pad_oe,      // to the level converter (ENLH)
  output logic         pad_ie,      // to the level converter (ENHL)
  output logic         to_fabric    // into the edge CB
);

  assign pad_out   = |(out_sel & track);
  assign pad_oe    = cfg_oe & global_oe & fabric_en;
  assign pad_ie    = cfg_ie & fabric_en;
  assign to_fabric = pad_ie & pad_in;

endmodule
