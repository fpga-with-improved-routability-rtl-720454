// conn_block: connection block (used both as HCB and VCB).
//
// A connection block sits on one routing channel segment of W tracks, between the
// switch blocks at its two ends (end 0: left or top, end 1: right or bottom), and
// between two logic positions: side A, the CLB whose inputs it feeds, and side B, the
// neighbouring CLB (or an I/O block at the edge of the array).
//   * Inputs: each of the PINS CLB input pins connects, through a one-hot set of
//     switches, to one track (sel). An unselected pin reads 0.
//   * Outputs: the side-A and side-B block outputs can each be put on any track through
//     a tri-state driver (drv_a, drv_b).
// A track is one electrical net through transmission gates, so its value is whatever
// its enabled driver puts on it: a switch block at either end or a CB driver. The model
// resolves the net as the OR of the enabled drivers (a legal configuration enables at
// most one) and reads an undriven track as 0, standing in for the keeper that stops it
// from floating. To let a value pass through the bidirectional switch blocks without a
// false feedback path, the value offered to each end excludes what that end itself
// drives: end0_out = end1_in | CB drivers, end1_out = end0_in | CB drivers. Purely
// combinational. While en is low (configuration not complete) all drivers stay off, so
// a half-written configuration cannot create oscillating loops through the fabric.
//
// In the assembled fabric these paths close combinational loops through the switch
// blocks (see fpga_core); a legal configuration never closes one.
//
// The tri-state drivers and keepers are the published circuit; three input pins per CB,
// one-hot selection and the OR resolution are this implementation's choices.
`timescale 1ns/1ps
module conn_block
  import fpga_pkg::*;
#(
  parameter int unsigned W    = CHAN_W,
  parameter int unsigned PINS = CB_PINS
) (
  input  logic [PINS*W-1:0] sel,       // pin p uses bits p*W +: W
  input  logic [W-1:0]      drv_a,     // side-A output driver enables
  input  logic [W-1:0]      drv_b,     // side-B output driver enables
  input  logic              en,        // drivers allowed (fabric configured)
  input  logic              a_out,     // side-A block output
  input  logic              b_out,     // side-B block output
  input  logic [W-1:0]      end0_in,   // driven into the segment by the end-0 SB
  input  logic [W-1:0]      end1_in,   // driven into the segment by the end-1 SB
  output logic [W-1:0]      end0_out,  // offered to the end-0 SB
  output logic [W-1:0]      end1_out,  // offered to the end-1 SB
  output logic [W-1:0]      track,     // resolved track values
  output logic [PINS-1:0]   pin        // side-A CLB input pins
);

  logic [W-1:0] cb_drive;

  assign cb_drive = {W{en}} & ((drv_a & {W{a_out}}) | (drv_b & {W{b_out}}));
  assign end0_out = end1_in | cb_drive;
  assign end1_out = end0_in | cb_drive;
  assign track    = end0_in | end1_in | cb_drive;

  for (genvar p = 0; p < PINS; p++) begin : g_pin
    assign pin[p] = |(sel[p*W +: W] & track);
  end

endmodule
