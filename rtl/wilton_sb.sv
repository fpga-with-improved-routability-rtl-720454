// wilton_sb: Wilton switch block.
//
// Four sides of W tracks meet here. For each of the six side pairs and each track there
// is one configuration bit closing a bidirectional transmission-gate switch, so every
// incoming track can reach exactly one track on each of the other three sides. Straight
// through, the track number is kept; on a turn it is permuted by the Wilton pattern
// (fpga_pkg::wilton_track), which lets a net move to a different track as it turns and
// so reach more of the fabric than a disjoint switch block would.
//
// Each side offers the value its segment carries without this block's own drive
// (side_in) and receives this block's drive (side_out): side_out of a pin is the OR of
// side_in over the pins it is switched to. Purely combinational. The Wilton topology
// and the transmission-gate switches are the published design; the permutation is the
// one the VPR tool uses for "wilton", and the bit order is this implementation's.
`timescale 1ns/1ps
module wilton_sb
  import fpga_pkg::*;
#(
  parameter int unsigned W = CHAN_W
) (
  input  logic [SB_PAIRS*W-1:0] cfg,          // switch p*W + t, see fpga_pkg
  input  logic [W-1:0]          side_in  [4], // indexed by side_e
  output logic [W-1:0]          side_out [4]
);

  always_comb begin
    for (int s = 0; s < 4; s++) side_out[s] = '0;
    for (int p = 0; p < SB_PAIRS; p++) begin
      for (int t = 0; t < W; t++) begin
        automatic side_e       sa = sb_pair_a(p);
        automatic side_e       sb = sb_pair_b(p);
        automatic int unsigned u  = wilton_track(sa, sb, t, W);
        if (cfg[p*W+t]) begin
          side_out[sa][t] = side_out[sa][t] | side_in[sb][u];
          side_out[sb][u] = side_out[sb][u] | side_in[sa][t];
        end
      end
    end
  end

endmodule
