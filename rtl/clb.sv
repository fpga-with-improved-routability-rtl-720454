// clb: configurable logic block.
//
// A lut6 (masked inputs, 64-bit table, mux tree) feeds a D flip-flop clocked by the
// global clock. A final 2:1 mux chooses the registered output (reg_sel = 1) or the LUT
// output directly (reg_sel = 0). The flip-flop clears asynchronously while rst is high.
// Registered outputs change one clock edge after the inputs; the combinational path has
// no latency. The structure follows the published CLB; the reset polarity, its
// asynchronous action and the reg_sel polarity are this implementation's choices.
`timescale 1ns/1ps
module clb
  import fpga_pkg::*;
#(
  parameter int unsigned K = LUT_K
) (
  input  logic              clk,      // global clock (GCLK)
  input  logic              rst,      // flip-flop reset, active high, asynchronous
  input  logic [(1<<K)-1:0] lut,      // LUT contents
  input  logic [K-1:0]      mask,     // input mask
  input  logic              reg_sel,  // 1 = registered output
  input  logic [K-1:0]      in,       // inputs from the connection blocks
  output logic              out       // output to the connection blocks
);

  logic lut_out, q;

  lut6 #(.K(K)) u_lut (.lut(lut), .mask(mask), .in(in), .out(lut_out));

  always_ff @(posedge clk or posedge rst) begin
    if (rst) q <= 1'b0;
    else     q <= lut_out;
  end

  assign out = reg_sel ? q : lut_out;

endmodule
