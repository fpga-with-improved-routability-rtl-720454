// lut6: the 6-input look-up table of a CLB.
//
// Each input first passes an AND gate controlled by a mask bit, so an unused input is
// forced to 0 rather than left to whatever the routing carries. The masked inputs then
// steer a 6-stage tree of 2:1 multiplexers over the 64 configuration bits: stage s
// halves the candidates using masked input s, so the output is lut[masked value]. Purely
// combinational. Mask gates, mux tree and 64 SRAM bits follow the published CLB; the
// order in which the inputs drive the stages is this implementation's choice.
`timescale 1ns/1ps
module lut6
  import fpga_pkg::*;
#(
  parameter int unsigned K = LUT_K
) (
  input  logic [(1<<K)-1:0] lut,   // truth table, bit n = output for input value n
  input  logic [K-1:0]      mask,  // 1 = input used
  input  logic [K-1:0]      in,    // LUT inputs
  output logic              out
);

  logic [K-1:0] m;
  assign m = in & mask;

  // stage[s] holds 2^(K-s) candidates; stage[0] is the SRAM contents.
  logic [(1<<K)-1:0] stage [K+1];
  assign stage[0] = lut;

  for (genvar s = 0; s < K; s++) begin : g_stage
    for (genvar n = 0; n < (1 << (K - s - 1)); n++) begin : g_mux
      assign stage[s+1][n] = m[s] ? stage[s][2*n+1] : stage[s][2*n];
    end
    assign stage[s+1][(1<<K)-1:(1<<(K-s-1))] = '0;
  end

  assign out = stage[K][0];

endmodule
