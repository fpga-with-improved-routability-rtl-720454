// io_level_converter: BEHAVIOURAL MODEL of the bidirectional 1.2 V / 3.3 V I/O cell.
// It is not synthesizable logic: the real cell is a transistor-level circuit.
//
// Output path: the 1.2 V core signal IN_Low is shifted up by a contention-free level-up
// converter and driven onto the 3.3 V pad (OUT_High) through a slew-controlled push-pull
// driver, enabled by ENLH (itself level-shifted to OE). When the driver is off a bus
// keeper holds the pad at its last value. Input path: the pad (IN_High) passes a Schmitt
// trigger and a level-down converter to OUT_Low, enabled by ENHL; when disabled OUT_Low
// is 0.
//
// Timing: about 2.2 ns level-up delay (10 pF load) and 1 ns level-down delay, the
// published simulation figures. The model has two states, so the pad's tri-state is
// shown as out_high plus its enable out_high_oe. Hysteresis, slew rate and drive
// strength are not modelled; OUT_Low being 0 when disabled is this model's choice.
`timescale 1ns/1ps
module io_level_converter (
  input  logic in_low,       // IN_Low: core-side data to the pad
  input  logic enlh,         // ENLH: output enable, core side
  output logic out_high,     // OUT_High: pad value driven by the chip (or kept)
  output logic out_high_oe,  // pad driver active
  input  logic enhl,         // ENHL: input enable, core side
  input  logic in_high,      // IN_High: pad value seen by the input path
  output logic out_low       // OUT_Low: core-side data from the pad
);

  localparam realtime T_UP   = 2.2ns;
  localparam realtime T_DOWN = 1.0ns;

  logic data_up, en_up, keeper;

  // Level-up conversion of data and enable.
  assign #(T_UP) data_up = in_low;
  assign #(T_UP) en_up   = enlh;

  // Push-pull driver; the bus keeper holds the last driven value when it is disabled.
  always_latch begin
    if (en_up) keeper = data_up;
  end
  assign out_high    = keeper;
  assign out_high_oe = en_up;

  // Schmitt trigger and level-down conversion.
  assign #(T_DOWN) out_low = enhl & in_high;

endmodule
