// tb_wilton_sb: closes one switch at a time and drives one pin at a time, checking the
// reached pins against the Wilton permutation for 5 tracks written out by hand:
//   L-T: t -> (5-t) mod 5   L-R: t -> t   L-B: t -> (t+4) mod 5
//   T-R: t -> (t+1) mod 5   T-B: t -> t   R-B: t -> (8-t) mod 5
// Then random multi-switch configurations against a reference built from the table.
`timescale 1ns/1ps
module tb_wilton_sb;
  import fpga_pkg::*;
  int checks = 0, failures = 0;
  logic [29:0] cfg;
  logic [4:0] side_in [4];
  logic [4:0] side_out [4];

  localparam int PA [6] = '{0, 0, 0, 1, 1, 2};   // L L L T T R
  localparam int PB [6] = '{1, 2, 3, 2, 3, 3};   // T R B R B B
  localparam int EXP [6][5] = '{'{0, 4, 3, 2, 1}, '{0, 1, 2, 3, 4}, '{4, 0, 1, 2, 3},
                                '{1, 2, 3, 4, 0}, '{0, 1, 2, 3, 4}, '{3, 2, 1, 0, 4}};

  wilton_sb dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // single switch, both directions
    for (int p = 0; p < 6; p++)
      for (int t = 0; t < 5; t++) begin
        cfg = 30'(1) << (p*5 + t);
        for (int s = 0; s < 4; s++) side_in[s] = '0;
        side_in[PA[p]][t] = 1'b1; #1;
        for (int s = 0; s < 4; s++)
          check(side_out[s] == ((s == PB[p]) ? 5'(1 << EXP[p][t]) : 5'b0),
                $sformatf("p%0d t%0d fwd side %0d = %b", p, t, s, side_out[s]));
        side_in[PA[p]] = '0; side_in[PB[p]][EXP[p][t]] = 1'b1; #1;
        for (int s = 0; s < 4; s++)
          check(side_out[s] == ((s == PA[p]) ? 5'(1 << t) : 5'b0),
                $sformatf("p%0d t%0d back side %0d = %b", p, t, s, side_out[s]));
      end
    // random configurations
    for (int n = 0; n < 1000; n++) begin
      logic [4:0] e [4];
      cfg = 30'($urandom);
      for (int s = 0; s < 4; s++) begin side_in[s] = 5'($urandom); e[s] = '0; end
      #1;
      for (int p = 0; p < 6; p++)
        for (int t = 0; t < 5; t++)
          if (cfg[p*5+t]) begin
            e[PB[p]][EXP[p][t]] |= side_in[PA[p]][t];
            e[PA[p]][t]         |= side_in[PB[p]][EXP[p][t]];
          end
      for (int s = 0; s < 4; s++)
        check(side_out[s] == e[s], $sformatf("random n%0d side %0d %b exp %b", n, s, side_out[s], e[s]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
