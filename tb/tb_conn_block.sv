// tb_conn_block: random configurations and track values against a reference model of
// the connection block: pins read the one-hot selected track, enabled drivers put the
// side-A/B outputs on tracks, each end sees everything but its own drive.
`timescale 1ns/1ps
module tb_conn_block;
  int checks = 0, failures = 0;
  logic [14:0] sel;
  logic [4:0] drv_a, drv_b, end0_in, end1_in, end0_out, end1_out, track;
  logic en, a_out, b_out;
  logic [2:0] pin;

  conn_block dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [4:0] cbd, e_trk, e0, e1;
      logic [2:0] e_pin;
      // one-hot or empty select per pin
      for (int p = 0; p < 3; p++) begin
        int t;
        t = $urandom_range(0, 5);
        sel[p*5 +: 5] = (t == 5) ? 5'b0 : 5'(1 << t);
      end
      drv_a = 5'($urandom); drv_b = 5'($urandom);
      en = (n % 7 != 0);
      a_out = 1'($urandom); b_out = 1'($urandom);
      end0_in = 5'($urandom) & 5'($urandom); end1_in = 5'($urandom) & 5'($urandom);
      #1;
      cbd = '0;
      for (int t = 0; t < 5; t++)
        cbd[t] = en && ((drv_a[t] && a_out) || (drv_b[t] && b_out));
      e0 = end1_in | cbd;
      e1 = end0_in | cbd;
      e_trk = end0_in | end1_in | cbd;
      for (int p = 0; p < 3; p++) begin
        e_pin[p] = 0;
        for (int t = 0; t < 5; t++) if (sel[p*5+t] && e_trk[t]) e_pin[p] = 1;
      end
      checks++;
      if (end0_out !== e0 || end1_out !== e1 || track !== e_trk || pin !== e_pin) begin
        failures++;
        $display("FAIL n=%0d e0 %b/%b e1 %b/%b trk %b/%b pin %b/%b", n, end0_out, e0,
                 end1_out, e1, track, e_trk, pin, e_pin);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
