// tb_config_ctrl: drives DRAM-style strobe sequences and checks the latched addresses,
// the write and read strobes, CDATA output enable, CDONE and the fabric reset.
`timescale 1ns/1ps
module tb_config_ctrl;
  int checks = 0, failures = 0;
  logic reset_n, cprog, ras_n, bas_n, cas_n, we_n, re_n;
  logic [7:0] cdata_in;
  logic [4:0] row_addr, col_addr;
  logic [3:0] word_addr;
  logic dec_en, wr, rd, cdata_oe, cdone, fabric_rst;

  config_ctrl dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_n = 0; cprog = 0; ras_n = 1; bas_n = 1; cas_n = 1; we_n = 1; re_n = 1; cdata_in = 0;
    #5;
    check(row_addr == 0 && col_addr == 0 && word_addr == 0, "reset clears addresses");
    check(cdone == 0 && fabric_rst == 1, "reset: not done, fabric in reset");
    reset_n = 1; #5;
    check(cdone == 0 && fabric_rst == 1, "after reset, before programming");
    cprog = 1; #5;
    check(dec_en == 1, "decoders enabled in programming mode");
    for (int n = 0; n < 100; n++) begin
      logic [4:0] r, c;
      logic [3:0] w;
      bit do_rd;
      r = 5'($urandom_range(0, 18)); c = 5'($urandom_range(0, 18)); w = 4'($urandom_range(0, 8));
      do_rd = 1'($urandom);
      cdata_in = {3'($urandom), r}; #2 ras_n = 0; #3 cdata_in = 8'($urandom); #2;
      cdata_in = {4'($urandom), w}; #2 bas_n = 0; #3 cdata_in = 8'($urandom); #2;
      cdata_in = {3'($urandom), c}; #2 cas_n = 0; #3;
      check(row_addr == r && word_addr == w && col_addr == c,
            $sformatf("addr got %0d/%0d/%0d exp %0d/%0d/%0d", row_addr, word_addr, col_addr, r, w, c));
      check(wr == 0 && rd == 0, "no strobe before WE_n/RE_n");
      if (do_rd) begin
        re_n = 0; #2;
        check(rd == 1 && wr == 0 && cdata_oe == 1, "read strobe");
        re_n = 1; #2;
      end else begin
        we_n = 0; #2;
        check(wr == 1 && rd == 0 && cdata_oe == 0, "write strobe");
        we_n = 1; #2;
      end
      check(wr == 0 && rd == 0 && cdata_oe == 0, "strobes released");
      cas_n = 1; bas_n = 1; ras_n = 1; #3;
      we_n = 0; #2 check(wr == 0, "no write without CAS_n"); we_n = 1; #2;
    end
    check(cdone == 0 && fabric_rst == 1, "still programming");
    cprog = 0; #5;
    check(cdone == 1 && fabric_rst == 0, "CDONE after CPROG falls");
    check(dec_en == 0, "decoders off in user mode");
    // strobes are ignored in user mode
    begin
      logic [4:0] r_before;
      r_before = row_addr;
      cdata_in = r_before + 5'd1; ras_n = 0; #2 cas_n = 0; we_n = 0; #2;
      check(wr == 0 && row_addr == r_before, "no write and no address latch in user mode");
    end
    we_n = 1; cas_n = 1; ras_n = 1; #2;
    cprog = 1; #2;
    check(cdone == 0 && fabric_rst == 1, "reprogramming drops CDONE");
    cprog = 0; #2;
    check(cdone == 1, "CDONE again");
    reset_n = 0; #2;
    check(cdone == 0 && fabric_rst == 1, "RESET_n drops CDONE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
