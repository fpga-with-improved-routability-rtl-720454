// config_ctrl: control of the asynchronous parallel configuration bus.
//
// The bus works like the interface of an asynchronous DRAM. CDATA carries both
// addresses and data. While CPROG is high the host
//   1. drives the macroblock row on CDATA and pulls RAS_n low: the row is latched on the
//      falling edge of RAS_n;
//   2. drives the word number (0..8) and pulls BAS_n low: latched on the falling edge;
//   3. drives the macroblock column and pulls CAS_n low: latched on the falling edge;
//   4. with CAS_n still low, drives the data byte and pulls WE_n low to write (the cells
//      follow CDATA while WE_n is low), or pulls RE_n low to read: the chip then drives
//      CDATA with the stored byte (cdata_oe high).
// Addresses stay latched, so a new word or column can follow without repeating RAS_n.
// Nothing is clocked by GCLK. When CPROG falls the configuration is complete: CDONE
// rises and the fabric's flip-flops leave reset. Raising CPROG again (or pulling
// RESET_n low) drops CDONE and holds the fabric in reset. RESET_n low also clears the
// address latches.
//
// The pin names are the chip's. The strobe order, the meaning of BAS_n (word strobe),
// CDONE's behaviour and the reset of the fabric during programming are this
// implementation's choices.
`timescale 1ns/1ps
module config_ctrl
  import fpga_pkg::*;
(
  input  logic               reset_n,    // RESET_n pin
  input  logic               cprog,      // CPROG pin: programming mode
  input  logic               ras_n,      // row address strobe
  input  logic               bas_n,      // word ("byte") address strobe
  input  logic               cas_n,      // column address strobe
  input  logic               we_n,       // write enable
  input  logic               re_n,       // read enable
  input  logic [7:0]         cdata_in,   // CDATA as driven by the host
  output logic [ADDR_W-1:0]  row_addr,   // latched row address
  output logic [ADDR_W-1:0]  col_addr,   // latched column address
  output logic [WADDR_W-1:0] word_addr,  // latched word address
  output logic               dec_en,     // decoder enable (programming mode)
  output logic               wr,         // write strobe to the SRAM cells
  output logic               rd,         // read strobe to the SRAM cells
  output logic               cdata_oe,   // chip drives CDATA (readback)
  output logic               cdone,      // CDONE pin
  output logic               fabric_rst  // reset of the CLB flip-flops
);

  logic done_q;

  always_ff @(negedge ras_n or negedge reset_n) begin
    if (!reset_n)   row_addr <= '0;
    else if (cprog) row_addr <= cdata_in[ADDR_W-1:0];
  end

  always_ff @(negedge bas_n or negedge reset_n) begin
    if (!reset_n)   word_addr <= '0;
    else if (cprog) word_addr <= cdata_in[WADDR_W-1:0];
  end

  always_ff @(negedge cas_n or negedge reset_n) begin
    if (!reset_n)   col_addr <= '0;
    else if (cprog) col_addr <= cdata_in[ADDR_W-1:0];
  end

  // End of programming: set on the falling edge of CPROG.
  always_ff @(negedge cprog or negedge reset_n) begin
    if (!reset_n) done_q <= 1'b0;
    else          done_q <= 1'b1;
  end

  assign dec_en     = cprog;
  assign wr         = cprog & ~cas_n & ~we_n & re_n;
  assign rd         = cprog & ~cas_n & ~re_n & we_n;
  assign cdata_oe   = rd;
  assign cdone      = done_q & ~cprog;
  assign fabric_rst = ~reset_n | ~cdone;

  // Bus rule: the host never asserts write and read enable together.
  always @(negedge we_n) if (cprog) assert (re_n) else $error("WE_n fell while RE_n low");
  always @(negedge re_n) if (cprog) assert (we_n) else $error("RE_n fell while WE_n low");

endmodule
