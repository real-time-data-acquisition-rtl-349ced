// tb_pll_controller: register writes start 32-bit SPI transfers to the PLL;
// an SPI slave model here samples MOSI on rising SCLK (mode 0, MSB first)
// while chip select is low and returns its own word on MISO. The test checks
// the received word, the read-back register, the busy flag, that a write while
// busy is ignored, and the synchronised lock inputs.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_pll_controller;
  import hold_pkg::*;
  `include "tb_util.svh"
  axil_req_t mreq = '0; axil_rsp_t mrsp;
  logic sclk, mosi, cs_n, miso;
  logic [1:0] locked = 2'b00;
  `include "axil_tasks.svh"

  pll_controller dut (.clk, .rst_n, .req(mreq), .rsp(mrsp), .pll_sclk(sclk), .pll_mosi(mosi),
    .pll_cs_n(cs_n), .pll_miso(miso), .pll_locked(locked));

  logic [31:0] rx_word, tx_word;
  int nbits = 0, nxfer = 0;
  assign miso = tx_word[31];
  always @(negedge cs_n) begin nbits = 0; rx_word = 0; end
  always @(posedge sclk) if (!cs_n) begin rx_word = {rx_word[30:0], mosi}; nbits++; end
  always @(negedge sclk) if (!cs_n) tx_word = {tx_word[30:0], 1'b0};
  always @(posedge cs_n) nxfer++;

  initial begin
    logic [31:0] d, w;
    logic [1:0] r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    nxfer = 0;
    for (int i = 0; i < 3; i++) begin
      w = $urandom; tx_word = $urandom; d = tx_word;
      axil_write(32'h0, w, r);
      check(r == RESP_OKAY, "write response");
      axil_read(32'h4, d, r);
      check(d[0] == 1, "busy during transfer");
      axil_write(32'h0, 32'hFFFF_FFFF, r);           // ignored while busy
      wait (nxfer == i + 1);
      repeat (5) @(posedge clk);
      check(rx_word == w && nbits == 32, $sformatf("SPI word %0d: %08h", i, rx_word));
      axil_read(32'h0, d, r);
      check(d == w, "last word register");
      axil_read(32'h4, d, r);
      check(d[0] == 0, "idle after transfer");
    end
    tx_word = 32'hA5C3_0F96;
    axil_write(32'h0, 32'h1, r);
    wait (nxfer == 4);
    repeat (5) @(posedge clk);
    axil_read(32'h8, d, r);
    check(d == 32'hA5C3_0F96, $sformatf("MISO read-back %08h", d));
    check(nxfer == 4, "write while busy started nothing");
    locked = 2'b10;
    repeat (4) @(posedge clk);
    axil_read(32'h4, d, r);
    check(d[2:1] == 2'b10, "lock inputs");
    finish();
  end
endmodule
