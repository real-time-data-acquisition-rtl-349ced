// tb_register_file: writes and reads back every read/write register, checks
// the reset defaults, the one-clock SPI start and reference-write strobes, the
// auto-incrementing reference address and the status window.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_register_file;
  import hold_pkg::*;
  `include "tb_util.svh"
  axil_req_t mreq = '0;
  axil_rsp_t mrsp;
  `include "axil_tasks.svh"
  logic acq_enable, use_internal, fe_enable, dark_track, spi_start, bg_ref_wr, frac_ref_wr;
  logic [15:0] num_lines, int_line_period, int_mp_lines, ref_data;
  logic [3:0] dv_delay;
  logic [7:0] t_reset, t_integ, ref_addr;
  logic [23:0] spi_word;
  logic [31:0] status [16];

  register_file dut (.clk, .rst_n, .req(mreq), .rsp(mrsp), .acq_enable, .use_internal,
    .fe_enable, .dark_track, .num_lines, .dv_delay, .int_line_period, .int_mp_lines,
    .t_reset, .t_integ, .spi_start, .spi_word, .bg_ref_wr, .frac_ref_wr, .ref_addr,
    .ref_data, .status);

  int n_spi = 0, n_bg = 0, n_fr = 0;
  logic [7:0] bg_addrs[$];
  always @(posedge clk) if (rst_n) begin
    if (spi_start) n_spi++;
    if (bg_ref_wr) begin n_bg++; bg_addrs.push_back(ref_addr); end
    if (frac_ref_wr) n_fr++;
  end

  initial begin
    logic [31:0] d; logic [1:0] r;
    for (int i = 0; i < 16; i++) status[i] = 32'h1000 * i + 7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axil_read(32'h0, d, r);  check(d == 32'h484F4C44 && r == RESP_OKAY, "ID");
    axil_read(32'h8, d, r);  check(d == 32'd2700, "NUM_LINES default 2700");
    axil_write(32'h4, 32'hF, r); check(r == RESP_OKAY, "write OKAY");
    check(acq_enable && use_internal && fe_enable && dark_track, "CTRL bits");
    axil_write(32'h4, 32'h5, r);
    check(acq_enable && !use_internal && fe_enable && !dark_track, "CTRL bits cleared");
    axil_read(32'h4, d, r); check(d == 32'h5, "CTRL read back");
    axil_write(32'h8, 32'd1234, r); axil_read(32'h8, d, r);
    check(d == 32'd1234 && num_lines == 16'd1234, "NUM_LINES");
    axil_write(32'hC, 32'd7, r); check(dv_delay == 4'd7, "DV_DELAY");
    axil_write(32'h10, 32'd99, r); check(int_line_period == 16'd99, "INT_PERIOD");
    axil_write(32'h14, 32'd5, r); check(int_mp_lines == 16'd5, "INT_MP");
    axil_write(32'h18, 32'h0A03, r); check(t_reset == 8'd3 && t_integ == 8'd10, "FE_TIMING");
    axil_read(32'h18, d, r); check(d == 32'h0A03, "FE_TIMING read back");
    axil_write(32'h1C, 32'h00ABCDEF, r);
    repeat (2) @(posedge clk);
    check(n_spi == 1 && spi_word == 24'hABCDEF, "one SPI start with its word");
    axil_write(32'h40, 32'd10, r);
    axil_write(32'h44, 32'd111, r);
    axil_write(32'h44, 32'd222, r);
    axil_write(32'h48, 32'd333, r);
    repeat (2) @(posedge clk);
    check(n_bg == 2 && n_fr == 1, "reference write strobes");
    check(bg_addrs.size() == 2 && bg_addrs[0] == 8'd10 && bg_addrs[1] == 8'd11,
          "reference address auto-increments");
    axil_read(32'h40, d, r); check(d == 32'd13, "REF_ADDR after three writes");
    for (int i = 0; i < 16; i += 5) begin
      axil_read(32'h80 + 4 * i, d, r);
      check(d == 32'h1000 * i + 7, $sformatf("status word %0d", i));
    end
    axil_read(32'h300, d, r); check(d == 0, "unmapped reads zero");
    finish();
  end
endmodule
