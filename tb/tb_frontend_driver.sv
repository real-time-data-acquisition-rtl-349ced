// tb_frontend_driver: checks the readout-chip control sequence and the ADC SPI.
// For each line trigger int_reset must be high for t_reset clocks, then
// integrate for t_integ clocks, then a sample is taken: ro_start pulses and
// ro_en and hold stay high for exactly 16 clocks. Triggers while busy are
// counted as missed. A 24-bit SPI word is captured on the pins (rising sclk,
// cs_n low) and compared.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_frontend_driver;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic enable = 0, line_trig = 0, spi_start = 0, spi_busy;
  logic [23:0] spi_word = '0;
  logic int_reset, integrate, hold, ro_start, ro_en, adc_sclk, adc_mosi, adc_cs_n;
  logic [15:0] missed_trig;
  logic [31:0] lines_read;
  localparam int TR = 3, TI = 14;

  frontend_driver dut (.clk, .rst_n, .enable, .line_trig, .t_reset(8'(TR)), .t_integ(8'(TI)),
    .int_reset, .integrate, .hold, .ro_start, .ro_en, .missed_trig, .lines_read,
    .spi_start, .spi_word, .spi_busy, .adc_sclk, .adc_mosi, .adc_cs_n, .adc_miso(1'b0));

  // measure run lengths of each control signal
  int rst_len = 0, int_len = 0, ro_len = 0, hold_len = 0, n_start = 0;
  int bad_rst = 0, bad_int = 0, bad_ro = 0, n_ro = 0, order_bad = 0;
  int since_int = 100;
  always @(posedge clk) if (rst_n) begin
    if (int_reset) rst_len++; else if (rst_len) begin if (rst_len != TR) bad_rst++; rst_len = 0; end
    if (integrate) int_len++; else if (int_len) begin if (int_len != TI) bad_int++; int_len = 0; end
    if (int_reset && integrate) begin order_bad++; $display("both"); end
    if (ro_en) ro_len++; else if (ro_len) begin if (ro_len != 16) bad_ro++; ro_len = 0; n_ro++; end
    if (ro_en && !hold) begin order_bad++; $display("ro_en without hold"); end
    if (ro_start) begin
      n_start++;
      if (since_int != 1) begin order_bad++; $display("sample %0d clocks after integration", since_int); end
    end
    since_int = integrate ? 0 : since_int + 1;
  end

  logic [23:0] cap; int nbits = 0;
  always @(posedge adc_sclk) if (!adc_cs_n) begin cap = {cap[22:0], adc_mosi}; nbits++; end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; enable = 1;
    for (int i = 0; i < 10; i++) begin
      line_trig <= 1; @(posedge clk); line_trig <= 0;
      if (i == 5) begin repeat (4) @(posedge clk); line_trig <= 1; @(posedge clk); line_trig <= 0; end
      repeat (40) @(posedge clk);
    end
    repeat (40) @(posedge clk);
    check(n_start == 10, $sformatf("10 readouts started (%0d)", n_start));
    check(n_ro == 10 && bad_ro == 0, "ro_en high for 16 clocks per line");
    check(bad_rst == 0, "integrator reset length");
    check(bad_int == 0, "integration length");
    check(order_bad == 0, "sequence reset -> integrate -> sample -> readout under hold");
    check(missed_trig == 16'd1, $sformatf("one missed trigger (%0d)", missed_trig));
    check(lines_read == 32'd10, "lines_read");
    // SPI
    spi_word <= 24'hA5C3F1; spi_start <= 1; @(posedge clk); spi_start <= 0;
    @(posedge clk);
    check(spi_busy, "SPI busy during transfer");
    while (spi_busy) @(posedge clk);
    check(nbits == 24, $sformatf("24 SPI bits (%0d)", nbits));
    check(cap == 24'hA5C3F1, $sformatf("SPI word %h", cap));
    check(adc_cs_n, "cs_n released");
    finish();
  end
endmodule
