// tb_adc_data_reader: checks line assembly, data-valid alignment and the
// short-line counter of adc_data_reader. Data valid comes in bursts of 16
// clocks (one line) with random gaps, plus one burst of 8 clocks; the ADC
// presents each burst's samples `delay` clocks after data valid and random
// junk otherwise. Every output beat is compared with the expected samples and
// last must mark every 16th beat of a burst.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_adc_data_reader;
  import hold_pkg::*;
  `include "tb_util.svh"

  localparam int DELAY = 3;
  logic [LANES-1:0][ADC_BITS-1:0] adc_data;
  logic        adc_dv;
  logic        out_valid, out_last;
  beat_t       out_data;
  logic [15:0] short_lines;

  adc_data_reader dut (
    .clk, .rst_n, .adc_data, .adc_dv, .dv_delay(4'(DELAY)), .out_valid, .out_data,
    .out_last, .short_lines
  );

  // expected beats: data and last flag
  beat_t exp_d[$];
  bit    exp_l[$];
  bit    dv_hist[$];
  int    pos_hist[$];
  int    beats_seen = 0, lasts_seen = 0;

  task automatic drive_cycle(input bit dv, input int pos, input bit full);
    logic [LANES-1:0][ADC_BITS-1:0] d;
    beat_t b;
    adc_dv <= dv;
    dv_hist.push_front(dv);
    pos_hist.push_front(full ? pos : -1 - pos);
    for (int k = 0; k < LANES; k++) d[k] = ADC_BITS'($urandom);
    if (dv_hist.size() > DELAY && dv_hist[DELAY]) begin
      int p;
      p = pos_hist[DELAY];
      for (int k = 0; k < LANES; k++) b[k*PIX_W +: PIX_W] = PIX_W'(d[k]);
      exp_d.push_back(b);
      exp_l.push_back(p == LINE_BEATS - 1);
    end
    adc_data <= d;
    @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    beats_seen++;
    if (out_last) lasts_seen++;
    if (exp_d.size() == 0) check(0, "unexpected output beat");
    else begin
      check(out_data == exp_d[0], $sformatf("beat %0d data", beats_seen));
      check(out_last == exp_l[0], $sformatf("beat %0d last", beats_seen));
      void'(exp_d.pop_front()); void'(exp_l.pop_front());
    end
  end

  initial begin
    adc_dv = 0; adc_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int line = 0; line < 20; line++) begin
      int n;
      n = (line == 7) ? 8 : LINE_BEATS;           // line 7 is cut short
      for (int b = 0; b < n; b++) drive_cycle(1, b, n == LINE_BEATS);
      repeat ($urandom_range(1, 6)) drive_cycle(0, 0, 1);
    end
    repeat (DELAY + 5) drive_cycle(0, 0, 1);
    check(exp_d.size() == 0, "all expected beats seen");
    check(lasts_seen == 19, $sformatf("19 complete lines (saw %0d)", lasts_seen));
    check(short_lines == 16'd1, $sformatf("one short line (saw %0d)", short_lines));
    finish();
  end
endmodule
