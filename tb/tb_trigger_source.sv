// tb_trigger_source: external triggers (asynchronous, several clocks wide) must
// each give exactly one one-clock pulse within three clocks; internal mode must
// give a line trigger every int_line_period clocks and a macro-pulse trigger
// with every int_mp_lines-th line trigger; line_count counts line triggers.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 5000
module tb_trigger_source;
  `include "tb_util.svh"
  logic ext_line_trig = 0, ext_mp_trig = 0, use_internal = 0;
  logic [15:0] per = 16'd10, mpl = 16'd4;
  logic line_trig, mp_trig;
  logic [31:0] line_count;
  int n_line = 0, n_mp = 0, last_line = -1, last_mp = -1, cyc = 0;
  int bad_period = 0, bad_mp = 0, lat_bad = 0, edge_cyc = -100;

  trigger_source dut (.clk, .rst_n, .ext_line_trig, .ext_mp_trig, .use_internal,
    .int_line_period(per), .int_mp_lines(mpl), .line_trig, .mp_trig, .line_count);

  always @(posedge clk) begin
    cyc++;
    if (rst_n && line_trig) begin
      n_line++;
      if (use_internal && last_line >= 0 && cyc - last_line != 10) bad_period++;
      if (!use_internal && (cyc - edge_cyc > 4)) lat_bad++;
      last_line = cyc;
    end
    if (rst_n && mp_trig) begin
      n_mp++;
      if (use_internal && !line_trig) bad_mp++;
      if (use_internal && last_mp >= 0 && cyc - last_mp != 40) bad_mp++;
      last_mp = cyc;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // external: 6 line triggers 5 clocks wide, 2 macro-pulse triggers
    for (int i = 0; i < 6; i++) begin
      #2 ext_line_trig = 1; edge_cyc = cyc;
      if (i == 1 || i == 4) ext_mp_trig = 1;
      repeat (5) @(posedge clk);
      #3 ext_line_trig = 0; ext_mp_trig = 0;
      repeat (7) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    check(n_line == 6, $sformatf("6 external line triggers (got %0d)", n_line));
    check(n_mp == 2, $sformatf("2 external macro-pulse triggers (got %0d)", n_mp));
    check(lat_bad == 0, "external trigger latency <= 3 clocks");
    check(line_count == 32'd6, "line_count after external triggers");
    // internal
    n_line = 0; n_mp = 0; last_line = -1; last_mp = -1;
    use_internal = 1;
    repeat (400) @(posedge clk);
    use_internal = 0;
    check(n_line >= 39 && n_line <= 41, $sformatf("internal line triggers (got %0d)", n_line));
    check(n_mp == 10, $sformatf("internal macro-pulse triggers (got %0d)", n_mp));
    check(bad_period == 0, "internal line period = 10 clocks");
    check(bad_mp == 0, "macro-pulse every 4th line trigger, aligned");
    check(line_count == 32'(6 + n_line), "line_count after internal triggers");
    finish();
  end
endmodule
