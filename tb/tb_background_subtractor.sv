// tb_background_subtractor: random lines pass through the subtractor while a
// reference model keeps its own copy of the baseline table. The table is first
// loaded by host writes, then dark lines with tracking on pull it towards the
// dark pixels (exponential average with shift 4), and every output pixel must
// equal max(0, pixel - baseline) computed from the model's table.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_background_subtractor;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic in_valid = 0, in_last = 0, dark_line = 0, dark_track = 0, ref_wr = 0;
  beat_t in_data = '0, out_data;
  logic [7:0] ref_addr = 0;
  pix_t ref_data = 0;
  logic out_valid, out_last;

  background_subtractor dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .dark_line,
    .dark_track, .ref_wr, .ref_addr, .ref_data, .out_valid, .out_data, .out_last);

  int refm [256];
  beat_t exp_q[$];
  logic  exp_last_q[$];
  int n_out = 0, n_tracked = 0;

  always @(negedge clk) if (rst_n && out_valid) begin
    beat_t e;
    e = exp_q.pop_front();
    check(out_data == e && out_last == exp_last_q.pop_front(), $sformatf("output beat %0d", n_out));
    n_out++;
  end

  task automatic line(input bit dark, input int level);
    for (int b = 0; b < LINE_BEATS; b++) begin
      beat_t d, e;
      @(negedge clk); #1;
      for (int k = 0; k < LANES; k++) begin
        int p, v;
        p = b * LANES + k;
        v = level + $urandom_range(3000);
        d[k*PIX_W +: PIX_W] = 16'(v);
        e[k*PIX_W +: PIX_W] = (v > refm[p]) ? 16'(v - refm[p]) : 16'd0;
        if (dark && dark_track) begin
          refm[p] = refm[p] + ((v - refm[p]) >>> 4);
          n_tracked++;
        end
      end
      in_valid = 1; in_data = d; in_last = (b == LINE_BEATS - 1); dark_line = dark;
      exp_q.push_back(e); exp_last_q.push_back(in_last);
    end
    @(negedge clk); #1; in_valid = 0; in_last = 0;
  endtask

  initial begin
    for (int p = 0; p < 256; p++) refm[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    line(0, 100);                          // zero baseline: output = input
    for (int p = 0; p < 256; p++) begin    // host loads a baseline
      @(negedge clk); #1;
      ref_wr = 1; ref_addr = 8'(p); ref_data = 16'($urandom_range(2500)); refm[p] = ref_data;
    end
    @(negedge clk); #1; ref_wr = 0;
    repeat (4) line(0, 0);                 // some pixels clamp at zero
    dark_track = 1;
    repeat (6) line(1, 8000);              // baseline follows the dark lines
    repeat (3) line(0, 9000);
    dark_track = 0;
    repeat (2) line(1, 200);               // tracking off: no change
    repeat (2) line(0, 9000);
    repeat (5) @(negedge clk);
    check(n_out == 18 * LINE_BEATS, $sformatf("beat count %0d", n_out));
    check(n_tracked == 6 * 256, "tracking exercised");
    finish();
  end
endmodule
