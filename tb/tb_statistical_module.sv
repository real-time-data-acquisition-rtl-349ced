// tb_statistical_module: random lines (including a Gaussian-like beam spot,
// an all-zero line and back-to-back lines without gaps) go through the module;
// for each, centre of mass, variance and mean are computed here in 64-bit
// integer arithmetic with the same Q8 rounding and compared with the output
// record, whose sequence number must count lines.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_statistical_module;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic in_valid = 0, in_last = 0, out_valid;
  beat_t in_data = '0;
  stats_t out_stats;

  statistical_module dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .out_valid, .out_stats);

  stats_t exp_q[$];
  int n_out = 0, n_lines = 0;

  always @(negedge clk) if (rst_n && out_valid) begin
    stats_t e;
    e = exp_q.pop_front();
    check(out_stats == e, $sformatf("line %0d: com %0d/%0d spread %0d/%0d mean %0d/%0d", n_out,
          out_stats.com, e.com, out_stats.spread, e.spread, out_stats.mean, e.mean));
    n_out++;
  end

  task automatic line(input int kind, input bit gap);
    longint x [256];
    longint m0, m1, m2, c, q2;
    stats_t e;
    int centre;
    centre = $urandom_range(40, 215);
    m0 = 0; m1 = 0; m2 = 0;
    for (int i = 0; i < 256; i++) begin
      case (kind)
        0: x[i] = 0;
        1: x[i] = $urandom_range(65535);
        default: x[i] = (i > centre - 20 && i < centre + 20) ? 60000 - 140 * (i - centre) * (i - centre)
                                                             : $urandom_range(50);
      endcase
      if (x[i] < 0) x[i] = 0;
      m0 += x[i]; m1 += i * x[i]; m2 += i * i * x[i];
    end
    e.seq = n_lines++;
    if (m0 == 0) begin e.com = 0; e.spread = 0; end
    else begin
      c = (m1 << 8) / m0; q2 = (m2 << 8) / m0;
      e.com = 32'(c); e.spread = 32'(q2 - ((c * c) >> 8));
    end
    e.mean = 32'(m0);
    exp_q.push_back(e);
    for (int b = 0; b < LINE_BEATS; b++) begin
      @(negedge clk); #1;
      for (int k = 0; k < LANES; k++) in_data[k*PIX_W +: PIX_W] = 16'(x[b*LANES+k]);
      in_valid = 1; in_last = (b == LINE_BEATS - 1);
    end
    if (gap) begin @(negedge clk); #1; in_valid = 0; in_last = 0; end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    line(2, 1);
    line(0, 1);
    for (int i = 0; i < 10; i++) line(1 + (i % 2), 0);   // back to back
    for (int i = 0; i < 10; i++) line(2, 1);
    @(negedge clk); #1; in_valid = 0; in_last = 0;
    repeat (60) @(negedge clk);
    check(n_out == 22 && exp_q.size() == 0, $sformatf("22 records (%0d)", n_out));
    finish();
  end
endmodule
