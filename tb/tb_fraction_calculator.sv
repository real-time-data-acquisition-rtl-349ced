// tb_fraction_calculator: random lines pass through the normaliser with the
// reset gain table (unity, 4096 in Q12) and then with random gains loaded by
// host writes; every output pixel must equal min(65535, pixel*gain >> 12), and
// large gains must saturate.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_fraction_calculator;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic in_valid = 0, in_last = 0, ref_wr = 0;
  beat_t in_data = '0, out_data;
  logic [7:0] ref_addr = 0;
  pix_t ref_data = 0;
  logic out_valid, out_last;

  fraction_calculator dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .ref_wr, .ref_addr,
    .ref_data, .out_valid, .out_data, .out_last);

  longint gain [256];
  beat_t exp_q[$];
  logic  exp_last_q[$];
  int n_out = 0, n_sat = 0;

  always @(negedge clk) if (rst_n && out_valid) begin
    check(out_data == exp_q.pop_front() && out_last == exp_last_q.pop_front(),
          $sformatf("output beat %0d", n_out));
    n_out++;
  end

  task automatic line();
    for (int b = 0; b < LINE_BEATS; b++) begin
      beat_t d, e;
      @(negedge clk); #1;
      for (int k = 0; k < LANES; k++) begin
        longint p, v, r;
        p = b * LANES + k;
        v = $urandom_range(16383);
        r = (v * gain[p]) >> 12;
        if (r > 65535) begin r = 65535; n_sat++; end
        d[k*PIX_W +: PIX_W] = 16'(v);
        e[k*PIX_W +: PIX_W] = 16'(r);
      end
      in_valid = 1; in_data = d; in_last = (b == LINE_BEATS - 1);
      exp_q.push_back(e); exp_last_q.push_back(in_last);
    end
    @(negedge clk); #1; in_valid = 0; in_last = 0;
  endtask

  initial begin
    for (int p = 0; p < 256; p++) gain[p] = 4096;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) line();
    for (int p = 0; p < 256; p++) begin
      @(negedge clk); #1;
      ref_wr = 1; ref_addr = 8'(p); ref_data = 16'($urandom); gain[p] = ref_data;
    end
    @(negedge clk); #1; ref_wr = 0;
    repeat (4) line();
    repeat (5) @(negedge clk);
    check(n_out == 6 * LINE_BEATS, $sformatf("beat count %0d", n_out));
    check(n_sat > 0, "saturation exercised");
    finish();
  end
endmodule
