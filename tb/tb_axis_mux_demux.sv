// tb_axis_mux_demux: data packets (s0) and register responses (s1) compete for
// the link's transmit side under random back-pressure; each packet must leave
// whole, never interleaved, with nothing lost, and both sources must be served.
// On the receive side, register packets must reach the register port, read
// requests the request port, and packets of other types must be discarded and
// counted, including their follow-on beats.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 40000
module tb_axis_mux_demux;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic s0_valid = 0, s0_last = 0, s0_ready, s1_valid = 0, s1_last = 0, s1_ready;
  logic tx_valid, tx_last, tx_ready = 0, rx_valid = 0, rx_last = 0, rx_ready;
  logic reg_valid, reg_last, reg_ready = 0, req_valid, req_last, req_ready = 0;
  beat_t s0_data = '0, s1_data = '0, tx_data, rx_data = '0, reg_data, req_data;
  logic [15:0] rx_dropped;
  logic [31:0] tx_packets;

  axis_mux_demux dut (.clk, .rst_n, .s0_valid, .s0_data, .s0_last, .s0_ready, .s1_valid,
    .s1_data, .s1_last, .s1_ready, .tx_valid, .tx_data, .tx_last, .tx_ready, .rx_valid,
    .rx_data, .rx_last, .rx_ready, .reg_valid, .reg_data, .reg_last, .reg_ready, .req_valid,
    .req_data, .req_last, .req_ready, .rx_dropped, .tx_packets);

  typedef struct { beat_t d; logic l; } b_t;
  b_t q0[$], q1[$], qrx[$], e0[$], e1[$], ereg[$], ereq[$];
  int n_tx0 = 0, n_tx1 = 0, n_reg = 0, n_req = 0;
  int cur_src = -1;

  always @(posedge clk) if (rst_n) begin
    if (s0_valid && s0_ready) void'(q0.pop_front());
    if (s1_valid && s1_ready) void'(q1.pop_front());
    if (rx_valid && rx_ready) void'(qrx.pop_front());
    if (tx_valid && tx_ready) begin
      b_t e;
      int src;
      src = tx_data[0];                        // bit 0 marks the source
      if (cur_src >= 0) check(src == cur_src, "packets not interleaved");
      e = (src == 0) ? e0.pop_front() : e1.pop_front();
      check(tx_data == e.d && tx_last == e.l, "transmitted beat");
      cur_src = tx_last ? -1 : src;
      if (tx_last) begin if (src == 0) n_tx0++; else n_tx1++; end
    end
    if (reg_valid && reg_ready) begin
      b_t e; e = ereg.pop_front();
      check(reg_data == e.d && reg_last == e.l, "register port beat");
      if (reg_last) n_reg++;
    end
    if (req_valid && req_ready) begin
      b_t e; e = ereq.pop_front();
      check(req_data == e.d && req_last == e.l, "request port beat");
      if (req_last) n_req++;
    end
  end
  always @(negedge clk) if (rst_n) begin
    tx_ready = ($urandom_range(3) != 0);
    reg_ready = ($urandom_range(2) != 0);
    req_ready = ($urandom_range(2) != 0);
    s0_valid = q0.size() > 0; if (s0_valid) begin s0_data = q0[0].d; s0_last = q0[0].l; end
    s1_valid = q1.size() > 0; if (s1_valid) begin s1_data = q1[0].d; s1_last = q1[0].l; end
    rx_valid = qrx.size() > 0; if (rx_valid) begin rx_data = qrx[0].d; rx_last = qrx[0].l; end
  end

  function automatic beat_t rnd(input logic [7:0] t, input bit src);
    beat_t d;
    for (int i = 0; i < 8; i++) d[i*32 +: 32] = $urandom;
    d[255:248] = t; d[0] = src;
    return d;
  endfunction

  initial begin
    int ndrop;
    ndrop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 10; p++) begin
      int len;
      len = $urandom_range(1, 20);
      for (int i = 0; i < len; i++) begin
        b_t b; b.d = rnd(8'hD0, 0); b.l = (i == len - 1); q0.push_back(b); e0.push_back(b);
      end
      begin b_t b; b.d = rnd(8'hA3, 1); b.l = 1; q1.push_back(b); e1.push_back(b); end
    end
    for (int p = 0; p < 30; p++) begin
      int k, len;
      logic [7:0] t;
      k = $urandom_range(3);
      t = (k == 0) ? 8'hA1 : (k == 1) ? 8'hA2 : (k == 2) ? 8'hB1 : 8'h55;
      len = (k == 3) ? 3 : 1;
      if (k == 3) ndrop++;
      for (int i = 0; i < len; i++) begin
        b_t b; b.d = rnd(t, 0); b.l = (i == len - 1); qrx.push_back(b);
        if (k <= 1) ereg.push_back(b); else if (k == 2) ereq.push_back(b);
      end
    end
    repeat (800) @(posedge clk);
    check(n_tx0 == 10 && n_tx1 == 10 && e0.size() == 0 && e1.size() == 0,
          $sformatf("all transmit packets (%0d, %0d)", n_tx0, n_tx1));
    check(tx_packets == 20, "transmit packet counter");
    check(ereg.size() == 0 && ereq.size() == 0, "all received packets routed");
    check(rx_dropped == ndrop && ndrop > 0, $sformatf("discarded %0d of %0d", rx_dropped, ndrop));
    finish();
  end
endmodule
