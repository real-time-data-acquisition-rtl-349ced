// tb_low_latency_link: statistics records are offered to the link while the
// transceiver side is stalled at random. Every packet must be five words with
// sof on the first and eof on the last, carry the record's fields and a CRC-32
// computed here bit by bit. A burst of records faster than the link can send
// must fill the one-entry buffer and drop the excess, counted in dropped.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_low_latency_link;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic in_valid = 0, tx_valid, tx_sof, tx_eof, tx_ready = 0;
  stats_t in_stats = '0;
  logic [31:0] tx_data, packets;
  logic [15:0] dropped;

  low_latency_link dut (.clk, .rst_n, .in_valid, .in_stats, .tx_valid, .tx_data, .tx_sof,
    .tx_eof, .tx_ready, .dropped, .packets);

  stats_t sent_q[$];
  logic [31:0] w [5];
  int n = 0, n_pkts = 0;
  bit stall = 1;

  function automatic logic [31:0] crc32(input logic [31:0] x [5]);
    logic [31:0] c;
    c = '1;
    for (int i = 0; i < 4; i++)
      for (int b = 31; b >= 0; b--)
        c = (c[31] ^ x[i][b]) ? ((c << 1) ^ 32'h04C11DB7) : (c << 1);
    return ~c;
  endfunction

  always @(negedge clk) if (rst_n) begin
    tx_ready = stall ? ($urandom_range(2) == 0) : 1'b1;
    if (tx_valid && tx_ready) begin
      check(tx_sof == (n == 0) && tx_eof == (n == 4), $sformatf("framing word %0d", n));
      w[n] = tx_data;
      if (n == 4) begin
        stats_t e;
        e = sent_q.pop_front();
        check(w[0] == {16'hBBF0, e.seq[15:0]} && w[1] == e.com && w[2] == e.spread &&
              w[3] == e.mean, $sformatf("packet %0d fields", n_pkts));
        check(w[4] == crc32(w), $sformatf("packet %0d CRC", n_pkts));
        n = 0; n_pkts++;
      end else n++;
    end
  end

  task automatic offer(input int seq);
    @(negedge clk); #1;
    in_valid = 1;
    in_stats = '{seq: 32'(seq), com: $urandom, spread: $urandom, mean: $urandom};
    @(negedge clk); #1;
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin        // slow records: none dropped
      offer(i); sent_q.push_back(in_stats);
      repeat (25) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    check(n_pkts == 20 && dropped == 0, "20 packets, none dropped");
    stall = 0;
    // a burst of 3 records on consecutive clocks: one sending, one buffered, one dropped
    @(negedge clk); #1;
    for (int i = 0; i < 3; i++) begin
      in_valid = 1; in_stats = '{seq: 32'(100 + i), com: $urandom, spread: 1, mean: 2};
      if (i < 2) sent_q.push_back(in_stats);
      @(negedge clk); #1;
    end
    in_valid = 0;
    repeat (30) @(negedge clk);
    check(n_pkts == 22 && packets == 22, $sformatf("22 packets (%0d/%0d)", n_pkts, packets));
    check(dropped == 1, $sformatf("one record dropped (%0d)", dropped));
    finish();
  end
endmodule
