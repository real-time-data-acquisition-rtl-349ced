// tb_frame_reader: stored packets of random length wait at the reader's input.
// Nothing may pass before a request; each read request lets exactly its number
// of whole packets through, unchanged and in order, under random output
// back-pressure; pending counts down to zero; a request packet of the wrong
// type is counted in bad_requests and lets nothing through.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 40000
module tb_frame_reader;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic req_valid = 0, req_last = 1, req_ready, in_valid = 0, in_last = 0, in_ready;
  logic out_valid, out_last, out_ready = 0;
  beat_t req_data = '0, in_data = '0, out_data;
  logic [31:0] pending, packets_sent;
  logic [15:0] bad_requests;

  frame_reader dut (.clk, .rst_n, .req_valid, .req_data, .req_last, .req_ready, .in_valid,
    .in_data, .in_last, .in_ready, .out_valid, .out_data, .out_last, .out_ready, .pending,
    .packets_sent, .bad_requests);

  typedef struct { beat_t d; logic l; } b_t;
  b_t src_q[$], exp_q[$], all_q[$];
  int n_exp = 0;
  int n_out = 0, n_pkts = 0;

  // handshakes are taken at the rising edge, inputs change at the falling edge
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) void'(src_q.pop_front());
    if (out_valid && out_ready) begin
      b_t e;
      e = exp_q.pop_front();
      check(out_data == e.d && out_last == e.l, $sformatf("output beat %0d", n_out));
      n_out++;
      if (out_last) n_pkts++;
    end
  end
  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom_range(3) != 0);
    in_valid = src_q.size() > 0;
    if (in_valid) begin in_data = src_q[0].d; in_last = src_q[0].l; end
  end

  task automatic req(input pkt_type_e t, input int n);
    rd_req_t q;
    q = '0; q.ptype = t; q.npackets = n;
    @(negedge clk); #1;
    req_valid = 1; req_data = beat_t'(q);
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); #1; req_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 8; p++) begin
      int len;
      len = (p == 3) ? 1 : $urandom_range(2, 40);
      for (int i = 0; i < len; i++) begin
        b_t b;
        b.d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, 32'(p)};
        b.l = (i == len - 1);
        src_q.push_back(b); all_q.push_back(b);
      end
    end
    repeat (100) @(negedge clk);
    check(n_out == 0, "nothing before a request");
    req(PKT_RD_REQ, 3);
    for (int i = 0; i < 3; i++) do exp_q.push_back(all_q[n_exp++]); while (!exp_q[$].l);
    repeat (300) @(negedge clk);
    check(n_pkts == 3 && exp_q.size() == 0 && pending == 0, $sformatf("3 packets (%0d)", n_pkts));
    req(PKT_REG_RD, 2);
    repeat (100) @(negedge clk);
    check(n_pkts == 3 && bad_requests == 1, "bad request counted, nothing sent");
    for (int i = 0; i < 5; i++) do exp_q.push_back(all_q[n_exp++]); while (!exp_q[$].l);
    req(PKT_RD_REQ, 2);
    req(PKT_RD_REQ, 3);
    repeat (600) @(negedge clk);
    check(n_pkts == 8 && exp_q.size() == 0 && pending == 0 && packets_sent == 8,
          $sformatf("8 packets in all (%0d)", n_pkts));
    finish();
  end
endmodule
