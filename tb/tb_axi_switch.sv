// tb_axi_switch: four AXI4 masters (the write and read sides of two
// DDR3-backed FIFOs with separate 256-beat rings) share one memory model
// through the switch. Both FIFOs carry random packets at the same time under
// random memory stalls, so write bursts and read bursts of different masters
// compete; every beat must come out of the right FIFO unchanged, which needs
// each response to be routed back to the master that issued the request. The
// test also checks that each write burst's data follows its own address and
// that all four masters were granted.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 200000
module tb_axi_switch;
  import hold_pkg::*;
  `include "tb_util.svh"
  localparam int RING = 256;
  logic in_valid [2] = '{0, 0}, in_last [2] = '{0, 0}, in_ready [2];
  logic out_valid [2], out_last [2], out_ready [2] = '{0, 0};
  beat_t in_data [2] = '{'0, '0}, out_data [2];
  logic [31:0] space_beats [2], used_beats [2];
  logic [15:0] stored_packets [2];
  axi_req_t m_req [4], s_req;
  axi_rsp_t m_rsp [4], s_rsp;

  for (genvar g = 0; g < 2; g++) begin : g_f
    fifo_subsystem #(.BUF_BEATS(RING), .BUF_BASE(32'h1000_0000 + g * 32'h0010_0000)) u_f (
      .clk, .rst_n, .in_valid(in_valid[g]), .in_data(in_data[g]), .in_last(in_last[g]),
      .in_ready(in_ready[g]), .out_valid(out_valid[g]), .out_data(out_data[g]),
      .out_last(out_last[g]), .out_ready(out_ready[g]), .space_beats(space_beats[g]),
      .used_beats(used_beats[g]), .stored_packets(stored_packets[g]),
      .wr_req(m_req[2*g]), .wr_rsp(m_rsp[2*g]), .rd_req(m_req[2*g+1]), .rd_rsp(m_rsp[2*g+1]));
  end
  axi_switch #(.N(4)) dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  ddr3_axi_model #(.LATENCY(6), .STALL(1)) u_mem (.clk, .rst_n, .req(s_req), .rsp(s_rsp));

  typedef struct { beat_t d; logic l; } b_t;
  b_t src_q [2][$], exp_q [2][$];
  int n_out [2] = '{0, 0}, bad = 0, grants [4] = '{0, 0, 0, 0};
  longint unsigned aw_q[$];

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 2; g++) begin
      if (in_valid[g] && in_ready[g]) void'(src_q[g].pop_front());
      if (out_valid[g] && out_ready[g]) begin
        b_t e;
        e = exp_q[g].pop_front();
        if (out_data[g] != e.d || out_last[g] != e.l) bad++;
        n_out[g]++;
      end
    end
    for (int m = 0; m < 4; m++) begin
      if (m_req[m].aw_valid && m_rsp[m].aw_ready) grants[m]++;
      if (m_req[m].ar_valid && m_rsp[m].ar_ready) grants[m]++;
    end
    // the data of each write burst belongs to the region of its address
    if (s_req.aw_valid && s_rsp.aw_ready) aw_q.push_back(s_req.aw_addr);
    if (s_req.w_valid && s_rsp.w_ready) begin
      if (aw_q.size() == 0 || 64'(s_req.w_data[0]) != ((aw_q[0] >> 20) & 1)) bad++;
      if (s_req.w_last && aw_q.size() > 0) void'(aw_q.pop_front());
    end
  end
  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < 2; g++) begin
      out_ready[g] = ($urandom_range(3) != 0);
      in_valid[g] = src_q[g].size() > 0 && space_beats[g] > 64;
      if (in_valid[g]) begin in_data[g] = src_q[g][0].d; in_last[g] = src_q[g][0].l; end
    end
  end

  initial begin
    int total [2] = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 2; g++)
      for (int p = 0; p < 60; p++) begin
        int len;
        len = $urandom_range(1, 60);
        for (int b = 0; b < len; b++) begin
          b_t x;
          for (int w = 0; w < 8; w++) x.d[w*32 +: 32] = $urandom;
          x.d[0] = 1'(g);                     // bit 0 marks the FIFO
          x.l = (b == len - 1);
          src_q[g].push_back(x); exp_q[g].push_back(x);
        end
        total[g] += len;
      end
    while (exp_q[0].size() != 0 || exp_q[1].size() != 0) @(posedge clk);
    repeat (20) @(posedge clk);
    check(bad == 0, $sformatf("all beats routed and intact (%0d errors)", bad));
    check(n_out[0] == total[0] && n_out[1] == total[1], "beat counts");
    for (int m = 0; m < 4; m++) check(grants[m] > 10, $sformatf("master %0d granted %0d times", m, grants[m]));
    check(used_beats[0] == 0 && used_beats[1] == 0, "both rings empty");
    finish();
  end
endmodule
