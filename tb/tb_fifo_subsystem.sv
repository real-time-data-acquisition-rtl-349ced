// tb_fifo_subsystem: random packets (1..120 beats of random data) go through
// the DDR3-backed FIFO, with the ring shrunk to 512 beats so that it wraps many
// times. The memory model stalls its ready/valid signals at random and the
// output is back-pressured at random. Packets are offered only when
// space_beats says they fit (as the framer does). Every output beat and its
// last flag are compared with the input, and at the end the buffer must be
// empty again. The two masters reach the memory model through axi_switch.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 200000
module tb_fifo_subsystem;
  import hold_pkg::*;
  `include "tb_util.svh"
  localparam int RING = 512;
  logic in_valid = 0, in_last = 0, in_ready, out_valid, out_last, out_ready = 0;
  beat_t in_data = '0, out_data;
  logic [31:0] space_beats, used_beats;
  logic [15:0] stored_packets;
  axi_req_t m_req [2], s_req;
  axi_rsp_t m_rsp [2], s_rsp;

  fifo_subsystem #(.BUF_BEATS(RING), .BUF_BASE(32'h1000_0000)) dut (
    .clk, .rst_n, .in_valid, .in_data, .in_last, .in_ready, .out_valid, .out_data, .out_last,
    .out_ready, .space_beats, .used_beats, .stored_packets,
    .wr_req(m_req[0]), .wr_rsp(m_rsp[0]), .rd_req(m_req[1]), .rd_rsp(m_rsp[1]));
  axi_switch #(.N(2)) u_sw (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  ddr3_axi_model #(.LATENCY(6), .STALL(1)) u_mem (.clk, .rst_n, .req(s_req), .rsp(s_rsp));

  beat_t exp_d[$];
  bit    exp_l[$];
  int    nout = 0, bad = 0, npk_out = 0;
  longint unsigned max_addr = 0, min_addr = '1;
  // Inputs are driven and handshakes sampled at the falling edge, where all
  // signals are stable; a handshake seen there completes at the next rising edge.
  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom_range(3) != 0);
    if (out_valid && out_ready) begin
      nout++;
      if (exp_d.size() == 0) bad++;
      else begin
        if (out_data != exp_d[0] || out_last != exp_l[0]) begin
          bad++; if (bad < 5) begin
            int f; f = -1;
            foreach (exp_d[i]) if (f < 0 && exp_d[i] == out_data) f = i;
            foreach (u_mem.mem[a]) begin
              if (u_mem.mem[a] == exp_d[0]) $display("  expected beat stored at %0h", a);
              if (u_mem.mem[a] == out_data) $display("  output beat stored at %0h", a);
            end
            $display("mismatch at output beat %0d: data found at offset %0d, last %0d/%0d t=%0t", nout, f, out_last, exp_l[0], $time);
          end
        end
        void'(exp_d.pop_front()); void'(exp_l.pop_front());
      end
      if (out_last) npk_out++;
    end
    if (s_req.aw_valid && s_rsp.aw_ready) begin
      if (s_req.aw_addr > max_addr) max_addr = s_req.aw_addr;
      if (s_req.aw_addr < min_addr) min_addr = s_req.aw_addr;
      // a burst never crosses a 16-beat boundary
      if ((s_req.aw_addr[8:5] + s_req.aw_len) > 15) bad++;
    end
  end

  initial begin
    int total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 150; p++) begin
      int len;
      len = $urandom_range(1, 120);
      while (space_beats < 32'(len)) @(posedge clk);
      for (int b = 0; b < len; b++) begin
        beat_t d;
        for (int w = 0; w < 8; w++) d[w*32 +: 32] = $urandom;
        @(negedge clk);
        in_valid = 1; in_data = d; in_last = (b == len - 1);
        exp_d.push_back(d); exp_l.push_back(b == len - 1);
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      total += len;
      repeat ($urandom_range(0, 10)) @(posedge clk);
    end
    while (exp_d.size() != 0) @(posedge clk);
    repeat (20) @(posedge clk);
    check(bad == 0, $sformatf("output matches input (%0d errors)", bad));
    check(npk_out == 150, $sformatf("150 packets out (%0d)", npk_out));
    check(nout == total, "beat count");
    check(used_beats == 0 && space_beats == RING, "buffer empty at the end");
    check(stored_packets == 0, "no packet left");
    check(min_addr == 64'h1000_0000, "ring starts at BUF_BASE");
    check(max_addr < 64'h1000_0000 + RING * 32, "ring stays inside its region");
    check(max_addr >= 64'h1000_0000 + (RING - 16) * 32, "ring wrapped through the whole region");
    finish();
  end
endmodule
