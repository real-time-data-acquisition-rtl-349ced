// tb_axi_mm_to_stream: register packets arrive on the stream; the bridge must
// perform them on an AXI4-Lite memory model and answer each with one response
// packet carrying the tag, address, response and (for reads) the data. Writes
// of random values to random addresses are read back through the bridge, a
// packet of another type must be discarded without a response, and the
// response stream is back-pressured at random.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 50000
module tb_axi_mm_to_stream;
  import hold_pkg::*;
  `include "tb_util.svh"
  logic in_valid = 0, in_last = 1, in_ready, out_valid, out_last, out_ready = 0;
  beat_t in_data = '0, out_data;
  axil_req_t m_req; axil_rsp_t m_rsp;

  axi_mm_to_stream dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .in_ready, .out_valid,
    .out_data, .out_last, .out_ready, .m_req, .m_rsp);
  axil_mem_model u_mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));

  reg_pkt_t rsp_q[$];
  int n_rsp = 0;
  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom_range(2) != 0);
    if (out_valid && out_ready) begin
      rsp_q.push_back(reg_pkt_t'(out_data));
      if (!out_last) check(0, "response is one beat");
      n_rsp++;
    end
  end

  task automatic send(input reg_pkt_t p);
    @(negedge clk);
    in_valid = 1; in_data = beat_t'(p); in_last = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic wait_rsp(output reg_pkt_t p);
    while (rsp_q.size() == 0) @(negedge clk);
    p = rsp_q.pop_front();
  endtask

  initial begin
    logic [31:0] vals [16];
    reg_pkt_t p, r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      vals[i] = $urandom;
      p = '0; p.ptype = PKT_REG_WR; p.tag = 8'(i); p.addr = 32'(4 * (i * 7 % 64));
      p.data = vals[i]; p.strb = 4'hF;
      send(p); wait_rsp(r);
      check(r.ptype == PKT_REG_RSP && r.tag == 8'(i) && r.addr == p.addr && r.resp == RESP_OKAY,
            $sformatf("write response %0d", i));
    end
    p = '0; p.ptype = PKT_DATA; send(p);        // not a register packet: discarded
    for (int i = 15; i >= 0; i--) begin
      p = '0; p.ptype = PKT_REG_RD; p.tag = 8'(100 + i); p.addr = 32'(4 * (i * 7 % 64));
      send(p); wait_rsp(r);
      check(r.ptype == PKT_REG_RSP && r.tag == 8'(100 + i) && r.data == vals[i],
            $sformatf("read response %0d", i));
    end
    repeat (20) @(posedge clk);
    check(n_rsp == 32, $sformatf("32 responses, none for the discarded packet (%0d)", n_rsp));
    check(u_mem.n_wr == 16 && u_mem.n_rd == 16, "16 AXI writes and 16 reads");
    finish();
  end
endmodule
