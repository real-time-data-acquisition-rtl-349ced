// tb_axil_uart: the UART's transmit line is looped back to its receive line
// and also decoded here by an independent 8N1 receiver that samples mid-bit
// at the programmed divider. Bytes written to TX must appear on the line and
// in the RX register in order; overrunning the 16-entry RX FIFO must set the
// sticky overrun flag, which a write of one clears; a break on the line
// (stop bit low) must set the framing-error flag.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 40000
module tb_axil_uart;
  import hold_pkg::*;
  `include "tb_util.svh"
  axil_req_t mreq = '0; axil_rsp_t mrsp;
  logic txd, brk = 0;
  `include "axil_tasks.svh"
  localparam int DIV = 16;

  axil_uart dut (.clk, .rst_n, .req(mreq), .rsp(mrsp), .txd, .rxd(txd & !brk));

  logic [7:0] line_q[$];
  initial begin : line_rx
    logic [7:0] b;
    wait (rst_n);
    forever begin
      @(negedge txd);
      repeat (DIV / 2) @(posedge clk);
      check(txd == 0, "start bit");
      for (int i = 0; i < 8; i++) begin repeat (DIV) @(posedge clk); b[i] = txd; end
      repeat (DIV) @(posedge clk);
      check(txd == 1, "stop bit");
      line_q.push_back(b);
    end
  end

  initial begin
    logic [31:0] d;
    logic [1:0] r;
    logic [7:0] sent [20];
    repeat (3) @(posedge clk);
    rst_n = 1;
    axil_write(32'hC, DIV, r);
    for (int i = 0; i < 4; i++) begin sent[i] = $urandom; axil_write(32'h0, sent[i], r); end
    repeat (4 * 10 * DIV + 50) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      axil_read(32'h4, d, r);
      check(d[8] && d[7:0] == sent[i], $sformatf("RX byte %0d: %0h", i, d));
      check(line_q.size() > 0 && line_q.pop_front() == sent[i], "byte on the line");
    end
    axil_read(32'h4, d, r);
    check(d[8] == 0, "RX empty");
    // 18 bytes without reading: overrun
    for (int i = 0; i < 18; i++) begin
      axil_write(32'h0, 8'(i), r);
      if (i >= 14) repeat (10 * DIV) @(posedge clk);
    end
    repeat (20 * 10 * DIV) @(posedge clk);
    axil_read(32'h8, d, r);
    check(d[3] == 1, $sformatf("overrun flag (status %0h)", d));
    axil_write(32'h8, 32'h18, r);
    axil_read(32'h8, d, r);
    check(d[3] == 0, "overrun cleared");
    for (int i = 0; i < 16; i++) begin
      axil_read(32'h4, d, r);
      check(d[8] && d[7:0] == 8'(i), $sformatf("kept byte %0d", i));
    end
    // break: line held low for two characters
    brk = 1; repeat (25 * DIV) @(posedge clk); brk = 0;
    repeat (12 * DIV) @(posedge clk);
    axil_read(32'h8, d, r);
    check(d[4] == 1, $sformatf("framing error flag (status %0h)", d));
    finish();
  end
endmodule
