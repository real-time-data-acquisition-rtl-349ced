// tb_axil_switch: five memory-model slaves behind the switch. Each window is
// written with a value naming it and read back; every slave must have seen
// exactly its own accesses, at the window-relative address. An address outside
// every window must get DECERR on write and read.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 20000
module tb_axil_switch;
  import hold_pkg::*;
  `include "tb_util.svh"
  axil_req_t mreq = '0, s_req [5];
  axil_rsp_t mrsp, s_rsp [5];
  `include "axil_tasks.svh"

  axil_switch #(.NS(5)) dut (.clk, .rst_n, .m_req(mreq), .m_rsp(mrsp), .s_req, .s_rsp);
  for (genvar g = 0; g < 5; g++) begin : g_s
    axil_mem_model u_m (.clk, .rst_n, .req(s_req[g]), .rsp(s_rsp[g]));
  end

  initial begin
    logic [31:0] d; logic [1:0] r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 5; s++)
      for (int w = 0; w < 4; w++) begin
        axil_write(32'h1000 * s + 4 * w + 32'h40, 32'hA000 + 16 * s + w, r);
        check(r == RESP_OKAY, "write OKAY");
      end
    for (int s = 4; s >= 0; s--)
      for (int w = 0; w < 4; w++) begin
        axil_read(32'h1000 * s + 4 * w + 32'h40, d, r);
        check(r == RESP_OKAY && d == 32'hA000 + 16 * s + w, $sformatf("read back %0d.%0d", s, w));
      end
    check(g_s[0].u_m.n_wr == 4 && g_s[2].u_m.n_wr == 4 && g_s[4].u_m.n_wr == 4,
          "each slave saw its own writes");
    check(g_s[3].u_m.mem[16 + 2] == 32'hA032, "window-relative address");
    axil_write(32'h7000, 32'h1, r); check(r == RESP_DECERR, "unmapped write DECERR");
    axil_read(32'h9004, d, r);      check(r == RESP_DECERR, "unmapped read DECERR");
    axil_read(32'h1044, d, r);      check(r == RESP_OKAY && d == 32'hA011, "access after an error");
    finish();
  end
endmodule
