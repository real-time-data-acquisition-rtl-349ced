// tb_axil_i2c: an I2C slave model on the open-drain lines decodes START, the
// address byte, the data bytes and STOP, sampling SDA on rising SCL, and
// acknowledges only its own address (0x4C). One- and two-byte writes to it
// must arrive intact with NACK clear; a write to another address must end
// with NACK set after the address byte; busy must be high during a transfer.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 40000
module tb_axil_i2c;
  import hold_pkg::*;
  `include "tb_util.svh"
  axil_req_t mreq = '0; axil_rsp_t mrsp;
  logic scl_oe, sda_oe, ack = 0;
  `include "axil_tasks.svh"
  wire scl = !scl_oe;
  wire sda = !(sda_oe || ack);

  axil_i2c dut (.clk, .rst_n, .req(mreq), .rsp(mrsp), .scl_oe, .sda_oe, .sda_i(sda));

  logic [7:0] bytes_q[$];
  logic [8:0] sh;
  int bits = 0, starts = 0, stops = 0;
  bit addressed = 0;
  logic scl_q = 1, sda_q = 1;
  always @(posedge clk) if (rst_n) begin
    if (scl && scl_q && sda_q && !sda) begin starts++; bits = 0; addressed = 0; end
    else if (scl && scl_q && !sda_q && sda) stops++;
    else if (scl && !scl_q) begin                     // rising SCL: sample
      if (bits % 9 != 8) sh = {sh[7:0], sda};
      bits++;
      if (bits % 9 == 8) begin
        bytes_q.push_back(sh[7:0]);
        if (bits == 8) addressed = (sh[7:0] == {7'h4C, 1'b0});
      end
    end else if (!scl && scl_q)                       // falling SCL: drive ACK
      ack = addressed && (bits % 9 == 8);
    scl_q = scl; sda_q = sda;
  end

  initial begin
    logic [31:0] d;
    logic [1:0] r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axil_write(32'h8, 32'd5, r);
    axil_write(32'h0, {7'd0, 1'b1, 8'hB7, 8'h3C, 1'b0, 7'h4C}, r);
    axil_read(32'h4, d, r);
    check(d[0] == 1, "busy during transfer");
    do axil_read(32'h4, d, r); while (d[0]);
    check(d[1] == 0, "two-byte write acknowledged");
    check(bytes_q.size() == 3 && bytes_q[0] == 8'h98 && bytes_q[1] == 8'h3C && bytes_q[2] == 8'hB7,
          "address and two bytes on the bus");
    bytes_q.delete();
    axil_write(32'h0, {7'd0, 1'b0, 8'h00, 8'h5A, 1'b0, 7'h4C}, r);
    do axil_read(32'h4, d, r); while (d[0]);
    check(d[1] == 0 && bytes_q.size() == 2 && bytes_q[1] == 8'h5A, "one-byte write");
    bytes_q.delete();
    axil_write(32'h0, {7'd0, 1'b1, 8'h11, 8'h22, 1'b0, 7'h33}, r);
    do axil_read(32'h4, d, r); while (d[0]);
    check(d[1] == 1, "NACK from an absent device");
    check(bytes_q.size() == 1, "transfer stops after the address");
    check(starts == 3 && stops == 3, $sformatf("START/STOP count %0d/%0d", starts, stops));
    finish();
  end
endmodule
