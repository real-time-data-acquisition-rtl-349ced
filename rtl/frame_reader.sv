// frame_reader: hands stored bunches to a client on request.
//
// Stored packets wait in the DDR3 ring until a client asks for them. A client
// sends a read-request packet (rd_req_t, type PKT_RD_REQ) naming how many
// packets it wants; the request is added to a pending count. While the count is
// non-zero, whole packets are copied from the FIFO sub-system to the link
// multiplexer, and each packet's last beat decrements it. A packet, once
// begun, is always finished. Beats of other types on the request input are
// dropped and counted in bad_requests. Request input is always ready; the data
// path is combinational (valid/ready pass straight through while enabled).
// That stored data waits for clients follows the paper; the request packet is
// this design's choice.
module frame_reader
  import hold_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // requests from the link demultiplexer
  input  logic        req_valid,
  input  beat_t       req_data,
  input  logic        req_last,
  output logic        req_ready,
  // stored packets from the FIFO sub-system
  input  logic        in_valid,
  input  beat_t       in_data,
  input  logic        in_last,
  output logic        in_ready,
  // packets to the link multiplexer
  output logic        out_valid,
  output beat_t       out_data,
  output logic        out_last,
  input  logic        out_ready,
  // status
  output logic [31:0] pending,
  output logic [31:0] packets_sent,
  output logic [15:0] bad_requests
);
  rd_req_t rq;
  logic    in_pkt, pass, req_hs, done_pkt, req_first;

  assign rq        = rd_req_t'(req_data);
  assign req_ready = 1'b1;
  assign req_hs    = req_valid && req_ready;
  assign pass      = in_pkt || (pending != 32'd0);
  assign out_valid = pass && in_valid;
  assign out_data  = in_data;
  assign out_last  = in_last;
  assign in_ready  = pass && out_ready;
  assign done_pkt  = out_valid && out_ready && out_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0; packets_sent <= '0; bad_requests <= '0; in_pkt <= 1'b0;
      req_first <= 1'b1;
    end else begin
      if (req_hs) req_first <= req_last;
      pending <= pending
               + ((req_hs && req_first && rq.ptype == PKT_RD_REQ) ? rq.npackets : 32'd0)
               - 32'(done_pkt);
      if (req_hs && req_first && rq.ptype != PKT_RD_REQ) bad_requests <= bad_requests + 1'b1;
      if (out_valid && out_ready) in_pkt <= !out_last;
      if (done_pkt) packets_sent <= packets_sent + 1'b1;
    end
  end
endmodule
