// axis_mux_demux: shares the bulk optical link between the firmware's streams.
//
// Transmit (mux): the frame reader's data packets (input 0) and the register
// bridge's response packets (input 1) are merged onto the link. A round-robin
// arbiter chooses between the inputs at packet boundaries and keeps its choice
// until the chosen packet's last beat has passed, so packets never interleave.
// Receive (demux): every packet from the link is routed by the type byte of its
// first beat (pkt_type_e): register writes and reads go to the register bridge,
// read requests go to the frame reader, anything else is discarded and counted
// in rx_dropped. The route is held until the packet's last beat.
// Both directions are combinational between the registered routing state.
// The paper shows a multiplexer/demultiplexer here; arbitration and routing by
// a packet type byte are this design's choice.
module axis_mux_demux
  import hold_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // tx inputs
  input  logic        s0_valid,  input beat_t s0_data, input logic s0_last, output logic s0_ready,
  input  logic        s1_valid,  input beat_t s1_data, input logic s1_last, output logic s1_ready,
  // tx to link
  output logic        tx_valid,  output beat_t tx_data, output logic tx_last, input logic tx_ready,
  // rx from link
  input  logic        rx_valid,  input beat_t rx_data, input logic rx_last, output logic rx_ready,
  // rx outputs
  output logic        reg_valid, output beat_t reg_data, output logic reg_last, input logic reg_ready,
  output logic        req_valid, output beat_t req_data, output logic req_last, input logic req_ready,
  output logic [15:0] rx_dropped,
  output logic [31:0] tx_packets
);
  // ---------------- mux ----------------
  logic tx_lock, tx_sel, tx_g, prio;
  always_comb begin
    if (tx_lock)                    tx_g = tx_sel;
    else if (s0_valid && s1_valid)  tx_g = prio;
    else                            tx_g = s1_valid;
  end
  assign tx_valid = tx_g ? s1_valid : s0_valid;
  assign tx_data  = tx_g ? s1_data  : s0_data;
  assign tx_last  = tx_g ? s1_last  : s0_last;
  assign s0_ready = !tx_g && tx_ready;
  assign s1_ready =  tx_g && tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_lock <= 1'b0; tx_sel <= 1'b0; prio <= 1'b0; tx_packets <= '0;
    end else if (tx_valid && tx_ready) begin
      tx_lock <= !tx_last; tx_sel <= tx_g;
      if (tx_last) begin prio <= !tx_g; tx_packets <= tx_packets + 1'b1; end
    end
  end

  // ---------------- demux ----------------
  typedef enum logic [1:0] {R_REG, R_REQ, R_DROP} route_e;
  route_e    route_q, route;
  logic      rx_first;
  pkt_type_e ty;
  assign ty = pkt_type_e'(rx_data[BEAT_W-1 -: 8]);

  always_comb begin
    if (!rx_first)                                   route = route_q;
    else if (ty == PKT_REG_WR || ty == PKT_REG_RD)    route = R_REG;
    else if (ty == PKT_RD_REQ)                       route = R_REQ;
    else                                             route = R_DROP;
  end

  assign reg_valid = rx_valid && route == R_REG;
  assign req_valid = rx_valid && route == R_REQ;
  assign reg_data  = rx_data;  assign reg_last = rx_last;
  assign req_data  = rx_data;  assign req_last = rx_last;
  always_comb begin
    unique case (route)
      R_REG:   rx_ready = reg_ready;
      R_REQ:   rx_ready = req_ready;
      default: rx_ready = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_first <= 1'b1; route_q <= R_DROP; rx_dropped <= '0;
    end else if (rx_valid && rx_ready) begin
      rx_first <= rx_last;
      route_q  <= route;
      if (rx_first && route == R_DROP) rx_dropped <= rx_dropped + 1'b1;
    end
  end
endmodule
