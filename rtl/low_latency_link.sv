// low_latency_link: sends each line's beam parameters to the LLRF system.
//
// The results of the statistical module leave on a dedicated optical fibre
// towards the low-level RF (LLRF) controller. This block forms the link
// layer's transmit side: every stats_t record becomes a five-word packet of
// 32-bit words handed to the transceiver interface (tx_valid/tx_ready):
//   word 0  {16'hBBF0, seq[15:0]}   (tx_sof high)
//   word 1  centre of mass (Q8)
//   word 2  lateral spread (Q8)
//   word 3  mean readout   (Q8)
//   word 4  CRC-32 of words 0..3    (tx_eof high)
// The CRC uses polynomial 0x04C11DB7, initial value all ones, MSB first, and
// the result is inverted. A record that arrives while a packet is being sent
// waits in a one-entry buffer; if that buffer is full too, the record is
// dropped and counted in dropped. The first word is presented two clocks after
// a record arrives at an idle link. The paper only says that the values reach the LLRF over a
// fibre; the packet format and CRC are this design's choice, and the
// transceiver itself is outside this block.
module low_latency_link
  import hold_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  stats_t      in_stats,
  output logic        tx_valid,
  output logic [31:0] tx_data,
  output logic        tx_sof,
  output logic        tx_eof,
  input  logic        tx_ready,
  output logic [15:0] dropped,
  output logic [31:0] packets
);
  function automatic logic [31:0] crc32_word(input logic [31:0] crc, input logic [31:0] w);
    logic [31:0] c;
    c = crc;
    for (int b = 31; b >= 0; b--) begin
      logic fb;
      fb = c[31] ^ w[b];
      c  = {c[30:0], 1'b0} ^ (fb ? 32'h04C1_1DB7 : 32'h0);
    end
    return c;
  endfunction

  stats_t      cur, pend;
  logic        busy, pend_v;
  logic [2:0]  widx;
  logic [31:0] crc, w [4];

  assign w[0] = {16'hBBF0, cur.seq[15:0]};
  assign w[1] = cur.com;
  assign w[2] = cur.spread;
  assign w[3] = cur.mean;

  assign tx_valid = busy;
  assign tx_data  = (widx == 3'd4) ? ~crc : w[widx[1:0]];
  assign tx_sof   = busy && widx == 3'd0;
  assign tx_eof   = busy && widx == 3'd4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; pend <= '0; busy <= 1'b0; pend_v <= 1'b0; widx <= '0; crc <= '1;
      dropped <= '0; packets <= '0;
    end else begin
      // accept a new record into the pending buffer
      if (in_valid) begin
        if (!pend_v || (!busy)) begin pend <= in_stats; pend_v <= 1'b1; end
        else dropped <= dropped + 1'b1;
      end
      if (busy && tx_ready) begin
        if (widx == 3'd4) begin
          busy <= 1'b0; packets <= packets + 1'b1;
        end else begin
          crc  <= crc32_word(crc, w[widx[1:0]]);
          widx <= widx + 3'd1;
        end
      end
      // start a packet from the pending buffer
      if (pend_v && (!busy || (tx_ready && widx == 3'd4))) begin
        cur <= pend; busy <= 1'b1; widx <= '0; crc <= '1;
        if (!in_valid) pend_v <= 1'b0;
      end
    end
  end
endmodule
