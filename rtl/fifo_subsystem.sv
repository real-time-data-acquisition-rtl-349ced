// fifo_subsystem: packet FIFO whose storage is a ring buffer in DDR3 memory.
//
// Stored bunches can be far larger than on-chip memory (2700 lines are about
// 1.4 MB), so they wait in external DDR3 until a client reads them; a region of
// BUF_BEATS 32-byte beats (about 30 MB) at BUF_BASE is used as a ring.
//   Write side: accepted beats enter an on-chip staging FIFO. An address issuer
//   reserves bursts of up to BURST beats that never cross a BURST-aligned
//   boundary (so never a 4 KB page) and sends their AW requests; a W streamer
//   follows with the data, one burst after another, so address and data phases
//   overlap. A burst is issued once enough beats to reach the next boundary are
//   staged, or, when the input has been idle for FLUSH_IDLE clocks, with what
//   is there. Write responses (B) mark the burst's beats as committed.
//   Read side: committed beats are read back with AR bursts obeying the same
//   boundaries; a burst is issued only if the output FIFO has room for all
//   beats in flight, so R is always accepted.
//   Packet boundaries: the length of every input packet is kept in an on-chip
//   FIFO of PKT_DEPTH entries; read-back beats get last from it.
// space_beats (ring capacity minus beats held anywhere in the sub-system)
// lets the framer admit only packets that fit. in_ready falls only when the
// staging FIFO or the length FIFO is full.
// Single clock. The DDR3 buffer and its size follow the paper; everything
// about how the ring is managed is this design's choice.
module fifo_subsystem
  import hold_pkg::*;
#(
  parameter logic [AXI_AW-1:0] BUF_BASE  = 32'h0000_0000,
  parameter int unsigned BUF_BEATS  = 983040,  // 30 MiB / 32 B
  parameter int unsigned BURST      = 16,
  parameter int unsigned IN_DEPTH   = 64,
  parameter int unsigned OUT_DEPTH  = 64,
  parameter int unsigned PKT_DEPTH  = 32,
  parameter int unsigned FLUSH_IDLE = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  beat_t       in_data,
  input  logic        in_last,
  output logic        in_ready,
  output logic        out_valid,
  output beat_t       out_data,
  output logic        out_last,
  input  logic        out_ready,
  output logic [31:0] space_beats,
  output logic [31:0] used_beats,
  output logic [15:0] stored_packets,
  // write master
  output axi_req_t    wr_req,
  input  axi_rsp_t    wr_rsp,
  // read master
  output axi_req_t    rd_req,
  input  axi_rsp_t    rd_rsp
);
  localparam int unsigned BLW  = $clog2(BURST + 1);
  localparam int unsigned ICW  = $clog2(IN_DEPTH + 1);
  localparam int unsigned OCW  = $clog2(OUT_DEPTH + 1);
  localparam int unsigned PCW  = $clog2(PKT_DEPTH + 1);
  localparam int unsigned QD   = 8;    // write bursts in flight

  // ---------------- staging and packet lengths ----------------
  logic           st_in_ready, st_out_valid, st_out_ready, st_last;
  beat_t          st_data;
  logic [ICW-1:0] st_count;
  logic           len_in_ready, len_out_valid, len_pop;
  logic [31:0]    len_out, pkt_cnt;
  logic           in_hs, out_hs;

  assign in_ready = st_in_ready && len_in_ready;
  assign in_hs    = in_valid && in_ready;
  assign out_hs   = out_valid && out_ready;

  sync_fifo #(.WIDTH($bits(axis_t)), .DEPTH(IN_DEPTH)) u_stage (
    .clk, .rst_n, .in_data({in_data, in_last}), .in_valid(in_valid && len_in_ready),
    .in_ready(st_in_ready), .out_data({st_data, st_last}), .out_valid(st_out_valid),
    .out_ready(st_out_ready), .count(st_count)
  );

  sync_fifo #(.WIDTH(32), .DEPTH(PKT_DEPTH)) u_len (
    .clk, .rst_n, .in_data(pkt_cnt + 32'd1), .in_valid(in_hs && in_last),
    .in_ready(len_in_ready), .out_data(len_out), .out_valid(len_out_valid),
    .out_ready(len_pop), .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_cnt <= '0; used_beats <= '0; stored_packets <= '0;
    end else begin
      if (in_hs) pkt_cnt <= in_last ? 32'd0 : pkt_cnt + 32'd1;
      used_beats <= used_beats + 32'(in_hs) - 32'(out_hs);
      stored_packets <= stored_packets + 16'(in_hs && in_last) - 16'(out_hs && out_last);
    end
  end
  assign space_beats = 32'(BUF_BEATS) - used_beats;

  function automatic logic [BLW-1:0] to_boundary(input logic [31:0] ptr);
    return BLW'(BURST) - BLW'(ptr % BURST);
  endfunction

  // ---------------- write address issuer ----------------
  logic [31:0]    wr_ptr;            // next ring beat to be written
  logic [ICW-1:0] reserved;          // staged beats already given to a burst
  logic [ICW-1:0] avail;
  logic [BLW-1:0] wtb, wlen;
  logic [7:0]     idle_cnt;
  logic           aw_issue, aw_hs, w_hs;
  logic           wq_in_ready, wq_valid, bq_in_ready, bq_valid;
  logic [BLW-1:0] wq_len, bq_len;
  logic [BLW-1:0] w_beat;

  assign avail = st_count - reserved;
  assign wtb   = to_boundary(wr_ptr);
  assign wlen  = (ICW'(wtb) <= avail) ? wtb : BLW'(avail);
  assign aw_issue = (avail != '0) && ((ICW'(wtb) <= avail) || idle_cnt >= 8'(FLUSH_IDLE))
                    && wq_in_ready && bq_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) idle_cnt <= '0;
    else if (in_valid) idle_cnt <= '0;
    else if (idle_cnt != 8'hFF) idle_cnt <= idle_cnt + 8'd1;
  end

  logic           aw_pend;
  logic [31:0]    aw_addr_q;
  logic [BLW-1:0] aw_len_q;
  assign aw_hs = aw_pend && wr_rsp.aw_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_pend <= 1'b0; aw_addr_q <= '0; aw_len_q <= '0; wr_ptr <= '0; reserved <= '0;
    end else begin
      if (aw_hs) aw_pend <= 1'b0;
      if (!aw_pend && aw_issue) begin
        aw_pend   <= 1'b1;
        aw_addr_q <= BUF_BASE + (wr_ptr << 5);
        aw_len_q  <= wlen;
        wr_ptr    <= (wr_ptr + 32'(wlen) >= 32'(BUF_BEATS)) ? 32'd0 : wr_ptr + 32'(wlen);
      end
      reserved <= reserved + ((!aw_pend && aw_issue) ? ICW'(wlen) : '0) - ICW'(w_hs);
    end
  end

  // bursts whose data is still to be sent, and bursts awaiting B
  sync_fifo #(.WIDTH(BLW), .DEPTH(QD)) u_wq (
    .clk, .rst_n, .in_data(wlen), .in_valid(!aw_pend && aw_issue), .in_ready(wq_in_ready),
    .out_data(wq_len), .out_valid(wq_valid), .out_ready(w_hs && wr_req.w_last), .count()
  );
  sync_fifo #(.WIDTH(BLW), .DEPTH(QD)) u_bq (
    .clk, .rst_n, .in_data(wlen), .in_valid(!aw_pend && aw_issue), .in_ready(bq_in_ready),
    .out_data(bq_len), .out_valid(bq_valid), .out_ready(wr_rsp.b_valid), .count()
  );

  // ---------------- W streamer ----------------
  assign st_out_ready = wq_valid && wr_rsp.w_ready;
  assign w_hs         = wq_valid && st_out_valid && wr_rsp.w_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w_beat <= '0;
    else if (w_hs) w_beat <= wr_req.w_last ? '0 : w_beat + 1'b1;
  end

  always_comb begin
    wr_req          = '0;
    wr_req.aw_id    = '0;
    wr_req.aw_addr  = aw_addr_q;
    wr_req.aw_len   = 8'(aw_len_q - 1'b1);
    wr_req.aw_size  = AXI_SIZE_32B;
    wr_req.aw_burst = AXI_BURST_INCR;
    wr_req.aw_valid = aw_pend;
    wr_req.w_data   = st_data;
    wr_req.w_strb   = '1;
    wr_req.w_last   = (w_beat == wq_len - 1'b1);
    wr_req.w_valid  = wq_valid && st_out_valid;
    wr_req.b_ready  = 1'b1;
  end

  // ---------------- commit ----------------
  logic [31:0] committed, rd_issued;   // running beat totals
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) committed <= '0;
    else if (wr_rsp.b_valid && bq_valid) committed <= committed + 32'(bq_len);
  end

  // ---------------- read side ----------------
  logic [31:0]    rd_ptr, unread;
  logic [BLW-1:0] rtb, rlen;
  logic [OCW:0]   in_flight;           // beats requested and not yet returned
  logic [OCW-1:0] o_count;
  logic           ar_pend, ar_hs, r_hs, ar_issue;
  logic [31:0]    ar_addr_q;
  logic [BLW-1:0] ar_len_q;
  logic [31:0]    r_beat;
  logic           r_last_tag;

  assign unread  = committed - rd_issued;
  assign rtb     = to_boundary(rd_ptr);
  assign rlen    = (32'(rtb) <= unread) ? rtb : BLW'(unread);
  assign ar_issue = !ar_pend && (unread != 0) &&
                    (32'(o_count) + 32'(in_flight) + 32'(rlen) <= 32'(OUT_DEPTH));
  assign ar_hs   = ar_pend && rd_rsp.ar_ready;
  assign r_hs    = rd_rsp.r_valid;          // r_ready is always high

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_pend <= 1'b0; ar_addr_q <= '0; ar_len_q <= '0; rd_ptr <= '0; rd_issued <= '0;
      in_flight <= '0;
    end else begin
      if (ar_hs) ar_pend <= 1'b0;
      if (ar_issue) begin
        ar_pend   <= 1'b1;
        ar_addr_q <= BUF_BASE + (rd_ptr << 5);
        ar_len_q  <= rlen;
        rd_ptr    <= (rd_ptr + 32'(rlen) >= 32'(BUF_BEATS)) ? 32'd0 : rd_ptr + 32'(rlen);
        rd_issued <= rd_issued + 32'(rlen);
      end
      in_flight <= in_flight + (ar_issue ? (OCW+1)'(rlen) : '0) - (OCW+1)'(r_hs);
    end
  end

  always_comb begin
    rd_req          = '0;
    rd_req.ar_id    = '0;
    rd_req.ar_addr  = ar_addr_q;
    rd_req.ar_len   = 8'(ar_len_q - 1'b1);
    rd_req.ar_size  = AXI_SIZE_32B;
    rd_req.ar_burst = AXI_BURST_INCR;
    rd_req.ar_valid = ar_pend;
    rd_req.r_ready  = 1'b1;
  end

  // packet boundaries restored from the length FIFO
  assign r_last_tag = len_out_valid && (r_beat == len_out - 32'd1);
  assign len_pop    = r_hs && r_last_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_beat <= '0;
    else if (r_hs) r_beat <= r_last_tag ? 32'd0 : r_beat + 32'd1;
  end

  sync_fifo #(.WIDTH($bits(axis_t)), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .in_data({rd_rsp.r_data, r_last_tag}), .in_valid(r_hs), .in_ready(),
    .out_data({out_data, out_last}), .out_valid, .out_ready, .count(o_count)
  );

  // The read credit guarantees room for every returned beat.
  a_no_out_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    r_hs |-> (o_count < OCW'(OUT_DEPTH) || out_ready));
endmodule
