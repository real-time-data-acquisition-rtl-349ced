// ddr3_axi_model: behavioural model of the DDR3 memory behind its controller's
// AXI4 slave port, for simulation only (not synthesizable).
//
// Stores 256-bit beats in a sparse associative array indexed by beat address.
// AW and AR requests are queued; W data is written to the oldest queued write
// burst (W may arrive before its AW), a B response follows each burst's last
// beat, and reads are answered in order, one beat per clock, after LATENCY
// clocks. With STALL set, aw/w/ar ready and r_valid drop at random (about one
// clock in four) to exercise back-pressure. Unwritten beats read as zero.
module ddr3_axi_model
  import hold_pkg::*;
#(
  parameter int LATENCY = 8,
  parameter bit STALL   = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req,
  output axi_rsp_t rsp
);
  beat_t mem [longint unsigned];
  typedef struct { logic [AXI_IDW-1:0] id; longint unsigned addr; int len; } burst_t;
  burst_t awq[$], arq[$];
  logic [AXI_IDW-1:0] bq[$];
  int  wbeat, rbeat, rdelay;
  longint unsigned writes, reads;

  // Handshakes are evaluated against the response presented before the edge;
  // the next response is then computed from the updated queues and registered.
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awq.delete(); arq.delete(); bq.delete(); wbeat = 0; rbeat = 0; rdelay = 0;
      writes = 0; reads = 0; rsp <= '0;
    end else begin
      axi_rsp_t n;
      if (req.w_valid && rsp.w_ready) begin
        mem[awq[0].addr + longint'(wbeat)] = req.w_data;
        writes++;
        if (req.w_last != (wbeat == awq[0].len - 1))
          $display("DDR3 MODEL: w_last mismatch at beat %0d of %0d", wbeat, awq[0].len);
        if (wbeat == awq[0].len - 1) begin
          bq.push_back(awq[0].id); void'(awq.pop_front()); wbeat = 0;
        end else wbeat++;
      end
      if (rsp.b_valid && req.b_ready) void'(bq.pop_front());
      if (req.aw_valid && rsp.aw_ready)
        awq.push_back('{req.aw_id, longint'(req.aw_addr) >> 5, int'(req.aw_len) + 1});
      if (rsp.r_valid && req.r_ready) begin
        reads++;
        if (rbeat == arq[0].len - 1) begin
          void'(arq.pop_front()); rbeat = 0; rdelay = 0;
        end else rbeat++;
      end
      if (req.ar_valid && rsp.ar_ready)
        arq.push_back('{req.ar_id, longint'(req.ar_addr) >> 5, int'(req.ar_len) + 1});
      if (arq.size() > 0 && rdelay < LATENCY) rdelay++;
      // next response
      n = '0;
      n.aw_ready = STALL ? ($urandom_range(3) != 0) : 1'b1;
      n.w_ready  = (STALL ? ($urandom_range(3) != 0) : 1'b1) && (awq.size() > 0);
      n.b_valid  = bq.size() > 0;
      n.b_id     = (bq.size() > 0) ? bq[0] : '0;
      n.b_resp   = RESP_OKAY;
      n.ar_ready = STALL ? ($urandom_range(3) != 0) : 1'b1;
      n.r_valid  = (STALL ? ($urandom_range(3) != 0) : 1'b1) && arq.size() > 0 && rdelay >= LATENCY;
      if (arq.size() > 0) begin
        n.r_id   = arq[0].id;
        n.r_data = mem.exists(arq[0].addr + longint'(rbeat)) ? mem[arq[0].addr + longint'(rbeat)] : '0;
        n.r_last = (rbeat == arq[0].len - 1);
      end
      rsp <= n;
    end
  end
endmodule
