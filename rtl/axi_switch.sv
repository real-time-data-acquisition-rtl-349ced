// axi_switch: AXI4 interconnect from N masters to one slave (256-bit data).
//
// Joins the buffer's write master and read master onto the single port of the
// DDR3 memory controller. Writes: while no write is in progress, a round-robin
// arbiter picks a master with aw_valid and forwards its AW and W channels in
// the same clock; the grant is held until both the address and the W beat with
// w_last have been accepted, so back-to-back bursts lose no cycle. Reads: AR is
// arbitrated round-robin every clock. The slave-side ID carries the master
// number in its top IXW bits; B and R are routed back by it and the master sees
// its own ID with those bits cleared (masters must use IDs below
// 2**(AXI_IDW-IXW)). The paper names a 256-bit AXI switch in this place; its
// masters, arbitration and ID scheme are this design's choice.
module axi_switch
  import hold_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t m_req [N],
  output axi_rsp_t m_rsp [N],
  output axi_req_t s_req,
  input  axi_rsp_t s_rsp
);
  localparam int unsigned IXW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned LOW = AXI_IDW - IXW;

  function automatic logic [IXW-1:0] rr_pick(input logic [N-1:0] req, input logic [IXW-1:0] last);
    logic [IXW-1:0] g;
    g = last;
    for (int k = N; k >= 1; k--) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (req[c]) g = IXW'(c);
    end
    return g;
  endfunction

  // ---------------- write path ----------------
  logic [N-1:0]   aw_req_v, ar_req_v;
  logic           w_locked, aw_done, w_done;
  logic [IXW-1:0] w_sel, w_last_g, wg, ar_last_g, ag;
  logic           w_active, aw_hs, w_end;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      aw_req_v[i] = m_req[i].aw_valid;
      ar_req_v[i] = m_req[i].ar_valid;
    end
  end

  assign wg       = w_locked ? w_sel : rr_pick(aw_req_v, w_last_g);
  assign w_active = w_locked || (aw_req_v != '0);
  assign ag       = rr_pick(ar_req_v, ar_last_g);

  always_comb begin
    s_req = '0;
    // write address and data from the granted master
    s_req.aw_id    = {wg, m_req[wg].aw_id[LOW-1:0]};
    s_req.aw_addr  = m_req[wg].aw_addr;
    s_req.aw_len   = m_req[wg].aw_len;
    s_req.aw_size  = m_req[wg].aw_size;
    s_req.aw_burst = m_req[wg].aw_burst;
    s_req.aw_valid = w_active && m_req[wg].aw_valid && !aw_done;
    s_req.w_data   = m_req[wg].w_data;
    s_req.w_strb   = m_req[wg].w_strb;
    s_req.w_last   = m_req[wg].w_last;
    s_req.w_valid  = w_active && m_req[wg].w_valid && !w_done;
    s_req.b_ready  = m_req[s_rsp.b_id[AXI_IDW-1 -: IXW]].b_ready;
    // read address
    s_req.ar_id    = {ag, m_req[ag].ar_id[LOW-1:0]};
    s_req.ar_addr  = m_req[ag].ar_addr;
    s_req.ar_len   = m_req[ag].ar_len;
    s_req.ar_size  = m_req[ag].ar_size;
    s_req.ar_burst = m_req[ag].ar_burst;
    s_req.ar_valid = (ar_req_v != '0);
    s_req.r_ready  = m_req[s_rsp.r_id[AXI_IDW-1 -: IXW]].r_ready;
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      m_rsp[i]          = '0;
      m_rsp[i].aw_ready = w_active && (wg == IXW'(i)) && !aw_done && s_rsp.aw_ready;
      m_rsp[i].w_ready  = w_active && (wg == IXW'(i)) && !w_done && s_rsp.w_ready;
      m_rsp[i].b_id     = {{IXW{1'b0}}, s_rsp.b_id[LOW-1:0]};
      m_rsp[i].b_resp   = s_rsp.b_resp;
      m_rsp[i].b_valid  = s_rsp.b_valid && (s_rsp.b_id[AXI_IDW-1 -: IXW] == IXW'(i));
      m_rsp[i].ar_ready = (ag == IXW'(i)) && ar_req_v[i] && s_rsp.ar_ready;
      m_rsp[i].r_id     = {{IXW{1'b0}}, s_rsp.r_id[LOW-1:0]};
      m_rsp[i].r_data   = s_rsp.r_data;
      m_rsp[i].r_resp   = s_rsp.r_resp;
      m_rsp[i].r_last   = s_rsp.r_last;
      m_rsp[i].r_valid  = s_rsp.r_valid && (s_rsp.r_id[AXI_IDW-1 -: IXW] == IXW'(i));
    end
  end

  assign aw_hs = s_req.aw_valid && s_rsp.aw_ready;
  assign w_end = s_req.w_valid && s_rsp.w_ready && s_req.w_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_locked <= 1'b0; w_sel <= '0; aw_done <= 1'b0; w_done <= 1'b0;
      w_last_g <= IXW'(N - 1); ar_last_g <= IXW'(N - 1);
    end else begin
      if (s_req.ar_valid && s_rsp.ar_ready) ar_last_g <= ag;
      if (w_active) begin
        if ((aw_done || aw_hs) && (w_done || w_end)) begin
          w_locked <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0; w_last_g <= wg;
        end else begin
          w_locked <= 1'b1; w_sel <= wg;
          aw_done  <= aw_done || aw_hs;
          w_done   <= w_done || w_end;
        end
      end
    end
  end

  a_grant_stable: assert property (@(posedge clk) disable iff (!rst_n)
    w_locked |-> (wg == w_sel));
endmodule
