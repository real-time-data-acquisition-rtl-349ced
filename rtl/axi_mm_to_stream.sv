// axi_mm_to_stream: register access over the bulk link.
//
// The host controls the device by sending register packets (reg_pkt_t) over
// the optical link. Each packet is one beat: PKT_REG_WR carries address, data
// and byte strobes, PKT_REG_RD an address. The bridge performs the access as an
// AXI4-Lite master (write: AW and W together, then B; read: AR, then R), and
// answers with one PKT_REG_RSP beat holding the same tag and address, the AXI
// response and, for reads, the data. One access is in flight at a time. Register
// packets are single beats; packets of any other type are discarded whole. Inputs are accepted only when the
// bridge is idle. The paper shows an AXI MM to AXI Stream bridge between the
// 32-bit switch and the link multiplexer; the packet format is this design's.
module axi_mm_to_stream
  import hold_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  beat_t     in_data,
  input  logic      in_last,
  output logic      in_ready,
  output logic      out_valid,
  output beat_t     out_data,
  output logic      out_last,
  input  logic      out_ready,
  output axil_req_t m_req,
  input  axil_rsp_t m_rsp
);
  typedef enum logic [2:0] {M_IDLE, M_SKIP, M_WR, M_RD, M_RSP} mstate_e;
  mstate_e  st;
  reg_pkt_t cmd, rsp, in_pkt;
  logic     aw_done, w_done;

  assign in_pkt    = reg_pkt_t'(in_data);
  assign in_ready  = (st == M_IDLE) || (st == M_SKIP);
  assign out_valid = (st == M_RSP);
  assign out_data  = beat_t'(rsp);
  assign out_last  = 1'b1;

  always_comb begin
    m_req          = '0;
    m_req.aw_addr  = cmd.addr;
    m_req.aw_valid = (st == M_WR) && !aw_done;
    m_req.w_data   = cmd.data;
    m_req.w_strb   = cmd.strb;
    m_req.w_valid  = (st == M_WR) && !w_done;
    m_req.b_ready  = (st == M_WR) && aw_done && w_done;
    m_req.ar_addr  = cmd.addr;
    m_req.ar_valid = (st == M_RD) && !aw_done;
    m_req.r_ready  = (st == M_RD) && aw_done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; cmd <= '0; rsp <= '0; aw_done <= 1'b0; w_done <= 1'b0;
    end else begin
      unique case (st)
        M_IDLE: if (in_valid) begin
          cmd <= in_pkt; aw_done <= 1'b0; w_done <= 1'b0;
          if (in_pkt.ptype == PKT_REG_WR)      st <= M_WR;
          else if (in_pkt.ptype == PKT_REG_RD) st <= M_RD;
          else if (!in_last)                   st <= M_SKIP;
        end
        M_SKIP: if (in_valid && in_last) st <= M_IDLE;
        M_WR: begin
          if (m_req.aw_valid && m_rsp.aw_ready) aw_done <= 1'b1;
          if (m_req.w_valid && m_rsp.w_ready)   w_done  <= 1'b1;
          if (m_req.b_ready && m_rsp.b_valid) begin
            rsp <= '0; rsp.ptype <= PKT_REG_RSP; rsp.tag <= cmd.tag; rsp.addr <= cmd.addr;
            rsp.resp <= m_rsp.b_resp; rsp.data <= cmd.data; st <= M_RSP;
          end
        end
        M_RD: begin
          if (m_req.ar_valid && m_rsp.ar_ready) aw_done <= 1'b1;
          if (m_req.r_ready && m_rsp.r_valid) begin
            rsp <= '0; rsp.ptype <= PKT_REG_RSP; rsp.tag <= cmd.tag; rsp.addr <= cmd.addr;
            rsp.resp <= m_rsp.r_resp; rsp.data <= m_rsp.r_data; st <= M_RSP;
          end
        end
        M_RSP: if (out_ready) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
