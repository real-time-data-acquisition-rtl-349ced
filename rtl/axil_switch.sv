// axil_switch: AXI4-Lite address decoder, one master to NS slaves (32-bit).
//
// Connects the register bridge to the register file and the peripheral
// controllers. Slave i owns the 4 KB-aligned window whose address bits
// [SEL_LSB+3:SEL_LSB] equal i (with the defaults: 0x0000 register file,
// 0x1000 PLL controller, 0x2000 UART, 0x3000 and 0x4000 the two I2C masters).
// Writes and reads are handled independently, one transaction each at a time:
// an address selects a slave, and that slave's channels are connected to the
// master until its response has been accepted. An address outside every window
// is answered by the switch itself with DECERR (reads return 0xDEADBEEF).
// The paper shows a 32-bit AXI switch here; the address map is this design's.
module axil_switch
  import hold_pkg::*;
#(
  parameter int unsigned NS      = 5,
  parameter int unsigned SEL_LSB = 12
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t m_req,
  output axil_rsp_t m_rsp,
  output axil_req_t s_req [NS],
  input  axil_rsp_t s_rsp [NS]
);
  typedef enum logic [1:0] {X_IDLE, X_FWD, X_ERR, X_ERR_RSP} xstate_e;
  localparam int unsigned SW = $clog2(NS + 1);

  xstate_e       wst, rst;
  logic [3:0]    wdec, rdec;
  logic [SW-1:0] wsel, rsel;
  logic          e_aw, e_w;

  assign wdec = m_req.aw_addr[SEL_LSB +: 4];
  assign rdec = m_req.ar_addr[SEL_LSB +: 4];

  always_comb begin
    m_rsp = '0;
    for (int i = 0; i < NS; i++) begin
      s_req[i] = '0;
      s_req[i].aw_addr = m_req.aw_addr & ((32'd1 << SEL_LSB) - 32'd1);
      s_req[i].w_data  = m_req.w_data;
      s_req[i].w_strb  = m_req.w_strb;
      s_req[i].ar_addr = m_req.ar_addr & ((32'd1 << SEL_LSB) - 32'd1);
      if (wst == X_FWD && wsel == SW'(i)) begin
        s_req[i].aw_valid = m_req.aw_valid;
        s_req[i].w_valid  = m_req.w_valid;
        s_req[i].b_ready  = m_req.b_ready;
        m_rsp.aw_ready    = s_rsp[i].aw_ready;
        m_rsp.w_ready     = s_rsp[i].w_ready;
        m_rsp.b_valid     = s_rsp[i].b_valid;
        m_rsp.b_resp      = s_rsp[i].b_resp;
      end
      if (rst == X_FWD && rsel == SW'(i)) begin
        s_req[i].ar_valid = m_req.ar_valid;
        s_req[i].r_ready  = m_req.r_ready;
        m_rsp.ar_ready    = s_rsp[i].ar_ready;
        m_rsp.r_valid     = s_rsp[i].r_valid;
        m_rsp.r_data      = s_rsp[i].r_data;
        m_rsp.r_resp      = s_rsp[i].r_resp;
      end
    end
    if (wst == X_ERR) begin
      m_rsp.aw_ready = !e_aw; m_rsp.w_ready = !e_w;
    end
    if (wst == X_ERR_RSP) begin
      m_rsp.b_valid = 1'b1; m_rsp.b_resp = RESP_DECERR;
    end
    if (rst == X_ERR) m_rsp.ar_ready = 1'b1;
    if (rst == X_ERR_RSP) begin
      m_rsp.r_valid = 1'b1; m_rsp.r_resp = RESP_DECERR; m_rsp.r_data = 32'hDEAD_BEEF;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= X_IDLE; rst <= X_IDLE; wsel <= '0; rsel <= '0; e_aw <= 1'b0; e_w <= 1'b0;
    end else begin
      // write channel
      unique case (wst)
        X_IDLE: if (m_req.aw_valid) begin
          e_aw <= 1'b0; e_w <= 1'b0;
          if (32'(wdec) < NS) begin wsel <= SW'(wdec); wst <= X_FWD; end
          else wst <= X_ERR;
        end
        X_FWD: if (m_rsp.b_valid && m_req.b_ready) wst <= X_IDLE;
        X_ERR: begin
          if (m_req.aw_valid) e_aw <= 1'b1;
          if (m_req.w_valid)  e_w  <= 1'b1;
          if ((e_aw || m_req.aw_valid) && (e_w || m_req.w_valid)) wst <= X_ERR_RSP;
        end
        X_ERR_RSP: if (m_req.b_ready) wst <= X_IDLE;
        default: wst <= X_IDLE;
      endcase
      // read channel
      unique case (rst)
        X_IDLE: if (m_req.ar_valid) begin
          if (32'(rdec) < NS) begin rsel <= SW'(rdec); rst <= X_FWD; end
          else rst <= X_ERR;
        end
        X_FWD: if (m_rsp.r_valid && m_req.r_ready) rst <= X_IDLE;
        X_ERR: rst <= X_ERR_RSP;
        X_ERR_RSP: if (m_req.r_ready) rst <= X_IDLE;
        default: rst <= X_IDLE;
      endcase
    end
  end
endmodule
