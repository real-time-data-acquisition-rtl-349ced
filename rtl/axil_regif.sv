// axil_regif: AXI4-Lite slave front end for simple register blocks.
//
// Turns AXI4-Lite accesses into one-clock register strobes. A write is taken
// when AW and W are both valid and no write response is pending: wr_en pulses
// with wr_addr, wr_data and wr_strb, and B (OKAY) follows in the next clock.
// A read is taken when AR is valid and no read response is pending: rd_en
// pulses with rd_addr, the owner answers with rd_data in the same clock
// (combinationally) and R follows in the next clock. Helper shared by the
// register file and the peripheral controllers; not described in the paper.
module axil_regif
  import hold_pkg::*;
#(
  parameter int unsigned AW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axil_req_t     req,
  output axil_rsp_t     rsp,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [31:0]   wr_data,
  output logic [3:0]    wr_strb,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [31:0]   rd_data
);
  logic b_pend, r_pend;
  logic [31:0] r_data_q;

  assign wr_en   = req.aw_valid && req.w_valid && !b_pend;
  assign wr_addr = req.aw_addr[AW-1:0];
  assign wr_data = req.w_data;
  assign wr_strb = req.w_strb;
  assign rd_en   = req.ar_valid && !r_pend;
  assign rd_addr = req.ar_addr[AW-1:0];

  always_comb begin
    rsp          = '0;
    rsp.aw_ready = wr_en;
    rsp.w_ready  = wr_en;
    rsp.b_valid  = b_pend;
    rsp.b_resp   = RESP_OKAY;
    rsp.ar_ready = rd_en;
    rsp.r_valid  = r_pend;
    rsp.r_data   = r_data_q;
    rsp.r_resp   = RESP_OKAY;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_pend <= 1'b0; r_pend <= 1'b0; r_data_q <= '0;
    end else begin
      if (wr_en) b_pend <= 1'b1; else if (req.b_ready) b_pend <= 1'b0;
      if (rd_en) begin r_pend <= 1'b1; r_data_q <= rd_data; end
      else if (req.r_ready) r_pend <= 1'b0;
    end
  end
endmodule
