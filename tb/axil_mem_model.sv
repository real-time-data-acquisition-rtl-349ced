// axil_mem_model: behavioural AXI4-Lite slave for testbenches: 1024 words of
// memory, random ready delays, OKAY responses. Writes need AW and W; both may
// arrive in any order. Simulation only.
module axil_mem_model
  import hold_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp
);
  logic [31:0] mem [1024];
  logic [31:0] awa, wd;
  bit has_aw, has_w;
  int n_wr = 0, n_rd = 0;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0; has_aw = 0; has_w = 0;
      foreach (mem[i]) mem[i] = '0;
    end else begin
      axil_rsp_t n;
      n = rsp;
      if (req.aw_valid && rsp.aw_ready) begin awa = req.aw_addr; has_aw = 1; end
      if (req.w_valid && rsp.w_ready)   begin wd = req.w_data; has_w = 1; end
      if (rsp.b_valid && req.b_ready) n.b_valid = 0;
      if (rsp.r_valid && req.r_ready) n.r_valid = 0;
      if (has_aw && has_w && !n.b_valid) begin
        mem[awa[11:2]] = wd; n_wr++; has_aw = 0; has_w = 0; n.b_valid = 1; n.b_resp = RESP_OKAY;
      end
      if (req.ar_valid && rsp.ar_ready) begin
        n.r_valid = 1; n.r_data = mem[req.ar_addr[11:2]]; n.r_resp = RESP_OKAY; n_rd++;
      end
      n.aw_ready = !has_aw && ($urandom_range(2) != 0);
      n.w_ready  = !has_w  && ($urandom_range(2) != 0);
      n.ar_ready = !n.r_valid && !(req.ar_valid && rsp.ar_ready) && ($urandom_range(2) != 0);
      rsp <= n;
    end
  end
endmodule
