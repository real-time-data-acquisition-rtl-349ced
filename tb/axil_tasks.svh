// axil_tasks.svh: AXI4-Lite master tasks for testbenches. The including module
// declares `axil_req_t mreq;` and `axil_rsp_t mrsp;` connected to the device.
// Signals are driven and handshakes sampled at the falling clock edge; a
// handshake seen there completes at the following rising edge.
task automatic axil_write(input logic [31:0] addr, input logic [31:0] data,
                          output logic [1:0] resp);
  bit aw_fire, w_fire;
  @(negedge clk);
  mreq.aw_addr = addr; mreq.w_data = data; mreq.w_strb = 4'hF;
  mreq.aw_valid = 1; mreq.w_valid = 1; mreq.b_ready = 0;
  while (mreq.aw_valid || mreq.w_valid) begin
    #1;
    aw_fire = mreq.aw_valid && mrsp.aw_ready;
    w_fire  = mreq.w_valid && mrsp.w_ready;
    @(negedge clk);
    if (aw_fire) mreq.aw_valid = 0;
    if (w_fire)  mreq.w_valid = 0;
  end
  mreq.b_ready = 1;
  #1;
  while (!mrsp.b_valid) begin @(negedge clk); #1; end
  resp = mrsp.b_resp;
  @(negedge clk);
  mreq.b_ready = 0;
endtask

task automatic axil_read(input logic [31:0] addr, output logic [31:0] data,
                         output logic [1:0] resp);
  @(negedge clk);
  mreq.ar_addr = addr; mreq.ar_valid = 1; mreq.r_ready = 0;
  #1;
  while (!mrsp.ar_ready) begin @(negedge clk); #1; end
  @(negedge clk);
  mreq.ar_valid = 0; mreq.r_ready = 1;
  #1;
  while (!mrsp.r_valid) begin @(negedge clk); #1; end
  data = mrsp.r_data; resp = mrsp.r_resp;
  @(negedge clk);
  mreq.r_ready = 0;
endtask
