// hold_top: firmware of the line-camera acquisition and processing system.
//
// A 256-pixel line detector is read out at up to the bunch rate of the
// accelerator. This top level wires the firmware's blocks together:
//
//   triggers -> trigger_source -> frontend_driver -> GOTTHARD control lines
//   ADC samples + data valid -> adc_data_reader -> lines (16 beats of 256 bits)
//     storage path: framer_dropper -> fifo_subsystem <-> axi_switch -> DDR3 port
//                   -> frame_reader -> axis_mux_demux -> bulk link (Aurora user side)
//     BBF path:     background_subtractor -> fraction_calculator
//                   -> statistical_module -> low_latency_link -> LLRF link
//   control: bulk link -> axis_mux_demux -> axi_mm_to_stream -> axil_switch
//            -> register_file, pll_controller, axil_uart, 2 x axil_i2c
//
// Everything runs on one clock (clk) with an active-low asynchronous reset.
// The DDR3 controller, the Aurora core and the transceivers are outside: their
// user-side ports are this module's ports. Status words of the register file
// (byte address 0x80 + 4*i):
//   0 bunch sequence number         1 bunches stored
//   2 {overflowed beats, bunches dropped}
//   3 beats held in the buffer      4 packets sent to clients
//   5 {missed triggers, short lines} 6 line triggers (time stamp)
//   7 {ignored macro-pulse triggers, discarded link packets}
//   8 packets requested, not yet sent 9 LLRF packets sent
//   10 {LLRF records dropped, packets in the buffer}
//   11 lines read out by the front end 12 [0] ADC SPI busy
//   13 packets sent on the bulk link 14 free beats in the buffer  15 zero
// The block structure follows the paper's firmware diagram; the single clock
// domain and the status map are this design's choice.
module hold_top
  import hold_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  // timing
  input  logic                           ext_line_trig,
  input  logic                           ext_mp_trig,
  input  logic                           dark_line,
  // readout chip control and ADC
  output logic                           fe_int_reset,
  output logic                           fe_integrate,
  output logic                           fe_hold,
  output logic                           fe_ro_start,
  output logic                           fe_ro_en,
  input  logic [LANES-1:0][ADC_BITS-1:0] adc_data,
  input  logic                           adc_dv,
  output logic                           adc_sclk,
  output logic                           adc_mosi,
  output logic                           adc_cs_n,
  input  logic                           adc_miso,
  // DDR3 controller (AXI4 slave port)
  output axi_req_t                       ddr_req,
  input  axi_rsp_t                       ddr_rsp,
  // bulk link (Aurora user interface)
  output logic                           link_tx_valid,
  output beat_t                          link_tx_data,
  output logic                           link_tx_last,
  input  logic                           link_tx_ready,
  input  logic                           link_rx_valid,
  input  beat_t                          link_rx_data,
  input  logic                           link_rx_last,
  output logic                           link_rx_ready,
  // BBF link to the LLRF system
  output logic                           llrf_tx_valid,
  output logic [31:0]                    llrf_tx_data,
  output logic                           llrf_tx_sof,
  output logic                           llrf_tx_eof,
  input  logic                           llrf_tx_ready,
  // PLL configuration
  output logic                           pll_sclk,
  output logic                           pll_mosi,
  output logic                           pll_cs_n,
  input  logic                           pll_miso,
  input  logic [1:0]                     pll_locked,
  // power-supply micro-controller
  output logic                           uart_txd,
  input  logic                           uart_rxd,
  // bias DACs (open drain: oe high pulls low)
  output logic [1:0]                     i2c_scl_oe,
  output logic [1:0]                     i2c_sda_oe,
  input  logic [1:0]                     i2c_sda_i
);
  // ---------------- control registers ----------------
  logic        acq_enable, use_internal, fe_enable, dark_track;
  logic [15:0] num_lines, int_line_period, int_mp_lines;
  logic [3:0]  dv_delay;
  logic [7:0]  t_reset, t_integ, ref_addr;
  logic        spi_start, spi_busy, bg_ref_wr, frac_ref_wr;
  logic [23:0] spi_word;
  logic [15:0] ref_data;
  logic [31:0] status [16];

  // ---------------- triggers and front end ----------------
  logic        line_trig, mp_trig;
  logic [31:0] line_count, lines_read;
  logic [15:0] missed_trig, short_lines;

  trigger_source u_trig (
    .clk, .rst_n, .ext_line_trig, .ext_mp_trig, .use_internal, .int_line_period,
    .int_mp_lines, .line_trig, .mp_trig, .line_count
  );

  frontend_driver u_fe (
    .clk, .rst_n, .enable(fe_enable), .line_trig, .t_reset, .t_integ,
    .int_reset(fe_int_reset), .integrate(fe_integrate), .hold(fe_hold),
    .ro_start(fe_ro_start), .ro_en(fe_ro_en), .missed_trig, .lines_read,
    .spi_start, .spi_word, .spi_busy, .adc_sclk, .adc_mosi, .adc_cs_n, .adc_miso
  );

  logic  ln_valid, ln_last;
  beat_t ln_data;
  adc_data_reader u_rd (
    .clk, .rst_n, .adc_data, .adc_dv, .dv_delay, .out_valid(ln_valid), .out_data(ln_data),
    .out_last(ln_last), .short_lines
  );

  // ---------------- storage path ----------------
  logic        fr_valid, fr_last, fr_ready;
  beat_t       fr_data;
  logic [31:0] bunch_seq, stored_bunches, space_beats, used_beats;
  logic [15:0] dropped_bunches, ignored_mp, overflow, stored_packets;

  framer_dropper u_framer (
    .clk, .rst_n, .in_valid(ln_valid), .in_data(ln_data), .in_last(ln_last),
    .acq_enable, .mp_trig, .timestamp(line_count), .num_lines, .space_beats,
    .out_valid(fr_valid), .out_data(fr_data), .out_last(fr_last), .out_ready(fr_ready),
    .bunch_seq, .stored_bunches, .dropped_bunches, .ignored_mp, .overflow
  );

  logic     fo_valid, fo_last, fo_ready;
  beat_t    fo_data;
  axi_req_t m_req [2];
  axi_rsp_t m_rsp [2];

  fifo_subsystem u_fifo (
    .clk, .rst_n, .in_valid(fr_valid), .in_data(fr_data), .in_last(fr_last),
    .in_ready(fr_ready), .out_valid(fo_valid), .out_data(fo_data), .out_last(fo_last),
    .out_ready(fo_ready), .space_beats, .used_beats, .stored_packets,
    .wr_req(m_req[0]), .wr_rsp(m_rsp[0]), .rd_req(m_req[1]), .rd_rsp(m_rsp[1])
  );

  axi_switch #(.N(2)) u_axi_sw (
    .clk, .rst_n, .m_req, .m_rsp, .s_req(ddr_req), .s_rsp(ddr_rsp)
  );

  logic        rq_valid, rq_last, rq_ready, dt_valid, dt_last, dt_ready;
  beat_t       rq_data, dt_data;
  logic [31:0] pending, packets_sent, tx_packets;
  logic [15:0] bad_requests, rx_dropped;

  frame_reader u_frd (
    .clk, .rst_n, .req_valid(rq_valid), .req_data(rq_data), .req_last(rq_last),
    .req_ready(rq_ready), .in_valid(fo_valid), .in_data(fo_data), .in_last(fo_last),
    .in_ready(fo_ready), .out_valid(dt_valid), .out_data(dt_data), .out_last(dt_last),
    .out_ready(dt_ready), .pending, .packets_sent, .bad_requests
  );

  // ---------------- link and control path ----------------
  logic      rg_valid, rg_last, rg_ready, rs_valid, rs_last, rs_ready;
  beat_t     rg_data, rs_data;
  axil_req_t br_req, sl_req [5];
  axil_rsp_t br_rsp, sl_rsp [5];

  axis_mux_demux u_mux (
    .clk, .rst_n,
    .s0_valid(dt_valid), .s0_data(dt_data), .s0_last(dt_last), .s0_ready(dt_ready),
    .s1_valid(rs_valid), .s1_data(rs_data), .s1_last(rs_last), .s1_ready(rs_ready),
    .tx_valid(link_tx_valid), .tx_data(link_tx_data), .tx_last(link_tx_last),
    .tx_ready(link_tx_ready),
    .rx_valid(link_rx_valid), .rx_data(link_rx_data), .rx_last(link_rx_last),
    .rx_ready(link_rx_ready),
    .reg_valid(rg_valid), .reg_data(rg_data), .reg_last(rg_last), .reg_ready(rg_ready),
    .req_valid(rq_valid), .req_data(rq_data), .req_last(rq_last), .req_ready(rq_ready),
    .rx_dropped, .tx_packets
  );

  axi_mm_to_stream u_bridge (
    .clk, .rst_n, .in_valid(rg_valid), .in_data(rg_data), .in_last(rg_last),
    .in_ready(rg_ready), .out_valid(rs_valid), .out_data(rs_data), .out_last(rs_last),
    .out_ready(rs_ready), .m_req(br_req), .m_rsp(br_rsp)
  );

  axil_switch #(.NS(5)) u_axil_sw (
    .clk, .rst_n, .m_req(br_req), .m_rsp(br_rsp), .s_req(sl_req), .s_rsp(sl_rsp)
  );

  register_file #(.NSTAT(16)) u_regs (
    .clk, .rst_n, .req(sl_req[0]), .rsp(sl_rsp[0]), .acq_enable, .use_internal, .fe_enable,
    .dark_track, .num_lines, .dv_delay, .int_line_period, .int_mp_lines, .t_reset, .t_integ,
    .spi_start, .spi_word, .bg_ref_wr, .frac_ref_wr, .ref_addr, .ref_data, .status
  );

  pll_controller u_pll (
    .clk, .rst_n, .req(sl_req[1]), .rsp(sl_rsp[1]), .pll_sclk, .pll_mosi, .pll_cs_n,
    .pll_miso, .pll_locked
  );

  axil_uart u_uart (
    .clk, .rst_n, .req(sl_req[2]), .rsp(sl_rsp[2]), .txd(uart_txd), .rxd(uart_rxd)
  );

  for (genvar g = 0; g < 2; g++) begin : g_i2c
    axil_i2c u_i2c (
      .clk, .rst_n, .req(sl_req[3+g]), .rsp(sl_rsp[3+g]), .scl_oe(i2c_scl_oe[g]),
      .sda_oe(i2c_sda_oe[g]), .sda_i(i2c_sda_i[g])
    );
  end

  // ---------------- BBF path ----------------
  logic   bs_valid, bs_last, fc_valid, fc_last, st_valid;
  beat_t  bs_data, fc_data;
  stats_t stats;
  logic [15:0] ll_dropped;
  logic [31:0] ll_packets;

  background_subtractor u_bg (
    .clk, .rst_n, .in_valid(ln_valid), .in_data(ln_data), .in_last(ln_last), .dark_line,
    .dark_track, .ref_wr(bg_ref_wr), .ref_addr, .ref_data, .out_valid(bs_valid),
    .out_data(bs_data), .out_last(bs_last)
  );

  fraction_calculator u_frac (
    .clk, .rst_n, .in_valid(bs_valid), .in_data(bs_data), .in_last(bs_last),
    .ref_wr(frac_ref_wr), .ref_addr, .ref_data, .out_valid(fc_valid), .out_data(fc_data),
    .out_last(fc_last)
  );

  statistical_module u_stat (
    .clk, .rst_n, .in_valid(fc_valid), .in_data(fc_data), .in_last(fc_last),
    .out_valid(st_valid), .out_stats(stats)
  );

  low_latency_link u_ll (
    .clk, .rst_n, .in_valid(st_valid), .in_stats(stats), .tx_valid(llrf_tx_valid),
    .tx_data(llrf_tx_data), .tx_sof(llrf_tx_sof), .tx_eof(llrf_tx_eof),
    .tx_ready(llrf_tx_ready), .dropped(ll_dropped), .packets(ll_packets)
  );

  // ---------------- status words ----------------
  always_comb begin
    status[0]  = bunch_seq;
    status[1]  = stored_bunches;
    status[2]  = {overflow, dropped_bunches};
    status[3]  = used_beats;
    status[4]  = packets_sent;
    status[5]  = {missed_trig, short_lines};
    status[6]  = line_count;
    status[7]  = {ignored_mp, rx_dropped};
    status[8]  = pending;
    status[9]  = ll_packets;
    status[10] = {ll_dropped, stored_packets};
    status[11] = lines_read;
    status[12] = {31'd0, spi_busy};
    status[13] = tx_packets;
    status[14] = space_beats;
    status[15] = {16'd0, bad_requests};
  end
endmodule
