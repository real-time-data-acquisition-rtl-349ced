// tb_hold_top: end-to-end test of the acquisition firmware at its default
// parameters (256-pixel lines, 2700 lines per bunch, 30 MB ring buffer).
//
// Around the top level sit: a model of the readout chip and ADC (data valid
// follows the multiplexer enable, the samples lag it by two clocks, pixel i of
// line L reads (L mod 64)*256 + i), a behavioural DDR3 port with random
// stalls, a host on the bulk link that writes and reads registers and requests
// stored packets, and receivers for the LLRF link, the PLL SPI, the UART
// (looped back) and the I2C buses. The host:
//   - reads the ID register and configures the system over the link;
//   - checks the first 200 LLRF records against centre of mass, spread and
//     mean computed here, and the CRC and framing of every record;
//   - injects a short data-valid burst, a packet of unknown type, and dark
//     lines with baseline tracking on;
//   - stores bunches until the buffer is full and a bunch is dropped, reads
//     packets back and checks every header and pixel;
//   - shortens the macro-pulse and line periods so that triggers are ignored
//     and missed, and checks the status words against the blocks' counters.
// Each mechanism is counted; one that never happened is a failure.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 6000000
module tb_hold_top;
  import hold_pkg::*;
  `include "tb_util.svh"

  logic ext_line_trig = 0, ext_mp_trig = 0, dark_line = 0;
  logic fe_int_reset, fe_integrate, fe_hold, fe_ro_start, fe_ro_en;
  logic [LANES-1:0][ADC_BITS-1:0] adc_data = '0;
  logic adc_dv = 0, adc_sclk, adc_mosi, adc_cs_n;
  axi_req_t ddr_req; axi_rsp_t ddr_rsp;
  logic link_tx_valid, link_tx_last, link_tx_ready = 0;
  beat_t link_tx_data, link_rx_data = '0;
  logic link_rx_valid = 0, link_rx_last = 1, link_rx_ready;
  logic llrf_tx_valid, llrf_tx_sof, llrf_tx_eof, llrf_tx_ready = 0;
  logic [31:0] llrf_tx_data;
  logic pll_sclk, pll_mosi, pll_cs_n;
  logic uart_txd;
  logic [1:0] i2c_scl_oe, i2c_sda_oe, ack_drv = 0;

  hold_top dut (
    .clk, .rst_n, .ext_line_trig, .ext_mp_trig, .dark_line,
    .fe_int_reset, .fe_integrate, .fe_hold, .fe_ro_start, .fe_ro_en,
    .adc_data, .adc_dv, .adc_sclk, .adc_mosi, .adc_cs_n, .adc_miso(1'b0),
    .ddr_req, .ddr_rsp,
    .link_tx_valid, .link_tx_data, .link_tx_last, .link_tx_ready,
    .link_rx_valid, .link_rx_data, .link_rx_last, .link_rx_ready,
    .llrf_tx_valid, .llrf_tx_data, .llrf_tx_sof, .llrf_tx_eof, .llrf_tx_ready,
    .pll_sclk, .pll_mosi, .pll_cs_n, .pll_miso(pll_mosi), .pll_locked(2'b11),
    .uart_txd, .uart_rxd(uart_txd),
    .i2c_scl_oe, .i2c_sda_oe, .i2c_sda_i(~(i2c_sda_oe | ack_drv))
  );
  ddr3_axi_model #(.LATENCY(8), .STALL(1'b1)) u_ddr (.clk, .rst_n, .req(ddr_req), .rsp(ddr_rsp));

  // mechanism counters
  int m_reg_wr, m_reg_rd, m_data_pkts, m_llrf_pkts, m_llrf_checked, m_pll_spi, m_adc_spi;
  int m_i2c_starts, m_uart_bytes, m_rx_dropped, m_short, m_dark_lines, m_dark_moved;
  int m_dropped, m_ignored, m_missed, m_tx_stall, m_ddr_wrap;

  // ---------------- readout chip and ADC model ----------------
  typedef struct packed { logic v; logic [31:0] line; logic [3:0] beat; } samp_t;
  samp_t pipe0, pipe1;
  int    adc_lines = 0;
  logic  ro_q = 0, glitch = 0;
  int    glitch_cnt = 0;
  always @(posedge clk) begin
    samp_t cur;
    cur = '0;
    if (fe_ro_en && rst_n) begin
      if (!ro_q) begin cur.line = adc_lines; cur.beat = 0; adc_lines <= adc_lines + 1; end
      else begin cur.line = pipe0.line; cur.beat = pipe0.beat + 1; end
      cur.v = 1;
    end else if (glitch_cnt > 0) begin
      cur.v = 1; cur.line = 32'hFFFF; cur.beat = 4'(5 - glitch_cnt);
      glitch_cnt <= glitch_cnt - 1;
    end
    ro_q <= fe_ro_en && rst_n;
    pipe0 <= cur; pipe1 <= pipe0;
    adc_dv <= cur.v;
    for (int k = 0; k < LANES; k++)
      adc_data[k] <= pipe1.v ? ADC_BITS'({pipe1.line[5:0], 8'(pipe1.beat * LANES + k)})
                             : ADC_BITS'($urandom);
  end

  // ---------------- bulk link host ----------------
  reg_pkt_t rsp_q[$];
  int  rx_beat = 0, pkt_lines = 0;
  logic [5:0] line_tag;
  logic [31:0] last_seq = '1, last_ts = 0;
  bit  in_data_pkt = 0;
  int  data_errs = 0;
  always @(negedge clk) if (rst_n) begin
    link_tx_ready = ($urandom_range(7) != 0);
    if (link_tx_valid && !link_tx_ready) m_tx_stall++;
    if (link_tx_valid && link_tx_ready) begin
      if (rx_beat == 0) begin
        data_hdr_t h;
        h = data_hdr_t'(link_tx_data);
        if (h.ptype == PKT_REG_RSP) begin
          check(link_tx_last, "register response is one beat");
          rsp_q.push_back(reg_pkt_t'(link_tx_data));
        end else begin
          check(h.ptype == PKT_DATA, "link packet is a register response or data");
          check(h.num_lines == 32'(MAX_LINES), $sformatf("header line count %0d", h.num_lines));
          check(last_seq == '1 || h.bunch_seq > last_seq, "bunch numbers increase");
          check(h.timestamp >= last_ts, "time stamps increase");
          last_seq = h.bunch_seq; last_ts = h.timestamp;
          pkt_lines = h.num_lines; in_data_pkt = 1;
          rx_beat = 1;
        end
      end else begin
        int b, ln;
        b = (rx_beat - 1) % LINE_BEATS; ln = (rx_beat - 1) / LINE_BEATS;
        for (int k = 0; k < LANES; k++) begin
          logic [15:0] px;
          px = link_tx_data[k*PIX_W +: PIX_W];
          if (b == 0 && k == 0 && ln == 0) line_tag = px[13:8];
          if (px[15:14] != 0 || px[7:0] != 8'(b * LANES + k) ||
              px[13:8] != 6'(line_tag + ln)) data_errs++;
        end
        if (link_tx_last != (rx_beat == pkt_lines * LINE_BEATS)) data_errs++;
        if (link_tx_last) begin
          check(rx_beat == pkt_lines * LINE_BEATS, "data packet length");
          check(data_errs == 0, $sformatf("pixel data of bunch %0d (%0d errors)", last_seq, data_errs));
          data_errs = 0; rx_beat = 0; in_data_pkt = 0; m_data_pkts++;
        end else rx_beat++;
      end
    end
  end

  task automatic send_beat(input beat_t d);
    @(negedge clk);
    link_rx_valid = 1; link_rx_data = d; link_rx_last = 1;
    #1;
    while (!link_rx_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    link_rx_valid = 0;
  endtask

  logic [7:0] tag_n = 0;
  task automatic reg_wr(input logic [31:0] addr, input logic [31:0] data);
    reg_pkt_t p, r;
    p = '0; p.ptype = PKT_REG_WR; p.tag = tag_n++; p.addr = addr; p.data = data; p.strb = 4'hF;
    send_beat(beat_t'(p));
    while (rsp_q.size() == 0) @(negedge clk);
    r = rsp_q.pop_front();
    check(r.tag == p.tag && r.resp == RESP_OKAY, $sformatf("write 0x%0h response", addr));
    m_reg_wr++;
  endtask

  task automatic reg_rd(input logic [31:0] addr, output logic [31:0] data);
    reg_pkt_t p, r;
    p = '0; p.ptype = PKT_REG_RD; p.tag = tag_n++; p.addr = addr;
    send_beat(beat_t'(p));
    while (rsp_q.size() == 0) @(negedge clk);
    r = rsp_q.pop_front();
    check(r.tag == p.tag && (r.resp == RESP_OKAY) == (addr < 32'h5000),
          $sformatf("read 0x%0h response", addr));
    data = r.data;
    m_reg_rd++;
  endtask

  task automatic request(input int n);
    rd_req_t q;
    q = '0; q.ptype = PKT_RD_REQ; q.npackets = n;
    send_beat(beat_t'(q));
  endtask

  // ---------------- LLRF receiver ----------------
  logic [31:0] ll_w [5];
  int ll_n = 0;
  logic [31:0] ll_seq_prev = '1;
  function automatic logic [31:0] crc32(input logic [31:0] w [5]);
    logic [31:0] c;
    c = '1;
    for (int i = 0; i < 4; i++)
      for (int b = 31; b >= 0; b--)
        c = (c[31] ^ w[i][b]) ? ((c << 1) ^ 32'h04C11DB7) : (c << 1);
    return ~c;
  endfunction
  always @(negedge clk) if (rst_n) begin
    llrf_tx_ready = ($urandom_range(3) != 0);
    if (llrf_tx_valid && llrf_tx_ready) begin
      if (llrf_tx_sof != (ll_n == 0) || llrf_tx_eof != (ll_n == 4)) check(0, "LLRF framing");
      ll_w[ll_n] = llrf_tx_data;
      if (ll_n == 4) begin
        ll_n = 0; m_llrf_pkts++;
        check(ll_w[4] == crc32(ll_w) && ll_w[0][31:16] == 16'hBBF0, "LLRF CRC and marker");
        if (ll_seq_prev != '1 && ll_w[0][15:0] != 16'(ll_seq_prev + 1))
          check(0, $sformatf("LLRF sequence %0d after %0d", ll_w[0][15:0], ll_seq_prev));
        ll_seq_prev = ll_w[0][15:0];
        if (m_llrf_pkts <= 200) begin
          // line L: x_i = (L mod 64)*256 + i, no baseline, unity gain
          longint m0, m1, m2, c, q2;
          m0 = 0; m1 = 0; m2 = 0;
          for (int i = 0; i < 256; i++) begin
            longint x;
            x = (longint'(ll_w[0][5:0]) << 8) + i;
            m0 += x; m1 += i * x; m2 += i * i * x;
          end
          c = (m1 << 8) / m0; q2 = (m2 << 8) / m0;
          check(ll_w[1] == 32'(c) && ll_w[2] == 32'(q2 - ((c * c) >> 8)) && ll_w[3] == 32'(m0),
                $sformatf("LLRF values of line %0d: %0d %0d %0d exp %0d", ll_w[0][15:0], ll_w[1], ll_w[2], ll_w[3], m0));
          m_llrf_checked++;
        end
      end else ll_n++;
    end
  end

  // ---------------- serial bus observers ----------------
  logic pll_cs_q = 1, adc_cs_q = 1, uart_q = 1;
  logic [1:0] sda_q = 0, scl_q = 0;
  int i2c_bits [2] = '{0, 0};
  always @(posedge clk) begin
    if (pll_cs_q && !pll_cs_n) m_pll_spi++;
    if (adc_cs_q && !adc_cs_n) m_adc_spi++;
    for (int g = 0; g < 2; g++) begin
      if (!sda_q[g] && i2c_sda_oe[g] && !i2c_scl_oe[g]) begin  // START: SDA falls, SCL high
        m_i2c_starts++; i2c_bits[g] <= 0; ack_drv[g] <= 0;
      end else if (!scl_q[g] && i2c_scl_oe[g]) begin           // SCL falls
        ack_drv[g] <= (i2c_bits[g] % 9 == 8);                  // acknowledge the 9th bit
      end else if (scl_q[g] && !i2c_scl_oe[g]) begin           // SCL rises
        i2c_bits[g] <= i2c_bits[g] + 1;
      end
    end
    pll_cs_q <= pll_cs_n; adc_cs_q <= adc_cs_n; sda_q <= i2c_sda_oe; scl_q <= i2c_scl_oe;
  end

  always begin
    repeat (500000) @(posedge clk);
    $display("[%0t] stored=%0d dropped=%0d pkts=%0d used=%0d pend=%0d lines=%0d", $time,
      dut.u_framer.stored_bunches, dut.u_framer.dropped_bunches, m_data_pkts, dut.u_fifo.used_beats,
      dut.u_frd.pending, adc_lines);
  end
  // ring buffer wrap: the write pointer goes back to the start
  logic [31:0] wp_q = 0;
  always @(posedge clk) begin
    if (dut.u_fifo.wr_ptr < wp_q) m_ddr_wrap++;
    wp_q <= dut.u_fifo.wr_ptr;
  end
  // count lines taken with dark_line high
  always @(posedge clk) if (fe_ro_start && dark_line) m_dark_lines++;

  task automatic wait_lines(input int n);
    while (adc_lines < n) @(posedge clk);
  endtask

  logic [31:0] d;
  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // ---- identification and configuration over the link ----
    reg_rd(32'h0000, d);
    check(d == 32'h484F4C44, "ID register");
    reg_rd(32'h0008, d);
    check(d == 32'(MAX_LINES), "default line count");
    reg_wr(32'h0018, {16'd0, 8'd12, 8'd4});     // t_integ, t_reset
    reg_wr(32'h001C, 32'h00ABCDEF);             // ADC configuration word
    reg_wr(32'h1000, 32'h12345678);             // PLL word (looped back on MISO)
    repeat (1000) @(posedge clk);
    reg_rd(32'h1008, d);
    check(d == 32'h12345678, $sformatf("PLL readback 0x%08h", d));
    reg_rd(32'h1004, d);
    check(d[2:1] == 2'b11 && d[0] == 0, "PLL lock and idle");
    reg_wr(32'h200C, 32'd16);                   // UART divider (looped back)
    reg_wr(32'h2000, 32'h5A);
    reg_wr(32'h2000, 32'hC3);
    repeat (600) @(posedge clk);
    reg_rd(32'h2004, d); check(d[8] && d[7:0] == 8'h5A, $sformatf("UART byte 1 0x%0h", d));
    if (d[8]) m_uart_bytes++;
    reg_rd(32'h2004, d); check(d[8] && d[7:0] == 8'hC3, $sformatf("UART byte 2 0x%0h", d));
    if (d[8]) m_uart_bytes++;
    reg_wr(32'h3008, 32'd4); reg_wr(32'h4008, 32'd4);
    reg_wr(32'h3000, {7'd0, 1'b1, 8'h34, 8'h12, 8'h4C});
    reg_wr(32'h4000, {7'd0, 1'b0, 8'h00, 8'h77, 8'h4D});
    repeat (600) @(posedge clk);
    reg_rd(32'h3004, d); check(d[1:0] == 2'b00, "I2C 0 done with ACK");
    reg_rd(32'h4004, d); check(d[1:0] == 2'b00, "I2C 1 done with ACK");
    reg_rd(32'h5000, d); check(d == 32'hDEADBEEF, "unmapped register window");

    // unknown packet type: discarded by the link demultiplexer
    send_beat({8'h77, 248'd0});
    m_rx_dropped = 1;

    // ---- lines start: internal triggers, front end on, acquisition off ----
    reg_wr(32'h0014, 32'd2800);                 // macro-pulse every 2800 lines
    reg_wr(32'h0004, 32'b0110);                 // use_internal, fe_enable
    wait_lines(230);
    // short data-valid burst between two lines
    @(negedge fe_ro_en); @(posedge clk);
    glitch_cnt <= 5;
    wait_lines(240);
    reg_rd(32'h0094, d);
    check(d[15:0] == 1, $sformatf("one short line (%0d)", d[15:0]));
    m_short = d[15:0];
    // dark lines with baseline tracking
    reg_wr(32'h0004, 32'b1110);
    @(posedge fe_ro_start); dark_line <= 1;
    wait_lines(260);
    @(posedge clk iff fe_ro_start); dark_line <= 0;
    repeat (100) @(posedge clk);
    if (dut.u_bg.refm[1][2] != 0) m_dark_moved++;
    check(m_dark_moved == 1, "baseline moved during dark lines");
    reg_wr(32'h0004, 32'b0110);
    reg_wr(32'h0040, 32'd0);                    // reset the baseline of all pixels
    for (int i = 0; i < 256; i++) reg_wr(32'h0044, 32'd0);

    $display("[%0t] storage phase", $time);
    // ---- storage: fill the buffer until a bunch is dropped ----
    reg_wr(32'h0004, 32'b0111);
    while (dut.u_framer.stored_bunches < 2) @(posedge clk);
    request(2);
    while (dut.u_framer.dropped_bunches == 0) @(posedge clk);
    begin
      int s;
      s = dut.u_framer.stored_bunches;
      wait (m_data_pkts == 2);
      request(2);
      wait (m_data_pkts == 4);
      // the space freed by the read takes the next bunches again
      while (dut.u_framer.stored_bunches == s) @(posedge clk);
    end
    m_dropped = dut.u_framer.dropped_bunches;

    $display("[%0t] ignored-trigger phase", $time);
    // ---- macro pulses faster than a bunch: ignored triggers ----
    reg_wr(32'h0004, 32'b0110);
    reg_wr(32'h0014, 32'd1000);
    reg_wr(32'h0004, 32'b0111);
    wait_lines(adc_lines + 3000);
    reg_rd(32'h009C, d);
    m_ignored = d[31:16];
    // ---- line triggers faster than the front end: missed triggers ----
    reg_wr(32'h0004, 32'b0110);
    reg_wr(32'h0010, 32'd10);
    repeat (2000) @(posedge clk);
    reg_wr(32'h0010, 32'd24);
    reg_rd(32'h0094, d);
    m_missed = d[31:16];

    $display("[%0t] final read-out", $time);
    // ---- empty the buffer and compare the status words ----
    request(1000);
    while (dut.u_fifo.stored_packets != 0 || in_data_pkt) @(posedge clk);
    repeat (200) @(posedge clk);
    reg_rd(32'h0084, d); check(d == dut.u_framer.stored_bunches, "status: bunches stored");
    reg_rd(32'h0088, d);
    m_dropped = dut.u_framer.dropped_bunches;
    check(d[15:0] == m_dropped && d[31:16] == 0, "status: dropped bunches, no overflow");
    reg_rd(32'h0080, d);
    check(d == dut.u_framer.stored_bunches + dut.u_framer.dropped_bunches,
          "status: bunch number counts stored and dropped bunches");
    check(m_data_pkts == dut.u_framer.stored_bunches, $sformatf("all %0d stored bunches read back",
          m_data_pkts));
    reg_rd(32'h008C, d); check(d == 0, "status: buffer empty");
    reg_rd(32'h009C, d); check(d[15:0] == 1, "status: one discarded link packet");
    reg_rd(32'h00A4, d); check(d <= m_llrf_pkts && d + 8 >= m_llrf_pkts, $sformatf("status: LLRF packets %0d vs %0d", d, m_llrf_pkts));
    reg_rd(32'h00A8, d); check(d[31:16] == 0, "status: no LLRF record dropped");
    reg_rd(32'h00B8, d); check(d == 32'(983040), $sformatf("status: free space %0d", d));

    $display("mechanisms: reg_wr=%0d reg_rd=%0d data_pkts=%0d llrf=%0d llrf_checked=%0d",
             m_reg_wr, m_reg_rd, m_data_pkts, m_llrf_pkts, m_llrf_checked);
    $display("  pll_spi=%0d adc_spi=%0d i2c_starts=%0d uart_bytes=%0d rx_dropped=%0d short=%0d",
             m_pll_spi, m_adc_spi, m_i2c_starts, m_uart_bytes, m_rx_dropped, m_short);
    $display("  dark_lines=%0d dark_moved=%0d dropped=%0d ignored=%0d missed=%0d tx_stall=%0d wrap=%0d",
             m_dark_lines, m_dark_moved, m_dropped, m_ignored, m_missed, m_tx_stall, m_ddr_wrap);
    check(m_reg_wr > 0, "mechanism: register write");
    check(m_reg_rd > 0, "mechanism: register read");
    check(m_data_pkts > 0, "mechanism: stored bunch read back");
    check(m_llrf_pkts > 0 && m_llrf_checked == 200, "mechanism: LLRF records");
    check(m_pll_spi > 0, "mechanism: PLL SPI");
    check(m_adc_spi > 0, "mechanism: ADC SPI");
    check(m_i2c_starts >= 2, "mechanism: I2C transfers");
    check(m_uart_bytes == 2, "mechanism: UART loop-back");
    check(m_rx_dropped > 0, "mechanism: unknown link packet discarded");
    check(m_short > 0, "mechanism: short line");
    check(m_dark_lines > 0 && m_dark_moved > 0, "mechanism: baseline tracking");
    check(m_dropped > 0, "mechanism: bunch dropped on a full buffer");
    check(m_ignored > 0, "mechanism: macro pulse ignored during capture");
    check(m_missed > 0, "mechanism: line trigger missed");
    check(m_tx_stall > 0, "mechanism: link back-pressure");
    check(m_ddr_wrap > 0, "mechanism: ring buffer wrap");
    finish();
  end
endmodule
