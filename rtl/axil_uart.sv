// axil_uart: UART to the power-supply micro-controller.
//
// The bias and boost supplies are run by a micro-controller that talks to the
// FPGA over a UART (this follows the paper). 8 data bits, no parity, one stop
// bit, LSB first; one bit lasts DIV clocks (register, default DEFAULT_DIV).
// Transmit bytes wait in a TX_DEPTH-byte FIFO, received bytes in an
// RX_DEPTH-byte FIFO. The receiver synchronises rxd with two flops, starts on
// a falling edge and samples each bit in its middle; a bad stop bit is counted
// as a framing error. AXI4-Lite registers (through axil_regif):
//   0x0 TXDATA  write: queue byte [7:0] (dropped if the FIFO is full)
//   0x4 RXDATA  read: [8] valid, [7:0] byte; a read pops the byte
//   0x8 STATUS  [0] TX FIFO full [1] TX busy [2] RX FIFO empty
//               [3] RX overrun (sticky) [4] framing error (sticky); write 1s clear [4:3]
//   0xC DIV     clocks per bit
// Frame format, FIFOs and registers are this design's choice.
module axil_uart
  import hold_pkg::*;
#(
  parameter int unsigned DEFAULT_DIV = 868,  // 115200 Bd at 100 MHz
  parameter int unsigned TX_DEPTH    = 16,
  parameter int unsigned RX_DEPTH    = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp,
  output logic      txd,
  input  logic      rxd
);
  logic        wr_en, rd_en;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;
  logic [15:0] div;
  logic        ovr, ferr;

  axil_regif #(.AW(12)) u_if (
    .clk, .rst_n, .req, .rsp, .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  // ---------------- transmitter ----------------
  logic       txf_full_n, txf_valid, tx_pop, tx_busy;
  logic [7:0] txf_data;
  logic [9:0] tx_sh;
  logic [3:0] tx_bit;
  logic [15:0] tx_cnt;

  sync_fifo #(.WIDTH(8), .DEPTH(TX_DEPTH)) u_txf (
    .clk, .rst_n, .in_data(wr_data[7:0]), .in_valid(wr_en && wr_addr == 12'h000),
    .in_ready(txf_full_n), .out_data(txf_data), .out_valid(txf_valid), .out_ready(tx_pop),
    .count()
  );
  assign tx_pop = txf_valid && !tx_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_busy <= 1'b0; tx_sh <= '1; tx_bit <= '0; tx_cnt <= '0; txd <= 1'b1;
    end else if (tx_pop) begin
      tx_busy <= 1'b1; tx_sh <= {1'b1, txf_data, 1'b0}; tx_bit <= '0; tx_cnt <= '0;
      txd <= 1'b0;
    end else if (tx_busy) begin
      if (tx_cnt == div - 16'd1) begin
        tx_cnt <= '0;
        if (tx_bit == 4'd9) begin tx_busy <= 1'b0; txd <= 1'b1; end
        else begin
          tx_bit <= tx_bit + 4'd1; txd <= tx_sh[tx_bit + 4'd1];
        end
      end else tx_cnt <= tx_cnt + 16'd1;
    end
  end

  // ---------------- receiver ----------------
  logic [2:0]  rx_s;
  logic        rx_busy, rx_push, rxf_in_ready, rxf_valid;
  logic [3:0]  rx_bit;
  logic [15:0] rx_cnt;
  logic [7:0]  rx_sh, rxf_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_s <= '1; rx_busy <= 1'b0; rx_bit <= '0; rx_cnt <= '0; rx_sh <= '0; rx_push <= 1'b0;
      ferr <= 1'b0;
    end else begin
      rx_s <= {rx_s[1:0], rxd};
      rx_push <= 1'b0;
      if (!rx_busy) begin
        if (rx_s[2] && !rx_s[1]) begin      // falling edge: start bit
          rx_busy <= 1'b1; rx_bit <= '0; rx_cnt <= '0;
        end
      end else begin
        // sample at the middle of bit rx_bit (0 = start, 1..8 data, 9 stop)
        if (rx_cnt == ((rx_bit == 4'd0) ? (div >> 1) : div) - 16'd1) begin
          rx_cnt <= '0;
          if (rx_bit == 4'd0) begin
            if (rx_s[1]) rx_busy <= 1'b0;   // glitch, not a start bit
            else rx_bit <= 4'd1;
          end else if (rx_bit == 4'd9) begin
            rx_busy <= 1'b0;
            if (rx_s[1]) rx_push <= 1'b1; else ferr <= 1'b1;
          end else begin
            rx_sh <= {rx_s[1], rx_sh[7:1]}; rx_bit <= rx_bit + 4'd1;
          end
        end else rx_cnt <= rx_cnt + 16'd1;
      end
      if (wr_en && wr_addr == 12'h008 && wr_data[4]) ferr <= 1'b0;
    end
  end

  sync_fifo #(.WIDTH(8), .DEPTH(RX_DEPTH)) u_rxf (
    .clk, .rst_n, .in_data(rx_sh), .in_valid(rx_push), .in_ready(rxf_in_ready),
    .out_data(rxf_data), .out_valid(rxf_valid), .out_ready(rd_en && rd_addr == 12'h004),
    .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovr <= 1'b0; div <= 16'(DEFAULT_DIV);
    end else begin
      if (rx_push && !rxf_in_ready) ovr <= 1'b1;
      else if (wr_en && wr_addr == 12'h008 && wr_data[3]) ovr <= 1'b0;
      if (wr_en && wr_addr == 12'h00C) div <= (wr_data[15:0] < 16'd4) ? 16'd4 : wr_data[15:0];
    end
  end

  always_comb begin
    unique case (rd_addr)
      12'h004: rd_data = {23'd0, rxf_valid, rxf_data};
      12'h008: rd_data = {27'd0, ferr, ovr, !rxf_valid, tx_busy || txf_valid, !txf_full_n};
      12'h00C: rd_data = {16'd0, div};
      default: rd_data = '0;
    endcase
  end
endmodule
