// pll_controller: configuration port of the board's clock PLLs.
//
// The clock from the timing module is cleaned of jitter by PLL circuits on the
// board; the firmware programs them. This block is an AXI4-Lite register slave
// with a 32-bit SPI master (mode 0, MSB first, shared cs_n):
//   0x0 SPI_WORD  write: sends the 32-bit word; read: last word sent
//   0x4 STATUS    [0] SPI busy, [2:1] PLL lock inputs (synchronised)
//   0x8 READBACK  the 32 bits shifted in from pll_miso during the last transfer
// A write to SPI_WORD while busy is ignored. The paper names a PLL controller;
// its SPI interface and registers are this design's choice.
module pll_controller
  import hold_pkg::*;
#(
  parameter int unsigned SPI_DIV = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp,
  output logic      pll_sclk,
  output logic      pll_mosi,
  output logic      pll_cs_n,
  input  logic      pll_miso,
  input  logic [1:0] pll_locked
);
  logic        wr_en, rd_en, busy, start;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data, word, rx;
  logic [3:0]  wr_strb;
  logic [1:0]  lock_s1, lock_s2;

  axil_regif #(.AW(12)) u_if (
    .clk, .rst_n, .req, .rsp, .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  assign start = wr_en && wr_addr == 12'h000 && !busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word <= '0; lock_s1 <= '0; lock_s2 <= '0;
    end else begin
      lock_s1 <= pll_locked; lock_s2 <= lock_s1;
      if (start) word <= wr_data;
    end
  end

  spi_master #(.NBITS(32), .DIV(SPI_DIV)) u_spi (
    .clk, .rst_n, .start, .tx_data(wr_data), .rx_data(rx), .busy, .done(),
    .sclk(pll_sclk), .mosi(pll_mosi), .cs_n(pll_cs_n), .miso(pll_miso)
  );

  always_comb begin
    unique case (rd_addr)
      12'h000: rd_data = word;
      12'h004: rd_data = {29'd0, lock_s2, busy};
      12'h008: rd_data = rx;
      default: rd_data = '0;
    endcase
  end
endmodule
