// spi_master: write-only SPI master (mode 0, MSB first) for configuration ports.
//
// A start pulse with a word of NBITS bits begins a transfer: cs_n falls, each
// bit is put on mosi while sclk is low and is sampled by the slave on the rising
// edge; sclk half-period is DIV clock cycles. miso is shifted in on the rising
// edge so read-back registers can be returned in rx_data. busy stays high until
// cs_n has risen again; done pulses for one cycle at the end. Helper used by the
// ADC configuration (front-end driver) and the PLL controller; the paper only
// says the ADC is configured over SPI, the framing here is this design's choice.
module spi_master #(
  parameter int unsigned NBITS = 24,
  parameter int unsigned DIV   = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NBITS-1:0] tx_data,
  output logic [NBITS-1:0] rx_data,
  output logic             busy,
  output logic             done,
  output logic             sclk,
  output logic             mosi,
  output logic             cs_n,
  input  logic             miso
);
  localparam int unsigned DW = $clog2(DIV + 1);
  localparam int unsigned BW = $clog2(NBITS + 1);
  typedef enum logic [1:0] {S_IDLE, S_LOW, S_HIGH, S_END} state_e;
  state_e           st;
  logic [DW-1:0]    div_cnt;
  logic [BW-1:0]    bit_cnt;
  logic [NBITS-1:0] sh;

  assign busy = (st != S_IDLE);
  assign mosi = sh[NBITS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; div_cnt <= '0; bit_cnt <= '0; sh <= '0; rx_data <= '0;
      sclk <= 1'b0; cs_n <= 1'b1; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          sh <= tx_data; cs_n <= 1'b0; sclk <= 1'b0; div_cnt <= '0;
          bit_cnt <= '0; st <= S_LOW;
        end
        S_LOW: begin
          if (div_cnt == DW'(DIV - 1)) begin
            div_cnt <= '0; sclk <= 1'b1; st <= S_HIGH;
            rx_data <= {rx_data[NBITS-2:0], miso};
          end else div_cnt <= div_cnt + 1'b1;
        end
        S_HIGH: begin
          if (div_cnt == DW'(DIV - 1)) begin
            div_cnt <= '0; sclk <= 1'b0;
            if (bit_cnt == BW'(NBITS - 1)) st <= S_END;
            else begin
              bit_cnt <= bit_cnt + 1'b1; sh <= {sh[NBITS-2:0], 1'b0}; st <= S_LOW;
            end
          end else div_cnt <= div_cnt + 1'b1;
        end
        S_END: begin
          if (div_cnt == DW'(DIV - 1)) begin
            cs_n <= 1'b1; done <= 1'b1; st <= S_IDLE; div_cnt <= '0;
          end else div_cnt <= div_cnt + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
