// frontend_driver: controls the GOTTHARD readout chips and configures the ADC.
//
// The readout chip has no clock of its own: its integrator, sample-and-hold and
// output multiplexer act directly on the control lines, so the FPGA sequences
// them. On each line trigger (when enabled) the integration FSM goes
//   IDLE -> RESET (int_reset high, t_reset clocks)
//        -> INTEGRATE (integrate high, t_integ clocks)
//        -> SAMPLE (waits until the previous line's readout is in its last
//                   step, then switches the sample-and-hold to hold)
//        -> IDLE.
// Taking the sample starts the readout sequencer, which keeps hold high and
// steps the multiplexer (ro_en high) for LINE_BEATS clocks, one group of LANES
// channels per clock; ro_start marks the first step. The next integration may
// run while the previous line is read out. A trigger that arrives while the
// integration FSM is busy is ignored and counted in missed_trig.
// The second function is a write-only SPI master for the ADC's configuration
// registers: spi_start with spi_word sends one 24-bit word.
// That an FSM drives the integrator, sample-and-hold and multiplexer on the
// external trigger follows the paper; the states' durations, signal polarities
// and the 24-bit SPI word are this design's choice.
module frontend_driver
  import hold_pkg::*;
#(
  parameter int unsigned SPI_BITS = 24,
  parameter int unsigned SPI_DIV  = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // acquisition control
  input  logic                enable,
  input  logic                line_trig,
  input  logic [7:0]          t_reset,
  input  logic [7:0]          t_integ,
  output logic                int_reset,
  output logic                integrate,
  output logic                hold,
  output logic                ro_start,
  output logic                ro_en,
  output logic [15:0]         missed_trig,
  output logic [31:0]         lines_read,
  // ADC configuration
  input  logic                spi_start,
  input  logic [SPI_BITS-1:0] spi_word,
  output logic                spi_busy,
  output logic                adc_sclk,
  output logic                adc_mosi,
  output logic                adc_cs_n,
  input  logic                adc_miso
);
  typedef enum logic [1:0] {F_IDLE, F_RESET, F_INTEG, F_SAMPLE} fstate_e;
  localparam int unsigned RCW = $clog2(LINE_BEATS + 1);

  fstate_e        st;
  logic [7:0]     tcnt;
  logic [RCW-1:0] ro_cnt;
  logic           ro_busy;
  logic           take_sample;

  assign ro_busy     = (ro_cnt != '0);
  // a new sample may be taken in the last clock of the previous readout
  assign take_sample = (st == F_SAMPLE) && (ro_cnt <= RCW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; tcnt <= '0; missed_trig <= '0;
    end else begin
      if (line_trig && enable && st != F_IDLE) missed_trig <= missed_trig + 1'b1;
      unique case (st)
        F_IDLE:   if (line_trig && enable) begin st <= F_RESET; tcnt <= '0; end
        F_RESET:  if (tcnt >= t_reset - 8'd1) begin st <= F_INTEG; tcnt <= '0; end
                  else tcnt <= tcnt + 8'd1;
        F_INTEG:  if (tcnt >= t_integ - 8'd1) begin st <= F_SAMPLE; tcnt <= '0; end
                  else tcnt <= tcnt + 8'd1;
        F_SAMPLE: if (take_sample) st <= F_IDLE;
        default:  st <= F_IDLE;
      endcase
    end
  end

  assign int_reset = (st == F_RESET);
  assign integrate = (st == F_INTEG);

  // readout sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ro_cnt <= '0; ro_start <= 1'b0; ro_en <= 1'b0; hold <= 1'b0; lines_read <= '0;
    end else begin
      ro_start <= 1'b0;
      if (take_sample) begin
        ro_cnt <= RCW'(LINE_BEATS); ro_start <= 1'b1; ro_en <= 1'b1; hold <= 1'b1;
        lines_read <= lines_read + 1'b1;
      end else if (ro_busy) begin
        ro_cnt <= ro_cnt - 1'b1;  // counts the remaining multiplexer steps
        ro_en  <= (ro_cnt != RCW'(1));
        hold   <= (ro_cnt != RCW'(1));
      end
    end
  end

  spi_master #(.NBITS(SPI_BITS), .DIV(SPI_DIV)) u_spi (
    .clk, .rst_n, .start(spi_start), .tx_data(spi_word), .rx_data(),
    .busy(spi_busy), .done(), .sclk(adc_sclk), .mosi(adc_mosi), .cs_n(adc_cs_n),
    .miso(adc_miso)
  );
endmodule
