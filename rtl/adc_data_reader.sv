// adc_data_reader: turns the free-running ADC sample stream into image lines.
//
// The ADC converts a new sample on every clock, whatever the readout chip is
// doing; only the samples the GOTTHARD chip marks with its "data valid" output
// carry pixels (this follows the paper). Data valid travels through the ADC's
// pipeline more slowly than it reaches the FPGA, so it is delayed here by a
// programmable number of clocks (dv_delay, 0..MAX_DV_DELAY) to line it up with
// the digital samples. Each rising edge of the aligned data valid starts a new
// line; LANES samples per clock are zero-extended from ADC_BITS to PIX_W bits
// and output as one beat, lane k of beat b being pixel b*LANES+k. The 16th beat
// of a line carries last. A data-valid burst that ends before a full line is
// counted in short_lines and its beats are output without last.
// Timing: one register stage, out_* follow the aligned samples by one clock.
// The lane count, the delay line and the line synchronisation on the data-valid
// edge are this design's choices.
module adc_data_reader
  import hold_pkg::*;
#(
  parameter int unsigned MAX_DV_DELAY = 15
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [LANES-1:0][ADC_BITS-1:0]   adc_data,   // one sample per lane per clock
  input  logic                             adc_dv,     // data valid from the readout chip
  input  logic [$clog2(MAX_DV_DELAY+1)-1:0] dv_delay,
  output logic                             out_valid,
  output beat_t                            out_data,
  output logic                             out_last,
  output logic [15:0]                      short_lines
);
  localparam int unsigned DLW = $clog2(MAX_DV_DELAY + 1);
  localparam int unsigned BCW = $clog2(LINE_BEATS);

  logic [MAX_DV_DELAY:0] dv_pipe;   // dv_pipe[d] = adc_dv delayed by d clocks
  logic                  dv_al, dv_al_q;
  logic [BCW-1:0]        beat_cnt, idx;

  assign idx = dv_al_q ? beat_cnt : '0;

  always_comb begin
    dv_pipe[0] = adc_dv;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dv_pipe[MAX_DV_DELAY:1] <= '0;
    else        dv_pipe[MAX_DV_DELAY:1] <= dv_pipe[MAX_DV_DELAY-1:0];
  end
  assign dv_al = dv_pipe[dv_delay];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv_al_q <= 1'b0; beat_cnt <= '0; out_valid <= 1'b0; out_last <= 1'b0;
      out_data <= '0; short_lines <= '0;
    end else begin
      dv_al_q   <= dv_al;
      out_valid <= dv_al;
      out_last  <= 1'b0;
      if (dv_al) begin
        for (int k = 0; k < LANES; k++)
          out_data[k*PIX_W +: PIX_W] <= PIX_W'(adc_data[k]);
        // index of this beat: a rising edge of data valid restarts the line
        out_last <= (idx == BCW'(LINE_BEATS - 1));
        beat_cnt <= (idx == BCW'(LINE_BEATS - 1)) ? '0 : idx + 1'b1;
      end else if (dv_al_q && beat_cnt != '0) begin
        short_lines <= short_lines + 1'b1;   // burst ended inside a line
      end
    end
  end
endmodule
