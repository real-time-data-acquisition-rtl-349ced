// fraction_calculator: second stage of the beam-feedback (BBF) path.
//
// Normalises every background-free pixel by a per-pixel reference, so that the
// result is the fraction of the reference (for instance the spectrum of the
// laser alone) each pixel received. To avoid 16 dividers per clock the table
// holds the reference's reciprocal as a gain g in Q4.12 (g = 4096 * FULL / ref,
// computed by the host): out = min(65535, (in * g) >> 12). Table layout and
// beat counting are as in the background subtractor; the host writes single
// entries through ref_wr/ref_addr/ref_data. All entries reset to 1.0 (4096).
// Latency one clock, one beat per clock, no back-pressure.
// The paper names a fraction calculator with reference data; the reciprocal
// table and the Q4.12 format are this design's choice.
module fraction_calculator
  import hold_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  beat_t      in_data,
  input  logic       in_last,
  input  logic       ref_wr,
  input  logic [7:0] ref_addr,
  input  pix_t       ref_data,
  output logic       out_valid,
  output beat_t      out_data,
  output logic       out_last
);
  localparam int unsigned BCW = $clog2(LINE_BEATS);
  localparam int unsigned LW  = $clog2(LANES);

  pix_t           gain [LINE_BEATS][LANES];
  logic [BCW-1:0] beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) beat <= '0;
    else if (in_valid) beat <= in_last ? '0 : beat + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid)
        for (int k = 0; k < LANES; k++) begin
          logic [2*PIX_W-1:0] p;
          p = in_data[k*PIX_W +: PIX_W] * gain[beat][k];
          out_data[k*PIX_W +: PIX_W] <= (p[2*PIX_W-1:12] > (2*PIX_W-12)'(16'hFFFF)) ? 16'hFFFF
                                        : p[12 +: PIX_W];
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int b = 0; b < LINE_BEATS; b++)
        for (int k = 0; k < LANES; k++) gain[b][k] <= 16'd4096;
    else if (ref_wr) gain[ref_addr[7:LW]][ref_addr[LW-1:0]] <= ref_data;
  end
endmodule
