// background_subtractor: first stage of the beam-feedback (BBF) path.
//
// Removes each pixel's baseline (dark level) from every line: out = in - ref,
// clamped at zero. The per-pixel reference lives in a 256-entry table held as
// LINE_BEATS words of LANES pixels, so all lanes of a beat are read at once;
// the beat's position in the line comes from a counter cleared by last. The
// host writes single entries through ref_wr/ref_addr/ref_data; the
// table resets to zero. Because the
// acquisition never stops, lines taken without a laser pulse (dark_line high
// for the whole line) can also track a drifting baseline: with dark_track set,
// each reference pixel moves 1/2**TRACK_SHIFT of the way towards the dark
// pixel (exponential average). A host write to an entry wins over tracking.
// Latency one clock, one beat per clock, no back-pressure.
// The paper names a background subtractor with reference data and mentions
// tracking the baseline with dark frames; clamping, table layout and the
// averaging rule are this design's choice.
module background_subtractor
  import hold_pkg::*;
#(
  parameter int unsigned TRACK_SHIFT = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  beat_t      in_data,
  input  logic       in_last,
  input  logic       dark_line,
  input  logic       dark_track,
  input  logic       ref_wr,
  input  logic [7:0] ref_addr,
  input  pix_t       ref_data,
  output logic       out_valid,
  output beat_t      out_data,
  output logic       out_last
);
  localparam int unsigned BCW = $clog2(LINE_BEATS);
  localparam int unsigned LW  = $clog2(LANES);

  pix_t           refm [LINE_BEATS][LANES];
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
          pix_t x, r;
          x = in_data[k*PIX_W +: PIX_W];
          r = refm[beat][k];
          out_data[k*PIX_W +: PIX_W] <= (x > r) ? x - r : '0;
        end
    end
  end

  // reference table: baseline tracking, host writes (a host write comes last
  // and so wins over tracking of the same entry)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int b = 0; b < LINE_BEATS; b++)
        for (int k = 0; k < LANES; k++) refm[b][k] <= '0;
    else begin
      if (in_valid && dark_line && dark_track)
        for (int k = 0; k < LANES; k++) begin
          logic signed [PIX_W+1:0] diff;
          diff = $signed({2'b00, in_data[k*PIX_W +: PIX_W]}) - $signed({2'b00, refm[beat][k]});
          refm[beat][k] <= PIX_W'($signed({2'b00, refm[beat][k]}) + (diff >>> TRACK_SHIFT));
        end
      if (ref_wr) refm[ref_addr[7:LW]][ref_addr[LW-1:0]] <= ref_data;
    end
  end
endmodule
