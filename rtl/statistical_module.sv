// statistical_module: per-line beam parameters for the beam-feedback path.
//
// For every normalised line of pixels x_i (i = 0..255) it computes the three
// quantities the paper asks for:
//   centre of mass   c = sum(i*x_i) / sum(x_i)
//   lateral spread   s = sum(i^2*x_i) / sum(x_i) - c^2   (variance, pixel^2)
//   mean readout     m = sum(x_i) / 256
// all as fixed-point numbers with 8 fraction bits (Q8). The three moments
// M0, M1, M2 are accumulated beat by beat (LANES products per clock). At the
// line's last beat they enter two pipelined dividers (M1*256/M0 and
// M2*256/M0), so a new line can start on the very next clock. The variance is
// then q2 - c*c/256. A line with M0 = 0 gives c = s = 0.
// Output: one stats_t pulse (out_valid) per line, QW+3 clocks after the last
// beat, with the line's sequence number.
// The three quantities follow the paper; using the variance as the measure of
// spread, fixed-point formats and the pipelining are this design's choice.
module statistical_module
  import hold_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  beat_t  in_data,
  input  logic   in_last,
  output logic   out_valid,
  output stats_t out_stats
);
  localparam int unsigned BCW = $clog2(LINE_BEATS);
  localparam int unsigned QW  = 24;

  logic [BCW-1:0] beat;
  logic [31:0]    m0, s0, a0;
  logic [39:0]    m1, s1, a1;
  logic [47:0]    m2, s2, a2;
  logic [31:0]    seq, d_seq;

  // partial sums of this beat
  always_comb begin
    s0 = '0; s1 = '0; s2 = '0;
    for (int k = 0; k < LANES; k++) begin
      logic [7:0]  idx;
      logic [15:0] x;
      idx = 8'(32'(beat) * LANES + k);
      x   = in_data[k*PIX_W +: PIX_W];
      s0 = s0 + 32'(x);
      s1 = s1 + 40'(x) * 40'(idx);
      s2 = s2 + 48'(x) * 48'(idx) * 48'(idx);
    end
    a0 = m0 + s0; a1 = m1 + s1; a2 = m2 + s2;
  end

  logic        dv_in;
  logic [31:0] d_m0;
  logic [39:0] d_m1;
  logic [47:0] d_m2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; m0 <= '0; m1 <= '0; m2 <= '0; seq <= '0;
      dv_in <= 1'b0; d_m0 <= '0; d_m1 <= '0; d_m2 <= '0; d_seq <= '0;
    end else begin
      dv_in <= 1'b0;
      if (in_valid) begin
        if (in_last) begin
          beat <= '0; m0 <= '0; m1 <= '0; m2 <= '0;
          dv_in <= 1'b1; d_m0 <= a0; d_m1 <= a1; d_m2 <= a2; d_seq <= seq; seq <= seq + 1'b1;
        end else begin
          beat <= beat + 1'b1; m0 <= a0; m1 <= a1; m2 <= a2;
        end
      end
    end
  end

  logic          q_valid, q_valid2;
  logic [QW-1:0] q1, q2;
  logic [63:0]   tag_o, tag_o2;

  // M1 < 2^32 and M2 < 2^40, so both quotients fit in 24 bits after the <<8
  div_pipe #(.NW(56), .DW(32), .QW(QW), .TW(64)) u_div1 (
    .clk, .rst_n, .in_valid(dv_in), .dividend({d_m1, 16'd0} >> 8), .divisor(d_m0),
    .in_tag({d_seq, d_m0}), .out_valid(q_valid), .quotient(q1), .out_tag(tag_o)
  );
  div_pipe #(.NW(56), .DW(32), .QW(QW), .TW(64)) u_div2 (
    .clk, .rst_n, .in_valid(dv_in), .dividend({d_m2, 8'd0}), .divisor(d_m0),
    .in_tag({d_seq, d_m0}), .out_valid(q_valid2), .quotient(q2), .out_tag(tag_o2)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_stats <= '0;
    end else begin
      out_valid <= q_valid;
      if (q_valid) begin
        logic [47:0] c2;
        c2 = (48'(q1) * 48'(q1)) >> 8;
        out_stats.seq    <= tag_o[63:32];
        out_stats.com    <= 32'(q1);
        out_stats.spread <= (48'(q2) > c2) ? 32'(48'(q2) - c2) : 32'd0;
        out_stats.mean   <= tag_o[31:0];      // M0/256 in Q8 is M0 itself
      end
    end
  end
endmodule
