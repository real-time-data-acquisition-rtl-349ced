// trigger_source: line trigger and macro-pulse trigger for the acquisition.
//
// The timing module delivers two triggers with the clock: one starts the
// readout of every line (bunch repetition, 4.5 MHz at the European XFEL), the
// other marks the start of the next macro-pulse. Both arrive asynchronously, so
// each passes a two-flop synchroniser and a rising-edge detector and becomes a
// one-clock pulse. For development both can be generated internally instead
// (use_internal): a line trigger every int_line_period clocks and a macro-pulse
// trigger together with every int_mp_lines-th line trigger. The selection of
// sources follows the paper; the synchroniser and the internal generator's
// counters are this design's choice. line_count counts line triggers and serves
// as a time stamp. Outputs are registered; an external edge shows up on the
// pulse outputs three clocks after it arrives.
module trigger_source (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ext_line_trig,    // asynchronous
  input  logic        ext_mp_trig,      // asynchronous
  input  logic        use_internal,
  input  logic [15:0] int_line_period,  // clocks between internal line triggers (>=2)
  input  logic [15:0] int_mp_lines,     // line triggers per internal macro-pulse (>=1)
  output logic        line_trig,
  output logic        mp_trig,
  output logic [31:0] line_count
);
  logic [2:0]  sync_l, sync_m;
  logic        ext_l, ext_m;
  logic [15:0] per_cnt, mp_cnt;
  logic        int_l, int_m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_l <= '0; sync_m <= '0;
    end else begin
      sync_l <= {sync_l[1:0], ext_line_trig};
      sync_m <= {sync_m[1:0], ext_mp_trig};
    end
  end
  assign ext_l = sync_l[1] & ~sync_l[2];
  assign ext_m = sync_m[1] & ~sync_m[2];

  // internal generator
  assign int_l = use_internal && (per_cnt == 16'd0);
  assign int_m = int_l && (mp_cnt == 16'd0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      per_cnt <= '0; mp_cnt <= '0;
    end else if (!use_internal) begin
      per_cnt <= '0; mp_cnt <= '0;
    end else begin
      per_cnt <= (per_cnt >= int_line_period - 16'd1) ? 16'd0 : per_cnt + 16'd1;
      if (int_l) mp_cnt <= (mp_cnt >= int_mp_lines - 16'd1) ? 16'd0 : mp_cnt + 16'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_trig <= 1'b0; mp_trig <= 1'b0; line_count <= '0;
    end else begin
      line_trig <= use_internal ? int_l : ext_l;
      mp_trig   <= use_internal ? int_m : ext_m;
      if (use_internal ? int_l : ext_l) line_count <= line_count + 32'd1;
    end
  end
endmodule
