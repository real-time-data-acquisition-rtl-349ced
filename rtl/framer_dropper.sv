// framer_dropper: cuts the continuous line stream into one packet per bunch.
//
// Acquisition runs all the time (so dark lines keep arriving), but only the
// lines after a macro-pulse trigger are to be stored. While acq_enable is high,
// a macro-pulse trigger arms the framer: it captures the time stamp, assigns
// the next bunch sequence number and checks that the buffer downstream has room
// for the whole packet (space_beats >= 1 + num_lines*LINE_BEATS). If it has,
// the header beat (data_hdr_t: type PKT_DATA, bunch number, line count, time
// stamp) is queued at once and the next num_lines complete lines follow it,
// the last beat of the last line carrying last. If it has not, the whole bunch
// is dropped and counted in dropped_bunches. All other lines are dropped.
// A macro-pulse trigger that arrives while a packet is being captured is
// ignored (counted in ignored_mp). The line stream cannot be stalled, so a
// 4-beat skid FIFO decouples it from out_ready; a beat that finds it full is
// lost and counted in overflow (the admission check makes this a fault of the
// memory path). num_lines is limited to MAX_LINES.
// Header contents follow the paper (number of lines, sequential bunch number);
// the header layout, the time stamp, admission control and the counters are
// this design's choice.
module framer_dropper
  import hold_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // line stream from the ADC data reader (cannot stall)
  input  logic        in_valid,
  input  beat_t       in_data,
  input  logic        in_last,
  // control
  input  logic        acq_enable,
  input  logic        mp_trig,
  input  logic [31:0] timestamp,
  input  logic [15:0] num_lines,
  input  logic [31:0] space_beats,
  // packet stream to the FIFO sub-system
  output logic        out_valid,
  output beat_t       out_data,
  output logic        out_last,
  input  logic        out_ready,
  // status
  output logic [31:0] bunch_seq,
  output logic [31:0] stored_bunches,
  output logic [15:0] dropped_bunches,
  output logic [15:0] ignored_mp,
  output logic [15:0] overflow
);
  typedef enum logic [1:0] {D_IDLE, D_WAIT_LINE, D_CAPTURE} dstate_e;
  dstate_e     st;
  logic [15:0] nl, lines_left;
  logic        line_start;        // next input beat begins a line
  logic        q_valid, q_ready, q_last;
  beat_t       q_data;
  data_hdr_t   hdr;
  logic [31:0] need;

  assign nl   = (num_lines > 16'(MAX_LINES)) ? 16'(MAX_LINES) : num_lines;
  assign need = 32'd1 + 32'(nl) * 32'(LINE_BEATS);

  always_comb begin
    hdr           = '0;
    hdr.ptype     = PKT_DATA;
    hdr.bunch_seq = bunch_seq;
    hdr.num_lines = 32'(nl);
    hdr.timestamp = timestamp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) line_start <= 1'b1;
    else if (in_valid) line_start <= in_last;
  end

  always_comb begin
    q_valid = 1'b0; q_data = in_data; q_last = 1'b0;
    if (st == D_IDLE && acq_enable && mp_trig && space_beats >= need) begin
      q_valid = 1'b1; q_data = beat_t'(hdr); q_last = (nl == 16'd0);
    end else if (in_valid && (st == D_CAPTURE || (st == D_WAIT_LINE && line_start))) begin
      q_valid = 1'b1;
      q_last  = in_last && (lines_left == 16'd1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; lines_left <= '0; bunch_seq <= '0; stored_bunches <= '0;
      dropped_bunches <= '0; ignored_mp <= '0; overflow <= '0;
    end else begin
      if (q_valid && !q_ready) overflow <= overflow + 1'b1;
      unique case (st)
        D_IDLE: if (acq_enable && mp_trig) begin
          bunch_seq <= bunch_seq + 1'b1;
          if (space_beats >= need) begin
            lines_left <= nl;
            st <= (nl == 16'd0) ? D_IDLE : D_WAIT_LINE;
            stored_bunches <= stored_bunches + 1'b1;
          end else dropped_bunches <= dropped_bunches + 1'b1;
        end
        D_WAIT_LINE, D_CAPTURE: begin
          if (mp_trig) ignored_mp <= ignored_mp + 1'b1;
          if (q_valid) begin
            st <= D_CAPTURE;
            if (in_last) begin
              lines_left <= lines_left - 1'b1;
              if (lines_left == 16'd1) st <= D_IDLE;
            end
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  sync_fifo #(.WIDTH($bits(axis_t)), .DEPTH(4)) u_skid (
    .clk, .rst_n,
    .in_data({q_data, q_last}), .in_valid(q_valid), .in_ready(q_ready),
    .out_data({out_data, out_last}), .out_valid, .out_ready, .count()
  );
endmodule
