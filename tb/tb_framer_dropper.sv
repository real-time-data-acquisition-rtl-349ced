// tb_framer_dropper: a continuous stream of 16-beat lines (each beat tagged
// with its line and beat number) runs while macro-pulse triggers arrive at
// random moments and the output is back-pressured at random. Each stored
// packet must be a header (type, bunch number, line count, time stamp) plus
// exactly the NL lines that begin after the trigger, with last on the final
// beat. A trigger while capturing must be ignored, a trigger with too little
// buffer space must drop the bunch, and with acquisition disabled nothing is
// stored.
`timescale 1ns/1ps
`define WATCHDOG_CYCLES 40000
module tb_framer_dropper;
  import hold_pkg::*;
  `include "tb_util.svh"
  localparam int NL = 3;
  logic in_valid = 0, in_last = 0, acq_enable = 0, mp_trig = 0, out_valid, out_last;
  logic out_ready = 1;
  beat_t in_data = '0, out_data;
  logic [31:0] space_beats = 32'd100000, bunch_seq, stored_bunches;
  logic [15:0] dropped_bunches, ignored_mp, overflow;
  int cyc = 0, line_no = 0, beat_no = 0;
  logic [31:0] ts = 0;
  always_ff @(posedge clk) ts <= ts + 1;

  framer_dropper dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .acq_enable, .mp_trig,
    .timestamp(ts), .num_lines(16'(NL)), .space_beats, .out_valid, .out_data, .out_last,
    .out_ready, .bunch_seq, .stored_bunches, .dropped_bunches, .ignored_mp, .overflow);

  // line source: 16 beats, then 2 idle clocks
  int phase = 0;
  longint line_start_t [int];   // time the DUT samples the line's first beat
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (phase < LINE_BEATS) begin
        in_valid <= 1; in_data <= {32'(line_no), 32'(phase), 192'(cyc)};
        in_last <= (phase == LINE_BEATS - 1);
        if (phase == 0) line_start_t[line_no] = $time + 10;
      end else in_valid <= 0;
      if (phase == LINE_BEATS - 1) line_no++;
      phase = (phase == LINE_BEATS + 1) ? 0 : phase + 1;
      out_ready <= !out_ready ? 1'b1 : ($urandom_range(15) != 0);  // single-clock stalls
    end
  end

  // expected packets: {trigger cycle, expected first line}
  longint exp_t[$], cur_t;
  int exp_ts[$], exp_seq[$];
  int pk_beat = 0, pk_first = 0, packets = 0, bad = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (pk_beat == 0) begin
      data_hdr_t h;
      h = data_hdr_t'(out_data);
      if (exp_t.size() == 0) begin bad++; $display("unexpected packet"); end
      else begin
        if (h.ptype != PKT_DATA || h.num_lines != NL || h.timestamp != 32'(exp_ts[0])
            || h.bunch_seq != 32'(exp_seq[0])) begin
          bad++; $display("bad header %h exp ts %0d seq %0d", out_data[255:0], exp_ts[0], exp_seq[0]);
        end
        cur_t = exp_t[0];
        void'(exp_t.pop_front()); void'(exp_ts.pop_front()); void'(exp_seq.pop_front());
      end
      if (out_last) bad++;
    end else begin
      int l, b;
      if (pk_beat == 1) begin
        pk_first = -1;
        foreach (line_start_t[k]) if (pk_first < 0 && line_start_t[k] > cur_t) pk_first = k;
      end
      l = int'(out_data[255:224]); b = int'(out_data[223:192]);
      if (l != pk_first + (pk_beat - 1) / LINE_BEATS || b != (pk_beat - 1) % LINE_BEATS) begin
        bad++; $display("beat %0d: line %0d beat %0d, expected line %0d", pk_beat, l, b, pk_first);
      end
      if (out_last != (pk_beat == NL * LINE_BEATS)) begin bad++; $display("last misplaced"); end
    end
    if (out_last) begin pk_beat = 0; packets++; end else pk_beat++;
  end

  task automatic trigger(input bit expect_store);
    longint t;
    @(posedge clk);
    mp_trig <= 1; t = $time + 10;      // time the DUT samples the trigger
    @(posedge clk);
    mp_trig <= 0;
    if (expect_store) begin
      exp_t.push_back(t); exp_ts.push_back(int'((t - 5) / 10));
      exp_seq.push_back(int'(bunch_seq));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    trigger(0);                        // disabled: ignored entirely
    repeat (5) @(posedge clk);
    acq_enable <= 1;
    for (int i = 0; i < 12; i++) begin
      repeat ($urandom_range(0, 30)) @(posedge clk);
      trigger(1);
      repeat (20) @(posedge clk);
      if (i == 4) trigger(0);          // while capturing: ignored
      repeat (NL * 18 + 20) @(posedge clk);
    end
    space_beats <= 32'(NL * LINE_BEATS);  // one beat short of a packet
    trigger(0);
    repeat (100) @(posedge clk);
    check(bad == 0, $sformatf("packet contents (%0d errors)", bad));
    check(packets == 12, $sformatf("12 packets stored (%0d)", packets));
    check(exp_t.size() == 0, "no packet missing");
    check(stored_bunches == 32'd12, "stored_bunches");
    check(ignored_mp == 16'd1, $sformatf("ignored_mp (%0d)", ignored_mp));
    check(dropped_bunches == 16'd1, $sformatf("dropped_bunches (%0d)", dropped_bunches));
    check(bunch_seq == 32'd13, $sformatf("bunch_seq counts stored and dropped (%0d)", bunch_seq));
    check(overflow == 16'd0, "no overflow");
    finish();
  end
endmodule
