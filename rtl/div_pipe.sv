// div_pipe: fully pipelined unsigned divider, one quotient bit per stage.
//
// Restoring division: stage s decides quotient bit QW-1-s by comparing the
// running remainder with the divisor shifted left by that bit position. A new
// division can enter every clock; the result leaves QW clocks later together
// with the side-band word `tag`. The quotient must fit in QW bits (the caller
// guarantees it); division by zero gives quotient 0. Helper of the statistical
// module (the paper gives no arithmetic details).
module div_pipe #(
  parameter int unsigned NW = 48,   // dividend width
  parameter int unsigned DW = 24,   // divisor width
  parameter int unsigned QW = 24,   // quotient width = number of stages
  parameter int unsigned TW = 8     // side-band width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  output logic [QW-1:0] quotient,
  output logic [TW-1:0] out_tag
);
  logic [NW-1:0] rem [QW+1];
  logic [DW-1:0] dv  [QW+1];
  logic [QW-1:0] q   [QW+1];
  logic [TW-1:0] tg  [QW+1];
  logic          v   [QW+1];

  always_comb begin
    rem[0] = dividend; dv[0] = divisor; q[0] = '0; tg[0] = in_tag; v[0] = in_valid;
  end

  for (genvar s = 0; s < QW; s++) begin : g_stage
    localparam int unsigned SH = QW - 1 - s;
    logic [NW+QW-1:0] trial;
    logic             take;
    assign trial = (NW+QW)'(dv[s]) << SH;
    assign take  = (dv[s] != '0) && ((NW+QW)'(rem[s]) >= trial);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rem[s+1] <= '0; dv[s+1] <= '0; q[s+1] <= '0; tg[s+1] <= '0; v[s+1] <= 1'b0;
      end else begin
        rem[s+1] <= take ? NW'((NW+QW)'(rem[s]) - trial) : rem[s];
        dv[s+1]  <= dv[s];
        q[s+1]   <= q[s] | (take ? (QW'(1) << SH) : '0);
        tg[s+1]  <= tg[s];
        v[s+1]   <= v[s];
      end
    end
  end

  assign out_valid = v[QW];
  assign quotient  = q[QW];
  assign out_tag   = tg[QW];
endmodule
