// sync_fifo: single-clock first-word-fall-through FIFO.
//
// A circular array of DEPTH words with a read and a write pointer and an
// occupancy counter. in_ready is high while the FIFO is not full; out_valid is
// high while it is not empty and out_data shows the oldest word. A write and a
// read may happen in the same cycle. count gives the occupancy. Helper of this
// design (the paper does not describe FIFO internals).
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [CW-1:0]    count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_wr     = in_valid & in_ready;
  assign do_rd     = out_valid & out_ready;

  function automatic logic [PW-1:0] nxt(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= nxt(wp);
      if (do_rd) rp <= nxt(rp);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= in_data;
endmodule
