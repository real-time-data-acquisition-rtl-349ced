// axil_i2c: I2C master that writes the sensor bias DACs.
//
// Two of these sit behind the 32-bit switch, one per bias DAC bus (the paper
// shows "2x I2C" towards the bias DACs). A transfer is a write: START, the
// 7-bit address with R/W = 0, one or two data bytes, STOP. Each byte is
// followed by an acknowledge clock in which the master releases SDA and samples
// it; a missing acknowledge sets NACK and the transfer ends with STOP. Each bit
// is four quarter periods of QDIV clocks: SCL low (SDA changes), low, high
// (SDA sampled), high. SCL and SDA are open drain: *_oe high pulls the line low.
// No clock stretching and no reads (the DACs only need writes).
// AXI4-Lite registers (through axil_regif):
//   0x0 CMD     write starts: [6:0] address, [15:8] byte 0, [23:16] byte 1,
//               [24] two data bytes (else one); ignored while busy
//   0x4 STATUS  [0] busy, [1] NACK of the last transfer
//   0x8 QDIV    clocks per quarter bit (default 250: 100 kHz at 100 MHz)
// The bit engine and registers are this design's choice.
module axil_i2c
  import hold_pkg::*;
#(
  parameter int unsigned DEFAULT_QDIV = 250
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp,
  output logic      scl_oe,
  output logic      sda_oe,
  input  logic      sda_i
);
  typedef enum logic [1:0] {I_IDLE, I_START, I_BITS, I_STOP} istate_e;
  istate_e     st;
  logic        wr_en, rd_en;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;
  logic [15:0] qdiv, qcnt;
  logic [1:0]  q;          // quarter within a bit
  logic [3:0]  bitn;       // 0..7 data bits, 8 = acknowledge
  logic [1:0]  byten;      // byte being sent
  logic [1:0]  nbytes;     // bytes in the transfer including the address
  logic [7:0]  bytes [3];
  logic        nack, scl, sda, qend;

  axil_regif #(.AW(12)) u_if (
    .clk, .rst_n, .req, .rsp, .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  assign qend   = (qcnt == qdiv - 16'd1);
  assign scl_oe = !scl;
  assign sda_oe = !sda;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; qdiv <= 16'(DEFAULT_QDIV); qcnt <= '0; q <= '0; bitn <= '0; byten <= '0;
      nbytes <= '0; bytes <= '{default: '0}; nack <= 1'b0; scl <= 1'b1; sda <= 1'b1;
    end else begin
      if (wr_en && wr_addr == 12'h008) qdiv <= (wr_data[15:0] < 16'd2) ? 16'd2 : wr_data[15:0];
      if (st == I_IDLE) begin
        qcnt <= '0; q <= '0; scl <= 1'b1; sda <= 1'b1;
        if (wr_en && wr_addr == 12'h000) begin
          bytes[0] <= {wr_data[6:0], 1'b0};
          bytes[1] <= wr_data[15:8];
          bytes[2] <= wr_data[23:16];
          nbytes   <= wr_data[24] ? 2'd3 : 2'd2;
          nack <= 1'b0; st <= I_START;
        end
      end else begin
        qcnt <= qend ? 16'd0 : qcnt + 16'd1;
        if (qend) q <= q + 2'd1;
        unique case (st)
          I_START: if (qend) begin
            // quarter 0: bus idle, quarter 1: SDA falls while SCL is high
            if (q == 2'd0) sda <= 1'b0;
            else begin q <= '0; st <= I_BITS; bitn <= '0; byten <= '0; scl <= 1'b0; end
          end
          I_BITS: if (qend) begin
            unique case (q)
              2'd0: ;
              2'd1: scl <= 1'b1;
              2'd2: if (bitn == 4'd8 && sda_i) nack <= 1'b1;   // sample acknowledge
              2'd3: begin
                scl <= 1'b0;
                if (bitn == 4'd8) begin
                  bitn <= '0;
                  if (nack || byten == nbytes - 2'd1) begin st <= I_STOP; sda <= 1'b0; end
                  else begin byten <= byten + 2'd1; sda <= bytes[byten + 2'd1][7]; end
                end else begin
                  bitn <= bitn + 4'd1;
                  sda  <= (bitn == 4'd7) ? 1'b1 : bytes[byten][3'd6 - bitn[2:0]];
                end
              end
            endcase
          end
          I_STOP: if (qend) begin
            if (q == 2'd1) scl <= 1'b1;
            if (q == 2'd2) begin sda <= 1'b1; st <= I_IDLE; end
          end
          default: st <= I_IDLE;
        endcase
      end
      // first data bit is driven when SCL falls after START
      if (st == I_START && qend && q == 2'd1) sda <= bytes[0][7];
    end
  end

  always_comb begin
    unique case (rd_addr)
      12'h004: rd_data = {30'd0, nack, st != I_IDLE};
      12'h008: rd_data = {16'd0, qdiv};
      default: rd_data = '0;
    endcase
  end
endmodule
