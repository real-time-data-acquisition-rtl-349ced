// register_file: control and status registers of the acquisition firmware.
//
// An AXI4-Lite slave (through axil_regif) holding the settings the host
// changes and showing the counters it reads. Byte address map:
//   0x00 ID          RO  0x484F4C44
//   0x04 CTRL        RW  [0] acquisition enable  [1] internal triggers
//                        [2] front-end enable    [3] baseline tracking on dark lines
//   0x08 NUM_LINES   RW  lines stored per bunch (default 2700)
//   0x0C DV_DELAY    RW  data-valid alignment delay, clocks
//   0x10 INT_PERIOD  RW  internal line-trigger period, clocks
//   0x14 INT_MP      RW  internal line triggers per macro-pulse
//   0x18 FE_TIMING   RW  [7:0] integrator reset, [15:8] integration, clocks
//   0x1C ADC_SPI     WO  [23:0] word sent to the ADC over SPI (write starts it)
//   0x40 REF_ADDR    RW  pixel index for reference writes (auto-increments)
//   0x44 BG_REF      WO  [15:0] background reference of pixel REF_ADDR
//   0x48 FRAC_REF    WO  [15:0] fraction reference of pixel REF_ADDR
//   0x80+4i STATUS_i RO  status word i, i < NSTAT
// Other addresses read as zero and ignore writes. The paper shows a register
// file; the map and defaults (other than the 2700 lines) are this design's.
module register_file
  import hold_pkg::*;
#(
  parameter int unsigned NSTAT = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  output logic        acq_enable,
  output logic        use_internal,
  output logic        fe_enable,
  output logic        dark_track,
  output logic [15:0] num_lines,
  output logic [3:0]  dv_delay,
  output logic [15:0] int_line_period,
  output logic [15:0] int_mp_lines,
  output logic [7:0]  t_reset,
  output logic [7:0]  t_integ,
  output logic        spi_start,
  output logic [23:0] spi_word,
  output logic        bg_ref_wr,
  output logic        frac_ref_wr,
  output logic [7:0]  ref_addr,
  output logic [15:0] ref_data,
  input  logic [31:0] status [NSTAT]
);
  localparam logic [31:0] ID = 32'h484F_4C44;
  logic        wr_en, rd_en;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;

  axil_regif #(.AW(12)) u_if (
    .clk, .rst_n, .req, .rsp, .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acq_enable <= 1'b0; use_internal <= 1'b0; fe_enable <= 1'b0; dark_track <= 1'b0;
      num_lines <= 16'(MAX_LINES); dv_delay <= 4'd2; int_line_period <= 16'd24;
      int_mp_lines <= 16'd4000; t_reset <= 8'd4; t_integ <= 8'd12;
      spi_start <= 1'b0; spi_word <= '0; bg_ref_wr <= 1'b0; frac_ref_wr <= 1'b0;
      ref_addr <= '0; ref_data <= '0;
    end else begin
      spi_start <= 1'b0; bg_ref_wr <= 1'b0; frac_ref_wr <= 1'b0;
      // reference writes auto-increment the pixel index
      if (bg_ref_wr || frac_ref_wr) ref_addr <= ref_addr + 8'd1;
      if (wr_en) begin
        unique case (wr_addr)
          12'h004: {dark_track, fe_enable, use_internal, acq_enable} <= wr_data[3:0];
          12'h008: num_lines       <= wr_data[15:0];
          12'h00C: dv_delay        <= wr_data[3:0];
          12'h010: int_line_period <= wr_data[15:0];
          12'h014: int_mp_lines    <= wr_data[15:0];
          12'h018: {t_integ, t_reset} <= wr_data[15:0];
          12'h01C: begin spi_word <= wr_data[23:0]; spi_start <= 1'b1; end
          12'h040: ref_addr        <= wr_data[7:0];
          12'h044: begin ref_data <= wr_data[15:0]; bg_ref_wr <= 1'b1; end
          12'h048: begin ref_data <= wr_data[15:0]; frac_ref_wr <= 1'b1; end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rd_data = '0;
    unique case (rd_addr)
      12'h000: rd_data = ID;
      12'h004: rd_data = {28'd0, dark_track, fe_enable, use_internal, acq_enable};
      12'h008: rd_data = {16'd0, num_lines};
      12'h00C: rd_data = {28'd0, dv_delay};
      12'h010: rd_data = {16'd0, int_line_period};
      12'h014: rd_data = {16'd0, int_mp_lines};
      12'h018: rd_data = {16'd0, t_integ, t_reset};
      12'h040: rd_data = {24'd0, ref_addr};
      default: if (rd_addr >= 12'h080 && rd_addr < 12'(32'h080 + 4 * NSTAT))
                 rd_data = status[(rd_addr - 12'h080) >> 2];
    endcase
  end
endmodule
