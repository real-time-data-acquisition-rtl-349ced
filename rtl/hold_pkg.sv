// hold_pkg: types and constants shared by the line-camera acquisition firmware.
//
// The detector delivers lines of 256 pixels. Samples are 14-bit and are carried
// 16-bit aligned. The ADC front end presents 16 pixels per clock, so one line is
// 16 beats of a 256-bit stream; the same 256-bit width is used for the packet
// path, the DDR3 ring buffer and the bulk optical link. Packets on that path
// start with a header beat whose top byte is a packet type (pkt_type_e).
// Register access inside the firmware uses AXI4-Lite (32-bit) and the buffer
// uses AXI4 (256-bit); both are carried as request/response structs.
// The pixel count, sample resolution and 16-bit alignment follow the paper; the
// 16 lanes, the packet type codes and the header layout are this design's choice.
package hold_pkg;

  // ---------------- line geometry ----------------
  parameter int unsigned N_PIX      = 256;  // readout channels per line
  parameter int unsigned ADC_BITS   = 14;   // ADC resolution
  parameter int unsigned PIX_W      = 16;   // storage alignment of a sample
  parameter int unsigned LANES      = 16;   // pixels per clock (parallel ADC channels)
  parameter int unsigned BEAT_W     = LANES * PIX_W;       // 256
  parameter int unsigned LINE_BEATS = N_PIX / LANES;       // 16
  parameter int unsigned MAX_LINES  = 2700;                 // lines per bunch train

  typedef logic [PIX_W-1:0]  pix_t;
  typedef pix_t              beat_pix_t [LANES];
  typedef logic [BEAT_W-1:0] beat_t;

  // ---------------- packet format ----------------
  typedef enum logic [7:0] {
    PKT_DATA     = 8'hD0,  // header of a stored bunch: lines follow
    PKT_REG_WR   = 8'hA1,  // host -> device: register write
    PKT_REG_RD   = 8'hA2,  // host -> device: register read
    PKT_REG_RSP  = 8'hA3,  // device -> host: register access response
    PKT_RD_REQ   = 8'hB1   // host -> device: request stored packets
  } pkt_type_e;

  // header beat of a data packet (beat bits [255:0])
  typedef struct packed {
    pkt_type_e    ptype;      // [255:248]
    logic [151:0] rsvd;
    logic [31:0]  bunch_seq;  // [95:64]  sequential number of the recorded bunch
    logic [31:0]  num_lines;  // [63:32]  image lines in the packet
    logic [31:0]  timestamp;  // [31:0]   line-trigger count at the macro-pulse
  } data_hdr_t;

  // register access packet (one beat, both directions)
  typedef struct packed {
    pkt_type_e    ptype;      // [255:248]
    logic [7:0]   tag;        // [247:240] echoed in the response
    logic [137:0] rsvd;
    logic [1:0]   resp;       // [101:100] AXI response (response packets)
    logic [3:0]   strb;       // [99:96]   byte strobes (write requests)
    logic [31:0]  addr;       // [95:64]
    logic [31:0]  data;       // [63:32]   write data / read data
    logic [31:0]  rsvd2;      // [31:0]
  } reg_pkt_t;

  // read request packet
  typedef struct packed {
    pkt_type_e    ptype;
    logic [215:0] rsvd;
    logic [31:0]  npackets;   // number of stored packets to send
  } rd_req_t;

  // stream beat (valid/ready travel separately)
  typedef struct packed {
    beat_t data;
    logic  last;
  } axis_t;

  // ---------------- AXI4-Lite, 32-bit ----------------
  parameter int unsigned AXIL_AW = 32;
  typedef struct packed {
    logic [AXIL_AW-1:0] aw_addr;
    logic               aw_valid;
    logic [31:0]        w_data;
    logic [3:0]         w_strb;
    logic               w_valid;
    logic               b_ready;
    logic [AXIL_AW-1:0] ar_addr;
    logic               ar_valid;
    logic               r_ready;
  } axil_req_t;

  typedef struct packed {
    logic        aw_ready;
    logic        w_ready;
    logic [1:0]  b_resp;
    logic        b_valid;
    logic        ar_ready;
    logic [31:0] r_data;
    logic [1:0]  r_resp;
    logic        r_valid;
  } axil_rsp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // ---------------- AXI4, 256-bit (DDR3 buffer) ----------------
  parameter int unsigned AXI_AW  = 32;
  parameter int unsigned AXI_IDW = 4;
  typedef struct packed {
    logic [AXI_IDW-1:0] aw_id;
    logic [AXI_AW-1:0]  aw_addr;
    logic [7:0]         aw_len;
    logic [2:0]         aw_size;
    logic [1:0]         aw_burst;
    logic               aw_valid;
    logic [BEAT_W-1:0]  w_data;
    logic [BEAT_W/8-1:0] w_strb;
    logic               w_last;
    logic               w_valid;
    logic               b_ready;
    logic [AXI_IDW-1:0] ar_id;
    logic [AXI_AW-1:0]  ar_addr;
    logic [7:0]         ar_len;
    logic [2:0]         ar_size;
    logic [1:0]         ar_burst;
    logic               ar_valid;
    logic               r_ready;
  } axi_req_t;

  typedef struct packed {
    logic               aw_ready;
    logic               w_ready;
    logic [AXI_IDW-1:0] b_id;
    logic [1:0]         b_resp;
    logic               b_valid;
    logic               ar_ready;
    logic [AXI_IDW-1:0] r_id;
    logic [BEAT_W-1:0]  r_data;
    logic [1:0]         r_resp;
    logic               r_last;
    logic               r_valid;
  } axi_rsp_t;

  localparam logic [2:0] AXI_SIZE_32B = 3'd5;
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;

  // ---------------- BBF statistics ----------------
  typedef struct packed {
    logic [31:0] seq;      // line number since reset
    logic [31:0] com;      // centre of mass, pixel index in Q8 (1/256 pixel)
    logic [31:0] spread;   // lateral spread (variance) in pixel^2, Q8
    logic [31:0] mean;     // mean pixel readout, Q8
  } stats_t;

endpackage
