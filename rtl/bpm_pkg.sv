// bpm_pkg: types and constants shared by the BPM signal-processing modules.
// The data-path sizes follow the FPGA diagram of the design: 8 ADC channels,
// each delivering 64 bits (four 16-bit samples of the 250 MSPS ADC) per
// 62.5 MHz clock, 512-bit packing words and a 512-bit packet header.
// The header field layout, the AXI4-Lite struct bundles and the register map
// are choices of this implementation; the text only lists the header contents
// (device ID, event ID, time tag, packet size, attributes, diagnostics).
package bpm_pkg;

  localparam int unsigned NCH    = 8;    // ADC channels per AMC/RTM pair
  localparam int unsigned SPC    = 4;    // samples per channel per clock
  localparam int unsigned ADC_W  = 16;   // ADS42JB69 sample width
  localparam int unsigned MIX_W  = 18;   // mixer output width
  localparam int unsigned IQ_W   = 32;   // decimated I or Q width
  localparam int unsigned WORD_W = 512;  // packing word and header width
  localparam int unsigned COEF_W = 16;   // FIR coefficient width (Q1.15)

  // 162.5 MHz RF over 250 MSPS = 0.65 cycle per sample, in 2^-32 cycles.
  localparam logic [31:0] PHASE_INC_162M5 = 32'd2791728742;

  typedef logic signed [ADC_W-1:0] adc_t;
  typedef logic signed [MIX_W-1:0] mix_t;
  typedef logic signed [IQ_W-1:0]  iq_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  typedef enum logic [7:0] {
    DT_IQ  = 8'h01,   // decimated I/Q packet
    DT_RAW = 8'h02    // raw ADC packet
  } data_type_e;

  localparam logic [15:0] HDR_MAGIC = 16'hB9B9;

  // 512-bit packet header, first word of every packet.
  typedef struct packed {
    logic [15:0]  magic;
    logic [15:0]  device_id;
    data_type_e   data_type;
    logic [7:0]   attr;          // decimation ratio of the I/Q path
    logic [15:0]  reserved0;
    logic [31:0]  event_id;
    logic [31:0]  time_sec;      // seconds, from broadcast time and PPS
    logic [31:0]  time_ticks;    // clock ticks since the last PPS
    logic [31:0]  event_size;    // payload words after the header
    logic [31:0]  config_word;   // NCO phase increment
    logic [31:0]  diag;          // dropped-packet count
    logic [127:0] cal_phase;     // 8 x 16-bit reference phases (self-calibration)
    logic [127:0] reserved1;
  } pkt_header_t;

  // One event from the time tagger.
  typedef struct packed {
    logic [31:0] event_id;
    logic [31:0] time_sec;
    logic [31:0] time_ticks;
  } event_tag_t;

  // AXI4-Lite, split into the manager-driven and subordinate-driven halves.
  typedef struct packed {
    logic [31:0] awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [31:0] araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rvalid;
  } axil_rsp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // Application register byte offsets (app_regs).
  localparam logic [7:0] REG_ID        = 8'h00;
  localparam logic [7:0] REG_CTRL      = 8'h04; // [0] stream_sel [1] capture(pulse) [2] ddc_sync(pulse) [3] autocal_en [4] autocal_force(pulse) [5] comp_en
  localparam logic [7:0] REG_PHASE_INC = 8'h08;
  localparam logic [7:0] REG_RATIO     = 8'h0C;
  localparam logic [7:0] REG_IQ_LEN    = 8'h10;
  localparam logic [7:0] REG_RAW_LEN   = 8'h14;
  localparam logic [7:0] REG_DEV_ID    = 8'h18;
  localparam logic [7:0] REG_CAL_TSH   = 8'h1C;
  localparam logic [7:0] REG_STATUS    = 8'h20; // RO: [15:0] iq drops, [31:16] calibrations
  localparam logic [7:0] REG_TEMP      = 8'h24; // RO: temperature reading
  localparam logic [7:0] REG_FIR0      = 8'h40; // 8 taps, 0x40..0x5C

endpackage
