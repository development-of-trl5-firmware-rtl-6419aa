// spa_pkg: constants, types and register map shared by the SPA signal-processing firmware.
//
// The whole design runs on one 200 MHz clock. The 20 MSPS converter rate and the
// 625 ksps subband/baseband rate are clock enables ("strobes"): one ADC/DAC sample every
// CLK_PER_SAMP = 10 clocks and one baseband frame (one sample of every subband and every
// channel) every DEC = 32 samples, i.e. every 320 clocks. The sizes (16 SQUIDs, 128
// channels, 64 subbands, 24-bit I/Q, 16-bit converters, 48-bit timestamps) follow the
// paper; the register map, packet layout and fixed-point formats are this design's own.
//
// Register bus: a single master (the control interface) issues reg_req_t; every slave
// answers a read one clock after `re` with its data on an OR-combined rdata bus (0 when
// the address is not its own). Addresses are 24-bit word addresses:
//   addr[23] = 0 : global registers (timekeeping, SPI masters), addr[7:0] selects
//   addr[23] = 1 : signal path addr[22:19], sub-block addr[18:15], channel addr[10:4],
//                  parameter addr[3:0]  (window taps: tap index addr[7:0])
package spa_pkg;

  localparam int NSQUID       = 16;   // signal paths per SPA
  localparam int NCHAN        = 128;  // bolometer channels per SQUID
  localparam int NSUB         = 64;   // PFB subbands
  localparam int DEC          = 32;   // PFB decimation (2x oversampled)
  localparam int NTAPS        = 256;  // PFB window length before polyphase decomposition
  localparam int CLK_PER_SAMP = 10;   // 200 MHz / 20 MSPS
  localparam int ADC_W        = 16;
  localparam int DAC_W        = 16;
  localparam int SAMPLE_W     = 24;   // baseband I/Q sample width
  localparam int SCI_W        = 32;   // science (CIC output) word width
  localparam int TS_W         = 48;   // timestamp width
  localparam int COEF_W       = 18;   // window coefficient, Q1.17
  localparam int COEF_FRAC    = 17;
  localparam int GAIN_W       = 18;   // controller complex gain
  localparam int GAIN_FRAC    = 12;   // controller gain is Q6.12
  localparam int DDS_LUT_AW   = 10;   // DDS sine table: 1024 points
  localparam int DDS_W        = 18;   // DDS sample, Q1.17
  localparam int AMP_W        = 18;   // droop/amplitude scale, unsigned Q1.17

  localparam int CHAN_AW      = $clog2(NCHAN);
  localparam int SUB_AW       = $clog2(NSUB);

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] re;
    logic signed [SAMPLE_W-1:0] im;
  } cplx_t;

  // One time-multiplexed baseband sample: channel `chan` of the current frame.
  typedef struct packed {
    logic                 valid;
    logic [CHAN_AW-1:0]   chan;
    cplx_t                d;
  } chan_smp_t;

  // Fine upconverter output: a contribution to subband `bin` of the synthesis bin buffer.
  typedef struct packed {
    logic                 valid;
    logic [SUB_AW-1:0]    bin;
    cplx_t                d;
  } bin_smp_t;

  typedef struct packed {
    logic        we;
    logic        re;
    logic [23:0] addr;
    logic [31:0] wdata;
  } reg_req_t;

  // Sub-block numbers inside a signal path (addr[18:15]).
  typedef enum logic [3:0] {
    SB_CHANNELIZER = 4'd0,  // window taps
    SB_FINE_DOWN   = 4'd1,  // per channel: 0 bin, 1 freq, 2 phase, 3 amplitude
    SB_FINE_UP_C   = 4'd2,  // carrier fine upconverter, same layout
    SB_FINE_UP_N   = 4'd3,  // nuller fine upconverter, same layout
    SB_CTRL_C      = 4'd4,  // carrier controller: 0 gain re, 1 gain im, 2 mode, 3 sat, 4 off re, 5 off im
    SB_CTRL_N      = 4'd5,  // nuller controller, same layout
    SB_DECHAN_C    = 4'd6,  // carrier dechannelizer window taps
    SB_DECHAN_N    = 4'd7,  // nuller dechannelizer window taps
    SB_PATH        = 4'd8,  // path control: 0 nuller source, 1 readout source
    SB_CAPTURE     = 4'd9   // capture buffer
  } subblock_e;

  // Global registers (addr[23] = 0, addr[7:0]).
  localparam logic [7:0] G_TS_PRESET_LO = 8'h00;
  localparam logic [7:0] G_TS_PRESET_HI = 8'h01;
  localparam logic [7:0] G_TS_NOW_LO    = 8'h02;
  localparam logic [7:0] G_TS_NOW_HI    = 8'h03;
  localparam logic [7:0] G_SYNC_CTRL    = 8'h04;  // bit0 arm, bit1 hold datapaths in reset
  localparam logic [7:0] G_SPI_DA_BASE  = 8'h10;  // 0 ctrl, 1 tx data / start, 2 rx data
  localparam logic [7:0] G_SPI_SCA_BASE = 8'h14;
  localparam logic [7:0] G_ID           = 8'hFF;

  // Enclosure (packet) types; a response carries the request type with bit 7 set.
  localparam logic [7:0] ENC_WRITE   = 8'h01;
  localparam logic [7:0] ENC_READ    = 8'h02;
  localparam logic [7:0] ENC_SCIENCE = 8'h10;
  localparam logic [7:0] ENC_RESP    = 8'h80;

  // 8b/10b control characters used for framing.
  localparam logic [7:0] K28_5 = 8'hBC;  // comma / idle
  localparam logic [7:0] K27_7 = 8'hFB;  // start of enclosure
  localparam logic [7:0] K29_7 = 8'hFD;  // end of enclosure

  function automatic logic signed [SAMPLE_W-1:0] sat_s(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (SAMPLE_W-1)) - 1;
    localparam logic signed [63:0] MINV = -(64'sd1 <<< (SAMPLE_W-1));
    if (v > MAXV) return SAMPLE_W'(MAXV);
    if (v < MINV) return SAMPLE_W'(MINV);
    return SAMPLE_W'(v);
  endfunction

endpackage
