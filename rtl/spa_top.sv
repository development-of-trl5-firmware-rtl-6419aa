// spa_top: the signal-processing firmware of one SPU (SQUID and bolometer readout unit):
// NSQUID signal paths, each reading out up to NCHAN frequency-multiplexed bolometers,
// with timekeeping, the DPU link and the low-speed control of the connected assemblies.
//
// Structure (the split into blocks follows the paper; the register map is this design's):
//   timekeeping       48-bit timestamp on the 10 MHz master tick, sync handling, the
//                     20 MSPS sample strobe and 625 ksps frame strobe, datapath reset
//   signal_path x16   one per SQUID: ADC in, carrier and nuller DAC out, science stream
//   link_serdes       8b/10b, 50 Mbps serial link with source-synchronous 25 MHz clocks
//   control_interface enclosure parsing, register bus master, response and science
//                     arbitration onto the link
//   spi_master x2     detector assembly (DA) and SQUID controller assembly (SCA)
// The 200 MHz clock comes from a PLL (not part of this RTL) locked to the DPU's 10 MHz
// master clock; the ADC/DAC physical interfaces are outside too: adc_in and the DAC
// outputs are parallel samples, valid on every samp_stb (one per 10 clocks).
//
// Global registers (addr[23] = 0, addr[7:0]): 0x00..0x04 timekeeping (see timekeeping),
// 0x08 bad-enclosure count, 0x09 dropped-response count, 0x0A request count,
// 0x10..0x13 DA SPI master, 0x14..0x17 SCA SPI master, 0xFF identification word.
// The signal paths are held in reset from power-up until the first sync event.
module spa_top
  import spa_pkg::*;
#(
  parameter int NSQUID_P = NSQUID,
  parameter int NCHAN_P  = NCHAN,
  parameter int NSUB_P   = NSUB,
  parameter int NTAPS_P  = NTAPS,
  parameter int CIC1_R   = 64,
  parameter int CIC2_R   = 64,
  parameter int CLK_PER_BIT = 4,
  parameter int CAP_DEPTH  = 1024
) (
  input  logic                     clk,            // 200 MHz
  input  logic                     rst,
  input  logic                     sync_in,        // sync strobe from the DPU
  input  logic signed [ADC_W-1:0]  adc_in      [NSQUID_P],
  output logic signed [DAC_W-1:0]  dac_carrier [NSQUID_P],
  output logic signed [DAC_W-1:0]  dac_nuller  [NSQUID_P],
  output logic                     samp_stb,       // DAC update / ADC sample strobe
  output logic                     link_tx_clk,
  output logic                     link_tx_data,
  input  logic                     link_rx_clk,
  input  logic                     link_rx_data,
  output logic                     da_sclk,
  output logic                     da_mosi,
  input  logic                     da_miso,
  output logic [3:0]               da_cs_n,
  output logic                     sca_sclk,
  output logic                     sca_mosi,
  input  logic                     sca_miso,
  output logic [3:0]               sca_cs_n
);
  localparam logic [31:0] ID_WORD = 32'h5350_4101;  // "SPA", revision 1

  reg_req_t        req;
  logic [31:0]     rdata, rd_tk, rd_da, rd_sca, rd_glob;
  logic [31:0]     rd_path [NSQUID_P];
  logic [TS_W-1:0] timestamp;
  logic            master_tick, dp_rst, frame_stb;

  logic gsel;
  assign gsel = !req.addr[23];

  timekeeping u_tk (
    .clk, .rst, .sync_in, .req, .req_sel(gsel && req.addr[7:3] == 5'b0), .rdata(rd_tk),
    .timestamp, .master_tick, .dp_rst, .samp_stb, .frame_stb
  );

  // ---------------- signal paths ----------------
  logic [NSQUID_P-1:0] s_valid, s_last, s_ready;
  logic [31:0]         s_data [NSQUID_P];
  logic                path_rst;
  assign path_rst = rst || dp_rst;

  for (genvar i = 0; i < NSQUID_P; i++) begin : g_path
    signal_path #(
      .NCHAN_P(NCHAN_P), .NSUB_P(NSUB_P), .NTAPS_P(NTAPS_P), .CIC1_R(CIC1_R), .CIC2_R(CIC2_R),
      .CAP_DEPTH(CAP_DEPTH)
    ) u_path (
      .clk, .rst(path_rst), .path_id(4'(i)), .samp_stb, .frame_stb, .timestamp,
      .adc_in(adc_in[i]), .dac_carrier(dac_carrier[i]), .dac_nuller(dac_nuller[i]),
      .req, .rdata(rd_path[i]),
      .sci_valid(s_valid[i]), .sci_data(s_data[i]), .sci_last(s_last[i]), .sci_ready(s_ready[i])
    );
  end

  // ---------------- link ----------------
  logic       tx_valid, tx_k, tx_take, rx_valid, rx_k, rx_err, rx_aligned, rx_idle;
  logic [7:0] tx_data, rx_data;
  link_serdes #(.CLK_PER_BIT(CLK_PER_BIT)) u_link (
    .clk, .rst, .tx_valid, .tx_k, .tx_data, .tx_take,
    .tx_clk_o(link_tx_clk), .tx_data_o(link_tx_data),
    .rx_clk_i(link_rx_clk), .rx_data_i(link_rx_data),
    .rx_valid, .rx_k, .rx_data, .rx_err, .rx_aligned, .rx_idle
  );

  logic [15:0] bad_cnt, drop_cnt, req_cnt;
  control_interface #(.NSRC(NSQUID_P)) u_ctl (
    .clk, .rst, .rx_valid, .rx_k, .rx_data, .rx_err,
    .tx_valid, .tx_k, .tx_data, .tx_take,
    .req, .rdata,
    .s_valid, .s_data, .s_last, .s_ready,
    .bad_cnt, .drop_cnt, .req_cnt
  );

  // ---------------- assemblies ----------------
  spi_master #(.NCS(4)) u_spi_da (
    .clk, .rst, .req, .req_sel(gsel && req.addr[7:2] == G_SPI_DA_BASE[7:2]), .rdata(rd_da),
    .sclk(da_sclk), .mosi(da_mosi), .miso(da_miso), .cs_n(da_cs_n)
  );
  spi_master #(.NCS(4)) u_spi_sca (
    .clk, .rst, .req, .req_sel(gsel && req.addr[7:2] == G_SPI_SCA_BASE[7:2]), .rdata(rd_sca),
    .sclk(sca_sclk), .mosi(sca_mosi), .miso(sca_miso), .cs_n(sca_cs_n)
  );

  // ---------------- global status registers and read-data bus ----------------
  always_ff @(posedge clk) begin
    rd_glob <= '0;
    if (gsel && req.re)
      unique case (req.addr[7:0])
        8'h08:   rd_glob <= 32'(bad_cnt);
        8'h09:   rd_glob <= 32'(drop_cnt);
        8'h0A:   rd_glob <= 32'(req_cnt);
        G_ID:    rd_glob <= ID_WORD;
        default: ;
      endcase
  end

  always_comb begin
    rdata = rd_tk | rd_da | rd_sca | rd_glob;
    for (int i = 0; i < NSQUID_P; i++) rdata |= rd_path[i];
  end

endmodule
