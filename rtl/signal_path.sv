// signal_path: everything that serves one SQUID: tone synthesis for the carrier and nuller
// DACs, channelization and demodulation of the ADC input, the two feedback controllers,
// the readout decimators and the science packetizer. The SPA has one per SQUID.
//
// The structure follows the paper's baseband block diagram:
//   ADC -> PFB channelizer -> fine downconverter -> demodulated stream (d)
//   d -> carrier controller -> carrier stream (c) -> fine upconverter -> PFB synthesis
//        -> carrier DAC
//   {d, c} -> nuller-source mux -> nuller controller -> nuller stream (n)
//        -> fine upconverter -> PFB synthesis -> nuller DAC
//   {d, c, n} -> readout mux -> CIC1 (3 stages, /64) -> CIC2 (6 stages, /64)
//        -> packetizer -> link
// plus a capture buffer for diagnostics. The paper's text calls the first mux the source
// of the carrier controller; its figure draws it in front of the controller that drives
// the nuller DAC. This design follows the figure: the carrier controller always sees the
// demodulated stream, and the mux selects what the nuller controller sees.
//
// All baseband streams are time-multiplexed: channel c of a frame appears as one
// chan_smp_t beat a few clocks after frame_stb, in channel order, once per 320-clock
// frame. The muxes are registered so that every selected stream has one extra clock of
// latency; the synthesis bin buffers accept contributions until the next frame_stb.
//
// Register space (addr[23] = 1 and addr[22:19] = path_id select this path; addr[18:15]
// selects the sub-block, see subblock_e in spa_pkg). Path control (SB_PATH):
//   0 nuller source   (0 demodulated, 1 carrier-controller output)
//   1 readout source  (0 demodulated, 1 carrier, 2 nuller)
//   2 packetizer overflow count (read only)
// Every sub-block answers one clock after re; the answers are OR-ed.
module signal_path
  import spa_pkg::*;
#(
  parameter int NCHAN_P = NCHAN,
  parameter int NSUB_P  = NSUB,
  parameter int NTAPS_P = NTAPS,
  parameter int CIC1_R  = 64,
  parameter int CIC2_R  = 64,
  parameter int CAP_DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [3:0]               path_id,
  input  logic                     samp_stb,
  input  logic                     frame_stb,
  input  logic [TS_W-1:0]          timestamp,
  input  logic signed [ADC_W-1:0]  adc_in,
  output logic signed [DAC_W-1:0]  dac_carrier,
  output logic signed [DAC_W-1:0]  dac_nuller,
  input  reg_req_t                 req,
  output logic [31:0]              rdata,
  output logic                     sci_valid,
  output logic [31:0]              sci_data,
  output logic                     sci_last,
  input  logic                     sci_ready
);
  localparam int CAW = $clog2(NCHAN_P);

  // ---------------- register decode ----------------
  logic        psel;
  logic [15:0] sel;
  assign psel = req.addr[23] && (req.addr[22:19] == path_id);
  always_comb begin
    sel = '0;
    if (psel) sel[req.addr[18:15]] = 1'b1;
  end

  logic [31:0] rd_ch, rd_fd, rd_fuc, rd_fun, rd_cc, rd_cn, rd_dcc, rd_dcn, rd_cap, rd_path;
  assign rdata = rd_ch | rd_fd | rd_fuc | rd_fun | rd_cc | rd_cn | rd_dcc | rd_dcn | rd_cap | rd_path;

  logic        nsrc;
  logic [1:0]  rsrc;
  logic [15:0] ovf;
  always_ff @(posedge clk) begin
    rd_path <= '0;
    if (rst) begin
      nsrc <= 1'b0;
      rsrc <= '0;
    end else begin
      if (sel[SB_PATH] && req.we) begin
        if (req.addr[3:0] == 4'd0) nsrc <= req.wdata[0];
        if (req.addr[3:0] == 4'd1) rsrc <= req.wdata[1:0];
      end
      if (sel[SB_PATH] && req.re)
        unique case (req.addr[3:0])
          4'd0: rd_path <= 32'(nsrc);
          4'd1: rd_path <= 32'(rsrc);
          4'd2: rd_path <= 32'(ovf);
          default: ;
        endcase
    end
  end

  // ---------------- analysis ----------------
  logic [$clog2(NSUB_P)-1:0] rd_bin;
  cplx_t                     rd_bin_data;
  logic                      ch_done;
  pfb_channelizer #(.NSUB_P(NSUB_P), .NTAPS_P(NTAPS_P)) u_chan (
    .clk, .rst, .samp_stb, .frame_stb, .adc_in,
    .req, .req_sel(sel[SB_CHANNELIZER]), .rdata(rd_ch),
    .rd_bin, .rd_data(rd_bin_data), .blk_done(ch_done)
  );

  chan_smp_t demod, carrier, nuller, n_in, ro;
  fine_downconverter #(.NCHAN_P(NCHAN_P)) u_fdown (
    .clk, .rst, .frame_stb, .req, .req_sel(sel[SB_FINE_DOWN]), .rdata(rd_fd),
    .rd_bin, .rd_data(rd_bin_data), .dout(demod)
  );

  // ---------------- feedback ----------------
  feedback_controller #(.NCHAN_P(NCHAN_P)) u_ctrl_c (
    .clk, .rst, .req, .req_sel(sel[SB_CTRL_C]), .rdata(rd_cc), .din(demod), .dout(carrier)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      n_in <= '0;
      ro   <= '0;
    end else begin
      n_in <= nsrc ? carrier : demod;
      unique case (rsrc)
        2'd1:    ro <= carrier;
        2'd2:    ro <= nuller;
        default: ro <= demod;
      endcase
    end
  end

  feedback_controller #(.NCHAN_P(NCHAN_P)) u_ctrl_n (
    .clk, .rst, .req, .req_sel(sel[SB_CTRL_N]), .rdata(rd_cn), .din(n_in), .dout(nuller)
  );

  // ---------------- synthesis ----------------
  bin_smp_t cbin, nbin;
  logic     dcc_done, dcn_done;
  fine_upconverter #(.NCHAN_P(NCHAN_P)) u_fup_c (
    .clk, .rst, .req, .req_sel(sel[SB_FINE_UP_C]), .rdata(rd_fuc), .din(carrier), .dout(cbin)
  );
  fine_upconverter #(.NCHAN_P(NCHAN_P)) u_fup_n (
    .clk, .rst, .req, .req_sel(sel[SB_FINE_UP_N]), .rdata(rd_fun), .din(nuller), .dout(nbin)
  );
  pfb_dechannelizer #(.NSUB_P(NSUB_P), .NTAPS_P(NTAPS_P)) u_dechan_c (
    .clk, .rst, .samp_stb, .frame_stb, .bin_in(cbin),
    .req, .req_sel(sel[SB_DECHAN_C]), .rdata(rd_dcc), .dac_out(dac_carrier), .blk_done(dcc_done)
  );
  pfb_dechannelizer #(.NSUB_P(NSUB_P), .NTAPS_P(NTAPS_P)) u_dechan_n (
    .clk, .rst, .samp_stb, .frame_stb, .bin_in(nbin),
    .req, .req_sel(sel[SB_DECHAN_N]), .rdata(rd_dcn), .dac_out(dac_nuller), .blk_done(dcn_done)
  );

  // ---------------- readout ----------------
  logic                      c1_v, c2_v;
  logic [CAW-1:0]            c1_ch, c2_ch;
  logic signed [SCI_W-1:0]   c1_re, c1_im, c2_re, c2_im;
  cic_tdm #(.NCHAN_P(NCHAN_P), .STAGES(3), .R(CIC1_R), .IN_W(SAMPLE_W), .OUT_W(SCI_W)) u_cic1 (
    .clk, .rst, .in_valid(ro.valid), .in_chan(ro.chan), .in_re(ro.d.re), .in_im(ro.d.im),
    .out_valid(c1_v), .out_chan(c1_ch), .out_re(c1_re), .out_im(c1_im)
  );
  cic_tdm #(.NCHAN_P(NCHAN_P), .STAGES(6), .R(CIC2_R), .IN_W(SCI_W), .OUT_W(SCI_W)) u_cic2 (
    .clk, .rst, .in_valid(c1_v), .in_chan(c1_ch), .in_re(c1_re), .in_im(c1_im),
    .out_valid(c2_v), .out_chan(c2_ch), .out_re(c2_re), .out_im(c2_im)
  );
  packetizer #(.NCHAN_P(NCHAN_P), .W(SCI_W)) u_pkt (
    .clk, .rst, .path_id, .timestamp,
    .in_valid(c2_v), .in_chan(c2_ch), .in_re(c2_re), .in_im(c2_im),
    .out_valid(sci_valid), .out_data(sci_data), .out_last(sci_last), .out_ready(sci_ready),
    .overflow_cnt(ovf)
  );

  // ---------------- diagnostics ----------------
  capture_buffer #(.DEPTH(CAP_DEPTH), .NCHAN_P(NCHAN_P)) u_cap (
    .clk, .rst, .samp_stb, .adc(adc_in), .dac_c(dac_carrier), .dac_n(dac_nuller),
    .demod, .carrier, .nuller, .req, .req_sel(sel[SB_CAPTURE]), .rdata(rd_cap)
  );

endmodule
