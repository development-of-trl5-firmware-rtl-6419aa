// fine_downconverter: forms the 128 baseband channels of one SQUID from the 64 PFB
// subbands, one channel per clock, re-using one DDS and one pair of complex multipliers.
//
// As in the paper, for each channel the converter (1) reads the sample of the subband
// nearest the channel's frequency from the channelizer's bin buffer, (2) takes a DDS
// sample of the residual frequency, rotates it by the channel's phase and scales it by
// the channel's droop-compensation amplitude, and (3) multiplies the two:
//   y = sat24( ((X[bin] * exp(-j*(acc + phase))) >>> 17) * amp >>> 17 )
// where acc is the channel's 32-bit phase accumulator, advanced by `freq` once per frame
// (freq = residual frequency / 625 kHz * 2^32). The phase register holds the top 16 bits
// of a 32-bit phase; amp is unsigned Q1.17. These formats are this design's choices.
//
// Per-channel registers (addr[10:4] = channel): 0 bin (6 bits), 1 freq (32), 2 phase
// (16), 3 amp (18). Read back one clock after re.
//
// Timing: the clock edge that samples frame_stb starts a pass over the channels; channel
// c appears on `dout` (registered) c+1 clocks after that edge, so one frame's 128 samples
// occupy clocks 1..128 of the 320-clock frame. The bin buffer read is combinational.
module fine_downconverter
  import spa_pkg::*;
#(
  parameter int NCHAN_P = NCHAN
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 frame_stb,
  input  reg_req_t             req,
  input  logic                 req_sel,
  output logic [31:0]          rdata,
  output logic [SUB_AW-1:0]    rd_bin,
  input  cplx_t                rd_data,
  output chan_smp_t            dout
);
  localparam int CAW = $clog2(NCHAN_P);

  logic [SUB_AW-1:0] bin_r   [NCHAN_P];
  logic [31:0]       freq_r  [NCHAN_P];
  logic [15:0]       phase_r [NCHAN_P];
  logic [AMP_W-1:0]  amp_r   [NCHAN_P];
  logic [31:0]       acc     [NCHAN_P];

  logic [CAW-1:0] ch, rch;
  logic           run;

  assign rch = CAW'(req.addr[10:4]);

  always_ff @(posedge clk) begin
    rdata <= '0;
    if (req_sel && req.we)
      unique case (req.addr[3:0])
        4'd0: bin_r[rch]   <= SUB_AW'(req.wdata);
        4'd1: freq_r[rch]  <= req.wdata;
        4'd2: phase_r[rch] <= req.wdata[15:0];
        4'd3: amp_r[rch]   <= AMP_W'(req.wdata);
        default: ;
      endcase
    if (req_sel && req.re)
      unique case (req.addr[3:0])
        4'd0: rdata <= 32'(bin_r[rch]);
        4'd1: rdata <= freq_r[rch];
        4'd2: rdata <= 32'(phase_r[rch]);
        4'd3: rdata <= 32'(amp_r[rch]);
        default: ;
      endcase
  end

  logic [31:0] theta;
  logic signed [DDS_W-1:0] c, s;
  assign rd_bin = bin_r[ch];
  assign theta  = acc[ch] + {phase_r[ch], 16'h0};

  dds_lut u_dds (.phase(theta[31 -: DDS_LUT_AW]), .cos_o(c), .sin_o(s));

  // X * (c - j s), then scale by amp.
  logic signed [SAMPLE_W+DDS_W+1:0] mr, mi;
  logic signed [SAMPLE_W+1:0]       rr, ri;
  logic signed [SAMPLE_W+AMP_W+2:0] amp_re, amp_im;
  always_comb begin
    mr = (SAMPLE_W+DDS_W+2)'(rd_data.re) * c + (SAMPLE_W+DDS_W+2)'(rd_data.im) * s;
    mi = (SAMPLE_W+DDS_W+2)'(rd_data.im) * c - (SAMPLE_W+DDS_W+2)'(rd_data.re) * s;
    rr = (SAMPLE_W+2)'(mr >>> (DDS_W-1));
    ri = (SAMPLE_W+2)'(mi >>> (DDS_W-1));
    amp_re = (SAMPLE_W+AMP_W+3)'(rr) * $signed({1'b0, amp_r[ch]});
    amp_im = (SAMPLE_W+AMP_W+3)'(ri) * $signed({1'b0, amp_r[ch]});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      run <= 1'b0; ch <= '0; dout <= '0;
      for (int i = 0; i < NCHAN_P; i++) acc[i] <= '0;
    end else begin
      dout.valid <= 1'b0;
      if (frame_stb) begin
        run <= 1'b1;
        ch  <= '0;
      end else if (run) begin
        dout.valid <= 1'b1;
        dout.chan  <= ch;
        dout.d.re  <= sat_s(64'(amp_re >>> (AMP_W-1)));
        dout.d.im  <= sat_s(64'(amp_im >>> (AMP_W-1)));
        acc[ch]    <= acc[ch] + freq_r[ch];
        ch         <= ch + 1'b1;
        if (int'(ch) == NCHAN_P - 1) run <= 1'b0;
      end
    end
  end

endmodule
