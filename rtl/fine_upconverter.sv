// fine_upconverter: the dual of the fine downconverter. Each channel's baseband sample
// is multiplied by a DDS sample of the channel's residual frequency, rotated by its phase
// and scaled by its droop-compensation amplitude, and contributes to one PFB subband:
//   out = sat24( ((d * exp(+j*(acc + phase))) >>> 17) * amp >>> 17 )  into subband `bin`.
// Contributions of channels that share a subband are summed in the dechannelizer's bin
// buffer. acc is the channel's 32-bit phase accumulator, advanced by `freq` each time the
// channel's sample passes (once per frame). Two instances: carrier and nuller synthesis.
//
// Per-channel registers (addr[10:4] = channel): 0 bin, 1 freq, 2 phase (top 16 bits of a
// 32-bit phase), 3 amp (unsigned Q1.17), as in the downconverter. Formats are this
// design's choices; the structure follows the paper.
//
// Timing: one channel sample in per clock on `din`; its contribution appears on `dout`
// one clock later (registered).
module fine_upconverter
  import spa_pkg::*;
#(
  parameter int NCHAN_P = NCHAN
) (
  input  logic                 clk,
  input  logic                 rst,
  input  reg_req_t             req,
  input  logic                 req_sel,
  output logic [31:0]          rdata,
  input  chan_smp_t            din,
  output bin_smp_t             dout
);
  localparam int CAW = $clog2(NCHAN_P);

  logic [SUB_AW-1:0] bin_r   [NCHAN_P];
  logic [31:0]       freq_r  [NCHAN_P];
  logic [15:0]       phase_r [NCHAN_P];
  logic [AMP_W-1:0]  amp_r   [NCHAN_P];
  logic [31:0]       acc     [NCHAN_P];

  logic [CAW-1:0] rch, ch;
  assign rch = CAW'(req.addr[10:4]);
  assign ch  = CAW'(din.chan);

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
  assign theta = acc[ch] + {phase_r[ch], 16'h0};
  dds_lut u_dds (.phase(theta[31 -: DDS_LUT_AW]), .cos_o(c), .sin_o(s));

  // d * (c + j s), then scale by amp.
  logic signed [SAMPLE_W+DDS_W+1:0] mr, mi;
  logic signed [SAMPLE_W+1:0]       rr, ri;
  logic signed [SAMPLE_W+AMP_W+2:0] amp_re, amp_im;
  always_comb begin
    mr = (SAMPLE_W+DDS_W+2)'(din.d.re) * c - (SAMPLE_W+DDS_W+2)'(din.d.im) * s;
    mi = (SAMPLE_W+DDS_W+2)'(din.d.im) * c + (SAMPLE_W+DDS_W+2)'(din.d.re) * s;
    rr = (SAMPLE_W+2)'(mr >>> (DDS_W-1));
    ri = (SAMPLE_W+2)'(mi >>> (DDS_W-1));
    amp_re = (SAMPLE_W+AMP_W+3)'(rr) * $signed({1'b0, amp_r[ch]});
    amp_im = (SAMPLE_W+AMP_W+3)'(ri) * $signed({1'b0, amp_r[ch]});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dout <= '0;
      for (int i = 0; i < NCHAN_P; i++) acc[i] <= '0;
    end else begin
      dout.valid <= din.valid;
      if (din.valid) begin
        dout.bin  <= bin_r[ch];
        dout.d.re <= sat_s(64'(amp_re >>> (AMP_W-1)));
        dout.d.im <= sat_s(64'(amp_im >>> (AMP_W-1)));
        acc[ch]   <= acc[ch] + freq_r[ch];
      end
    end
  end

endmodule
