// pfb_dechannelizer: coarse upconverter. 64 complex subbands at 625 ksps in, one real
// 20 MSPS DAC stream out. Two instances per signal path: carrier and nuller synthesis.
//
// The paper describes upconversion as the dual of the channelizer with a matched
// geometry: a bin buffer, an inverse FFT, a 256-tap window and upsampling by 32. This
// module is that dual; the window values and the output scaling are registers and a
// parameter of this design (the paper gives neither).
//
// Bin buffer: the fine upconverter adds each channel's contribution into subband `bin`
// during a frame (saturating 24-bit adds). At frame_stb the two halves swap: the half
// filled during the previous frame is frozen and transformed, the other is cleared.
//
// Algorithm, for block b (the bins frozen at frame strobe b):
//   u_b[p] = Re( sum_k (-1)^(k*b) B_b[k] * exp(+j*2*pi*k*p/64) )            p = 0..63
//   y[32b' + r] = sum_{m=0..7} h[r + 32m] * u_{b'-1-m}[(r + 32m) mod 64]
//                 >>> (17 + OUT_SHIFT), saturated to 16 bits                 r = 0..31
// i.e. each block's transform, periodically extended to the window length, is windowed
// and overlap-added with a hop of 32 samples. A constant B[k] gives a tone at k*fs/64.
//
// Timing: after frame_stb the transform input is loaded in 64 clocks, the FFT runs 192
// and the real parts are copied into a 9-block history in 32 (two per clock). Samples of
// block b are output during frame b+1, one per samp_stb; dac_out changes on samp_stb.
// Latency from the frame in which the bins are filled to the first DAC sample is thus two
// frame strobes.
module pfb_dechannelizer
  import spa_pkg::*;
#(
  parameter int NSUB_P    = NSUB,
  parameter int NTAPS_P   = NTAPS,
  parameter int INTERP    = DEC,
  parameter int OUT_SHIFT = 10
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     samp_stb,
  input  logic                     frame_stb,
  input  bin_smp_t                 bin_in,
  input  reg_req_t                 req,
  input  logic                     req_sel,
  output logic [31:0]              rdata,
  output logic signed [DAC_W-1:0]  dac_out,
  output logic                     blk_done
);
  localparam int SAW   = $clog2(NSUB_P);
  localparam int NOV   = NTAPS_P / INTERP;       // overlapping blocks per output sample
  localparam int NH    = NOV + 1;                // history slots (one being written)
  localparam int HAW   = $clog2(NH);
  localparam int FDW   = 32;
  localparam int RW    = $clog2(INTERP);

  logic signed [COEF_W-1:0] coef [NTAPS_P];
  cplx_t                    binacc [2][NSUB_P];
  logic                     acc_side;
  logic signed [FDW-1:0]    hist [NH][NSUB_P];
  logic [HAW-1:0]           wslot, newest;
  logic                     bpar;
  logic [RW-1:0]            r;

  typedef enum logic [1:0] {IDLE, LOAD, FFT, COPY} st_e;
  st_e st;
  logic [SAW-1:0] p;

  always_ff @(posedge clk) begin
    rdata <= '0;
    if (req_sel && req.we) coef[req.addr[$clog2(NTAPS_P)-1:0]] <= COEF_W'(req.wdata);
    if (req_sel && req.re) rdata <= 32'(signed'(coef[req.addr[$clog2(NTAPS_P)-1:0]]));
  end

  // Transform input: frozen half, odd subbands negated in odd blocks.
  cplx_t                 bsel;
  logic signed [FDW-1:0] ld_re, ld_im;
  always_comb begin
    bsel  = binacc[~acc_side][p];
    ld_re = FDW'(bsel.re);
    ld_im = FDW'(bsel.im);
    if (p[0] && bpar) begin ld_re = -ld_re; ld_im = -ld_im; end
  end

  logic fft_start, fft_busy, fft_done;
  logic [SAW-1:0] ra, rb;
  logic signed [FDW-1:0] a_re, a_im, b_re, b_im;

  fft64 #(.N(NSUB_P), .DW(FDW)) u_fft (
    .clk, .rst, .inverse(1'b1),
    .load_we(st == LOAD), .load_addr(p), .load_re(ld_re), .load_im(ld_im),
    .start(fft_start), .busy(fft_busy), .done(fft_done),
    .rd_addr(ra), .rd_re(a_re), .rd_im(a_im),
    .rd2_addr(rb), .rd2_re(b_re), .rd2_im(b_im)
  );
  assign ra = {p[SAW-2:0], 1'b0};
  assign rb = {p[SAW-2:0], 1'b1};

  // Overlap-add of NOV windowed blocks for output sample rr, newest block in slot ns.
  function automatic logic signed [DAC_W-1:0] synth(input logic [HAW-1:0] ns, input logic [RW-1:0] rr);
    logic signed [FDW+COEF_W+7:0] s;
    logic signed [FDW+COEF_W+7:0] v;
    int slot, tap;
    s = '0;
    for (int m = 0; m < NOV; m++) begin
      slot = (int'(ns) - m + NH) % NH;
      tap  = int'(rr) + INTERP * m;
      s += (FDW+COEF_W+8)'(coef[tap]) * (FDW+COEF_W+8)'(hist[slot][tap % NSUB_P]);
    end
    v = s >>> (COEF_FRAC + OUT_SHIFT);
    if (v > (FDW+COEF_W+8)'(2**(DAC_W-1) - 1)) return DAC_W'(2**(DAC_W-1) - 1);
    if (v < -(FDW+COEF_W+8)'(2**(DAC_W-1)))    return DAC_W'(-(2**(DAC_W-1)));
    return DAC_W'(v);
  endfunction

  logic [HAW-1:0] done_slot;     // slot of the last completed block

  always_ff @(posedge clk) begin
    fft_start <= 1'b0;
    blk_done  <= 1'b0;
    if (rst) begin
      acc_side <= 1'b0; st <= IDLE; p <= '0; wslot <= '0; newest <= '0; done_slot <= '0;
      bpar <= 1'b1; r <= '0; dac_out <= '0;
      for (int s = 0; s < 2; s++)
        for (int k = 0; k < NSUB_P; k++) binacc[s][k] <= '0;
      for (int s = 0; s < NH; s++)
        for (int k = 0; k < NSUB_P; k++) hist[s][k] <= '0;
    end else begin
      // DAC output
      if (frame_stb) begin
        newest  <= done_slot;
        dac_out <= synth(done_slot, '0);
        r       <= RW'(1);
      end else if (samp_stb) begin
        dac_out <= synth(newest, r);
        r       <= r + 1'b1;
      end
      // bin buffer
      if (frame_stb) begin
        acc_side <= ~acc_side;
        for (int k = 0; k < NSUB_P; k++) binacc[~acc_side][k] <= '0;
        bpar <= ~bpar;
        st   <= LOAD;
        p    <= '0;
      end else begin
        if (bin_in.valid) begin
          binacc[acc_side][bin_in.bin].re <= sat_s(64'(binacc[acc_side][bin_in.bin].re) + 64'(bin_in.d.re));
          binacc[acc_side][bin_in.bin].im <= sat_s(64'(binacc[acc_side][bin_in.bin].im) + 64'(bin_in.d.im));
        end
        unique case (st)
          LOAD: begin
            p <= p + 1'b1;
            if (p == '1) begin st <= FFT; fft_start <= 1'b1; end
          end
          FFT: if (fft_done) begin st <= COPY; p <= '0; end
          COPY: begin
            hist[wslot][ra] <= a_re;
            hist[wslot][rb] <= b_re;
            p <= p + 1'b1;
            if (int'(p) == NSUB_P/2 - 1) begin
              st        <= IDLE;
              blk_done  <= 1'b1;
              done_slot <= wslot;
              wslot     <= (int'(wslot) == NH - 1) ? '0 : wslot + 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
