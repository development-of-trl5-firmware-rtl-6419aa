// pfb_channelizer: coarse downconverter. 20 MSPS real ADC samples in, 64 complex
// subbands at 625 ksps out, through a double-buffered bin buffer.
//
// Follows the paper: 64 subbands centred on multiples of fs/64 (312.5 kHz), 2x
// oversampled (a new block every DEC = 32 input samples), a 256-tap band-defining window
// before polyphase decomposition, an FFT, and a bin buffer that separates the PFB's timing
// from the baseband path. The window values are not in the paper (it gives the design
// rule: Dolph-Chebyshev, 100 dB stopband, 256 taps); here they are registers written
// through the register bus as Q1.17 numbers.
//
// Algorithm, for the block b that ends with input sample x[t]:
//   u[p]  = sum_{m=0..3} h[p + 64m] * x[t - p - 64m]  >>> 17        (p = 0..63)
//   X[k]  = (-1)^(k*b) * sum_p u[p] * exp(+j*2*pi*k*p/64)             (k = 0..63)
// The kernel sign puts a tone at +k*fs/64 in subband k; the (-1)^(k*b) factor removes the
// rotation a hop of half the FFT length causes in odd subbands, so that a tone at a
// subband centre gives a constant subband sample. (The oscillator and mixer drawn ahead
// of the filter in the paper's block diagram are read here as this modulation.)
//
// Timing: on frame_stb (which coincides with the 32nd samp_stb of a block) the fold runs
// for 64 clocks (four multiplies per clock), the FFT for 192, and the copy into the bin
// buffer for 32 (two bins per clock): about 290 of the 320 clocks of a frame. The bins of
// block b become readable at the frame_stb that starts block b+1 and stay stable for a
// whole frame. rd_bin/rd_data is a combinational read port. A 512-entry sample ring keeps
// the 256-sample window intact while new samples arrive during the fold.
module pfb_channelizer
  import spa_pkg::*;
#(
  parameter int NSUB_P    = NSUB,
  parameter int NTAPS_P   = NTAPS,
  parameter int OUT_SHIFT = 0
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     samp_stb,
  input  logic                     frame_stb,
  input  logic signed [ADC_W-1:0]  adc_in,
  input  reg_req_t                 req,
  input  logic                     req_sel,
  output logic [31:0]              rdata,
  input  logic [$clog2(NSUB_P)-1:0] rd_bin,
  output cplx_t                    rd_data,
  output logic                     blk_done
);
  localparam int SAW  = $clog2(NSUB_P);
  localparam int NFOLD = NTAPS_P / NSUB_P;
  localparam int RAW  = $clog2(2 * NTAPS_P);
  localparam int FDW  = 32;

  logic signed [COEF_W-1:0] coef [NTAPS_P];
  logic signed [ADC_W-1:0]  ring [2*NTAPS_P];
  logic [RAW-1:0]           wptr, base;
  cplx_t                    binbuf [2][NSUB_P];
  logic                     rd_side;
  logic                     bpar;         // parity of the block being computed

  typedef enum logic [1:0] {IDLE, FOLD, FFT, COPY} st_e;
  st_e st;
  logic [SAW-1:0] p;

  // Register bus: window taps, read back one clock after re.
  always_ff @(posedge clk) begin
    rdata <= '0;
    if (req_sel && req.we) coef[req.addr[$clog2(NTAPS_P)-1:0]] <= COEF_W'(req.wdata);
    if (req_sel && req.re) rdata <= 32'(signed'(coef[req.addr[$clog2(NTAPS_P)-1:0]]));
  end

  // Fold: four window taps per clock.
  logic signed [ADC_W+COEF_W+3:0] acc;
  always_comb begin
    acc = '0;
    for (int m = 0; m < NFOLD; m++)
      acc += (ADC_W+COEF_W+4)'(coef[int'(p) + NSUB_P*m]) *
             (ADC_W+COEF_W+4)'(ring[RAW'(base - RAW'(p) - RAW'(NSUB_P*m))]);
  end

  logic fft_we, fft_start, fft_busy, fft_done;
  logic signed [FDW-1:0] fft_in;
  logic [SAW-1:0] ra, rb;
  logic signed [FDW-1:0] a_re, a_im, b_re, b_im;

  fft64 #(.N(NSUB_P), .DW(FDW)) u_fft (
    .clk, .rst, .inverse(1'b1),
    .load_we(fft_we), .load_addr(p), .load_re(fft_in), .load_im('0),
    .start(fft_start), .busy(fft_busy), .done(fft_done),
    .rd_addr(ra), .rd_re(a_re), .rd_im(a_im),
    .rd2_addr(rb), .rd2_re(b_re), .rd2_im(b_im)
  );

  assign fft_we = (st == FOLD);
  assign fft_in = FDW'(acc >>> COEF_FRAC);
  assign ra = {p[SAW-2:0], 1'b0};
  assign rb = {p[SAW-2:0], 1'b1};

  // Odd subbands of odd blocks change sign.
  function automatic cplx_t outv(input logic signed [FDW-1:0] r, input logic signed [FDW-1:0] i,
                                 input logic neg);
    logic signed [63:0] vr, vi;
    cplx_t o;
    vr = 64'(r) >>> OUT_SHIFT;
    vi = 64'(i) >>> OUT_SHIFT;
    if (neg) begin vr = -vr; vi = -vi; end
    o.re = sat_s(vr);
    o.im = sat_s(vi);
    return o;
  endfunction

  always_ff @(posedge clk) begin
    fft_start <= 1'b0;
    blk_done  <= 1'b0;
    if (rst) begin
      wptr <= '0; base <= '0; st <= IDLE; p <= '0; rd_side <= 1'b0; bpar <= 1'b1;
    end else begin
      if (samp_stb) begin
        ring[wptr] <= adc_in;
        wptr <= wptr + 1'b1;
      end
      if (frame_stb) begin
        base    <= wptr;
        st      <= FOLD;
        p       <= '0;
        rd_side <= ~rd_side;
        bpar    <= ~bpar;
      end else begin
        unique case (st)
          FOLD: begin
            p <= p + 1'b1;
            if (p == '1) begin st <= FFT; fft_start <= 1'b1; end
          end
          FFT: if (fft_done) begin st <= COPY; p <= '0; end
          COPY: begin
            binbuf[~rd_side][ra] <= outv(a_re, a_im, 1'b0);
            binbuf[~rd_side][rb] <= outv(b_re, b_im, bpar);
            p <= p + 1'b1;
            if (int'(p) == NSUB_P/2 - 1) begin st <= IDLE; blk_done <= 1'b1; end
          end
          default: ;
        endcase
      end
    end
  end

  assign rd_data = binbuf[rd_side][rd_bin];

endmodule
