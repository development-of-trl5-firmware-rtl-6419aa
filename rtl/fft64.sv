// fft64: iterative radix-2 decimation-in-time FFT/IFFT, one butterfly per clock.
//
// The PFB channelizer and the two dechannelizers each own one. The paper only says that
// the coarse converters are built around FFTs (they dominate resource use); this
// single-butterfly, in-place architecture is this design's own and is the smallest that
// meets the frame budget: log2(N)*N/2 = 192 clocks for N = 64, inside the 320-clock frame.
//
// Interface: write the N inputs through load_* (any order; the core stores them at the
// bit-reversed address), pulse `start`, wait for `done` (one-clock pulse), then read
// result k through rd_addr/rd_re/rd_im or the second port rd2_* (both combinational). `inverse` selects the kernel
// exp(+j*2*pi*k*n/N) instead of exp(-j*2*pi*k*n/N). There is no scaling: each stage may
// grow one bit, so inputs must leave log2(N) bits of headroom in DW. Twiddles are
// TW_W-bit Q1.(TW_W-1) values, computed at elaboration; products are rounded.
module fft64 #(
  parameter int N    = 64,
  parameter int DW   = 32,
  parameter int TW_W = 18
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    inverse,
  input  logic                    load_we,
  input  logic [$clog2(N)-1:0]    load_addr,
  input  logic signed [DW-1:0]    load_re,
  input  logic signed [DW-1:0]    load_im,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  input  logic [$clog2(N)-1:0]    rd_addr,
  output logic signed [DW-1:0]    rd_re,
  output logic signed [DW-1:0]    rd_im,
  input  logic [$clog2(N)-1:0]    rd2_addr,
  output logic signed [DW-1:0]    rd2_re,
  output logic signed [DW-1:0]    rd2_im
);
  localparam int LOGN = $clog2(N);
  localparam int TWF  = TW_W - 1;

  typedef logic signed [TW_W-1:0] tw_t;
  typedef tw_t tw_tab_t [N/2];

  function automatic tw_tab_t mk_cos();
    tw_tab_t r;
    for (int k = 0; k < N/2; k++)
      r[k] = tw_t'($rtoi($floor($cos(6.283185307179586 * k / N) * ((1 << TWF) - 1) + 0.5)));
    return r;
  endfunction
  function automatic tw_tab_t mk_sin();
    tw_tab_t r;
    for (int k = 0; k < N/2; k++)
      r[k] = tw_t'($rtoi($floor($sin(6.283185307179586 * k / N) * ((1 << TWF) - 1) + 0.5)));
    return r;
  endfunction
  localparam tw_tab_t COS_T = mk_cos();
  localparam tw_tab_t SIN_T = mk_sin();

  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] a);
    for (int i = 0; i < LOGN; i++) bitrev[i] = a[LOGN-1-i];
  endfunction

  logic signed [DW-1:0] mre [N];
  logic signed [DW-1:0] mim [N];

  logic [$clog2(LOGN+1)-1:0] stage;
  logic [LOGN-2:0]           bf;       // butterfly within stage, 0..N/2-1
  logic                      inv_q;

  // Butterfly addressing for the current stage and butterfly.
  logic [LOGN-1:0] ia, ib, span, jj;
  logic [LOGN-2:0] twi;
  always_comb begin
    span = LOGN'(1) << stage;
    jj   = LOGN'(bf) & (span - LOGN'(1));
    ia   = ((LOGN'(bf) >> stage) << (stage + 1)) | jj;
    ib   = ia | span;
    twi  = (LOGN-1)'(jj << (LOGN - 1 - int'(stage)));
  end

  // W = cos(2*pi*t/N) -/+ j sin(2*pi*t/N); forward uses the minus sign.
  logic signed [TW_W-1:0] wr, wi;
  logic signed [DW+TW_W:0] pr, pi;
  logic signed [DW-1:0]    tr, ti;
  always_comb begin
    wr = COS_T[twi];
    wi = inv_q ? SIN_T[twi] : -SIN_T[twi];
    pr = (DW+TW_W+1)'(mre[ib]) * wr - (DW+TW_W+1)'(mim[ib]) * wi;
    pi = (DW+TW_W+1)'(mre[ib]) * wi + (DW+TW_W+1)'(mim[ib]) * wr;
    tr = DW'((pr + (1 <<< (TWF-1))) >>> TWF);
    ti = DW'((pi + (1 <<< (TWF-1))) >>> TWF);
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      busy  <= 1'b0;
      stage <= '0;
      bf    <= '0;
      inv_q <= 1'b0;
    end else if (busy) begin
      mre[ia] <= mre[ia] + tr;
      mim[ia] <= mim[ia] + ti;
      mre[ib] <= mre[ia] - tr;
      mim[ib] <= mim[ia] - ti;
      bf <= bf + 1'b1;
      if (bf == '1) begin
        if (int'(stage) == LOGN - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          stage <= '0;
        end else begin
          stage <= stage + 1'b1;
        end
      end
    end else begin
      if (load_we) begin
        mre[bitrev(load_addr)] <= load_re;
        mim[bitrev(load_addr)] <= load_im;
      end
      if (start) begin
        busy  <= 1'b1;
        stage <= '0;
        bf    <= '0;
        inv_q <= inverse;
      end
    end
  end

  assign rd_re = mre[rd_addr];
  assign rd_im = mim[rd_addr];
  assign rd2_re = mre[rd2_addr];
  assign rd2_im = mim[rd2_addr];

endmodule
