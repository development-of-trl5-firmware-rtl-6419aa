// cic_tdm: time-multiplexed complex CIC decimator. The readout chain uses it twice:
// CIC1 (3 stages, decimation 64, 625 ksps -> 9.77 ksps) and CIC2 (6 stages, decimation
// 64, fixed rate, -> 152.6 sps), each shared by all 128 channels of a SQUID.
//
// Stages, decimation rate and the time multiplexing are the paper's. The rest is this
// design's: differential delay 1, full Hogenauer register width
// W = IN_W + STAGES*log2(R) (modular arithmetic, no pruning), and an output that keeps the
// top OUT_W bits of the comb result, i.e. out = comb >>> (W - OUT_W). With the defaults
// CIC1 (24 -> 32 bits) has a DC gain of 2^8 (eight fractional bits kept) and CIC2
// (32 -> 32 bits) a DC gain of 1.
//
// Each channel has its own integrator and comb state, indexed by the channel number of
// the incoming sample; all stages of a sample are evaluated in one clock. A frame counter
// advances after the last channel of each frame; in every R-th frame the combs run too
// and each channel's result leaves on `out_*` one clock after its input. Reset (the
// datapath reset released by the sync event) clears all state and the frame counter,
// which aligns the decimation phase across signal paths and units.
module cic_tdm #(
  parameter int NCHAN_P = 128,
  parameter int STAGES  = 3,
  parameter int R       = 64,
  parameter int IN_W    = 24,
  parameter int OUT_W   = 32
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          in_valid,
  input  logic [$clog2(NCHAN_P)-1:0]    in_chan,
  input  logic signed [IN_W-1:0]        in_re,
  input  logic signed [IN_W-1:0]        in_im,
  output logic                          out_valid,
  output logic [$clog2(NCHAN_P)-1:0]    out_chan,
  output logic signed [OUT_W-1:0]       out_re,
  output logic signed [OUT_W-1:0]       out_im
);
  localparam int W   = IN_W + STAGES * $clog2(R);
  localparam int CAW = $clog2(NCHAN_P);

  typedef logic signed [W-1:0] acc_t;

  acc_t ig_re [STAGES][NCHAN_P], ig_im [STAGES][NCHAN_P];
  acc_t cb_re [STAGES][NCHAN_P], cb_im [STAGES][NCHAN_P];
  logic [$clog2(R)-1:0] dcnt;
  logic dump;

  assign dump = (int'(dcnt) == R - 1);

  acc_t nig_re [STAGES], nig_im [STAGES];
  acc_t c_re [STAGES+1], c_im [STAGES+1];
  always_comb begin
    acc_t pr, pim;
    pr  = acc_t'(in_re);
    pim = acc_t'(in_im);
    for (int s = 0; s < STAGES; s++) begin
      nig_re[s] = ig_re[s][in_chan] + pr;
      nig_im[s] = ig_im[s][in_chan] + pim;
      pr  = nig_re[s];
      pim = nig_im[s];
    end
    c_re[0] = nig_re[STAGES-1];
    c_im[0] = nig_im[STAGES-1];
    for (int s = 0; s < STAGES; s++) begin
      c_re[s+1] = c_re[s] - cb_re[s][in_chan];
      c_im[s+1] = c_im[s] - cb_im[s][in_chan];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dcnt <= '0; out_valid <= 1'b0; out_chan <= '0; out_re <= '0; out_im <= '0;
      for (int s = 0; s < STAGES; s++)
        for (int c = 0; c < NCHAN_P; c++) begin
          ig_re[s][c] <= '0; ig_im[s][c] <= '0; cb_re[s][c] <= '0; cb_im[s][c] <= '0;
        end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int s = 0; s < STAGES; s++) begin
          ig_re[s][in_chan] <= nig_re[s];
          ig_im[s][in_chan] <= nig_im[s];
        end
        if (dump) begin
          for (int s = 0; s < STAGES; s++) begin
            cb_re[s][in_chan] <= c_re[s];
            cb_im[s][in_chan] <= c_im[s];
          end
          out_valid <= 1'b1;
          out_chan  <= in_chan;
          out_re    <= OUT_W'(c_re[STAGES] >>> (W - OUT_W));
          out_im    <= OUT_W'(c_im[STAGES] >>> (W - OUT_W));
        end
        if (int'(in_chan) == NCHAN_P - 1) dcnt <= dcnt + 1'b1;
      end
    end
  end

endmodule
