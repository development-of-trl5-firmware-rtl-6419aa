// feedback_controller: time-multiplexed baseband loop controller, 128 channels. Two
// instances per signal path: one drives carrier synthesis, one nuller synthesis.
//
// The paper gives the structure, and this module follows it: per channel an 18-bit
// complex gain, an accumulator that can be enabled (integrating feedback, as used for
// digital active nulling) or disabled (proportional control), a programmable saturation
// stage and a 24-bit complex offset (static bias when gain is zero). Every parameter is
// per channel. For the sample x of channel c:
//   p   = (x * g) >>> 12                      complex product, gain is Q6.12
//   a   = integrate ? acc[c] + p : p
//   a   = clamp(a, -sat, +sat)                per component
//   acc[c] = integrate ? a : 0
//   y   = sat24(a + offset)
// The gain format, the saturation applied to the stored accumulator (so it cannot wind
// up) and the clearing of the accumulator in proportional mode are this design's choices.
//
// Per-channel registers (addr[10:4] = channel): 0 gain re, 1 gain im (18-bit signed),
// 2 mode (bit 0 integrate), 3 saturation limit (23-bit magnitude), 4 offset re,
// 5 offset im (24-bit signed). Reset values: gain 0, proportional, full-scale limit,
// offset 0, i.e. a channel outputs zero until programmed.
//
// Timing: one sample in per clock; the result appears on `dout` one clock later.
module feedback_controller
  import spa_pkg::*;
#(
  parameter int NCHAN_P = NCHAN
) (
  input  logic        clk,
  input  logic        rst,
  input  reg_req_t    req,
  input  logic        req_sel,
  output logic [31:0] rdata,
  input  chan_smp_t   din,
  output chan_smp_t   dout
);
  localparam int CAW = $clog2(NCHAN_P);
  localparam int AW  = SAMPLE_W + 2;

  logic signed [GAIN_W-1:0]   g_re [NCHAN_P], g_im [NCHAN_P];
  logic                       integ [NCHAN_P];
  logic [SAMPLE_W-2:0]        satl [NCHAN_P];
  logic signed [SAMPLE_W-1:0] o_re [NCHAN_P], o_im [NCHAN_P];
  logic signed [AW-1:0]       a_re [NCHAN_P], a_im [NCHAN_P];

  logic [CAW-1:0] rch, ch;
  assign rch = CAW'(req.addr[10:4]);
  assign ch  = CAW'(din.chan);

  function automatic logic signed [AW-1:0] clamp(input logic signed [AW+GAIN_W:0] v,
                                                 input logic [SAMPLE_W-2:0] lim);
    logic signed [AW+GAIN_W:0] l;
    l = (AW+GAIN_W+1)'(lim);
    if (v > l)  return AW'(l);
    if (v < -l) return AW'(-l);
    return AW'(v);
  endfunction

  logic signed [SAMPLE_W+GAIN_W+1:0] pr, pi;
  logic signed [AW+GAIN_W:0]         sr, si;
  logic signed [AW-1:0]              nr, ni;
  always_comb begin
    pr = ((SAMPLE_W+GAIN_W+2)'(din.d.re) * g_re[ch] - (SAMPLE_W+GAIN_W+2)'(din.d.im) * g_im[ch]) >>> GAIN_FRAC;
    pi = ((SAMPLE_W+GAIN_W+2)'(din.d.re) * g_im[ch] + (SAMPLE_W+GAIN_W+2)'(din.d.im) * g_re[ch]) >>> GAIN_FRAC;
    sr = (AW+GAIN_W+1)'(pr) + (integ[ch] ? (AW+GAIN_W+1)'(a_re[ch]) : '0);
    si = (AW+GAIN_W+1)'(pi) + (integ[ch] ? (AW+GAIN_W+1)'(a_im[ch]) : '0);
    nr = clamp(sr, satl[ch]);
    ni = clamp(si, satl[ch]);
  end

  always_ff @(posedge clk) begin
    rdata <= '0;
    if (rst) begin
      dout <= '0;
      for (int i = 0; i < NCHAN_P; i++) begin
        g_re[i] <= '0; g_im[i] <= '0; integ[i] <= 1'b0; satl[i] <= '1;
        o_re[i] <= '0; o_im[i] <= '0; a_re[i] <= '0; a_im[i] <= '0;
      end
    end else begin
      if (req_sel && req.we)
        unique case (req.addr[3:0])
          4'd0: g_re[rch]  <= GAIN_W'(req.wdata);
          4'd1: g_im[rch]  <= GAIN_W'(req.wdata);
          4'd2: integ[rch] <= req.wdata[0];
          4'd3: satl[rch]  <= (SAMPLE_W-1)'(req.wdata);
          4'd4: o_re[rch]  <= SAMPLE_W'(req.wdata);
          4'd5: o_im[rch]  <= SAMPLE_W'(req.wdata);
          default: ;
        endcase
      if (req_sel && req.re)
        unique case (req.addr[3:0])
          4'd0: rdata <= 32'(g_re[rch]);
          4'd1: rdata <= 32'(g_im[rch]);
          4'd2: rdata <= 32'(integ[rch]);
          4'd3: rdata <= 32'(satl[rch]);
          4'd4: rdata <= 32'(o_re[rch]);
          4'd5: rdata <= 32'(o_im[rch]);
          default: ;
        endcase
      dout.valid <= din.valid;
      if (din.valid) begin
        dout.chan <= din.chan;
        dout.d.re <= sat_s(64'(nr) + 64'(o_re[ch]));
        dout.d.im <= sat_s(64'(ni) + 64'(o_im[ch]));
        a_re[ch]  <= integ[ch] ? nr : '0;
        a_im[ch]  <= integ[ch] ? ni : '0;
      end
    end
  end

endmodule
