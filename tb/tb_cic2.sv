// tb_cic2: checks the time-multiplexed CIC configured as CIC2 (6 stages, decimate by 64, 32-bit in) against a direct
// convolution with the CIC impulse response (a length-64 boxcar convolved with itself
// 6 times) computed here, decimated by 64. Uses 4 channels with different random
// inputs to exercise the per-channel state, and checks the output rate: one output per
// channel every 64 frames, as for CIC2.
module tb_cic2;
  localparam int NCH = 4, N = 6, R = 64, IN_W = 32, OUT_W = 32;
  localparam int W = IN_W + N * $clog2(R);
  localparam int L = N * (R - 1) + 1;
  localparam int NF = 576;
  logic clk = 0, rst = 1;
  logic in_valid = 0;
  logic [1:0] in_chan = 0;
  logic signed [IN_W-1:0] in_re = 0, in_im = 0;
  logic out_valid;
  logic [1:0] out_chan;
  logic signed [OUT_W-1:0] out_re, out_im;
  int checks = 0, failures = 0;

  cic_tdm #(.NCHAN_P(NCH), .STAGES(N), .R(R), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint h [L];
  longint xr [NCH][NF], xi [NCH][NF];
  int nout = 0;

  initial begin
    longint t [L];
    longint yr, yi;
    int len;
    // impulse response: boxcar convolved N times
    for (int j = 0; j < L; j++) h[j] = (j < R) ? 1 : 0;
    len = R;
    for (int s = 1; s < N; s++) begin
      for (int j = 0; j < L; j++) begin
        t[j] = 0;
        for (int q = 0; q < R; q++) if (j - q >= 0 && j - q < len) t[j] += h[j - q];
      end
      len += R - 1;
      for (int j = 0; j < L; j++) h[j] = t[j];
    end
    for (int c = 0; c < NCH; c++)
      for (int f = 0; f < NF; f++) begin
        xr[c][f] = longint'($urandom_range(0, 2000000)) - 1000000 + (c == 0 ? 500000 : 0);
        xi[c][f] = longint'($urandom_range(0, 2000000)) - 1000000;
      end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        in_valid = 1; in_chan = 2'(c); in_re = IN_W'(xr[c][f]); in_im = IN_W'(xi[c][f]);
        @(posedge clk); #0.1;
        if (f % R == R - 1) begin
          yr = 0; yi = 0;
          for (int j = 0; j < L; j++) if (f - j >= 0) begin yr += h[j] * xr[c][f - j]; yi += h[j] * xi[c][f - j]; end
          yr = yr >>> (W - OUT_W); yi = yi >>> (W - OUT_W);
          checks++; nout++;
          if (!out_valid || int'(out_chan) != c || longint'(out_re) != yr || longint'(out_im) != yi) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d ch %0d got %0d %0d exp %0d %0d", f, c, out_re, out_im, yr, yi);
          end
        end else begin
          checks++;
          if (out_valid) begin failures++; $display("FAIL output in frame %0d", f); end
        end
      end
    @(negedge clk); in_valid = 0;
    checks++;
    if (nout != NCH * (NF / R)) begin failures++; $display("FAIL %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
