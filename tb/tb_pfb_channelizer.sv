// tb_pfb_channelizer: programs a 256-tap raised-cosine window, feeds a 20 MSPS tone and
// small random noise, and compares every subband of every block with a reference built
// here: the polyphase fold in exact integer arithmetic, then a direct 64-point DFT in
// real arithmetic with the (-1)^(k*b) correction. Also checks the frame budget (the
// bins of a block are complete before the next frame strobe) and the 625 ksps rate
// (one block per 32 input samples).
module tb_pfb_channelizer;
  import spa_pkg::*;
  logic clk = 0, rst = 1, samp_stb = 0, frame_stb = 0;
  logic signed [ADC_W-1:0] adc_in = 0;
  reg_req_t req = '0;
  logic req_sel = 0;
  logic [31:0] rdata;
  logic [5:0] rd_bin = 0;
  cplx_t rd_data;
  logic blk_done;
  int checks = 0, failures = 0;

  pfb_channelizer dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int h [256];
  int x [0:8191];
  int nsamp = 0;
  real xr [8][64], xi [8][64];
  int blk = 0;
  int cyc = 0, last_frame = 0, done_cnt = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (blk_done && !rst) begin
    done_cnt++;
    checks++;
    if (cyc - last_frame >= 320) begin failures++; $display("FAIL block took %0d clocks", cyc - last_frame); end
  end

  task automatic reference(input int b, input int t);
    longint u [64];
    real ang;
    for (int p = 0; p < 64; p++) begin
      u[p] = 0;
      for (int m = 0; m < 4; m++) u[p] += longint'(h[p + 64*m]) * longint'(x[t - p - 64*m]);
      u[p] = u[p] >>> 17;
    end
    for (int k = 0; k < 64; k++) begin
      xr[b % 8][k] = 0.0; xi[b % 8][k] = 0.0;
      for (int p = 0; p < 64; p++) begin
        ang = 6.283185307179586 * k * p / 64.0;
        xr[b % 8][k] += real'(u[p]) * $cos(ang);
        xi[b % 8][k] += real'(u[p]) * $sin(ang);
      end
      if ((k % 2 == 1) && (b % 2 == 1)) begin xr[b % 8][k] = -xr[b % 8][k]; xi[b % 8][k] = -xi[b % 8][k]; end
    end
  endtask

  task automatic compare(input int b);
    real dr, di;
    int gr, gi;
    for (int k = 0; k < 64; k++) begin
      rd_bin = 6'(k);
      #0.01;
      gr = rd_data.re;
      gi = rd_data.im;
      dr = real'(gr) - xr[b % 8][k];
      di = real'(gi) - xi[b % 8][k];
      checks++;
      if (dr > 40.0 || dr < -40.0 || di > 40.0 || di < -40.0) begin
        failures++;
        if (failures < 70) $display("FAIL blk %0d bin %0d got %0d %0d exp %f %f", b, k, gr, gi, xr[b%8][k], xi[b%8][k]);
      end
    end
  endtask

  initial begin
    real peak;
    for (int n = 0; n < 256; n++) h[n] = $rtoi(131071.0 * 0.5 * (1.0 - $cos(6.283185307179586 * (n + 0.5) / 256.0)));
    for (int n = 0; n < 8192; n++)
      x[n] = $rtoi(12000.0 * $cos(6.283185307179586 * 5.3 * n / 64.0)) + $signed($urandom_range(0, 200)) - 100;
    repeat (4) @(posedge clk);
    rst = 0;
    // program the window and read two taps back
    for (int n = 0; n < 256; n++) begin
      @(negedge clk); req_sel = 1; req.we = 1; req.addr = 24'(n); req.wdata = 32'(h[n]);
    end
    @(negedge clk); req.we = 0; req.re = 1; req.addr = 24'd77;
    @(negedge clk); req.re = 0; req_sel = 0;
    checks++;
    if (rdata != 32'(h[77])) begin failures++; $display("FAIL tap readback"); end
    // stream: one sample every 10 clocks, frame strobe with every 32nd sample
    for (int s = 0; s < 32 * 16; s++) begin
      repeat (9) @(negedge clk);
      samp_stb = 1; adc_in = ADC_W'(x[s]);
      frame_stb = (s % 32 == 31);
      if (frame_stb) last_frame = cyc;
      @(negedge clk);
      samp_stb = 0;
      if (frame_stb) begin
        // the swap at this frame strobe made the previous block's bins visible
        if (blk >= 9) compare(blk - 1);

        reference(blk, s);
        blk++;
      end
      frame_stb = 0;
    end
    checks++;
    if (done_cnt != 15) begin failures++; $display("FAIL %0d blocks, expected 15", done_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
