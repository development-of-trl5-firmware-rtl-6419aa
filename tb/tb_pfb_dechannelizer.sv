// tb_pfb_dechannelizer: programs a 256-tap raised-cosine window, adds random
// contributions into random subbands during each frame (several into the same subband,
// to exercise the bin-buffer accumulation), and compares every DAC sample with a
// reference built here: per block the (-1)^(k*b)-corrected inverse DFT in real
// arithmetic, then the windowed overlap-add of the last 8 blocks. Also checks that each
// block's transform completes inside its frame and that 32 samples come out per frame.
module tb_pfb_dechannelizer;
  import spa_pkg::*;
  logic clk = 0, rst = 1, samp_stb = 0, frame_stb = 0;
  bin_smp_t bin_in = '0;
  reg_req_t req = '0;
  logic req_sel = 0;
  logic [31:0] rdata;
  logic signed [DAC_W-1:0] dac_out;
  logic blk_done;
  int checks = 0, failures = 0;

  pfb_dechannelizer dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int h [256];
  real bre [64], bim [64];        // bins accumulated in the current frame
  real u [0:63][64];              // u_b for every block b
  int cyc = 0, last_frame = 0, done_cnt = 0, nsamp = 0;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (blk_done && !rst) begin
    done_cnt++;
    checks++;
    if (cyc - last_frame >= 320) begin failures++; $display("FAIL block took %0d clocks", cyc - last_frame); end
  end

  task automatic block_ref(input int b);
    real ang, sr, s;
    for (int p = 0; p < 64; p++) begin
      s = 0.0;
      for (int k = 0; k < 64; k++) begin
        sr = ((k % 2 == 1) && (b % 2 == 1)) ? -1.0 : 1.0;
        ang = 6.283185307179586 * k * p / 64.0;
        s += sr * (bre[k] * $cos(ang) - bim[k] * $sin(ang));
      end
      u[b][p] = s;
    end
  endtask

  function automatic real y_ref(input int newest, input int r);
    real s = 0.0;
    for (int m = 0; m < 8; m++)
      if (newest - m >= 0) s += real'(h[r + 32*m]) * u[newest - m][(r + 32*m) % 64];
    return s / 134217728.0;   // 2^(17+10)
  endfunction

  initial begin
    int bin, vr, vi;
    real e;
    for (int n = 0; n < 256; n++) h[n] = $rtoi(131071.0 * 0.5 * (1.0 - $cos(6.283185307179586 * (n + 0.5) / 256.0)));
    for (int k = 0; k < 64; k++) begin bre[k] = 0.0; bim[k] = 0.0; end
    repeat (4) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 256; n++) begin
      @(negedge clk); req_sel = 1; req.we = 1; req.addr = 24'(n); req.wdata = 32'(h[n]);
    end
    @(negedge clk); req.we = 0; req.re = 1; req.addr = 24'd200;
    @(negedge clk); req.re = 0; req_sel = 0;
    checks++;
    if (rdata != 32'(h[200])) begin failures++; $display("FAIL tap readback"); end
    for (int f = 0; f < 24; f++) begin
      // frame strobe f freezes the bins filled since strobe f-1 into block f
      for (int r = 0; r < 32; r++) begin
        repeat (9) @(negedge clk);
        samp_stb = 1;
        frame_stb = (r == 0);
        if (frame_stb) last_frame = cyc;
        @(negedge clk);
        samp_stb = 0;
        frame_stb = 0;
        if (r == 0) begin
          block_ref(f);
          for (int k = 0; k < 64; k++) begin bre[k] = 0.0; bim[k] = 0.0; end
        end
        // sample r of the output frame, built from blocks up to f-1
        if (f >= 9) begin
          e = real'(dac_out) - y_ref(f - 1, r);
          checks++; nsamp++;
          if (e > 2.0 || e < -2.0) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d r %0d got %0d exp %f", f, r, dac_out, y_ref(f - 1, r));
          end
        end
        // a few contributions into the bin buffer in the first samples of the frame
        if (r < 6 && f < 20) begin
          bin = (r < 2) ? 5 : $urandom_range(0, 63);
          vr = $signed($urandom_range(0, 4000000)) - 2000000;
          vi = $signed($urandom_range(0, 4000000)) - 2000000;
          bin_in.valid = 1; bin_in.bin = 6'(bin); bin_in.d.re = 24'(vr); bin_in.d.im = 24'(vi);
          bre[bin] += real'(vr); bim[bin] += real'(vi);
          @(negedge clk);
          bin_in.valid = 0;
        end
      end
    end
    checks++;
    if (done_cnt != 24) begin failures++; $display("FAIL %0d blocks, expected 24", done_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
