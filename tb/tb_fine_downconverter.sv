// tb_fine_downconverter: programs random bin, frequency, phase and amplitude for all 128
// channels, serves a bin buffer of random subband samples that changes every frame,
// and checks every output sample against a bit-exact reference computed here (own
// DDS table from $cos/$sin, own phase accumulators). Also checks the timing: channel c
// of a frame appears c+1 clocks after the edge that samples the frame strobe, 128 samples per frame.
module tb_fine_downconverter;
  import spa_pkg::*;
  logic clk = 0, rst = 1, frame_stb = 0;
  reg_req_t req = '0;
  logic req_sel = 0;
  logic [31:0] rdata;
  logic [SUB_AW-1:0] rd_bin;
  cplx_t rd_data;
  chan_smp_t dout;
  int checks = 0, failures = 0;

  fine_downconverter dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cplx_t sbuf [64];
  assign rd_data = sbuf[rd_bin];

  int bin_p [128], phase_p [128], amp_p [128];
  int unsigned freq_p [128], acc [128];
  int cyc = 0, fcyc = 0, nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint lut(input int idx, input bit s);
    real a = 6.283185307179586 * idx / 1024.0;
    return longint'($rtoi($floor((s ? $sin(a) : $cos(a)) * 131071.0 + 0.5)));
  endfunction
  function automatic longint sat24(input longint v);
    if (v > 8388607) return 8388607;
    if (v < -8388608) return -8388608;
    return v;
  endfunction

  task automatic wr(input int ch, input int prm, input int unsigned v);
    @(negedge clk); req_sel = 1; req.we = 1; req.addr = 24'((ch << 4) | prm); req.wdata = v;
    @(negedge clk); req.we = 0; req_sel = 0;
  endtask

  // check outputs as they appear
  always @(negedge clk) if (!rst && dout.valid) begin
    int c;
    longint xr, xi, cc, ss, mr, mi, ar, ai;
    int unsigned th;
    c = int'(dout.chan);
    th = acc[c] + (int'(phase_p[c]) << 16);
    cc = lut(int'(th >> 22), 0); ss = lut(int'(th >> 22), 1);
    xr = longint'(sbuf[bin_p[c]].re); xi = longint'(sbuf[bin_p[c]].im);
    mr = (xr * cc + xi * ss) >>> 17;
    mi = (xi * cc - xr * ss) >>> 17;
    ar = sat24((mr * amp_p[c]) >>> 17);
    ai = sat24((mi * amp_p[c]) >>> 17);
    checks++;
    if (longint'(dout.d.re) != ar || longint'(dout.d.im) != ai) begin
      failures++;
      if (failures < 10) $display("FAIL ch %0d got %0d %0d exp %0d %0d", c, dout.d.re, dout.d.im, ar, ai);
    end
    checks++;
    if (cyc - fcyc != c + 1) begin failures++; $display("FAIL ch %0d at clock %0d after strobe", c, cyc - fcyc); end
    acc[c] += freq_p[c];
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int c = 0; c < 128; c++) begin
      bin_p[c] = $urandom_range(0, 63);
      freq_p[c] = $urandom;
      phase_p[c] = $urandom_range(0, 65535);
      amp_p[c] = $urandom_range(0, 200000);
      acc[c] = 0;
      wr(c, 0, bin_p[c]); wr(c, 1, freq_p[c]); wr(c, 2, phase_p[c]); wr(c, 3, amp_p[c]);
    end
    // read back two registers
    @(negedge clk); req_sel = 1; req.re = 1; req.addr = 24'((37 << 4) | 1);
    @(negedge clk); req.re = 0; req_sel = 0;
    checks++; if (rdata != freq_p[37]) begin failures++; $display("FAIL readback"); end
    for (int f = 0; f < 8; f++) begin
      for (int k = 0; k < 64; k++) begin
        sbuf[k].re = 24'($urandom); sbuf[k].im = 24'($urandom);
      end
      @(negedge clk); frame_stb = 1;
      @(posedge clk); fcyc = cyc + 1;
      @(negedge clk); frame_stb = 0;
      repeat (318) @(negedge clk);
    end
    checks++;
    if (nout != 8 * 128) begin failures++; $display("FAIL %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
