// tb_fine_upconverter: programs random bin, frequency, phase and amplitude for all 128
// channels, streams random baseband samples for several frames (one channel per clock,
// as the controllers deliver them), and checks every subband contribution against a
// bit-exact reference computed here, including the per-channel phase accumulators and
// the one-clock latency.
module tb_fine_upconverter;
  import spa_pkg::*;
  logic clk = 0, rst = 1;
  reg_req_t req = '0;
  logic req_sel = 0;
  logic [31:0] rdata;
  chan_smp_t din = '0;
  bin_smp_t dout;
  int checks = 0, failures = 0;

  fine_upconverter dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bin_p [128], phase_p [128], amp_p [128];
  int unsigned freq_p [128], acc [128];
  longint er, ei;
  int eb, pending = 0, nout = 0;

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

  initial begin
    longint xr, xi, cc, ss, mr, mi;
    int unsigned th;
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
    @(negedge clk); req_sel = 1; req.re = 1; req.addr = 24'((90 << 4) | 3);
    @(negedge clk); req.re = 0; req_sel = 0;
    checks++; if (rdata != amp_p[90]) begin failures++; $display("FAIL readback"); end
    for (int f = 0; f < 6; f++) begin
      for (int c = 0; c < 128; c++) begin
        @(negedge clk);
        // output of the previous clock's input
        if (pending) begin
          checks++; nout++;
          if (!dout.valid || int'(dout.bin) != eb || longint'(dout.d.re) != er || longint'(dout.d.im) != ei) begin
            failures++;
            if (failures < 10) $display("FAIL got bin %0d %0d %0d exp bin %0d %0d %0d", dout.bin, dout.d.re, dout.d.im, eb, er, ei);
          end
        end
        din.valid = 1; din.chan = 7'(c);
        din.d.re = 24'($urandom); din.d.im = 24'($urandom);
        xr = longint'(din.d.re); xi = longint'(din.d.im);
        th = acc[c] + (int'(phase_p[c]) << 16);
        cc = lut(int'(th >> 22), 0); ss = lut(int'(th >> 22), 1);
        mr = (xr * cc - xi * ss) >>> 17;
        mi = (xi * cc + xr * ss) >>> 17;
        er = sat24((mr * amp_p[c]) >>> 17);
        ei = sat24((mi * amp_p[c]) >>> 17);
        eb = bin_p[c];
        acc[c] += freq_p[c];
        pending = 1;
      end
      @(negedge clk);
      din.valid = 0;
      checks++; nout++;
      if (!dout.valid || int'(dout.bin) != eb || longint'(dout.d.re) != er || longint'(dout.d.im) != ei) failures++;
      pending = 0;
      repeat (100) @(negedge clk);
      checks++;
      if (dout.valid) begin failures++; $display("FAIL output without input"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
