// tb_feedback_controller: programs random gains, offsets, saturation limits and modes
// (half the channels integrating, half proportional) and streams random samples for
// several frames. Each output is compared with a reference model computed here,
// including the per-channel integrators and clamps. Counts how often the integrator,
// the proportional path and the saturation clamp were exercised.
module tb_feedback_controller;
  import spa_pkg::*;
  logic clk = 0, rst = 1;
  reg_req_t req = '0;
  logic req_sel = 0;
  logic [31:0] rdata;
  chan_smp_t din = '0, dout;
  int checks = 0, failures = 0;

  feedback_controller dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint gr [128], gi [128], orr [128], oi [128], lim [128], acc_re [128], acc_im [128];
  bit integ [128];
  longint er, ei;
  int n_int = 0, n_prop = 0, n_sat = 0;

  function automatic longint clampv(input longint v, input longint l, inout int ns);
    if (v > l) begin ns++; return l; end
    if (v < -l) begin ns++; return -l; end
    return v;
  endfunction
  function automatic longint sat24(input longint v);
    if (v > 8388607) return 8388607;
    if (v < -8388608) return -8388608;
    return v;
  endfunction

  task automatic wr(input int ch, input int prm, input longint v);
    @(negedge clk); req_sel = 1; req.we = 1; req.addr = 24'((ch << 4) | prm); req.wdata = 32'(v);
    @(negedge clk); req.we = 0; req_sel = 0;
  endtask

  initial begin
    longint xr, xi, pr, pi, sr, si;
    repeat (3) @(posedge clk);
    rst = 0;
    // reset state: zero output
    @(negedge clk); din.valid = 1; din.chan = 7'd3; din.d.re = 24'd1000; din.d.im = -24'sd77;
    @(negedge clk); din.valid = 0;
    checks++; if (dout.d.re != 0 || dout.d.im != 0) begin failures++; $display("FAIL reset output"); end
    for (int c = 0; c < 128; c++) begin
      gr[c] = longint'($urandom_range(0, 65535)) - 32768;
      gi[c] = longint'($urandom_range(0, 65535)) - 32768;
      orr[c] = longint'($urandom_range(0, 2000000)) - 1000000;
      oi[c] = longint'($urandom_range(0, 2000000)) - 1000000;
      lim[c] = (c % 3 == 0) ? 200000 : 8388607;
      integ[c] = c % 2;
      acc_re[c] = 0; acc_im[c] = 0;
      wr(c, 0, gr[c]); wr(c, 1, gi[c]); wr(c, 2, integ[c]); wr(c, 3, lim[c]); wr(c, 4, orr[c]); wr(c, 5, oi[c]);
    end
    @(negedge clk); req_sel = 1; req.re = 1; req.addr = 24'((11 << 4) | 4);
    @(negedge clk); req.re = 0; req_sel = 0;
    checks++; if ($signed(rdata) != orr[11]) begin failures++; $display("FAIL readback"); end
    for (int f = 0; f < 10; f++) begin
      for (int c = 0; c < 128; c++) begin
        @(negedge clk);
        din.valid = 1; din.chan = 7'(c);
        din.d.re = 24'($signed($urandom_range(0, 400000)) - 200000);
        din.d.im = 24'($signed($urandom_range(0, 400000)) - 200000);
        xr = longint'(din.d.re); xi = longint'(din.d.im);
        pr = (xr * gr[c] - xi * gi[c]) >>> 12;
        pi = (xr * gi[c] + xi * gr[c]) >>> 12;
        sr = clampv(pr + (integ[c] ? acc_re[c] : 0), lim[c], n_sat);
        si = clampv(pi + (integ[c] ? acc_im[c] : 0), lim[c], n_sat);
        if (integ[c]) begin acc_re[c] = sr; acc_im[c] = si; n_int++; end else n_prop++;
        er = sat24(sr + orr[c]); ei = sat24(si + oi[c]);
        @(posedge clk); #0.1;
        checks++;
        if (!dout.valid || int'(dout.chan) != c || longint'(dout.d.re) != er || longint'(dout.d.im) != ei) begin
          failures++;
          if (failures < 10) $display("FAIL f %0d ch %0d got %0d %0d exp %0d %0d", f, c, dout.d.re, dout.d.im, er, ei);
        end
      end
    end
    checks += 3;
    if (n_int == 0 || n_prop == 0 || n_sat == 0) begin failures++; $display("FAIL mechanism not exercised"); end
    $display("integrating %0d proportional %0d clamped %0d", n_int, n_prop, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
