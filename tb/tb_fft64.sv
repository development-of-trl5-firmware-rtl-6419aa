// tb_fft64: checks the 64-point FFT core against a direct DFT computed with real
// arithmetic, for the forward and the inverse kernel, on random inputs and a single tone.
// Also checks the busy time: log2(64) stages * 32 butterflies = 192 clocks.
module tb_fft64;
  localparam int N = 64;
  localparam int DW = 32;
  logic clk = 0, rst = 1, inverse = 0, load_we = 0, start = 0, busy, done;
  logic [5:0] load_addr = 0, rd_addr = 0, rd2_addr = 0;
  logic signed [DW-1:0] load_re = 0, load_im = 0, rd_re, rd_im, rd2_re, rd2_im;
  int checks = 0, failures = 0;
  real xr [N], xi [N];

  fft64 #(.N(N), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit inv, input int mode);
    int t0, cyc;
    real er, ei, ang, maxerr, tol;
    for (int n = 0; n < N; n++) begin
      if (mode == 0) begin
        xr[n] = real'($signed($urandom_range(0, 2000000)) - 1000000);
        xi[n] = real'($signed($urandom_range(0, 2000000)) - 1000000);
      end else begin
        xr[n] = $floor(1000000.0 * $cos(6.283185307179586 * 5 * n / N));
        xi[n] = 0.0;
      end
      @(negedge clk);
      load_we = 1; load_addr = 6'(n); load_re = DW'($rtoi(xr[n])); load_im = DW'($rtoi(xi[n]));
    end
    @(negedge clk);
    load_we = 0; inverse = inv; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 192 + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
    maxerr = 0.0;
    for (int k = 0; k < N; k++) begin
      er = 0.0; ei = 0.0;
      for (int n = 0; n < N; n++) begin
        ang = (inv ? 1.0 : -1.0) * 6.283185307179586 * k * n / N;
        er += xr[n] * $cos(ang) - xi[n] * $sin(ang);
        ei += xr[n] * $sin(ang) + xi[n] * $cos(ang);
      end
      rd_addr = 6'(k);
      rd2_addr = 6'(k);
      #1;
      checks++;
      if (rd2_re !== rd_re || rd2_im !== rd_im) begin
        failures++;
        $display("FAIL second read port k=%0d", k);
      end
      checks++;
      // rounding of twiddles (Q1.17, 1.0 held as 1-2^-17) and of products
      tol = 50.0;
      for (int n = 0; n < N; n++) tol += 2.0e-5 * ((xr[n] < 0 ? -xr[n] : xr[n]) + (xi[n] < 0 ? -xi[n] : xi[n]));
      if ((real'(rd_re) - er) > tol || (er - real'(rd_re)) > tol ||
          (real'(rd_im) - ei) > tol || (ei - real'(rd_im)) > tol) begin
        failures++;
        $display("FAIL inv=%0d k=%0d got %0d %0d exp %f %f", inv, k, rd_re, rd_im, er, ei);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    run(0, 0);
    run(1, 0);
    run(0, 1);
    run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
