// tb_dds_lut: sweeps every table entry and compares cos and sin with values computed
// here in real arithmetic, allowing one LSB of rounding.
module tb_dds_lut;
  logic [9:0] phase = 0;
  logic signed [17:0] cos_o, sin_o;
  int checks = 0, failures = 0;
  dds_lut dut (.*);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real a, ec, es;
    for (int i = 0; i < 1024; i++) begin
      phase = 10'(i);
      #1;
      a = 6.283185307179586 * i / 1024.0;
      ec = real'(cos_o) - $cos(a) * 131071.0;
      es = real'(sin_o) - $sin(a) * 131071.0;
      checks += 2;
      if (ec > 1.0 || ec < -1.0) begin failures++; $display("FAIL cos %0d: %0d", i, cos_o); end
      if (es > 1.0 || es < -1.0) begin failures++; $display("FAIL sin %0d: %0d", i, sin_o); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
