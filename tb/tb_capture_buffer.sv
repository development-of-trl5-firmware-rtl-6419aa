// tb_capture_buffer: captures from each of the six sources in turn and reads the memory
// back over the register bus. The converter-rate sources must record one entry per
// samp_stb (consecutive values of a ramp), the baseband sources one entry per frame
// holding only the selected channel. Checks the status word (busy, done, count) and
// that nothing is written before arming or after the buffer is full.
module tb_capture_buffer;
  import spa_pkg::*;
  localparam int DEPTH = 64, NCH = 8;
  logic clk = 0, rst = 1, samp_stb = 0;
  logic signed [15:0] adc = 0, dac_c = 0, dac_n = 0;
  chan_smp_t demod = '0, carrier = '0, nuller = '0;
  reg_req_t req = '0;
  logic req_sel = 1;
  logic [31:0] rdata;
  int checks = 0, failures = 0;

  capture_buffer #(.DEPTH(DEPTH), .NCHAN_P(NCH)) dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(input logic [14:0] a, input logic [31:0] d);
    @(negedge clk); req = '0; req.we = 1; req.addr = 24'(a); req.wdata = d;
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [14:0] a, output logic [31:0] d);
    @(negedge clk); req = '0; req.re = 1; req.addr = 24'(a);
    @(negedge clk); req = '0; d = rdata;
  endtask

  // stimulus: 20 MSPS ramps, baseband frames of NCH channels every 80 clocks
  int cyc = 0;
  int frame = 0;
  always @(negedge clk) begin
    cyc++;
    samp_stb = (cyc % 10 == 0);
    if (samp_stb) begin adc = adc + 1; dac_c = dac_c - 3; dac_n = dac_n + 7; end
    demod = '0; carrier = '0; nuller = '0;
    if (cyc % 80 < NCH) begin
      automatic int c = cyc % 80;
      if (c == 0) frame++;
      demod.valid = 1;   demod.chan = 7'(c);   demod.d.re = 24'(frame * 16 + c);   demod.d.im = 24'(-c);
      carrier.valid = 1; carrier.chan = 7'(c); carrier.d.re = 24'(frame * 32 + c); carrier.d.im = 24'(c);
      nuller.valid = 1;  nuller.chan = 7'(c);  nuller.d.re = 24'(frame * 64 + c);  nuller.d.im = 24'(2 * c);
    end
  end

  logic [31:0] d, lo, hi;
  initial begin
    repeat (5) @(negedge clk); rst = 0;
    repeat (50) @(negedge clk);
    rd(15'h0001, d); chk(d == 0, "idle status");
    for (int src = 0; src < 6; src++) begin
      int ch;
      ch = $urandom % NCH;
      wr(15'h0000, 32'(ch) << 8 | 32'(src) << 4 | 1);
      rd(15'h0001, d); chk(d[1] == 1 && d[0] == 0, $sformatf("busy %h", d));
      rd(15'h0000, d); chk(d[6:4] == 3'(src) && d[10:8] == 3'(ch), "ctrl readback");
      do rd(15'h0001, d); while (!d[0]);
      chk(d[26:16] == DEPTH && d[1] == 0, $sformatf("done status %h", d));
      for (int i = 0; i < DEPTH; i++) begin
        logic [47:0] e0, e;
        rd(15'h4000 | 15'(i << 4), lo);
        rd(15'h4001 | 15'(i << 4), hi);
        e = {hi[15:0], lo};
        if (i == 0) e0 = e;
        if (src < 3) begin
          int step;
          step = (src == 0) ? 1 : (src == 1) ? -3 : 7;
          chk(e == 48'(signed'(16'(int'(e0[15:0]) + step * i))), $sformatf("src %0d entry %0d %h", src, i, e));
        end else begin
          int k;
          k = (src == 3) ? 16 : (src == 4) ? 32 : 64;
          chk(e[23:0] == 24'((src == 3) ? -ch : (src == 4) ? ch : 2 * ch), $sformatf("src %0d entry %0d im %h", src, i, e[23:0]));
          chk(e[47:24] == 24'(int'(e0[47:24]) + k * i), $sformatf("src %0d entry %0d re %h", src, i, e[47:24]));
        end
      end
    end
    // memory is not written when not armed
    rd(15'h4000, lo);
    repeat (2000) @(negedge clk);
    rd(15'h4000, d); chk(d == lo, "no write after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
