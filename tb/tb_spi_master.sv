// tb_spi_master: a mode-0 SPI slave model shifts in MOSI on rising SCLK edges and drives
// MISO from a random word on falling edges. For random lengths (1..32 bits), dividers and
// chip selects the test checks the received word, the returned word, that exactly one
// chip select is low during the transfer, the number of SCLK pulses, the SCLK period
// (2*div clocks) and the busy flag.
module tb_spi_master;
  import spa_pkg::*;
  logic clk = 0, rst = 1;
  reg_req_t req = '0;
  logic req_sel = 1;
  logic [31:0] rdata;
  logic sclk, mosi, miso;
  logic [3:0] cs_n;
  int checks = 0, failures = 0;

  spi_master #(.NCS(4)) dut (.*);
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
  task automatic wr(input logic [1:0] a, input logic [31:0] d);
    @(negedge clk); req = '0; req.we = 1; req.addr = 24'(a); req.wdata = d;
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [1:0] a, output logic [31:0] d);
    @(negedge clk); req = '0; req.re = 1; req.addr = 24'(a);
    @(negedge clk); req = '0; d = rdata;
  endtask

  // slave model
  logic [31:0] s_rx, s_tx;
  int npulse, cyc, last_rise, period_bad;
  int exp_period;
  always @(posedge clk) cyc++;
  always @(posedge sclk) begin
    s_rx = {s_rx[30:0], mosi};
    if (npulse > 0 && cyc - last_rise != exp_period) period_bad++;
    last_rise = cyc;
    npulse++;
  end
  always @(negedge sclk) begin
    s_tx = {s_tx[30:0], 1'b0};
  end
  assign miso = s_tx[31];

  logic [31:0] d;
  initial begin
    repeat (5) @(negedge clk); rst = 0;
    for (int t = 0; t < 60; t++) begin
      int nb, dv, cs;
      logic [31:0] tx, stx, mask;
      nb = 1 + $urandom % 32; dv = 1 + $urandom % 6; cs = $urandom % 4;
      tx = $urandom; stx = $urandom;
      mask = (nb == 32) ? '1 : ((32'd1 << nb) - 1);
      wr(2'd0, {6'b0, 2'(cs), 3'b0, 5'(nb - 1), 16'(dv)});
      s_rx = 0; s_tx = stx << (32 - nb); npulse = 0; period_bad = 0; exp_period = 2 * dv;
      wr(2'd1, tx);
      chk(cs_n == ~(4'b1 << cs), $sformatf("chip select %b", cs_n));
      rd(2'd3, d); chk(d[0] == 1, "busy");
      wait (cs_n == 4'hF);
      repeat (3) @(negedge clk);
      chk(sclk == 0, "sclk idles low");
      chk(npulse == nb, $sformatf("pulses %0d exp %0d", npulse, nb));
      chk(period_bad == 0, "sclk period");
      chk((s_rx & mask) == (tx & mask), $sformatf("slave got %h exp %h (nb %0d)", s_rx & mask, tx & mask, nb));
      rd(2'd2, d); chk((d & mask) == (stx & mask), $sformatf("master got %h exp %h", d & mask, stx & mask));
      rd(2'd3, d); chk(d[0] == 0, "not busy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
