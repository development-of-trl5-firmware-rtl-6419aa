// tb_link_serdes: loops the transmitter's clock and data pins back into the receiver
// (through a few clocks of extra delay), sends framed random bytes with idle gaps, and
// checks that the receiver aligns on the idle commas and returns every non-idle byte
// in order with its k flag. Also checks the line rates: one byte every 40 system clocks
// (50 Mbps) and a 25 MHz bit clock (8 system clocks per period).
module tb_link_serdes;
  logic clk = 0, rst = 1;
  logic tx_valid = 0, tx_k = 0, tx_take, tx_clk_o, tx_data_o;
  logic [7:0] tx_data = 0;
  logic rx_clk_i, rx_data_i, rx_valid, rx_k, rx_err, rx_aligned, rx_idle;
  logic [7:0] rx_data;
  int checks = 0, failures = 0;

  link_serdes dut (.*);
  always #2.5 clk = ~clk;

  // pin loopback with 3 clocks of wire delay
  logic [2:0] dc, dd;
  always @(posedge clk) begin dc <= {dc[1:0], tx_clk_o}; dd <= {dd[1:0], tx_data_o}; end
  assign rx_clk_i = dc[2];
  assign rx_data_i = dd[2];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [8:0] sent [$];
  int cyc = 0, last_take = -1, last_clk = -1, nrx = 0, nidle = 0, n40 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (!rst && tx_take) begin
    if (last_take >= 0) begin
      checks++;
      // back to back inside a packet: 40 clocks; across idle gaps a multiple of 40
      if ((cyc - last_take) % 40 != 0) begin failures++; $display("FAIL byte interval %0d", cyc - last_take); end
      if (cyc - last_take == 40) n40++;
    end
    last_take = cyc;
  end
  always @(posedge tx_clk_o) if (!rst) begin
    if (last_clk >= 0) begin
      checks++;
      if (cyc - last_clk != 8) begin failures++; $display("FAIL bit clock period %0d", cyc - last_clk); end
    end
    last_clk = cyc;
  end
  always @(posedge clk) if (!rst && rx_valid) begin
    if (rx_k && rx_data == 8'hBC) nidle++;
    else begin
      logic [8:0] e;
      checks++; nrx++;
      e = (sent.size() > 0) ? sent.pop_front() : 9'h1FF;
      if ({rx_k, rx_data} !== e) begin failures++; $display("FAIL rx %0d/%h exp %0d/%h", rx_k, rx_data, e[8], e[7:0]); end
    end
  end
  always @(posedge clk) if (!rst && rx_err) begin failures++; checks++; $display("FAIL code error"); end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (1000) @(posedge clk);   // idle: alignment
    checks++;
    if (!rx_aligned || !rx_idle) begin failures++; $display("FAIL not aligned on idle"); end
    for (int pkt = 0; pkt < 20; pkt++) begin
      for (int i = 0; i < 12; i++) begin
        @(negedge clk);
        tx_valid = 1;
        tx_k = (i == 0 || i == 11);
        tx_data = (i == 0) ? 8'hFB : (i == 11) ? 8'hFD : 8'($urandom);
        @(posedge clk);
        while (!tx_take) @(posedge clk);
        sent.push_back({tx_k, tx_data});
      end
      @(negedge clk); tx_valid = 0;
      repeat ($urandom_range(0, 200)) @(posedge clk);
    end
    repeat (1000) @(posedge clk);
    checks++;
    if (nrx != 240 || sent.size() != 0) begin failures++; $display("FAIL received %0d of 240", nrx); end
    checks++;
    if (n40 < 200) begin failures++; $display("FAIL only %0d back-to-back bytes", n40); end
    checks++;
    if (nidle == 0) begin failures++; $display("FAIL no idle commas"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
