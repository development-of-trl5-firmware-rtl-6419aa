// tb_spa_top: end-to-end test of the SPA through its pins only. The testbench plays the
// DPU: it owns the far end of the serial link (a second link_serdes), sends register
// requests as enclosures, matches responses by sequence number, and parses the science
// enclosures. The ADC inputs are held at DC levels, so every stage has a known answer:
// with a single unity window tap the channelizer passes the sample to every subband, the
// fine downconverter at zero frequency passes subband 0, a unity-gain controller passes
// its input, and the CIC chain has a DC gain of 256 at the sizes used here.
//
// Sizes: 2 signal paths, 16 channels, 64-tap windows, CIC1 decimating by 8 and CIC2 by
// 4 (science every 32 frames), 16-entry capture buffers. At these sizes the science
// traffic of the two paths slightly exceeds the link's 50 Mbps, so the packetizers must
// drop frames: that is the overflow case.
//
// Mechanisms counted (each must happen at least once):
//   sync release with timestamp preset, register writes, register reads, science
//   enclosures (values and timestamps checked), proportional control, integral control,
//   controller saturation, nuller-source switch, readout-source switch, packetizer
//   overflow, capture buffer, SPI transfer, malformed-enclosure rejection.
module tb_spa_top;
  import spa_pkg::*;
  localparam int NP = 2, NCH = 16, NT = 64, R1 = 8, R2 = 4, CAPD = 16;
  localparam int A0 = 1000, A1 = -2000;        // ADC DC levels of the two paths
  localparam int TOL = 6;

  logic clk = 0, rst = 1, sync_in = 0;
  logic signed [15:0] adc_in [NP];
  logic signed [15:0] dac_carrier [NP], dac_nuller [NP];
  logic samp_stb;
  logic link_tx_clk, link_tx_data, link_rx_clk, link_rx_data;
  logic da_sclk, da_mosi, da_miso, sca_sclk, sca_mosi, sca_miso;
  logic [3:0] da_cs_n, sca_cs_n;
  int checks = 0, failures = 0;

  spa_top #(.NSQUID_P(NP), .NCHAN_P(NCH), .NTAPS_P(NT), .CIC1_R(R1), .CIC2_R(R2),
            .CAP_DEPTH(CAPD)) dut (.*);
  always #2.5 clk = ~clk;
  assign adc_in[0] = 16'(A0);
  assign adc_in[1] = 16'(A1);
  assign sca_miso = 1'b0;

  localparam longint WATCHDOG = 3_000_000;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic bit near(input longint a, input longint b, input longint tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  // ---------------- DPU end of the link ----------------
  logic       h_tx_valid, h_tx_k, h_tx_take, h_rx_valid, h_rx_k, h_rx_err, h_al, h_idle;
  logic [7:0] h_tx_data, h_rx_data;
  link_serdes #(.CLK_PER_BIT(4)) u_host (
    .clk, .rst, .tx_valid(h_tx_valid), .tx_k(h_tx_k), .tx_data(h_tx_data), .tx_take(h_tx_take),
    .tx_clk_o(link_rx_clk), .tx_data_o(link_rx_data),
    .rx_clk_i(link_tx_clk), .rx_data_i(link_tx_data),
    .rx_valid(h_rx_valid), .rx_k(h_rx_k), .rx_data(h_rx_data), .rx_err(h_rx_err),
    .rx_aligned(h_al), .rx_idle(h_idle)
  );

  logic [8:0] txq [$];                           // {k, byte}
  always_comb begin
    h_tx_valid = txq.size() > 0;
    h_tx_k     = h_tx_valid ? txq[0][8] : 1'b0;
    h_tx_data  = h_tx_valid ? txq[0][7:0] : 8'h0;
  end
  always @(posedge clk) if (h_tx_take) void'(txq.pop_front());

  function automatic void put_word(input logic [31:0] w);
    for (int b = 3; b >= 0; b--) txq.push_back({1'b0, w[8*b +: 8]});
  endfunction

  logic [15:0] seq_next = 16'h100;
  logic [31:0] resp_data [logic [15:0]];
  logic [7:0]  resp_type [logic [15:0]];
  int n_wr_resp = 0, n_rd_resp = 0;

  function automatic logic [15:0] send_req(input logic [7:0] t, input logic [23:0] a, input logic [31:0] d);
    logic [15:0] s;
    s = seq_next; seq_next++;
    txq.push_back({1'b1, K27_7});
    put_word({t, 8'h0, s}); put_word(32'd2); put_word({8'h0, a}); put_word(d);
    txq.push_back({1'b1, K29_7});
    return s;
  endfunction

  task automatic wait_resp(input logic [15:0] s, output logic [31:0] d);
    wait (resp_data.exists(s));
    d = resp_data[s];
    resp_data.delete(s);
  endtask
  task automatic wr(input logic [23:0] a, input logic [31:0] d);
    logic [31:0] r;
    logic [15:0] s;
    s = send_req(ENC_WRITE, a, d);
    wait_resp(s, r);
  endtask
  task automatic rd(input logic [23:0] a, output logic [31:0] d);
    logic [15:0] s;
    s = send_req(ENC_READ, a, 0);
    wait_resp(s, d);
  endtask

  // receive: parse enclosures
  logic [31:0] cur [$];
  logic [31:0] w;
  int nb = 0, in_enc = 0;
  int n_sci [NP];
  logic [47:0] last_ts [NP];
  int last_seq [NP];
  longint sci_ch0 [NP][$];        // channel 0, I, of each science enclosure
  int n_bad_ts = 0;
  always @(posedge clk) if (!rst && h_rx_valid) begin
    if (h_rx_k && h_rx_data == K27_7) begin in_enc = 1; cur.delete(); nb = 0; end
    else if (h_rx_k && h_rx_data == K29_7) begin
      in_enc = 0;
      if (cur.size() > 0 && cur[0][31:24] >= ENC_RESP) begin
        chk(cur.size() == 4 && cur[1] == 2, "response format");
        resp_data[cur[0][15:0]] = cur[3];
        if (cur[0][31:24] == (ENC_WRITE | ENC_RESP)) n_wr_resp++; else n_rd_resp++;
      end else if (cur.size() > 0 && cur[0][31:24] == ENC_SCIENCE) begin
        int p;
        logic [47:0] ts;
        p = cur[0][19:16];
        chk(p < NP, "science path id");
        chk(cur.size() == 4 + 2 * NCH && cur[1] == 32'(2 + 2 * NCH), "science length");
        ts = {cur[2][15:0], cur[3]};
        if (n_sci[p] > 0) begin
          chk(int'(cur[0][15:0]) == last_seq[p] + 1, "science sequence");
          // one enclosure per 32 frames of 16 master ticks
          if ((ts - last_ts[p]) % 512 != 0 || ts <= last_ts[p]) n_bad_ts++;
        end
        last_ts[p] = ts; last_seq[p] = cur[0][15:0];
        sci_ch0[p].push_back(longint'(signed'(cur[4])));
        n_sci[p]++;
      end else chk(0, "unknown enclosure");
    end else if (!h_rx_k && in_enc) begin
      w = {w[23:0], h_rx_data};
      nb = (nb + 1) % 4;
      if (nb == 0) cur.push_back(w);
    end
  end

  // ---------------- SPI slave on DA chip select 2 ----------------
  logic [31:0] spi_rx;
  int spi_bits = 0;
  always @(posedge da_sclk) if (!da_cs_n[2]) begin spi_rx = {spi_rx[30:0], da_mosi}; spi_bits++; end
  assign da_miso = 1'b1;

  // ---------------- address helpers ----------------
  function automatic logic [23:0] pa(input int p, input subblock_e sb, input int ch, input int par);
    return {1'b1, 4'(p), 4'(sb), 4'b0, 7'(ch), 4'(par)};
  endfunction
  function automatic logic [23:0] cap_entry(input int p, input int i, input bit hi);
    return {1'b1, 4'(p), 4'(SB_CAPTURE), 1'b1, 10'(i), 3'b0, hi};
  endfunction

  // capture CAPD entries of `src` for channel `ch` and return the I parts (or raw words)
  longint cap [CAPD];
  task automatic capture(input int p, input int src, input int ch);
    logic [31:0] d, lo, hi;
    wr(pa(p, SB_CAPTURE, 0, 0), 32'(ch) << 8 | 32'(src) << 4 | 32'h1);
    do rd(pa(p, SB_CAPTURE, 0, 1), d); while (!d[0]);
    for (int i = 0; i < CAPD; i++) begin
      rd(cap_entry(p, i, 0), lo);
      rd(cap_entry(p, i, 1), hi);
      cap[i] = (src < 3) ? longint'(signed'(lo[15:0])) : longint'(signed'({hi[15:0], lo[31:24]}));
    end
  endtask

  // mechanism counters
  int m_sync = 0, m_write = 0, m_read = 0, m_sci = 0, m_prop = 0, m_integ = 0, m_sat = 0;
  int m_nsrc = 0, m_rsrc = 0, m_ovf = 0, m_cap = 0, m_spi = 0, m_bad = 0;

  logic [31:0] d;
  initial begin
    logic [15:0] s [$];
    for (int p = 0; p < NP; p++) begin n_sci[p] = 0; last_ts[p] = 0; last_seq[p] = 0; end
    repeat (20) @(negedge clk); rst = 0;
    wait (h_al);
    repeat (200) @(negedge clk);

    // identification and status
    rd({16'h0, G_ID}, d); chk(d == 32'h5350_4101, $sformatf("ID %h", d));
    rd({16'h0, G_SYNC_CTRL}, d); chk(d == 32'h2, $sformatf("held before sync %h", d));

    // configuration that is not reset: channelizer window (unity tap 0) and the fine
    // downconverter of channels 0 and 1 (subband 0, zero frequency, unity amplitude).
    // Requests are pipelined: responses are collected afterwards.
    for (int p = 0; p < NP; p++) begin
      for (int t = 0; t < NT; t++) s.push_back(send_req(ENC_WRITE, pa(p, SB_CHANNELIZER, 0, 0) | 24'(t), (t == 0) ? 32'd131071 : 32'd0));
      for (int c = 0; c < 2; c++) begin
        s.push_back(send_req(ENC_WRITE, pa(p, SB_FINE_DOWN, c, 0), 0));
        s.push_back(send_req(ENC_WRITE, pa(p, SB_FINE_DOWN, c, 1), 0));
        s.push_back(send_req(ENC_WRITE, pa(p, SB_FINE_DOWN, c, 2), 0));
        s.push_back(send_req(ENC_WRITE, pa(p, SB_FINE_DOWN, c, 3), 131071));
      end
    end
    while (s.size() > 0) wait_resp(s.pop_front(), d);
    rd(pa(1, SB_CHANNELIZER, 0, 0), d); chk(d == 131071, "window readback");
    rd(pa(0, SB_FINE_DOWN, 1, 3), d);   chk(d == 131071, "amplitude readback");
    m_write += n_wr_resp; m_read += n_rd_resp;

    // timestamp preset and sync
    wr({16'h0, G_TS_PRESET_LO}, 32'h0000_1000);
    wr({16'h0, G_TS_PRESET_HI}, 32'h0000_00AB);
    wr({16'h0, G_SYNC_CTRL}, 32'h1);
    @(negedge clk); sync_in = 1; repeat (50) @(negedge clk); sync_in = 0;
    rd({16'h0, G_SYNC_CTRL}, d); chk(d == 0, "released and disarmed");
    rd({16'h0, G_TS_NOW_HI}, d); chk(d == 32'hAB, "timestamp high preset");
    rd({16'h0, G_TS_NOW_LO}, d); chk(d >= 32'h1000 && d < 32'h1000 + 2000, $sformatf("timestamp low %h", d));
    if (d >= 32'h1000) m_sync++;

    // demodulated stream (capture source 3), path 0 channel 0
    capture(0, 3, 0); m_cap++;
    for (int i = 0; i < CAPD; i++) chk(near(cap[i], A0, TOL), $sformatf("demod %0d", cap[i]));

    // proportional control: carrier controller gain 2.0
    wr(pa(0, SB_CTRL_C, 0, 0), 32'd8192);
    capture(0, 4, 0);
    begin
      bit ok = 1;
      for (int i = 0; i < CAPD; i++) ok &= near(cap[i], 2 * A0, 2 * TOL);
      chk(ok, $sformatf("proportional %0d", cap[0]));
      if (ok) m_prop++;
    end

    // integral control: gain 1.0, integrate; consecutive frames grow by the input
    wr(pa(0, SB_CTRL_C, 0, 0), 32'd4096);
    wr(pa(0, SB_CTRL_C, 0, 3), 32'd4_000_000);
    wr(pa(0, SB_CTRL_C, 0, 2), 32'd1);
    capture(0, 4, 0);
    begin
      bit ok = 1;
      for (int i = 1; i < CAPD; i++) ok &= near(cap[i] - cap[i-1], A0, TOL);
      chk(ok, $sformatf("integral %0d %0d", cap[0], cap[1]));
      if (ok) m_integ++;
    end

    // saturation: limit the integrator
    wr(pa(0, SB_CTRL_C, 0, 3), 32'd50_000);
    capture(0, 4, 0);
    begin
      bit ok = 1;
      for (int i = 0; i < CAPD; i++) ok &= (cap[i] == 50_000);
      chk(ok, $sformatf("saturation %0d", cap[0]));
      if (ok) m_sat++;
    end
    wr(pa(0, SB_CTRL_C, 0, 2), 32'd0);      // back to proportional, gain 1

    // nuller source: nuller controller gain 1; demodulated (A0), then carrier (gain 3)
    wr(pa(0, SB_CTRL_C, 0, 0), 32'd12288);
    wr(pa(0, SB_CTRL_N, 0, 0), 32'd4096);
    capture(0, 5, 0);
    chk(near(cap[CAPD-1], A0, TOL), $sformatf("nuller from demod %0d", cap[CAPD-1]));
    wr(pa(0, SB_PATH, 0, 0), 32'd1);
    capture(0, 5, 0);
    chk(near(cap[CAPD-1], 3 * A0, 3 * TOL), $sformatf("nuller from carrier %0d", cap[CAPD-1]));
    if (near(cap[CAPD-1], 3 * A0, 3 * TOL)) m_nsrc++;
    rd(pa(0, SB_PATH, 0, 0), d); chk(d == 1, "nuller source readback");

    // 20 MSPS capture of the ADC input
    capture(1, 0, 0);
    begin
      bit ok = 1;
      for (int i = 0; i < CAPD; i++) ok &= (cap[i] == A1);
      chk(ok, "ADC capture");
      if (ok) m_cap++;
    end

    // science: path 0 reads out the demodulated stream; path 1 is switched to the carrier
    // controller output with an offset of 3000 and zero gain
    wr(pa(1, SB_CTRL_C, 0, 4), 32'd3000);
    wr(pa(1, SB_PATH, 0, 1), 32'd1);
    begin
      int n0, n1;
      n0 = n_sci[0]; n1 = n_sci[1];
      wait (n_sci[0] >= n0 + 4 && n_sci[1] >= n1 + 4);
      chk(near(sci_ch0[0][$], 256 * A0, 256 * TOL), $sformatf("science path 0: %0d", sci_ch0[0][$]));
      chk(near(sci_ch0[1][$], 256 * 3000, 256 * TOL), $sformatf("science path 1: %0d", sci_ch0[1][$]));
      if (near(sci_ch0[1][$], 256 * 3000, 256 * TOL)) m_rsrc++;
      m_sci = n_sci[0] + n_sci[1];
    end
    chk(n_bad_ts == 0, "science timestamps");

    // overflow: the two paths together produce more than the link carries
    for (int p = 0; p < NP; p++) begin
      rd(pa(p, SB_PATH, 0, 2), d);
      m_ovf += d;
    end

    // SPI: 24-bit word to DA chip select 2
    wr({16'h0, G_SPI_DA_BASE}, {6'b0, 2'd2, 3'b0, 5'd23, 16'd3});
    spi_bits = 0;
    wr({16'h0, G_SPI_DA_BASE + 8'd1}, 32'h00A5_C3E1);
    repeat (400) @(negedge clk);
    rd({16'h0, G_SPI_DA_BASE + 8'd3}, d); chk(d == 0, "SPI idle");
    chk(spi_bits == 24 && spi_rx[23:0] == 24'hA5_C3E1, $sformatf("SPI word %h bits %0d", spi_rx, spi_bits));
    rd({16'h0, G_SPI_DA_BASE + 8'd2}, d); chk(d == 32'hFF_FFFF, $sformatf("SPI read %h", d));
    if (spi_bits == 24) m_spi++;

    // malformed enclosure: unknown type, must be counted and not answered
    txq.push_back({1'b1, K27_7}); put_word(32'h7700_0001); put_word(32'd2); put_word(32'h0); put_word(32'h0);
    txq.push_back({1'b1, K29_7});
    rd({16'h0, 8'h08}, d); chk(d == 1, $sformatf("bad enclosures %0d", d));
    m_bad += d;

    m_write = n_wr_resp; m_read = n_rd_resp;
    $display("mechanisms: sync %0d write %0d read %0d science %0d proportional %0d integral %0d saturation %0d",
             m_sync, m_write, m_read, m_sci, m_prop, m_integ, m_sat);
    $display("            nuller-source %0d readout-source %0d overflow %0d capture %0d spi %0d bad-enclosure %0d",
             m_nsrc, m_rsrc, m_ovf, m_cap, m_spi, m_bad);
    chk(m_sync > 0, "sync never happened");
    chk(m_write > 0, "no write");
    chk(m_read > 0, "no read");
    chk(m_sci > 0, "no science");
    chk(m_prop > 0, "no proportional control");
    chk(m_integ > 0, "no integral control");
    chk(m_sat > 0, "no saturation");
    chk(m_nsrc > 0, "no nuller-source switch");
    chk(m_rsrc > 0, "no readout-source switch");
    chk(m_ovf > 0, "no overflow");
    chk(m_cap > 0, "no capture");
    chk(m_spi > 0, "no SPI transfer");
    chk(m_bad > 0, "no malformed enclosure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
