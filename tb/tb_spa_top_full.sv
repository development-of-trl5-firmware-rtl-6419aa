// tb_spa_top_full: the SPA at its full size (16 signal paths of 128 channels, 64
// subbands, 256-tap windows, CIC decimation 64 x 64) taken through one complete
// operation: power-up with the datapaths held, configuration over the link, timestamp
// preset and sync, and the first science enclosure of every signal path, which must
// arrive 4096 frames (about 2.1 ms of 200 MHz clocks) after the sync with a timestamp
// 65536 master ticks after the preset. The DPU side is the same as in tb_spa_top.
//
// From tb_spa_top: The testbench plays the
// DPU: it owns the far end of the serial link (a second link_serdes), sends register
// requests as enclosures, matches responses by sequence number, and parses the science
// enclosures. The ADC inputs are held at DC levels, so every stage has a known answer:
// with a single unity window tap the channelizer passes the sample to every subband, the
// fine downconverter at zero frequency passes subband 0, a unity-gain controller passes
// its input, and the CIC chain has a DC gain of 256 at the sizes used here.
//
module tb_spa_top_full;
  import spa_pkg::*;
  localparam int NP = NSQUID, NCH = NCHAN;
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

  spa_top dut (.*);
  always #2.5 clk = ~clk;
  for (genvar i = 0; i < NP; i++) assign adc_in[i] = 16'(A0 + 100 * i);
  assign sca_miso = 1'b0;

  localparam longint WATCHDOG = 2_500_000;
  localparam int NWAIT = NP;
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
  int n_bad_ts = 0, n_total = 0;
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
          // one enclosure per 4096 frames of 16 master ticks
          if ((ts - last_ts[p]) % 65536 != 0 || ts <= last_ts[p]) n_bad_ts++;
        end
        last_ts[p] = ts; last_seq[p] = cur[0][15:0];
        sci_ch0[p].push_back(longint'(signed'(cur[4])));
        n_sci[p]++;
        n_total++;
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

  int sync_cyc, cyc = 0;
  int first_cyc [NP];
  always @(posedge clk) begin
    cyc++;
    for (int p = 0; p < NP; p++) if (n_sci[p] == 1 && first_cyc[p] == 0) first_cyc[p] = cyc;
  end

  logic [31:0] d;
  initial begin
    logic [15:0] s [$];
    for (int p = 0; p < NP; p++) begin n_sci[p] = 0; last_ts[p] = 0; last_seq[p] = 0; first_cyc[p] = 0; end
    repeat (20) @(negedge clk); rst = 0;
    wait (h_al);
    repeat (200) @(negedge clk);
    rd({16'h0, G_ID}, d); chk(d == 32'h5350_4101, $sformatf("ID %h", d));
    rd({16'h0, G_SYNC_CTRL}, d); chk(d == 32'h2, $sformatf("held before sync %h", d));
    // path 0: unity window tap 0, channel 0 at subband 0, zero frequency, unity amplitude
    s.push_back(send_req(ENC_WRITE, pa(0, SB_CHANNELIZER, 0, 0), 32'd131071));
    s.push_back(send_req(ENC_WRITE, pa(0, SB_FINE_DOWN, 0, 0), 0));
    s.push_back(send_req(ENC_WRITE, pa(0, SB_FINE_DOWN, 0, 1), 0));
    s.push_back(send_req(ENC_WRITE, pa(0, SB_FINE_DOWN, 0, 2), 0));
    s.push_back(send_req(ENC_WRITE, pa(0, SB_FINE_DOWN, 0, 3), 131071));
    while (s.size() > 0) wait_resp(s.pop_front(), d);
    rd(pa(0, SB_CHANNELIZER, 0, 0), d); chk(d == 131071, "window readback");
    rd(pa(15, SB_PATH, 0, 1), d); chk(d == 0, "path 15 readout source");
    wr({16'h0, G_TS_PRESET_LO}, 32'h0000_1000);
    wr({16'h0, G_TS_PRESET_HI}, 32'h0000_00AB);
    wr({16'h0, G_SYNC_CTRL}, 32'h1);
    @(negedge clk); sync_in = 1; sync_cyc = cyc; repeat (50) @(negedge clk); sync_in = 0;
    rd({16'h0, G_SYNC_CTRL}, d); chk(d == 0, "released and disarmed");
    rd({16'h0, G_TS_NOW_HI}, d); chk(d == 32'hAB, "timestamp high preset");
    // carrier controller of path 3, channel 5: offset, read back
    wr(pa(3, SB_CTRL_C, 5, 4), 32'd1234);
    rd(pa(3, SB_CTRL_C, 5, 4), d); chk(d == 1234, "controller offset readback");
    // All 16 paths emit their first enclosure in the same frame; each takes about 42k
    // clocks on the link, so the last one leaves about 670k clocks after the first.
    wait (n_total >= NWAIT);
    repeat (2) @(negedge clk);
    for (int p = 0; p < NP; p++) if (n_sci[p] > 0) begin
      // 4096 frames of 320 clocks, plus the CIC pipelines and the link time
      chk(first_cyc[p] - sync_cyc > 4096 * 320 && first_cyc[p] - sync_cyc < 4096 * 320 + NWAIT * 50000,
          $sformatf("path %0d first science after %0d clocks", p, first_cyc[p] - sync_cyc));
      chk(last_ts[p] >= 48'hAB_0000_1000 + 65536 && last_ts[p] < 48'hAB_0000_1000 + 65536 + 64,
          $sformatf("path %0d timestamp %h", p, last_ts[p]));
    end
    for (int p = 0; p < NP; p++) chk(n_sci[p] <= 1, $sformatf("path %0d served once", p));
    $display("science enclosures: %0d of path 0, write responses %0d, read responses %0d",
             n_sci[0], n_wr_resp, n_rd_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
