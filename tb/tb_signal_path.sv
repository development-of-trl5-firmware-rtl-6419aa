// tb_signal_path: one signal path with DC on the ADC input, configured through its
// register port (4 channels, 64-tap windows with a single unity tap, CIC decimation 8 and
// 4, so a science enclosure every 32 frames with a DC gain of 256). Checks, with values
// worked out from the configuration:
//   - the readout mux: science channel 0 carries the demodulated level, then the carrier
//     controller output, then the nuller controller output, as the source is switched;
//   - the nuller-source mux: the nuller controller follows the demodulated stream or the
//     carrier controller output;
//   - the carrier synthesis chain: an offset on channel 0 of the carrier controller, put
//     into subband 0, reaches the carrier DAC as a pulse of offset/1024 once every 32
//     samples (the single unity synthesis tap), and the nuller DAC likewise;
//   - register read-back through the OR-ed read bus, and the 20 MSPS frame timing of
//     the DAC pulses.
module tb_signal_path;
  import spa_pkg::*;
  localparam int NCH = 4, NT = 64, A = 1500;
  logic clk = 0, rst = 1;
  logic [3:0] path_id = 4'd6;
  logic samp_stb = 0, frame_stb = 0;
  logic [TS_W-1:0] timestamp = 0;
  logic signed [15:0] adc_in = 16'(A);
  logic signed [15:0] dac_carrier, dac_nuller;
  reg_req_t req = '0;
  logic [31:0] rdata;
  logic sci_valid, sci_last, sci_ready = 1;
  logic [31:0] sci_data;
  int checks = 0, failures = 0;

  signal_path #(.NCHAN_P(NCH), .NTAPS_P(NT), .CIC1_R(8), .CIC2_R(4), .CAP_DEPTH(16)) dut (.*);
  always #2.5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    samp_stb  <= !rst && (cyc % 10 == 0);
    frame_stb <= !rst && (cyc % 320 == 0);
    if (cyc % 20 == 0) timestamp <= timestamp + 1;
  end

  initial begin
    repeat (1_500_000) @(posedge clk);
    failures++;
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
  function automatic logic [23:0] pa(input subblock_e sb, input int ch, input int par);
    return {1'b1, path_id, 4'(sb), 4'b0, 7'(ch), 4'(par)};
  endfunction
  task automatic wr(input logic [23:0] a, input logic [31:0] d);
    @(negedge clk); req = '0; req.we = 1; req.addr = a; req.wdata = d;
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [23:0] a, output logic [31:0] d);
    @(negedge clk); req = '0; req.re = 1; req.addr = a;
    @(negedge clk); req = '0; d = rdata;
  endtask

  // science channel 0, I
  longint sci0 [$];
  int widx = 0;
  always @(posedge clk) if (!rst && sci_valid && sci_ready) begin
    if (widx == 0) chk(sci_data[19:16] == path_id, "path id");
    if (widx == 4) sci0.push_back(longint'(signed'(sci_data)));
    widx = sci_last ? 0 : widx + 1;
  end
  task automatic next_science(input int skip, output longint v);
    int n;
    n = sci0.size();
    wait (sci0.size() >= n + skip);
    v = sci0[$];
  endtask

  // DAC pulses
  int c_pulses = 0, c_bad = 0, n_pulses = 0, last_c = -1;
  longint c_val, n_val;
  always @(posedge clk) if (!rst && samp_stb) begin
    if (dac_carrier != 0) begin
      c_pulses++; c_val = dac_carrier;
      if (last_c >= 0 && cyc - last_c != 320) c_bad++;
      last_c = cyc;
    end
    if (dac_nuller != 0) begin n_pulses++; n_val = dac_nuller; end
  end

  logic [31:0] d;
  longint v;
  initial begin
    repeat (5) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      wr(pa(SB_CHANNELIZER, 0, 0) | 24'(t), (t == 0) ? 131071 : 0);
      wr(pa(SB_DECHAN_C, 0, 0) | 24'(t), (t == 0) ? 131071 : 0);
      wr(pa(SB_DECHAN_N, 0, 0) | 24'(t), (t == 0) ? 131071 : 0);
    end
    rst = 0;
    for (int c = 0; c < NCH; c++) begin
      for (int p = 0; p < 3; p++) begin
        wr(pa(SB_FINE_DOWN, c, p), 0); wr(pa(SB_FINE_UP_C, c, p), 0); wr(pa(SB_FINE_UP_N, c, p), 0);
      end
      wr(pa(SB_FINE_DOWN, c, 3), 131071);
      wr(pa(SB_FINE_UP_C, c, 3), (c == 0) ? 131071 : 0);
      wr(pa(SB_FINE_UP_N, c, 3), (c == 0) ? 131071 : 0);
    end
    rd(pa(SB_DECHAN_N, 0, 0), d); chk(d == 131071, "synthesis tap readback");
    rd(pa(SB_FINE_UP_C, 1, 3), d); chk(d == 0, "amplitude readback");

    // readout of the demodulated stream
    next_science(8, v); chk(near(v, 256 * A, 256 * 6), $sformatf("science demod %0d", v));
    chk(c_pulses == 0, "carrier DAC silent");

    // carrier controller: gain 0, offset 1,024,000 -> science 256 x offset, DAC 1000
    wr(pa(SB_CTRL_C, 0, 4), 1_024_000);
    wr(pa(SB_PATH, 0, 1), 1);
    next_science(8, v); chk(near(v, 256 * 1_024_000, 256 * 4), $sformatf("science carrier %0d", v));
    chk(c_pulses > 20 && c_bad == 0, $sformatf("carrier DAC pulses %0d bad %0d", c_pulses, c_bad));
    chk(near(c_val, 1000, 2), $sformatf("carrier DAC %0d", c_val));

    // nuller controller gain 1: source demod, then carrier
    wr(pa(SB_CTRL_N, 0, 0), 4096);
    wr(pa(SB_PATH, 0, 1), 2);
    next_science(8, v); chk(near(v, 256 * A, 256 * 6), $sformatf("science nuller(demod) %0d", v));
    wr(pa(SB_PATH, 0, 0), 1);
    next_science(8, v); chk(near(v, 256 * 1_024_000, 256 * 4), $sformatf("science nuller(carrier) %0d", v));
    chk(n_pulses > 20 && near(n_val, 1000, 2), $sformatf("nuller DAC %0d", n_val));
    rd(pa(SB_PATH, 0, 0), d); chk(d == 1, "nuller source readback");
    rd(pa(SB_PATH, 0, 1), d); chk(d == 2, "readout source readback");
    rd(pa(SB_PATH, 0, 2), d); chk(d == 0, "no overflow with a ready link");
    // a request for another path is ignored
    rd({1'b1, 4'd2, 4'(SB_PATH), 4'b0, 7'd0, 4'd1}, d); chk(d == 0, "other path not answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
