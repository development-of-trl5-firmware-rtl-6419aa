// tb_timekeeping: checks the timestamp, sync and strobe generation.
// After reset the datapaths must be held (dp_rst high, no strobes). A preset is written
// and armed; after a sync pulse the timestamp must equal the preset, the datapaths must be
// released, and then: samp_stb exactly every 10 clocks, frame_stb exactly every 320 clocks
// and always together with a samp_stb, and the timestamp +1 every 20 clocks (10 MHz).
// Register read-back of the preset, timestamp and status is checked, and the "hold"
// command must stop the strobes until the next sync. The first frame_stb after release
// must come 320 clocks after the release, the same in every unit.
module tb_timekeeping;
  import spa_pkg::*;
  logic clk = 0, rst = 1, sync_in = 0;
  reg_req_t req = '0;
  logic req_sel = 1;
  logic [31:0] rdata;
  logic [TS_W-1:0] timestamp;
  logic master_tick, dp_rst, samp_stb, frame_stb;
  int checks = 0, failures = 0;

  timekeeping dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); req = '0; req.we = 1; req.addr = 24'(a); req.wdata = d;
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); req = '0; req.re = 1; req.addr = 24'(a);
    @(negedge clk); req = '0; d = rdata;
  endtask
  task automatic pulse_sync();
    @(negedge clk); sync_in = 1;
  endtask

  // strobe interval monitor
  int last_s = -1, last_f = -1, cyc = 0, nsamp = 0, nframe = 0;
  int last_tick_ts_cyc = -1;
  logic [TS_W-1:0] last_ts;
  bit mon = 0;
  always @(posedge clk) begin
    cyc++;
    if (mon) begin
      if (samp_stb) begin
        if (last_s >= 0) chk(cyc - last_s == 10, $sformatf("samp interval %0d", cyc - last_s));
        last_s = cyc; nsamp++;
      end
      if (frame_stb) begin
        chk(samp_stb, "frame_stb without samp_stb");
        if (last_f >= 0) chk(cyc - last_f == 320, $sformatf("frame interval %0d", cyc - last_f));
        last_f = cyc; nframe++;
      end
      if (timestamp != last_ts) begin
        chk(timestamp == last_ts + 1, "timestamp step");
        if (last_tick_ts_cyc >= 0) chk(cyc - last_tick_ts_cyc == 20, "timestamp period");
        last_tick_ts_cyc = cyc;
      end
    end
    last_ts = timestamp;
  end

  logic [31:0] d;
  int rel_cyc, first_f;
  initial begin
    repeat (5) @(negedge clk); rst = 0;
    repeat (100) @(negedge clk);
    chk(dp_rst == 1, "held after reset");
    begin
      int n = 0;
      repeat (400) begin @(negedge clk); if (samp_stb || frame_stb) n++; end
      chk(n == 0, "strobes while held");
    end
    wr(G_TS_PRESET_LO, 32'h9ABC_DEF0);
    wr(G_TS_PRESET_HI, 32'h0000_1234);
    rd(G_TS_PRESET_LO, d); chk(d == 32'h9ABC_DEF0, "preset lo readback");
    rd(G_TS_PRESET_HI, d); chk(d == 32'h1234, "preset hi readback");
    wr(G_SYNC_CTRL, 32'h1);
    rd(G_SYNC_CTRL, d); chk(d == 32'h3, $sformatf("status armed+held %h", d));
    pulse_sync();
    @(negedge dp_rst); rel_cyc = cyc; sync_in = 0;
    chk(timestamp == 48'h1234_9ABC_DEF0 || timestamp == 48'h1234_9ABC_DEF1, $sformatf("timestamp loaded %h", timestamp));
    @(posedge frame_stb); first_f = cyc;
    chk(first_f - rel_cyc == 320, $sformatf("first frame %0d clocks after release", first_f - rel_cyc));
    mon = 1;
    repeat (320 * 20) @(negedge clk);
    chk(nframe >= 19, $sformatf("frames %0d", nframe));
    chk(nsamp >= 19 * 32, "samples");
    rd(G_SYNC_CTRL, d); chk(d == 32'h0, "status released, disarmed");
    rd(G_TS_NOW_HI, d); chk(d == 32'h1234, "now hi");
    rd(G_TS_NOW_LO, d); chk(d - 32'h9ABC_DEF0 > 300 && d - 32'h9ABC_DEF0 < 400, $sformatf("now lo %h", d));
    // hold: strobes stop, sync without arm releases without touching the timestamp
    mon = 0;
    wr(G_SYNC_CTRL, 32'h2);
    @(negedge clk);
    chk(dp_rst == 1, "hold");
    begin
      int n = 0;
      repeat (700) begin @(negedge clk); if (samp_stb || frame_stb) n++; end
      chk(n == 0, "strobes while held again");
    end
    d = timestamp[31:0];
    pulse_sync();
    @(negedge dp_rst); sync_in = 0;
    chk(timestamp[31:0] - 32'h9ABC_DEF0 > 300 && timestamp[31:0] >= d, "timestamp not reloaded without arm");
    chk(timestamp[47:32] == 16'h1234, "timestamp high kept");
    last_s = -1; last_f = -1; last_tick_ts_cyc = -1; mon = 1;
    repeat (2000) @(negedge clk);
    chk(nframe >= 25, "frames after second release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
