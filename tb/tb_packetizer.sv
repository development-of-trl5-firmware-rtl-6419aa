// tb_packetizer: feeds frames of NCH channels and checks every word of the resulting
// enclosures against a model of the layout (header with path id and sequence number,
// length, 48-bit timestamp taken at channel 0, then I and Q of each channel), with random
// back-pressure on `ready` and `last` on the final word only. It then sends frames
// faster than a stalled output can drain them and checks that whole frames are dropped,
// that the overflow counter counts them, and that the sequence number only counts sent
// enclosures.
module tb_packetizer;
  import spa_pkg::*;
  localparam int NCH = 8;
  localparam int NW = 4 + 2 * NCH;
  logic clk = 0, rst = 1;
  logic [3:0] path_id = 4'd5;
  logic [TS_W-1:0] timestamp = 48'h0000_0100_0000;
  logic in_valid = 0;
  logic [2:0] in_chan = 0;
  logic signed [31:0] in_re = 0, in_im = 0;
  logic out_valid, out_last, out_ready = 0;
  logic [31:0] out_data;
  logic [15:0] overflow_cnt;
  int checks = 0, failures = 0;

  packetizer #(.NCHAN_P(NCH), .W(32)) dut (.*);
  always #2.5 clk = ~clk;
  always @(posedge clk) timestamp <= timestamp + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // expected enclosures
  logic [31:0] expq [$];
  int pkts = 0, exp_seq = 0;
  bit rnd_ready = 1;

  task automatic send_frame(input int n_sent_before, input bit expect_sent);
    logic [31:0] re [NCH], im [NCH];
    logic [TS_W-1:0] ts;
    for (int c = 0; c < NCH; c++) begin
      re[c] = $urandom; im[c] = $urandom;
      @(negedge clk);
      in_valid = 1; in_chan = 3'(c); in_re = re[c]; in_im = im[c];
      if (c == 0) ts = timestamp;
    end
    @(negedge clk); in_valid = 0;
    if (expect_sent) begin
      expq.push_back({ENC_SCIENCE, 4'h0, path_id, 16'(exp_seq)});
      expq.push_back(32'(NW - 2));
      expq.push_back({16'h0, ts[47:32]});
      expq.push_back(ts[31:0]);
      for (int c = 0; c < NCH; c++) begin expq.push_back(re[c]); expq.push_back(im[c]); end
      exp_seq++;
    end
  endtask

  int widx = 0;
  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      chk(expq.size() > 0, "unexpected word");
      if (expq.size() > 0) begin
        logic [31:0] e;
        e = expq.pop_front();
        chk(out_data == e, $sformatf("word %0d got %h exp %h", widx, out_data, e));
      end
      chk(out_last == (widx == NW - 1), "last");
      widx = (widx == NW - 1) ? 0 : widx + 1;
      if (out_last) pkts++;
    end
  end
  always @(negedge clk) out_ready = rnd_ready ? ($urandom % 3 != 0) : 1'b0;

  initial begin
    repeat (5) @(negedge clk); rst = 0;
    // normal operation: frames far enough apart
    for (int f = 0; f < 20; f++) begin
      send_frame(0, 1);
      wait (expq.size() == 0);
      repeat ($urandom % 20) @(negedge clk);
    end
    chk(pkts == 20, $sformatf("packets %0d", pkts));
    chk(overflow_cnt == 0, "no overflow");
    // overflow: output stalled while frames keep coming
    rnd_ready = 0;
    send_frame(0, 1);          // accepted, cannot be sent yet
    repeat (3) send_frame(0, 0);   // dropped
    chk(overflow_cnt == 3, $sformatf("overflow count %0d", overflow_cnt));
    rnd_ready = 1;
    wait (expq.size() == 0);
    repeat (5) @(negedge clk);
    send_frame(0, 1);
    wait (expq.size() == 0);
    repeat (5) @(negedge clk);
    chk(pkts == 22, $sformatf("packets %0d", pkts));
    chk(overflow_cnt == 3, "overflow count kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
