// tb_control_interface: drives received bytes straight into the control interface and
// models the serialiser (a byte is taken every TAKE clocks), a register-bus slave (a
// memory answering reads one clock after re) and NSRC science streams that always have
// an enclosure ready. Checks:
//   - write requests reach the bus with the right address and data;
//   - read requests return the slave's data in a response enclosure with the request's
//     sequence number, and write responses echo the address and data;
//   - malformed enclosures (wrong length, unknown type, coding error) are not executed and
//     are counted;
//   - the transmit side frames every enclosure with K27.7 ... K29.7, science words arrive
//     complete and in order, and the round robin serves every source (no source waits
//     for more than NSRC other enclosures while it has data).
module tb_control_interface;
  import spa_pkg::*;
  localparam int NSRC = 3, TAKE = 6, SW = 6;   // SW words per science enclosure
  logic clk = 0, rst = 1;
  logic rx_valid = 0, rx_k = 0, rx_err = 0;
  logic [7:0] rx_data = 0;
  logic tx_valid, tx_k, tx_take = 0;
  logic [7:0] tx_data;
  reg_req_t req;
  logic [31:0] rdata = 0;
  logic [NSRC-1:0] s_valid, s_last, s_ready;
  logic [31:0] s_data [NSRC];
  logic [15:0] bad_cnt, drop_cnt, req_cnt;
  int checks = 0, failures = 0;

  control_interface #(.NSRC(NSRC), .RDEPTH(4)) dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // register slave
  logic [31:0] regs [256];
  int nwrites = 0;
  always @(posedge clk) begin
    rdata <= 0;
    if (!rst && req.we) begin regs[req.addr[7:0]] <= req.wdata; nwrites++; end
    if (!rst && req.re) rdata <= regs[req.addr[7:0]];
  end

  // science sources: enclosure j of source i is {i, j, word index}
  int sw [NSRC], sn [NSRC];
  always_comb for (int i = 0; i < NSRC; i++) begin
    s_valid[i] = 1'b1;
    s_data[i]  = {8'(i), 16'(sn[i]), 8'(sw[i])};
    s_last[i]  = (sw[i] == SW - 1);
  end
  always @(posedge clk) for (int i = 0; i < NSRC; i++)
    if (!rst && s_ready[i]) begin
      if (sw[i] == SW - 1) begin sw[i] <= 0; sn[i] <= sn[i] + 1; end else sw[i] <= sw[i] + 1;
    end

  // serialiser model and enclosure parser
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) tx_take = !rst && tx_valid && (cyc % TAKE == 0);

  logic [31:0] resp_q [$];      // expected response words
  logic [31:0] cur [$];
  logic [31:0] w;
  int nb = 0, in_enc = 0, n_resp = 0, n_sci = 0;
  int exp_sci_n [NSRC];
  int since [NSRC];             // enclosures sent since source i was last served
  always @(posedge clk) if (!rst && tx_take) begin
    if (tx_k && tx_data == K27_7) begin
      chk(!in_enc, "SOP inside enclosure");
      in_enc = 1; cur.delete(); nb = 0;
    end else if (tx_k && tx_data == K29_7) begin
      chk(in_enc && nb == 0, "EOP placement");
      in_enc = 0;
      if (cur[0][31:24] >= ENC_RESP) begin
        n_resp++;
        chk(cur.size() == 4, "response length");
        for (int i = 0; i < 4; i++) begin
          logic [31:0] e;
          e = resp_q.pop_front();
          chk(cur[i] == e, $sformatf("response word %0d got %h exp %h", i, cur[i], e));
        end
      end else begin
        int src;
        src = cur[0][31:24];
        n_sci++;
        chk(cur.size() == SW, "science length");
        for (int i = 0; i < SW; i++)
          chk(cur[i] == {8'(src), 16'(exp_sci_n[src]), 8'(i)}, $sformatf("science %h", cur[i]));
        exp_sci_n[src]++;
        for (int i = 0; i < NSRC; i++) begin
          if (i == src) since[i] = 0;
          else begin since[i]++; chk(since[i] <= NSRC + 1, "round robin starvation"); end
        end
      end
    end else begin
      chk(!tx_k, "unexpected control character");
      w = {w[23:0], tx_data};
      nb = (nb + 1) % 4;
      if (nb == 0) cur.push_back(w);
    end
  end

  task automatic send_byte(input logic [7:0] b, input logic k, input logic e = 0);
    @(negedge clk); rx_valid = 1; rx_k = k; rx_data = b; rx_err = e;
    @(negedge clk); rx_valid = 0; rx_err = 0;
    repeat (3) @(negedge clk);
  endtask
  task automatic send_enc(input logic [31:0] words [$], input int bad_byte = -1);
    send_byte(K27_7, 1);
    for (int i = 0; i < words.size(); i++)
      for (int b = 3; b >= 0; b--)
        send_byte(words[i][8*b +: 8], 0, (i * 4 + 3 - b) == bad_byte);
    send_byte(K29_7, 1);
  endtask

  initial begin
    logic [31:0] ws [$];
    for (int i = 0; i < 256; i++) regs[i] = 32'(i) * 32'h0101_0101;
    for (int i = 0; i < NSRC; i++) begin sw[i] = 0; sn[i] = 0; exp_sci_n[i] = 0; since[i] = 0; end
    repeat (5) @(negedge clk); rst = 0;
    for (int t = 0; t < 40; t++) begin
      logic [7:0] a;
      logic [31:0] d;
      logic [15:0] seq;
      bit isw;
      a = $urandom; d = $urandom; seq = $urandom; isw = $urandom % 2;
      ws = '{{isw ? ENC_WRITE : ENC_READ, 8'h01, seq}, 32'd2, {8'h0, 16'h0, a}, d};
      resp_q.push_back({(isw ? ENC_WRITE : ENC_READ) | ENC_RESP, 8'h0, seq});
      resp_q.push_back(32'd2);
      resp_q.push_back(32'(a));
      resp_q.push_back(isw ? d : regs[a]);
      send_enc(ws);
      repeat (10) @(negedge clk);
      if (isw) chk(regs[a] == d, "write landed");
      // space the requests so that the 4-entry response FIFO never overflows
      wait (resp_q.size() == 0);
    end
    chk(req_cnt == 40, $sformatf("request count %0d", req_cnt));
    // malformed enclosures
    ws = '{{ENC_WRITE, 8'h0, 16'h1}, 32'd3, 32'h10, 32'h5};                 send_enc(ws);
    ws = '{{8'h33, 8'h0, 16'h1}, 32'd2, 32'h10, 32'h5};                     send_enc(ws);
    ws = '{{ENC_WRITE, 8'h0, 16'h1}, 32'd2, 32'h10, 32'h5};                 send_enc(ws, 9);
    ws = '{{ENC_WRITE, 8'h0, 16'h1}, 32'd2, 32'h10};                        send_enc(ws);
    repeat (2000) @(negedge clk);
    chk(bad_cnt == 4, $sformatf("bad count %0d", bad_cnt));
    chk(req_cnt == 40, "malformed not executed");
    chk(n_resp == 40, $sformatf("responses %0d", n_resp));
    for (int i = 0; i < NSRC; i++) chk(exp_sci_n[i] > 10, $sformatf("science from %0d: %0d", i, exp_sci_n[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
