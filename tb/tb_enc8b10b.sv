// tb_enc8b10b: encodes a long random stream of data bytes and framing control symbols
// and checks, symbol by symbol: known symbols of the standard tables (D.0.0, D.21.5,
// K28.5 in both disparities, among others), that every symbol has 4, 5 or 6 ones and
// the running disparity stays bounded, and that the decoder returns the original byte
// and k flag. Also checks that corrupted commas (seven ones) are flagged by the decoder.
module tb_enc8b10b;
  logic clk = 0, rst = 1, en = 0, kin = 0, rd, kout, err;
  logic [7:0] din = 0, dout;
  logic [9:0] sym, dsym, bad = 10'b0011111011;
  logic [7:0] bdout;
  logic bkout, berr;
  int checks = 0, failures = 0;

  enc8b10b u_enc (.clk, .rst, .en, .din, .kin, .sym, .rd);
  dec8b10b u_dec (.sym(dsym), .dout, .kout, .err);
  dec8b10b u_dec_bad (.sym(bad), .dout(bdout), .kout(bkout), .err(berr));
  assign dsym = sym;
  always #2.5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ones(input logic [9:0] v);
    int n = 0;
    for (int i = 0; i < 10; i++) n += int'(v[i]);
    return n;
  endfunction

  task automatic send(input logic [7:0] b, input logic k);
    @(negedge clk); en = 1; din = b; kin = k;
    @(negedge clk); en = 0;
  endtask

  task automatic expect_sym(input logic [9:0] e, input string what);
    checks++;
    if (sym !== e) begin failures++; $display("FAIL %s: got %b exp %b", what, sym, e); end
  endtask

  initial begin
    int dispsum = 0;
    logic [7:0] b;
    logic k;
    repeat (3) @(posedge clk);
    rst = 0;
    // known symbols, starting from RD-
    send(8'hBC, 1); expect_sym(10'b0011111010, "K28.5 RD-");      // -> RD+
    send(8'hBC, 1); expect_sym(10'b1100000101, "K28.5 RD+");      // -> RD-
    send(8'h00, 0); expect_sym(10'b1001110100, "D.0.0 RD-");      // balanced
    send(8'hB5, 0); expect_sym(10'b1010101010, "D.21.5 RD-");
    send(8'hFB, 1); expect_sym(10'b1101101000, "K27.7 RD-");
    send(8'h00, 0); expect_sym(10'b1001110100, "D.0.0 RD-");
    send(8'h03, 0); expect_sym(10'b1100011011, "D.3.0 RD-");      // -> RD+
    send(8'h00, 0); expect_sym(10'b0110001011, "D.0.0 RD+");
    for (int i = 0; i < 5000; i++) begin
      k = ($urandom_range(0, 15) == 0);
      b = k ? ((i % 3 == 0) ? 8'hBC : (i % 3 == 1) ? 8'hFB : 8'hFD) : 8'($urandom);
      send(b, k);
      checks++;
      if (ones(sym) < 4 || ones(sym) > 6) begin failures++; $display("FAIL unbalanced %b", sym); end
      dispsum += ones(sym) - 5;
      checks++;
      if (dispsum > 1 || dispsum < -1) begin failures++; $display("FAIL running disparity %0d", dispsum); end
      checks++;
      if (err || dout !== b || kout !== k) begin failures++; $display("FAIL decode %h/%0d -> %h/%0d err %0d", b, k, dout, kout, err); end
    end
    // a single-bit error in a comma is not a valid symbol
    // a 0 -> 1 flip in K28.5 gives seven ones, which no symbol has
    foreach (bad[i]) if (!(10'b0011111010 >> i & 10'b1)) begin
      bad = 10'b0011111010 | (10'b1 << i);
      #1;
      checks++;
      if (!berr) begin failures++; $display("FAIL corrupted comma %b accepted", bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
