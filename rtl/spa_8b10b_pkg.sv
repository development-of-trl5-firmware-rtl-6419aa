// spa_8b10b_pkg: the 8b/10b line code (Widmer-Franaszek) of the spacecraft links.
//
// The paper says the links are 8b/10b encoded and that the code's comma symbols give
// bit/frame alignment and idle detection; the code itself is the standard one. A 10-bit
// symbol is written {a,b,c,d,e,i,f,g,h,j} with `a` in bit 9, the bit sent first.
// encode() implements the 5b/6b and 3b/4b sub-block tables with running disparity;
// the control symbols K28.0-7, K23.7, K27.7, K29.7 and K30.7 are taken from their RD-
// form and complemented when the running disparity is positive. dec_table() inverts
// encode() over all data and control symbols of both disparities into a 1024-entry
// table {valid, k, byte}; a received symbol that is in no column is a code error. The
// decoder does not check running disparity.
package spa_8b10b_pkg;

  // 5b/6b codes (abcdei) for running disparity -, indexed by EDCBA.
  localparam logic [5:0] C6 [32] = '{
    6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
    6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
    6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
    6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011};
  // 3b/4b codes (fghj) for running disparity -, indexed by HGF (7 = primary P7).
  localparam logic [3:0] C4 [8] = '{
    4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110};

  function automatic int pop(input logic [9:0] v);
    int n = 0;
    for (int i = 0; i < 10; i++) n += int'(v[i]);
    return n;
  endfunction

  // Valid control symbols, RD- form, with bit 10 set when the byte names one.
  function automatic logic [10:0] k_sym(input logic [7:0] b);
    unique case (b)
      8'h1C: return {1'b1, 10'b0011110100};  // K28.0
      8'h3C: return {1'b1, 10'b0011111001};  // K28.1
      8'h5C: return {1'b1, 10'b0011110101};  // K28.2
      8'h7C: return {1'b1, 10'b0011110011};  // K28.3
      8'h9C: return {1'b1, 10'b0011110010};  // K28.4
      8'hBC: return {1'b1, 10'b0011111010};  // K28.5
      8'hDC: return {1'b1, 10'b0011110110};  // K28.6
      8'hFC: return {1'b1, 10'b0011111000};  // K28.7
      8'hF7: return {1'b1, 10'b1110101000};  // K23.7
      8'hFB: return {1'b1, 10'b1101101000};  // K27.7
      8'hFD: return {1'b1, 10'b1011101000};  // K29.7
      8'hFE: return {1'b1, 10'b0111101000};  // K30.7
      default: return {1'b0, 10'b0011111010};
    endcase
  endfunction

  // Encode one byte. rd_in: running disparity before the symbol, 0 = negative, 1 = positive.
  function automatic logic [9:0] encode(input logic [7:0] b, input logic k, input logic rd_in);
    logic [5:0] c6;
    logic [3:0] c4;
    logic [9:0] sym;
    logic       a7, rd;
    int x, y;
    rd = rd_in;
    if (k) begin
      sym = k_sym(b)[9:0];
      if (rd) sym = ~sym;
    end else begin
      x = int'(b[4:0]);
      y = int'(b[7:5]);
      c6 = C6[x];
      if (rd && (pop({4'b0, c6}) != 3 || x == 7)) c6 = ~c6;
      if (pop({4'b0, c6}) > 3) rd = 1'b1;
      else if (pop({4'b0, c6}) < 3) rd = 1'b0;
      if (y == 7) begin
        a7 = (!rd && (x == 17 || x == 18 || x == 20)) || (rd && (x == 11 || x == 13 || x == 14));
        c4 = a7 ? 4'b0111 : 4'b1110;
        if (rd) c4 = ~c4;
      end else begin
        c4 = C4[y];
        if (rd && (pop({6'b0, c4}) != 2 || y == 3)) c4 = ~c4;
      end
      sym = {c6, c4};
    end
    return sym;
  endfunction

  // Running disparity after a symbol: unchanged if balanced, else the sign of its excess.
  function automatic logic rd_after(input logic [9:0] sym, input logic rd_in);
    if (pop(sym) > 5) return 1'b1;
    if (pop(sym) < 5) return 1'b0;
    return rd_in;
  endfunction

  typedef logic [9:0] dec_tab_t [1024];  // {valid, k, byte}

  function automatic dec_tab_t dec_table();
    dec_tab_t t;
    logic [9:0] s;
    logic [10:0] kk;
    for (int i = 0; i < 1024; i++) t[i] = '0;
    for (int rdi = 0; rdi < 2; rdi++) begin
      for (int d = 0; d < 256; d++) begin
        s = encode(8'(d), 1'b0, rdi[0]);
        t[s] = {1'b1, 1'b0, 8'(d)};
      end
      for (int d = 0; d < 256; d++) begin
        kk = k_sym(8'(d));
        s = kk[9:0];
        if (kk[10]) t[rdi[0] ? ~s : s] = {1'b1, 1'b1, 8'(d)};
      end
    end
    return t;
  endfunction

endpackage
