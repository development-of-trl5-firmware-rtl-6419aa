// control_interface: the SPA end of the link to the data processing unit (DPU). It turns
// received enclosures into register reads and writes, and sends the responses and the
// science enclosures of all signal paths back over the same link.
//
// The paper specifies an 8b/10b-coded link with comma characters for alignment and idle
// detection, and an asynchronous request/response style: the DPU may have several
// requests in flight and receives the responses later. The enclosure format, the request
// types and the arbitration below are this design's own.
//
// Enclosure on the link: K27.7 (start), a whole number of 32-bit words sent most
// significant byte first, K29.7 (end). Idle time is filled with K28.5 by the serialiser.
//   request : {type, src, seq[15:0]}, 2, {8'h0, addr[23:0]}, data
//             type ENC_WRITE writes `data` to `addr`; ENC_READ reads `addr`
//   response: {type | ENC_RESP, 8'h0, seq}, 2, {8'h0, addr}, data (read data for a read)
// Any other enclosure (wrong length, unknown type, a coding error inside it) is dropped
// and counted in `bad_cnt`. Responses wait in a RDEPTH-entry FIFO; if it is full the
// request is still executed but its response is dropped and counted in `drop_cnt`.
//
// Transmit arbitration: round robin over the response FIFO and the NSRC science streams,
// one whole enclosure per grant, so a busy science path cannot starve the responses.
// Science streams are valid/ready word streams with `last`; a word is taken (ready high
// for one clock, combinationally) when its fourth byte has been accepted by the serialiser (tx_take).
//
// Register bus timing: the request is on `req` for one clock; the slave registers its
// answer at the end of that clock, and it is taken from `rdata` on the following clock.
module control_interface
  import spa_pkg::*;
#(
  parameter int NSRC   = NSQUID,
  parameter int RDEPTH = 16
) (
  input  logic              clk,
  input  logic              rst,
  // received bytes (from the deserialiser)
  input  logic              rx_valid,
  input  logic              rx_k,
  input  logic [7:0]        rx_data,
  input  logic              rx_err,
  // bytes to send (to the serialiser)
  output logic              tx_valid,
  output logic              tx_k,
  output logic [7:0]        tx_data,
  input  logic              tx_take,
  // register bus master
  output reg_req_t          req,
  input  logic [31:0]       rdata,
  // science enclosures
  input  logic [NSRC-1:0]   s_valid,
  input  logic [31:0]       s_data [NSRC],
  input  logic [NSRC-1:0]   s_last,
  output logic [NSRC-1:0]   s_ready,
  // statistics
  output logic [15:0]       bad_cnt,
  output logic [15:0]       drop_cnt,
  output logic [15:0]       req_cnt
);
  localparam int NS  = NSRC + 1;            // arbitration slot 0 is the response FIFO
  localparam int GW  = $clog2(NS);
  localparam int FAW = $clog2(RDEPTH);

  // ---------------- receive ----------------
  logic        in_frame;
  logic [31:0] shw;
  logic [1:0]  nbyte;
  logic [2:0]  nw;
  logic [31:0] rw [4];
  logic        bad_frame;

  // execute pipeline: the request is on req while e1_v, its read data on rdata while e2_v
  logic        e1_v, e2_v;
  logic [7:0]  e2_type;
  logic [15:0] e2_seq;
  logic [23:0] e2_addr;
  logic [31:0] e2_data;

  // response FIFO, entry {type, seq, addr, data}
  typedef struct packed {
    logic [7:0]  typ;
    logic [15:0] seq;
    logic [23:0] addr;
    logic [31:0] data;
  } resp_t;
  resp_t        fifo [RDEPTH];
  logic [FAW:0] wp, rp;
  logic         f_empty, f_full, f_pop;
  assign f_empty = (wp == rp);
  assign f_full  = (wp[FAW] != rp[FAW]) && (wp[FAW-1:0] == rp[FAW-1:0]);

  logic        ok_req;
  logic [7:0]  rtype;
  assign rtype  = rw[0][31:24];
  assign ok_req = in_frame && !bad_frame && nw == 3'd4 && nbyte == 2'd0 && rw[1] == 32'd2 &&
                  (rtype == ENC_WRITE || rtype == ENC_READ);

  always_ff @(posedge clk) begin
    if (rst) begin
      in_frame <= 1'b0; nbyte <= '0; nw <= '0; bad_frame <= 1'b0; shw <= '0;
      req <= '0; e1_v <= 1'b0; e2_v <= 1'b0; wp <= '0; bad_cnt <= '0; drop_cnt <= '0; req_cnt <= '0;
      e2_type <= '0; e2_seq <= '0; e2_addr <= '0; e2_data <= '0;
      for (int i = 0; i < 4; i++) rw[i] <= '0;
    end else begin
      req.we <= 1'b0;
      req.re <= 1'b0;
      e1_v   <= 1'b0;
      e2_v   <= e1_v;

      if (rx_valid && rx_err) begin
        if (in_frame) bad_frame <= 1'b1;
      end else if (rx_valid && rx_k) begin
        if (rx_data == K27_7) begin
          if (in_frame) bad_cnt <= bad_cnt + 1'b1;    // unterminated enclosure
          in_frame <= 1'b1; nbyte <= '0; nw <= '0; bad_frame <= 1'b0;
        end else if (rx_data == K29_7 && in_frame) begin
          in_frame <= 1'b0;
          if (ok_req) begin
            req.we    <= (rtype == ENC_WRITE);
            req.re    <= (rtype == ENC_READ);
            req.addr  <= rw[2][23:0];
            req.wdata <= rw[3];
            e1_v      <= 1'b1;
            e2_type   <= rtype;
            e2_seq    <= rw[0][15:0];
            e2_addr   <= rw[2][23:0];
            e2_data   <= rw[3];
            req_cnt   <= req_cnt + 1'b1;
          end else begin
            bad_cnt <= bad_cnt + 1'b1;
          end
        end
      end else if (rx_valid && in_frame) begin
        shw   <= {shw[23:0], rx_data};
        nbyte <= nbyte + 1'b1;
        if (nbyte == 2'd3) begin
          if (nw < 3'd4) rw[nw[1:0]] <= {shw[23:0], rx_data};
          if (nw < 3'd7) nw <= nw + 1'b1;
        end
      end

      // stage 2: the read data is on rdata now
      if (e2_v) begin
        if (f_full) drop_cnt <= drop_cnt + 1'b1;
        else begin
          fifo[wp[FAW-1:0]] <= '{typ: e2_type | ENC_RESP, seq: e2_seq, addr: e2_addr,
                                 data: (e2_type == ENC_READ) ? rdata : e2_data};
          wp <= wp + 1'b1;
        end
      end
    end
  end

  // ---------------- transmit ----------------
  typedef enum logic [1:0] {T_IDLE, T_SOP, T_WORD, T_EOP} tst_e;
  tst_e          tst;
  logic [GW-1:0] g, rr;
  logic [1:0]    bidx;
  logic [1:0]    ridx;               // word index within a response
  logic [31:0]   cur_word;
  logic          cur_last;
  resp_t         rhead;
  assign rhead = fifo[rp[FAW-1:0]];

  always_comb begin
    cur_word = '0;
    cur_last = 1'b0;
    if (g == '0) begin
      unique case (ridx)
        2'd0: cur_word = {rhead.typ, 8'h0, rhead.seq};
        2'd1: cur_word = 32'd2;
        2'd2: cur_word = {8'h0, rhead.addr};
        2'd3: cur_word = rhead.data;
      endcase
      cur_last = (ridx == 2'd3);
    end else begin
      cur_word = s_data[int'(g) - 1];
      cur_last = s_last[int'(g) - 1];
    end
  end

  // slot requests, and the first requesting slot at or after rr
  logic [NS-1:0] want;
  logic [GW-1:0] pick;
  logic          any;
  always_comb begin
    want = {s_valid, !f_empty};
    any  = |want;
    pick = rr;
    for (int i = NS - 1; i >= 0; i--) begin
      if (want[(int'(rr) + i) % NS]) pick = GW'((int'(rr) + i) % NS);
    end
  end

  always_comb begin
    tx_valid = (tst != T_IDLE);
    tx_k     = (tst == T_SOP) || (tst == T_EOP);
    unique case (tst)
      T_SOP:   tx_data = K27_7;
      T_EOP:   tx_data = K29_7;
      T_WORD:  tx_data = cur_word[8 * (3 - int'(bidx)) +: 8];
      default: tx_data = K28_5;
    endcase
  end

  assign f_pop = (tst == T_WORD) && tx_take && bidx == 2'd3 && g == '0 && ridx == 2'd3;

  always_comb begin
    s_ready = '0;
    if (tst == T_WORD && tx_take && bidx == 2'd3 && g != '0) s_ready[int'(g) - 1] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tst <= T_IDLE; g <= '0; rr <= '0; bidx <= '0; ridx <= '0; rp <= '0;
    end else begin
      unique case (tst)
        T_IDLE: if (any) begin
          g    <= pick;
          tst  <= T_SOP;
          bidx <= '0;
          ridx <= '0;
        end
        T_SOP: if (tx_take) tst <= T_WORD;
        T_WORD: if (tx_take) begin
          bidx <= bidx + 1'b1;
          if (bidx == 2'd3) begin
            if (g == '0) ridx <= ridx + 1'b1;
            if (cur_last) tst <= T_EOP;
          end
        end
        T_EOP: if (tx_take) begin
          tst <= T_IDLE;
          rr  <= (int'(g) == NS - 1) ? '0 : g + 1'b1;
        end
      endcase
      if (f_pop) rp <= rp + 1'b1;
    end
  end

endmodule
