// packetizer: gathers one decimated sample of every channel of a signal path into a
// science enclosure, as a stream of 32-bit words for the control interface to send.
//
// The paper says the decimated timestreams are packetized and sent over the link
// together with 48-bit timestamps; the enclosure layout below is this design's own:
//   word 0      : {ENC_SCIENCE, 4'h0, path id[3:0], sequence[15:0]}
//   word 1      : number of words that follow (2 + 2*NCHAN)
//   word 2      : {16'h0, timestamp[47:32]}
//   word 3      : timestamp[31:0]            (taken when channel 0 arrives)
//   word 4 + 2c : channel c, I;   word 5 + 2c : channel c, Q
// The stream uses valid/ready with `last` on the final word.
//
// Buffering: one frame buffer. Channels arriving while no enclosure is being sent are
// written into it; after channel NCHAN-1 the enclosure is sent. If a new frame starts
// (channel 0) while the previous enclosure is still being sent, that whole frame is
// dropped and `overflow_cnt` increments (the link is then too slow for the data rate).
// The sequence number increments once per sent enclosure, so drops are visible to the
// receiver as well.
module packetizer
  import spa_pkg::*;
#(
  parameter int NCHAN_P = NCHAN,
  parameter int W       = SCI_W
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [3:0]                  path_id,
  input  logic [TS_W-1:0]             timestamp,
  input  logic                        in_valid,
  input  logic [$clog2(NCHAN_P)-1:0]  in_chan,
  input  logic signed [W-1:0]         in_re,
  input  logic signed [W-1:0]         in_im,
  output logic                        out_valid,
  output logic [31:0]                 out_data,
  output logic                        out_last,
  input  logic                        out_ready,
  output logic [15:0]                 overflow_cnt
);
  localparam int CAW    = $clog2(NCHAN_P);
  localparam int NWORDS = 4 + 2 * NCHAN_P;
  localparam int WAW    = $clog2(NWORDS);

  logic [2*W-1:0]   buf_q [NCHAN_P];
  logic [TS_W-1:0]  ts_q;
  logic [15:0]      seq;
  logic             sending, filling, can_start;
  logic [WAW-1:0]   widx;

  // word being offered
  logic [CAW-1:0]   rc;
  logic [2*W-1:0]   rv;
  assign rc = CAW'((int'(widx) - 4) >> 1);
  assign rv = buf_q[rc];
  always_comb begin
    unique case (int'(widx))
      0: out_data = {ENC_SCIENCE, 4'h0, path_id, seq};
      1: out_data = 32'(NWORDS - 2);
      2: out_data = {16'h0, ts_q[47:32]};
      3: out_data = ts_q[31:0];
      default: out_data = widx[0] ? 32'(signed'(rv[W-1:0])) : 32'(signed'(rv[2*W-1:W]));
    endcase
  end
  assign out_valid = sending;
  assign out_last  = sending && (int'(widx) == NWORDS - 1);
  assign can_start = !sending || (out_ready && out_last);

  always_ff @(posedge clk) begin
    if (rst) begin
      sending <= 1'b0; filling <= 1'b0; widx <= '0; seq <= '0;
      overflow_cnt <= '0; ts_q <= '0;
    end else begin
      if (sending && out_ready) begin
        widx <= widx + 1'b1;
        if (int'(widx) == NWORDS - 1) begin
          sending <= 1'b0;
          widx    <= '0;
          seq     <= seq + 1'b1;
        end
      end
      if (in_valid) begin
        if (in_chan == '0) begin
          if (!can_start) begin
            filling      <= 1'b0;
            overflow_cnt <= overflow_cnt + 1'b1;
          end else begin
            filling  <= 1'b1;
            ts_q     <= timestamp;
          end
        end
        if ((in_chan == '0) ? can_start : filling)
          buf_q[in_chan] <= {in_re, in_im};
        if (int'(in_chan) == NCHAN_P - 1 && ((in_chan == '0) ? can_start : filling)) begin
          filling <= 1'b0;
          sending <= 1'b1;
          widx    <= '0;
        end
      end
    end
  end

endmodule
