// link_serdes: one spacecraft I/O link: a full-duplex 8b/10b serial link at 50 Mbps with
// a 25 MHz source-synchronous clock in each direction (one bit per clock edge).
//
// From the paper: 8b/10b coding, 50 Mbps, DC coupling, a source-synchronous 25 MHz clock
// in both directions, and comma symbols used for bit/frame alignment and idle detection.
// The oversampling receiver, the symbol timing and the use of K28.5 as the idle/comma
// symbol are this design's.
//
// Transmit: a bit lasts CLK_PER_BIT = 4 system clocks (200 MHz / 50 Mbps). At the end of
// each 10-bit symbol the next byte is taken from tx_valid/tx_k/tx_data (tx_take pulses
// in that clock) or, when nothing is offered, the idle comma K28.5 is sent. Data changes
// at the start of a bit and tx_clk_o toggles in its middle, so every tx_clk_o edge is a
// sampling point. One byte is taken every 40 clocks.
//
// Receive: rx_clk_i and rx_data_i pass through identical two-flop synchronisers; each
// edge of the synchronised clock samples one bit. A K28.5 in the shift register (either
// disparity) sets the symbol boundary; from then on every tenth bit is decoded and
// delivered on rx_valid/rx_k/rx_data (commas included), with rx_err for a code error.
// rx_idle is high while the last symbol received was a comma.
module link_serdes #(
  parameter int CLK_PER_BIT = 4
) (
  input  logic       clk,
  input  logic       rst,
  // transmit bytes
  input  logic       tx_valid,
  input  logic       tx_k,
  input  logic [7:0] tx_data,
  output logic       tx_take,
  // transmit pins
  output logic       tx_clk_o,
  output logic       tx_data_o,
  // receive pins
  input  logic       rx_clk_i,
  input  logic       rx_data_i,
  // received bytes
  output logic       rx_valid,
  output logic       rx_k,
  output logic [7:0] rx_data,
  output logic       rx_err,
  output logic       rx_aligned,
  output logic       rx_idle
);
  localparam logic [9:0] COMMA_N = 10'b0011111010;
  localparam logic [9:0] COMMA_P = 10'b1100000101;

  // ---------------- transmit ----------------
  logic [$clog2(CLK_PER_BIT)-1:0] ph;
  logic [3:0] tbit;
  logic       enc_en;
  logic [9:0] tsym;
  logic       trd;

  assign enc_en  = (int'(ph) == CLK_PER_BIT - 1) && (tbit == 4'd9);
  assign tx_take = enc_en && tx_valid;

  enc8b10b u_enc (
    .clk, .rst, .en(enc_en),
    .din(tx_valid ? tx_data : 8'hBC), .kin(tx_valid ? tx_k : 1'b1),
    .sym(tsym), .rd(trd)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      ph <= '0; tbit <= 4'd9; tx_clk_o <= 1'b0; tx_data_o <= 1'b0;
    end else begin
      if (int'(ph) == CLK_PER_BIT - 1) begin
        ph   <= '0;
        tbit <= (tbit == 4'd9) ? 4'd0 : tbit + 1'b1;
      end else begin
        ph <= ph + 1'b1;
      end
      if (ph == '0) tx_data_o <= tsym[4'd9 - tbit];
      if (int'(ph) == CLK_PER_BIT / 2) tx_clk_o <= ~tx_clk_o;
    end
  end

  // ---------------- receive ----------------
  logic [2:0] cs, ds;
  logic [9:0] rsh, nsh;
  logic [3:0] rcnt;
  logic       edge_s;
  logic [7:0] dd;
  logic       dk, derr;

  assign edge_s = cs[2] ^ cs[1];
  assign nsh    = {rsh[8:0], ds[1]};

  dec8b10b u_dec (.sym(nsh), .dout(dd), .kout(dk), .err(derr));

  always_ff @(posedge clk) begin
    if (rst) begin
      cs <= '0; ds <= '0; rsh <= '0; rcnt <= '0;
      rx_valid <= 1'b0; rx_k <= 1'b0; rx_data <= '0; rx_err <= 1'b0;
      rx_aligned <= 1'b0; rx_idle <= 1'b0;
    end else begin
      cs <= {cs[1:0], rx_clk_i};
      ds <= {ds[1:0], rx_data_i};
      rx_valid <= 1'b0;
      rx_err   <= 1'b0;
      if (edge_s) begin
        rsh <= nsh;
        if (nsh == COMMA_N || nsh == COMMA_P) begin
          rx_aligned <= 1'b1;
          rcnt       <= '0;
          rx_valid   <= 1'b1;
          rx_k       <= 1'b1;
          rx_data    <= 8'hBC;
          rx_idle    <= 1'b1;
        end else if (rx_aligned) begin
          if (rcnt == 4'd9) begin
            rcnt     <= '0;
            rx_valid <= ~derr;
            rx_err   <= derr;
            rx_k     <= dk;
            rx_data  <= dd;
            rx_idle  <= 1'b0;
          end else begin
            rcnt <= rcnt + 1'b1;
          end
        end
      end
    end
  end

endmodule
