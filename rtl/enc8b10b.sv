// enc8b10b: registered 8b/10b encoder with running disparity, for the spacecraft link
// transmitter. On `en` the byte (data or, with k set, a control symbol) is encoded with
// the current running disparity; the symbol appears on `sym` after the clock edge and the
// disparity is updated. Running disparity starts negative after reset. The code tables
// are in spa_8b10b_pkg.
module enc8b10b
  import spa_8b10b_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       en,
  input  logic [7:0] din,
  input  logic       kin,
  output logic [9:0] sym,
  output logic       rd
);
  logic [9:0] s;
  assign s = encode(din, kin, rd);

  always_ff @(posedge clk) begin
    if (rst) begin
      rd  <= 1'b0;
      sym <= '0;
    end else if (en) begin
      sym <= s;
      rd  <= rd_after(s, rd);
    end
  end
endmodule
