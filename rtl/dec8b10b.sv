// dec8b10b: 8b/10b symbol decoder for the spacecraft link receiver. A 1024-entry table,
// built at elaboration by inverting the encoder over every data and control symbol of
// both disparities, maps a 10-bit symbol to {byte, k}; a symbol in no column raises
// `err`. Combinational; running disparity is not checked.
module dec8b10b
  import spa_8b10b_pkg::*;
(
  input  logic [9:0] sym,
  output logic [7:0] dout,
  output logic       kout,
  output logic       err
);
  localparam dec_tab_t TAB = dec_table();
  logic [9:0] e;
  assign e    = TAB[sym];
  assign dout = e[7:0];
  assign kout = e[8];
  assign err  = ~e[9];
endmodule
