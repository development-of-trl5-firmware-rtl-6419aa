// dds_lut: sine/cosine table of the direct digital synthesizers of the fine up- and
// downconverters.
//
// The paper names the DDS but not its construction. This one is a plain lookup: the top
// DDS_LUT_AW (10) bits of a 32-bit phase select one of 1024 points of a full period,
// giving cos and sin as 18-bit Q1.17 values (1.0 is held as 2^17-1). The table is computed
// at elaboration from $cos/$sin, so no data file is needed. Combinational; the phase
// accumulators live in the converters, one per channel.
module dds_lut
  import spa_pkg::*;
#(
  parameter int AW = DDS_LUT_AW,
  parameter int W  = DDS_W
) (
  input  logic [AW-1:0]         phase,
  output logic signed [W-1:0]   cos_o,
  output logic signed [W-1:0]   sin_o
);
  typedef logic signed [W-1:0] v_t;
  typedef v_t tab_t [2**AW];

  function automatic tab_t mk(input bit do_sin);
    tab_t t;
    real a;
    for (int i = 0; i < 2**AW; i++) begin
      a = 6.283185307179586 * i / (2.0 ** AW);
      t[i] = v_t'($rtoi($floor((do_sin ? $sin(a) : $cos(a)) * (2.0 ** (W-1) - 1.0) + 0.5)));
    end
    return t;
  endfunction

  localparam tab_t COS_T = mk(1'b0);
  localparam tab_t SIN_T = mk(1'b1);

  assign cos_o = COS_T[phase];
  assign sin_o = SIN_T[phase];
endmodule
