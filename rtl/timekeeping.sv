// timekeeping: 48-bit timestamp, synchronisation and the rate strobes of the datapath.
//
// From the paper: timestamps are 48-bit counters incremented by the 10 MHz master clock;
// a value pre-programmed by the DPU is latched into the counter by a "sync" event; the
// timekeeping logic holds the signal paths in reset and a global sync event brings them
// out of reset on the same master-clock edge in every SPU.
//
// This design runs on one 200 MHz clock derived by the PLL from the 10 MHz reference, so
// the master clock is represented by `master_tick`, high one clock in 20. The sync strobe
// (sync_in, from the DPU) passes a two-flop synchroniser and acts on its rising edge,
// aligned to a master tick. At a sync event:
//   - if armed (SYNC_CTRL bit 0 written 1), the timestamp is loaded from the preset
//     registers and the arm bit clears;
//   - if the datapaths are held in reset (after power-up, or SYNC_CTRL bit 1 written 1),
//     dp_rst is released, and the master-tick, sample and frame counters restart, so all
//     signal paths of all units start their frames on the same clock.
// The strobes: samp_stb every 10 clocks (20 MSPS) and frame_stb every 320 clocks
// (625 ksps), coinciding with every 32nd samp_stb. They run only while dp_rst is low.
//
// Registers (global space): 0 preset[31:0], 1 preset[47:32], 2 timestamp[31:0],
// 3 timestamp[47:32] (read), 4 SYNC_CTRL (bit 0 arm, bit 1 hold datapaths in reset;
// reads back arm, dp_rst). Reads return one clock after re.
module timekeeping
  import spa_pkg::*;
#(
  parameter int CLK_PER_TICK = 20,
  parameter int CPS          = CLK_PER_SAMP,
  parameter int SPF          = DEC
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             sync_in,
  input  reg_req_t         req,
  input  logic             req_sel,
  output logic [31:0]      rdata,
  output logic [TS_W-1:0]  timestamp,
  output logic             master_tick,
  output logic             dp_rst,
  output logic             samp_stb,
  output logic             frame_stb
);
  logic [TS_W-1:0] preset;
  logic            armed, hold;
  logic [2:0]      ss;
  logic            sync_pend;
  logic [$clog2(CLK_PER_TICK)-1:0] tcnt;
  logic [$clog2(CPS)-1:0]          scnt;
  logic [$clog2(SPF)-1:0]          fcnt;
  logic            sync_ev;

  // A sync edge is acted on at the next master tick.
  assign master_tick = (tcnt == '0);
  assign sync_ev     = sync_pend && master_tick;

  always_ff @(posedge clk) begin
    rdata <= '0;
    if (rst) begin
      preset <= '0; armed <= 1'b0; hold <= 1'b1; ss <= '0; sync_pend <= 1'b0;
      tcnt <= '0; scnt <= '0; fcnt <= '0; timestamp <= '0; dp_rst <= 1'b1;
      samp_stb <= 1'b0; frame_stb <= 1'b0;
    end else begin
      ss <= {ss[1:0], sync_in};
      if (ss[1] && !ss[2]) sync_pend <= 1'b1;

      // master clock tick and timestamp
      tcnt <= (int'(tcnt) == CLK_PER_TICK - 1) ? '0 : tcnt + 1'b1;
      if (master_tick) timestamp <= timestamp + 1'b1;

      if (req_sel && req.we)
        unique case (req.addr[7:0])
          G_TS_PRESET_LO: preset[31:0]  <= req.wdata;
          G_TS_PRESET_HI: preset[47:32] <= req.wdata[15:0];
          G_SYNC_CTRL: begin
            if (req.wdata[0]) armed <= 1'b1;
            if (req.wdata[1]) begin hold <= 1'b1; dp_rst <= 1'b1; end
          end
          default: ;
        endcase
      if (req_sel && req.re)
        unique case (req.addr[7:0])
          G_TS_PRESET_LO: rdata <= preset[31:0];
          G_TS_PRESET_HI: rdata <= 32'(preset[47:32]);
          G_TS_NOW_LO:    rdata <= timestamp[31:0];
          G_TS_NOW_HI:    rdata <= 32'(timestamp[47:32]);
          G_SYNC_CTRL:    rdata <= {30'b0, dp_rst, armed};
          default: ;
        endcase

      if (sync_ev) begin
        sync_pend <= 1'b0;
        if (armed) begin
          timestamp <= preset;
          armed     <= 1'b0;
        end
        if (hold) begin
          hold   <= 1'b0;
          dp_rst <= 1'b0;
          scnt   <= '0;
          fcnt   <= '0;
        end
      end

      // datapath rate strobes
      samp_stb  <= 1'b0;
      frame_stb <= 1'b0;
      if (!dp_rst && !sync_ev) begin
        if (int'(scnt) == CPS - 1) begin
          scnt     <= '0;
          samp_stb <= 1'b1;
          fcnt     <= (int'(fcnt) == SPF - 1) ? '0 : fcnt + 1'b1;
          if (int'(fcnt) == SPF - 1) frame_stb <= 1'b1;
        end else begin
          scnt <= scnt + 1'b1;
        end
      end
    end
  end

endmodule
