// capture_buffer: diagnostic sampler that records a short segment of one of the signal
// path's streams into a memory readable over the register bus.
//
// The paper describes ancillary samplers that gather short segments of data at 625 ksps
// and 20 MSPS for diagnostics, outside nominal operation. Which points can be captured,
// the depth (DEPTH = 1024) and the register layout are this design's own. Sources:
//   0 ADC input, 1 carrier DAC, 2 nuller DAC          (20 MSPS, one entry per samp_stb,
//                                                      sample in bits [15:0])
//   3 demodulated, 4 carrier-controller output,
//   5 nuller-controller output                          (625 ksps, the selected channel,
//                                                      {I[23:0], Q[23:0]} per frame)
// Writing CTRL with bit 0 set arms a capture: from the next sample of the source,
// DEPTH entries are written, then `done` is set. Entries are 48 bits wide.
//
// Registers (offset within the sub-block, addr[14:0]):
//   addr[14] = 0, addr[0] = 0 : CTRL   {chan[6:0] at [14:8], src[2:0] at [6:4], arm at [0]}
//   addr[14] = 0, addr[0] = 1 : STATUS {count at [26:16], busy at [1], done at [0]}
//   addr[14] = 1              : entry addr[13:4]; addr[0] = 0 -> bits [31:0],
//                               addr[0] = 1 -> bits [47:32]
// Reads return one clock after re, like every register of this design.
module capture_buffer
  import spa_pkg::*;
#(
  parameter int DEPTH   = 1024,
  parameter int NCHAN_P = NCHAN
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     samp_stb,
  input  logic signed [ADC_W-1:0]  adc,
  input  logic signed [DAC_W-1:0]  dac_c,
  input  logic signed [DAC_W-1:0]  dac_n,
  input  chan_smp_t                demod,
  input  chan_smp_t                carrier,
  input  chan_smp_t                nuller,
  input  reg_req_t                 req,
  input  logic                     req_sel,
  output logic [31:0]              rdata
);
  localparam int AW  = $clog2(DEPTH);
  localparam int CAW = $clog2(NCHAN_P);

  logic [47:0]    mem [DEPTH];
  logic [2:0]     src;
  logic [CAW-1:0] chan;
  logic           busy, done;
  logic [AW:0]    cnt;

  // Sample selection
  logic        s_valid;
  logic [47:0] s_data;
  always_comb begin
    s_valid = 1'b0;
    s_data  = '0;
    unique case (src)
      3'd0: begin s_valid = samp_stb; s_data = 48'(signed'(adc));   end
      3'd1: begin s_valid = samp_stb; s_data = 48'(signed'(dac_c)); end
      3'd2: begin s_valid = samp_stb; s_data = 48'(signed'(dac_n)); end
      3'd3: begin s_valid = demod.valid   && demod.chan   == chan; s_data = demod.d;   end
      3'd4: begin s_valid = carrier.valid && carrier.chan == chan; s_data = carrier.d; end
      3'd5: begin s_valid = nuller.valid  && nuller.chan  == chan; s_data = nuller.d;  end
      default: ;
    endcase
  end

  logic [47:0] rd_word;
  assign rd_word = mem[req.addr[AW+3:4]];

  always_ff @(posedge clk) begin
    rdata <= '0;
    if (rst) begin
      src <= '0; chan <= '0; busy <= 1'b0; done <= 1'b0; cnt <= '0;
    end else begin
      if (busy && s_valid) begin
        mem[cnt[AW-1:0]] <= s_data;
        cnt <= cnt + 1'b1;
        if (int'(cnt) == DEPTH - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      if (req_sel && req.we && !req.addr[14] && !req.addr[0]) begin
        src  <= req.wdata[6:4];
        chan <= req.wdata[8 +: CAW];
        if (req.wdata[0]) begin
          busy <= 1'b1;
          done <= 1'b0;
          cnt  <= '0;
        end
      end
      if (req_sel && req.re) begin
        if (req.addr[14])
          rdata <= req.addr[0] ? 32'(rd_word[47:32]) : rd_word[31:0];
        else if (!req.addr[0])
          rdata <= 32'({chan, 1'b0, src, 4'b0});
        else
          rdata <= {5'b0, 11'(cnt), 14'b0, busy, done};
      end
    end
  end

endmodule
