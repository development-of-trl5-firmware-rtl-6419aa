// spi_master: register-driven SPI master for the low-speed control of the connected
// assemblies (detector assembly and SQUID controller).
//
// The paper says only that these interfaces are single-bit I/Os or simple variations on
// SPI or I2C. This master is the simplest SPI that serves: mode 0 (clock idles low, data
// changes on the falling edge and is sampled on the rising edge), MSB first, 1 to 32 bits
// per transfer, NCS active-low chip selects, and a programmable clock divider.
//
// Registers (addr[1:0] within the master's 4-word window):
//   0 CTRL   : div[15:0] (SCLK half-period in clocks, minimum 1), nbits-1 at [20:16],
//              chip select at [25:24]
//   1 TXDATA : write starts a transfer; the word is sent from bit nbits-1 down to bit 0
//   2 RXDATA : bits received in the last transfer (right-aligned)
//   3 STATUS : bit 0 busy
// Timing: CS falls one clock after the TXDATA write; each bit takes 2*div clocks; CS rises
// div clocks after the last rising edge.
module spi_master #(
  parameter int NCS = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  spa_pkg::reg_req_t  req,
  input  logic               req_sel,
  output logic [31:0]        rdata,
  output logic               sclk,
  output logic               mosi,
  input  logic               miso,
  output logic [NCS-1:0]     cs_n
);
  logic [15:0] div;
  logic [4:0]  nbm1;
  logic [1:0]  csel;
  logic [31:0] sh, rx;
  logic        busy;
  logic [15:0] dcnt;
  logic [5:0]  bitn;
  logic        ph;          // 0: before rising edge, 1: before falling edge

  always_ff @(posedge clk) begin
    rdata <= '0;
    if (rst) begin
      div <= 16'd4; nbm1 <= 5'd15; csel <= '0; sh <= '0; rx <= '0; busy <= 1'b0;
      dcnt <= '0; bitn <= '0; ph <= 1'b0; sclk <= 1'b0; mosi <= 1'b0; cs_n <= '1;
    end else begin
      if (req_sel && req.re)
        unique case (req.addr[1:0])
          2'd0: rdata <= {6'b0, csel, 3'b0, nbm1, div};
          2'd1: rdata <= sh;
          2'd2: rdata <= rx;
          2'd3: rdata <= {31'b0, busy};
        endcase
      if (!busy) begin
        if (req_sel && req.we && req.addr[1:0] == 2'd0) begin
          div  <= (req.wdata[15:0] == 0) ? 16'd1 : req.wdata[15:0];
          nbm1 <= req.wdata[20:16];
          csel <= req.wdata[25:24];
        end
        if (req_sel && req.we && req.addr[1:0] == 2'd1) begin
          // left-align the word so that the MSB of the transfer is sh[31]
          sh   <= req.wdata << (5'd31 - nbm1);
          mosi <= req.wdata[nbm1];
          rx   <= '0;
          busy <= 1'b1;
          bitn <= '0;
          ph   <= 1'b0;
          dcnt <= div - 1'b1;
          cs_n <= ~(NCS'(1) << csel);
        end
      end else begin
        if (dcnt != 0) begin
          dcnt <= dcnt - 1'b1;
        end else begin
          dcnt <= div - 1'b1;
          if (!ph) begin
            if (int'(bitn) == int'(nbm1) + 1) begin
              // trailing half-period elapsed: end of transfer
              busy <= 1'b0;
              cs_n <= '1;
            end else begin
              sclk <= 1'b1;
              rx   <= {rx[30:0], miso};
              ph   <= 1'b1;
            end
          end else begin
            sclk <= 1'b0;
            sh   <= sh << 1;
            mosi <= sh[30];
            bitn <= bitn + 1'b1;
            ph   <= 1'b0;
          end
        end
      end
    end
  end

endmodule
