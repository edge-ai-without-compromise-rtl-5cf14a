// spi_slave: serial (SPI) access to the register files of all cores, the
// second of the two external ways into the registers the paper names
// (the other being the parallel random-access port).
//
// The paper gives only the interface's name, so the frame is this
// design's own: SPI mode 0 (MOSI sampled on the rising SCLK edge, MISO
// changed on the falling edge), MSB first, 32 bits per frame while cs_n
// is low:
//   [31] we   [30] clr   [29] side (0 BL, 1 SL)   [28:23] core
//   [22:15] line address   [14:7] write data   [6:0] unused
// When cs_n rises after exactly 32 bits the request is issued on
// req_valid for one clock. A frame with we = clr = 0 is a read: the
// addressed word (rdata, returned by the chip in the same cycle) is
// loaded into the shift register and comes out on MISO in the top 8 bits
// of the next frame.
// SCLK, cs_n and MOSI are synchronised to clk by two flip-flops each, so
// clk must be at least four times the SCLK rate.
module spi_slave
  import neurram_pkg::*;
#(
  parameter int unsigned CORE_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sclk,
  input  logic              cs_n,
  input  logic              mosi,
  output logic              miso,
  output logic              req_valid,
  output logic [CORE_W-1:0] req_core,
  output bus_req_t          req,
  input  logic [REG_W-1:0]  rdata
);
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic [31:0] rx, tx;
  logic [5:0]  nbits;
  logic        rd_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
    end
  end

  logic sclk_rise, sclk_fall, cs_low, cs_rise;
  assign sclk_rise = (sclk_s[2:1] == 2'b01);
  assign sclk_fall = (sclk_s[2:1] == 2'b10);
  assign cs_low    = !cs_s[1];
  assign cs_rise   = (cs_s[2:1] == 2'b01);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx <= '0; tx <= '0; nbits <= '0;
      req_valid <= 1'b0; req_core <= '0; req <= '0; rd_pending <= 1'b0;
    end else begin
      req_valid <= 1'b0;
      if (rd_pending) begin
        tx         <= {rdata, 24'h0};
        rd_pending <= 1'b0;
      end
      if (cs_low) begin
        if (sclk_rise) begin
          rx    <= {rx[30:0], mosi_s[1]};
          nbits <= (nbits == 6'd63) ? nbits : nbits + 6'd1;
        end
        if (sclk_fall) tx <= {tx[30:0], 1'b0};
      end
      if (cs_rise) begin
        nbits <= '0;
        if (nbits == 6'd32) begin
          req_valid  <= 1'b1;
          req_core   <= rx[28:23];
          req.we     <= rx[31];
          req.clr    <= rx[30];
          req.side   <= side_e'(rx[29]);
          req.addr   <= rx[22:15];
          req.wdata  <= rx[14:7];
          rd_pending <= !rx[31] && !rx[30];
        end
      end
    end
  end

  assign miso = tx[31];
endmodule
