// spi_slave: SPI target for loading and inspecting the accelerator.
//
// SPI mode 0 (data sampled on the rising SCLK edge, MSB first), oversampled
// by the core clock through two-flip-flop synchronisers, so SCLK must be at
// most a quarter of the core clock. A frame is 64 bits while cs_n is low:
//   header [31]    1 = write, 0 = read
//          [30:28] target: 0 config registers, 1 weight, 2 bias,
//                  3 activation memory, 4 input buffer (reserved)
//          [27:23] 32-bit chunk within a memory row
//          [22:16] reserved
//          [15:0]  register index or physical memory row
//   data   32 bits, written by the host (write) or returned on MISO (read).
// A write gives a one-cycle wr pulse with the fields; a read gives an rd
// pulse right after the header, and rdata (sampled the next cycle) is
// shifted out during the data phase. Only configuration registers are
// readable. The published design names an SPI block; the frame format is
// this implementation's.
module spi_slave (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        wr,
  output logic        rd,
  output logic [2:0]  target,
  output logic [4:0]  chunk,
  output logic [15:0] addr,
  output logic [31:0] wdata,
  input  logic [31:0] rdata
);
  logic [2:0]  sclk_s;
  logic [1:0]  cs_s;
  logic [1:0]  mosi_s;
  logic [6:0]  bitcnt;
  logic [31:0] hdr, dat, shout;
  logic        rise, fall, load_rd;

  assign rise = sclk_s[1] && !sclk_s[2];
  assign fall = !sclk_s[1] && sclk_s[2];
  assign target = hdr[30:28];
  assign chunk  = hdr[27:23];
  assign addr   = hdr[15:0];
  assign wdata  = dat;
  assign miso   = shout[31];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
      bitcnt <= '0; hdr <= '0; dat <= '0; shout <= '0;
      wr <= 1'b0; rd <= 1'b0; load_rd <= 1'b0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
      wr <= 1'b0;
      rd <= 1'b0;
      load_rd <= rd;
      if (load_rd) shout <= rdata;
      if (cs_s[1]) begin
        bitcnt <= '0;
      end else if (rise) begin
        bitcnt <= bitcnt + 7'd1;
        if (bitcnt < 7'd32) hdr <= {hdr[30:0], mosi_s[1]};
        else                dat <= {dat[30:0], mosi_s[1]};
        if (bitcnt == 7'd31 && !hdr[30])  rd <= 1'b1;   // hdr[30] becomes bit 31
        if (bitcnt == 7'd63 && hdr[31])   wr <= 1'b1;
      end else if (fall && bitcnt > 7'd32) begin
        shout <= {shout[30:0], 1'b0};
      end
    end
  end
endmodule
