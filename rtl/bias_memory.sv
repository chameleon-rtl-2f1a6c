// bias_memory: 128 x 224-bit bias memory (16 14-bit signed biases per row).
//
// Lanes 0..3 are in always-on bank A (bits 55:0), lanes 4..7 in always-on
// bank B (bits 111:56), lanes 8..15 in the gateable MSB bank (112 bits).
// In 4x4 mode the two always-on banks are stacked: logical rows 0..127 are
// bank A and 128..255 bank B, each row holding the 4 biases of the 4x4
// array. One synchronous read port (1-cycle latency, lanes outside the 4x4
// block read as zero in 4x4 mode), one logical write port with a lane mask
// (used to write a learned bias), and a 32-bit physical SPI write port
// (row, chunk 0..6) with priority.
// The geometry and the 112b/56b/56b split are the published ones; the lane
// order and the stacking rule are this implementation's reading of the
// weight-memory scheme applied to biases.
module bias_memory
  import chameleon_pkg::*;
#(
  parameter int unsigned ROWS = BROWS
) (
  input  logic           clk,
  input  logic           mode4,
  input  logic           re,
  input  logic [7:0]     raddr,
  output bias_t          rdata [ARR],
  input  logic           we,
  input  logic [7:0]     waddr,
  input  bias_t          wdata,
  input  logic [ARR-1:0] wlane,
  input  logic           spi_we,
  input  logic [6:0]     spi_row,
  input  logic [2:0]     spi_chunk,
  input  logic [31:0]    spi_data
);
  localparam int unsigned AW = $clog2(ROWS);
  logic [BWORD-1:0] mem [ROWS];
  logic [BWORD-1:0] rd_q;
  logic [BWORD-1:0] wd, wm;
  logic [AW-1:0]    wrow, rrow;
  logic             rd_mode4, rd_bank;

  assign wrow = AW'(waddr);
  assign rrow = AW'(raddr);

  always_comb begin
    wd = '0; wm = '0;
    for (int i = 0; i < ARR; i++) begin
      if (!mode4) begin
        wd[i*BIAS_W +: BIAS_W] = wdata;
        wm[i*BIAS_W +: BIAS_W] = {BIAS_W{wlane[i]}};
      end else if (i < ARR_S) begin
        wd[(waddr[7] ? 56 : 0) + i*BIAS_W +: BIAS_W] = wdata;
        wm[(waddr[7] ? 56 : 0) + i*BIAS_W +: BIAS_W] = {BIAS_W{wlane[i]}};
      end
    end
  end

  always_ff @(posedge clk) begin
    if (spi_we) begin
      if (spi_chunk < 3'd7) mem[AW'(spi_row)][spi_chunk*32 +: 32] <= spi_data;
    end else if (we) begin
      mem[wrow] <= (mem[wrow] & ~wm) | (wd & wm);
    end
  end

  always_ff @(posedge clk) begin
    if (re) begin
      rd_q     <= mem[rrow];
      rd_mode4 <= mode4;
      rd_bank  <= raddr[7];
    end
  end

  always_comb begin
    for (int i = 0; i < ARR; i++) begin
      if (!rd_mode4)      rdata[i] = rd_q[i*BIAS_W +: BIAS_W];
      else if (i < ARR_S) rdata[i] = rd_q[(rd_bank ? 56 : 0) + i*BIAS_W +: BIAS_W];
      else                rdata[i] = '0;
    end
  end
endmodule
