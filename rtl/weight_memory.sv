// weight_memory: 512 x 1024-bit weight memory (64 kB of 4-bit log2 weights)
// with the dual-mode bank layout.
//
// A 16x16-mode row holds the 16x16 weights w[i][j] (i = input row, j = output
// column) of one PE-array step. The word is split in banks: two 64-bit
// always-on banks A (bits 63:0) and B (bits 127:64), and 896 bits of MSB
// banks on a power domain that can be switched off. The top-left 4x4 weights
// are stored row-major in bank A, followed by the remaining 240 weights
// row-major (chameleon_pkg::wslot). In 4x4 mode (mode4 = 1) only banks A and
// B are used and they are stacked: logical rows 0..511 are bank A, rows
// 512..1023 bank B, each row holding the 16 weights of the 4x4 array. The
// address generator therefore uses the same addressing in both modes and
// sees 1024 rows in 4x4 mode. msb_pwr_en tells the power switch when the MSB
// banks may be powered off.
//
// Ports: one synchronous read port (logical 16x16 view, 1-cycle latency;
// positions outside the 4x4 block read as zero in 4x4 mode), one logical
// write port with a per-weight mask (used to write one learned column), and
// a 32-bit physical write port for loading over SPI (row, chunk 0..31),
// which has priority. Read-during-write returns the old row.
// From the published design: the geometry, the always-on / gateable split,
// the placement of the top-left 4x4 weights in the LSBs and the stacking.
// Bank widths (the figure prints two 64-bit always-on banks) and the order
// of the remaining 240 weights are this implementation's reading.
module weight_memory
  import chameleon_pkg::*;
#(
  parameter int unsigned ROWS = WROWS
) (
  input  logic        clk,
  input  logic        mode4,
  input  logic        re,
  input  logic [9:0]  raddr,
  output wgt_t        rdata [ARR][ARR],
  input  logic        we,
  input  logic [9:0]  waddr,
  input  wgt_t        wdata [ARR][ARR],
  input  logic        wmask [ARR][ARR],
  input  logic        spi_we,
  input  logic [8:0]  spi_row,
  input  logic [4:0]  spi_chunk,
  input  logic [31:0] spi_data,
  output logic        msb_pwr_en
);
  localparam int unsigned AW = $clog2(ROWS);
  localparam int unsigned MSBW = WWORD - 128;

  logic [63:0]     bank_a [ROWS];
  logic [63:0]     bank_b [ROWS];
  logic [MSBW-1:0] bank_m [ROWS];

  logic [WWORD-1:0] wd_full, wm_full;   // 16x16-mode write data / bit mask
  logic [63:0]      wd_s, wm_s;         // 4x4-mode write data / bit mask
  logic [WWORD-1:0] rd_full;
  logic             rd_mode4, rd_bank;
  logic [AW-1:0]    wrow, rrow;

  assign msb_pwr_en = !mode4;
  assign wrow = AW'(waddr);
  assign rrow = AW'(raddr);

  always_comb begin
    wd_full = '0; wm_full = '0; wd_s = '0; wm_s = '0;
    for (int i = 0; i < ARR; i++)
      for (int j = 0; j < ARR; j++) begin
        wd_full[wslot(i, j)*4 +: 4] = wdata[i][j];
        wm_full[wslot(i, j)*4 +: 4] = {4{wmask[i][j]}};
        if (i < ARR_S && j < ARR_S) begin
          wd_s[(i*ARR_S + j)*4 +: 4] = wdata[i][j];
          wm_s[(i*ARR_S + j)*4 +: 4] = {4{wmask[i][j]}};
        end
      end
  end

  always_ff @(posedge clk) begin
    if (spi_we) begin
      if (spi_chunk == 5'd0)      bank_a[AW'(spi_row)][31:0]  <= spi_data;
      else if (spi_chunk == 5'd1) bank_a[AW'(spi_row)][63:32] <= spi_data;
      else if (spi_chunk == 5'd2) bank_b[AW'(spi_row)][31:0]  <= spi_data;
      else if (spi_chunk == 5'd3) bank_b[AW'(spi_row)][63:32] <= spi_data;
      else bank_m[AW'(spi_row)][(spi_chunk - 5'd4)*32 +: 32] <= spi_data;
    end else if (we) begin
      if (!mode4) begin
        bank_a[wrow] <= (bank_a[wrow] & ~wm_full[63:0])   | (wd_full[63:0]   & wm_full[63:0]);
        bank_b[wrow] <= (bank_b[wrow] & ~wm_full[127:64]) | (wd_full[127:64] & wm_full[127:64]);
        bank_m[wrow] <= (bank_m[wrow] & ~wm_full[WWORD-1:128]) | (wd_full[WWORD-1:128] & wm_full[WWORD-1:128]);
      end else if (!waddr[9]) begin
        bank_a[wrow] <= (bank_a[wrow] & ~wm_s) | (wd_s & wm_s);
      end else begin
        bank_b[wrow] <= (bank_b[wrow] & ~wm_s) | (wd_s & wm_s);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (re) begin
      rd_mode4 <= mode4;
      rd_bank  <= raddr[9];
      rd_full  <= {mode4 ? '0 : bank_m[rrow], bank_b[rrow], bank_a[rrow]};
    end
  end

  always_comb begin
    for (int i = 0; i < ARR; i++)
      for (int j = 0; j < ARR; j++) begin
        if (!rd_mode4)
          rdata[i][j] = rd_full[wslot(i, j)*4 +: 4];
        else if (i < ARR_S && j < ARR_S)
          rdata[i][j] = rd_bank ? rd_full[64 + (i*ARR_S + j)*4 +: 4] : rd_full[(i*ARR_S + j)*4 +: 4];
        else
          rdata[i][j] = WZERO;
      end
  end
endmodule
