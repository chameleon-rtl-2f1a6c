// bias_memory_tb: physical loads over the SPI port, lane reads in 16x16
// mode, stacked reads in 4x4 mode (rows 128.. from bank B at bit 56) and
// lane-masked writes, against an image kept by the tb.
// Uses ROWS=16 to keep the run short; the stacking rule is this design's
// reading of the published layout.
module bias_memory_tb;
  import chameleon_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0, mode4, re, we, spi_we;
  logic [7:0] raddr, waddr;
  bias_t rdata [ARR], wdata;
  logic [ARR-1:0] wlane;
  logic [6:0] spi_row;
  logic [2:0] spi_chunk;
  logic [31:0] spi_data;
  logic [223:0] img [ROWS];
  int checks = 0, failures = 0;

  bias_memory #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_check(input int a, input bit m4);
    int r, base;
    @(negedge clk); mode4 = m4; re = 1; raddr = 8'(a);
    @(negedge clk); re = 0;
    r = a % 128; base = (m4 && a >= 128) ? 56 : 0;
    for (int i = 0; i < 16; i++) begin
      bias_t e;
      if (!m4) e = img[r][i*14 +: 14];
      else if (i < 4) e = img[r][base + i*14 +: 14];
      else e = 0;
      checks++;
      if (rdata[i] !== e) begin
        failures++;
        if (failures < 10) $display("a=%0d m4=%0d lane %0d got %0d exp %0d", a, m4, i, rdata[i], e);
      end
    end
  endtask

  initial begin
    re = 0; we = 0; spi_we = 0; mode4 = 0; raddr = 0; waddr = 0; wdata = 0; wlane = 0;
    spi_row = 0; spi_chunk = 0; spi_data = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < 7; c++) begin
        @(negedge clk); spi_we = 1; spi_row = 7'(r); spi_chunk = 3'(c); spi_data = $urandom;
        img[r][c*32 +: 32] = spi_data;
      end
    @(negedge clk); spi_we = 0;
    for (int r = 0; r < ROWS; r++) begin rd_check(r, 0); rd_check(r, 1); rd_check(128 + r, 1); end
    for (int n = 0; n < 60; n++) begin
      int r, lane; bit m4, hi;
      m4 = n[0]; hi = n[1] && m4; r = $urandom_range(0, ROWS - 1); lane = $urandom_range(0, m4 ? 3 : 15);
      @(negedge clk); mode4 = m4; we = 1; waddr = 8'(r + (hi ? 128 : 0)); wdata = bias_t'($urandom);
      wlane = ARR'(1) << lane;
      img[r][(hi ? 56 : 0) + lane*14 +: 14] = wdata;
      @(negedge clk); we = 0;
      rd_check(int'(waddr), m4);
      rd_check(r, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
