// weight_memory_tb: loads random rows over the 32-bit physical port, reads
// them back through the logical 16x16 view (position of each weight from
// the tb's own layout formula), reads the stacked 4x4 view (rows 512..1023
// from bank B), and checks column-masked logical writes in both modes leave
// the other weights untouched. Uses a reduced row count to keep it short.
// Uses ROWS=32 to keep the run short; the bank layout follows the published
// 4x4-in-LSB scheme with this design's bank widths.
module weight_memory_tb;
  import chameleon_pkg::*;
  localparam int ROWS = 32;
  logic clk = 0, mode4, re, we, spi_we, msb_pwr_en;
  logic [9:0] raddr, waddr;
  wgt_t rdata [ARR][ARR], wdata [ARR][ARR];
  logic wmask [ARR][ARR];
  logic [8:0] spi_row;
  logic [4:0] spi_chunk;
  logic [31:0] spi_data;
  logic [1023:0] img [ROWS];
  int checks = 0, failures = 0;

  weight_memory #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the tb's own statement of the layout: the top-left 4x4 first (row-major),
  // then the rest row-major
  function automatic int pos(input int i, input int j);
    int n = 16;
    if (i < 4 && j < 4) return i * 4 + j;
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++)
        if (!(r < 4 && c < 4)) begin
          if (r == i && c == j) return n;
          n++;
        end
    return -1;
  endfunction

  task automatic rd(input int a, input bit m4);
    @(negedge clk); mode4 = m4; re = 1; raddr = 10'(a);
    @(negedge clk); re = 0;
  endtask

  task automatic check_row(input int r, input bit m4, input int bank);
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        wgt_t e;
        if (!m4) e = img[r][pos(i, j)*4 +: 4];
        else if (i < 4 && j < 4) e = img[r][bank*64 + (i*4 + j)*4 +: 4];
        else e = WZERO;
        checks++;
        if (rdata[i][j] !== e) begin
          failures++;
          if (failures < 10) $display("row %0d m4=%0d (%0d,%0d) got %h exp %h", r, m4, i, j, rdata[i][j], e);
        end
      end
  endtask

  initial begin
    re = 0; we = 0; spi_we = 0; mode4 = 0; raddr = 0; waddr = 0; spi_row = 0; spi_chunk = 0; spi_data = 0;
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin wdata[i][j] = 0; wmask[i][j] = 0; end
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < 32; c++) begin
        @(negedge clk);
        spi_we = 1; spi_row = 9'(r); spi_chunk = 5'(c); spi_data = $urandom;
        img[r][c*32 +: 32] = spi_data;
      end
    end
    @(negedge clk); spi_we = 0;
    checks++; if (msb_pwr_en !== 1'b1) failures++;
    for (int r = 0; r < ROWS; r++) begin rd(r, 0); check_row(r, 0, 0); end
    for (int r = 0; r < ROWS; r++) begin rd(r, 1); check_row(r, 1, 0); rd(512 + r, 1); check_row(r, 1, 1); end
    mode4 = 1; #1; checks++; if (msb_pwr_en !== 1'b0) failures++;
    // masked column writes
    for (int n = 0; n < 40; n++) begin
      int r, col; bit m4;
      m4 = n[0]; r = $urandom_range(0, ROWS - 1); col = $urandom_range(0, m4 ? 3 : 15);
      @(negedge clk);
      mode4 = m4; we = 1; waddr = 10'(r + ((m4 && n[1]) ? 512 : 0));
      for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
        wdata[i][j] = 4'($urandom); wmask[i][j] = (j == col);
        if (j == col) begin
          if (!m4) img[r][pos(i, j)*4 +: 4] = wdata[i][j];
          else if (i < 4) img[r][(n[1] ? 64 : 0) + (i*4 + j)*4 +: 4] = wdata[i][j];
        end
      end
      @(negedge clk); we = 0;
      rd(int'(waddr), m4); check_row(r, m4, (m4 && n[1]) ? 1 : 0);
      rd(r, 0); check_row(r, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
