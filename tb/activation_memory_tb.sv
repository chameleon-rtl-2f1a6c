// activation_memory_tb: random writes and reads on the two ports, checked
// against a model; a read of the row written in the same cycle must return
// the old contents; SPI chunk writes land in the right half of the row.
// Timing checked: 1-cycle read latency. Size from the published design;
// read-old-data is this design's choice.
module activation_memory_tb;
  import chameleon_pkg::*;
  logic clk = 0, re, we, spi_we, spi_chunk;
  logic [7:0] raddr, waddr, spi_row;
  act_t rdata [ARR], wdata [ARR];
  logic [31:0] spi_data;
  logic [63:0] img [256];
  logic [63:0] exp_q;
  int checks = 0, failures = 0;

  activation_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] got;
    re = 0; we = 0; spi_we = 0; raddr = 0; waddr = 0; spi_row = 0; spi_chunk = 0; spi_data = 0;
    for (int i = 0; i < ARR; i++) wdata[i] = 0;
    for (int r = 0; r < 256; r++) begin
      @(negedge clk); we = 1; waddr = 8'(r);
      for (int i = 0; i < ARR; i++) begin wdata[i] = 4'($urandom); img[r][i*4 +: 4] = wdata[i]; end
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      re = 1; raddr = 8'($urandom);
      we = n[0]; waddr = (n % 3 == 0) ? raddr : 8'($urandom);
      spi_we = (n % 17 == 0); spi_row = 8'($urandom); spi_chunk = 1'($urandom); spi_data = $urandom;
      exp_q = img[raddr];
      for (int i = 0; i < ARR; i++) wdata[i] = 4'($urandom);
      @(posedge clk);
      if (spi_we) img[spi_row][spi_chunk*32 +: 32] = spi_data;
      else if (we) for (int i = 0; i < ARR; i++) img[waddr][i*4 +: 4] = wdata[i];
      #1;
      for (int i = 0; i < ARR; i++) got[i*4 +: 4] = rdata[i];
      checks++;
      if (got !== exp_q) begin
        failures++;
        if (failures < 10) $display("n=%0d row %0d got %h exp %h", n, raddr, got, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
