// spi_slave_tb: a mode-0 SPI host sends 64-bit frames with SCLK at 1/8 of
// the core clock. Write frames must produce one wr pulse with the header
// fields and data; read frames an rd pulse and the value presented on rdata
// shifted out MSB first on MISO.
// The frame format checked here is this design's own.
module spi_slave_tb;
  logic clk = 0, rst_n = 0;
  logic sclk, cs_n, mosi, miso, wr, rd;
  logic [2:0] target;
  logic [4:0] chunk;
  logic [15:0] addr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0, nwr = 0, nrd = 0;

  spi_slave dut (.*);
  always #5 clk = ~clk;
  assign rdata = {addr, addr ^ 16'hA5C3};

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (wr) nwr++;
    if (rd) nrd++;
  end

  task automatic frame(input logic [31:0] hdr, input logic [31:0] dat, output logic [31:0] rx);
    logic [63:0] f;
    f = {hdr, dat};
    cs_n = 0; #40;
    for (int b = 63; b >= 0; b--) begin
      mosi = f[b];
      #40 sclk = 1;
      if (b < 32) rx[b] = miso;
      #40 sclk = 0;
    end
    #40 cs_n = 1; #80;
  endtask

  initial begin
    logic [31:0] hdr, dat, rx;
    int w0, r0;
    sclk = 0; cs_n = 1; mosi = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      hdr = $urandom; dat = $urandom;
      w0 = nwr; r0 = nrd;
      fork
        frame(hdr, dat, rx);
        begin
          if (hdr[31]) begin
            @(posedge wr); #1;
            checks++;
            if (target !== hdr[30:28] || chunk !== hdr[27:23] || addr !== hdr[15:0] || wdata !== dat) begin
              failures++; $display("write fields wrong %h %h", hdr, dat);
            end
          end
        end
      join
      checks++;
      if (hdr[31] ? (nwr != w0 + 1 || nrd != r0) : (nrd != r0 + 1 || nwr != w0)) begin
        failures++; $display("pulse counts wrong n=%0d", n);
      end
      if (!hdr[31]) begin
        checks++;
        if (rx !== {hdr[15:0], hdr[15:0] ^ 16'hA5C3}) begin failures++; $display("read %h", rx); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
