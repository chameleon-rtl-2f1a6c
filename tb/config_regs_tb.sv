// config_regs_tb: writes every layer word and the global words with random
// data, reads them back, checks the decoded records against the written
// bits, the class counter (write, increment, status word) and that
// register index 4l+3 is not stored.
// The register map checked here is this design's own.
module config_regs_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0, wr, class_inc;
  logic [15:0] addr;
  logic [31:0] wdata, rdata;
  logic [1:0] status;
  layer_cfg_t lcfg [MAX_LAYERS];
  glob_cfg_t gcfg;
  logic [8:0] num_classes;
  logic [95:0] lw [MAX_LAYERS];
  logic [63:0] gw;
  int checks = 0, failures = 0;

  config_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wreg(input int a, input logic [31:0] d);
    @(negedge clk); wr = 1; addr = 16'(a); wdata = d;
    @(negedge clk); wr = 0;
  endtask
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    wr = 0; class_inc = 0; addr = 0; wdata = 0; status = 2'b10;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < MAX_LAYERS; l++)
      for (int w = 0; w < 3; w++) begin
        lw[l][w*32 +: 32] = $urandom;
        wreg(4*l + w, lw[l][w*32 +: 32]);
      end
    wreg(4*5 + 3, 32'hFFFFFFFF);
    gw = {$urandom, $urandom};
    wreg(128, gw[31:0]); wreg(129, gw[63:32]);
    for (int l = 0; l < MAX_LAYERS; l++) begin
      chk(lcfg[l] == layer_cfg_t'(lw[l][81:0]), $sformatf("layer %0d record", l));
      for (int w = 0; w < 3; w++) begin
        addr = 16'(4*l + w); #1;
        chk(rdata == lw[l][w*32 +: 32], $sformatf("layer %0d word %0d readback", l, w));
      end
    end
    addr = 16'(4*5 + 3); #1; chk(rdata == 0, "unused word");
    chk(gcfg == glob_cfg_t'(gw[62:0]), "global record");
    wreg(130, 32'd7);
    chk(num_classes == 7, "classes write");
    @(negedge clk); class_inc = 1; @(negedge clk); class_inc = 0;
    chk(num_classes == 8, "classes increment");
    addr = 16'd131; #1;
    chk(rdata == {7'd0, 9'd8, 14'd0, 2'b10}, "status");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
