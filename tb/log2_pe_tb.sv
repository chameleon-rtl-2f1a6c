// log2_pe_tb: exhaustive check of the shift-only PE.
// Every activation (0..15), weight code (16) and enable value is applied and
// the product compared with act * (+/-)2^exponent computed by integer
// arithmetic; the weight code 4'b1000 must give zero.
// Shift-then-sign is published; the zero code is this design's.
module log2_pe_tb;
  import chameleon_pkg::*;
  logic en;
  act_t act;
  wgt_t wgt;
  logic signed [PROD_W-1:0] prod;
  int checks = 0, failures = 0;

  log2_pe dut (.en, .act, .wgt, .prod);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_v;
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 16; a++)
        for (int w = 0; w < 16; w++) begin
          en = e[0]; act = a[3:0]; wgt = w[3:0];
          #1;
          if (!e || w == 8) exp_v = 0;
          else begin
            exp_v = a * (2 ** (w % 8));
            if (w >= 8) exp_v = -exp_v;
          end
          checks++;
          if (int'(prod) != exp_v) begin
            failures++;
            $display("mismatch en=%0d act=%0d w=%0d got %0d exp %0d", e, a, w, prod, exp_v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
