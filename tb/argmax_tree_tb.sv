// argmax_tree_tb: random FC outputs split in blocks, random valid lanes in
// the last block, both modes; the class index must equal the first index
// of the maximum found by a linear search.
// Timing: result one cycle after the last block. The tie rule (lowest
// index) is this design's choice.
module argmax_tree_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mode4, en, first;
  logic [5:0] blk;
  acc_t acc [ARR];
  logic [ARR-1:0] lane_valid;
  logic [7:0] class_idx;
  acc_t best_val;
  int checks = 0, failures = 0;

  argmax_tree dut (.clk, .rst_n, .mode4, .en, .first, .blk, .acc, .lane_valid, .class_idx, .best_val);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb, ncls, p, best, bi;
    int vals [256];
    en = 0; first = 0; blk = 0; mode4 = 0; lane_valid = '0;
    for (int i = 0; i < ARR; i++) acc[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      mode4 = (n % 3 == 2);
      p = mode4 ? 4 : 16;
      ncls = $urandom_range(2, mode4 ? 64 : 256);
      nb = (ncls + p - 1) / p;
      for (int c = 0; c < ncls; c++) vals[c] = (n % 5 == 0) ? int'($urandom_range(0, 3)) : int'($urandom_range(0, 262143)) - 131072;
      best = -1000000; bi = 0;
      for (int c = 0; c < ncls; c++) if (vals[c] > best) begin best = vals[c]; bi = c; end
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        en = 1; first = (b == 0); blk = 6'(b);
        for (int i = 0; i < ARR; i++) begin
          lane_valid[i] = (i < p) && (b * p + i < ncls);
          acc[i] = (i < p && b * p + i < ncls) ? acc_t'(vals[b * p + i]) : acc_t'(131071);
        end
      end
      @(negedge clk);
      en = 0;
      checks++;
      if (int'(class_idx) != bi || int'(best_val) != best) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d/%0d exp %0d/%0d", n, class_idx, best_val, bi, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
