// proto_extractor_tb: random embedding sums for k in 1..128 and 1..8 chunks.
// For each chunk the tb pulses lod_en then wr_en and checks the 16 weight
// codes against floor(log2 s) (0 for s = 0, saturated at 7); after the last
// chunk the bias must equal -(sum of 2^(2l) >> 2*ceil(log2 k)), saturated
// to the 14-bit range, all computed independently here.
// Eq. 7 with the 2*ceil(log2 k) shift is published; exponent saturation,
// l = 0 for a zero sum and the negated bias are this design's choices.
module proto_extractor_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic bias_clr, lod_en, wr_en;
  logic [7:0] k_shots;
  logic [ARR-1:0] lane_valid;
  acc_t acc [ARR];
  wgt_t wgt [ARR];
  bias_t bias;
  int checks = 0, failures = 0;

  proto_extractor dut (.clk, .rst_n, .bias_clr, .lod_en, .wr_en, .k_shots, .lane_valid, .acc, .wgt, .bias);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int flog2(input int s);
    int l = 0;
    if (s <= 0) return 0;
    while ((s >> (l + 1)) != 0) l++;
    return (l > 7) ? 7 : l;
  endfunction

  initial begin
    int k, nch, ck, l;
    longint bsum, eb;
    bias_clr = 0; lod_en = 0; wr_en = 0; k_shots = 1; lane_valid = '1;
    for (int i = 0; i < ARR; i++) acc[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      k = (n < 8) ? (1 << n) : $urandom_range(1, 128);
      nch = $urandom_range(1, 8);
      k_shots = 8'(k);
      ck = 0;
      while ((1 << ck) < k) ck++;
      bsum = 0;
      @(negedge clk); bias_clr = 1;
      @(negedge clk); bias_clr = 0;
      for (int c = 0; c < nch; c++) begin
        for (int i = 0; i < ARR; i++) acc[i] = acc_t'((n % 7 == 0 && i == 0) ? 0 : $urandom_range(0, 15 * k));
        lod_en = 1;
        @(negedge clk);
        lod_en = 0; wr_en = 1;
        for (int i = 0; i < ARR; i++) begin
          l = flog2(int'(acc[i]));
          bsum += longint'(1) << (2 * l);
          checks++;
          if (wgt[i] != wgt_t'(l)) begin
            failures++;
            if (failures < 10) $display("n=%0d lane %0d s=%0d w=%0h exp %0d", n, i, acc[i], wgt[i], l);
          end
        end
        @(negedge clk);
        wr_en = 0;
      end
      eb = -(bsum >> (2 * ck));
      if (eb < -8192) eb = -8192;
      checks++;
      if (longint'(bias) != eb) begin
        failures++;
        if (failures < 10) $display("n=%0d k=%0d bias %0d exp %0d", n, k, bias, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
