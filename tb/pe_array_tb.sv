// pe_array_tb: random activations and weights in both array modes.
// Column sums are compared with a reference that decodes each log2 weight
// to an integer and multiplies; in 4x4 mode only rows/columns 0..3 count.
// 16x16 / 4x4 dual mode is published; column sums are 16-bit signed.
module pe_array_tb;
  import chameleon_pkg::*;
  logic mode4;
  act_t act [ARR];
  wgt_t wgt [ARR][ARR];
  col_t col_sum [ARR];
  int checks = 0, failures = 0;

  pe_array dut (.mode4, .act, .wgt, .col_sum);

  function automatic int wval(input wgt_t w);
    if (w == WZERO) return 0;
    return (w[3] ? -1 : 1) * (1 << w[2:0]);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_v;
    for (int n = 0; n < 200; n++) begin
      mode4 = (n % 4 == 3);
      for (int i = 0; i < ARR; i++) begin
        act[i] = (n < 5) ? 4'd15 : 4'($urandom);
        for (int j = 0; j < ARR; j++) wgt[i][j] = (n < 5) ? 4'd7 : 4'($urandom);
      end
      #1;
      for (int j = 0; j < ARR; j++) begin
        ref_v = 0;
        for (int i = 0; i < ARR; i++)
          if (!mode4 || (i < 4 && j < 4)) ref_v += int'(act[i]) * wval(wgt[i][j]);
        checks++;
        if (int'(col_sum[j]) != ref_v) begin
          failures++;
          if (failures < 10) $display("n=%0d col %0d got %0d exp %0d", n, j, col_sum[j], ref_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
