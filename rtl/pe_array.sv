// pe_array: dual-mode 16x16 array of shift-only PEs, output stationary.
//
// Input i (a 4-bit unsigned activation) is broadcast along row i; the PE at
// row i, column j applies weight w[i][j]; the 16 products of column j are
// summed by that column's adder into a 16-bit signed value that goes to
// output PE (OPE) j. Column j therefore computes output channel j of the
// current 16-channel output block from 16 input channels.
//
// In 4x4 mode (mode4 = 1) only the top-left 4x4 PEs work; the other 240 are
// held at zero, which stands for their clock gating, and columns 4..15 sum
// to zero. Combinational; the adders are plain sums (no pipelining), which
// is this implementation's choice.
module pe_array
  import chameleon_pkg::*;
(
  input  logic mode4,
  input  act_t act [ARR],
  input  wgt_t wgt [ARR][ARR],   // [row i = input][column j = output]
  output col_t col_sum [ARR]
);
  logic signed [PROD_W-1:0] prod [ARR][ARR];

  for (genvar i = 0; i < ARR; i++) begin : g_row
    for (genvar j = 0; j < ARR; j++) begin : g_col
      log2_pe u_pe (
        .en  (!mode4 || (i < ARR_S && j < ARR_S)),
        .act (act[i]),
        .wgt (wgt[i][j]),
        .prod(prod[i][j])
      );
    end
  end

  always_comb begin
    for (int j = 0; j < ARR; j++) begin
      col_sum[j] = '0;
      for (int i = 0; i < ARR; i++)
        col_sum[j] = col_sum[j] + COL_W'(prod[i][j]);
    end
  end
endmodule
