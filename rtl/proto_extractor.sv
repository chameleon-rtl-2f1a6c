// proto_extractor: prototypical parameter extractor.
//
// Turns the per-class sum of support embeddings s (held in the 16 OPE
// accumulators, one 16-dimensional chunk at a time) into the weights and
// bias of one output neuron of a fully connected layer, using only
// leading-one detection, shifts and additions:
//   l_i = floor(log2 s_i)                 16 leading-one detectors (LODs)
//   W_i = +2^l_i                          written as log2 weight code {0, l_i}
//   b   = sum_i 2^(2 l_i) >> 2*ceil(log2 k)
// The bias is stored negated, so the layer output x.W - b is, up to the
// positive factor 2/k, the negated squared distance to the prototype and the
// argmax tree picks the nearest prototype.
//
// Cycle use per chunk, driven by the learning controller: lod_en latches the
// 16 LOD results (cycle 1); wr_en presents the weight codes and adds the
// adder-tree sum to the bias accumulator (cycle 2). After the last chunk the
// bias output is valid (written in one more cycle). bias_clr clears the
// accumulator at the start of a class.
//
// From the published extractor: the LODs, the 2^(l<<1) terms, the adder tree,
// the accumulator and the final right shift by 2*ceil(log2 k). Choices of
// this implementation: exponents above 7 saturate to 7 (the weight exponent
// has 3 bits), a sum of 0 gives l = 0, lanes beyond the embedding size are
// masked out, the sign convention (positive weights, negated bias) and
// saturation of the bias to 14 bits.
//
// The sign bit of every weight output (wgt[i][3]) is constant 0, since
// learned weights are positive; it is kept so the output is a full wgt_t.
module proto_extractor
  import chameleon_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           bias_clr,
  input  logic           lod_en,
  input  logic           wr_en,
  input  logic [7:0]     k_shots,
  input  logic [ARR-1:0] lane_valid,
  input  acc_t           acc [ARR],
  output wgt_t           wgt [ARR],
  output bias_t          bias
);
  localparam int unsigned BACC_W = 26;

  logic [2:0]        l_q   [ARR];
  logic [ARR-1:0]    v_q;
  logic [2:0]        l_d   [ARR];
  logic [BACC_W-1:0] tree_sum;
  logic [BACC_W-1:0] bacc;
  logic [3:0]        clog2k;
  logic [BACC_W-1:0] shifted;

  // leading-one detectors
  always_comb begin
    for (int i = 0; i < ARR; i++) begin
      l_d[i] = 3'd0;
      if (acc[i] > 0) begin
        for (int b = 0; b < ACC_W - 1; b++)
          if (acc[i][b]) l_d[i] = (b > 7) ? 3'd7 : 3'(b);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ARR; i++) l_q[i] <= '0;
      v_q <= '0;
    end else if (lod_en) begin
      for (int i = 0; i < ARR; i++) l_q[i] <= l_d[i];
      v_q <= lane_valid;
    end
  end

  // weight codes and adder tree of 2^(l<<1)
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < ARR; i++) begin
      wgt[i] = {1'b0, l_q[i]};
      if (v_q[i]) tree_sum = tree_sum + (BACC_W'(1) << {l_q[i], 1'b0});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        bacc <= '0;
    else if (bias_clr) bacc <= '0;
    else if (wr_en)    bacc <= bacc + tree_sum;
  end

  // division by 2k approximated by a right shift of 2*ceil(log2 k)
  always_comb begin
    clog2k = 4'd0;
    for (int b = 0; b < 8; b++)
      if ((9'(k_shots) - 9'd1) >> b != 0) clog2k = 4'(b + 1);
    shifted = bacc >> {clog2k, 1'b0};
    if (shifted > BACC_W'(1 << (BIAS_W - 1))) bias = bias_t'(-(1 << (BIAS_W - 1)));
    else                                     bias = bias_t'(-$signed({1'b0, shifted}));
  end
endmodule
