// argmax_tree: class decision of the final fully connected layer.
//
// A binary comparison tree finds, in one cycle, the largest of the 16 OPE
// accumulators of the current output block (lanes masked out by lane_valid
// do not take part; on equal values the lower lane wins). A running
// maximum register carries the winner across output blocks, so an FC layer
// with up to 256 classes (16 blocks of 16) is decided as its blocks are
// computed. With learned prototypes, the FC output of class j is the
// negated squared L2 distance up to a scale and an offset, so the largest
// output is the nearest prototype.
//
// Interface: pulse en for every finished output block with blk its index;
// first marks the first block of a decision. class_idx/best_val are valid
// the cycle after the last block. In 4x4 mode a block holds 4 classes.
// Only its name and place are given by the published design; the tree and
// the tie rule are this implementation's.
module argmax_tree
  import chameleon_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mode4,
  input  logic       en,
  input  logic       first,
  input  logic [5:0] blk,
  input  acc_t       acc [ARR],
  input  logic [ARR-1:0] lane_valid,
  output logic [7:0] class_idx,
  output acc_t       best_val
);
  // tree levels: 16 -> 8 -> 4 -> 2 -> 1
  acc_t       v [5][ARR];
  logic [3:0] ix[5][ARR];
  logic       ok[5][ARR];
  logic [7:0] cand_idx;

  always_comb begin
    for (int i = 0; i < ARR; i++) begin
      v[0][i]  = acc[i];
      ix[0][i] = 4'(i);
      ok[0][i] = lane_valid[i] && (!mode4 || i < ARR_S);
    end
    for (int l = 1; l < 5; l++) begin
      for (int i = 0; i < ARR; i++) begin
        v[l][i] = '0; ix[l][i] = '0; ok[l][i] = 1'b0;
      end
      for (int i = 0; i < (ARR >> l); i++) begin
        if (ok[l-1][2*i] && (!ok[l-1][2*i+1] || v[l-1][2*i] >= v[l-1][2*i+1])) begin
          v[l][i] = v[l-1][2*i];   ix[l][i] = ix[l-1][2*i];
        end else begin
          v[l][i] = v[l-1][2*i+1]; ix[l][i] = ix[l-1][2*i+1];
        end
        ok[l][i] = ok[l-1][2*i] || ok[l-1][2*i+1];
      end
    end
    cand_idx = mode4 ? {blk, ix[4][0][1:0]} : {blk[3:0], ix[4][0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_idx <= '0;
      best_val  <= '0;
    end else if (en && ok[4][0] && (first || v[4][0] > best_val)) begin
      class_idx <= cand_idx;
      best_val  <= v[4][0];
    end
  end
endmodule
