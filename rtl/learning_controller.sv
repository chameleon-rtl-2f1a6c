// learning_controller: few-shot / continual learning sequencer.
//
// After the k shots of a new class (way) have been embedded (each embedding
// of V = vblk x 16 values kept in its own rows of the activation memory), it
// runs the parameter extraction for one new output neuron of the learned FC
// layer, one 16-dimensional chunk c at a time:
//   SUM  (k cycles)  shot s of chunk c is read and passed through the PE
//                    array with identity weights; the OPE accumulators load
//                    (s = 0) or add it, building the embedding sum s^j
//   LOD  (1 cycle)   the extractor latches floor(log2 s^j)
//   WR   (1 cycle)   the 16 log2 weights are written to one column of the
//                    learned layer's weight row; partial bias sum added
// and, after the last chunk,
//   BIAS (1 cycle)   the bias is written and the class counter incremented.
// The memory read for each SUM cycle is issued one cycle ahead (on the start
// cycle, during SUM, and during WR for the next chunk), so learning one class
// takes (k+2)*ceil(V/16)+1 cycles after start, the latency the published
// design gives. Continual learning is the same step repeated: each learned
// class adds one neuron (column j mod 16 of output block j/16).
//
// Published: a few counters and a state machine tracking way and shot that
// drive the extractor, and the cycle count. The state encoding, the memory
// row layout and the handshake (start pulse, busy, done pulse) are this
// implementation's choices. In 4x4 mode a chunk holds 4 dimensions.
//
// Lint note: num_classes[8] is not used; the output bus limits classes to
// 256, so the new-class column and block come from bits [7:0].
module learning_controller
  import chameleon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        mode4,
  input  logic [7:0]  k_shots,
  input  logic [5:0]  vblk_m1,       // embedding chunks - 1
  input  logic [7:0]  emb_base,      // activation row of shot 0, chunk 0
  input  logic [9:0]  fc_w_base,     // first weight row of the learned FC layer
  input  logic [7:0]  fc_b_base,     // first bias row of the learned FC layer
  input  logic [8:0]  num_classes,   // classes learned so far = index of the new class
  // datapath control
  output logic        busy,
  output logic        act_re,
  output logic [7:0]  act_raddr,
  output ope_op_t     op,            // applied to the data read in the previous cycle
  output logic        bias_clr,
  output logic        lod_en,
  output logic        wr_en,
  output logic        w_we,
  output logic [9:0]  w_waddr,
  output logic [ARR-1:0] w_col,      // one-hot column of the new class
  output logic        b_we,
  output logic [7:0]  b_waddr,
  output logic [ARR-1:0] b_lane,
  output logic        class_inc,     // pulse: one more class
  output logic        done
);
  typedef enum logic [2:0] {L_IDLE, L_SUM, L_LOD, L_WR, L_BIAS} lstate_t;
  lstate_t    st;
  logic [7:0] s;
  logic [5:0] ch;
  logic [6:0] vblk;
  logic [4:0] col;
  logic [5:0] oblk;

  assign vblk = {1'b0, vblk_m1} + 7'd1;
  assign col  = mode4 ? {3'd0, num_classes[1:0]} : {1'b0, num_classes[3:0]};
  assign oblk = mode4 ? num_classes[7:2] : {2'b0, num_classes[7:4]};

  always_comb begin
    act_re    = 1'b0;
    act_raddr = '0;
    if (st == L_IDLE && start) begin
      act_re    = 1'b1;
      act_raddr = emb_base;
    end else if (st == L_SUM && s != k_shots - 8'd1) begin
      act_re    = 1'b1;
      act_raddr = 8'(emb_base + (s + 8'd1) * vblk + 8'(ch));
    end else if (st == L_WR && 7'(ch) != vblk - 7'd1) begin
      act_re    = 1'b1;
      act_raddr = 8'(emb_base + 8'(ch) + 8'd1);
    end
    op        = (st == L_SUM) ? ((s == 0) ? OP_LOAD : OP_ACC) : OP_HOLD;
    bias_clr  = (st == L_IDLE) && start;
    lod_en    = (st == L_LOD);
    wr_en     = (st == L_WR);
    w_we      = (st == L_WR);
    w_waddr   = 10'(fc_w_base + {4'd0, oblk} * vblk + {4'd0, ch});
    w_col     = ARR'(1) << col;
    b_we      = (st == L_BIAS);
    b_waddr   = 8'(fc_b_base + 8'(oblk));
    b_lane    = ARR'(1) << col;
    class_inc = (st == L_BIAS);
    busy      = (st != L_IDLE) || start;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; s <= '0; ch <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        L_IDLE: if (start) begin st <= L_SUM; s <= '0; ch <= '0; end
        L_SUM:  if (s == k_shots - 8'd1) st <= L_LOD; else s <= s + 8'd1;
        L_LOD:  st <= L_WR;
        L_WR:   if (7'(ch) != vblk - 7'd1) begin st <= L_SUM; s <= '0; ch <= ch + 6'd1; end
                else st <= L_BIAS;
        L_BIAS: begin st <= L_IDLE; done <= 1'b1; end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
