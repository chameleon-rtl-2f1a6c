// network_address_generator: greedy, dilation-aware TCN scheduler.
//
// The network is a stack of up to 32 layers (causal 1D convolutions with
// kernel size K and dilation 2^d, optional residual input, then FC layers).
// Each layer keeps its outputs in a small FIFO region of the activation
// memory; the network input sits in the input buffer, also used as a FIFO.
// When a new input timestep t (position in the sequence of length T) is
// available, the generator walks up the layers: layer l is computed at t
// only if its output is ever consumed, i.e. if (T-1-t) is a multiple of the
// dilation of the layer above (configured as stride_log2), or only at
// t = T-1 for final_only layers. It stops at the first layer that is not
// needed and waits for the next input. Outputs never consumed (the sparse
// nodes created by dilation) are never computed nor stored, and since a layer
// is computed only every "dilation of the next layer" steps, the K entries
// the next layer reads are the K newest entries of the FIFO. A new output
// overwrites the oldest entry.
//
// Per output block ob of layer l the generator issues one read per cycle:
// K x cin_blk reads of (source FIFO entry newest-j, input block ib) with the
// matching weight row, then the residual reads (one with identity weights,
// or cin_blk of the block input with 1x1-convolution weights). Taps before
// the start of the sequence (t - j*2^d < 0) are marked to be read as zero
// (causal zero padding). The output block is written back two cycles after
// its last read, to the FIFO slot wr_slot[l]; for the final layer in
// inference it goes to the argmax tree instead, and for the embedding layer
// in learning mode to the shot's embedding row.
//
// Pipeline: stage 0 issues memory reads (1-cycle synchronous memories),
// stage 1 applies the OPE operation to the read data, stage 2 writes back.
// The activation memory is two-port with read-old-data; a read of a row
// that a write in flight has not yet reached stalls issue (the published
// one-cycle delay; with this pipeline it can be one or two cycles).
//
// Address layout (this implementation's choice):
//   FIFO row  = a_base + slot*cout_blk + ob
//   input row = slot*in_blk + ib
//   weight    = w_base + (ob*K + j)*cin_blk + ib, residual wres_base + ob*rin_blk + ib
//   bias      = b_base + ob
// From the published design: greedy layer-wise processing, per-layer FIFOs
// with oldest-overwrite, skipping of dilation-induced unused nodes, the stall
// on read/write conflicts. The scheduling rule written as a stride per layer,
// the cycle-level pipeline and the address layout are this design's own.
//
// Lint notes: only some fields of the source-layer records (cs, cr) are
// used (depth, block count, base row), and gcfg.in_xfer_m1 belongs to the
// input bus; the unused-bit warnings on these records are expected.
module network_address_generator
  import chameleon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  lcfg [MAX_LAYERS],
  input  glob_cfg_t   gcfg,
  input  logic [8:0]  num_classes,
  input  logic [15:0] rx_count,      // input timesteps received (wrapping)
  input  logic        hold,          // learning controller owns the datapath
  input  logic        out_ready,     // output bus can take a class
  // stage 0: memory reads
  output logic        act_re,
  output logic [7:0]  act_raddr,
  output logic        in_re,
  output logic [4:0]  in_raddr,
  output logic        w_re,
  output logic [9:0]  w_raddr,
  output logic        b_re,
  output logic [7:0]  b_raddr,
  // stage 1: OPE operation on the read data
  output ope_op_t     op1,
  output logic        src_in1,       // data comes from the input buffer
  output logic        zero1,         // causal padding: data is zero
  output logic        ident1,        // identity weights
  output logic [3:0]  res_shift1,
  // stage 2: write back
  output logic        act_we2,
  output logic [7:0]  act_waddr2,
  output logic [3:0]  out_shift2,
  output logic        relu2,
  output logic        amax_en2,
  output logic        amax_first2,
  output logic [5:0]  amax_blk2,
  output logic [ARR-1:0] amax_lanes2,
  // status
  output logic [15:0] g_next,        // next input timestep to process (wrapping)
  output logic [4:0]  in_slot,       // input buffer slot of g_next
  output logic        busy,
  output logic        stall,         // read-after-write stall this cycle
  output logic        seq_done,      // pulse: last timestep of a sequence fully processed
  output logic        class_send,    // pulse: class decision ready (inference)
  output logic [7:0]  shot,         // shot index of the sequence in learning mode
  output logic        learn_go      // pulse: last shot of a class embedded
);
  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_RUN, S_NEXT, S_DRAIN, S_SEND} state_t;
  typedef enum logic {PH_MAIN, PH_RES} phase_t;

  state_t     state;
  phase_t     phase;
  logic [4:0] l;
  logic [15:0] t;
  logic [5:0] ob, ib;
  logic [3:0] j;
  logic [3:0] wr_slot [MAX_LAYERS];
  logic [1:0] drain;

  layer_cfg_t c;
  layer_cfg_t cs;                      // config of the source layer
  layer_cfg_t cr;                      // config of the residual source layer
  logic [6:0] cin_blk, cout_blk, rin_blk, in_blk;
  logic [5:0] last_ob;
  logic       needed;
  logic [15:0] tl;                     // T-1-t
  logic [15:0] smask;
  logic [4:0]  last_layer;
  logic        is_out_layer, is_emb_out;
  logic [3:0]  src_slot, res_slot;
  logic        src_is_in, res_is_in;
  logic signed [31:0] tap_t;
  logic [ARR-1:0] lanes_last;
  logic [8:0]  lanes_per_blk;

  // stage 0 decisions
  logic        issue;
  logic        last_read_of_ob;
  logic        want_act;
  logic [7:0]  raddr_act;
  logic [4:0]  raddr_in;
  logic        zero_tap;
  logic [9:0]  waddr;
  logic        ident;
  ope_op_t     op0;
  logic [7:0]  wb_addr;

  // in-flight writes
  logic        wv1, av1;
  logic [7:0]  wa1;
  logic        af1;
  logic [5:0]  ab1;
  logic [3:0]  os1; logic rl1;
  logic [ARR-1:0] al1;

  function automatic logic [3:0] newest(input logic [3:0] wp, input logic [3:0] depth);
    return (wp == 0) ? depth - 4'd1 : wp - 4'd1;
  endfunction
  function automatic logic [3:0] back(input logic [3:0] s, input logic [3:0] n, input logic [3:0] depth);
    logic [4:0] v;
    v = {1'b0, s} + {1'b0, depth} - {1'b0, n};
    if (v >= {1'b0, depth}) v = v - {1'b0, depth};
    return v[3:0];
  endfunction
  function automatic logic [4:0] back_in(input logic [4:0] s, input logic [3:0] n, input logic [4:0] depth);
    logic [5:0] v;
    v = {1'b0, s} + {1'b0, depth} - {2'b0, n};
    if (v >= {1'b0, depth}) v = v - {1'b0, depth};
    return v[4:0];
  endfunction

  always_comb begin
    c        = lcfg[l];
    cs       = lcfg[l - 5'd1];
    cr       = lcfg[c.res_src];
    in_blk   = {1'b0, gcfg.in_blk_m1} + 7'd1;
    cin_blk  = {1'b0, c.cin_blk_m1} + 7'd1;
    last_layer = gcfg.learn ? gcfg.emb_layer : 5'(gcfg.num_layers - 6'd1);
    is_out_layer = !gcfg.learn && (l == last_layer);
    is_emb_out   = gcfg.learn && (l == last_layer);
    lanes_per_blk = gcfg.mode4 ? 9'd4 : 9'd16;
    // the FC layer that holds learned classes grows with num_classes
    if (l == gcfg.fc_layer) begin
      last_ob = gcfg.mode4 ? 6'((num_classes - 9'd1) >> 2) : 6'((num_classes - 9'd1) >> 4);
    end else begin
      last_ob = c.cout_blk_m1;
    end
    cout_blk = {1'b0, last_ob} + 7'd1;
    rin_blk  = c.res_from_in ? in_blk : ({1'b0, cr.cout_blk_m1} + 7'd1);
    tl       = gcfg.seq_len - 16'd1 - t;
    smask    = 16'((32'd1 << c.stride_log2) - 1);
    needed   = c.final_only ? (t == gcfg.seq_len - 16'd1) : ((tl & smask) == 16'd0);
    // lanes valid in the last block of the output layer
    for (int i = 0; i < ARR; i++)
      lanes_last[i] = (9'(i) + 9'(ob) * lanes_per_blk) < num_classes;

    // sources
    src_is_in = (l == 5'd0);
    res_is_in = c.res_from_in;
    src_slot  = back(newest(wr_slot[l - 5'd1], cs.fifo_depth), j, cs.fifo_depth);
    res_slot  = newest(wr_slot[c.res_src], cr.fifo_depth);

    zero_tap  = 1'b0;
    raddr_act = '0;
    raddr_in  = '0;
    want_act  = 1'b0;
    ident     = 1'b0;
    op0       = OP_HOLD;
    waddr     = '0;
    last_read_of_ob = 1'b0;
    tap_t = $signed({16'd0, t}) - $signed(32'(j) << c.dil_log2);
    if (phase == PH_MAIN) begin
      zero_tap = tap_t < 0;
      if (src_is_in)
        raddr_in = 5'(back_in(in_slot, j, gcfg.in_depth) * in_blk + 7'(ib));
      else begin
        raddr_act = 8'(cs.a_base + src_slot * ({1'b0, cs.cout_blk_m1} + 7'd1) + 8'(ib));
        want_act  = 1'b1;
      end
      waddr = 10'(16'(c.w_base) + (16'(ob) * 16'(c.kernel) + 16'(j)) * 16'(cin_blk) + 16'(ib));
      op0   = (j == 0 && ib == 0) ? OP_LOAD_BIAS : OP_ACC;
      last_read_of_ob = (j == c.kernel - 4'd1) && (7'(ib) == cin_blk - 7'd1) && (c.res_mode == RES_NONE);
    end else begin
      if (res_is_in)
        raddr_in = 5'(in_slot * in_blk + 7'(c.res_mode == RES_IDENT ? ob : ib));
      else begin
        raddr_act = 8'(cr.a_base + res_slot * ({1'b0, cr.cout_blk_m1} + 7'd1)
                       + 8'(c.res_mode == RES_IDENT ? ob : ib));
        want_act  = 1'b1;
      end
      ident = (c.res_mode == RES_IDENT);
      waddr = 10'(c.wres_base + {4'd0, ob} * rin_blk + {4'd0, ib});
      op0   = OP_ACC_RES;
      last_read_of_ob = (c.res_mode == RES_IDENT) || (7'(ib) == rin_blk - 7'd1);
    end
    if (phase == PH_RES) src_is_in = res_is_in;

    if (is_emb_out)
      wb_addr = 8'(gcfg.emb_base + shot * cout_blk + 8'(ob));
    else
      wb_addr = 8'(c.a_base + wr_slot[l] * cout_blk + 8'(ob));

    stall = (state == S_RUN) && want_act &&
            ((wv1 && wa1 == raddr_act) || (act_we2 && act_waddr2 == raddr_act));
    issue = (state == S_RUN) && !stall;
  end

  assign act_re    = issue && want_act;
  assign act_raddr = raddr_act;
  assign in_re     = issue && src_is_in;
  assign in_raddr  = raddr_in;
  assign w_re      = issue && !ident;
  assign w_raddr   = waddr;
  assign b_re      = issue;
  assign b_raddr   = 8'(c.b_base + 8'(ob));
  assign busy      = (state != S_IDLE);

  // pipeline registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op1 <= OP_HOLD; src_in1 <= 1'b0; zero1 <= 1'b0; ident1 <= 1'b0; res_shift1 <= '0;
      wv1 <= 1'b0; wa1 <= '0; av1 <= 1'b0; af1 <= 1'b0; ab1 <= '0;
      os1 <= '0; rl1 <= 1'b0; al1 <= '0;
      act_we2 <= 1'b0; act_waddr2 <= '0; out_shift2 <= '0; relu2 <= 1'b0;
      amax_en2 <= 1'b0; amax_first2 <= 1'b0; amax_blk2 <= '0; amax_lanes2 <= '0;
    end else begin
      op1        <= issue ? op0 : OP_HOLD;
      src_in1    <= src_is_in;
      zero1      <= zero_tap;
      ident1     <= ident;
      res_shift1 <= c.res_shift;
      wv1 <= issue && last_read_of_ob && !is_out_layer;
      wa1 <= wb_addr;
      av1 <= issue && last_read_of_ob && is_out_layer;
      af1 <= (ob == 0);
      ab1 <= ob;
      os1 <= c.out_shift;
      rl1 <= c.relu;
      al1         <= lanes_last;
      amax_lanes2 <= al1;
      act_we2     <= wv1;
      act_waddr2  <= wa1;
      out_shift2  <= os1;
      relu2       <= rl1;
      amax_en2    <= av1;
      amax_first2 <= af1;
      amax_blk2   <= ab1;
    end
  end

  // control state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= PH_MAIN;
      l <= '0; t <= '0; ob <= '0; ib <= '0; j <= '0;
      g_next <= '0; in_slot <= '0; drain <= '0; shot <= '0;
      seq_done <= 1'b0; class_send <= 1'b0; learn_go <= 1'b0;
      for (int m = 0; m < MAX_LAYERS; m++) wr_slot[m] <= '0;
    end else begin
      seq_done   <= 1'b0;
      class_send <= 1'b0;
      learn_go   <= 1'b0;
      unique case (state)
        S_IDLE:
          if (!hold && rx_count != g_next) begin
            l <= '0;
            state <= S_CHECK;
          end
        S_CHECK: begin
          ob <= '0; ib <= '0; j <= '0; phase <= PH_MAIN;
          if ({1'b0, l} > {1'b0, last_layer} || !needed) state <= S_NEXT;
          else                                             state <= S_RUN;
        end
        S_RUN:
          if (issue) begin
            if (phase == PH_MAIN) begin
              if (7'(ib) != cin_blk - 7'd1) ib <= ib + 6'd1;
              else begin
                ib <= '0;
                if (j != c.kernel - 4'd1) j <= j + 4'd1;
                else if (c.res_mode != RES_NONE) phase <= PH_RES;
              end
            end else if (c.res_mode == RES_CONV && 7'(ib) != rin_blk - 7'd1) begin
              ib <= ib + 6'd1;
            end
            if (last_read_of_ob) begin
              ib <= '0; j <= '0; phase <= PH_MAIN;
              if (ob != last_ob) ob <= ob + 6'd1;
              else begin
                if (!is_out_layer && !is_emb_out)
                  wr_slot[l] <= (wr_slot[l] == c.fifo_depth - 4'd1) ? 4'd0 : wr_slot[l] + 4'd1;
                l <= l + 5'd1;
                state <= (l == 5'(MAX_LAYERS - 1)) ? S_NEXT : S_CHECK;
              end
            end
          end
        S_NEXT: begin
          g_next  <= g_next + 16'd1;
          in_slot <= (in_slot == gcfg.in_depth - 5'd1) ? 5'd0 : in_slot + 5'd1;
          if (t == gcfg.seq_len - 16'd1) begin
            t <= '0;
            drain <= 2'd3;
            state <= S_DRAIN;
          end else begin
            t <= t + 16'd1;
            state <= S_IDLE;
          end
        end
        S_DRAIN:
          if (drain != 0) drain <= drain - 2'd1;
          else begin
            seq_done <= 1'b1;
            if (gcfg.learn) begin
              shot  <= (shot == gcfg.k_shots - 8'd1) ? 8'd0 : shot + 8'd1;
              learn_go <= (shot == gcfg.k_shots - 8'd1);
              state <= S_IDLE;
            end else state <= S_SEND;
          end
        S_SEND:
          if (out_ready) begin
            class_send <= 1'b1;
            state <= S_IDLE;
          end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
