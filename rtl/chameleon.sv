// chameleon: top level of the Chameleon accelerator core.
//
// A TCN (temporal convolutional network) inference accelerator that also
// learns new classes on chip. Inference streams inputs through the 16-bit
// input bus into the input buffer; the network address generator runs the
// layers greedily on the 16x16 array of shift-only PEs (4-bit log2 weights,
// 4-bit unsigned activations), the OPEs accumulate, add biases, apply ReLU
// and rescale, and results go back to per-layer FIFOs in the activation
// memory. At the end of a sequence the last (FC) layer's outputs go through
// the argmax tree and the class index leaves on the 8-bit output bus.
// In learning mode each sequence is a shot of a new class: the embedding
// layer's output is kept in the activation memory; after k shots the learning
// controller sums the shots on the same PE array and OPEs, and the
// prototypical parameter extractor turns the sum into the weights and bias of
// one more output neuron of the FC layer, so that inference then classifies
// by nearest prototype (squared L2 distance). The index of the class just
// learned is sent on the output bus. Weights, biases and configuration are
// loaded over SPI. In 4x4 mode only the top-left 4x4 PEs and the always-on
// memory banks are used; msb_pwr_en drives the switch of the gateable
// memory power domain, which is outside this RTL.
//
// Clocking: one clock; the SPI pins and the handshake request/acknowledge
// are synchronised inside. Reset is asynchronous, active low.
//
// Lint notes: spi_rd (register reads need no action), in_slot, the stall
// flag, seq_done, shot and the argmax best value are status outputs of the
// sub-blocks that this top does not need; they are left unconnected on
// purpose and reported as unused.
module chameleon
  import chameleon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // SPI
  input  logic        spi_sclk,
  input  logic        spi_cs_n,
  input  logic        spi_mosi,
  output logic        spi_miso,
  // 16-bit four-phase input bus
  input  logic        in_req,
  input  logic [15:0] in_data,
  output logic        in_ack,
  // 8-bit four-phase output bus
  output logic        out_req,
  output logic [7:0]  out_data,
  input  logic        out_ack,
  // power switch of the gateable MSB memories
  output logic        msb_pwr_en
);
  layer_cfg_t lcfg [MAX_LAYERS];
  glob_cfg_t  gcfg;
  logic [8:0] num_classes;

  // SPI
  logic        spi_wr, spi_rd;
  logic [2:0]  spi_target;
  logic [4:0]  spi_chunk;
  logic [15:0] spi_addr;
  logic [31:0] spi_wdata, cfg_rdata;

  // address generator
  logic        act_re_n, in_re, w_re, b_re;
  logic [7:0]  act_raddr_n, b_raddr;
  logic [4:0]  in_raddr;
  logic [9:0]  w_raddr;
  ope_op_t     op1;
  logic        src_in1, zero1, ident1;
  logic [3:0]  res_shift1, out_shift2;
  logic        act_we2, relu2, amax_en2, amax_first2;
  logic [7:0]  act_waddr2;
  logic [5:0]  amax_blk2;
  logic [ARR-1:0] amax_lanes2;
  logic [15:0] g_next, rx_count;
  logic [4:0]  in_slot;
  logic        nag_busy, nag_stall, seq_done, class_send, learn_go;
  logic [7:0]  shot;

  // learning controller
  logic        lc_busy, lc_act_re, lc_bias_clr, lc_lod, lc_wr, lc_w_we, lc_b_we, lc_inc, lc_done;
  logic [7:0]  lc_act_raddr, lc_b_waddr;
  logic [9:0]  lc_w_waddr;
  logic [ARR-1:0] lc_w_col, lc_b_lane;
  ope_op_t     lc_op;
  logic        lc1;

  // datapath
  act_t  in_rdata [ARR], act_rdata [ARR], pe_act [ARR], ope_act [ARR], push_data [ARR];
  wgt_t  w_rdata [ARR][ARR], pe_wgt [ARR][ARR], w_wdata [ARR][ARR];
  logic  w_wmask [ARR][ARR];
  wgt_t  ext_wgt [ARR];
  bias_t b_rdata [ARR], ext_bias;
  col_t  col_sum [ARR];
  acc_t  acc [ARR];
  ope_op_t op_sel;
  logic  push, push_ready;
  logic  out_ready;
  logic [7:0] class_idx;
  acc_t  best_val;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .wr(spi_wr), .rd(spi_rd), .target(spi_target), .chunk(spi_chunk), .addr(spi_addr),
    .wdata(spi_wdata), .rdata(cfg_rdata)
  );

  config_regs u_cfg (
    .clk, .rst_n,
    .wr(spi_wr && spi_target == 3'd0), .addr(spi_addr), .wdata(spi_wdata), .rdata(cfg_rdata),
    .class_inc(lc_inc), .status({lc_busy, nag_busy}),
    .lcfg, .gcfg, .num_classes
  );

  input_bus u_inbus (
    .clk, .rst_n, .xfer_m1(gcfg.in_xfer_m1), .in_req, .in_data, .in_ack,
    .push, .push_data, .push_ready
  );

  input_buffer u_inbuf (
    .clk, .rst_n, .in_blk_m1(gcfg.in_blk_m1), .in_depth(gcfg.in_depth), .k0(lcfg[0].kernel),
    .g_next, .push, .push_data, .push_ready, .rx_count,
    .re(in_re), .raddr(in_raddr), .rdata(in_rdata)
  );

  network_address_generator u_nag (
    .clk, .rst_n, .lcfg, .gcfg, .num_classes, .rx_count,
    .hold(lc_busy), .out_ready,
    .act_re(act_re_n), .act_raddr(act_raddr_n), .in_re, .in_raddr, .w_re, .w_raddr, .b_re, .b_raddr,
    .op1, .src_in1, .zero1, .ident1, .res_shift1,
    .act_we2, .act_waddr2, .out_shift2, .relu2,
    .amax_en2, .amax_first2, .amax_blk2, .amax_lanes2,
    .g_next, .in_slot, .busy(nag_busy), .stall(nag_stall),
    .seq_done, .class_send, .shot, .learn_go
  );

  learning_controller u_lc (
    .clk, .rst_n, .start(learn_go), .mode4(gcfg.mode4), .k_shots(gcfg.k_shots),
    .vblk_m1(lcfg[gcfg.emb_layer].cout_blk_m1), .emb_base(gcfg.emb_base),
    .fc_w_base(lcfg[gcfg.fc_layer].w_base), .fc_b_base(lcfg[gcfg.fc_layer].b_base),
    .num_classes,
    .busy(lc_busy), .act_re(lc_act_re), .act_raddr(lc_act_raddr), .op(lc_op),
    .bias_clr(lc_bias_clr), .lod_en(lc_lod), .wr_en(lc_wr),
    .w_we(lc_w_we), .w_waddr(lc_w_waddr), .w_col(lc_w_col),
    .b_we(lc_b_we), .b_waddr(lc_b_waddr), .b_lane(lc_b_lane),
    .class_inc(lc_inc), .done(lc_done)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) lc1 <= 1'b0;
    else        lc1 <= lc_busy;

  activation_memory u_act (
    .clk,
    .re(lc_busy ? lc_act_re : act_re_n), .raddr(lc_busy ? lc_act_raddr : act_raddr_n), .rdata(act_rdata),
    .we(act_we2), .waddr(act_waddr2), .wdata(ope_act),
    .spi_we(spi_wr && spi_target == 3'd3), .spi_row(spi_addr[7:0]), .spi_chunk(spi_chunk[0]),
    .spi_data(spi_wdata)
  );

  weight_memory u_wmem (
    .clk, .mode4(gcfg.mode4),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata),
    .we(lc_w_we), .waddr(lc_w_waddr), .wdata(w_wdata), .wmask(w_wmask),
    .spi_we(spi_wr && spi_target == 3'd1), .spi_row(spi_addr[8:0]), .spi_chunk(spi_chunk),
    .spi_data(spi_wdata), .msb_pwr_en
  );

  bias_memory u_bmem (
    .clk, .mode4(gcfg.mode4),
    .re(b_re), .raddr(b_raddr), .rdata(b_rdata),
    .we(lc_b_we), .waddr(lc_b_waddr), .wdata(ext_bias), .wlane(lc_b_lane),
    .spi_we(spi_wr && spi_target == 3'd2), .spi_row(spi_addr[6:0]), .spi_chunk(spi_chunk[2:0]),
    .spi_data(spi_wdata)
  );

  // operand selection for the PE array (stage 1)
  always_comb begin
    for (int i = 0; i < ARR; i++) begin
      if (lc1)          pe_act[i] = act_rdata[i];
      else if (zero1)   pe_act[i] = '0;
      else if (src_in1) pe_act[i] = in_rdata[i];
      else              pe_act[i] = act_rdata[i];
      for (int j = 0; j < ARR; j++) begin
        if (lc1 || ident1) pe_wgt[i][j] = (i == j) ? WONE : WZERO;
        else               pe_wgt[i][j] = w_rdata[i][j];
        w_wdata[i][j] = ext_wgt[i];
        w_wmask[i][j] = lc_w_col[j];
      end
    end
    op_sel = (lc_op != OP_HOLD) ? lc_op : op1;
  end

  pe_array u_pe (.mode4(gcfg.mode4), .act(pe_act), .wgt(pe_wgt), .col_sum);

  for (genvar j = 0; j < ARR; j++) begin : g_ope
    ope u_ope (
      .clk, .rst_n, .op(op_sel), .col_sum(col_sum[j]), .bias(b_rdata[j]),
      .res_shift(res_shift1), .out_shift(out_shift2), .relu(relu2),
      .acc(acc[j]), .act_out(ope_act[j])
    );
  end

  proto_extractor u_ext (
    .clk, .rst_n, .bias_clr(lc_bias_clr), .lod_en(lc_lod), .wr_en(lc_wr),
    .k_shots(gcfg.k_shots), .lane_valid(gcfg.mode4 ? ARR'(16'h000F) : {ARR{1'b1}}), .acc, .wgt(ext_wgt), .bias(ext_bias)
  );

  argmax_tree u_amax (
    .clk, .rst_n, .mode4(gcfg.mode4), .en(amax_en2), .first(amax_first2), .blk(amax_blk2),
    .acc, .lane_valid(amax_lanes2), .class_idx, .best_val
  );

  output_bus u_outbus (
    .clk, .rst_n,
    .send(class_send || (lc_done && out_ready)),
    .data(lc_done ? 8'(num_classes - 9'd1) : class_idx),
    .ready(out_ready), .out_req, .out_data, .out_ack
  );
endmodule
