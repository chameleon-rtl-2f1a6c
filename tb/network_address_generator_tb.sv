// network_address_generator_tb: runs the scheduler alone on a 4-layer TCN
// (kernels 3,3,2,1; dilations 1,2,4; an identity and a 1x1-convolution
// residual; an FC head) over random sequence lengths and random input
// arrival. An independent model of the greedy schedule says, for every
// timestep, which layers run and in which order. The tb checks:
//   - the (layer, t) order of layer runs,
//   - the number of read cycles of each run (cout_blk*(K*cin_blk + residual
//     reads)), i.e. the FC layer takes ceil(V/16)*ceil(N/16) cycles,
//   - that no activation read hits a row whose write is still in flight,
//     and that such conflicts do stall,
//   - that no run starts before its input timestep has arrived,
//   - one class_send per sequence.
// Greedy order and the read/write stall follow the published scheduler;
// the stride rule and the read counts follow this design's address layout.
module network_address_generator_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0;
  layer_cfg_t lcfg [MAX_LAYERS];
  glob_cfg_t  gcfg;
  logic [8:0] num_classes;
  logic [15:0] rx_count;
  logic hold, out_ready;
  logic act_re, in_re, w_re, b_re;
  logic [7:0] act_raddr, b_raddr;
  logic [4:0] in_raddr;
  logic [9:0] w_raddr;
  ope_op_t op1;
  logic src_in1, zero1, ident1;
  logic [3:0] res_shift1, out_shift2;
  logic act_we2, relu2, amax_en2, amax_first2;
  logic [7:0] act_waddr2;
  logic [5:0] amax_blk2;
  logic [ARR-1:0] amax_lanes2;
  logic [15:0] g_next;
  logic [4:0] in_slot;
  logic busy, stall, seq_done, class_send, learn_go;
  logic [7:0] shot;

  network_address_generator dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, nstall = 0, nsend = 0;
  int exp_l [$], exp_t [$], exp_n [$];
  int T;
  int K[4] = '{3, 3, 2, 1}, D[4] = '{0, 1, 2, 0}, CI[4] = '{1, 2, 2, 1}, CO[4] = '{2, 2, 1, 2};
  int RM[4] = '{0, 1, 2, 0}, STR[4] = '{1, 2, 0, 0}, FIN[4] = '{0, 0, 1, 1};

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  // monitor: layer runs, read cycles, write-in-flight conflicts
  int cur_n = -1, cur_l, cur_t;
  logic [7:0] infl [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.state == 3'd1 && dut.l <= 5'd3 && (FIN[dut.l] ? (dut.t == 16'(T - 1)) : (((T - 1 - int'(dut.t)) & ((1 << STR[dut.l]) - 1)) == 0))) begin
      if (cur_n >= 0) begin
        chk(exp_l.size() > 0 && cur_l == exp_l[0] && cur_t == exp_t[0] && cur_n == exp_n[0],
            $sformatf("run l=%0d t=%0d reads=%0d exp l=%0d t=%0d reads=%0d", cur_l, cur_t, cur_n,
                      exp_l.size() ? exp_l[0] : -1, exp_t.size() ? exp_t[0] : -1, exp_n.size() ? exp_n[0] : -1));
        if (exp_l.size()) begin void'(exp_l.pop_front()); void'(exp_t.pop_front()); void'(exp_n.pop_front()); end
      end
      cur_n = 0; cur_l = int'(dut.l); cur_t = int'(dut.t);
      chk(rx_count != g_next, "run started before its input arrived");
    end
    if (dut.issue) cur_n++;
    if (stall) nstall++;
    if (act_re) begin
      chk(!((dut.wv1 && dut.wa1 == act_raddr) || (act_we2 && act_waddr2 == act_raddr)),
          "activation read of a row with a write in flight");
    end
    if (class_send) nsend++;
  end

  initial begin
    int nseq;
    for (int l = 0; l < MAX_LAYERS; l++) lcfg[l] = '0;
    for (int l = 0; l < 4; l++) begin
      lcfg[l].kernel = 4'(K[l]); lcfg[l].dil_log2 = 4'(D[l]);
      lcfg[l].cin_blk_m1 = 6'(CI[l] - 1); lcfg[l].cout_blk_m1 = 6'(CO[l] - 1);
      lcfg[l].res_mode = res_mode_t'(RM[l]); lcfg[l].res_src = 5'd0; lcfg[l].res_from_in = (l == 2);
      lcfg[l].stride_log2 = 4'(STR[l]); lcfg[l].final_only = FIN[l][0];
      lcfg[l].fifo_depth = 4'((l == 0) ? 3 : (l == 1) ? 2 : 1);
    end
    lcfg[1].a_base = 8'd6; lcfg[2].a_base = 8'd10;
    gcfg = '0;
    gcfg.num_layers = 6'd4; gcfg.emb_layer = 5'd2; gcfg.in_blk_m1 = 6'd0; gcfg.in_depth = 5'd5;
    gcfg.k_shots = 8'd1; gcfg.fc_layer = 5'd3;
    num_classes = 9'd20; rx_count = '0; hold = 0; out_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    nseq = 0;
    for (int s = 0; s < 6; s++) begin
      T = (s < 3) ? 12 : $urandom_range(5, 20);
      gcfg.seq_len = 16'(T);
      // expected schedule: walk up the layers while they are needed
      for (int t = 0; t < T; t++)
        for (int l = 0; l < 4; l++) begin
          int nr;
          if (!(FIN[l] ? (t == T - 1) : (((T - 1 - t) & ((1 << STR[l]) - 1)) == 0))) break;
          nr = (l == 3) ? CI[l] * 2 : CO[l] * (K[l] * CI[l] + ((RM[l] == 1) ? 1 : (RM[l] == 2) ? 1 : 0));
          exp_l.push_back(l); exp_t.push_back(t); exp_n.push_back(nr);
        end
      // inputs arrive at random times
      for (int t = 0; t < T; t++) begin
        repeat ($urandom_range(0, 30)) @(negedge clk);
        rx_count = rx_count + 1;
      end
      while (busy || g_next != rx_count) @(negedge clk);
      nseq++;
      @(negedge clk);
      // close the last run of the sequence
      if (cur_n >= 0) begin
        chk(exp_l.size() == 1 && cur_l == exp_l[0] && cur_t == exp_t[0] && cur_n == exp_n[0],
            $sformatf("last run l=%0d t=%0d reads=%0d", cur_l, cur_t, cur_n));
        exp_l.delete(); exp_t.delete(); exp_n.delete();
        cur_n = -1;
      end
    end
    chk(nsend == nseq, $sformatf("class sends %0d exp %0d", nsend, nseq));
    chk(nstall > 0, "read/write stall never happened");
    $display("stalls=%0d", nstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
