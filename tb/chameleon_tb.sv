// chameleon_tb: end-to-end test of the accelerator at its default sizes.
//
// The testbench acts as the host. It loads configuration, weights and biases
// over SPI, streams input sequences through the 16-bit four-phase input bus
// and collects class indices from the 8-bit four-phase output bus. A
// reference model in the testbench computes the same TCN densely (every
// layer at every timestep, causal zero padding). It uses the same
// arithmetic: log2 weights, 18-bit saturating accumulation in
// the read order, residual rescaling per column sum, ReLU, output shift
// and 4-bit clipping. It also models prototype learning: summing k shot
// embeddings, leading-one exponent, bias -(sum 4^l) >> 2*ceil(log2 k).
//
// Phase A (16x16 mode): a 4-layer network (dilations 1, 2, 4, an identity
// residual, a 1x1-convolution residual from the input, an FC head with 20
// classes). It runs inference on 4 sequences, learns 3 new classes from 3
// shots each (continual learning on top of the 20), then runs inference
// again with 23 classes.
// Phase B (4x4 mode, after a reset): a 4-layer network with weights in
// both stacked always-on banks. It runs inference, learns 2 classes with
// 2 shots, and runs inference again.
//
// Checked: every output class, the learning latency of (k+2)*ceil(V/P)+1
// cycles, and the FC inference cycles ceil(V/P)*ceil(N/P) (P = 16 or 4).
// Mechanisms counted (a failure if one never happens): SPI writes,
// input-bus transfers, input back-pressure, read/write stall, causal zero
// padding, identity residual, conv residual, argmax sends, learned classes,
// 4x4 mode with the MSB memories switched off, bank-B (stacked) weight reads.
// Runs the top at its default (published) sizes, so it is also the
// full-size test. The cycle counts are the published formulas.
module chameleon_tb;
  import chameleon_pkg::*;

  logic clk = 0, rst_n = 0;
  logic spi_sclk, spi_cs_n, spi_mosi, spi_miso;
  logic in_req, in_ack, out_req, out_ack, msb_pwr_en;
  logic [15:0] in_data;
  logic [7:0]  out_data;

  chameleon dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_spi = 0, n_xfer = 0, n_bp = 0, n_stall = 0, n_pad = 0, n_ident = 0, n_conv = 0;
  int n_send = 0, n_learn = 0, n_m4 = 0, n_bankb = 0;

  initial begin
    #300ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", s);
    end
  endtask

  // ---------------- network description (testbench side) ----------------
  int P;                                  // lanes per block (16 or 4)
  int NL, T, IN_BLK, XFER, IN_DEPTH, EMB_L, FC_L, K_SHOTS, EMB_BASE;
  int L_K[4], L_D[4], L_CI[4], L_CO[4], L_RM[4], L_RSRC[4], L_RIN[4], L_RS[4], L_OS[4];
  int L_RELU[4], L_STR[4], L_FIN[4], L_FD[4], L_WB[4], L_WRB[4], L_BB[4], L_AB[4];
  int ncls;
  logic [3:0]  Wl [1024][16][16];         // logical weight rows
  logic [13:0] Bl [256][16];              // logical bias rows
  logic [WWORD-1:0] pw [512];
  logic [BWORD-1:0] pb [128];

  function automatic int wv(input logic [3:0] c);
    if (c == WZERO) return 0;
    return c[3] ? -(1 << c[2:0]) : (1 << c[2:0]);
  endfunction
  function automatic int sat(input int v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return v;
  endfunction

  // ---------------- SPI host ----------------
  task automatic spi_frame(input logic [31:0] hdr, input logic [31:0] dat);
    logic [63:0] f;
    f = {hdr, dat};
    spi_cs_n = 0; #40;
    for (int b = 63; b >= 0; b--) begin
      spi_mosi = f[b];
      #40 spi_sclk = 1;
      #40 spi_sclk = 0;
    end
    #40 spi_cs_n = 1; #60;
    n_spi++;
  endtask
  task automatic spi_wr(input int tgt, input int chunk, input int addr, input logic [31:0] dat);
    spi_frame({1'b1, 3'(tgt), 5'(chunk), 7'd0, 16'(addr)}, dat);
  endtask
  task automatic spi_rd(input int addr, output logic [31:0] dat);
    logic [63:0] f;
    f = {1'b0, 3'd0, 5'd0, 7'd0, 16'(addr), 32'd0};
    spi_cs_n = 0; #40;
    for (int b = 63; b >= 0; b--) begin
      spi_mosi = f[b];
      #40 spi_sclk = 1;
      if (b < 32) dat[b] = spi_miso;
      #40 spi_sclk = 0;
    end
    #40 spi_cs_n = 1; #60;
  endtask

  // configuration registers
  task automatic load_cfg(input bit mode4, input bit learn);
    layer_cfg_t c;
    glob_cfg_t g;
    logic [95:0] w;
    for (int l = 0; l < NL; l++) begin
      c = '0;
      c.kernel = 4'(L_K[l]); c.dil_log2 = 4'(L_D[l]);
      c.cin_blk_m1 = 6'(L_CI[l] - 1); c.cout_blk_m1 = 6'(L_CO[l] - 1);
      c.res_mode = res_mode_t'(L_RM[l]); c.res_src = 5'(L_RSRC[l]); c.res_from_in = L_RIN[l][0];
      c.res_shift = 4'(L_RS[l]); c.out_shift = 4'(L_OS[l]); c.relu = L_RELU[l][0];
      c.stride_log2 = 4'(L_STR[l]); c.final_only = L_FIN[l][0]; c.fifo_depth = 4'(L_FD[l]);
      c.w_base = 10'(L_WB[l]); c.wres_base = 10'(L_WRB[l]); c.b_base = 8'(L_BB[l]); c.a_base = 8'(L_AB[l]);
      w = 96'(c);
      for (int k = 0; k < 3; k++) spi_wr(0, 0, 4*l + k, w[k*32 +: 32]);
    end
    g = '0;
    g.num_layers = 6'(NL); g.emb_layer = 5'(EMB_L); g.seq_len = 16'(T); g.in_blk_m1 = 6'(IN_BLK - 1);
    g.in_depth = 5'(IN_DEPTH); g.mode4 = mode4; g.learn = learn; g.k_shots = 8'(K_SHOTS);
    g.emb_base = 8'(EMB_BASE); g.fc_layer = 5'(FC_L); g.in_xfer_m1 = 2'(XFER - 1);
    w = 96'(g);
    spi_wr(0, 0, REG_GLOB0, w[31:0]);
    spi_wr(0, 0, REG_GLOB1, w[63:32]);
  endtask

  // random parameters for all layers, then pack into physical words and send
  task automatic load_params(input bit mode4);
    for (int r = 0; r < 512; r++) pw[r] = '0;
    for (int r = 0; r < 128; r++) pb[r] = '0;
    for (int r = 0; r < 1024; r++) for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) Wl[r][i][j] = WZERO;
    for (int r = 0; r < 256; r++) for (int i = 0; i < 16; i++) Bl[r][i] = '0;
    for (int l = 0; l < NL; l++) begin
      int nrows, nres;
      nrows = L_CO[l] * L_K[l] * L_CI[l];
      nres  = (L_RM[l] == 2) ? L_CO[l] * (L_RIN[l] ? IN_BLK : L_CO[L_RSRC[l]]) : 0;
      for (int r = 0; r < nrows + nres; r++)
        for (int i = 0; i < P; i++)
          for (int j = 0; j < P; j++)
            Wl[(r < nrows) ? L_WB[l] + r : L_WRB[l] + r - nrows][i][j] =
              ($urandom_range(0, 3) == 0) ? WZERO : {1'($urandom), 3'($urandom_range(0, 3))};
      for (int r = 0; r < L_CO[l]; r++)
        for (int i = 0; i < P; i++) Bl[L_BB[l] + r][i] = 14'($signed($urandom_range(0, 120)) - 40);
    end
    send_params(mode4);
  endtask

  task automatic send_params(input bit mode4);
    bit wt [512], bt [128];
    for (int r = 0; r < 512; r++) wt[r] = 0;
    for (int r = 0; r < 128; r++) bt[r] = 0;
    for (int r = 0; r < 1024; r++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          if (!mode4 && r < 512) begin
            pw[r][wslot(i, j)*4 +: 4] = Wl[r][i][j];
            if (Wl[r][i][j] != WZERO) wt[r] = 1;
          end
          if (mode4 && i < 4 && j < 4) begin
            pw[r % 512][(r >= 512 ? 64 : 0) + (i*4 + j)*4 +: 4] = Wl[r][i][j];
            if (Wl[r][i][j] != WZERO) wt[r % 512] = 1;
          end
        end
    for (int r = 0; r < 256; r++)
      for (int i = 0; i < 16; i++) begin
        if (!mode4 && r < 128) begin
          pb[r][i*14 +: 14] = Bl[r][i];
          if (Bl[r][i] != 0) bt[r] = 1;
        end
        if (mode4 && i < 4) begin
          pb[r % 128][(r >= 128 ? 56 : 0) + i*14 +: 14] = Bl[r][i];
          if (Bl[r][i] != 0) bt[r % 128] = 1;
        end
      end
    for (int r = 0; r < 512; r++)
      if (wt[r]) for (int c = 0; c < (mode4 ? 4 : 32); c++) spi_wr(1, c, r, pw[r][c*32 +: 32]);
    for (int r = 0; r < 128; r++)
      if (bt[r]) for (int c = 0; c < 7; c++) spi_wr(2, c, r, pb[r][c*32 +: 32]);
  endtask

  // ---------------- reference model ----------------
  logic [3:0] seq_in [16][64];   // current sequence: [t][channel]
  int ref_act [4][16][64];       // layer outputs [l][t][channel]
  int ref_acc [64];              // accumulators of the output layer at T-1

  function automatic int xin(input int l, input int t, input int ch);
    if (t < 0) return 0;
    if (l < 0) return seq_in[t][ch];
    return ref_act[l][t][ch];
  endfunction

  // computes layers 0..last densely; the last layer's accumulators at T-1 in ref_acc
  task automatic ref_run(input int last, input int nblk_last);
    for (int l = 0; l <= last; l++) begin
      int co;
      co = (l == last) ? nblk_last : L_CO[l];
      for (int t = 0; t < T; t++)
        for (int o = 0; o < co * P; o++) begin
          int acc, col, ob, lo, rin;
          ob = o / P; lo = o % P;
          acc = 0;
          for (int j = 0; j < L_K[l]; j++)
            for (int ib = 0; ib < L_CI[l]; ib++) begin
              col = 0;
              for (int i = 0; i < P; i++)
                col += xin(l - 1, t - (j << L_D[l]), ib*P + i) *
                       wv(Wl[L_WB[l] + (ob*L_K[l] + j)*L_CI[l] + ib][i][lo]);
              if (j == 0 && ib == 0) acc = sat(int'($signed(Bl[L_BB[l] + ob][lo])) + col);
              else acc = sat(acc + col);
            end
          if (L_RM[l] == 1) begin
            acc = sat(acc + (xin(L_RIN[l] ? -1 : L_RSRC[l], t, o) >>> L_RS[l]));
          end else if (L_RM[l] == 2) begin
            rin = L_RIN[l] ? IN_BLK : L_CO[L_RSRC[l]];
            for (int ib = 0; ib < rin; ib++) begin
              col = 0;
              for (int i = 0; i < P; i++)
                col += xin(L_RIN[l] ? -1 : L_RSRC[l], t, ib*P + i) *
                       wv(Wl[L_WRB[l] + ob*rin + ib][i][lo]);
              acc = sat(acc + (col >>> L_RS[l]));
            end
          end
          if (l == last && t == T - 1) ref_acc[o] = acc;
          if (L_RELU[l] && acc < 0) acc = 0;
          acc = acc >>> L_OS[l];
          ref_act[l][t][o] = (acc < 0) ? 0 : (acc > 15) ? 15 : acc;
        end
    end
  endtask

  function automatic int ref_class();
    int best;
    best = 0;
    for (int c = 1; c < ncls; c++) if (ref_acc[c] > ref_acc[best]) best = c;
    return best;
  endfunction

  // ---------------- input and output streams ----------------
  logic [15:0] xq [$];
  int exp_q [$];
  int got_q [$];

  initial begin : in_driver
    in_req = 0; in_data = 0;
    forever begin
      @(negedge clk);
      if (xq.size() > 0 && rst_n) begin
        in_data = xq.pop_front();
        in_req = 1;
        while (!in_ack) @(negedge clk);
        in_req = 0;
        while (in_ack) @(negedge clk);
        n_xfer++;
      end
    end
  end

  initial begin : out_monitor
    out_ack = 0;
    forever begin
      @(negedge clk);
      if (out_req) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        got_q.push_back(int'(out_data));
        out_ack = 1;
        while (out_req) @(negedge clk);
        out_ack = 0;
      end
    end
  end

  task automatic new_seq(input int base_seed, input int noise);
    for (int t = 0; t < T; t++)
      for (int ch = 0; ch < 64; ch++) begin
        int v;
        v = (ch < IN_BLK * P) ? int'((base_seed * 7 + t * 13 + ch * 5 + (t * ch) % 11) % 16) : 0;
        if (ch < IN_BLK * P && noise > 0) v = v + $urandom_range(0, noise) - noise / 2;
        seq_in[t][ch] = 4'((v < 0) ? 0 : (v > 15) ? 15 : v);
      end
  endtask

  task automatic send_seq();
    for (int t = 0; t < T; t++)
      for (int b = 0; b < IN_BLK; b++)
        for (int x = 0; x < XFER; x++) begin
          logic [15:0] d;
          for (int q = 0; q < 4; q++) d[q*4 +: 4] = seq_in[t][b*P + x*4 + q];
          xq.push_back(d);
        end
  endtask

  // learning reference: sums of embeddings per channel over k shots
  int emb_sum [64];

  task automatic ref_learn(input int vblk);
    int c, bacc, clog2k, sh, l2, ob, lo;
    c = ncls; ob = c / P; lo = c % P;
    bacc = 0;
    clog2k = 0;
    while ((1 << clog2k) < K_SHOTS) clog2k++;
    for (int ch = 0; ch < vblk * P; ch++) begin
      l2 = 0;
      for (int b = 0; b < 17; b++) if (emb_sum[ch] > 0 && emb_sum[ch][b]) l2 = (b > 7) ? 7 : b;
      Wl[L_WB[FC_L] + ob*vblk + ch / P][ch % P][lo] = {1'b0, 3'(l2)};
      bacc += 1 << (2 * l2);
    end
    sh = bacc >> (2 * clog2k);
    Bl[L_BB[FC_L] + ob][lo] = (sh > 8192) ? -14'sd8192 : 14'(-sh);
    ncls++;
  endtask

  // run nseq inference sequences and check the classes
  task automatic run_infer(input int nseq, input int seed0);
    int nb;
    nb = (ncls + P - 1) / P;
    for (int s = 0; s < nseq; s++) begin
      new_seq(seed0 + s, 6);
      ref_run(NL - 1, nb);
      exp_q.push_back(ref_class());
      send_seq();
    end
  endtask

  // learn ncl classes from K_SHOTS shots each
  task automatic run_learn(input int ncl, input int seed0);
    int vb;
    vb = L_CO[EMB_L];
    for (int c = 0; c < ncl; c++) begin
      for (int ch = 0; ch < 64; ch++) emb_sum[ch] = 0;
      for (int s = 0; s < K_SHOTS; s++) begin
        new_seq(seed0 + c * 17, 4);
        ref_run(EMB_L, L_CO[EMB_L]);
        for (int ch = 0; ch < vb * P; ch++) emb_sum[ch] += ref_act[EMB_L][T-1][ch];
        send_seq();
      end
      exp_q.push_back(ncls);
      ref_learn(vb);
    end
  endtask

  task automatic wait_idle();
    int guard;
    guard = 0;
    while ((got_q.size() < exp_q.size() || xq.size() > 0 || dut.u_nag.busy || dut.lc_busy
            || dut.u_inbuf.rx_count != dut.u_nag.g_next) && guard < 5000000) begin
      @(negedge clk); guard++;
    end
    repeat (20) @(negedge clk);
    chk(got_q.size() == exp_q.size(), $sformatf("outputs %0d expected %0d", got_q.size(), exp_q.size()));
    while (exp_q.size() > 0 && got_q.size() > 0) begin
      int e, g;
      e = exp_q.pop_front(); g = got_q.pop_front();
      chk(e == g, $sformatf("class got %0d exp %0d (%0d lanes, %0d classes)", g, e, P, ncls));
    end
    exp_q.delete(); got_q.delete();
  endtask

  // ---------------- mechanism monitors and cycle checks ----------------
  int lc_cyc = 0, fc_cyc = 0, fc_exp = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.in_req && !dut.u_inbuf.push_ready && dut.u_inbus.push) n_bp++;
    if (dut.u_nag.stall) n_stall++;
    if (dut.u_nag.zero1 && dut.u_nag.op1 != OP_HOLD) n_pad++;
    if (dut.u_nag.ident1 && dut.u_nag.op1 == OP_ACC_RES) n_ident++;
    if (!dut.u_nag.ident1 && dut.u_nag.op1 == OP_ACC_RES) n_conv++;
    if (dut.u_nag.class_send) n_send++;
    if (dut.lc_inc) n_learn++;
    if (dut.gcfg.mode4 && dut.u_nag.busy && !msb_pwr_en) n_m4++;
    if (dut.gcfg.mode4 && dut.w_re && dut.w_raddr[9]) n_bankb++;
    // learning latency: cycles the controller is out of idle
    if (dut.u_lc.st != 0) lc_cyc++;
    if (dut.lc_done) begin
      int v;
      v = L_CO[EMB_L];
      chk(lc_cyc == (K_SHOTS + 2) * v + 1, $sformatf("learning latency %0d exp %0d", lc_cyc, (K_SHOTS + 2) * v + 1));
      lc_cyc = 0;
    end
    // FC inference cycles: issue cycles of the FC layer
    if (!dut.gcfg.learn && dut.u_nag.state == 2 && dut.u_nag.l == 5'(FC_L) && !dut.u_nag.stall) fc_cyc++;
    if (dut.u_nag.class_send) begin
      fc_exp = L_CI[FC_L] * ((int'(dut.num_classes) + P - 1) / P);
      chk(fc_cyc == fc_exp, $sformatf("FC cycles %0d exp %0d", fc_cyc, fc_exp));
      fc_cyc = 0;
    end
  end

  // ---------------- phases ----------------
  task automatic set_learn(input bit mode4, input bit learn);
    glob_cfg_t g;
    logic [63:0] w;
    g = '0;
    g.num_layers = 6'(NL); g.emb_layer = 5'(EMB_L); g.seq_len = 16'(T); g.in_blk_m1 = 6'(IN_BLK - 1);
    g.in_depth = 5'(IN_DEPTH); g.mode4 = mode4; g.learn = learn; g.k_shots = 8'(K_SHOTS);
    g.emb_base = 8'(EMB_BASE); g.fc_layer = 5'(FC_L); g.in_xfer_m1 = 2'(XFER - 1);
    w = 64'(g);
    spi_wr(0, 0, REG_GLOB0, w[31:0]);
    spi_wr(0, 0, REG_GLOB1, w[63:32]);
  endtask

  task automatic setup_layer(input int l, input int k, input int d, input int ci, input int co,
                             input int rm, input int rsrc, input int rin, input int rs, input int os,
                             input int relu, input int str, input int fin, input int fd,
                             input int wb, input int wrb, input int bb, input int ab);
    L_K[l] = k; L_D[l] = d; L_CI[l] = ci; L_CO[l] = co; L_RM[l] = rm; L_RSRC[l] = rsrc; L_RIN[l] = rin;
    L_RS[l] = rs; L_OS[l] = os; L_RELU[l] = relu; L_STR[l] = str; L_FIN[l] = fin; L_FD[l] = fd;
    L_WB[l] = wb; L_WRB[l] = wrb; L_BB[l] = bb; L_AB[l] = ab;
  endtask

  initial begin : main
    logic [31:0] rd;
    spi_sclk = 0; spi_cs_n = 1; spi_mosi = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ===== phase A: 16x16 mode =====
    P = 16; NL = 4; T = 12; IN_BLK = 1; XFER = 4; IN_DEPTH = 5; EMB_L = 2; FC_L = 3;
    K_SHOTS = 3; EMB_BASE = 12; ncls = 20;
    //          l  K  d ci co rm src in rs os relu str fin fd  wb  wrb bb ab
    setup_layer(0, 3, 0, 1, 2, 0, 0, 0, 0, 5, 1,  1,  0,  3,  0,  0,  0, 0);
    setup_layer(1, 3, 1, 2, 2, 1, 0, 0, 1, 6, 1,  2,  0,  2,  6,  0,  2, 6);
    setup_layer(2, 2, 2, 2, 1, 2, 0, 1, 1, 6, 1,  0,  1,  1, 18, 22,  4, 10);
    setup_layer(3, 1, 0, 1, 2, 0, 0, 0, 0, 0, 0,  0,  1,  1, 23,  0,  5, 0);
    load_cfg(1'b0, 1'b0);
    spi_wr(0, 0, REG_CLASSES, 32'(ncls));
    load_params(1'b0);
    spi_rd(4 * 2 + 0, rd);
    begin
      logic [95:0] w;
      layer_cfg_t c;
      c = '0; c.kernel = 4'd2; c.dil_log2 = 4'd2; c.cin_blk_m1 = 6'd1; c.res_mode = RES_CONV;
      c.res_from_in = 1'b1; c.res_shift = 4'd1; c.out_shift = 4'd6; c.relu = 1'b1; c.final_only = 1'b1;
      c.fifo_depth = 4'd1; c.w_base = 10'd18; c.wres_base = 10'd22; c.b_base = 8'd4; c.a_base = 8'd10;
      w = 96'(c);
      chk(rd == w[31:0], "SPI read back of a configuration word");
    end
    chk(msb_pwr_en == 1'b1, "MSB memories on in 16x16 mode");
    run_infer(4, 100);
    wait_idle();
    set_learn(1'b0, 1'b1);
    run_learn(3, 300);
    wait_idle();
    set_learn(1'b0, 1'b0);
    run_infer(4, 500);
    wait_idle();
    chk(dut.num_classes == 9'd23, "23 classes after learning");

    // ===== phase B: 4x4 mode, after reset =====
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    P = 4; NL = 4; T = 10; IN_BLK = 2; XFER = 1; IN_DEPTH = 5; EMB_L = 2; FC_L = 3;
    K_SHOTS = 2; EMB_BASE = 16; ncls = 6;
    //          l  K  d ci co rm src in rs os relu str fin fd  wb   wrb bb   ab
    setup_layer(0, 3, 0, 2, 2, 0, 0, 0, 0, 4, 1,  0,  0,  2,   0,  0,  0,  0);
    setup_layer(1, 2, 0, 2, 2, 1, 0, 0, 0, 4, 1,  1,  0,  3,  12,  0,  2,  4);
    setup_layer(2, 3, 1, 2, 3, 0, 0, 0, 0, 4, 1,  0,  1,  1, 512,  0, 128, 10);
    setup_layer(3, 1, 0, 3, 2, 0, 0, 0, 0, 0, 0,  0,  1,  1,  20,  0,  4,  0);
    load_cfg(1'b1, 1'b0);
    spi_wr(0, 0, REG_CLASSES, 32'(ncls));
    load_params(1'b1);
    repeat (5) @(negedge clk);
    chk(msb_pwr_en == 1'b0, "MSB memories off in 4x4 mode");
    run_infer(4, 700);
    wait_idle();
    set_learn(1'b1, 1'b1);
    run_learn(2, 900);
    wait_idle();
    set_learn(1'b1, 1'b0);
    run_infer(4, 1100);
    wait_idle();
    chk(dut.num_classes == 9'd8, "8 classes after learning in 4x4 mode");

    // ===== mechanisms =====
    $display("mechanisms: spi=%0d xfer=%0d backpressure=%0d stall=%0d pad=%0d ident=%0d conv=%0d send=%0d learn=%0d m4=%0d bankB=%0d",
             n_spi, n_xfer, n_bp, n_stall, n_pad, n_ident, n_conv, n_send, n_learn, n_m4, n_bankb);
    chk(n_spi > 0, "SPI writes");
    chk(n_xfer > 0, "input transfers");
    chk(n_bp > 0, "input back-pressure");
    chk(n_stall > 0, "read/write stall");
    chk(n_pad > 0, "causal zero padding");
    chk(n_ident > 0, "identity residual");
    chk(n_conv > 0, "1x1 convolution residual");
    chk(n_send == 16, "argmax class sends");
    chk(n_learn == 5, "learned classes");
    chk(n_m4 > 0, "4x4 mode with MSB memories off");
    chk(n_bankb > 0, "stacked bank-B weight reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
