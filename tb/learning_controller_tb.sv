// learning_controller_tb: for several shot counts k, embedding sizes and
// class indices, checks the published latency (k+2)*ceil(V/16)+1 cycles
// from start to the bias write, that every embedding row (shot, chunk) is
// read exactly once in order, the OPE operation sequence, the weight row
// and column and the bias row and lane of the new class.
// The latency formula is the published one; the order of reads and writes
// is this design's.
module learning_controller_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, mode4, busy, act_re, bias_clr, lod_en, wr_en, w_we, b_we, class_inc, done;
  logic [7:0] k_shots, emb_base, fc_b_base, act_raddr, b_waddr;
  logic [5:0] vblk_m1;
  logic [9:0] fc_w_base, w_waddr;
  logic [8:0] num_classes;
  ope_op_t op;
  logic [ARR-1:0] w_col, b_lane;
  int checks = 0, failures = 0;

  learning_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int k, v, cyc, nreads, nw, exp_row, p, bias_cyc;
    start = 0; mode4 = 0; k_shots = 1; vblk_m1 = 0; emb_base = 8'd10; fc_w_base = 10'd100;
    fc_b_base = 8'd20; num_classes = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 24; n++) begin
      k = (n < 4) ? n + 1 : $urandom_range(1, 12);
      v = $urandom_range(1, 6);
      mode4 = (n % 4 == 3);
      p = mode4 ? 4 : 16;
      num_classes = 9'($urandom_range(0, mode4 ? 60 : 250));
      k_shots = 8'(k); vblk_m1 = 6'(v - 1);
      @(negedge clk);
      start = 1;
      cyc = 0; nreads = 0; nw = 0; bias_cyc = -1;
      // start cycle: first read
      #1;
      check(act_re && act_raddr == emb_base, "first read");
      nreads++;
      @(negedge clk);
      start = 0;
      while (!done && cyc < 10000) begin
        cyc++;
        #1;
        if (act_re) begin
          // reads go in order shot-major inside a chunk: row = base + s*v + c
          exp_row = int'(emb_base) + (nreads % k) * v + (nreads / k);
          check(int'(act_raddr) == exp_row, $sformatf("read row %0d exp %0d", act_raddr, exp_row));
          nreads++;
        end
        if (w_we) begin
          check(int'(w_waddr) == int'(fc_w_base) + (int'(num_classes) / p) * v + nw, "weight row");
          check(w_col == ARR'(1) << (int'(num_classes) % p), "weight column");
          nw++;
        end
        if (b_we) begin
          bias_cyc = cyc;
          check(int'(b_waddr) == int'(fc_b_base) + int'(num_classes) / p, "bias row");
          check(b_lane == ARR'(1) << (int'(num_classes) % p), "bias lane");
          check(class_inc, "class increment");
        end
        @(negedge clk);
      end
      check(bias_cyc == (k + 2) * v + 1, $sformatf("latency %0d exp %0d (k=%0d V/16=%0d)", bias_cyc, (k + 2) * v + 1, k, v));
      check(nreads == k * v, "read count");
      check(nw == v, "weight writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
