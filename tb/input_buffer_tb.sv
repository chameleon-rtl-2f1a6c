// input_buffer_tb: pushes timesteps of 2 rows into a 5-deep FIFO with K0=3
// while a simulated consumer advances g_next; checks that push_ready
// follows n < g_next + depth - K0 + 1, that rx_count counts timesteps and
// that every timestep still needed reads back from slot n mod depth.
// The published part is the buffer size and its role; the back-pressure
// rule checked here is this design's.
module input_buffer_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [5:0] in_blk_m1;
  logic [4:0] in_depth, raddr;
  logic [3:0] k0;
  logic [15:0] g_next, rx_count;
  logic push, push_ready, re;
  act_t push_data [ARR], rdata [ARR];
  logic [63:0] hist [0:999][2];
  int checks = 0, failures = 0, stalls = 0;

  input_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, b;
    logic [63:0] got;
    in_blk_m1 = 6'd1; in_depth = 5'd5; k0 = 4'd3; g_next = 0; push = 0; re = 0; raddr = 0;
    for (int i = 0; i < ARR; i++) push_data[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n = 0; b = 0;
    while (n < 300) begin
      @(negedge clk);
      // consumer: occasionally processes a received timestep and checks its window
      if ($urandom_range(0, 3) == 0 && rx_count != g_next) begin
        for (int j = 0; j < 3; j++)
          if (int'(g_next) - j >= 0)
            for (int bb = 0; bb < 2; bb++) begin
              re = 1; raddr = 5'(((int'(g_next) - j) % 5) * 2 + bb);
              push = 0;
              @(negedge clk); re = 0;
              for (int i = 0; i < ARR; i++) got[i*4 +: 4] = rdata[i];
              checks++;
              if (got !== hist[int'(g_next) - j][bb]) begin
                failures++;
                if (failures < 10) $display("t=%0d blk %0d got %h exp %h", int'(g_next) - j, bb, got, hist[int'(g_next) - j][bb]);
              end
            end
        g_next = g_next + 1;
        @(negedge clk);
      end
      push = 1;
      for (int i = 0; i < ARR; i++) begin push_data[i] = 4'($urandom); hist[n][b][i*4 +: 4] = push_data[i]; end
      #1;
      checks++;
      if (push_ready !== (n < int'(g_next) + 5 - 3 + 1)) begin
        failures++;
        $display("ready %0d at n=%0d g=%0d", push_ready, n, g_next);
      end
      if (!push_ready) stalls++;
      @(posedge clk);
      if (push_ready) begin
        if (b == 1) begin b = 0; n++; end else b = 1;
      end
      #1 push = 0;
      checks++;
      if (int'(rx_count) != n) begin failures++; $display("rx_count %0d exp %0d", rx_count, n); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
