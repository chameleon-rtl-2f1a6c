// output_bus_tb: sends random class indices; a four-phase receiver with
// random delays checks each value in order and that ready is low during a
// transfer.
// Four-phase protocol and 8-bit width are published.
module output_bus_tb;
  logic clk = 0, rst_n = 0;
  logic send, ready, out_req, out_ack;
  logic [7:0] data, out_data;
  logic [7:0] q [$];
  int checks = 0, failures = 0, got_n = 0;

  output_bus dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  initial begin
    out_ack = 0;
    forever begin
      wait (out_req);
      repeat ($urandom_range(0, 5)) @(posedge clk);
      checks++;
      if (q.size() == 0 || out_data !== q[0]) begin failures++; $display("got %0d", out_data); end
      if (q.size()) void'(q.pop_front());
      got_n++;
      out_ack = 1;
      wait (!out_req);
      repeat ($urandom_range(0, 5)) @(posedge clk);
      out_ack = 0;
    end
  end

  initial begin
    send = 0; data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      while (!ready) @(negedge clk);
      send = 1; data = 8'($urandom); q.push_back(data);
      @(negedge clk); send = 0;
      checks++;
      if (ready) begin failures++; $display("ready high during transfer"); end
    end
    wait (got_n == 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
