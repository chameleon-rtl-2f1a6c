// input_bus_tb: a four-phase sender sends 4-input transfers; rows of
// xfer_m1+1 transfers must come out as pushes with the inputs in the right
// lanes (unused lanes zero), in order and none lost, while the buffer side
// is randomly not ready (back-pressure).
// Four-phase protocol from the published design; 4 inputs per transfer is
// this design's choice.
module input_bus_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] xfer_m1;
  logic in_req, in_ack, push, push_ready;
  logic [15:0] in_data;
  act_t push_data [ARR];
  logic [63:0] sent [$];
  int checks = 0, failures = 0, rows = 0;

  input_bus dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver side
  always @(posedge clk) begin
    if (rst_n && push && push_ready) begin
      logic [63:0] got;
      for (int i = 0; i < ARR; i++) got[i*4 +: 4] = push_data[i];
      checks++;
      if (sent.size() == 0 || got !== sent[0]) begin
        failures++;
        $display("row got %h exp %h", got, sent.size() ? sent[0] : 64'hx);
      end
      if (sent.size()) void'(sent.pop_front());
      rows++;
    end
  end
  always @(negedge clk) push_ready <= ($urandom_range(0, 2) != 0);

  initial begin
    logic [63:0] row;
    in_req = 0; in_data = 0; xfer_m1 = 2'd3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      xfer_m1 = 2'(m);
      for (int r = 0; r < 20; r++) begin
        row = '0;
        for (int x = 0; x <= m; x++) begin
          in_data = 16'($urandom);
          row[x*16 +: 16] = in_data;
          if (x == m) sent.push_back(row);
          #2 in_req = 1;
          wait (in_ack);
          #3 in_req = 0;
          wait (!in_ack);
          #1;
        end
      end
      wait (sent.size() == 0);
    end
    checks++;
    if (rows != 80) begin failures++; $display("rows %0d", rows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
