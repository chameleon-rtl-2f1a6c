// input_bus: 16-bit four-phase handshake input port.
//
// The sender drives in_data and raises in_req; the receiver, after
// synchronising in_req into the core clock (two flip-flops), captures the
// data and raises in_ack; the sender drops in_req; the receiver drops
// in_ack. Each transfer carries four 4-bit inputs (in_data[3:0] is input
// 4x, ..., in_data[15:12] input 4x+3). xfer_m1+1 transfers fill one 16-input
// row (unused lanes are zero), which is then pushed into the input buffer.
// A transfer is not acknowledged while a full row waits for the input
// buffer, which back-pressures the sender.
// The width and the four-phase protocol are published; the packing of four
// inputs per transfer, the synchroniser and the back-pressure are this
// implementation's choices.
module input_bus
  import chameleon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  xfer_m1,
  input  logic        in_req,
  input  logic [15:0] in_data,
  output logic        in_ack,
  output logic        push,
  output act_t        push_data [ARR],
  input  logic        push_ready
);
  logic       req_s1, req_s2;
  logic [1:0] cnt;
  logic       full;
  act_t       row [ARR];

  assign push = full;
  always_comb for (int i = 0; i < ARR; i++) push_data[i] = row[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_s1 <= 1'b0; req_s2 <= 1'b0; in_ack <= 1'b0;
      cnt <= '0; full <= 1'b0;
      for (int i = 0; i < ARR; i++) row[i] <= '0;
    end else begin
      req_s1 <= in_req;
      req_s2 <= req_s1;
      if (full && push_ready) begin
        full <= 1'b0;
        for (int i = 0; i < ARR; i++) row[i] <= '0;
      end
      if (req_s2 && !in_ack && !full) begin
        for (int q = 0; q < 4; q++) row[4*cnt + 2'(q)] <= in_data[4*q +: 4];
        in_ack <= 1'b1;
        if (cnt == xfer_m1) begin cnt <= '0; full <= 1'b1; end
        else cnt <= cnt + 2'd1;
      end else if (!req_s2 && in_ack) begin
        in_ack <= 1'b0;
      end
    end
  end
endmodule
