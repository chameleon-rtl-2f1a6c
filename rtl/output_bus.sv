// output_bus: 8-bit four-phase handshake output port.
//
// On send the class index is latched into out_data and out_req is raised;
// when the (synchronised) out_ack rises out_req drops, and when out_ack
// falls the port is ready for the next value. ready is low while a transfer
// is in progress, which holds the next result back. The width and protocol
// are published; the synchroniser and the ready signal are this
// implementation's choices.
module output_bus (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       send,
  input  logic [7:0] data,
  output logic       ready,
  output logic       out_req,
  output logic [7:0] out_data,
  input  logic       out_ack
);
  typedef enum logic [1:0] {O_IDLE, O_REQ, O_WAIT_LOW} ostate_t;
  ostate_t st;
  logic ack_s1, ack_s2;

  assign ready = (st == O_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= O_IDLE; out_req <= 1'b0; out_data <= '0; ack_s1 <= 1'b0; ack_s2 <= 1'b0;
    end else begin
      ack_s1 <= out_ack;
      ack_s2 <= ack_s1;
      unique case (st)
        O_IDLE:     if (send) begin out_data <= data; out_req <= 1'b1; st <= O_REQ; end
        O_REQ:      if (ack_s2) begin out_req <= 1'b0; st <= O_WAIT_LOW; end
        O_WAIT_LOW: if (!ack_s2) st <= O_IDLE;
        default:    st <= O_IDLE;
      endcase
    end
  end
endmodule
