// input_buffer: 32 x 64-bit (0.25 kB) memory holding streamed network inputs.
//
// Inputs arrive asynchronously to the processing, one 16-input row at a
// time from the input bus (in_blk rows per timestep). The buffer is a
// circular FIFO of in_depth timesteps: timestep n lives in slot n mod
// in_depth, rows slot*in_blk .. slot*in_blk+in_blk-1, so the oldest input is
// overwritten by the newest. The first layer reads the K newest timesteps
// through the read port (synchronous, 1-cycle latency). rx_count counts the
// complete timesteps received. A row is accepted (push_ready) only while
// the timestep it belongs to would not overwrite an input the first layer
// still needs: n < g_next + in_depth - K0 + 1, g_next being the next timestep
// the address generator will process. This back-pressure and the row
// layout are this implementation's choices; the memory size and its role
// (taking inputs while processing goes on) are the published ones.
module input_buffer
  import chameleon_pkg::*;
#(
  parameter int unsigned ROWS = IROWS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [5:0]  in_blk_m1,
  input  logic [4:0]  in_depth,
  input  logic [3:0]  k0,           // kernel size of the first layer
  input  logic [15:0] g_next,
  input  logic        push,
  input  act_t        push_data [ARR],
  output logic        push_ready,
  output logic [15:0] rx_count,
  input  logic        re,
  input  logic [4:0]  raddr,
  output act_t        rdata [ARR]
);
  localparam int unsigned AW = $clog2(ROWS);
  logic [AWORD-1:0] mem [ROWS];
  logic [AWORD-1:0] rd_q, wd;
  logic [4:0]  wslot_q;
  logic [5:0]  wblk;
  logic [15:0] ahead;
  logic [4:0]  waddr;

  always_comb begin
    for (int i = 0; i < ARR; i++) wd[i*ACT_W +: ACT_W] = push_data[i];
    ahead      = rx_count - g_next;
    push_ready = ahead < (16'(in_depth) - 16'(k0) + 16'd1);
    waddr      = 5'(wslot_q * ({1'b0, in_blk_m1} + 7'd1) + 7'(wblk));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wslot_q  <= '0;
      wblk     <= '0;
      rx_count <= '0;
    end else if (push && push_ready) begin
      if (wblk != in_blk_m1) wblk <= wblk + 6'd1;
      else begin
        wblk     <= '0;
        wslot_q  <= (wslot_q == in_depth - 5'd1) ? 5'd0 : wslot_q + 5'd1;
        rx_count <= rx_count + 16'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push && push_ready) mem[AW'(waddr)] <= wd;
    if (re) rd_q <= mem[AW'(raddr)];
  end

  always_comb
    for (int i = 0; i < ARR; i++) rdata[i] = rd_q[i*ACT_W +: ACT_W];
endmodule
