// activation_memory: 256 x 64-bit two-port register file (2 kB).
//
// Each row holds 16 4-bit unsigned activations (one channel block of one
// timestep). It has one read port and one write port usable in the same
// cycle; a read of the row being written returns the old contents, which is
// why the address generator stalls a read that would hit a write in flight.
// Reads are synchronous (1-cycle latency). The address generator lays the
// per-layer FIFOs and the stored shot embeddings out in this single memory.
// The SPI write port (32-bit chunks) has priority over the core port.
// The size and the two-port organisation are the published ones; the read-
// old-data behaviour is this implementation's choice.
module activation_memory
  import chameleon_pkg::*;
#(
  parameter int unsigned ROWS = AROWS
) (
  input  logic        clk,
  input  logic        re,
  input  logic [7:0]  raddr,
  output act_t        rdata [ARR],
  input  logic        we,
  input  logic [7:0]  waddr,
  input  act_t        wdata [ARR],
  input  logic        spi_we,
  input  logic [7:0]  spi_row,
  input  logic        spi_chunk,
  input  logic [31:0] spi_data
);
  localparam int unsigned AW = $clog2(ROWS);
  logic [AWORD-1:0] mem [ROWS];
  logic [AWORD-1:0] rd_q, wd;

  always_comb
    for (int i = 0; i < ARR; i++) wd[i*ACT_W +: ACT_W] = wdata[i];

  always_ff @(posedge clk) begin
    if (spi_we)  mem[AW'(spi_row)][spi_chunk*32 +: 32] <= spi_data;
    else if (we) mem[AW'(waddr)] <= wd;
    if (re) rd_q <= mem[AW'(raddr)];
  end

  always_comb
    for (int i = 0; i < ARR; i++) rdata[i] = rd_q[i*ACT_W +: ACT_W];
endmodule
