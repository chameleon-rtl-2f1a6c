// config_regs: configuration register file.
//
// Holds the description of the deployed network and the operating mode:
// one 82-bit layer_cfg_t record per layer (32 layers, three 32-bit words at
// register 4*l + 0/1/2, word 0 holding bits 31:0), the 63-bit glob_cfg_t
// record (registers 128/129) and the number of classes of the output layer
// (register 130), which the learning controller also increments each time
// it learns a class. Register 131 reads a status word
// {busy flags in [1:0], classes in [24:16]}. Writes come from the SPI target
// 0 as one 32-bit word per frame. Reset clears everything.
// Configuration registers are named by the published design; this register
// map is this implementation's.
module config_regs
  import chameleon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr,
  input  logic [15:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  input  logic        class_inc,
  input  logic [1:0]  status,
  output layer_cfg_t  lcfg [MAX_LAYERS],
  output glob_cfg_t   gcfg,
  output logic [8:0]  num_classes
);
  logic [95:0] lw [MAX_LAYERS];
  logic [63:0] gw;

  always_comb begin
    for (int l = 0; l < MAX_LAYERS; l++) lcfg[l] = layer_cfg_t'(lw[l][$bits(layer_cfg_t)-1:0]);
    gcfg = glob_cfg_t'(gw[$bits(glob_cfg_t)-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < MAX_LAYERS; l++) lw[l] <= '0;
      gw <= '0;
      num_classes <= '0;
    end else begin
      if (wr) begin
        if (addr < 16'(REG_GLOB0)) begin
          if (addr[1:0] != 2'd3) lw[addr[6:2]][addr[1:0]*32 +: 32] <= wdata;
        end else if (addr == 16'(REG_GLOB0)) gw[31:0]  <= wdata;
        else if (addr == 16'(REG_GLOB1))     gw[63:32] <= wdata;
        else if (addr == 16'(REG_CLASSES))   num_classes <= wdata[8:0];
      end else if (class_inc) begin
        num_classes <= num_classes + 9'd1;
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (addr < 16'(REG_GLOB0)) begin
      if (addr[1:0] != 2'd3) rdata = lw[addr[6:2]][addr[1:0]*32 +: 32];
    end else if (addr == 16'(REG_GLOB0))   rdata = gw[31:0];
    else if (addr == 16'(REG_GLOB1))       rdata = gw[63:32];
    else if (addr == 16'(REG_CLASSES))     rdata = {23'd0, num_classes};
    else if (addr == 16'(REG_STATUS))      rdata = {7'd0, num_classes, 14'd0, status};
  end
endmodule
