// chameleon_pkg: widths, encodings and configuration records shared by the
// Chameleon accelerator core.
//
// The numbers that come from the published design are the 16x16 processing
// element (PE) array, 4-bit unsigned activations, 4-bit signed log2 weights,
// 12-bit signed PE products, 16-bit signed column sums, 18-bit OPE
// accumulators, 14-bit biases, the memory geometries (weights 512x1024b,
// biases 128x224b, activations 256x64b, input buffer 32x64b), the 8-bit
// output bus, the 16-bit input bus, kernel sizes 1-15, up to 32 layers and
// up to 1024 channels per layer. The layout of the per-layer configuration
// record, the operation codes and the register map are choices of this
// implementation.
package chameleon_pkg;

  localparam int unsigned ARR      = 16;   // PE array side in 16x16 mode
  localparam int unsigned ARR_S    = 4;    // PE array side in 4x4 mode
  localparam int unsigned ACT_W    = 4;    // unsigned activation
  localparam int unsigned WGT_W    = 4;    // signed log2 weight {sign, exponent}
  localparam int unsigned PROD_W   = 12;   // PE product
  localparam int unsigned COL_W    = 16;   // column adder output
  localparam int unsigned ACC_W    = 18;   // OPE accumulator
  localparam int unsigned BIAS_W   = 14;   // bias word
  localparam int unsigned MAX_LAYERS = 32;

  // Weight memory: 512 rows of 16x16 4-bit weights
  localparam int unsigned WROWS    = 512;
  localparam int unsigned WWORD    = ARR * ARR * WGT_W;      // 1024
  // Bias memory: 128 rows of 16 14-bit biases
  localparam int unsigned BROWS    = 128;
  localparam int unsigned BWORD    = ARR * BIAS_W;           // 224
  // Activation memory: 256 rows of 16 4-bit activations
  localparam int unsigned AROWS    = 256;
  localparam int unsigned AWORD    = ARR * ACT_W;            // 64
  // Input buffer: 32 rows of 16 4-bit inputs
  localparam int unsigned IROWS    = 32;

  typedef logic [ACT_W-1:0]  act_t;
  typedef logic [WGT_W-1:0]  wgt_t;
  localparam wgt_t WZERO = 4'b1000;  // weight code for zero
  localparam wgt_t WONE  = 4'b0000;  // weight code for +1
  typedef logic signed [COL_W-1:0]  col_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [BIAS_W-1:0] bias_t;

  // Operation applied by the OPE accumulators in one cycle
  typedef enum logic [2:0] {
    OP_HOLD      = 3'd0,  // keep the accumulator
    OP_LOAD_BIAS = 3'd1,  // acc <= bias + column sum (first cycle of an output)
    OP_ACC       = 3'd2,  // acc <= acc + column sum
    OP_ACC_RES   = 3'd3,  // acc <= acc + (column sum >>> residual scale)
    OP_LOAD      = 3'd4,  // acc <= column sum (first shot of an embedding sum)
    OP_CLEAR     = 3'd5   // acc <= 0
  } ope_op_t;

  // Residual connection of a layer (second convolution of a residual block)
  typedef enum logic [1:0] {
    RES_NONE  = 2'd0,
    RES_IDENT = 2'd1,   // identity residual, passed through the PE array with unit weights
    RES_CONV  = 2'd2    // 1x1 convolution residual with its own weights
  } res_mode_t;

  // Per-layer configuration record (three 32-bit registers per layer)
  typedef struct packed {
    logic [3:0] kernel;       // kernel size K, 1..15 (1 for an FC layer)
    logic [3:0] dil_log2;     // dilation = 2**dil_log2
    logic [5:0] cin_blk_m1;   // input channel blocks - 1 (blocks of 16, or 4 in 4x4 mode)
    logic [5:0] cout_blk_m1;  // output channel blocks - 1
    res_mode_t  res_mode;
    logic [4:0] res_src;      // layer whose output is the block input (if !res_from_in)
    logic       res_from_in;  // block input is the network input
    logic [3:0] res_shift;    // residual input rescaling (arithmetic right shift)
    logic [3:0] out_shift;    // output rescaling (right shift before 4-bit clipping)
    logic       relu;
    logic [3:0] stride_log2;  // this layer is computed at t where (T-1-t) mod 2**stride_log2 == 0
    logic       final_only;   // computed only at t == T-1 (top of the TCN, FC layers)
    logic [3:0] fifo_depth;   // entries in this layer's output FIFO (1..15)
    logic [9:0] w_base;       // first weight row (logical, mode dependent)
    logic [9:0] wres_base;    // first weight row of the 1x1 residual convolution
    logic [7:0] b_base;       // first bias row
    logic [7:0] a_base;       // first activation memory row of the output FIFO
  } layer_cfg_t;              // 82 bits

  typedef struct packed {
    logic [5:0]  num_layers;    // layers run in inference (1..32)
    logic [4:0]  emb_layer;     // last embedder layer (its output is the embedding)
    logic [15:0] seq_len;       // T, input timesteps per sequence
    logic [5:0]  in_blk_m1;     // input channel blocks - 1
    logic [4:0]  in_depth;      // input buffer FIFO entries (timesteps), 1..31
    logic        mode4;         // 1: 4x4 low-leakage mode, 0: 16x16 mode
    logic        learn;         // 1: sequences are shots of a new class
    logic [7:0]  k_shots;       // shots per class, 1..128
    logic [7:0]  emb_base;      // activation row where shot embeddings are kept
    logic [4:0]  fc_layer;      // learned FC layer (receives extracted parameters)
    logic [1:0]  in_xfer_m1;    // input-bus transfers (4 inputs each) per input row - 1
  } glob_cfg_t;                 // 63 bits

  // Register map (word addresses on the SPI configuration target)
  localparam int unsigned REG_LAYER0  = 0;   // layer l: 4*l + {0,1,2}
  localparam int unsigned REG_GLOB0   = 128; // global record, two words
  localparam int unsigned REG_GLOB1   = 129;
  localparam int unsigned REG_CLASSES = 130; // number of classes of the output layer
  localparam int unsigned REG_STATUS  = 131; // read only

  // Saturate a signed value to the 4-bit unsigned activation range
  function automatic act_t clip_act(input logic signed [ACC_W-1:0] v);
    if (v < 0)        return '0;
    else if (v > 15)  return 4'd15;
    else              return v[ACT_W-1:0];
  endfunction

  // Position of the 16x16-mode logical weight (row i = input, column j = output)
  // inside a 1024-bit memory word: the top-left 4x4 block first, row-major,
  // then the remaining 240 weights row-major.
  function automatic int unsigned wslot(input int unsigned i, input int unsigned j);
    if (i < ARR_S && j < ARR_S) return i * ARR_S + j;
    else if (i < ARR_S)         return ARR_S * ARR_S + i * (ARR - ARR_S) + (j - ARR_S);
    else                        return ARR_S * ARR + (i - ARR_S) * ARR + j;
  endfunction

endpackage
