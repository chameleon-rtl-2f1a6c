// ope: output processing element, one per PE-array column.
//
// It holds the 18-bit signed accumulator of one output channel. Per cycle
// the controller selects one operation (chameleon_pkg::ope_op_t):
//   OP_LOAD_BIAS  acc <= bias + column sum      first input chunk of an output
//   OP_ACC        acc <= acc + column sum
//   OP_ACC_RES    acc <= acc + (column sum >>> res_shift)   residual input rescaling
//   OP_LOAD       acc <= column sum             first shot of an embedding sum
//   OP_CLEAR      acc <= 0
// The activation output is ReLU(acc) >>> out_shift clipped to 4-bit unsigned;
// with relu = 0 the accumulator is still clipped at zero since activations are
// unsigned. The raw accumulator is also an output: it feeds the argmax tree
// (final FC layer) and the prototypical parameter extractor (embedding sums).
//
// The operations (residual scale, bias, accumulate, ReLU, output scale) are
// those of the published OPE. Adding the bias together with the first column
// sum, the saturating accumulation and the clipping to 15 are choices of this
// implementation. One cycle latency: the accumulator updates on the clock edge.
module ope
  import chameleon_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  ope_op_t    op,
  input  col_t       col_sum,
  input  bias_t      bias,
  input  logic [3:0] res_shift,
  input  logic [3:0] out_shift,
  input  logic       relu,
  output acc_t       acc,
  output act_t       act_out
);
  localparam logic signed [ACC_W:0] AMAX = (ACC_W+1)'((1 << (ACC_W-1)) - 1);
  localparam logic signed [ACC_W:0] AMIN = -(ACC_W+1)'(1 << (ACC_W-1));

  logic signed [ACC_W:0] sum;
  logic signed [ACC_W-1:0] relu_v;

  always_comb begin
    unique case (op)
      OP_LOAD_BIAS: sum = (ACC_W+1)'(bias) + (ACC_W+1)'(col_sum);
      OP_ACC:       sum = (ACC_W+1)'(acc) + (ACC_W+1)'(col_sum);
      OP_ACC_RES:   sum = (ACC_W+1)'(acc) + ((ACC_W+1)'(col_sum) >>> res_shift);
      OP_LOAD:      sum = (ACC_W+1)'(col_sum);
      OP_CLEAR:     sum = '0;
      default:      sum = (ACC_W+1)'(acc);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             acc <= '0;
    else if (sum > AMAX)    acc <= AMAX[ACC_W-1:0];
    else if (sum < AMIN)    acc <= AMIN[ACC_W-1:0];
    else                    acc <= sum[ACC_W-1:0];
  end

  always_comb begin
    relu_v  = (relu && acc < 0) ? '0 : acc;
    act_out = clip_act(relu_v >>> out_shift);
  end
endmodule
