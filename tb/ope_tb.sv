// ope_tb: random sequences of OPE operations against a reference model of
// the accumulator (bias load, accumulate, residual shift, load, clear,
// hold, 18-bit saturation) and of the ReLU / output-shift / 4-bit clipping.
// Operations follow the published OPE; saturation and clipping are this
// design's choices.
module ope_tb;
  import chameleon_pkg::*;
  logic clk = 0, rst_n = 0;
  ope_op_t op;
  col_t col_sum;
  bias_t bias;
  logic [3:0] res_shift, out_shift;
  logic relu;
  acc_t acc;
  act_t act_out;
  int checks = 0, failures = 0;
  longint model;

  ope dut (.clk, .rst_n, .op, .col_sum, .bias, .res_shift, .out_shift, .relu, .acc, .act_out);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(input longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return v;
  endfunction

  initial begin
    longint r, e_act;
    op = OP_HOLD; col_sum = '0; bias = '0; res_shift = '0; out_shift = '0; relu = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      op        = ope_op_t'($urandom_range(0, 5));
      col_sum   = (n % 100 < 10) ? 16'sh7fff : col_t'($urandom);
      bias      = bias_t'($urandom);
      res_shift = 4'($urandom);
      case (op)
        OP_LOAD_BIAS: model = sat(longint'(bias) + longint'(col_sum));
        OP_ACC:       model = sat(model + longint'(col_sum));
        OP_ACC_RES:   model = sat(model + (longint'(col_sum) >>> res_shift));
        OP_LOAD:      model = longint'(col_sum);
        OP_CLEAR:     model = 0;
        default:      ;
      endcase
      @(negedge clk);
      op = OP_HOLD;
      out_shift = 4'($urandom);
      relu = 1'($urandom);
      #1;
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 10) $display("n=%0d acc %0d exp %0d", n, acc, model);
      end
      r = (relu && model < 0) ? 0 : model;
      r = r >>> out_shift;
      e_act = (r < 0) ? 0 : (r > 15 ? 15 : r);
      checks++;
      if (longint'(act_out) != e_act) begin
        failures++;
        if (failures < 10) $display("n=%0d act %0d exp %0d", n, act_out, e_act);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
