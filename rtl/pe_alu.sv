// pe_alu: the eight MAC lanes and eight comparators of one processing element.
//
// The paper gives each PE 8 MACs for convolution and vector-matrix products and
// 8 comparators for ReLU and maxpool. This unit is purely combinational: it
// computes the next accumulator value from the current one; the PE registers it.
//
//   ALU_MAC  : res[k] = acc[k] + scalar * w[k]         (scalar-times-vector MAC)
//   ALU_DOT  : res[lane] = acc[lane] + sum_k x[k]*w[k] (8 MACs feeding one adder
//              tree; used for the vector-transposed-matrix product of
//              backpropagation), other lanes unchanged
//   ALU_ADD  : res[k] = acc[k] + addend[k]             (pSUM accumulation)
//   ALU_RELU : res[k] = max(acc[k], 0)                 (comparators)
//   ALU_MAX  : res[k] = max(acc[k], w[k])              (comparators, maxpool)
//
// Q8.8 arithmetic as defined in rl_pkg. In ALU_DOT the eight full-precision
// products are summed before the single shift and saturation. The adder tree and
// the operand sharing between MAC and DOT are this design's choices.
module pe_alu
  import rl_pkg::*;
(
  input  alu_fn_e    fn,
  input  logic [2:0] lane,
  input  vec_t       acc,
  input  fx_t        scalar,
  input  vec_t       x,
  input  vec_t       w,
  input  vec_t       addend,
  output vec_t       res
);

  logic signed [31:0] prod [LANES];
  logic signed [47:0] dot_sum;

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      fx_t a;
      a = (fn == ALU_DOT) ? fx_t'(x[k]) : scalar;
      prod[k] = 32'(a) * 32'(fx_t'(w[k]));
    end
    dot_sum = '0;
    for (int k = 0; k < LANES; k++) dot_sum += 48'(prod[k]);
  end

  always_comb begin
    res = acc;
    unique case (fn)
      ALU_MAC:
        for (int k = 0; k < LANES; k++)
          res[k] = fx_add(fx_t'(acc[k]), fx_sat(48'(prod[k] >>> FRAC_BITS)));
      ALU_DOT:
        res[lane] = fx_add(fx_t'(acc[lane]), fx_sat(dot_sum >>> FRAC_BITS));
      ALU_ADD:
        for (int k = 0; k < LANES; k++)
          res[k] = fx_add(fx_t'(acc[k]), fx_t'(addend[k]));
      ALU_RELU:
        for (int k = 0; k < LANES; k++)
          res[k] = fx_max(fx_t'(acc[k]), '0);
      ALU_MAX:
        for (int k = 0; k < LANES; k++)
          res[k] = fx_max(fx_t'(acc[k]), fx_t'(w[k]));
      default: res = acc;
    endcase
  end

endmodule
