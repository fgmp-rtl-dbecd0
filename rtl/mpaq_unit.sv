// mpaq_unit: mixed-precision activation quantization decision (lower half of
// the paper's post-processing unit figure).
//
// For an output activation block Y the unit forms, per element, the squared
// quantization errors of both formats, (Q8(Y)-Y)^2 and (Q4(Y)-Y)^2, takes
// their difference (the extra error of keeping the element in FP4), weights
// it by the calibrated per-channel sensitivity g_i^2 (average squared
// gradient, supplied from the sensitivity table) and sums over the block:
//     metric = sum_i g_i^2 * ((Q4(y_i)-y_i)^2 - (Q8(y_i)-y_i)^2)
// The block is kept in FP8 when metric > threshold (fp8_sel = 1).
//
// This follows the figure (difference of squared errors). The paper's
// equation for the impact score squares the difference of the errors
// instead; the hardware figure was followed. All operations are FP32 with
// round to nearest even; the sum is a balanced adder tree. Combinational.
module mpaq_unit
  import fgmp_pkg::*;
(
  input  fp32_t [BS-1:0] y,
  input  fp32_t [BS-1:0] q4,     // dequantized NVFP4 values
  input  fp32_t [BS-1:0] q8,     // dequantized FP8 values
  input  fp32_t [BS-1:0] sens,   // per-channel sensitivity g^2
  input  fp32_t          threshold,
  output fp32_t          metric,
  output logic           fp8_sel
);

  fp32_t term [BS];
  fp32_t tree [2*BS-1];

  always_comb begin
    fp32_t d4, d8, e4, e8;
    for (int i = 0; i < BS; i++) begin
      d8 = fp32_add(q8[i], fp32_neg(y[i]));
      d4 = fp32_add(q4[i], fp32_neg(y[i]));
      e8 = fp32_mul(d8, d8);
      e4 = fp32_mul(d4, d4);
      term[i] = fp32_mul(sens[i], fp32_add(e4, fp32_neg(e8)));
    end
    // tree[BS-1 .. 2BS-2] are leaves, tree[0] is the root
    for (int i = 0; i < BS; i++) tree[BS-1+i] = term[i];
    for (int i = BS-2; i >= 0; i--) tree[i] = fp32_add(tree[2*i+1], tree[2*i+2]);
    metric  = tree[0];
    fp8_sel = fp32_gt(metric, threshold);
  end

endmodule
