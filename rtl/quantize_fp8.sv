// quantize_fp8: quantizes an output activation block to FP8 (E4M3, no
// microscale, as in the paper's high-precision format).
//
// Each FP32 element is rounded to the nearest E4M3 value (ties to even,
// subnormals kept, saturation at +-448). The unit returns the codes and, for
// the error computation of the mixed-precision decision, the dequantized
// values Q8(Y) as FP32 (exact). Combinational.
module quantize_fp8
  import fgmp_pkg::*;
(
  input  fp32_t [BS-1:0]      y,
  output logic  [BS-1:0][7:0] code,
  output fp32_t [BS-1:0]      deq
);

  always_comb begin
    for (int i = 0; i < BS; i++) begin
      code[i] = fp32_to_e4m3(y[i]);
      deq[i]  = e4m3_to_fp32(code[i]);
    end
  end

endmodule
