// mu_scale: NVFP4 microscale of an output activation block ("Get u-scale" in
// the paper's post-processing unit figure).
//
// NVFP4 stores one E4M3 scale per 16-element block. For activations the paper
// uses dynamic-max scaling: the scale maps the block maximum onto the
// largest E2M1 magnitude, 6. This design computes scale = E4M3(amax * 1/6):
// an FP32 multiply by 1/6 (rounded to FP32) followed by round-to-nearest-even
// conversion to E4M3, saturating at 448. A zero result is raised to the
// smallest E4M3 subnormal (2^-9) so that the quantizer never divides by zero
// in effect. The sign bit of the scale is always 0. Combinational.
module mu_scale
  import fgmp_pkg::*;
(
  input  fp32_t      amax,
  output logic [7:0] scale
);

  logic [7:0] s;

  always_comb begin
    s     = fp32_to_e4m3(fp32_mul({1'b0, amax[30:0]}, FP32_ONE_SIXTH));
    scale = (s[6:0] == 7'd0) ? 8'h01 : {1'b0, s[6:0]};
  end

endmodule
