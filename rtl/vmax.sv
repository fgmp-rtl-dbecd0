// vmax: largest magnitude in an output activation block (the "VMax" box of
// the paper's post-processing unit figure).
//
// The BS FP32 inputs are compared by magnitude. For non-negative IEEE
// numbers the ordering of the bit patterns is the ordering of the values, so
// the comparison is an unsigned compare of bits [30:0]. Combinational; the
// result is the maximum magnitude with the sign bit cleared.
module vmax
  import fgmp_pkg::*;
(
  input  fp32_t [BS-1:0] y,
  output fp32_t          amax
);

  always_comb begin
    amax = '0;
    for (int i = 0; i < BS; i++)
      if (y[i][30:0] > amax[30:0]) amax = {1'b0, y[i][30:0]};
  end

endmodule
