// quantize_fp4: quantizes an output activation block to NVFP4 (E2M1 elements
// with one E4M3 microscale s).
//
// Element i is coded as the E2M1 value nearest to y[i] / s, clamped to +-6.
// No divider is needed: the E2M1 magnitudes are 0, 0.5, 1, 1.5, 2, 3, 4, 6,
// so the code follows from comparing |y[i]| with the seven decision points
// s * {0.25, 0.75, 1.25, 1.75, 2.5, 3.5, 5}. These products of a 4-bit and a
// 3-bit significand are exact in FP32. A tie goes to the even code (round to
// nearest even). The dequantized value Q4(Y) = s * E2M1(code) is also exact
// and is returned for the error computation. A zero code has its sign bit
// cleared. Combinational; the method is this design's choice.
module quantize_fp4
  import fgmp_pkg::*;
(
  input  fp32_t [BS-1:0]      y,
  input  logic  [7:0]         scale,
  output logic  [BS-1:0][3:0] code,
  output fp32_t [BS-1:0]      deq
);

  // decision points 0.25 0.75 1.25 1.75 2.5 3.5 5 as FP32
  localparam fp32_t BOUND [7] = '{32'h3E800000, 32'h3F400000, 32'h3FA00000, 32'h3FE00000,
                                  32'h40200000, 32'h40600000, 32'h40A00000};

  fp32_t s_fp;
  fp32_t thr [7];

  always_comb begin
    logic [2:0] c;
    s_fp = e4m3_to_fp32({1'b0, scale[6:0]});
    for (int k = 0; k < 7; k++) thr[k] = fp32_mul(s_fp, BOUND[k]);
    for (int i = 0; i < BS; i++) begin
      c = 3'd0;
      for (int k = 0; k < 7; k++)
        if ((y[i][30:0] > thr[k][30:0]) || ((y[i][30:0] == thr[k][30:0]) && k[0])) c = 3'(k + 1);
      code[i] = {(c != 3'd0) && y[i][31], c};
      deq[i]  = fp32_mul(s_fp, e2m1_to_fp32(code[i]));
    end
  end

endmodule
