// dot_unit: one BS-wide dot-product unit of an FGMP vector lane.
//
// Each lane holds four of these, one per combination of weight and
// activation format: FP4 x FP4, FP8 x FP8, FP4 x FP8 and FP8 x FP4 (weight
// format first). The format pair is fixed per instance by W_FP8 / A_FP8.
// As drawn in the paper's datapath figure, the unit multiplies the BS element
// pairs, reduces them in an adder tree, multiplies the sum by the product of
// the microscales of the FP4 operands (Sa x Sw, or the one scale when only
// one operand is FP4; FP8 operands carry no scale) and adds the result to the
// incoming FP32 partial sum.
//
// Implementation choices of this design: the element products, the adder
// tree and the scale multiplication are done exactly in signed fixed point
// (lsb 2^-20, 64 bits); the exact block result is rounded once to FP32 and
// added to the partial sum with an FP32 adder (round to nearest even,
// subnormals flushed). The unit is purely combinational; the lane register
// is in the output collector.
//
// Ports: w_blk / a_blk are weight and activation blocks (fgmp_block_t),
// psum_in the FP32 partial sum, psum_out = psum_in + w . a.
module dot_unit
  import fgmp_pkg::*;
#(
  parameter bit W_FP8 = 1'b0,
  parameter bit A_FP8 = 1'b0
) (
  input  fgmp_block_t w_blk,
  input  fgmp_block_t a_blk,
  input  fp32_t       psum_in,
  output fp32_t       psum_out
);

  localparam int W_LSB = W_FP8 ? 9 : 1;   // fraction bits of a decoded element
  localparam int A_LSB = A_FP8 ? 9 : 1;
  localparam int SCALE_LSB = (W_FP8 ? 0 : 9) + (A_FP8 ? 0 : 9);
  localparam int SHIFT = FIX_FRAC - (W_LSB + A_LSB + SCALE_LSB);

  logic signed [63:0] prod [BS];
  logic signed [63:0] dot;
  logic signed [63:0] scale_prod;
  logic signed [63:0] scaled;
  fp32_t              block_fp;

  function automatic logic signed [63:0] elem(input fgmp_block_t b, input bit is_fp8, input int i);
    logic [63:0] mag;
    logic        s;
    if (is_fp8) begin
      mag = 64'(e4m3_mag(b.data[8*i +: 7]));
      s   = b.data[8*i + 7];
    end else begin
      mag = 64'(e2m1_mag(b.data[4*i +: 3]));
      s   = b.data[4*i + 3];
    end
    return s ? -$signed(mag) : $signed(mag);
  endfunction

  // element multipliers
  always_comb begin
    for (int i = 0; i < BS; i++) prod[i] = elem(w_blk, W_FP8, i) * elem(a_blk, A_FP8, i);
  end

  // adder tree (written as a sum; synthesis builds the tree)
  always_comb begin
    dot = '0;
    for (int i = 0; i < BS; i++) dot = dot + prod[i];
  end

  // microscale product Sa x Sw (scales are unsigned E4M3 magnitudes)
  always_comb begin
    scale_prod = 64'sd1;
    if (!W_FP8) scale_prod = scale_prod * $signed(64'(e4m3_mag(w_blk.scale[6:0])));
    if (!A_FP8) scale_prod = scale_prod * $signed(64'(e4m3_mag(a_blk.scale[6:0])));
    scaled   = (dot * scale_prod) <<< SHIFT;
    block_fp = fix_to_fp32(scaled, FIX_FRAC);
    psum_out = fp32_add(psum_in, block_fp);
  end

endmodule
