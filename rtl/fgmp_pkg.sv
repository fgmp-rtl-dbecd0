// fgmp_pkg: types, sizes and number-format arithmetic shared by the FGMP
// (fine-grained mixed-precision) datapath and post-processing unit.
//
// Data formats (the paper's prototype): a block is BS=16 elements along the
// dot-product dimension. A block is either NVFP4 (16 E2M1 codes plus one
// E4M3 microscale) or FP8 (16 E4M3 codes, no microscale). One metadata bit per
// block says which. The block travels as fgmp_block_t: the FP8 flag, the
// scale byte (unused for FP8 blocks) and a 128-bit payload in which an FP4
// element i sits in bits [4i+3:4i] and an FP8 element i in bits [8i+7:8i].
// This packing is this design's choice.
//
// Arithmetic helpers, all combinational functions:
//   * e2m1_mag / e4m3_mag: code -> exact unsigned integer magnitude, in units
//     of 2^-1 (E2M1) and 2^-9 (E4M3).
//   * fix_to_fp32: signed fixed-point (lsb 2^-FIX_FRAC) -> FP32, round to
//     nearest even.
//   * fp32_add / fp32_mul: IEEE single precision, round to nearest even.
//     Subnormal inputs and results are flushed to zero, overflow gives
//     infinity, NaN is not handled (this design never produces one).
//   * fp32_to_e4m3: FP32 -> E4M3 with round to nearest even, subnormals kept,
//     saturation at +-448 (the NaN code 0x7F is never produced).
//   * e4m3_to_fp32 / e2m1_to_fp32: exact conversion of a code to FP32.
//   * fp32_gt: ordered comparison.
package fgmp_pkg;

  // Block size and lane count of the paper's prototype (L = 16, BS = 16).
  localparam int unsigned BS    = 16;
  localparam int unsigned LANES = 16;

  // Fixed-point fraction bits used inside the dot-product units: FP4*FP4
  // with two E4M3 scales has an lsb of 2^-1 * 2^-1 * 2^-9 * 2^-9 = 2^-20.
  localparam int unsigned FIX_FRAC = 20;

  typedef logic [31:0] fp32_t;

  typedef struct packed {
    logic            fp8;    // 1: FP8 (E4M3) block, 0: NVFP4 block
    logic [7:0]      scale;  // E4M3 microscale of an NVFP4 block
    logic [BS*8-1:0] data;   // payload, see above
  } fgmp_block_t;


  localparam fp32_t FP32_ONE_SIXTH = 32'h3E2AAAAB; // 1/6 rounded to FP32

  // ---------------------------------------------------------------------
  // Element decode to exact integer magnitudes
  // ---------------------------------------------------------------------
  function automatic logic [3:0] e2m1_mag(input logic [2:0] c);
    // E2M1 without sign: 0 0.5 1 1.5 2 3 4 6, in units of 0.5
    logic [1:0] e;
    logic       m;
    e = c[2:1];
    m = c[0];
    if (e == 2'd0) return {3'd0, m};
    return 4'({2'b01, m}) << (e - 2'd1);
  endfunction

  function automatic logic [17:0] e4m3_mag(input logic [6:0] c);
    // E4M3 without sign, bias 7, in units of 2^-9
    logic [3:0] e;
    logic [2:0] m;
    e = c[6:3];
    m = c[2:0];
    if (e == 4'd0) return {15'd0, m};
    return 18'({1'b1, m}) << (e - 4'd1);
  endfunction

  // ---------------------------------------------------------------------
  // Rounding helper: 24-bit significand plus guard and sticky -> rounded
  // ---------------------------------------------------------------------
  function automatic fp32_t fp32_pack(input logic s, input int exp_unb,
                                      input logic [23:0] mant,
                                      input logic guard, input logic sticky);
    logic [24:0] r;
    int          e;
    r = {1'b0, mant};
    e = exp_unb;
    if (guard && (sticky || mant[0])) r = r + 25'd1;
    if (r[24]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e + 127 <= 0) return {s, 31'd0};        // flush to zero
    if (e + 127 >= 255) return {s, 8'hFF, 23'd0}; // infinity
    return {s, 8'(e + 127), r[22:0]};
  endfunction

  // ---------------------------------------------------------------------
  // Signed fixed point (lsb 2^-frac) to FP32
  // ---------------------------------------------------------------------
  function automatic fp32_t fix_to_fp32(input logic signed [63:0] v, input int frac);
    logic        s;
    logic [63:0] mag;
    logic [63:0] n;
    int          p;
    s   = v[63];
    mag = s ? 64'(-v) : 64'(v);
    if (mag == 64'd0) return 32'd0;
    p = 0;
    for (int i = 0; i < 64; i++) if (mag[i]) p = i;
    n = mag << (63 - p);
    return fp32_pack(s, p - frac, n[63:40], n[39], |n[38:0]);
  endfunction

  // ---------------------------------------------------------------------
  // FP32 addition
  // ---------------------------------------------------------------------
  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y, t;
    int          d, p, ex;
    logic [50:0] ma, mb, sum, n;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    x = a;
    y = b;
    if (y[30:0] > x[30:0]) begin
      t = x; x = y; y = t;
    end
    d  = int'(x[30:23]) - int'(y[30:23]);
    ma = {2'b01, x[22:0], 26'd0};
    if (d > 26) mb = 51'd1;                       // only a sticky remains
    else        mb = {2'b01, y[22:0], 26'd0} >> d;
    sum = (x[31] == y[31]) ? ma + mb : ma - mb;
    if (sum == 51'd0) return 32'd0;
    p = 0;
    for (int i = 0; i < 51; i++) if (sum[i]) p = i;
    ex = int'(x[30:23]) - 127 + (p - 49);
    n  = sum << (50 - p);
    return fp32_pack(x[31], ex, n[50:27], n[26], |n[25:0]);
  endfunction

  function automatic fp32_t fp32_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // ---------------------------------------------------------------------
  // FP32 multiplication
  // ---------------------------------------------------------------------
  function automatic fp32_t fp32_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    int          ex;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    ex = int'(a[30:23]) + int'(b[30:23]) - 254;
    if (p[47]) return fp32_pack(s, ex + 1, p[47:24], p[23], |p[22:0]);
    return fp32_pack(s, ex, p[46:23], p[22], |p[21:0]);
  endfunction

  // Ordered comparison a > b (+0 and -0 compare equal)
  function automatic logic fp32_gt(input fp32_t a, input fp32_t b);
    logic [31:0] ka, kb;
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 1'b0;
    ka = a[31] ? ~a : (a | 32'h8000_0000);
    kb = b[31] ? ~b : (b | 32'h8000_0000);
    return ka > kb;
  endfunction

  // ---------------------------------------------------------------------
  // FP32 -> E4M3 (sign kept), RNE, saturating to 448
  // ---------------------------------------------------------------------
  function automatic logic [7:0] fp32_to_e4m3(input fp32_t f);
    logic        s;
    int          e, sh;
    logic [23:0] m;
    logic [23:0] q;
    logic [23:0] rem, half;
    s = f[31];
    if (f[30:23] == 8'd0) return {s, 7'd0};
    e = int'(f[30:23]) - 127;
    if (e > 8) return {s, 7'h7E};
    m  = {1'b1, f[22:0]};
    sh = (e >= -6) ? 20 : 20 + (-6 - e);
    if (sh > 24) return {s, 7'd0};               // below half the smallest subnormal
    q    = m >> sh;
    rem  = m & ((24'd1 << sh) - 24'd1);
    half = 24'd1 << (sh - 1);
    if (rem > half || (rem == half && q[0])) q = q + 24'd1;
    if (e >= -6) begin
      // q in [8,16]: significand 1.mmm, units of 2^(e-3)
      if (q == 24'd16) begin
        e = e + 1;
        q = 24'd8;
      end
      if (e > 8 || (e == 8 && q[2:0] == 3'd7)) return {s, 7'h7E};
      return {s, 4'(e + 7), q[2:0]};
    end
    // subnormal range: q counts units of 2^-9; q == 8 is the smallest normal
    return {s, 7'(q)};
  endfunction

  // E4M3 code -> FP32 (exact)
  function automatic fp32_t e4m3_to_fp32(input logic [7:0] c);
    return fix_to_fp32(c[7] ? -64'(e4m3_mag(c[6:0])) : 64'(e4m3_mag(c[6:0])), 9);
  endfunction

  // E2M1 code -> FP32 (exact)
  function automatic fp32_t e2m1_to_fp32(input logic [3:0] c);
    return fix_to_fp32(c[3] ? -64'(e2m1_mag(c[2:0])) : 64'(e2m1_mag(c[2:0])), 1);
  endfunction

endpackage
