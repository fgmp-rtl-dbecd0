// fgmp_tb_pkg: reference models shared by the FGMP testbenches.
//
// The models are written independently of the RTL: number formats are
// evaluated with real arithmetic and searched by brute force (nearest
// representable value, ties to the even code) instead of being decoded bit
// by bit. FP32 rounding of a real uses the bits of the IEEE double and rounds
// its 53-bit significand to 24 bits (nearest even), flushing results below
// the FP32 normal range to zero as the RTL does. Every value the checks
// build in real arithmetic is exact in a double before that single rounding.
package fgmp_tb_pkg;

  import fgmp_pkg::*;

  // ------------------------------------------------------------ conversions
  function automatic fp32_t r2f(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] k;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023;
    m  = {1'b1, d[51:0]};
    k  = {1'b0, m[52:29]};
    g  = m[28];
    st = |m[27:0];
    if (g && (st || k[0])) k = k + 1;
    if (k[24]) begin
      k = k >> 1;
      e = e + 1;
    end
    if (e < -126) return {s, 31'd0};
    if (e > 127) return {s, 8'hFF, 23'd0};
    return {s, 8'(e + 127), k[22:0]};
  endfunction

  function automatic real pow2(input int e);
    real v;
    v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else        for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic real f2r(input fp32_t f);
    real v;
    if (f[30:23] == 8'd0) return 0.0;
    v = real'({1'b1, f[22:0]}) * pow2(int'(f[30:23]) - 150);
    return f[31] ? -v : v;
  endfunction

  // value of an E4M3 magnitude code (7 bits)
  function automatic real e4m3_val(input int c);
    int e, m;
    e = (c >> 3) & 15;
    m = c & 7;
    if (e == 0) return real'(m) / 8.0 * pow2(-6);
    return (1.0 + real'(m) / 8.0) * pow2(e - 7);
  endfunction

  function automatic real e4m3_sval(input logic [7:0] c);
    return c[7] ? -e4m3_val(int'(c[6:0])) : e4m3_val(int'(c[6:0]));
  endfunction

  function automatic real e2m1_val(input int c);
    real t [8];
    t = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    return t[c & 7];
  endfunction

  function automatic real e2m1_sval(input logic [3:0] c);
    return c[3] ? -e2m1_val(int'(c[2:0])) : e2m1_val(int'(c[2:0]));
  endfunction

  function automatic real rabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // nearest E4M3 code (magnitudes 0..448), ties to the even code
  function automatic logic [7:0] ref_e4m3(input real x);
    real ax, best, dd;
    int  bc;
    ax   = rabs(x);
    bc   = 0;
    best = ax;
    for (int c = 1; c <= 126; c++) begin
      dd = rabs(ax - e4m3_val(c));
      if (dd < best || (dd == best && (c % 2 == 0))) begin
        best = dd;
        bc   = c;
      end
    end
    return {(x < 0.0), 7'(bc)};
  endfunction

  // nearest E2M1 code to x / s, ties to the even code, zero has no sign
  function automatic logic [3:0] ref_e2m1(input real x, input real s);
    real ax, best, dd;
    int  bc;
    ax   = rabs(x);
    bc   = 0;
    best = ax;
    for (int c = 1; c < 8; c++) begin
      dd = rabs(ax - s * e2m1_val(c));
      if (dd < best || (dd == best && (c % 2 == 0))) begin
        best = dd;
        bc   = c;
      end
    end
    return {(x < 0.0) && (bc != 0), 3'(bc)};
  endfunction

  // microscale: E4M3(FP32(amax * FP32(1/6))), at least the smallest subnormal
  function automatic logic [7:0] ref_scale(input real amax);
    logic [7:0] c;
    c = ref_e4m3(f2r(r2f(amax * f2r(32'h3E2AAAAB))));
    if (c[6:0] == 7'd0) c = 8'h01;
    return {1'b0, c[6:0]};
  endfunction

  // ------------------------------------------------------------ stimulus
  // random FP32 value with exponent in [emin, emax]
  function automatic fp32_t rand_fp32(input int emin, input int emax);
    int e;
    e = emin + int'($urandom_range(0, emax - emin));
    return {1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction

  // random positive FP32 value
  function automatic fp32_t pos_fp32(input int emin, input int emax);
    fp32_t v;
    v = rand_fp32(emin, emax);
    return {1'b0, v[30:0]};
  endfunction

  // random block; fp8 selects the format
  function automatic fgmp_block_t rand_block(input logic fp8);
    fgmp_block_t b;
    b       = '0;
    b.fp8   = fp8;
    b.scale = fp8 ? 8'h00 : 8'($urandom_range(1, 126));
    for (int i = 0; i < BS; i++) begin
      if (fp8) b.data[8*i +: 8] = {1'($urandom), 7'($urandom_range(0, 126))};
      else     b.data[4*i +: 4] = 4'($urandom);
    end
    return b;
  endfunction

  // random block with bounded magnitudes: FP8 elements below 2, NVFP4
  // scales between 1/8 and 1, so that sums of a few hundred products stay
  // inside the FP8 range (no saturation at 448)
  function automatic fgmp_block_t rand_block_small(input logic fp8);
    fgmp_block_t b;
    b = rand_block(fp8);
    if (fp8) for (int i = 0; i < BS; i++) b.data[8*i +: 7] = 7'($urandom_range(0, 63));
    else b.scale = 8'($urandom_range(32, 56));
    return b;
  endfunction

  // real value of element i of a block, microscale included
  function automatic real blk_val(input fgmp_block_t b, input int i);
    if (b.fp8) return e4m3_sval(b.data[8*i +: 8]);
    return e2m1_sval(b.data[4*i +: 4]) * e4m3_val(int'(b.scale[6:0]));
  endfunction

  // exact dot product of two blocks (exact in a double for these formats)
  function automatic real ref_dot(input fgmp_block_t w, input fgmp_block_t a);
    real s, sa, sw;
    s = 0.0;
    for (int i = 0; i < BS; i++) begin
      if (w.fp8) sw = e4m3_sval(w.data[8*i +: 8]); else sw = e2m1_sval(w.data[4*i +: 4]);
      if (a.fp8) sa = e4m3_sval(a.data[8*i +: 8]); else sa = e2m1_sval(a.data[4*i +: 4]);
      s = s + sw * sa;
    end
    if (!w.fp8) s = s * e4m3_val(int'(w.scale[6:0]));
    if (!a.fp8) s = s * e4m3_val(int'(a.scale[6:0]));
    return s;
  endfunction

  // one lane step: psum + FP32(dot), both rounded to FP32
  function automatic fp32_t ref_mac(input fp32_t psum, input fgmp_block_t w, input fgmp_block_t a);
    return r2f(f2r(psum) + f2r(r2f(ref_dot(w, a))));
  endfunction

  // ------------------------------------------------------------ PPU model
  typedef struct {
    logic [7:0]         scale;
    logic [BS-1:0][3:0] c4;
    logic [BS-1:0][7:0] c8;
    real                q4 [BS];
    real                q8 [BS];
    real                metric;
    real                mag;     // sum of g*(e4+e8), for the tolerance
  } ppu_ref_t;

  function automatic ppu_ref_t ref_ppu(input fp32_t y [BS], input fp32_t g [BS]);
    ppu_ref_t r;
    real amax, s, yv, t;
    amax = 0.0;
    for (int i = 0; i < BS; i++) if (rabs(f2r(y[i])) > amax) amax = rabs(f2r(y[i]));
    r.scale  = ref_scale(amax);
    s        = e4m3_val(int'(r.scale[6:0]));
    r.metric = 0.0;
    r.mag    = 0.0;
    for (int i = 0; i < BS; i++) begin
      yv       = f2r(y[i]);
      r.c4[i]  = ref_e2m1(yv, s);
      r.c8[i]  = ref_e4m3(yv);
      r.q4[i]  = e2m1_sval(r.c4[i]) * s;
      r.q8[i]  = e4m3_sval(r.c8[i]);
      t        = f2r(g[i]) * ((r.q4[i] - yv) * (r.q4[i] - yv) - (r.q8[i] - yv) * (r.q8[i] - yv));
      r.metric = r.metric + t;
      r.mag    = r.mag + f2r(g[i]) * ((r.q4[i] - yv) * (r.q4[i] - yv) + (r.q8[i] - yv) * (r.q8[i] - yv));
    end
    return r;
  endfunction

endpackage
