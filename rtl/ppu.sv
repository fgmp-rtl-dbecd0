// ppu: mixed-precision activation quantization post-processing unit.
//
// Takes one output activation block per cycle (BS fully accumulated FP32
// sums, one per output channel) together with the per-channel sensitivities
// of those channels, and writes it out either as an NVFP4 block or as an FP8
// block, following the paper's post-processing unit figure:
//   VMax -> Get u-scale -> Quantize (FP4)    \
//                          Quantize (FP8)     -> mixed-precision decision
//   the decision ("FP4/8?") drives the output multiplexer and becomes the
//   block's metadata bit.
// The threshold is a static value calibrated offline.
//
// Pipeline (this design's choice): stage 1 registers the input, stage 2
// holds the scale, codes and dequantized values, stage 3 the decision and
// the packed block. Latency 3 cycles, one block per cycle, matching the
// paper's throughput model of one block per PPU per cycle. A valid/ready
// handshake stalls all stages together when the output is not accepted.
// The tag is carried alongside the block unchanged.
module ppu
  import fgmp_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fp32_t            threshold,
  input  logic             in_valid,
  output logic             in_ready,
  input  fp32_t [BS-1:0]   in_y,
  input  fp32_t [BS-1:0]   in_sens,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output fgmp_block_t      out_blk,
  output fp32_t            out_metric,
  output logic [TAG_W-1:0] out_tag
);

  logic adv;
  assign adv      = !out_valid || out_ready;
  assign in_ready = adv;

  // stage 1: input register
  logic             s1_v;
  fp32_t [BS-1:0]   s1_y, s1_sens;
  logic [TAG_W-1:0] s1_tag;

  // stage 1 -> 2 logic
  fp32_t              amax;
  logic [7:0]         scale;
  logic [BS-1:0][3:0] c4;
  logic [BS-1:0][7:0] c8;
  fp32_t [BS-1:0]     dq4, dq8;

  vmax         u_vmax  (.y(s1_y), .amax(amax));
  mu_scale     u_scale (.amax(amax), .scale(scale));
  quantize_fp4 u_q4    (.y(s1_y), .scale(scale), .code(c4), .deq(dq4));
  quantize_fp8 u_q8    (.y(s1_y), .code(c8), .deq(dq8));

  // stage 2
  logic               s2_v;
  fp32_t [BS-1:0]     s2_y, s2_sens, s2_dq4, s2_dq8;
  logic [BS-1:0][3:0] s2_c4;
  logic [BS-1:0][7:0] s2_c8;
  logic [7:0]         s2_scale;
  logic [TAG_W-1:0]   s2_tag;

  fp32_t metric;
  logic  fp8_sel;

  mpaq_unit u_mpaq (
    .y(s2_y), .q4(s2_dq4), .q8(s2_dq8), .sens(s2_sens),
    .threshold(threshold), .metric(metric), .fp8_sel(fp8_sel)
  );

  // output multiplexer
  fgmp_block_t blk;
  always_comb begin
    blk.fp8   = fp8_sel;
    blk.scale = fp8_sel ? 8'h00 : s2_scale;
    blk.data  = fp8_sel ? s2_c8 : {{(BS*4){1'b0}}, s2_c4};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v      <= 1'b0;
      s2_v      <= 1'b0;
      out_valid <= 1'b0;
      s1_y      <= '0;
      s1_sens   <= '0;
      s1_tag    <= '0;
      s2_y      <= '0;
      s2_sens   <= '0;
      s2_dq4    <= '0;
      s2_dq8    <= '0;
      s2_c4     <= '0;
      s2_c8     <= '0;
      s2_scale  <= '0;
      s2_tag    <= '0;
      out_blk   <= '0;
      out_metric <= '0;
      out_tag   <= '0;
    end else if (adv) begin
      s1_v      <= in_valid;
      s1_y      <= in_y;
      s1_sens   <= in_sens;
      s1_tag    <= in_tag;
      s2_v      <= s1_v;
      s2_y      <= s1_y;
      s2_sens   <= s1_sens;
      s2_dq4    <= dq4;
      s2_dq8    <= dq8;
      s2_c4     <= c4;
      s2_c8     <= c8;
      s2_scale  <= scale;
      s2_tag    <= s1_tag;
      out_valid <= s2_v;
      out_blk   <= blk;
      out_metric <= metric;
      out_tag   <= s2_tag;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_blk));

endmodule
