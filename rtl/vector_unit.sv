// vector_unit: vector unit holding the mixed-precision post-processing unit.
//
// The paper places the PPU inside the accelerator's vector units and feeds it
// with per-channel sensitivity information and a threshold calibrated
// offline. This unit adds the storage for both: a sensitivity table with one
// entry (BS FP32 values g^2) per block of BS output channels, and the
// threshold register, both written by the host before inference. Each
// accepted output block names its channel block (cb); the table is read
// synchronously in the accept cycle and the block and its sensitivities
// enter the PPU in the next cycle. Table depth, write ports and the one-entry
// input register are this design's choices. Latency from accept to a valid
// quantized block: 4 cycles.
module vector_unit
  import fgmp_pkg::*;
#(
  parameter int unsigned SENS_DEPTH = 1024,
  parameter int unsigned SAW        = $clog2(SENS_DEPTH),
  parameter int unsigned TAG_W      = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic             thr_we,
  input  fp32_t            thr_data,
  input  logic             sens_we,
  input  logic [SAW-1:0]   sens_addr,
  input  fp32_t [BS-1:0]   sens_data,
  // fully accumulated sums
  input  logic             in_valid,
  output logic             in_ready,
  input  fp32_t [BS-1:0]   in_y,
  input  logic [SAW-1:0]   in_cb,
  input  logic [TAG_W-1:0] in_tag,
  // quantized output blocks to the memory system
  output logic             out_valid,
  input  logic             out_ready,
  output fgmp_block_t      out_blk,
  output fp32_t            out_metric,
  output logic [TAG_W-1:0] out_tag
);

  fp32_t [BS-1:0]   sens_mem [SENS_DEPTH];
  fp32_t [BS-1:0]   sens_q;
  fp32_t            threshold;
  logic             r_v;
  fp32_t [BS-1:0]   r_y;
  logic [TAG_W-1:0] r_tag;
  logic             ppu_ready;
  logic             take;

  assign in_ready = !r_v || ppu_ready;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (sens_we) sens_mem[sens_addr] <= sens_data;
    if (take)    sens_q <= sens_mem[in_cb];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      threshold <= '0;
      r_v       <= 1'b0;
      r_y       <= '0;
      r_tag     <= '0;
    end else begin
      if (thr_we) threshold <= thr_data;
      if (in_ready) r_v <= in_valid;
      if (take) begin
        r_y   <= in_y;
        r_tag <= in_tag;
      end
    end
  end

  ppu #(.TAG_W(TAG_W)) u_ppu (
    .clk(clk), .rst_n(rst_n), .threshold(threshold),
    .in_valid(r_v), .in_ready(ppu_ready), .in_y(r_y), .in_sens(sens_q), .in_tag(r_tag),
    .out_valid(out_valid), .out_ready(out_ready), .out_blk(out_blk),
    .out_metric(out_metric), .out_tag(out_tag)
  );

endmodule
