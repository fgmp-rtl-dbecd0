// output_collector: partial-sum store of one vector lane.
//
// In the weight-stationary dataflow the lane sees, for one stationary weight
// block, a stream of activation blocks for columns 0..N-1. The collector
// keeps one FP32 partial sum per column. Each cycle it returns the partial
// sum of the column in flight to the datapath ("partial sum back to
// datapath"; zero on the first weight block, signalled by first) and writes
// the updated sum back. On the last weight block the sum is fully
// accumulated and is captured in the output register fin_q instead, from
// which the PE passes it to the post-processing unit.
//
// The paper gives this function only; the depth (NCOL columns), the
// combinational read / clocked write and the separate output register are
// this design's choices. Reading and writing the same column in the same
// cycle returns the old value (the write lands at the clock edge).
module output_collector
  import fgmp_pkg::*;
#(
  parameter int unsigned NCOL = 16,
  parameter int unsigned CW   = $clog2(NCOL)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] rd_col,
  input  logic          first,     // first weight block: partial sum is zero
  output fp32_t         psum_rd,
  input  logic          wr_en,     // store an updated partial sum
  input  logic [CW-1:0] wr_col,
  input  fp32_t         wr_data,
  input  logic          fin_load,  // capture a fully accumulated sum
  output fp32_t         fin_q
);

  fp32_t psum [NCOL];

  assign psum_rd = first ? 32'd0 : psum[rd_col];

  always_ff @(posedge clk) begin
    if (wr_en) psum[wr_col] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        fin_q <= '0;
    else if (fin_load) fin_q <= wr_data;
  end

endmodule
