// fgmp_accel: FGMP accelerator top level, a PE array and one vector unit.
//
// P processing elements, each with L = 16 lanes of the mixed-precision VMAC
// datapath (BS = 16), share one vector unit whose post-processing unit
// quantizes every fully accumulated output block to NVFP4 or FP8 on the fly.
// All PEs compute the same L output channels (channel block cmd_cb) for
// different activation columns, so a tile of N columns per PE covers P*N
// columns, as in the paper's throughput model M/L * K/16 * N/P. A
// round-robin arbiter passes the PEs' output blocks to the vector unit; a PE
// whose block is not taken stalls. The memory system is outside: its traffic
// enters through the buffer and table write ports and leaves through the
// quantized-block output stream.
//
// A tile reduces the whole dot-product dimension inside the PE before the
// PPU sees it, so the weight buffers hold WB_DEPTH = 256 blocks per lane,
// K = 4096, the smallest K of the paper's Llama-2-7B layers. A longer K is
// run as a chain of tile commands (k_first / k_last, see pe).
//
// Output tag: {PE index, column within the PE's tile}. Counts of PEs, buffer
// depths and the table depth are this design's choices; L and BS are the
// paper's.
module fgmp_accel
  import fgmp_pkg::*;
#(
  parameter int unsigned P          = 2,
  parameter int unsigned NCOL       = 16,
  parameter int unsigned WB_DEPTH   = 256,
  parameter int unsigned SENS_DEPTH = 1024,
  parameter int unsigned AB_DEPTH   = NCOL * WB_DEPTH,
  parameter int unsigned PW         = (P > 1) ? $clog2(P) : 1,
  parameter int unsigned CW         = $clog2(NCOL),
  parameter int unsigned WAW        = $clog2(WB_DEPTH),
  parameter int unsigned AAW        = $clog2(AB_DEPTH),
  parameter int unsigned SAW        = $clog2(SENS_DEPTH),
  parameter int unsigned TAG_W      = PW + CW
) (
  input  logic              clk,
  input  logic              rst_n,
  // memory system -> buffers
  input  logic              ab_we,
  input  logic [PW-1:0]     ab_pe,
  input  logic [AAW-1:0]    ab_waddr,
  input  fgmp_block_t       ab_wdata,
  input  logic              wb_we,
  input  logic [PW-1:0]     wb_pe,
  input  logic [$clog2(LANES)-1:0] wb_lane,
  input  logic [WAW-1:0]    wb_waddr,
  input  fgmp_block_t       wb_wdata,
  // calibration data
  input  logic              thr_we,
  input  fp32_t             thr_data,
  input  logic              sens_we,
  input  logic [SAW-1:0]    sens_addr,
  input  fp32_t [BS-1:0]    sens_data,
  // tile command (all PEs)
  input  logic              start,
  input  logic [CW:0]       n_cols,
  input  logic [WAW:0]      n_kb,
  input  logic              k_first,
  input  logic              k_last,
  input  logic [SAW-1:0]    cmd_cb,
  output logic              busy,
  // quantized output activation blocks
  output logic              out_valid,
  input  logic              out_ready,
  output fgmp_block_t       out_blk,
  output fp32_t             out_metric,
  output logic [TAG_W-1:0]  out_tag,
  // activity
  output logic [P-1:0]      pe_stall,
  output logic [P-1:0][3:0] pe_unit_sel
);

  logic [P-1:0]          pe_busy, pe_valid, pe_ready;
  fp32_t [P-1:0][LANES-1:0] pe_data;
  logic [P-1:0][CW-1:0]  pe_col;
  logic [SAW-1:0]        cb_q;
  logic                  vu_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cb_q <= '0;
    else if (start) cb_q <= cmd_cb;
  end

  for (genvar p = 0; p < P; p++) begin : g_pe
    pe #(.L(LANES), .NCOL(NCOL), .WB_DEPTH(WB_DEPTH), .AB_DEPTH(AB_DEPTH)) u_pe (
      .clk(clk), .rst_n(rst_n),
      .ab_we(ab_we && (ab_pe == p)), .ab_waddr(ab_waddr), .ab_wdata(ab_wdata),
      .wb_we(wb_we && (wb_pe == p)), .wb_lane(wb_lane), .wb_waddr(wb_waddr), .wb_wdata(wb_wdata),
      .start(start), .n_cols(n_cols), .n_kb(n_kb),
      .k_first(k_first), .k_last(k_last), .busy(pe_busy[p]),
      .out_valid(pe_valid[p]), .out_ready(pe_ready[p]), .out_data(pe_data[p]), .out_col(pe_col[p]),
      .stall(pe_stall[p]), .unit_sel(pe_unit_sel[p])
    );
  end

  // round-robin arbiter: the PE after the last granted one has priority
  logic [PW-1:0] last, gnt_idx;
  logic          gnt_any;

  always_comb begin
    int unsigned idx;
    gnt_any = 1'b0;
    gnt_idx = '0;
    for (int unsigned k = 1; k <= P; k++) begin
      idx = (int'(last) + k) % P;
      if (!gnt_any && pe_valid[idx]) begin
        gnt_any = 1'b1;
        gnt_idx = PW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   last <= PW'(P - 1);
    else if (gnt_any && vu_ready) last <= gnt_idx;
  end

  always_comb begin
    for (int p = 0; p < P; p++) pe_ready[p] = gnt_any && vu_ready && (gnt_idx == PW'(p));
  end

  vector_unit #(.SENS_DEPTH(SENS_DEPTH), .TAG_W(TAG_W)) u_vu (
    .clk(clk), .rst_n(rst_n),
    .thr_we(thr_we), .thr_data(thr_data),
    .sens_we(sens_we), .sens_addr(sens_addr), .sens_data(sens_data),
    .in_valid(gnt_any), .in_ready(vu_ready), .in_y(pe_data[gnt_idx]), .in_cb(cb_q),
    .in_tag({gnt_idx, pe_col[gnt_idx]}),
    .out_valid(out_valid), .out_ready(out_ready), .out_blk(out_blk),
    .out_metric(out_metric), .out_tag(out_tag)
  );

  assign busy = |pe_busy;

endmodule
