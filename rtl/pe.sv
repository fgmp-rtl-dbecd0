// pe: processing element with an L-lane FGMP mixed-precision VMAC datapath.
//
// The PE computes an (L x K) x (K x N) tile product: L output channels (one
// per lane) against N activation columns, with K = n_kb * BS. It follows the
// paper's weight-stationary dataflow: for each of the n_kb weight blocks per
// lane, the weight collectors are loaded once and then the N activation
// blocks of that K-slice are streamed one per cycle from the activation
// buffer through the activation collector and broadcast to all lanes. Each
// lane selects one of its four dot-product units from the two blocks' FP8
// metadata bits and adds the dot product to the column's partial sum held in
// its output collector. On the last K-slice the L fully accumulated sums of a
// column form one output activation block, handed to the post-processing
// unit with a valid/ready handshake.
//
// Sequencing (this design's choice, the paper gives none): per K-slice one
// cycle reads the weight buffers, one loads the weight collectors, then N
// cycles issue activation reads; the read takes one cycle, the activation
// collector one more, and the lanes compute in the third. The activation
// block for slice kb, column n is at buffer address kb*N + n; the weight block
// of slice kb is at address kb of each lane's weight buffer. A slice thus
// takes N + 2 cycles.
//
// A dot-product dimension longer than one buffer load (K > WB_DEPTH * BS) is
// split over several tile commands: k_first = 0 continues from the partial
// sums left in the output collectors, k_last = 0 keeps the sums there instead
// of sending them to the PPU; the buffers are refilled between the commands.
// The paper reduces the full K before post-processing but does not say how
// a long K is staged; this chaining is this design's choice.
//
// If the output register still holds an unaccepted block when the next final
// sum arrives, the whole PE stalls for that cycle (stall = 1). busy is high
// from start until the last block has been accepted.
module pe
  import fgmp_pkg::*;
#(
  parameter int unsigned L        = LANES,
  parameter int unsigned NCOL     = 16,   // max activation columns per tile
  parameter int unsigned WB_DEPTH = 256,  // weight blocks per lane (K tile / BS)
  parameter int unsigned AB_DEPTH = NCOL * WB_DEPTH,
  parameter int unsigned CW       = $clog2(NCOL),
  parameter int unsigned WAW      = $clog2(WB_DEPTH),
  parameter int unsigned AAW      = $clog2(AB_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // buffer fill from the memory system
  input  logic            ab_we,
  input  logic [AAW-1:0]  ab_waddr,
  input  fgmp_block_t     ab_wdata,
  input  logic            wb_we,
  input  logic [$clog2(L)-1:0] wb_lane,
  input  logic [WAW-1:0]  wb_waddr,
  input  fgmp_block_t     wb_wdata,
  // tile command
  input  logic            start,
  input  logic [CW:0]     n_cols,   // 1..NCOL
  input  logic [WAW:0]    n_kb,     // 1..WB_DEPTH
  input  logic            k_first,  // tile starts the reduction (sums from zero)
  input  logic            k_last,   // tile ends the reduction (blocks to the PPU)
  output logic            busy,
  // fully accumulated output block to the PPU
  output logic            out_valid,
  input  logic            out_ready,
  output fp32_t [L-1:0]   out_data,
  output logic [CW-1:0]   out_col,
  // activity
  output logic            stall,
  output logic [3:0]      unit_sel  // active dot-product unit (lane 0)
);

  typedef enum logic [1:0] {S_IDLE, S_WRD, S_WLD, S_STREAM} state_t;

  state_t         state;
  logic [WAW:0]   kb;
  logic [CW:0]    n;
  logic [AAW-1:0] a_addr;
  logic [CW:0]    cfg_cols;
  logic [WAW:0]   cfg_kb;
  logic           cfg_first, cfg_last;

  // pipeline tags
  logic          s1_v, s1_first, s1_last;
  logic [CW-1:0] s1_col;
  logic          s2_first, s2_last;
  logic [CW-1:0] s2_col;

  logic        ab_re, wb_re, w_load;
  fgmp_block_t ab_rdata;
  fgmp_block_t a_q;
  logic        a_valid;
  fgmp_block_t w_rdata [L];
  fgmp_block_t w_q     [L];
  logic        w_valid [L];
  fp32_t       psum_rd [L];
  fp32_t       psum_new[L];
  logic [3:0]  sel     [L];
  logic        lane_fire, lane_final;

  assign stall      = a_valid && s2_last && out_valid && !out_ready;
  assign lane_fire  = a_valid && !stall;
  assign lane_final = lane_fire && s2_last;

  // ---------------------------------------------------------------- control
  assign ab_re  = (state == S_STREAM) && !stall;
  assign wb_re  = (state == S_WRD) && !stall;
  assign w_load = (state == S_WLD) && !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      kb       <= '0;
      n        <= '0;
      a_addr   <= '0;
      cfg_cols <= '0;
      cfg_kb   <= '0;
      cfg_first <= 1'b1;
      cfg_last  <= 1'b1;
    end else if (!stall) begin
      unique case (state)
        S_IDLE: if (start) begin
          cfg_cols <= n_cols;
          cfg_kb   <= n_kb;
          cfg_first <= k_first;
          cfg_last  <= k_last;
          kb       <= '0;
          a_addr   <= '0;
          state    <= S_WRD;
        end
        S_WRD: state <= S_WLD;
        S_WLD: begin
          n     <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          a_addr <= a_addr + 1'b1;
          if (n + 1'b1 == cfg_cols) begin
            kb    <= kb + 1'b1;
            state <= (kb + 1'b1 == cfg_kb) ? S_IDLE : S_WRD;
          end else begin
            n <= n + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v     <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_col   <= '0;
      s2_first <= 1'b0;
      s2_last  <= 1'b0;
      s2_col   <= '0;
    end else if (!stall) begin
      s1_v     <= ab_re;
      s1_first <= (kb == '0) && cfg_first;
      s1_last  <= (kb + 1'b1 == cfg_kb) && cfg_last;
      s1_col   <= n[CW-1:0];
      if (s1_v) begin
        s2_first <= s1_first;
        s2_last  <= s1_last;
        s2_col   <= s1_col;
      end
    end
  end

  // ------------------------------------------------- activation buffer path
  block_buffer #(.DEPTH(AB_DEPTH)) u_abuf (
    .clk(clk), .we(ab_we), .waddr(ab_waddr), .wdata(ab_wdata),
    .re(ab_re), .raddr(a_addr), .rdata(ab_rdata)
  );

  block_collector u_acol (
    .clk(clk), .rst_n(rst_n), .load(s1_v && !stall), .clear(!s1_v && !stall),
    .d(ab_rdata), .q(a_q), .valid(a_valid)
  );

  // --------------------------------------------------------------- lanes
  for (genvar l = 0; l < L; l++) begin : g_lane
    block_buffer #(.DEPTH(WB_DEPTH)) u_wbuf (
      .clk(clk), .we(wb_we && (wb_lane == l)), .waddr(wb_waddr), .wdata(wb_wdata),
      .re(wb_re), .raddr(kb[WAW-1:0]), .rdata(w_rdata[l])
    );

    block_collector u_wcol (
      .clk(clk), .rst_n(rst_n), .load(w_load), .clear(1'b0),
      .d(w_rdata[l]), .q(w_q[l]), .valid(w_valid[l])
    );

    vmac_lane u_lane (
      .en(a_valid), .w_blk(w_q[l]), .a_blk(a_q),
      .psum_in(psum_rd[l]), .psum_out(psum_new[l]), .unit_sel(sel[l])
    );

    output_collector #(.NCOL(NCOL)) u_ocol (
      .clk(clk), .rst_n(rst_n),
      .rd_col(s2_col), .first(s2_first), .psum_rd(psum_rd[l]),
      .wr_en(lane_fire && !s2_last), .wr_col(s2_col), .wr_data(psum_new[l]),
      .fin_load(lane_final), .fin_q(out_data[l])
    );
  end

  assign unit_sel = sel[0];

  // ------------------------------------------------------ output handshake
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_col   <= '0;
    end else begin
      if (lane_final) begin
        out_valid <= 1'b1;
        out_col   <= s2_col;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  assign busy = (state != S_IDLE) || s1_v || a_valid || out_valid;

  // the weight collectors must have been loaded before a lane fires
  a_weights_loaded: assert property (@(posedge clk) disable iff (!rst_n) lane_fire |-> w_valid[0]);
  // a held output block may not change while the PPU has not taken it
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_col));

endmodule
