// tb_workload_llama2: a slice of a Llama-2-7B projection layer (K = 4096) run
// on the accelerator at its default size, under the 90% FP4 / 10% FP8
// activation policy.
//
// Four output channel blocks (64 of the layer's 4096 output channels) are
// computed for 32 activation columns, 16 per PE, each as one full K = 4096
// tile. Every channel block has its own sensitivity-table entry. Before each
// tile the threshold is set the way offline calibration would: between the
// 29th and 30th largest of the 32 reference metrics, so that exactly 3 of
// the 32 output blocks (about 10%) must stay FP8. Each output block is
// compared with the reference chain (FP32 lane sums, NVFP4/FP8 quantization,
// sensitivity-weighted decision). The cycle count of each tile is checked
// against the datapath rate: a tile's last block must leave no earlier than
// the PE schedule n_kb*(N+2)+3 allows and at most N+8 cycles later (the two
// PEs' final columns queue for the single PPU, whose latency is 4).
module tb_workload_llama2;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  localparam int P = 2, L = LANES, NCOL = 16, NKB = 256, NCB = 4;
  int checks = 0, failures = 0;
  int n_fp8 = 0, n_fp4 = 0;
  logic clk = 0, rst_n = 0;

  logic ab_we = 0, wb_we = 0, thr_we = 0, sens_we = 0, start = 0, out_ready = 1;
  logic [0:0] ab_pe = 0, wb_pe = 0;
  logic [11:0] ab_waddr = 0;
  logic [3:0] wb_lane = 0;
  logic [7:0] wb_waddr = 0;
  fgmp_block_t ab_wdata = '0, wb_wdata = '0;
  fp32_t thr_data = 0;
  logic [9:0] sens_addr = 0, cmd_cb = 0;
  fp32_t [BS-1:0] sens_data = '0;
  logic [4:0] n_cols = 0;
  logic [8:0] n_kb = 0;
  logic k_first = 1, k_last = 1;
  logic busy, out_valid;
  fgmp_block_t out_blk;
  fp32_t out_metric;
  logic [4:0] out_tag;
  logic [P-1:0] pe_stall;
  logic [P-1:0][3:0] pe_unit_sel;

  fgmp_block_t W [P][L][NKB];
  fgmp_block_t A [P][NCOL*NKB];
  fp32_t       G [NCB][BS];
  ppu_ref_t    R [P][NCOL];
  real         thr;

  fgmp_accel dut (
    .clk(clk), .rst_n(rst_n),
    .ab_we(ab_we), .ab_pe(ab_pe), .ab_waddr(ab_waddr), .ab_wdata(ab_wdata),
    .wb_we(wb_we), .wb_pe(wb_pe), .wb_lane(wb_lane), .wb_waddr(wb_waddr), .wb_wdata(wb_wdata),
    .thr_we(thr_we), .thr_data(thr_data), .sens_we(sens_we), .sens_addr(sens_addr), .sens_data(sens_data),
    .start(start), .n_cols(n_cols), .n_kb(n_kb), .k_first(k_first), .k_last(k_last), .cmd_cb(cmd_cb), .busy(busy),
    .out_valid(out_valid), .out_ready(out_ready), .out_blk(out_blk), .out_metric(out_metric), .out_tag(out_tag),
    .pe_stall(pe_stall), .pe_unit_sel(pe_unit_sel));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the activation tile is shared by all channel blocks; weights change
  task automatic load_acts();
    for (int q = 0; q < P; q++) begin
      for (int a = 0; a < NCOL * NKB; a++) begin
        A[q][a] = rand_block_small($urandom_range(0, 4) == 0);
        @(negedge clk); ab_we = 1; ab_pe = 1'(q); ab_waddr = 12'(a); ab_wdata = A[q][a];
      end
      @(negedge clk); ab_we = 0;
    end
  endtask

  task automatic channel_block(input int cb);
    fp32_t y [BS];
    real   m [P*NCOL];
    real   t;
    int    got, p, n, cyc, last_cyc, fp8_here, lo;
    // weights of these 16 output channels, the same in both PEs
    for (int l = 0; l < L; l++)
      for (int k = 0; k < NKB; k++) begin
        W[0][l][k] = rand_block_small($urandom_range(0, 4) == 0);
        W[1][l][k] = W[0][l][k];
      end
    for (int q = 0; q < P; q++) begin
      for (int l = 0; l < L; l++)
        for (int k = 0; k < NKB; k++) begin
          @(negedge clk); wb_we = 1; wb_pe = 1'(q); wb_lane = 4'(l); wb_waddr = 8'(k); wb_wdata = W[q][l][k];
        end
      @(negedge clk); wb_we = 0;
    end
    // reference and threshold calibration
    for (int q = 0; q < P; q++)
      for (int c = 0; c < NCOL; c++) begin
        for (int l = 0; l < L; l++) begin
          y[l] = 32'd0;
          for (int k = 0; k < NKB; k++) y[l] = ref_mac(y[l], W[q][l][k], A[q][k * NCOL + c]);
        end
        R[q][c] = ref_ppu(y, G[cb]);
        m[q * NCOL + c] = R[q][c].metric;
      end
    for (int i = 0; i < P * NCOL; i++)
      for (int j = i + 1; j < P * NCOL; j++)
        if (m[j] < m[i]) begin t = m[i]; m[i] = m[j]; m[j] = t; end
    lo  = P * NCOL - 4;
    thr = (m[lo] + m[lo + 1]) / 2.0;
    @(negedge clk); thr_we = 1; thr_data = r2f(thr);
    @(negedge clk); thr_we = 0;
    // run the tile
    start = 1; n_cols = 5'(NCOL); n_kb = 9'(NKB); cmd_cb = 10'(100 + cb); k_first = 1; k_last = 1;
    @(negedge clk); start = 0;
    got = 0; cyc = 1; last_cyc = 0; fp8_here = 0;
    while (got < P * NCOL) begin
      #1;
      if (out_valid && out_ready) begin
        p = int'(out_tag[4]);
        n = int'(out_tag[3:0]);
        checks++;
        if (rabs(f2r(out_metric) - R[p][n].metric) > 1e-5 * R[p][n].mag + 1e-30) begin
          failures++; $display("cb %0d pe%0d col%0d metric %g vs %g", cb, p, n, f2r(out_metric), R[p][n].metric);
        end
        checks++;
        if (out_blk.fp8 ? (out_blk.data !== R[p][n].c8)
                        : (out_blk.data[BS*4-1:0] !== R[p][n].c4 || out_blk.scale !== R[p][n].scale)) begin
          failures++; $display("cb %0d pe%0d col%0d codes", cb, p, n);
        end
        if (out_blk.fp8) begin n_fp8++; fp8_here++; end else n_fp4++;
        got++;
        last_cyc = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (fp8_here != 3) begin failures++; $display("cb %0d: %0d FP8 blocks, expected 3", cb, fp8_here); end
    checks++;
    if (last_cyc < NKB * (NCOL + 2) + 3 || last_cyc > NKB * (NCOL + 2) + 3 + NCOL + 8) begin
      failures++; $display("cb %0d: last block after %0d cycles", cb, last_cyc);
    end
    $display("channel block %0d: %0d cycles, threshold %g", cb, last_cyc, thr);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCB; c++) begin
      for (int i = 0; i < BS; i++) G[c][i] = pos_fp32(-6, 0);
      @(negedge clk); sens_we = 1; sens_addr = 10'(100 + c);
      for (int i = 0; i < BS; i++) sens_data[i] = G[c][i];
    end
    @(negedge clk); sens_we = 0;
    load_acts();
    for (int c = 0; c < NCB; c++) channel_block(c);
    $display("FP8 blocks %0d, FP4 blocks %0d", n_fp8, n_fp4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
