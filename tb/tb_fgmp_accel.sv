// tb_fgmp_accel: end-to-end test of the accelerator at its default size
// (2 PEs of 16 lanes, BS = 16, one vector unit). The host loads both PEs'
// weight and activation buffers with a random mix of NVFP4 and FP8 blocks,
// the sensitivity table entry of the output channel block and the threshold,
// then starts a full tile (16 columns x 256 weight blocks = K of 4096 per PE).
// Every quantized output block is checked against the chain of reference
// models: FP32 lane accumulation, then NVFP4/FP8 quantization and the
// sensitivity-weighted decision. Three operations run: a full tile with the
// output always accepted, a small one with random backpressure, and a
// K = 11008 reduction (688 blocks, as in a Llama-2-7B FC2 layer) chained over
// three commands with the buffers refilled in between. Counted and required at least
// once: each of the four dot-product units, PE stalls, both PEs requesting
// the vector unit at once (arbitration), FP4 and FP8 output decisions.
module tb_fgmp_accel;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  localparam int P = 2, L = LANES, NCOL = 16, WBD = 256;
  int checks = 0, failures = 0;
  int n_stall = 0, n_conflict = 0, n_fp8 = 0, n_fp4 = 0;
  int unit_cnt [4] = '{0, 0, 0, 0};
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
  logic busy, out_valid;
  fgmp_block_t out_blk;
  fp32_t out_metric;
  logic [4:0] out_tag;
  logic [P-1:0] pe_stall;
  logic [P-1:0][3:0] pe_unit_sel;

  fgmp_block_t W [P][L][WBD];
  fgmp_block_t A [P][NCOL*WBD];
  fp32_t       G [BS];
  fp32_t       Y [P][NCOL][L];
  logic        k_first = 1, k_last = 1;
  int          n_early = 0;
  bit          seen [P][NCOL];

  fgmp_accel dut (
    .clk(clk), .rst_n(rst_n),
    .ab_we(ab_we), .ab_pe(ab_pe), .ab_waddr(ab_waddr), .ab_wdata(ab_wdata),
    .wb_we(wb_we), .wb_pe(wb_pe), .wb_lane(wb_lane), .wb_waddr(wb_waddr), .wb_wdata(wb_wdata),
    .thr_we(thr_we), .thr_data(thr_data), .sens_we(sens_we), .sens_addr(sens_addr), .sens_data(sens_data),
    .start(start), .n_cols(n_cols), .n_kb(n_kb), .k_first(k_first), .k_last(k_last), .cmd_cb(cmd_cb), .busy(busy),
    .out_valid(out_valid), .out_ready(out_ready), .out_blk(out_blk), .out_metric(out_metric), .out_tag(out_tag),
    .pe_stall(pe_stall), .pe_unit_sel(pe_unit_sel));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      if (pe_stall[p]) n_stall++;
      for (int u = 0; u < 4; u++) if (pe_unit_sel[p][u]) unit_cnt[u]++;
    end
    if (dut.pe_valid == '1) n_conflict++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tile(input int nc, input int nk, input int cb, input bit bp, input real thr,
                      input bit kf = 1, input bit kl = 1);
    int got, p, n;
    fp32_t y [BS];
    ppu_ref_t r;
    real tol;
    // calibration data
    for (int i = 0; i < BS; i++) G[i] = pos_fp32(-6, 0);
    @(negedge clk); thr_we = 1; thr_data = r2f(thr);
    @(negedge clk); thr_we = 0; sens_we = 1; sens_addr = 10'(cb);
    for (int i = 0; i < BS; i++) sens_data[i] = G[i];
    @(negedge clk); sens_we = 0;
    // buffers
    for (int q = 0; q < P; q++) begin
      for (int l = 0; l < L; l++)
        for (int k = 0; k < nk; k++) begin
          W[q][l][k] = rand_block_small($urandom_range(0, 4) == 0);
          @(negedge clk); wb_we = 1; wb_pe = 1'(q); wb_lane = 4'(l); wb_waddr = 8'(k); wb_wdata = W[q][l][k];
        end
      @(negedge clk); wb_we = 0;
      for (int a = 0; a < nc * nk; a++) begin
        A[q][a] = rand_block_small($urandom_range(0, 4) == 0);
        @(negedge clk); ab_we = 1; ab_pe = 1'(q); ab_waddr = 12'(a); ab_wdata = A[q][a];
      end
      @(negedge clk); ab_we = 0;
    end
    // reference lane sums after this command
    for (int q = 0; q < P; q++)
      for (int c = 0; c < nc; c++)
        for (int l = 0; l < L; l++) begin
          if (kf) Y[q][c][l] = 32'd0;
          for (int k = 0; k < nk; k++) Y[q][c][l] = ref_mac(Y[q][c][l], W[q][l][k], A[q][k * nc + c]);
        end
    for (int q = 0; q < P; q++) for (int c = 0; c < NCOL; c++) seen[q][c] = 0;
    start = 1; n_cols = 5'(nc); n_kb = 9'(nk); cmd_cb = 10'(cb); k_first = kf; k_last = kl;
    @(negedge clk); start = 0;
    got = 0;
    if (!kl) begin
      while (busy) begin
        if (out_valid) n_early++;
        @(negedge clk);
      end
      checks++;
      if (n_early != 0) begin failures++; $display("output before the last chained tile"); end
      return;
    end
    while (got < P * nc) begin
      out_ready = bp ? ($urandom_range(0, 3) == 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        p = int'(out_tag[4]);
        n = int'(out_tag[3:0]);
        checks++;
        if (n >= nc || seen[p][n]) begin failures++; $display("bad or repeated tag %0d/%0d", p, n); end
        else begin
          seen[p][n] = 1;
          for (int l = 0; l < L; l++) y[l] = Y[p][n][l];
          r = ref_ppu(y, G);
          tol = 1e-5 * r.mag + 1e-30;
          checks++;
          if (rabs(f2r(out_metric) - r.metric) > tol) begin failures++; $display("metric %g vs %g", f2r(out_metric), r.metric); end
          checks++;
          if (rabs(r.metric - thr) > tol && out_blk.fp8 !== (r.metric > thr)) begin failures++; $display("decision pe%0d col%0d", p, n); end
          checks++;
          if (out_blk.fp8 ? (out_blk.data !== r.c8) : (out_blk.data[BS*4-1:0] !== r.c4 || out_blk.scale !== r.scale)) begin
            failures++; $display("codes pe%0d col%0d", p, n);
          end
          if (out_blk.fp8) n_fp8++; else n_fp4++;
        end
        got++;
      end
      @(negedge clk);
    end
    out_ready = 1;
    repeat (2) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after tile"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // thresholds place the decision inside the spread of block metrics
    tile(NCOL, WBD, 5, 0, 8.0e2);
    tile(8, 4, 900, 1, 2.0e1);
    // K = 11008 (688 blocks) in three chained commands
    tile(4, 256, 687, 0, 8.0e2, 1, 0);
    tile(4, 256, 687, 0, 8.0e2, 0, 0);
    tile(4, 176, 687, 1, 8.0e2, 0, 1);
    $display("stall %0d conflict %0d fp8 %0d fp4 %0d units %0d %0d %0d %0d", n_stall, n_conflict, n_fp8, n_fp4,
             unit_cnt[0], unit_cnt[1], unit_cnt[2], unit_cnt[3]);
    checks++; if (n_stall == 0)    begin failures++; $display("no PE stall"); end
    checks++; if (n_conflict == 0) begin failures++; $display("no arbitration conflict"); end
    checks++; if (n_fp8 == 0)      begin failures++; $display("no FP8 output block"); end
    checks++; if (n_fp4 == 0)      begin failures++; $display("no FP4 output block"); end
    for (int u = 0; u < 4; u++) begin
      checks++; if (unit_cnt[u] == 0) begin failures++; $display("unit %0d unused", u); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
