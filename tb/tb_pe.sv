// tb_pe: one processing element computing (16 x K) x (K x N) tiles with a
// random mix of NVFP4 and FP8 weight and activation blocks. Every output
// block (16 lane sums of a column) is compared bit-exactly with a model that
// repeats the lane's FP32 accumulation order. Run 1 accepts every output
// and checks the cycle count n_kb*(N+2)+3 from start to the last output;
// run 2 applies random backpressure, which must stall the PE, and still
// checks all sums. Run 3 splits K over three chained tile commands
// (k_first / k_last), refilling the buffers in between; no block may leave
// before the last one. All four dot-product units must be used.
module tb_pe;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  localparam int L = LANES, NCOL = 16, WBD = 16;
  int checks = 0, failures = 0;
  int n_stall = 0;
  int unit_cnt [4] = '{0, 0, 0, 0};
  logic clk = 0, rst_n = 0;
  logic ab_we = 0, wb_we = 0, start = 0, out_ready = 1;
  logic [7:0] ab_waddr = 0;
  logic [3:0] wb_lane = 0, wb_waddr = 0;
  fgmp_block_t ab_wdata = '0, wb_wdata = '0;
  logic [4:0] n_cols = 0;
  logic [4:0] n_kb = 0;
  logic busy, out_valid, stall;
  fp32_t [L-1:0] out_data;
  logic [3:0] out_col, unit_sel;

  fgmp_block_t W [L][WBD];
  fgmp_block_t A [NCOL*WBD];
  fp32_t       PS [L][NCOL];
  logic        k_first = 1, k_last = 1;
  int          n_early = 0;

  pe #(.L(L), .NCOL(NCOL), .WB_DEPTH(WBD)) dut (
    .clk(clk), .rst_n(rst_n), .ab_we(ab_we), .ab_waddr(ab_waddr), .ab_wdata(ab_wdata),
    .wb_we(wb_we), .wb_lane(wb_lane), .wb_waddr(wb_waddr), .wb_wdata(wb_wdata),
    .start(start), .n_cols(n_cols), .n_kb(n_kb),
    .k_first(k_first), .k_last(k_last), .busy(busy),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .out_col(out_col),
    .stall(stall), .unit_sel(unit_sel));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (stall) n_stall++;
    for (int u = 0; u < 4; u++) if (unit_sel[u]) unit_cnt[u]++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nc, input int nk, input bit bp, input bit kf = 1, input bit kl = 1);
    int got, cyc, last_cyc;
    fp32_t ps;
    // fill buffers
    for (int l = 0; l < L; l++)
      for (int k = 0; k < nk; k++) begin
        W[l][k] = rand_block($urandom_range(0, 3) == 0);
        @(negedge clk); wb_we = 1; wb_lane = 4'(l); wb_waddr = 4'(k); wb_wdata = W[l][k];
      end
    @(negedge clk); wb_we = 0;
    for (int a = 0; a < nc * nk; a++) begin
      A[a] = rand_block($urandom_range(0, 3) == 0);
      @(negedge clk); ab_we = 1; ab_waddr = 8'(a); ab_wdata = A[a];
    end
    @(negedge clk); ab_we = 0;
    // reference partial sums after this command
    for (int l = 0; l < L; l++)
      for (int n = 0; n < nc; n++) begin
        if (kf) PS[l][n] = 32'd0;
        for (int k = 0; k < nk; k++) PS[l][n] = ref_mac(PS[l][n], W[l][k], A[k * nc + n]);
      end
    start = 1; n_cols = 5'(nc); n_kb = 5'(nk); k_first = kf; k_last = kl;
    @(negedge clk); start = 0;
    got = 0; cyc = 1; last_cyc = 0;
    if (!kl) begin
      while (busy) begin
        if (out_valid) n_early++;
        @(negedge clk);
      end
      checks++;
      if (n_early != 0) begin failures++; $display("output before the last chained tile"); end
      return;
    end
    while (got < nc) begin
      out_ready = bp ? ($urandom_range(0, 2) == 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (out_col !== 4'(got)) begin failures++; $display("col order %0d vs %0d", out_col, got); end
        for (int l = 0; l < L; l++) begin
          ps = PS[l][got];
          checks++;
          if (out_data[l] !== ps) begin
            failures++;
            if (failures < 10) $display("col %0d lane %0d got %h exp %h", got, l, out_data[l], ps);
          end
        end
        if (got == nc - 1) last_cyc = cyc;
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    out_ready = 1;
    if (!bp) begin
      checks++;
      if (last_cyc != nk * (nc + 2) + 3) begin failures++; $display("cycles %0d exp %0d", last_cyc, nk * (nc + 2) + 3); end
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after last output"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(5, 3, 0);
    run(16, 4, 0);
    run(1, 2, 0);
    run(4, 16, 1);
    run(6, 5, 0, 1, 0);
    run(6, 16, 0, 0, 0);
    run(6, 3, 1, 0, 1);
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    for (int u = 0; u < 4; u++) begin
      checks++;
      if (unit_cnt[u] == 0) begin failures++; $display("unit %0d never used", u); end
    end
    $display("stall cycles %0d, unit use %0d %0d %0d %0d", n_stall, unit_cnt[0], unit_cnt[1], unit_cnt[2], unit_cnt[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
