// tb_ppu: end-to-end test of the post-processing unit. Random output blocks
// with random sensitivities stream in with random backpressure; every output
// block is checked against the reference model: NVFP4 codes and scale or FP8
// codes, the metadata bit (= metric > threshold where the model's metric is
// clearly away from the threshold), the tag order, and the 3-cycle latency
// with one block per cycle when nothing stalls. Both formats must occur.
module tb_ppu;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  localparam int NBLK = 400;
  int checks = 0, failures = 0;
  int n_fp8 = 0, n_fp4 = 0, n_stall = 0;
  logic clk = 0, rst_n = 0;
  fp32_t thr;
  logic in_valid, in_ready, out_valid, out_ready;
  fp32_t [BS-1:0] in_y, in_sens;
  logic [7:0] in_tag, out_tag;
  fgmp_block_t out_blk;
  fp32_t out_metric;

  fp32_t yv [NBLK][BS];
  fp32_t gv [NBLK][BS];

  ppu #(.TAG_W(8)) dut (.clk(clk), .rst_n(rst_n), .threshold(thr), .in_valid(in_valid), .in_ready(in_ready),
    .in_y(in_y), .in_sens(in_sens), .in_tag(in_tag), .out_valid(out_valid), .out_ready(out_ready),
    .out_blk(out_blk), .out_metric(out_metric), .out_tag(out_tag));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check_block(input int k);
    ppu_ref_t r;
    real tol;
    logic exp_fp8;
    r   = ref_ppu(yv[k], gv[k]);
    tol = 1e-5 * r.mag + 1e-30;
    checks++;
    if (out_tag !== 8'(k)) begin failures++; $display("tag got %0d exp %0d", out_tag, k); end
    checks++;
    if (rabs(f2r(out_metric) - r.metric) > tol) begin failures++; $display("metric %g vs %g", f2r(out_metric), r.metric); end
    exp_fp8 = (rabs(r.metric - f2r(thr)) > tol) ? (r.metric > f2r(thr)) : out_blk.fp8;
    checks++;
    if (out_blk.fp8 !== exp_fp8) begin failures++; $display("blk %0d decision", k); end
    checks++;
    if (out_blk.fp8) begin
      n_fp8++;
      if (out_blk.data !== r.c8) begin failures++; $display("blk %0d fp8 codes", k); end
    end else begin
      n_fp4++;
      if (out_blk.data[BS*4-1:0] !== r.c4 || out_blk.scale !== r.scale) begin failures++; $display("blk %0d fp4 codes", k); end
    end
  endfunction

  initial begin
    int sent, got, t_first_in, t_first_out;
    int cyc;
    in_valid = 0; out_ready = 1; in_y = '0; in_sens = '0; in_tag = 0;
    // typical metric of these blocks is around 1; threshold chosen to split them
    thr = 32'h3F800000;
    for (int k = 0; k < NBLK; k++)
      for (int i = 0; i < BS; i++) begin
        yv[k][i] = rand_fp32(-4, 4);
        gv[k][i] = pos_fp32(-6, (k % 2) ? 2 : -3);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    sent = 0; got = 0; cyc = 0;
    t_first_in = -1; t_first_out = -1;
    while (got < NBLK) begin
      @(negedge clk);
      cyc++;
      // first 40 blocks: no backpressure, to measure latency and rate
      out_ready = (got < 40) ? 1'b1 : ($urandom_range(0, 3) != 0);
      if (out_valid && out_ready) begin
        if (t_first_out < 0) t_first_out = cyc;
        check_block(got);
        got++;
        if (got == 40) begin
          checks++;
          if (cyc - t_first_out != 39) begin failures++; $display("rate: 40 blocks in %0d cycles", cyc - t_first_out + 1); end
        end
      end
      if (out_valid && !out_ready) n_stall++;
      if (in_valid && in_ready) sent++;
      if (sent < NBLK) begin
        in_valid = 1;
        for (int i = 0; i < BS; i++) begin in_y[i] = yv[sent][i]; in_sens[i] = gv[sent][i]; end
        in_tag = 8'(sent);
        if (t_first_in < 0) t_first_in = cyc;
      end else in_valid = 0;
    end
    checks++;
    if (t_first_out - t_first_in != 3) begin failures++; $display("latency %0d", t_first_out - t_first_in); end
    checks++;
    if (n_fp8 == 0 || n_fp4 == 0 || n_stall == 0) failures++;
    $display("fp8 %0d fp4 %0d stall cycles %0d latency %0d", n_fp8, n_fp4, n_stall, t_first_out - t_first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
