// tb_vector_unit: loads sensitivity-table entries and the threshold, sends
// output blocks naming random channel blocks with random backpressure, and
// checks each quantized block against the reference model using the
// sensitivities of the named entry; also checks the 4-cycle latency.
module tb_vector_unit;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  localparam int NBLK = 300, NCB = 8;
  int checks = 0, failures = 0, n_fp8 = 0, n_fp4 = 0;
  logic clk = 0, rst_n = 0;
  logic thr_we = 0, sens_we = 0, in_valid = 0, out_ready = 1;
  fp32_t thr_data = 0;
  logic [9:0] sens_addr = 0, in_cb = 0;
  fp32_t [BS-1:0] sens_data = '0, in_y = '0;
  logic [7:0] in_tag = 0, out_tag;
  logic in_ready, out_valid;
  fgmp_block_t out_blk;
  fp32_t out_metric;

  fp32_t G [NCB][BS];
  fp32_t Y [NBLK][BS];
  int    CB [NBLK];

  vector_unit #(.SENS_DEPTH(1024), .TAG_W(8)) dut (.clk(clk), .rst_n(rst_n),
    .thr_we(thr_we), .thr_data(thr_data), .sens_we(sens_we), .sens_addr(sens_addr), .sens_data(sens_data),
    .in_valid(in_valid), .in_ready(in_ready), .in_y(in_y), .in_cb(in_cb), .in_tag(in_tag),
    .out_valid(out_valid), .out_ready(out_ready), .out_blk(out_blk), .out_metric(out_metric), .out_tag(out_tag));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent, got, cyc, t_in, t_out;
    ppu_ref_t r;
    real tol, thr;
    repeat (2) @(negedge clk);
    rst_n = 1;
    thr = 1.0;
    @(negedge clk); thr_we = 1; thr_data = r2f(thr);
    for (int c = 0; c < NCB; c++) begin
      for (int i = 0; i < BS; i++) G[c][i] = pos_fp32(-6, (c % 2) ? 2 : -3);
      @(negedge clk); thr_we = 0; sens_we = 1; sens_addr = 10'(c * 37);
      for (int i = 0; i < BS; i++) sens_data[i] = G[c][i];
    end
    @(negedge clk); sens_we = 0;
    for (int k = 0; k < NBLK; k++) begin
      CB[k] = $urandom_range(0, NCB - 1);
      for (int i = 0; i < BS; i++) Y[k][i] = rand_fp32(-4, 4);
    end
    sent = 0; got = 0; cyc = 0; t_in = -1; t_out = -1;
    while (got < NBLK) begin
      @(negedge clk);
      cyc++;
      out_ready = (got < 10) ? 1'b1 : ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        if (t_out < 0) t_out = cyc;
        r = ref_ppu(Y[got], G[CB[got]]);
        tol = 1e-5 * r.mag + 1e-30;
        checks++;
        if (out_tag !== 8'(got)) begin failures++; $display("tag"); end
        checks++;
        if (rabs(r.metric - thr) > tol && out_blk.fp8 !== (r.metric > thr)) begin failures++; $display("decision %0d", got); end
        checks++;
        if (out_blk.fp8 ? (out_blk.data !== r.c8) : (out_blk.data[BS*4-1:0] !== r.c4 || out_blk.scale !== r.scale)) begin
          failures++; $display("codes %0d", got);
        end
        if (out_blk.fp8) n_fp8++; else n_fp4++;
        got++;
      end
      if (in_valid && in_ready) sent++;
      if (sent < NBLK) begin
        in_valid = 1; in_cb = 10'(CB[sent] * 37); in_tag = 8'(sent);
        for (int i = 0; i < BS; i++) in_y[i] = Y[sent][i];
        if (t_in < 0) t_in = cyc;
      end else in_valid = 0;
    end
    checks++;
    if (t_out - t_in != 4) begin failures++; $display("latency %0d", t_out - t_in); end
    checks++;
    if (n_fp8 == 0 || n_fp4 == 0) failures++;
    $display("fp8 %0d fp4 %0d latency %0d", n_fp8, n_fp4, t_out - t_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
