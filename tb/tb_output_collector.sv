// tb_output_collector: random partial-sum writes and reads against a model;
// first forces a zero read; fin_load captures the written value into the
// output register, which holds otherwise.
module tb_output_collector;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [3:0] rd_col, wr_col;
  logic first, wr_en, fin_load;
  fp32_t psum_rd, wr_data, fin_q;
  fp32_t model [16];
  fp32_t fin_model;

  output_collector #(.NCOL(16)) dut (.clk(clk), .rst_n(rst_n), .rd_col(rd_col), .first(first),
    .psum_rd(psum_rd), .wr_en(wr_en), .wr_col(wr_col), .wr_data(wr_data),
    .fin_load(fin_load), .fin_q(fin_q));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_col = 0; wr_col = 0; first = 0; wr_en = 0; fin_load = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); wr_en = 1; wr_col = 4'(i); wr_data = rand_fp32(-5, 5); model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    fin_model = '0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      rd_col = 4'($urandom); first = ($urandom_range(0, 4) == 0);
      #1;
      checks++;
      if (psum_rd !== (first ? 32'd0 : model[rd_col])) begin failures++; $display("read mismatch col %0d", rd_col); end
      wr_en = 1'($urandom); fin_load = ($urandom_range(0, 3) == 0); wr_col = 4'($urandom); wr_data = rand_fp32(-5, 5);
      @(posedge clk);
      if (wr_en) model[wr_col] = wr_data;
      if (fin_load) fin_model = wr_data;
      #1;
      wr_en = 0; fin_load = 0;
      checks++;
      if (fin_q !== fin_model) begin failures++; $display("fin mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
