// tb_block_collector: load captures the block one cycle later and sets
// valid, the block is held over idle cycles (stationary operand), clear
// drops valid but keeps the data.
module tb_block_collector;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic load, clear, valid;
  fgmp_block_t d, q;

  block_collector dut (.clk(clk), .rst_n(rst_n), .load(load), .clear(clear), .d(d), .q(q), .valid(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("fail: %s", msg); end
  endtask

  initial begin
    fgmp_block_t ref_q;
    logic ref_v;
    load = 0; clear = 0; d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(valid == 1'b0, "valid after reset");
    ref_q = '0; ref_v = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      load  = ($urandom_range(0, 3) == 0);
      clear = ($urandom_range(0, 5) == 0);
      d     = rand_block(1'($urandom));
      @(negedge clk);
      if (load) begin ref_q = d; ref_v = 1; end
      else if (clear) ref_v = 0;
      load = 0; clear = 0;
      chk(q === ref_q, "data");
      chk(valid === ref_v, "valid");
      d = rand_block(1'($urandom));
      @(negedge clk);
      chk(q === ref_q, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
