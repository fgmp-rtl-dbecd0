// tb_block_buffer: fills the buffer with random blocks, reads them back in a
// random order and checks data and the one-cycle read latency (rdata holds
// when re is low).
module tb_block_buffer;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  localparam int DEPTH = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we, re;
  logic [4:0] waddr, raddr;
  fgmp_block_t wdata, rdata;
  fgmp_block_t model [DEPTH];

  block_buffer #(.DEPTH(DEPTH)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                                     .re(re), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fgmp_block_t held;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 5'(i); wdata = rand_block(1'($urandom)); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      re = 1; raddr = 5'($urandom);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("read %0d mismatch", raddr); end
      held = rdata;
      @(negedge clk);
      checks++;
      if (rdata !== held) begin failures++; $display("rdata did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
