// tb_mu_scale: E4M3 microscale of a block maximum, checked against a
// brute-force nearest-E4M3 search of FP32(amax * FP32(1/6)); covers the
// subnormal range, saturation at 448 and the zero-maximum case.
module tb_mu_scale;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  fp32_t amax;
  logic [7:0] scale;

  mu_scale dut (.amax(amax), .scale(scale));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e;
    for (int t = 0; t < 1500; t++) begin
      if (t == 0) amax = 32'd0;
      else if (t == 1) amax = 32'h45000000; // 2048 -> saturates
      else amax = pos_fp32(-14, 12);
      #1;
      e = ref_scale(f2r(amax));
      checks++;
      if (scale !== e) begin failures++; if (failures < 10) $display("amax %g got %h exp %h", f2r(amax), scale, e); end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
