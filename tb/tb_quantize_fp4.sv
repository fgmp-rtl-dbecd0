// tb_quantize_fp4: E2M1 codes and dequantized values for a block and a
// microscale against a brute-force nearest search of y / s (ties to even,
// clamp at 6), including exact decision-point ties.
module tb_quantize_fp4;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  fp32_t [BS-1:0] y, deq;
  logic [7:0] scale;
  logic [BS-1:0][3:0] code;

  quantize_fp4 dut (.y(y), .scale(scale), .code(code), .deq(deq));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] e;
    real s, pts [7];
    pts = '{0.25, 0.75, 1.25, 1.75, 2.5, 3.5, 5.0};
    for (int t = 0; t < 400; t++) begin
      scale = 8'($urandom_range(1, 126));
      s = e4m3_val(int'(scale));
      for (int i = 0; i < BS; i++) begin
        if (i < 3) y[i] = r2f((($urandom % 2) ? -1.0 : 1.0) * s * pts[$urandom_range(0, 6)]);
        else       y[i] = r2f(f2r(rand_fp32(-3, 3)) * s);
      end
      #1;
      for (int i = 0; i < BS; i++) begin
        e = ref_e2m1(f2r(y[i]), s);
        checks++;
        if (code[i] !== e || f2r(deq[i]) != e2m1_sval(e) * s) begin
          failures++;
          if (failures < 10) $display("y/s %g got %h exp %h", f2r(y[i]) / s, code[i], e);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
