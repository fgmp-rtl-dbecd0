// tb_quantize_fp8: FP32 -> E4M3 codes and dequantized values against a
// brute-force nearest-value search (ties to even), over normal, subnormal
// and saturating inputs, plus exact ties.
module tb_quantize_fp8;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  fp32_t [BS-1:0] y, deq;
  logic [BS-1:0][7:0] code;

  quantize_fp8 dut (.y(y), .code(code), .deq(deq));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < BS; i++) begin
        if (i == 0) begin
          // midpoint between two neighbouring codes: an exact tie
          int c;
          c = $urandom_range(0, 125);
          y[i] = r2f((e4m3_val(c) + e4m3_val(c + 1)) / 2.0);
        end else y[i] = rand_fp32(-13, 10);
      end
      #1;
      for (int i = 0; i < BS; i++) begin
        e = ref_e4m3(f2r(y[i]));
        checks++;
        if (code[i] !== e || f2r(deq[i]) != e4m3_sval(e)) begin
          failures++;
          if (failures < 10) $display("y %g got %h (%g) exp %h", f2r(y[i]), code[i], f2r(deq[i]), e);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
