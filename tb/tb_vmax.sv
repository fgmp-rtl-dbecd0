// tb_vmax: block maximum magnitude against a real-arithmetic model.
module tb_vmax;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  fp32_t [BS-1:0] y;
  fp32_t amax;

  vmax dut (.y(y), .amax(amax));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real m;
    for (int t = 0; t < 500; t++) begin
      m = 0.0;
      for (int i = 0; i < BS; i++) begin
        y[i] = (t % 7 == 0 && i % 3 == 0) ? 32'd0 : rand_fp32(-10, 10);
        if (rabs(f2r(y[i])) > m) m = rabs(f2r(y[i]));
      end
      #1;
      checks++;
      if (f2r(amax) != m) begin failures++; $display("got %g exp %g", f2r(amax), m); end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
