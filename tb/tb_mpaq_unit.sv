// tb_mpaq_unit: sensitivity-weighted error metric and FP4/FP8 decision.
// The metric is compared with a double-precision model within a relative
// tolerance (the unit rounds each FP32 step); the decision must equal
// metric > threshold, and must agree with the model wherever the model's
// metric is clearly away from the threshold. Thresholds are drawn around the
// metric so that both decisions occur.
module tb_mpaq_unit;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  int n_fp8 = 0, n_fp4 = 0;
  fp32_t [BS-1:0] y, q4, q8, sens;
  fp32_t thr, metric;
  logic fp8_sel;

  mpaq_unit dut (.y(y), .q4(q4), .q8(q8), .sens(sens), .threshold(thr), .metric(metric), .fp8_sel(fp8_sel));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t ya [BS], ga [BS];
    ppu_ref_t r;
    real tol, tv;
    for (int t = 0; t < 600; t++) begin
      for (int i = 0; i < BS; i++) begin
        ya[i] = rand_fp32(-6, 6);
        ga[i] = pos_fp32(-8, 2);
        y[i] = ya[i]; sens[i] = ga[i];
      end
      r = ref_ppu(ya, ga);
      for (int i = 0; i < BS; i++) begin
        q4[i] = r2f(r.q4[i]);
        q8[i] = r2f(r.q8[i]);
      end
      tv  = r.metric * (0.5 + 1.0 * ($urandom_range(0, 1000) / 1000.0));
      thr = r2f(tv);
      #1;
      tol = 1e-5 * r.mag + 1e-30;
      checks++;
      if (rabs(f2r(metric) - r.metric) > tol) begin
        failures++;
        if (failures < 10) $display("metric got %g exp %g", f2r(metric), r.metric);
      end
      checks++;
      if (fp8_sel !== (f2r(metric) > f2r(thr))) begin failures++; $display("decision vs own metric"); end
      if (rabs(r.metric - f2r(thr)) > tol) begin
        checks++;
        if (fp8_sel !== (r.metric > f2r(thr))) begin failures++; $display("decision vs model"); end
      end
      if (fp8_sel) n_fp8++; else n_fp4++;
      #1;
    end
    checks++;
    if (n_fp8 == 0 || n_fp4 == 0) failures++;
    $display("fp8 %0d fp4 %0d", n_fp8, n_fp4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
