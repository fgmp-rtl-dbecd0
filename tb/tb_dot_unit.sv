// tb_dot_unit: self-checking test of the four dot-product unit variants.
// Random weight and activation blocks (with random microscales for NVFP4
// operands) and random FP32 partial sums are applied to an FP4xFP4, FP8xFP8,
// FP4xFP8 and FP8xFP4 instance; each result is compared bit-exactly with
// psum + FP32(exact dot product), computed with real arithmetic.
module tb_dot_unit;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  fgmp_block_t w [4], a [4];
  fp32_t       ps, res [4];

  dot_unit #(.W_FP8(1'b0), .A_FP8(1'b0)) u0 (.w_blk(w[0]), .a_blk(a[0]), .psum_in(ps), .psum_out(res[0]));
  dot_unit #(.W_FP8(1'b1), .A_FP8(1'b1)) u1 (.w_blk(w[1]), .a_blk(a[1]), .psum_in(ps), .psum_out(res[1]));
  dot_unit #(.W_FP8(1'b0), .A_FP8(1'b1)) u2 (.w_blk(w[2]), .a_blk(a[2]), .psum_in(ps), .psum_out(res[2]));
  dot_unit #(.W_FP8(1'b1), .A_FP8(1'b0)) u3 (.w_blk(w[3]), .a_blk(a[3]), .psum_in(ps), .psum_out(res[3]));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t exp_v;
    for (int t = 0; t < 400; t++) begin
      w[0] = rand_block(0); a[0] = rand_block(0);
      w[1] = rand_block(1); a[1] = rand_block(1);
      w[2] = rand_block(0); a[2] = rand_block(1);
      w[3] = rand_block(1); a[3] = rand_block(0);
      case (t % 4)
        0: ps = 32'd0;
        1: ps = rand_fp32(-6, 6);
        default: ps = rand_fp32(-20, 20);
      endcase
      #1;
      for (int u = 0; u < 4; u++) begin
        exp_v = ref_mac(ps, w[u], a[u]);
        checks++;
        if (res[u] !== exp_v) begin
          failures++;
          if (failures < 10) $display("unit %0d: got %h exp %h (dot %g psum %g)", u, res[u], exp_v, ref_dot(w[u], a[u]), f2r(ps));
        end
      end
      #1;
    end
    // directed: all-ones FP4 block with unit scales: 16 * (0.5*0.5) = 4.0
    w[0] = '0; a[0] = '0;
    w[0].scale = 8'h38; a[0].scale = 8'h38;       // 1.0
    for (int i = 0; i < BS; i++) begin
      w[0].data[4*i +: 4] = 4'h1;                 // 0.5
      a[0].data[4*i +: 4] = 4'h1;
    end
    ps = 32'h3F800000;                            // 1.0
    #1;
    checks++;
    if (res[0] !== 32'h40A00000) begin
      failures++;
      $display("directed FP4: got %h exp 40a00000", res[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
