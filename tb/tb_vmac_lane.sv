// tb_vmac_lane: checks that the lane selects the dot-product unit named by
// the two blocks' FP8 metadata bits (one-hot unit_sel), returns that unit's
// result (psum + dot, compared with the real-arithmetic model) and passes
// the partial sum through unchanged when disabled.
module tb_vmac_lane;
  import fgmp_pkg::*;
  import fgmp_tb_pkg::*;

  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};
  logic        en;
  fgmp_block_t w, a;
  fp32_t       ps, res;
  logic [3:0]  sel;

  vmac_lane dut (.en(en), .w_blk(w), .a_blk(a), .psum_in(ps), .psum_out(res), .unit_sel(sel));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] exp_sel;
    for (int t = 0; t < 400; t++) begin
      en = (t % 10) != 9;
      w  = rand_block(1'($urandom));
      a  = rand_block(1'($urandom));
      ps = rand_fp32(-8, 8);
      #1;
      case ({w.fp8, a.fp8})
        2'b00: exp_sel = 4'b0001;
        2'b11: exp_sel = 4'b0010;
        2'b01: exp_sel = 4'b0100;
        default: exp_sel = 4'b1000;
      endcase
      if (!en) exp_sel = 4'b0000;
      checks++;
      if (sel !== exp_sel) begin
        failures++;
        $display("sel got %b exp %b", sel, exp_sel);
      end
      checks++;
      if (res !== (en ? ref_mac(ps, w, a) : ps)) begin
        failures++;
        if (failures < 10) $display("res got %h exp %h", res, en ? ref_mac(ps, w, a) : ps);
      end
      for (int u = 0; u < 4; u++) if (exp_sel[u]) seen[u]++;
      #1;
    end
    for (int u = 0; u < 4; u++) begin
      checks++;
      if (seen[u] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
