// vmac_lane: one vector lane of the FGMP mixed-precision VMAC datapath.
//
// A lane holds the four dot-product units of the paper's datapath figure
// (FP4, FP8, FP4/8, FP8/4, named weight format / activation format). The
// metadata bits of the two blocks ("W FP8?", "A FP8?") select the one active
// unit; its result is chosen by the output "Select DPath" multiplexer. The
// three idle units are data-gated: their block inputs are forced to zero so
// that they do not toggle (the paper says idle units are clock- or
// data-gated; data gating by AND-ing the inputs is this design's choice).
// Each cycle the lane computes one BS-wide dot product and adds it to
// psum_in, so throughput is one VMAC per lane per cycle as in the paper.
//
// Combinational. unit_sel reports the active unit as a one-hot vector
// {FP8/4, FP4/8, FP8, FP4} for activity counting.
module vmac_lane
  import fgmp_pkg::*;
(
  input  logic        en,        // 0: all four units gated
  input  fgmp_block_t w_blk,     // stationary weight block
  input  fgmp_block_t a_blk,     // streamed activation block
  input  fp32_t       psum_in,
  output fp32_t       psum_out,
  output logic [3:0]  unit_sel
);

  // unit index: 0 = FP4xFP4, 1 = FP8xFP8, 2 = FP4(W)xFP8(A), 3 = FP8(W)xFP4(A)
  logic [3:0]  sel;
  fgmp_block_t w_g [4];
  fgmp_block_t a_g [4];
  fp32_t       res [4];

  always_comb begin
    sel = 4'b0000;
    if (en) begin
      unique case ({w_blk.fp8, a_blk.fp8})
        2'b00: sel = 4'b0001;
        2'b11: sel = 4'b0010;
        2'b01: sel = 4'b0100;
        2'b10: sel = 4'b1000;
      endcase
    end
    for (int u = 0; u < 4; u++) begin
      w_g[u] = sel[u] ? w_blk : '0;
      a_g[u] = sel[u] ? a_blk : '0;
    end
  end

  dot_unit #(.W_FP8(1'b0), .A_FP8(1'b0)) u_fp4   (.w_blk(w_g[0]), .a_blk(a_g[0]), .psum_in(psum_in), .psum_out(res[0]));
  dot_unit #(.W_FP8(1'b1), .A_FP8(1'b1)) u_fp8   (.w_blk(w_g[1]), .a_blk(a_g[1]), .psum_in(psum_in), .psum_out(res[1]));
  dot_unit #(.W_FP8(1'b0), .A_FP8(1'b1)) u_fp4_8 (.w_blk(w_g[2]), .a_blk(a_g[2]), .psum_in(psum_in), .psum_out(res[2]));
  dot_unit #(.W_FP8(1'b1), .A_FP8(1'b0)) u_fp8_4 (.w_blk(w_g[3]), .a_blk(a_g[3]), .psum_in(psum_in), .psum_out(res[3]));

  // output "Select DPath" multiplexer
  always_comb begin
    psum_out = psum_in;
    for (int u = 0; u < 4; u++) if (sel[u]) psum_out = res[u];
  end

  assign unit_sel = sel;

endmodule
