// block_collector: holding register in front of the lanes, used as the
// activation collector (captures the block read from the activation buffer
// and broadcasts it to all L lanes) and as each lane's weight collector
// (holds the stationary weight block for the whole inner loop).
//
// The paper names the collectors only. Here a collector is a block-wide
// register with a load enable and a valid flag: load captures d and sets
// valid, clear drops valid. q keeps its value until the next load, which
// is what makes the weight operand stationary. One cycle from load to q.
module block_collector
  import fgmp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic        clear,
  input  fgmp_block_t d,
  output fgmp_block_t q,
  output logic        valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q     <= '0;
      valid <= 1'b0;
    end else begin
      if (load) begin
        q     <= d;
        valid <= 1'b1;
      end else if (clear) begin
        valid <= 1'b0;
      end
    end
  end

endmodule
