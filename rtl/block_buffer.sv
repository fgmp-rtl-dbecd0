// block_buffer: on-PE SRAM for FGMP blocks, used as the activation buffer and
// as each lane's weight buffer.
//
// The paper names these buffers but gives neither their size nor their
// ports. This design uses a simple dual-port memory: one write port filled
// from the memory system and one read port with one cycle of read latency
// (rdata is valid the cycle after re). Each word is a whole block with its
// FP8 metadata bit and microscale, so one block is delivered per cycle, the
// rate at which the datapath consumes them. DEPTH is this design's choice.
module block_buffer
  import fgmp_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        we,
  input  logic [AW-1:0] waddr,
  input  fgmp_block_t wdata,
  input  logic        re,
  input  logic [AW-1:0] raddr,
  output fgmp_block_t rdata
);

  fgmp_block_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
