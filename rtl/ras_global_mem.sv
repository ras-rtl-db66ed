// ras_global_mem: global memory for BF16 symbol distributions.
//
// The probability model writes absolute symbol distributions, one BF16 value
// per symbol, into NUM_DISTS blocks of ALPHABET entries. A selection mux in
// front of the read port picks the block that the streaming prefetch
// converter (SPC) reads. The block/selection-mux organisation follows the
// architecture figure of the paper; the number of blocks and the memory
// timing are this design's choices.
//
// Interface: one write port (wr_en/wr_blk/wr_idx/wr_data) and one read port.
// Timing: synchronous read, rd_data holds entry (rd_blk, rd_idx) one cycle
// after they are presented.
module ras_global_mem
  import ras_pkg::*;
#(
  parameter int unsigned NUM_DISTS = 4
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(NUM_DISTS)-1:0] wr_blk,
  input  sym_t                         wr_idx,
  input  bf16_t                        wr_data,
  input  logic [$clog2(NUM_DISTS)-1:0] rd_blk,
  input  sym_t                         rd_idx,
  output bf16_t                        rd_data
);

  bf16_t mem [NUM_DISTS*ALPHABET];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_blk, wr_idx}] <= wr_data;
    rd_data <= mem[{rd_blk, rd_idx}];
  end

endmodule
