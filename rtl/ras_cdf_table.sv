// ras_cdf_table: shared cumulative-frequency table.
//
// Holds C(0..ALPHABET) of the current distribution, written once by the SPC
// and read by every lane over the arbitrated bus. A read of symbol x returns
// both C(x) and C(x+1): the encoder needs C(x) and f(x) = C(x+1) - C(x), and a
// decoder probe or verification compares the slot with the same pair. That
// the table is shared and cached for both coders is from the paper; the paired
// read and its timing are this design's choices.
//
// Timing: write on the clock edge; read data registered, valid one cycle
// after re (data held while re is low).
module ras_cdf_table
  import ras_pkg::*;
(
  input  logic              clk,
  input  logic              we,
  input  logic [SYM_BITS:0] waddr,
  input  cum_t              wdata,
  input  logic              re,
  input  sym_t              raddr,
  output cdf_pair_t         rdata
);

  cum_t mem [ALPHABET+1];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) begin
      rdata.cum      <= mem[{1'b0, raddr}];
      rdata.cum_next <= mem[{1'b0, raddr} + 1'b1];
    end
  end

endmodule
