// ras_predictor: anchor and window of prediction-guided decoding.
//
// Proposes where the next pixel value probably lies. The anchor mu is the
// average of the eight already-decoded pixels of the 3x3 block whose
// bottom-right corner is the pixel being decoded: two full rows above
// (columns c-2..c) and the two pixels to the left in the current row. The sum
// is taken over all eight and divided by 8 with floor rounding (for the
// neighbourhood 196 211 194 / 200 214 203 / 204 189 this gives 201). Where
// those eight do not all exist (first two rows or columns), the previous
// pixel of the row is the anchor, and for the very first pixel of a row 0.
// The search window is [mu - DELTA, mu + DELTA] clipped to the alphabet.
// The neighbourhood, DELTA = 8 and the averaging follow the paper; the exact
// fallback order is this design's reading of "neighbor averages with
// last-value/zero fallback". Purely combinational.
module ras_predictor
  import ras_pkg::*;
#(
  parameter int unsigned DELTA = 8
) (
  input  sym_t nbr [8],
  input  logic nbr_ok,
  input  sym_t last,
  input  logic last_ok,
  output sym_t mu,
  output sym_t lo,
  output sym_t hi
);

  always_comb begin
    logic [SYM_BITS+2:0] sum;
    sum = '0;
    for (int i = 0; i < 8; i++) sum = sum + (SYM_BITS+3)'(nbr[i]);
    if (nbr_ok)       mu = sum[SYM_BITS+2:3];
    else if (last_ok) mu = last;
    else              mu = '0;
    lo = (int'(mu) < int'(DELTA)) ? '0 : mu - SYM_BITS'(DELTA);
    hi = (int'(mu) + int'(DELTA) > int'(ALPHABET) - 1) ? SYM_BITS'(ALPHABET - 1) : mu + SYM_BITS'(DELTA);
  end

endmodule
