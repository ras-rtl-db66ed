// ras_divmod: unified division/modulo datapath.
//
// Quotient and remainder of a STATE_BITS-bit dividend by a PROB_BITS-bit
// divisor come out of one restoring-division array: each of the STATE_BITS
// rows shifts in one dividend bit, compares the partial remainder with the
// divisor and subtracts on success; the row results form the quotient and the
// last partial remainder is the modulus. Quotient uses floor rounding, as the
// paper requires for bit-exactness. The paper pipelines its divider; here
// the array is combinational and the encoder registers its outputs, so one
// state update finishes per cycle (this is this design's choice).
// A zero divisor gives quotient all-ones and remainder = dividend low bits;
// callers never divide by zero (every frequency is at least 1).
module ras_divmod
  import ras_pkg::*;
#(
  parameter int unsigned NB = STATE_BITS,
  parameter int unsigned DB = PROB_BITS
) (
  input  logic [NB-1:0] dividend,
  input  logic [DB-1:0] divisor,
  output logic [NB-1:0] quot,
  output logic [DB-1:0] rem
);

  always_comb begin
    logic [DB:0] part;
    part = '0;
    quot = '0;
    for (int i = NB - 1; i >= 0; i--) begin
      part = {part[DB-1:0], dividend[i]};
      if (part >= {1'b0, divisor}) begin
        part    = part - {1'b0, divisor};
        quot[i] = 1'b1;
      end
    end
    rem = part[DB-1:0];
  end

endmodule
