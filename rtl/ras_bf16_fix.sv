// ras_bf16_fix: BF16 probability to fixed-point rANS frequency.
//
// Computes f = max(1, round(p * 2^PROB_BITS)) from a BF16 probability p,
// the conversion formula of the paper. A BF16 value is (1.m) * 2^(e-127)
// with a 7-bit fraction m, so p*2^PROB_BITS = M * 2^(e-127+PROB_BITS-7)
// with M = {1,m}. The exponent is aligned by shifting M; one extra guard bit
// below the result gives round-half-up, which keeps the error within half a
// unit of the last fixed-point place.
//
// Own choices: negative, zero and subnormal inputs count as 0 (and so become
// 1 after the clamp); inputs of 1.0 or more, infinities and NaN saturate to
// 2^PROB_BITS - 1. `clamped` flags an input that rounded to 0 and was raised
// to 1. Purely combinational.
module ras_bf16_fix
  import ras_pkg::*;
(
  input  bf16_t bf16,
  output freq_t freq,
  output logic  clamped
);

  localparam int BIAS_SHIFT = 127 - int'(PROB_BITS) + 7;  // e - this = left shift

  logic [7:0]  exp_f;
  logic [7:0]  mant;
  int          sh;
  logic [31:0] scaled;    // M aligned, one guard bit at position 0
  logic [31:0] rounded;

  always_comb begin
    exp_f   = bf16[14:7];
    mant    = {1'b1, bf16[6:0]};
    sh      = int'(exp_f) - BIAS_SHIFT;
    scaled  = '0;
    rounded = '0;
    freq    = '0;
    clamped = 1'b0;
    if (bf16[15] || exp_f == 8'd0) begin
      rounded = '0;
    end else if (exp_f == 8'hFF || sh >= int'(PROB_BITS) - 7) begin
      rounded = 32'(2**PROB_BITS - 1);
    end else begin
      // value with one guard bit: M * 2^(sh+1)
      if (sh + 1 >= 0) scaled = 32'(mant) << (sh + 1);
      else if (sh + 1 > -9) scaled = 32'(mant) >> (-(sh + 1));
      else scaled = '0;
      rounded = (scaled + 32'd1) >> 1;
      if (rounded > 32'(2**PROB_BITS - 1)) rounded = 32'(2**PROB_BITS - 1);
    end
    if (rounded == '0) begin
      freq    = freq_t'(1);
      clamped = 1'b1;
    end else begin
      freq = freq_t'(rounded);
    end
  end

endmodule
