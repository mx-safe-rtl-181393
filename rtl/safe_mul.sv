// safe_mul: the "Mul." box of the SAFE-MAC, an E4M5 x E4M5 floating-point
// multiplier whose operand exponent range covers both MXSF modes.
//
// The 6x6-bit significand product (exact, 12 bits) is rounded to the
// FP12_E4M7 partial-sum format used by the adder tree: 8 significant bits,
// ties away from zero, flushed to zero below 2^-11 and saturated above the
// FP12 range (it cannot overflow for decoded MXSF inputs). Exponents stay
// relative to the two blocks' shared exponents, which are applied later in
// the accumulator. Purely combinational.
// The paper fixes the operand and result formats; the rounding, flush and
// FP12 bias are this design's choices.
module safe_mul
  import mxsf_pkg::*;
(
  input  e4m5_t a,
  input  e4m5_t b,
  output fp12_t p
);
  logic [11:0] prod;
  always_comb begin
    prod = {1'b1, a.m} * {1'b1, b.m};
    if (a.e == 4'd0 || b.e == 4'd0) p = '0;
    else p = fp12_round(a.s ^ b.s, {12'd0, prod},
                        int'(a.e) + int'(b.e) - 2 * int'(E4M5_BIAS) - 10);
  end
endmodule
