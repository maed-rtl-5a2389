// fp_mul -- combinational IEEE 754 single-precision multiplier.
//
// The result is available in the same clock cycle as the operands. The sign is the XOR of
// the operand signs, the exponent is the sum of the operand exponents less the bias, and the
// two 24-bit significands (hidden one included) give a 48-bit product that is shifted by one
// place when it carries out. The bits below the kept 24 decide the rounding. This structure
// follows the paper's description of its multiplier; the rounding mode (nearest-even), the
// flush of subnormals to zero and the NaN/infinity encodings are this design's choices and
// live in fp32_pkg::fp32_mul_f.
//
// Interface: a, b operands; p = a*b. No clock, no state.
module fp_mul
  import fp32_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);
  always_comb p = fp32_mul_f(a, b);
endmodule
