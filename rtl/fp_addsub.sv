// fp_addsub -- combinational IEEE 754 single-precision adder/subtractor for two operands.
//
// s = a + b when sub is 0 and s = a - b when sub is 1, in the same clock cycle. Subtraction
// flips the sign of b and reuses the adder: the operands are ordered by magnitude, the
// smaller significand is shifted right with guard, round and sticky bits, the two are added
// or subtracted, the sum is renormalised by a leading-zero search and rounded to nearest-even.
// The paper states only that a two-input add/subtract unit exists and is used inside the
// divider; its insides are this design's textbook choice (see fp32_pkg::fp32_add_f).
//
// Interface: a, b operands, sub selects subtraction, s result. No clock, no state.
module fp_addsub
  import fp32_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output fp32_t s
);
  always_comb s = fp32_add_f(a, {b[31] ^ sub, b[30:0]});
endmodule
