// fp_sum_terms -- the multi-operand Maclaurin-series adder with a mode input.
//
// Adds a constant and the N_TERMS series terms T_k = x^k/k! in one clock cycle:
//   mode 0:  1 + T_1 + T_2 + ... + T_N            (= e^x,      the check value)
//   mode 1:  2 - T_1 + T_2 - ... +/- T_N          (= e^-x + 1, the sigmoid denominator)
// In mode 1 every odd-power term is negated, because e^-x has those terms with a minus
// sign. The paper gives this unit's function (six operands for five terms, a constant of 1
// or 2, a mode that negates inputs to reach e^-x + 1, one cycle); the chain of two-input
// fp_addsub instances, constant first, is this design's choice.
//
// skip_neg is a fault-injection test hook of this design: when set, mode 1 adds the odd
// terms instead of subtracting them, which is the effect of the DeepLaser attack that skips
// the negation in the exponent. Keep it 0 in normal use.
//
// Interface: mode, skip_neg, terms[k-1] = T_k, sum. Combinational.
module fp_sum_terms
  import fp32_pkg::*;
#(
  parameter int unsigned N_TERMS = 5
) (
  input  logic  mode,
  input  logic  skip_neg,
  input  fp32_t terms [N_TERMS],
  output fp32_t sum
);
  fp32_t part [N_TERMS+1];

  assign part[0] = mode ? FP_TWO : FP_ONE;

  for (genvar k = 1; k <= N_TERMS; k++) begin : g_add
    // T_k has power k: odd k is subtracted in mode 1.
    fp_addsub u_add (.a(part[k-1]), .b(terms[k-1]), .sub(mode && !skip_neg && (k % 2 == 1)), .s(part[k]));
  end

  assign sum = part[N_TERMS];
endmodule
