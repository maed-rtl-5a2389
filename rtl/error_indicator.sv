// error_indicator -- the sigmoid consistency check of MAED.
//
// For a correct sigmoid output y = 1/(1 + e^-x), the ratio y / (1 - y) equals e^x. This
// block divides y by 1 - y (an fp_div instance) and compares the ratio with e^x taken
// independently from the Maclaurin series (fp_sum_terms in mode 0). The error flag is raised
// when |y/(1-y) - e^x| > EPS, or when the residual is not a number. The check and its
// threshold follow the paper; the paper's drawing shows the comparison as an XOR, which is
// the EPS = 0 case of this test. The default EPS (2^-6) is this design's choice for five
// single-precision terms: with five terms, e^x and 1/(e^-x + 1 - 1) agree only to about
// 1e-2 at |x| = 1, so a smaller threshold would flag fault-free results.
//
// Interface: y, one_minus_y (= 1 - y, computed by the caller), ex (= e^x), err. Combinational.
module error_indicator
  import fp32_pkg::*;
#(
  parameter fp32_t EPS = 32'h3C80_0000
) (
  input  fp32_t y,
  input  fp32_t one_minus_y,
  input  fp32_t ex,
  output fp32_t h,
  output logic  err
);
  fp32_t resid;

  fp_div    u_div (.a(y), .b(one_minus_y), .q(h));
  fp_addsub u_sub (.a(h), .b(ex), .sub(1'b1), .s(resid));

  // For non-negative numbers the IEEE bit pattern orders like the value.
  assign err = fp32_is_nan(resid) || (resid[30:0] > EPS[30:0]);
endmodule
