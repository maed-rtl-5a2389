// fp_div -- combinational single-precision divider by Newton-Raphson reciprocal iteration.
//
// q = a / b is formed without long division. The divisor's significand is moved into
// [0.5, 1) by replacing its exponent (D), a first reciprocal estimate is taken from a line,
// X0 = 48/17 - (32/17) * D, and NR_ITERS Newton-Raphson steps X <- X * (2 - D * X) refine
// it, each step built from fp_mul and fp_addsub instances. The quotient significand is
// a * X, and the exponent removed from the divisor is then put back into the result. The
// paper gives this scheme (normalised divisor, constant-times-divisor seed, Newton-Raphson
// update using the multiplier and adder); the seed constants and three iterations are this
// design's choice. With three iterations the seed error (at most 1/17) falls below
// single-precision rounding, but the quotient is not correctly rounded: it may differ from
// the exact quotient by a few units in the last place.
//
// Special cases: NaN operand, 0/0 or inf/inf give NaN; x/0 gives signed infinity; 0/x and
// x/inf give signed zero; inf/x gives signed infinity.
//
// Interface: a dividend, b divisor, q quotient. Fully combinational: one clock cycle in the
// surrounding datapath.
module fp_div
  import fp32_pkg::*;
#(
  parameter int unsigned NR_ITERS = 3
) (
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t q
);
  localparam fp32_t C48_17 = 32'h4034_B4B5;  // 48/17
  localparam fp32_t C32_17 = 32'h3FF0_F0F1;  // 32/17

  fp32_t d_norm;                 // |b| with exponent 126: value in [0.5, 1)
  fp32_t seed_prod;
  fp32_t x    [NR_ITERS+1];      // reciprocal estimates
  fp32_t dx   [NR_ITERS];        // D * X
  fp32_t corr [NR_ITERS];        // 2 - D * X
  fp32_t a_abs, qm;              // |a|, |a| * X

  assign d_norm = {1'b0, 8'd126, b[22:0]};
  assign a_abs  = {1'b0, a[30:0]};

  fp_mul    u_seed_mul (.a(C32_17), .b(d_norm), .p(seed_prod));
  fp_addsub u_seed_sub (.a(C48_17), .b(seed_prod), .sub(1'b1), .s(x[0]));

  for (genvar i = 0; i < NR_ITERS; i++) begin : g_nr
    fp_mul    u_dx   (.a(d_norm), .b(x[i]), .p(dx[i]));
    fp_addsub u_corr (.a(FP_TWO), .b(dx[i]), .sub(1'b1), .s(corr[i]));
    fp_mul    u_upd  (.a(x[i]), .b(corr[i]), .p(x[i+1]));
  end

  fp_mul u_qmul (.a(a_abs), .b(x[NR_ITERS]), .p(qm));

  logic               s;
  logic signed [11:0] e;
  always_comb begin
    s = a[31] ^ b[31];
    // |a|/|b| = (|a| * X) * 2^(126 - exp(b))
    e = $signed({4'd0, qm[30:23]}) + 12'sd126 - $signed({4'd0, b[30:23]});
    if (fp32_is_nan(a) || fp32_is_nan(b))                 q = FP_QNAN;
    else if (fp32_is_inf(a) && fp32_is_inf(b))            q = FP_QNAN;
    else if (fp32_is_zero(a) && fp32_is_zero(b))          q = FP_QNAN;
    else if (fp32_is_inf(a) || fp32_is_zero(b))           q = {s, 8'hFF, 23'd0};
    else if (fp32_is_zero(a) || fp32_is_inf(b))           q = {s, 31'd0};
    else if (fp32_is_zero(qm))                            q = {s, 31'd0};
    else if (e >= 12'sd255)                               q = {s, 8'hFF, 23'd0};
    else if (e <= 12'sd0)                                 q = {s, 31'd0};
    else                                                  q = {s, e[7:0], qm[22:0]};
  end
endmodule
