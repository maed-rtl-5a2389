// relu_checker -- ReLU with MAED recomputation check on the negated operand.
//
// ReLU(x) = max(0, x) is computed twice: once on x and once on -x. For any x the two
// results add up to |x|, so their sum is non-zero exactly when x is non-zero. The check
// h3 is 0 (no error) when (ReLU(x) + ReLU(-x) != 0 and x != 0) or (the sum is 0 and x is 0),
// and 1 otherwise. A fault that forces the ReLU output to zero for a positive x, the effect
// of the DeepLaser attack, makes the sum zero while x is not, and is caught. The check is
// the paper's; the single register stage, the floating-point sum through fp_addsub and the
// handling of -0.0 as zero are this design's choices.
//
// Interface: valid_in/x in; one cycle later valid_out, y = ReLU(x) and err = h3.
// force_zero is a fault-injection test hook that forces the first ReLU(x) to zero; tie it
// to 0 in normal use.
module relu_checker
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid_in,
  input  fp32_t x,
  input  logic  force_zero,
  output logic  valid_out,
  output fp32_t y,
  output logic  err
);
  fp32_t relu_p, relu_n, neg_x, rsum;
  logic  h3;

  assign neg_x  = {~x[31], x[30:0]};
  assign relu_p = (force_zero || x[31]) ? FP_ZERO : x;        // ReLU(x)
  assign relu_n = neg_x[31] ? FP_ZERO : neg_x;                // ReLU(-x), recomputed

  fp_addsub u_sum (.a(relu_p), .b(relu_n), .sub(1'b0), .s(rsum));

  always_comb begin
    logic sum_nz, x_nz;
    sum_nz = !fp32_is_zero(rsum);
    x_nz   = !fp32_is_zero(x);
    if (sum_nz && x_nz)        h3 = 1'b0;
    else if (!sum_nz && !x_nz) h3 = 1'b0;
    else                       h3 = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      y         <= FP_ZERO;
      err       <= 1'b0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) begin
        y   <= relu_p;
        err <= h3;
      end
    end
  end
endmodule
