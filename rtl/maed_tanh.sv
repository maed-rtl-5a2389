// maed_tanh -- tanh with MAED error detection, built from the sigmoid unit's submodules.
//
// With u = 2x and the Maclaurin terms T_k = u^k/k!, the summation unit gives in mode 1
// s1 = e^-u + 1 and in mode 0 E = e^u. The output is
//     y = (1 - e^-2x) / (1 + e^-2x) = (2 - s1) / s1.
// The check follows the paper's identity for tanh: alpha = (1 - y)/(1 + y) recovers e^-2x
// from the output, h2 = (alpha - 1)/(alpha + 1), and h2 must match
//     g2 = (e^-2x - 1)/(e^-2x + 1) = (1 - E)/(1 + E),
// which is taken from the mode-0 sum, i.e. from the terms without the negation. A skipped
// negation, a corrupted term or a faulty division makes |h2 - g2| exceed EPS and raises err.
// The identity and the reuse of the sigmoid's submodules (term_calc, fp_sum_terms, fp_div,
// fp_addsub) are the paper's; the paper gives no tanh hardware, so the schedule below, the
// expression of g2 through e^2x and the default EPS are this design's choices.
//
// Schedule (cycle 1 is the cycle in which start is high; N = N_TERMS):
//   cycles 1..N   T_1..T_N of u = 2x          cycle N+1   s1 <= mode-1 sum
//   cycle  N+2    y <= (2 - s1)/s1 -> y_valid  cycle N+3   E <= mode-0 sum, alpha <= (1-y)/(1+y)
//   cycle  N+4    err <= |h2 - g2| > EPS -> done
// Interface and handshake as maed_sigmoid.
module maed_tanh
  import fp32_pkg::*;
#(
  parameter int unsigned N_TERMS = 5,
  parameter fp32_t       EPS     = 32'h3C80_0000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  fp32_t      x,
  input  fault_cfg_t fault,
  output logic       busy,
  output logic       y_valid,
  output fp32_t      y,
  output logic       done,
  output logic       err
);
  localparam int unsigned KW = $clog2(N_TERMS + 1);

  typedef enum logic [2:0] {S_IDLE, S_TERM, S_SUM, S_DIV, S_EXP, S_CHK} state_e;
  state_e state;

  logic [KW-1:0] k;
  logic          tc_load, tc_step, sum_mode;
  fp32_t         u, terms [N_TERMS];
  fp32_t         sum, s1_q, e_q, alpha_q;
  fp32_t         y_num, y_new, omy, opy, alpha, am1, ap1, h2, ome, ope, g2, resid;

  assign tc_load  = (state == S_IDLE) && start;
  assign tc_step  = (state == S_TERM);
  assign sum_mode = (state == S_SUM);

  fp_addsub u_dbl (.a(x), .b(x), .sub(1'b0), .s(u));   // u = 2x (exact)

  term_calc #(.N_TERMS(N_TERMS)) u_term (
    .clk, .rst_n, .load(tc_load), .step(tc_step), .k(tc_load ? KW'(1) : k), .x(u), .fault,
    .terms
  );

  fp_sum_terms #(.N_TERMS(N_TERMS)) u_sum (
    .mode(sum_mode), .skip_neg(fault.en && fault.model == FLT_NEG), .terms, .sum
  );

  // y = (2 - s1) / s1
  fp_addsub u_ynum (.a(FP_TWO), .b(s1_q), .sub(1'b1), .s(y_num));
  fp_div    u_ydiv (.a(y_num), .b(s1_q), .q(y_new));

  // alpha = (1 - y) / (1 + y)
  fp_addsub u_omy (.a(FP_ONE), .b(y), .sub(1'b1), .s(omy));
  fp_addsub u_opy (.a(FP_ONE), .b(y), .sub(1'b0), .s(opy));
  fp_div    u_adiv (.a(omy), .b(opy), .q(alpha));

  // h2 = (alpha - 1) / (alpha + 1)
  fp_addsub u_am1 (.a(alpha_q), .b(FP_ONE), .sub(1'b1), .s(am1));
  fp_addsub u_ap1 (.a(alpha_q), .b(FP_ONE), .sub(1'b0), .s(ap1));
  fp_div    u_hdiv (.a(am1), .b(ap1), .q(h2));

  // g2 = (1 - E) / (1 + E)
  fp_addsub u_ome (.a(FP_ONE), .b(e_q), .sub(1'b1), .s(ome));
  fp_addsub u_ope (.a(FP_ONE), .b(e_q), .sub(1'b0), .s(ope));
  fp_div    u_gdiv (.a(ome), .b(ope), .q(g2));

  fp_addsub u_res (.a(h2), .b(g2), .sub(1'b1), .s(resid));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k       <= '0;
      s1_q    <= FP_ONE;
      e_q     <= FP_ZERO;
      alpha_q <= FP_ZERO;
      y       <= FP_ZERO;
      err     <= 1'b0;
      y_valid <= 1'b0;
      done    <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          err   <= 1'b0;
          k     <= KW'(2);
          state <= (N_TERMS > 1) ? S_TERM : S_SUM;
        end
        S_TERM: begin
          if (k == KW'(N_TERMS)) state <= S_SUM;
          k <= k + KW'(1);
        end
        S_SUM: begin
          s1_q  <= sum;
          state <= S_DIV;
        end
        S_DIV: begin
          y       <= y_new;
          y_valid <= 1'b1;
          state   <= S_EXP;
        end
        S_EXP: begin
          e_q     <= sum;
          alpha_q <= alpha;
          state   <= S_CHK;
        end
        S_CHK: begin
          err   <= fp32_is_nan(resid) || (resid[30:0] > EPS[30:0]);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  a_no_start_when_busy: assert property (p_no_start_when_busy)
    else $warning("maed_tanh: start while busy is ignored");
endmodule
