// maed_sigmoid -- sigmoid y = 1 / (1 + e^-x) with MAED error detection.
//
// The unit evaluates the sigmoid from a Maclaurin series of e^-x and then checks its own
// output with the identity y / (1 - y) = e^x, where e^x comes from the same cached series
// terms summed without negation. A fault that corrupts a term, skips the negation of the
// exponent or disturbs the division makes the two sides disagree by more than EPS, and err
// is raised. This is the paper's hardware organisation: a term calculation sub-block
// (term_calc), one multi-operand summation unit with a mode input used twice (fp_sum_terms),
// a divider for 1/(1 + e^-x), and an error indicator (error_indicator).
//
// Schedule, one operation at a time (cycle 1 is the cycle in which start is high):
//   cycles 1..N      term_calc writes T_1 .. T_N                      (N = N_TERMS = 5)
//   cycle  N+1       s1  <= 2 - T_1 + T_2 - ...      (fp_sum_terms, mode 1) = e^-x + 1
//   cycle  N+2       y   <= 1 / s1                                       -> y_valid
//   cycle  N+3       ex  <= 1 + T_1 + T_2 + ...      (fp_sum_terms, mode 0) = e^x,
//                    omy <= 1 - y
//   cycle  N+4       err <= |y/omy - ex| > EPS                           -> done
// With N = 5 the sigmoid is ready after 7 cycles and the checked result after 9, the cycle
// counts the paper reports for its baseline and protected designs. The start/busy/valid/done
// handshake, the reset and the registers between the steps are this design's choices.
//
// Interface: start is accepted only while busy is low; x is sampled with it. y_valid and done
// are one-cycle pulses; y and err hold their values until the next start.
// fault: test hook (see fp32_pkg::fault_cfg_t); tie fault.en to 0 in normal use.
module maed_sigmoid
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
  fp32_t         terms [N_TERMS];
  fp32_t         sum, s1_q, recip, omy, omy_q, ex_q, h;
  logic          chk_err;

  assign tc_load  = (state == S_IDLE) && start;
  assign tc_step  = (state == S_TERM);
  assign sum_mode = (state == S_SUM);

  term_calc #(.N_TERMS(N_TERMS)) u_term (
    .clk, .rst_n, .load(tc_load), .step(tc_step), .k(tc_load ? KW'(1) : k), .x, .fault,
    .terms
  );

  fp_sum_terms #(.N_TERMS(N_TERMS)) u_sum (
    .mode(sum_mode), .skip_neg(fault.en && fault.model == FLT_NEG), .terms, .sum
  );

  fp_div    u_ydiv (.a(FP_ONE), .b(s1_q), .q(recip));
  fp_addsub u_omy  (.a(FP_ONE), .b(y), .sub(1'b1), .s(omy));

  error_indicator #(.EPS(EPS)) u_chk (
    .y(y), .one_minus_y(omy_q), .ex(ex_q), .h(h), .err(chk_err)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k       <= '0;
      s1_q    <= FP_ONE;
      y       <= FP_ZERO;
      omy_q   <= FP_ONE;
      ex_q    <= FP_ZERO;
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
          y       <= recip;
          y_valid <= 1'b1;
          state   <= S_EXP;
        end
        S_EXP: begin
          ex_q  <= sum;
          omy_q <= omy;
          state <= S_CHK;
        end
        S_CHK: begin
          err   <= chk_err;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // A start while busy is ignored; flag it in simulation.
  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  a_no_start_when_busy: assert property (p_no_start_when_busy)
    else $warning("maed_sigmoid: start while busy is ignored");
endmodule
