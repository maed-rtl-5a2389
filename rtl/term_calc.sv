// term_calc -- Maclaurin term generator: writes T_k = x^k / k! into the term registers,
// one term per clock cycle.
//
// Datapath (as drawn in the paper's term-calculation sub-block): a mux selects x or the
// running power r as one multiplier input, the other input is x, so the product is the next
// power x^k; the product goes straight on to a divider whose divisor is k!, chosen by a
// second mux from the constants 2!, 3!, ..., N!; the quotient is written into term register
// k, and the product into r. The k! constants are computed when the design is elaborated
// (fp32_pkg::fp32_factorial), not read from a file.
//
// Sequencing (this design's choice, consistent with the paper's five cycles for five terms):
//   load  (k = 1): x is captured, T_1 = x is written directly (x^1/1! needs no arithmetic),
//                  every other term register is cleared.
//   step  (k >= 2): T_k = (x * (k == 2 ? x : r)) / k!, r <= x^k.
// Interface: k is the index of the term written this cycle; terms[k-1] holds T_k.
//
// Fault hook: when fault.en is set and bit k-1 of fault.term_sel is set, the value
// written into term register k is corrupted by fault.model (bit flip, stuck-at-1,
// stuck-at-0, skip = not written so it stays 0, or replaced by fault.mask). This mirrors the
// fault study, which corrupts the register that holds x^k/k!. It is a test hook of this
// design; with fault.en = 0 it has no effect.
module term_calc
  import fp32_pkg::*;
#(
  parameter int unsigned N_TERMS = 5,
  localparam int unsigned KW     = $clog2(N_TERMS + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic       step,
  input  logic [KW-1:0] k,
  input  fp32_t      x,
  input  fault_cfg_t fault,
  output fp32_t      terms [N_TERMS]
);
  fp32_t x_q, r_q;
  fp32_t fact [N_TERMS+1];
  fp32_t mul_in, pow, fact_sel, term_new, term_wr;

  for (genvar i = 0; i <= N_TERMS; i++) begin : g_fact
    localparam fp32_t F = fp32_factorial(i);
    assign fact[i] = F;
  end

  assign mul_in   = (k == KW'(2)) ? x_q : r_q;
  assign fact_sel = (k <= KW'(N_TERMS)) ? fact[k] : FP_ONE;

  fp_mul u_mul (.a(x_q), .b(mul_in), .p(pow));
  fp_div u_div (.a(pow), .b(fact_sel), .q(term_new));

  logic hit;
  always_comb begin
    hit     = fault.en && (k != '0) && (32'(k) <= 32'd32) && fault.term_sel[5'(k - KW'(1))];
    term_wr = load ? x : term_new;
    if (hit) begin
      unique case (fault.model)
        FLT_FLIP: term_wr = term_wr ^ fault.mask;
        FLT_SA1:  term_wr = term_wr | fault.mask;
        FLT_SA0:  term_wr = term_wr & ~fault.mask;
        FLT_RAND: term_wr = fault.mask;
        default:  ;  // FLT_SKIP: handled by not writing
      endcase
    end
  end

  logic skip;
  assign skip = hit && (fault.model == FLT_SKIP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= FP_ZERO;
      r_q <= FP_ZERO;
      for (int i = 0; i < N_TERMS; i++) terms[i] <= FP_ZERO;
    end else if (load) begin
      x_q <= x;
      r_q <= x;
      for (int i = 0; i < N_TERMS; i++) terms[i] <= FP_ZERO;
      if (!skip) terms[0] <= term_wr;
    end else if (step) begin
      r_q <= pow;
      if (!skip && k >= KW'(2) && k <= KW'(N_TERMS)) terms[k-1] <= term_wr;
    end
  end
endmodule
