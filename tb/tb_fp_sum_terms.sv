// tb_fp_sum_terms -- self-checking testbench of fp_sum_terms (five terms, both modes).
// For random x in [-3, 3] the terms x^k/k! are formed in double precision and rounded to
// single precision; the unit's mode-0 sum must match 1 + sum T_k and its mode-1 sum
// 2 + sum (-1)^k T_k, both computed in double precision from the same rounded terms, to
// within a few ulp of the largest operand. skip_neg must turn mode 1 into 2 + sum T_k.
// A watchdog ends the run.
module tb_fp_sum_terms;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 5;
  fp32_t terms [N];
  fp32_t sum;
  logic  mode, skip_neg;
  int checks = 0, failures = 0;

  fp_sum_terms #(.N_TERMS(N)) dut (.mode, .skip_neg, .terms, .sum);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, t, want, big;
    real rt [N];
    for (int i = 0; i < 2000; i++) begin
      x = urand_real(-3.0, 3.0);
      t = 1.0;
      big = 2.0;
      for (int k = 1; k <= N; k++) begin
        t = t * x / k;
        terms[k-1] = r2fp(t);
        rt[k-1] = fp2r(terms[k-1]);
        if (rt[k-1] > big) big = rt[k-1];
        if (-rt[k-1] > big) big = -rt[k-1];
      end
      for (int m = 0; m < 3; m++) begin
        mode     = (m != 0);
        skip_neg = (m == 2);
        #1;
        want = mode ? 2.0 : 1.0;
        for (int k = 1; k <= N; k++)
          want = want + ((mode && !skip_neg && (k % 2 == 1)) ? -rt[k-1] : rt[k-1]);
        checks++;
        if (!close(fp2r(sum), want, 0.0, big * 8.0 * 1.2e-7)) begin
          failures++;
          $display("FAIL x=%f mode=%0d skip=%0d: got %g want %g", x, mode, skip_neg,
                   fp2r(sum), want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
