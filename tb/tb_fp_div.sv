// tb_fp_div -- self-checking testbench of fp_div (Newton-Raphson divider).
// Random quotients over a wide exponent range are compared with the double-precision
// quotient; the divider is not correctly rounded, so a relative tolerance of 4 ulp (2.4e-7)
// is allowed. Exact cases (1/2, 6/3, 1/1) and the special cases are checked bit-exactly.
// A watchdog ends the run.
module tb_fp_div;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  fp32_t a, b, q;
  int checks = 0, failures = 0;

  fp_div dut (.a, .b, .q);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_exact(fp32_t want, string what);
    checks++;
    if (q !== want) begin
      failures++;
      $display("FAIL %s: %h / %h = %h, want %h", what, a, b, q, want);
    end
  endtask

  initial begin
    real ra, rb, rq;
    for (int i = 0; i < 3000; i++) begin
      ra = urand_real(-4.0, 4.0) * pow2(int'($urandom_range(0, 40)) - 20);
      rb = urand_real(-4.0, 4.0) * pow2(int'($urandom_range(0, 40)) - 20);
      a = r2fp(ra);
      b = r2fp(rb);
      #1;
      if (fp32_is_zero(b)) continue;
      rq = fp2r(a) / fp2r(b);
      checks++;
      if (!close(fp2r(q), rq, 2.4e-7, 0.0)) begin
        failures++;
        $display("FAIL random: %h / %h = %h (%g), want %g", a, b, q, fp2r(q), rq);
      end
    end
    a = FP_ONE;        b = FP_TWO;        #1; check_exact(32'h3F00_0000, "1/2");
    a = 32'h40C0_0000; b = 32'h4040_0000; #1; check_exact(FP_TWO, "6/3");
    a = FP_ONE;        b = FP_ONE;        #1; check_exact(FP_ONE, "1/1");
    a = FP_ONE;        b = FP_ZERO;       #1; check_exact(32'h7F80_0000, "1/0");
    a = FP_ZERO;       b = FP_ZERO;       #1; check_exact(FP_QNAN, "0/0");
    a = FP_ZERO;       b = FP_TWO;        #1; check_exact(FP_ZERO, "0/2");
    a = 32'hC000_0000; b = 32'h7F80_0000; #1; check_exact(32'h8000_0000, "-2/inf");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
