// tb_fp_addsub -- self-checking testbench of fp_addsub.
// Random operand pairs of mixed signs and exponent distances are added and subtracted and
// compared bit-exactly with the double-precision result rounded to single precision (the
// exact sum of two singles whose exponents differ by less than 29 fits a double, so the
// rounding is correct there; pairs further apart are checked with a 1-ulp tolerance).
// Directed cases cover cancellation, zeros, infinities and NaN. A watchdog ends the run.
module tb_fp_addsub;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  fp32_t a, b, s;
  logic  sub;
  int checks = 0, failures = 0;

  fp_addsub dut (.a, .b, .sub, .s);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_exact(fp32_t want, string what);
    checks++;
    if (s !== want) begin
      failures++;
      $display("FAIL %s: %h %s %h = %h, want %h", what, a, sub ? "-" : "+", b, s, want);
    end
  endtask

  initial begin
    real ra, rb, rr;
    fp32_t want;
    int ea, eb;
    for (int i = 0; i < 4000; i++) begin
      ea = int'($urandom_range(0, 30)) - 15;
      eb = ea + int'($urandom_range(0, 60)) - 30;
      ra = urand_real(-2.0, 2.0) * pow2(ea);
      rb = urand_real(-2.0, 2.0) * pow2(eb);
      a = r2fp(ra);
      b = r2fp(rb);
      sub = $urandom_range(0, 1);
      #1;
      rr = sub ? fp2r(a) - fp2r(b) : fp2r(a) + fp2r(b);
      want = r2fp(rr);
      if ((ea - eb < 28) && (eb - ea < 28)) check_exact(want, "random");
      else begin
        checks++;
        if (!close(fp2r(s), rr, 1.2e-7, 0.0)) begin
          failures++;
          $display("FAIL far: %h %h -> %h want %h", a, b, s, want);
        end
      end
    end
    sub = 1'b1;
    a = 32'h3F80_0001; b = FP_ONE;        #1; check_exact(32'h3400_0000, "cancel");
    a = FP_ONE;        b = FP_ONE;        #1; check_exact(FP_ZERO, "x-x");
    sub = 1'b0;
    a = FP_ZERO;       b = 32'hC0A0_0000; #1; check_exact(32'hC0A0_0000, "0+b");
    a = 32'h7F80_0000; b = 32'hFF80_0000; #1; check_exact(FP_QNAN, "inf-inf");
    a = 32'h7F80_0000; b = FP_ONE;        #1; check_exact(32'h7F80_0000, "inf+1");
    a = FP_ONE;        b = FP_ONE;        #1; check_exact(FP_TWO, "1+1");
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; #1; check_exact(32'h7F80_0000, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
