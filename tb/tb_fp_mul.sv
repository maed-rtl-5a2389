// tb_fp_mul -- self-checking testbench of fp_mul.
// Random normal operands are multiplied and compared bit-exactly with the double-precision
// product rounded to single precision (for normal operands the double product of two
// 24-bit significands is exact, so its rounding is the correctly rounded result). Directed
// cases cover zero, infinity, NaN, inf*0, overflow and underflow. A watchdog ends the run.
module tb_fp_mul;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  fp32_t a, b, p;
  int checks = 0, failures = 0;

  fp_mul dut (.a, .b, .p);

  task automatic check(fp32_t want, string what);
    checks++;
    if (p !== want) begin
      failures++;
      $display("FAIL %s: %h * %h = %h, want %h", what, a, b, p, want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb;
    fp32_t want;
    for (int i = 0; i < 3000; i++) begin
      ra = urand_real(-8.0, 8.0) * pow2(int'($urandom_range(0, 40)) - 20);
      rb = urand_real(-8.0, 8.0) * pow2(int'($urandom_range(0, 40)) - 20);
      a = r2fp(ra);
      b = r2fp(rb);
      #1;
      want = r2fp(fp2r(a) * fp2r(b));
      check(want, "random");
    end
    a = FP_ONE;         b = 32'h4049_0FDB; #1; check(32'h4049_0FDB, "one");
    a = FP_ZERO;        b = 32'h4049_0FDB; #1; check(FP_ZERO, "zero");
    a = 32'h8000_0000;  b = 32'h4049_0FDB; #1; check(32'h8000_0000, "negzero");
    a = 32'h7F80_0000;  b = 32'hC000_0000; #1; check(32'hFF80_0000, "inf");
    a = 32'h7F80_0000;  b = FP_ZERO;       #1; check(FP_QNAN, "inf*0");
    a = 32'h7FC0_0001;  b = FP_ONE;        #1; check(FP_QNAN, "nan");
    a = 32'h7F00_0000;  b = 32'h7F00_0000; #1; check(32'h7F80_0000, "overflow");
    a = 32'h0100_0000;  b = 32'h0100_0000; #1; check(FP_ZERO, "underflow");
    a = 32'h4040_0000;  b = 32'h4000_0000; #1; check(32'h40C0_0000, "3*2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
