// tb_error_indicator -- self-checking testbench of error_indicator.
// Fault-free case: for random x in [-1, 1], y is the five-term sigmoid 1/(2 - T1 + T2 - ...)
// and e^x the five-term series, both from a double-precision reference; h must equal
// y/(1-y) (relative 1e-6) and err must stay 0. Faulty case: y computed with the negation
// skipped, 1/(2 + T1 + T2 + ...), for |x| >= 0.3, must raise err. NaN input must raise err.
// A watchdog ends the run.
module tb_error_indicator;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  fp32_t y, omy, ex, h;
  logic  err;
  int checks = 0, failures = 0;

  error_indicator dut (.y, .one_minus_y(omy), .ex, .h, .err);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    real x, ry;
    for (int i = 0; i < 2000; i++) begin
      x  = urand_real(-1.0, 1.0);
      ry = 1.0 / (1.0 + series_exp(x, 5, 1'b1));
      y   = r2fp(ry);
      omy = r2fp(1.0 - fp2r(y));
      ex  = r2fp(series_exp(x, 5, 1'b0));
      #1;
      chk(close(fp2r(h), fp2r(y) / fp2r(omy), 1e-6, 0.0), $sformatf("h at x=%f", x));
      chk(!err, $sformatf("false alarm at x=%f y=%h omy=%h ex=%h h=%h", x, y, omy, ex, h));
      if (x >= 0.3 || x <= -0.3) begin
        ry  = 1.0 / (series_exp(x, 5, 1'b0) + 1.0);
        y   = r2fp(ry);
        omy = r2fp(1.0 - fp2r(y));
        #1;
        chk(err, $sformatf("negation fault missed at x=%f", x));
      end
    end
    y = FP_QNAN; #1;
    chk(err, "NaN must be flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
