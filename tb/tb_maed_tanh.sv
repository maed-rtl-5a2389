// tb_maed_tanh -- self-checking testbench of maed_sigmoid at its default size
// (five terms).
// Fault-free: for random x in [-1, 1], y must match the five-term reference
// 1 / (1 + e^-x series) (relative 1e-5), err must stay 0, y_valid must pulse 7 cycles and
// done 9 cycles after the start cycle (the cycle counts of the paper's baseline and
// protected designs). Faults through the test hook, each on inputs where its effect is
// large: skipped negation (the DeepLaser effect), exponent bit flip, skipped term,
// stuck-at-0 term, replaced term; each must raise err. Finally random single-bit flips of
// random terms are injected and the detection ratio is printed for information.
// A watchdog ends the run.
module tb_maed_tanh;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fp32_t x = '0, y;
  fault_cfg_t fault = '0;
  logic busy, y_valid, done, err;
  int checks = 0, failures = 0;
  int ylat, dlat;

  maed_tanh dut (.clk, .rst_n, .start, .x, .fault, .busy, .y_valid, .y, .done, .err);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // One operation; cycle 1 is the cycle in which start is high.
  task automatic op(fp32_t xin);
    int cyc;
    @(negedge clk);
    x = xin; start = 1'b1;
    cyc = 0; ylat = -1; dlat = -1;
    while (dlat < 0 && cyc < 50) begin
      @(negedge clk);
      start = 1'b0;
      cyc++;
      if (y_valid) ylat = cyc;
      if (done) dlat = cyc;
    end
  endtask

  task automatic fault_case(real rx, fault_model_e m, int term, fp32_t mask, string what);
    fault = '{en: 1'b1, term_sel: 32'd1 << (term - 1), model: m, mask: mask};
    op(r2fp(rx));
    fault = '0;
    chk(err, $sformatf("%s not detected at x=%f", what, rx));
  endtask

  initial begin
    real rx, want;
    int detected, injected;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      rx = urand_real(-0.5, 0.5);
      op(r2fp(rx));
      want = (1.0 - series_exp(2.0 * fp2r(r2fp(rx)), 5, 1'b1)) /
             (1.0 + series_exp(2.0 * fp2r(r2fp(rx)), 5, 1'b1));
      chk(close(fp2r(y), want, 1e-5, 1e-6), $sformatf("y at x=%f: %g want %g", rx, fp2r(y), want));
      chk(!err, $sformatf("false alarm at x=%f", rx));
      chk(ylat == 7, $sformatf("y latency %0d, want 7", ylat));
      chk(dlat == 9, $sformatf("check latency %0d, want 9", dlat));
    end
    op(FP_ZERO);
    chk(y == FP_ZERO && !err, "tanh(0) = 0 exactly");
    for (int i = 0; i < 40; i++) begin
      rx = urand_real(0.2, 0.5);
      if (i % 2 == 1) rx = -rx;
      fault_case(rx, FLT_NEG,  1, '0, "skipped negation");
      fault_case(rx, FLT_FLIP, $urandom_range(1, 5), 32'h4000_0000, "exponent flip");
      fault_case(rx, FLT_SKIP, 1, '0, "skipped term 1");
      fault_case(rx, FLT_SA0,  2, 32'hFFFF_FFFF, "term 2 stuck at 0");
      fault_case(rx, FLT_RAND, 3, 32'h42C8_0000, "term 3 replaced by 100");
      fault_case(rx, FLT_SA1,  4, 32'h7F00_0000, "term 4 exponent stuck at 1");
    end
    // detection ratio of random single-bit flips (information only)
    detected = 0;
    injected = 0;
    for (int i = 0; i < 300; i++) begin
      rx = urand_real(-0.5, 0.5);
      fault = '{en: 1'b1, term_sel: 32'd1 << $urandom_range(0, 4), model: FLT_FLIP,
                mask: 32'd1 << $urandom_range(0, 31)};
      op(r2fp(rx));
      injected++;
      if (err) detected++;
    end
    fault = '0;
    $display("random single-bit flips: %0d of %0d detected", detected, injected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
