// tb_maed_sigmoid_range -- maed_sigmoid with more series terms over the input range [-3, 3].
// With N_TERMS = 16 the truncation error of the series at |x| = 3 (3^17/17! ~ 4e-7) is
// below what single-precision rounding adds, so the default threshold EPS = 2^-6 checks the
// whole range [-3, 3] without false alarms. The testbench checks y against the double-
// precision sigmoid 1/(1 + e^-x) (relative 1e-4), err = 0, the latency (N_TERMS + 2 cycles
// for y, N_TERMS + 4 for the check), and detection of the skipped negation for |x| >= 0.3.
// A watchdog ends the run.
module tb_maed_sigmoid_range;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fp32_t x = '0, y;
  fault_cfg_t fault = '0;
  logic busy, y_valid, done, err;
  int checks = 0, failures = 0;
  int ylat, dlat;

  maed_sigmoid #(.N_TERMS(N)) dut (.clk, .rst_n, .start, .x, .fault, .busy, .y_valid, .y,
                                   .done, .err);

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

  task automatic op(fp32_t xin);
    int cyc;
    @(negedge clk);
    x = xin; start = 1'b1;
    cyc = 0; ylat = -1; dlat = -1;
    while (dlat < 0 && cyc < 80) begin
      @(negedge clk);
      start = 1'b0;
      cyc++;
      if (y_valid) ylat = cyc;
      if (done) dlat = cyc;
    end
  endtask

  initial begin
    real rx, want;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      rx = (i == 0) ? 3.0 : (i == 1) ? -3.0 : urand_real(-3.0, 3.0);
      op(r2fp(rx));
      rx = fp2r(r2fp(rx));
      want = 1.0 / (1.0 + $exp(-rx));
      chk(close(fp2r(y), want, 1e-4, 0.0), $sformatf("y at x=%f: %g want %g", rx, fp2r(y), want));
      chk(!err, $sformatf("false alarm at x=%f", rx));
      chk(ylat == N + 2 && dlat == N + 4, $sformatf("latency %0d/%0d", ylat, dlat));
    end
    for (int i = 0; i < 50; i++) begin
      rx = urand_real(0.3, 3.0);
      if (i % 2 == 1) rx = -rx;
      fault = '{en: 1'b1, term_sel: '0, model: FLT_NEG, mask: '0};
      op(r2fp(rx));
      fault = '0;
      chk(err, $sformatf("skipped negation not detected at x=%f", rx));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
