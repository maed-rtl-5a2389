// tb_fault_campaign -- fault-coverage campaign on the sigmoid and tanh units of maed_top at
// default parameters (five single-precision terms, EPS = 2^-6).
// Follows the structure of the fault study that motivated MAED: faults are written into the
// term registers x^k/k!; n is the number of faulty terms and m the number of corrupted bits
// per term; the "random" injection type picks m random bits, the "burst" type m consecutive
// bits from a random start; the models are bit flip, stuck-at-1, stuck-at-0, skipped term and
// term replaced by a random number. Every run uses a new random input and new fault
// positions; all faulty terms of a run share one bit mask (a limit of the test hook).
// Inputs are drawn from the range the five-term units check without false alarms
// (sigmoid |x| <= 1, tanh |x| <= 0.5), not the wider [-3, 3] of the original study.
// For each configuration the testbench prints the share of all injected faults that were
// detected and the share of "harmful" faults (output moved by more than 1e-4 relative)
// that were detected. Self-checks: each fault-free reference run must be free of alarms and
// every configuration must detect at least one fault, except skipping all five terms, which
// looks exactly like x = 0 and must go undetected. A watchdog ends the run.
module tb_fault_campaign;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  localparam int RUNS = 100;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  act_func_e func = ACT_SIGMOID;
  fp32_t x = '0, y;
  fault_cfg_t fault = '0;
  logic busy, y_valid, done, err;
  int checks = 0, failures = 0;

  maed_top dut (.clk, .rst_n, .start, .func, .x, .fault, .busy, .y_valid, .y, .done, .err);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
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

  task automatic op(act_func_e f, fp32_t xin);
    @(negedge clk);
    while (busy) @(negedge clk);
    func = f; x = xin; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  function automatic logic [31:0] pick_terms(int n);
    logic [31:0] s;
    s = '0;
    while ($countones(s) < n) s[$urandom_range(0, 4)] = 1'b1;
    return s;
  endfunction

  function automatic fp32_t pick_mask(bit burst, int m);
    fp32_t v;
    int b;
    v = '0;
    if (burst) begin
      b = $urandom_range(0, 32 - m);
      for (int i = 0; i < m; i++) v[b + i] = 1'b1;
    end else begin
      while ($countones(v) < m) v[$urandom_range(0, 31)] = 1'b1;
    end
    return v;
  endfunction

  // One configuration: RUNS runs of (clean op, faulty op) on function f.
  task automatic campaign(act_func_e f, fault_model_e mdl, bit burst, int n, int m,
                          string name);
    int det, harm, harm_det;
    real rx, yc, yf, lim;
    det = 0; harm = 0; harm_det = 0;
    lim = (f == ACT_TANH) ? 0.5 : 1.0;
    for (int r = 0; r < RUNS; r++) begin
      rx = urand_real(-lim, lim);
      fault = '0;
      op(f, r2fp(rx));
      yc = fp2r(y);
      chk(!err, $sformatf("false alarm in clean run, func %0d x=%f", f, rx));
      fault.en       = 1'b1;
      fault.model    = mdl;
      fault.term_sel = pick_terms(n);
      fault.mask     = (mdl == FLT_RAND) ? r2fp(urand_real(-4.0, 4.0)) : pick_mask(burst, m);
      op(f, r2fp(rx));
      fault = '0;
      yf = fp2r(y);
      if (err) det++;
      if (!close(yf, yc, 1e-4, 1e-6) || fp32_is_nan(y)) begin
        harm++;
        if (err) harm_det++;
      end
    end
    // Skipping every term leaves all term registers at 0, which is exactly what x = 0
    // produces (y = 0.5 and e^x = 1 agree): this case is invisible to the check.
    if (mdl == FLT_SKIP && n == 5) chk(det == 0, $sformatf("%s: all terms skipped", name));
    else chk(det > 0, $sformatf("%s: no fault detected", name));
    $display("%-8s %-26s n=%0d m=%0d  detected %5.1f%% of all, %5.1f%% of harmful (%0d)",
             (f == ACT_TANH) ? "tanh" : "sigmoid", name, n, m, 100.0 * det / RUNS,
             (harm > 0) ? 100.0 * harm_det / harm : 100.0, harm);
  endtask

  initial begin
    int ms [2];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int fi = 0; fi < 2; fi++) begin
      act_func_e f;
      f = (fi == 0) ? ACT_SIGMOID : ACT_TANH;
      for (int bt = 0; bt < 2; bt++) begin
        ms = (bt == 0) ? '{1, 5} : '{2, 5};
        for (int mi = 0; mi < 3; mi++)
          for (int n = 1; n <= 5; n += 2)
            foreach (ms[j])
              campaign(f, fault_model_e'(mi), bit'(bt), n, ms[j],
                       $sformatf("%s %s", (bt == 0) ? "random" : "burst",
                                 (mi == 0) ? "bit-flip" : (mi == 1) ? "stuck-at-1" : "stuck-at-0"));
      end
      for (int n = 1; n <= 5; n++) campaign(f, FLT_SKIP, 1'b0, n, 0, "skipping");
      for (int n = 1; n <= 5; n++) campaign(f, FLT_RAND, 1'b0, n, 32, "total random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
