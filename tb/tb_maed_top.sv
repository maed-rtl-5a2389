// tb_maed_top -- end-to-end testbench of the MAED activation unit at its default parameters.
// Interleaves sigmoid, tanh and ReLU requests through the single start/done interface and
// checks each result against a double-precision reference of the five-term series (or
// max(0, x)), together with the latency of each engine (7/9 cycles for sigmoid and tanh,
// 1 cycle for ReLU). Fault-free requests must not raise err. Requests with the fault hook
// armed exercise every fault model: the register faults (bit flip, stuck-at-1, stuck-at-0,
// skipped term, replaced term) on sigmoid and tanh and the two DeepLaser effects (skipped
// negation, ReLU forced to zero); strong faults must raise err. Each mechanism is counted and
// a mechanism that never happened counts as a failure. A watchdog ends the run.
module tb_maed_top;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  act_func_e func = ACT_SIGMOID;
  fp32_t x = '0, y;
  fault_cfg_t fault = '0;
  logic busy, y_valid, done, err;
  int checks = 0, failures = 0;
  int ylat, dlat;

  // mechanism counters
  int n_op [3];            // completed operations per function
  int n_det [3];           // faults detected per function
  int n_model [7];         // faults injected per fault model
  int n_early_y;           // y_valid seen before done (result ahead of its check)
  int n_busy;              // cycles with busy high

  maed_top dut (.clk, .rst_n, .start, .func, .x, .fault, .busy, .y_valid, .y, .done, .err);

  always #5 clk = ~clk;
  always @(posedge clk) if (busy) n_busy++;

  initial begin
    repeat (500000) @(posedge clk);
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
    int cyc;
    @(negedge clk);
    while (busy) @(negedge clk);
    func = f; x = xin; start = 1'b1;
    cyc = 0; ylat = -1; dlat = -1;
    while (dlat < 0 && cyc < 50) begin
      @(negedge clk);
      start = 1'b0;
      cyc++;
      if (y_valid && ylat < 0) ylat = cyc;
      if (done) dlat = cyc;
    end
    n_op[f]++;
    if (ylat > 0 && ylat < dlat) n_early_y++;
  endtask

  function automatic real ref_y(act_func_e f, real rx);
    real e;
    unique case (f)
      ACT_SIGMOID: return 1.0 / (1.0 + series_exp(rx, 5, 1'b1));
      ACT_TANH: begin
        e = series_exp(2.0 * rx, 5, 1'b1);
        return (1.0 - e) / (1.0 + e);
      end
      default: return (rx > 0.0) ? rx : 0.0;
    endcase
  endfunction

  initial begin
    real rx;
    act_func_e f;
    fault_model_e m;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // fault-free traffic, functions interleaved
    for (int i = 0; i < 300; i++) begin
      f  = act_func_e'(i % 3);
      rx = (f == ACT_TANH) ? urand_real(-0.5, 0.5) : urand_real(-1.0, 1.0);
      op(f, r2fp(rx));
      rx = fp2r(r2fp(rx));
      chk(close(fp2r(y), ref_y(f, rx), 1e-5, 1e-6),
          $sformatf("func %0d x=%f: y=%g want %g", f, rx, fp2r(y), ref_y(f, rx)));
      chk(!err, $sformatf("false alarm func %0d x=%f", f, rx));
      chk(dlat == ((f == ACT_RELU) ? 1 : 9), $sformatf("func %0d latency %0d", f, dlat));
      chk(ylat == ((f == ACT_RELU) ? 1 : 7), $sformatf("func %0d y latency %0d", f, ylat));
    end
    // strong faults on sigmoid and tanh: every model must be detected
    for (int i = 0; i < 60; i++) begin
      f  = (i % 2 == 0) ? ACT_SIGMOID : ACT_TANH;
      rx = (f == ACT_TANH) ? urand_real(0.25, 0.5) : urand_real(0.4, 1.0);
      if ((i / 2) % 2 == 1) rx = -rx;
      m  = fault_model_e'((i / 4) % 6);
      unique case (m)
        FLT_FLIP: fault = '{en: 1'b1, term_sel: 32'd2, model: m, mask: 32'h4000_0000};
        FLT_SA1:  fault = '{en: 1'b1, term_sel: 32'd4, model: m, mask: 32'h7F00_0000};
        FLT_SA0:  fault = '{en: 1'b1, term_sel: 32'd1, model: m, mask: 32'hFFFF_FFFF};
        FLT_SKIP: fault = '{en: 1'b1, term_sel: 32'd1, model: m, mask: '0};
        FLT_RAND: fault = '{en: 1'b1, term_sel: 32'd16, model: m, mask: 32'h4120_0000};
        default:  fault = '{en: 1'b1, term_sel: 32'd1, model: FLT_NEG, mask: '0};
      endcase
      op(f, r2fp(rx));
      n_model[fault.model]++;
      fault = '0;
      chk(err, $sformatf("fault model %0d on func %0d at x=%f not detected", m, f, rx));
      if (err) n_det[f]++;
    end
    // DeepLaser effect on ReLU: output forced to zero
    for (int i = 0; i < 20; i++) begin
      rx = urand_real(0.01, 4.0);
      fault = '{en: 1'b1, term_sel: '0, model: FLT_ZERO, mask: '0};
      op(ACT_RELU, r2fp(rx));
      n_model[FLT_ZERO]++;
      fault = '0;
      chk(err && y == FP_ZERO, $sformatf("forced-zero ReLU at x=%f not detected", rx));
      if (err) n_det[ACT_RELU]++;
    end
    // after faults, clean operation again
    op(ACT_SIGMOID, r2fp(0.5));
    chk(!err && close(fp2r(y), ref_y(ACT_SIGMOID, 0.5), 1e-5, 0.0), "clean after faults");

    $display("operations: sigmoid %0d tanh %0d relu %0d", n_op[0], n_op[1], n_op[2]);
    $display("faults detected: sigmoid %0d tanh %0d relu %0d", n_det[0], n_det[1], n_det[2]);
    $display("faults per model: flip %0d sa1 %0d sa0 %0d skip %0d rand %0d neg %0d zero %0d",
             n_model[0], n_model[1], n_model[2], n_model[3], n_model[4], n_model[5], n_model[6]);
    $display("y ahead of check: %0d, busy cycles: %0d", n_early_y, n_busy);
    for (int i = 0; i < 3; i++) begin
      chk(n_op[i] > 0, $sformatf("function %0d never ran", i));
      chk(n_det[i] > 0, $sformatf("no fault detected on function %0d", i));
    end
    for (int i = 0; i < 7; i++) chk(n_model[i] > 0, $sformatf("fault model %0d never injected", i));
    chk(n_early_y > 0, "y never ahead of its check");
    chk(n_busy > 0, "busy never high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
