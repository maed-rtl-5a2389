// tb_term_calc -- self-checking testbench of term_calc.
// Loads x, steps k = 2..5, and checks after each clock edge that term register k holds
// x^k/k! (double-precision reference, relative tolerance 1e-6), i.e. one term per cycle
// and five cycles for five terms. Then repeats the same x with each fault model of the
// test hook on one term and checks the written value against the clean one (bit flip,
// stuck-at-1, stuck-at-0, skip, replacement) while the other terms stay clean.
// A watchdog ends the run.
module tb_term_calc;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 5;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0;
  logic [2:0] k = '0;
  fp32_t x = '0;
  fault_cfg_t fault = '0;
  fp32_t terms [N];
  fp32_t clean [N];
  int checks = 0, failures = 0;

  term_calc #(.N_TERMS(N)) dut (.clk, .rst_n, .load, .step, .k, .x, .fault, .terms);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(fp32_t xin);
    @(negedge clk);
    x = xin; load = 1'b1; k = 3'd1;
    @(negedge clk);
    load = 1'b0;
    for (int kk = 2; kk <= N; kk++) begin
      step = 1'b1; k = 3'(kk);
      @(negedge clk);
    end
    step = 1'b0;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    real rx, t;
    fp32_t want;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      rx = urand_real(-3.0, 3.0);
      // per-cycle check: term kk is present right after the kk-th edge
      @(negedge clk);
      x = r2fp(rx); load = 1'b1; k = 3'd1;
      t = 1.0;
      for (int kk = 1; kk <= N; kk++) begin
        @(negedge clk);
        t = t * fp2r(x) / kk;
        chk(close(fp2r(terms[kk-1]), t, 1e-6, 1e-30), $sformatf("term %0d of x=%f", kk, rx));
        if (kk < N) chk(terms[kk] == FP_ZERO, "later term not yet written");
        load = 1'b0;
        step = (kk < N);
        k = 3'(kk + 1);
      end
      step = 1'b0;
    end
    // fault hook
    run(r2fp(0.75));
    clean = terms;
    for (int m = 0; m <= 4; m++) begin
      fault.en    = 1'b1;
      fault.term_sel = 32'd4;
      fault.model = fault_model_e'(m);
      fault.mask  = 32'h0060_0000;
      run(r2fp(0.75));
      unique case (m)
        0: want = clean[2] ^ fault.mask;
        1: want = clean[2] | fault.mask;
        2: want = clean[2] & ~fault.mask;
        3: want = FP_ZERO;
        default: want = fault.mask;
      endcase
      chk(terms[2] == want, $sformatf("fault model %0d on term 3", m));
      chk(terms[1] == clean[1] && terms[3] == clean[3], "other terms untouched");
    end
    fault = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
