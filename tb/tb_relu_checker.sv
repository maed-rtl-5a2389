// tb_relu_checker -- self-checking testbench of relu_checker.
// Random x of both signs: one cycle after valid_in, valid_out must pulse with y = max(0, x)
// and err = 0. x = 0 must give y = 0, err = 0. With the force_zero hook (the DeepLaser
// effect) a positive x must raise err, while a negative x, whose ReLU is zero anyway, must
// not. A watchdog ends the run.
module tb_relu_checker;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, valid_in = 1'b0, force_zero = 1'b0;
  fp32_t x = '0, y;
  logic valid_out, err;
  int checks = 0, failures = 0;

  relu_checker dut (.clk, .rst_n, .valid_in, .x, .force_zero, .valid_out, .y, .err);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic apply(fp32_t xin, logic fz, fp32_t want_y, logic want_err);
    @(negedge clk);
    x = xin; force_zero = fz; valid_in = 1'b1;
    @(negedge clk);
    valid_in = 1'b0;
    chk(valid_out, "valid_out one cycle after valid_in");
    chk(y == want_y, $sformatf("y for x=%h: %h want %h", xin, y, want_y));
    chk(err == want_err, $sformatf("err for x=%h fz=%0d: %0d want %0d", xin, fz, err, want_err));
    @(negedge clk);
    chk(!valid_out, "valid_out is a pulse");
  endtask

  initial begin
    fp32_t xv;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      xv = r2fp(urand_real(-5.0, 5.0));
      apply(xv, 1'b0, xv[31] ? FP_ZERO : xv, 1'b0);
    end
    apply(FP_ZERO, 1'b0, FP_ZERO, 1'b0);
    apply(32'h8000_0000, 1'b0, FP_ZERO, 1'b0);
    for (int i = 0; i < 100; i++) begin
      xv = r2fp(urand_real(0.01, 5.0));
      apply(xv, 1'b1, FP_ZERO, 1'b1);
      xv[31] = 1'b1;
      apply(xv, 1'b1, FP_ZERO, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
