// maed_top -- MAED activation unit: sigmoid, tanh and ReLU with built-in error detection.
//
// One request interface feeds three protected activation engines. func selects the engine;
// the request (start, x) goes to that engine only, and its result comes back on y/err with
// a one-cycle done pulse. y_valid pulses when the activation value itself is ready, before
// the check has finished (for sigmoid and tanh).
//   ACT_SIGMOID  maed_sigmoid: y after 7 cycles, err after 9 (paper's FPGA design)
//   ACT_TANH     maed_tanh:    y after 7 cycles, err after 9 (same submodules)
//   ACT_RELU     relu_checker: y and err after 1 cycle (recomputation on -x)
// The three engines and their checks come from the paper; gathering them behind one
// interface with a function select is this design's choice. Only one request may be in
// flight: start is accepted while busy is low.
//
// Interface: clk, rst_n (active-low asynchronous reset), start, func, x, fault (test hook,
// tie fault.en to 0), busy, y_valid, y, done, err. err holds until the next start.
module maed_top
  import fp32_pkg::*;
#(
  parameter int unsigned N_TERMS = 5,
  parameter fp32_t       EPS     = 32'h3C80_0000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  act_func_e  func,
  input  fp32_t      x,
  input  fault_cfg_t fault,
  output logic       busy,
  output logic       y_valid,
  output fp32_t      y,
  output logic       done,
  output logic       err
);
  logic  sg_busy, sg_yv, sg_done, sg_err;
  logic  th_busy, th_yv, th_done, th_err;
  logic  rl_valid, rl_err;
  fp32_t sg_y, th_y, rl_y;
  act_func_e func_q;
  logic  accept;

  assign accept = start && !busy;

  maed_sigmoid #(.N_TERMS(N_TERMS), .EPS(EPS)) u_sigmoid (
    .clk, .rst_n, .start(accept && func == ACT_SIGMOID), .x, .fault,
    .busy(sg_busy), .y_valid(sg_yv), .y(sg_y), .done(sg_done), .err(sg_err)
  );

  maed_tanh #(.N_TERMS(N_TERMS), .EPS(EPS)) u_tanh (
    .clk, .rst_n, .start(accept && func == ACT_TANH), .x, .fault,
    .busy(th_busy), .y_valid(th_yv), .y(th_y), .done(th_done), .err(th_err)
  );

  relu_checker u_relu (
    .clk, .rst_n, .valid_in(accept && func == ACT_RELU), .x,
    .force_zero(fault.en && fault.model == FLT_ZERO),
    .valid_out(rl_valid), .y(rl_y), .err(rl_err)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) func_q <= ACT_SIGMOID;
    else if (accept) func_q <= func;
  end

  assign busy = sg_busy || th_busy || rl_valid;

  always_comb begin
    unique case (func_q)
      ACT_TANH: begin y = th_y; err = th_err; y_valid = th_yv;    done = th_done; end
      ACT_RELU: begin y = rl_y; err = rl_err; y_valid = rl_valid; done = rl_valid; end
      default:  begin y = sg_y; err = sg_err; y_valid = sg_yv;    done = sg_done; end
    endcase
  end
endmodule
