// fp32_pkg -- shared IEEE 754 single-precision types, constants and arithmetic functions.
//
// The MAED activation datapath works on single-precision numbers (sign, 8-bit exponent,
// 23-bit fraction). This package holds the number type, the constants the datapath needs,
// the fault-injection configuration type, and two combinational functions, fp32_mul_f and
// fp32_add_f, that the fp_mul and fp_addsub modules wrap. The functions are also called at
// elaboration time to build the k! constants of the term calculation, so no table of
// factorials is stored.
//
// Arithmetic conventions (this design's choices; the paper names the format but not these
// details): subnormal inputs are read as zero and results below the normal range become
// zero; rounding is round-to-nearest-even from guard and sticky bits; any NaN, inf*0 or
// inf-inf gives the quiet NaN 0x7FC0_0000; overflow gives a signed infinity.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_TWO  = 32'h4000_0000;
  localparam fp32_t FP_QNAN = 32'h7FC0_0000;

  // Activation function selected at the top level.
  typedef enum logic [1:0] {
    ACT_SIGMOID = 2'd0,
    ACT_TANH    = 2'd1,
    ACT_RELU    = 2'd2
  } act_func_e;

  // Fault models of the fault-injection test hook: the register fault models of the paper's
  // fault study (0-4) and the two DeepLaser effects the paper lists (5-6).
  typedef enum logic [2:0] {
    FLT_FLIP  = 3'd0,  // selected bits inverted (XOR with mask)
    FLT_SA1   = 3'd1,  // selected bits set (OR with mask)
    FLT_SA0   = 3'd2,  // selected bits cleared (AND with ~mask)
    FLT_SKIP  = 3'd3,  // the term is not computed: its register keeps its cleared value 0
    FLT_RAND  = 3'd4,  // the term is replaced by the mask value
    FLT_NEG   = 3'd5,  // the negation of e^-x is skipped in the summation (DeepLaser effect)
    FLT_ZERO  = 3'd6   // the ReLU output is forced to zero (DeepLaser effect)
  } fault_model_e;

  typedef struct packed {
    logic         en;       // fault hook active
    logic [31:0]  term_sel; // bit k-1 set: term k is faulty (terms 1..32)
    fault_model_e model;
    fp32_t        mask;     // bit mask, or replacement value for FLT_RAND
  } fault_cfg_t;

  function automatic logic fp32_is_nan(fp32_t a);
    return (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
  endfunction

  function automatic logic fp32_is_inf(fp32_t a);
    return (a[30:23] == 8'hFF) && (a[22:0] == 23'd0);
  endfunction

  function automatic logic fp32_is_zero(fp32_t a);  // zero or subnormal
    return a[30:23] == 8'h00;
  endfunction

  // Round a normalised result. sig holds the 24-bit significand (leading one at bit 23),
  // g the guard bit and st the sticky bit; e is the biased exponent before rounding.
  function automatic fp32_t fp32_pack(logic s, logic signed [11:0] e, logic [23:0] sig,
                                      logic g, logic st);
    logic [24:0] r;
    logic signed [11:0] ee;
    r  = {1'b0, sig} + {24'd0, (g & (st | sig[0]))};
    ee = e;
    if (r[24]) begin
      r  = r >> 1;
      ee = ee + 12'sd1;
    end
    if (ee >= 12'sd255) return {s, 8'hFF, 23'd0};
    if (ee <= 12'sd0)   return {s, 31'd0};
    return {s, ee[7:0], r[22:0]};
  endfunction

  // a * b: sign by XOR, exponents added and re-biased, 24x24-bit significand product
  // normalised on its carry-out, then rounded.
  function automatic fp32_t fp32_mul_f(fp32_t a, fp32_t b);
    logic               s;
    logic [47:0]        prod;
    logic signed [11:0] e;
    logic [23:0]        sig;
    logic               g, st;
    s = a[31] ^ b[31];
    if (fp32_is_nan(a) || fp32_is_nan(b)) return FP_QNAN;
    if (fp32_is_inf(a) || fp32_is_inf(b)) begin
      if (fp32_is_zero(a) || fp32_is_zero(b)) return FP_QNAN;
      return {s, 8'hFF, 23'd0};
    end
    if (fp32_is_zero(a) || fp32_is_zero(b)) return {s, 31'd0};
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e    = $signed({4'd0, a[30:23]}) + $signed({4'd0, b[30:23]}) - 12'sd127;
    if (prod[47]) begin
      sig = prod[47:24];
      g   = prod[23];
      st  = |prod[22:0];
      e   = e + 12'sd1;
    end else begin
      sig = prod[46:23];
      g   = prod[22];
      st  = |prod[21:0];
    end
    return fp32_pack(s, e, sig, g, st);
  endfunction

  // a + b: operands ordered by magnitude, the smaller one aligned with guard/round/sticky
  // bits, added or subtracted, renormalised by a leading-zero search, then rounded.
  function automatic fp32_t fp32_add_f(fp32_t a, fp32_t b);
    fp32_t              big, sml;
    logic [7:0]         d;
    logic [26:0]        mb, ms;     // {hidden, fraction, guard, round, sticky}
    logic [27:0]        acc;
    logic signed [11:0] e;
    int                 lz;
    if (fp32_is_nan(a) || fp32_is_nan(b)) return FP_QNAN;
    if (fp32_is_inf(a) && fp32_is_inf(b)) return (a[31] == b[31]) ? a : FP_QNAN;
    if (fp32_is_inf(a)) return a;
    if (fp32_is_inf(b)) return b;
    if (fp32_is_zero(a) && fp32_is_zero(b)) return {a[31] & b[31], 31'd0};
    if (fp32_is_zero(a)) return b;
    if (fp32_is_zero(b)) return a;
    if (a[30:0] >= b[30:0]) begin
      big = a; sml = b;
    end else begin
      big = b; sml = a;
    end
    d  = big[30:23] - sml[30:23];
    mb = {1'b1, big[22:0], 3'b000};
    ms = {1'b1, sml[22:0], 3'b000};
    if (d >= 8'd27) ms = 27'd1;
    else if (d != 8'd0) ms = (ms >> d) | {26'd0, |(ms & ((27'd1 << d) - 27'd1))};
    if (big[31] == sml[31]) acc = {1'b0, mb} + {1'b0, ms};
    else                    acc = {1'b0, mb} - {1'b0, ms};
    if (acc == 28'd0) return FP_ZERO;
    e = $signed({4'd0, big[30:23]});
    if (acc[27]) begin
      acc = {1'b0, acc[27:2], acc[1] | acc[0]};
      e   = e + 12'sd1;
    end else begin
      // leading-zero count: the highest set bit wins (acc is non-zero here)
      lz = 0;
      for (int i = 0; i <= 26; i++) if (acc[i]) lz = 26 - i;
      acc = acc << lz;
      e   = e - 12'(lz);
    end
    // acc[26] is the leading one, acc[25:3] the fraction, acc[2] guard, acc[1:0] sticky.
    return fp32_pack(big[31], e, acc[26:3], acc[2], |acc[1:0]);
  endfunction

  // Small unsigned integer to single precision (exact for n < 2**24).
  function automatic fp32_t fp32_from_uint(int unsigned n);
    int msb;
    logic [31:0] v;
    if (n == 0) return FP_ZERO;
    msb = 0;
    for (int i = 0; i < 32; i++) if (n[i]) msb = i;
    v = n << (31 - msb);
    return {1'b0, 8'(127 + msb), v[30:8]};
  endfunction

  // k! in single precision, built by repeated multiplication.
  function automatic fp32_t fp32_factorial(int unsigned k);
    fp32_t f;
    f = FP_ONE;
    for (int unsigned i = 2; i <= k; i++) f = fp32_mul_f(f, fp32_from_uint(i));
    return f;
  endfunction

endpackage
