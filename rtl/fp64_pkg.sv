// fp64_pkg: IEEE-754 binary64 arithmetic used by every computation module.
//
// The solver keeps all vectors in FP64 and only the sparse-matrix values in
// FP32 (the "Mixed-V3" scheme), so the datapath needs an FP64 adder,
// multiplier and divider, an FP64 compare for the convergence test and an
// exact FP32 -> FP64 widening cast.  The functions below are combinational;
// modules place them between registers to build their pipelines.
//
// Numerics: round-to-nearest-even on every result.  Subnormal inputs are read
// as zero and results that would be subnormal are flushed to a signed zero
// (this design's choice; the original accelerator used vendor floating-point
// cores whose exact behaviour is not specified).  Infinities are propagated;
// NaN inputs give a quiet NaN.
// Lint note: the classification helpers look only at the exponent (and
// fraction) bits and the divider uses only the low bits of its quotient, so
// the lint tool reports some function-argument bits as unused; intended.
package fp64_pkg;

  typedef logic [63:0] fp64_t;
  typedef logic [31:0] fp32_t;

  localparam fp64_t FP64_ZERO = 64'h0000_0000_0000_0000;
  localparam fp64_t FP64_ONE  = 64'h3FF0_0000_0000_0000;
  localparam fp64_t FP64_QNAN = 64'h7FF8_0000_0000_0000;

  // Round a 53-bit significand (hidden bit at [52]) with guard and sticky
  // bits, pack it with a biased exponent.  exp_in may be <= 0 or >= 2047.
  function automatic fp64_t fp64_pack(input logic sgn, input int exp_in,
                                      input logic [52:0] sig, input logic guard,
                                      input logic sticky);
    logic [53:0] rnd;
    int          e;
    rnd = {1'b0, sig};
    e   = exp_in;
    if (guard && (sticky || sig[0])) rnd = rnd + 54'd1;
    if (rnd[53]) begin
      rnd = rnd >> 1;
      e   = e + 1;
    end
    if (e <= 0)         return {sgn, 63'd0};
    else if (e >= 2047) return {sgn, 11'h7FF, 52'd0};
    else                return {sgn, e[10:0], rnd[51:0]};
  endfunction

  function automatic logic fp64_is_nan(input fp64_t a);
    return (a[62:52] == 11'h7FF) && (a[51:0] != 52'd0);
  endfunction

  function automatic logic fp64_is_inf(input fp64_t a);
    return (a[62:52] == 11'h7FF) && (a[51:0] == 52'd0);
  endfunction

  function automatic logic fp64_is_zero(input fp64_t a);
    return a[62:52] == 11'd0;  // subnormals count as zero
  endfunction

  function automatic fp64_t fp64_neg(input fp64_t a);
    return {~a[63], a[62:0]};
  endfunction

  // a + b
  function automatic fp64_t fp64_add(input fp64_t a, input fp64_t b);
    fp64_t       greater, lesser;
    logic [55:0] mb, ms;        // {hidden, 52 fraction, guard, round, sticky}
    logic [56:0] sum;
    int          eb, es, d, lz;
    logic        sticky;
    if (fp64_is_nan(a) || fp64_is_nan(b)) return FP64_QNAN;
    if (fp64_is_inf(a) && fp64_is_inf(b) && (a[63] != b[63])) return FP64_QNAN;
    if (fp64_is_inf(a)) return a;
    if (fp64_is_inf(b)) return b;
    if (fp64_is_zero(a) && fp64_is_zero(b)) return {a[63] & b[63], 63'd0};
    if (fp64_is_zero(a)) return b;
    if (fp64_is_zero(b)) return a;
    if (a[62:0] >= b[62:0]) begin greater = a; lesser = b; end
    else                    begin greater = b; lesser = a; end
    eb = int'(greater[62:52]);
    es = int'(lesser[62:52]);
    d  = eb - es;
    mb = {1'b1, greater[51:0], 3'b000};
    ms = {1'b1, lesser[51:0], 3'b000};
    if (d > 55) begin
      ms = 56'd1;
    end else if (d > 0) begin
      sticky = 1'b0;
      for (int i = 0; i < 56; i++) if (i < d && ms[i]) sticky = 1'b1;
      ms = (ms >> d) | {55'd0, sticky};
    end
    if (greater[63] == lesser[63]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[56]) begin
        sum = {1'b0, sum[56:2], sum[1] | sum[0]};
        eb  = eb + 1;
      end
    end else begin
      sum = {1'b0, mb} - {1'b0, ms};
      if (sum == 57'd0) return FP64_ZERO;
      lz = 0;
      for (int i = 55; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      eb  = eb - lz;
    end
    return fp64_pack(greater[63], eb, sum[55:3], sum[2], sum[1] | sum[0]);
  endfunction

  function automatic fp64_t fp64_sub(input fp64_t a, input fp64_t b);
    return fp64_add(a, fp64_neg(b));
  endfunction

  // a * b
  function automatic fp64_t fp64_mul(input fp64_t a, input fp64_t b);
    logic         s;
    logic [105:0] prod;
    int           e;
    s = a[63] ^ b[63];
    if (fp64_is_nan(a) || fp64_is_nan(b)) return FP64_QNAN;
    if ((fp64_is_inf(a) && fp64_is_zero(b)) || (fp64_is_zero(a) && fp64_is_inf(b))) return FP64_QNAN;
    if (fp64_is_inf(a) || fp64_is_inf(b)) return {s, 11'h7FF, 52'd0};
    if (fp64_is_zero(a) || fp64_is_zero(b)) return {s, 63'd0};
    prod = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    e    = int'(a[62:52]) + int'(b[62:52]) - 1023;
    if (prod[105]) begin
      e = e + 1;
      return fp64_pack(s, e, prod[105:53], prod[52], |prod[51:0]);
    end
    return fp64_pack(s, e, prod[104:52], prod[51], |prod[50:0]);
  endfunction

  // a / b
  function automatic fp64_t fp64_div(input fp64_t a, input fp64_t b);
    logic         s;
    logic [107:0] num, q, r;
    logic [52:0]  den;
    int           e;
    s = a[63] ^ b[63];
    if (fp64_is_nan(a) || fp64_is_nan(b)) return FP64_QNAN;
    if ((fp64_is_inf(a) && fp64_is_inf(b)) || (fp64_is_zero(a) && fp64_is_zero(b))) return FP64_QNAN;
    if (fp64_is_inf(a) || fp64_is_zero(b)) return {s, 11'h7FF, 52'd0};
    if (fp64_is_zero(a) || fp64_is_inf(b)) return {s, 63'd0};
    num = {1'b1, a[51:0], 55'd0};
    den = {1'b1, b[51:0]};
    q   = num / {55'd0, den};
    r   = num % {55'd0, den};
    e   = int'(a[62:52]) - int'(b[62:52]) + 1023;
    // q lies in (2^54, 2^56)
    if (q[55]) return fp64_pack(s, e, q[55:3], q[2], (|q[1:0]) || (r != 108'd0));
    return fp64_pack(s, e - 1, q[54:2], q[1], q[0] || (r != 108'd0));
  endfunction

  // a < b (false when either is NaN; -0 == +0)
  function automatic logic fp64_lt(input fp64_t a, input fp64_t b);
    if (fp64_is_nan(a) || fp64_is_nan(b)) return 1'b0;
    if (fp64_is_zero(a) && fp64_is_zero(b)) return 1'b0;
    if (a[63] != b[63]) return a[63];
    if (a[63]) return a[62:0] > b[62:0];
    return a[62:0] < b[62:0];
  endfunction

  // Exact widening of an FP32 value.
  function automatic fp64_t fp32_to_fp64(input fp32_t v);
    logic [10:0] e;
    if (v[30:23] == 8'd0)   return {v[31], 63'd0};
    if (v[30:23] == 8'hFF)  return {v[31], 11'h7FF, v[22:0], 29'd0};
    e = 11'(v[30:23]) + 11'd896;  // rebias 127 -> 1023
    return {v[31], e, v[22:0], 29'd0};
  endfunction

endpackage
