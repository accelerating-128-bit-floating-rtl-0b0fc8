// fp128_pkg: IEEE 754 binary128 arithmetic shared by the multiply and add units.
//
// A binary128 word is 1 sign bit, a 15-bit biased exponent (bias 16383) and a
// 112-bit fraction. The functions below form an exact wide intermediate result
// and round it once, to nearest with ties to even, as IEEE 754 requires of a
// correctly rounded multiply or add. Subnormal inputs and outputs, signed zeros,
// infinities and NaNs are handled; every NaN result is the canonical quiet NaN
// 7FFF8000...0. No exception flags are produced.
//
// The binary128 format is what the design is built for. The rounding mode, the
// NaN encoding and the absence of flags are this implementation's own choices.
package fp128_pkg;

  localparam int unsigned EXP_W  = 15;
  localparam int unsigned FRAC_W = 112;
  localparam int unsigned MANT_W = FRAC_W + 1;      // with the hidden bit
  localparam int          BIAS   = 16383;
  localparam int unsigned WIDE_W = 232;             // intermediate significand width

  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  exp;
    logic [FRAC_W-1:0] frac;
  } fp128_t;

  localparam fp128_t FP128_QNAN = '{sign: 1'b0, exp: '1, frac: {1'b1, {(FRAC_W-1){1'b0}}}};
  localparam fp128_t FP128_ZERO = '0;

  function automatic logic is_nan(fp128_t x);
    return (x.exp == '1) && (x.frac != '0);
  endfunction

  function automatic logic is_inf(fp128_t x);
    return (x.exp == '1) && (x.frac == '0);
  endfunction

  function automatic logic is_zero(fp128_t x);
    return (x.exp == '0) && (x.frac == '0);
  endfunction

  // Significand with the hidden bit (0 for subnormals).
  function automatic logic [MANT_W-1:0] mant_of(fp128_t x);
    return {x.exp != '0, x.frac};
  endfunction

  // Effective biased exponent (subnormals use 1).
  function automatic int exp_of(fp128_t x);
    return (x.exp == '0) ? 1 : int'(x.exp);
  endfunction

  function automatic fp128_t make_inf(logic s);
    fp128_t r;
    r.sign = s;
    r.exp  = '1;
    r.frac = '0;
    return r;
  endfunction

  function automatic fp128_t make_zero(logic s);
    fp128_t r;
    r.sign = s;
    r.exp  = '0;
    r.frac = '0;
    return r;
  endfunction

  // Normalise and round. The value is m * 2^(e - BIAS - (WIDE_W-1)): bit
  // WIDE_W-1 of m weighs 2^(e-BIAS). m must be non-zero.
  function automatic fp128_t round_pack(logic s, int e_in, logic [WIDE_W-1:0] m);
    fp128_t            r;
    int                e;
    int                lz;
    int                sh;
    logic [WIDE_W-1:0] mm;
    logic [MANT_W:0]   q;        // one extra bit for the rounding carry
    logic              guard, sticky, lsb;
    e  = e_in;
    lz = WIDE_W;
    for (int i = 0; i < WIDE_W; i++)
      if (m[i]) lz = WIDE_W - 1 - i;
    mm = m << lz;
    e  = e - lz;
    if (e < 1) begin
      // Subnormal range: shift right, folding the lost bits into a sticky bit.
      sh = 1 - e;
      if (sh >= WIDE_W) begin
        mm = {{(WIDE_W-1){1'b0}}, 1'b1};
      end else begin
        sticky = 1'b0;
        for (int i = 0; i < WIDE_W; i++)
          if (i < sh && mm[i]) sticky = 1'b1;
        mm = (mm >> sh) | {{(WIDE_W-1){1'b0}}, sticky};
      end
      e = 1;
    end
    guard  = mm[WIDE_W-1-MANT_W];
    sticky = |mm[WIDE_W-2-MANT_W:0];
    lsb    = mm[WIDE_W-MANT_W];
    q      = {1'b0, mm[WIDE_W-1 -: MANT_W]};
    if (guard && (sticky || lsb)) q = q + 1'b1;
    if (q[MANT_W]) begin
      q = q >> 1;
      e = e + 1;
    end
    if (e >= int'({EXP_W{1'b1}})) begin
      r = make_inf(s);
    end else begin
      r.sign = s;
      r.exp  = q[MANT_W-1] ? EXP_W'(e) : '0;
      r.frac = q[FRAC_W-1:0];
    end
    return r;
  endfunction

  // Correctly rounded binary128 product.
  function automatic fp128_t fp128_mul_f(fp128_t a, fp128_t b);
    logic                s;
    logic [2*MANT_W-1:0] p;
    s = a.sign ^ b.sign;
    if (is_nan(a) || is_nan(b)) return FP128_QNAN;
    if (is_inf(a) || is_inf(b)) begin
      if (is_zero(a) || is_zero(b)) return FP128_QNAN;
      return make_inf(s);
    end
    if (is_zero(a) || is_zero(b)) return make_zero(s);
    p = (2*MANT_W)'(mant_of(a)) * (2*MANT_W)'(mant_of(b));
    // Bit 2*MANT_W-1 of p weighs 2^(ea+eb-2*BIAS+1).
    return round_pack(s, exp_of(a) + exp_of(b) - BIAS + 1,
                      {p, {(WIDE_W-2*MANT_W){1'b0}}});
  endfunction

  // Correctly rounded binary128 sum.
  function automatic fp128_t fp128_add_f(fp128_t a, fp128_t b);
    fp128_t            big, sml;
    int                d;
    logic [WIDE_W-1:0] mb, ms, sum;
    logic              sticky;
    if (is_nan(a) || is_nan(b)) return FP128_QNAN;
    if (is_inf(a) && is_inf(b)) return (a.sign == b.sign) ? a : FP128_QNAN;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    if (is_zero(a) && is_zero(b)) return make_zero(a.sign & b.sign);
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    // Order by magnitude (exponent, then fraction).
    if ({a.exp, a.frac} >= {b.exp, b.frac}) begin
      big = a;
      sml = b;
    end else begin
      big = b;
      sml = a;
    end
    mb = {1'b0, mant_of(big), {(WIDE_W-1-MANT_W){1'b0}}};
    ms = {1'b0, mant_of(sml), {(WIDE_W-1-MANT_W){1'b0}}};
    d  = exp_of(big) - exp_of(sml);
    if (d >= WIDE_W) begin
      ms = {{(WIDE_W-1){1'b0}}, 1'b1};
    end else if (d > 0) begin
      sticky = 1'b0;
      for (int i = 0; i < WIDE_W; i++)
        if (i < d && ms[i]) sticky = 1'b1;
      ms = (ms >> d) | {{(WIDE_W-1){1'b0}}, sticky};
    end
    sum = (big.sign == sml.sign) ? mb + ms : mb - ms;
    if (sum == '0) return FP128_ZERO;   // exact cancellation gives +0
    // Bit WIDE_W-2 of mb weighs 2^(e_big-BIAS), so bit WIDE_W-1 weighs twice that.
    return round_pack(big.sign, exp_of(big) + 1, sum);
  endfunction

endpackage
