// fp64_pkg: IEEE-754 binary64 arithmetic shared by every datapath unit.
//
// The accelerator works in double precision throughout. This package holds
// the bit-level add and multiply as pure functions, so that the pipelined
// operator modules (fp64_add, fp64_mul) and the few places that need a
// combinational add inside a feedback loop (reduce unit, dot accumulator)
// use exactly the same arithmetic.
//
// Arithmetic rules (this design's choice; the source only says "double
// precision"):
//   * round to nearest, ties to even;
//   * subnormal inputs are read as zero and subnormal results flush to a
//     signed zero;
//   * infinities propagate, inf - inf and NaN inputs give the quiet NaN
//     FP64_QNAN; overflow rounds to infinity.
// Division and square root are done by the iterative fp64_divsqrt module,
// which uses fp64_round from here.
package fp64_pkg;

  typedef logic [63:0] fp64_t;

  localparam fp64_t FP64_ZERO = 64'h0000_0000_0000_0000;
  localparam fp64_t FP64_ONE  = 64'h3FF0_0000_0000_0000;
  localparam fp64_t FP64_QNAN = 64'h7FF8_0000_0000_0000;
  localparam fp64_t FP64_PINF = 64'h7FF0_0000_0000_0000;

  function automatic logic fp64_is_zero(fp64_t a);
    return a[62:52] == 11'd0;
  endfunction

  function automatic logic fp64_is_special(fp64_t a);
    return a[62:52] == 11'h7FF;
  endfunction

  function automatic logic fp64_is_nan(fp64_t a);
    return (a[62:52] == 11'h7FF) && (a[51:0] != 52'd0);
  endfunction

  function automatic fp64_t fp64_neg(fp64_t a);
    return {~a[63], a[62:0]};
  endfunction

  // Round a 55-bit mantissa (bit 54 = hidden one, bits 1 and 0 = guard and
  // round) plus a sticky bit to nearest-even and pack the result.
  function automatic fp64_t fp64_round(logic s, int e, logic [54:0] m55, logic sticky);
    logic [53:0] sum;
    logic        inc;
    int          ee;
    ee  = e;
    inc = m55[1] & (m55[0] | sticky | m55[2]);
    sum = {1'b0, m55[54:2]} + {53'd0, inc};
    if (sum[53]) begin
      sum = sum >> 1;
      ee  = ee + 1;
    end
    if (ee >= 2047) return {s, 11'h7FF, 52'd0};
    if (ee <= 0)    return {s, 63'd0};
    return {s, ee[10:0], sum[51:0]};
  endfunction

  function automatic fp64_t fp64_add_f(fp64_t a, fp64_t b);
    fp64_t       x, y;
    logic [55:0] mx, my;     // hidden bit at 55, three guard bits below the fraction
    logic [56:0] sum;
    logic        sticky;
    int          ex, ey, d, lz;
    logic        sub;
    if (fp64_is_nan(a) || fp64_is_nan(b)) return FP64_QNAN;
    if (fp64_is_special(a) && fp64_is_special(b))
      return (a[63] == b[63]) ? a : FP64_QNAN;
    if (fp64_is_special(a)) return a;
    if (fp64_is_special(b)) return b;
    if (fp64_is_zero(a) && fp64_is_zero(b)) return {a[63] & b[63], 63'd0};
    if (fp64_is_zero(a)) return b;
    if (fp64_is_zero(b)) return a;
    // x is the operand of larger magnitude
    if (a[62:0] >= b[62:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = int'(x[62:52]);
    ey = int'(y[62:52]);
    mx = {1'b1, x[51:0], 3'b000};
    my = {1'b1, y[51:0], 3'b000};
    d  = ex - ey;
    sticky = 1'b0;
    if (d >= 56) begin
      sticky = 1'b1;
      my     = '0;
    end else if (d > 0) begin
      for (int i = 0; i < 56; i++)
        if (i < d && my[i]) sticky = 1'b1;
      my = my >> d;
    end
    sub = x[63] ^ y[63];
    if (!sub) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[56]) begin
        sticky = sticky | sum[0];
        sum    = sum >> 1;
        ex     = ex + 1;
      end
    end else begin
      // the shifted-out sticky bits belong to y, so they borrow from x
      sum = {1'b0, mx} - {1'b0, my} - {56'd0, sticky};
      if (sum == 57'd0 && !sticky) return FP64_ZERO;
      lz = 0;
      for (int i = 55; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      ex  = ex - lz;
    end
    return fp64_round(x[63], ex, sum[55:1], sum[0] | sticky);
  endfunction

  function automatic fp64_t fp64_mul_f(fp64_t a, fp64_t b);
    logic [105:0] p;
    logic         s;
    int           e;
    s = a[63] ^ b[63];
    if (fp64_is_nan(a) || fp64_is_nan(b)) return FP64_QNAN;
    if (fp64_is_special(a) || fp64_is_special(b)) begin
      if (fp64_is_zero(a) || fp64_is_zero(b)) return FP64_QNAN;
      return {s, 11'h7FF, 52'd0};
    end
    if (fp64_is_zero(a) || fp64_is_zero(b)) return {s, 63'd0};
    p = {53'd1, a[51:0]} * {53'd1, b[51:0]};
    e = int'(a[62:52]) + int'(b[62:52]) - 1023;
    if (p[105]) return fp64_round(s, e + 1, p[105:51], |p[50:0]);
    else        return fp64_round(s, e,     p[104:50], |p[49:0]);
  endfunction

  // a > b, for ordered (non-NaN) operands; +0 and -0 compare equal
  function automatic logic fp64_gt(fp64_t a, fp64_t b);
    if (fp64_is_zero(a) && fp64_is_zero(b)) return 1'b0;
    if (a[63] != b[63]) return b[63];
    if (!a[63]) return a[62:0] > b[62:0];
    return a[62:0] < b[62:0];
  endfunction

endpackage
