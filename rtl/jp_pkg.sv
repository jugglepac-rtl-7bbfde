// jp_pkg -- shared types, constants and arithmetic for the JugglePAC accumulator.
//
// Holds the floating-point word type (IEEE-754 binary64), the combinational
// binary64 addition used inside the pipelined adder, and the minimum dataset
// length rule of the accumulator.
//
// The accumulator itself is precision-agnostic; binary64 is this design's
// choice (the comparable accumulators are double-precision ones). The addition
// rounds to nearest, ties to even, keeps subnormals, returns a quiet NaN
// (0x7FF8_0000_0000_0000) for any NaN operand or for inf + (-inf), and +0 for an
// exact cancellation, i.e. it gives the same result as a C `double` addition.
//
// min_dataset_len() is Eq. (1) of the accumulator's analysis:
//   max( ceil( ((1 + ceil(log2 p)) * p + 4) / (2^L - 1) ), 4 )
// where p is the adder latency and L the label width.
package jp_pkg;

  localparam int unsigned FP_W   = 64;

  typedef logic [FP_W-1:0] fp_t;

  localparam fp_t FP_QNAN = 64'h7FF8_0000_0000_0000;

  // Minimum dataset length, Eq. (1).
  function automatic int unsigned min_dataset_len(int unsigned p, int unsigned l);
    int unsigned num, den, q;
    num = (1 + $clog2(p)) * p + 4;
    den = (1 << l) - 1;
    q   = (num + den - 1) / den;
    return (q > 4) ? q : 4;
  endfunction

  // binary64 addition, round to nearest even.
  // Mantissas carry 3 extra bits below the LSB (guard, round, sticky) and one
  // carry bit above the hidden one: bit 56 carry, 55 hidden, 54..3 fraction,
  // 2 guard, 1 round, 0 sticky.
  function automatic fp_t fp_add(fp_t a, fp_t b);
    logic        sa, sb, sx, sy, sr;
    logic [10:0] ea, eb;
    logic [51:0] fa, fb;
    logic [11:0] ex, ey, er;          // effective exponents (subnormal -> 1)
    logic [52:0] mx, my;              // 53-bit significands
    logic        a_nan, b_nan, a_inf, b_inf;
    logic [56:0] xw, yw, yal, sum, nrm, mask;
    logic [11:0] d;
    logic        sticky;
    int unsigned lz, sh;
    logic [62:0] packed_r;
    logic        rup;

    sa = a[63]; ea = a[62:52]; fa = a[51:0];
    sb = b[63]; eb = b[62:52]; fb = b[51:0];
    a_nan = (ea == 11'h7FF) && (fa != '0);
    b_nan = (eb == 11'h7FF) && (fb != '0);
    a_inf = (ea == 11'h7FF) && (fa == '0);
    b_inf = (eb == 11'h7FF) && (fb == '0);

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) return FP_QNAN;
    if (a_inf) return a;
    if (b_inf) return b;

    // Order by magnitude so that |x| >= |y|.
    if ({ea, fa} >= {eb, fb}) begin
      sx = sa; sy = sb;
      ex = (ea == '0) ? 12'd1 : {1'b0, ea};
      ey = (eb == '0) ? 12'd1 : {1'b0, eb};
      mx = {(ea != '0), fa};
      my = {(eb != '0), fb};
    end else begin
      sx = sb; sy = sa;
      ex = (eb == '0) ? 12'd1 : {1'b0, eb};
      ey = (ea == '0) ? 12'd1 : {1'b0, ea};
      mx = {(eb != '0), fb};
      my = {(ea != '0), fa};
    end

    // Align the smaller operand, folding shifted-out bits into the sticky bit.
    xw = {1'b0, mx, 3'b000};
    yw = {1'b0, my, 3'b000};
    d  = ex - ey;
    if (d >= 12'd57) begin
      yal    = '0;
      sticky = (yw != '0);
    end else begin
      mask   = (57'd1 << d) - 57'd1;
      yal    = yw >> d;
      sticky = ((yw & mask) != '0);
    end
    yal[0] = yal[0] | sticky;

    sum = (sx == sy) ? (xw + yal) : (xw - yal);

    if (sum == '0) begin
      // Exact zero: -0 only when both operands are -0.
      sr = (sx == sy) ? sx : 1'b0;
      return {sr, 63'd0};
    end
    sr = sx;
    er = ex;

    if (sum[56]) begin
      // Carry out: shift right by one, keep the sticky bit.
      nrm = {1'b0, sum[56:2], (sum[1] | sum[0])};
      er  = er + 12'd1;
    end else begin
      // Leading-zero count of sum[55:0] (the highest set bit wins).
      lz = 56;
      for (int i = 0; i <= 55; i++) begin
        if (sum[i]) lz = 55 - i;
      end
      // Never shift below the minimum exponent: the result is then subnormal.
      sh  = (lz < int'(er) - 1) ? lz : int'(er) - 1;
      nrm = sum << sh;
      er  = er - 12'(sh);
    end

    if (er >= 12'd2047) return {sr, 11'h7FF, 52'd0};

    // Pack (exponent field 0 when the hidden bit is clear) and round; a carry
    // out of the fraction moves into the exponent field, up to infinity.
    packed_r = {(nrm[55] ? er[10:0] : 11'd0), nrm[54:3]};
    rup      = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    packed_r = packed_r + 63'(rup);
    return {sr, packed_r};
  endfunction

endpackage
