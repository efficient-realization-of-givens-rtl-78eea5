// fp64_add: combinational IEEE-754 double precision adder/subtractor.
//
// y = a + b when sub = 0, y = a - b when sub = 1, rounded to nearest (ties to
// even). The operand of larger magnitude fixes the exponent; the other
// significand is aligned right keeping three extra bits (guard, round,
// sticky), the two are added or subtracted, the sum is normalised with a
// leading-zero count and rounded. Subnormals are flushed to zero, an exact
// zero difference is +0, Inf - Inf and NaN operands give a quiet NaN.
//
// This is this design's stand-in for the '+' and '+/-' nodes of the
// Reconfigurable Data Path; the paper takes its FPU from earlier work and does
// not describe it. Purely combinational.
module fp64_add
  import ggr_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  input  logic  sub,
  output fp64_t y
);
  function automatic logic [5:0] lzc56(logic [55:0] v);
    logic [5:0] n;
    n = 6'd56;
    for (int i = 0; i < 56; i++)
      if (v[i]) n = 6'(55 - i);
    return n;
  endfunction

  logic        sa, sb, sl;
  logic [10:0] ea, eb, el, es;
  logic [51:0] fl, fs;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan, eff_sub;
  logic [11:0] d;
  logic [56:0] L, S, Sh, R;
  logic        stk;
  logic [5:0]  lz;
  logic signed [13:0] ex;
  logic        inc;
  logic [53:0] mant_r;

  always_comb begin
    sa = a[63]; sb = b[63] ^ sub;
    ea = a[62:52]; eb = b[62:52];
    a_zero = (ea == 11'd0); b_zero = (eb == 11'd0);
    a_inf  = (ea == 11'h7FF) && (a[51:0] == '0);
    b_inf  = (eb == 11'h7FF) && (b[51:0] == '0);
    a_nan  = (ea == 11'h7FF) && (a[51:0] != '0);
    b_nan  = (eb == 11'h7FF) && (b[51:0] != '0);
    eff_sub = sa ^ sb;
    // order by magnitude
    if (a[62:0] >= b[62:0]) begin
      sl = sa; el = ea; fl = a[51:0]; es = eb; fs = b[51:0];
    end else begin
      sl = sb; el = eb; fl = b[51:0]; es = ea; fs = a[51:0];
    end
    d  = {1'b0, el} - {1'b0, es};
    L  = {2'b01, fl, 3'b000};
    S  = {2'b01, fs, 3'b000};
    if (d >= 12'd57) begin
      Sh  = 57'd1;             // only the sticky bit survives
    end else begin
      Sh  = S >> d;
      stk = |(S & ((57'd1 << d) - 57'd1));
      Sh[0] = Sh[0] | stk;
    end
    stk = 1'b0;
    R  = eff_sub ? (L - Sh) : (L + Sh);
    ex = $signed({3'b000, el});
    lz = 6'd0;
    if (R[56]) begin
      R  = {1'b0, R[56:2], R[1] | R[0]};
      ex = ex + 14'sd1;
    end else begin
      lz = lzc56(R[55:0]);
      R  = R << lz;
      ex = ex - $signed({8'd0, lz});
    end
    inc    = R[2] & (R[1] | R[0] | R[3]);
    mant_r = {1'b0, R[55:3]} + {53'd0, inc};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      ex     = ex + 14'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_inf && eff_sub))
      y = FP64_QNAN;
    else if (a_inf)
      y = {sa, 11'h7FF, 52'd0};
    else if (b_inf)
      y = {sb, 11'h7FF, 52'd0};
    else if (a_zero && b_zero)
      y = {sa & sb, 63'd0};
    else if (b_zero)
      y = a;
    else if (a_zero)
      y = {sb, b[62:0]};
    else if (R == 57'd0)
      y = FP64_ZERO;
    else if (ex >= 14'sd2047)
      y = {sl, 11'h7FF, 52'd0};
    else if (ex <= 14'sd0)
      y = {sl, 63'd0};
    else
      y = {sl, ex[10:0], mant_r[51:0]};
  end
endmodule
