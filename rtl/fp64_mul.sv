// fp64_mul: combinational IEEE-754 double precision multiplier.
//
// y = a * b, rounded to nearest (ties to even). Subnormal inputs are read as
// zero and results that would be subnormal are flushed to a signed zero;
// overflow gives a signed infinity; NaN operands and Inf*0 give a quiet NaN.
// The 53x53-bit significand product is normalised by at most one position,
// then rounded with a guard bit and a sticky bit.
//
// The paper uses a double precision FPU from its own earlier work and does not
// describe it; this unit is this design's simplest stand-in for the
// multipliers drawn in the Reconfigurable Data Path. Purely combinational: the
// RDP places a register after it.
module fp64_mul
  import ggr_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  output fp64_t y
);
  logic        sa, sb, sy;
  logic [10:0] ea, eb;
  logic [52:0] ma, mb;
  logic [105:0] prod;
  logic [52:0] mant;
  logic        guard, sticky, inc;
  logic [53:0] mant_r;
  logic signed [13:0] ex;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    sa = a[63]; sb = b[63]; sy = sa ^ sb;
    ea = a[62:52]; eb = b[62:52];
    a_zero = (ea == 11'd0); b_zero = (eb == 11'd0);
    a_inf  = (ea == 11'h7FF) && (a[51:0] == '0);
    b_inf  = (eb == 11'h7FF) && (b[51:0] == '0);
    a_nan  = (ea == 11'h7FF) && (a[51:0] != '0);
    b_nan  = (eb == 11'h7FF) && (b[51:0] != '0);
    ma = {1'b1, a[51:0]};
    mb = {1'b1, b[51:0]};
    prod = ma * mb;
    ex = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 14'sd1023;
    if (prod[105]) begin
      mant   = prod[105:53];
      guard  = prod[52];
      sticky = |prod[51:0];
      ex     = ex + 14'sd1;
    end else begin
      mant   = prod[104:52];
      guard  = prod[51];
      sticky = |prod[50:0];
    end
    inc    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {53'd0, inc};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      ex     = ex + 14'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = FP64_QNAN;
    else if (a_inf || b_inf)
      y = {sy, 11'h7FF, 52'd0};
    else if (a_zero || b_zero)
      y = {sy, 63'd0};
    else if (ex >= 14'sd2047)
      y = {sy, 11'h7FF, 52'd0};
    else if (ex <= 14'sd0)
      y = {sy, 63'd0};
    else
      y = {sy, ex[10:0], mant_r[51:0]};
  end
endmodule
