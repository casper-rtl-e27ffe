// fp64_mul: combinational IEEE-754 double-precision multiplier, one per vector lane of the SPU
// execution unit (the "*" of each lane).
//
// The 53x53-bit significand product is normalised by at most one position and rounded to
// nearest, ties to even. Infinities and NaNs follow IEEE-754 (NaN results are the canonical quiet
// NaN). Subnormal inputs are read as zero and results that would be subnormal are flushed to a
// signed zero: the published design names only "a double-precision floating-point MAC", so this
// flush-to-zero simplification is this design's own choice. Purely combinational: a = operand,
// b = constant, p = a*b in the same cycle.
module fp64_mul (
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] p
);
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  logic        sa, sb, sp;
  logic [10:0] ea, eb;
  logic [51:0] fa, fb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [105:0] prod;
  logic [52:0] mant;
  logic        guard, sticky, rnd;
  logic [53:0] mant_r;
  logic signed [13:0] exp_v;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sp     = sa ^ sb;
    a_zero = (ea == 11'd0);
    b_zero = (eb == 11'd0);
    a_inf  = (ea == 11'h7FF) && (fa == 52'd0);
    b_inf  = (eb == 11'h7FF) && (fb == 52'd0);
    a_nan  = (ea == 11'h7FF) && (fa != 52'd0);
    b_nan  = (eb == 11'h7FF) && (fb != 52'd0);

    prod  = {1'b1, fa} * {1'b1, fb};
    exp_v = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 14'sd1023;
    if (prod[105]) begin
      mant   = prod[105:53];
      guard  = prod[52];
      sticky = |prod[51:0];
      exp_v  = exp_v + 14'sd1;
    end else begin
      mant   = prod[104:52];
      guard  = prod[51];
      sticky = |prod[50:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {53'd0, rnd};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      exp_v  = exp_v + 14'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) p = QNAN;
    else if (a_inf || b_inf)                                      p = {sp, 11'h7FF, 52'd0};
    else if (a_zero || b_zero)                                    p = {sp, 63'd0};
    else if (exp_v >= 14'sd2047)                                  p = {sp, 11'h7FF, 52'd0};
    else if (exp_v <= 14'sd0)                                     p = {sp, 63'd0};
    else                                                          p = {sp, exp_v[10:0], mant_r[51:0]};
  end
endmodule
