// fp64_add: combinational IEEE-754 double-precision adder, used by each lane of the SPU
// execution unit to add the product to its accumulator.
//
// The operand with the larger magnitude keeps its exponent; the other significand is shifted
// right into three extra bits (guard, round, sticky) with everything shifted further folded into
// the sticky bit. After the add or subtract the result is normalised (a leading-zero count for
// cancellation) and rounded to nearest, ties to even. An exact zero difference is +0. As in
// fp64_mul, subnormals are flushed to zero on input and output: a simplification of this design,
// the published description names only a double-precision MAC. Purely combinational.
module fp64_add (
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] s
);
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  logic        sa, sb, sx, sy, swap;
  logic [10:0] ea, eb, ex, ey;
  logic [51:0] fa, fb;
  logic [52:0] mx, my;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [11:0] d;
  logic [55:0] xm, ym;
  logic [119:0] ysh;
  logic [56:0] r;
  logic        st;
  logic [5:0]  lz;
  logic signed [13:0] exp_v;
  logic [52:0] mant;
  logic        g, rr, ss, rnd;
  logic [53:0] mant_r;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_zero = (ea == 11'd0);
    b_zero = (eb == 11'd0);
    a_inf  = (ea == 11'h7FF) && (fa == 52'd0);
    b_inf  = (eb == 11'h7FF) && (fb == 52'd0);
    a_nan  = (ea == 11'h7FF) && (fa != 52'd0);
    b_nan  = (eb == 11'h7FF) && (fb != 52'd0);

    // Order by magnitude: x is the larger.
    swap = {eb, fb} > {ea, fa};
    sx = swap ? sb : sa;   sy = swap ? sa : sb;
    ex = swap ? eb : ea;   ey = swap ? ea : eb;
    mx = swap ? {1'b1, fb} : {1'b1, fa};
    my = swap ? {1'b1, fa} : {1'b1, fb};

    d   = {1'b0, ex} - {1'b0, ey};
    xm  = {mx, 3'b000};
    ysh = {my, 3'b000, 64'd0} >> ((d > 12'd64) ? 12'd64 : d);
    st  = |ysh[63:0];
    ym  = ysh[119:64] | {55'd0, st};

    exp_v = $signed({3'b000, ex});
    lz    = '0;
    if (sx == sy) begin
      r = {1'b0, xm} + {1'b0, ym};
      if (r[56]) begin
        r     = {1'b0, r[56:2], r[1] | r[0]};
        exp_v = exp_v + 14'sd1;
      end
    end else begin
      r = {1'b0, xm} - {1'b0, ym};
      lz = 6'd0;
      for (int i = 0; i <= 55; i++) if (r[i]) lz = 6'(55 - i);
      r     = r << lz;
      exp_v = exp_v - $signed({8'd0, lz});
    end

    mant   = r[55:3];
    g      = r[2];
    rr     = r[1];
    ss     = r[0];
    rnd    = g & (rr | ss | mant[0]);
    mant_r = {1'b0, mant} + {53'd0, rnd};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      exp_v  = exp_v + 14'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) s = QNAN;
    else if (a_inf)                                       s = a;
    else if (b_inf)                                       s = b;
    else if (a_zero && b_zero)                            s = {sa & sb, 63'd0};
    else if (a_zero)                                      s = b;
    else if (b_zero)                                      s = a;
    else if (r[55:0] == 56'd0)                            s = 64'd0;
    else if (exp_v >= 14'sd2047)                          s = {sx, 11'h7FF, 52'd0};
    else if (exp_v <= 14'sd0)                             s = {sx, 63'd0};
    else                                                  s = {sx, exp_v[10:0], mant_r[51:0]};
  end
endmodule
