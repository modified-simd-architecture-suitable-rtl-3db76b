// fp_mul: combinational IEEE-754 double-precision multiplier.
//
// y = a * b, rounded to nearest, ties to even. The 53x53-bit mantissa
// product is normalised by at most one place and rounded from its guard and
// sticky bits. Subnormal inputs are read as signed zeros and results below
// the normal range are flushed to signed zero; overflow gives infinity; NaN
// inputs and inf * 0 give a quiet NaN. Purely combinational. The rounding
// and flushing rules are this design's choice; the architecture only calls
// for a floating-point unit in each PE.
module fp_mul
  import grape_pkg::*;
(
  input  word_t a,
  input  word_t b,
  output word_t y
);

  logic         s, a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [105:0] p;
  logic [52:0]  m;
  logic         g, st, up;
  logic [53:0]  mant_r;
  logic signed [13:0] e_r;

  always_comb begin
    s      = a[63] ^ b[63];
    a_nan  = (a[62:52] == EXP_MAX) && (a[51:0] != '0);
    b_nan  = (b[62:52] == EXP_MAX) && (b[51:0] != '0);
    a_inf  = (a[62:52] == EXP_MAX) && (a[51:0] == '0);
    b_inf  = (b[62:52] == EXP_MAX) && (b[51:0] == '0);
    a_zero = (a[62:52] == '0);
    b_zero = (b[62:52] == '0);

    p   = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    e_r = signed'({3'b000, a[62:52]}) + signed'({3'b000, b[62:52]}) - 14'sd1023;
    if (p[105]) begin
      m   = p[105:53];
      g   = p[52];
      st  = p[51:0] != '0;
      e_r = e_r + 14'sd1;
    end else begin
      m   = p[104:52];
      g   = p[51];
      st  = p[50:0] != '0;
    end

    up     = g & (st | m[0]);
    mant_r = {1'b0, m} + {53'd0, up};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e_r    = e_r + 14'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = QNAN;
    else if (a_inf || b_inf)                                     y = {s, EXP_MAX, 52'd0};
    else if (a_zero || b_zero)                                   y = {s, 63'd0};
    else if (e_r >= 14'sd2047)                                   y = {s, EXP_MAX, 52'd0};
    else if (e_r <= 14'sd0)                                      y = {s, 63'd0};
    else                                                         y = {s, e_r[10:0], mant_r[51:0]};
  end

endmodule
