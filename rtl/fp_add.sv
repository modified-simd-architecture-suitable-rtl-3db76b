// fp_add: combinational IEEE-754 double-precision adder.
//
// y = a + b, rounded to nearest, ties to even. Subnormal inputs are read as
// zeros of the same sign and results below the normal range are flushed to
// signed zero; overflow gives infinity, NaN inputs and inf - inf give a quiet
// NaN. The operand of smaller magnitude is aligned with three extra bits
// (guard, round, sticky), the mantissas are added or subtracted, the sum is
// normalised and then rounded. Used by the PE's ALU/FPU and by every node of
// the reduction tree. Purely combinational: no clock, no latency. The
// rounding and flushing rules are this design's choice; the architecture
// only calls for a floating-point unit.
module fp_add
  import grape_pkg::*;
(
  input  word_t a,
  input  word_t b,
  output word_t y
);

  logic        sa, sb, a_nan, b_nan, a_inf, b_inf, a_zero, b_zero, a_big;
  logic        s_l, s_s;
  logic [10:0] e_l, e_s;
  logic [52:0] m_l, m_s;
  logic [10:0] d;
  logic [55:0] al, as_full, as_sh;
  logic        sticky;
  logic [56:0] sum;
  logic [55:0] nrm;
  logic [5:0]  lz;
  logic signed [12:0] e_r;
  logic [53:0] mant_r;
  logic        up;

  always_comb begin
    sa     = a[63];
    sb     = b[63];
    a_nan  = (a[62:52] == EXP_MAX) && (a[51:0] != '0);
    b_nan  = (b[62:52] == EXP_MAX) && (b[51:0] != '0);
    a_inf  = (a[62:52] == EXP_MAX) && (a[51:0] == '0);
    b_inf  = (b[62:52] == EXP_MAX) && (b[51:0] == '0);
    a_zero = (a[62:52] == '0);
    b_zero = (b[62:52] == '0);

    // Order the operands by magnitude (subnormals count as zero).
    a_big = (a_zero ? 63'd0 : a[62:0]) >= (b_zero ? 63'd0 : b[62:0]);
    s_l = a_big ? sa : sb;
    s_s = a_big ? sb : sa;
    e_l = a_big ? a[62:52] : b[62:52];
    e_s = a_big ? b[62:52] : a[62:52];
    m_l = (a_big ? a_zero : b_zero) ? 53'd0 : {1'b1, (a_big ? a[51:0] : b[51:0])};
    m_s = (a_big ? b_zero : a_zero) ? 53'd0 : {1'b1, (a_big ? b[51:0] : a[51:0])};

    // Align the smaller operand, keeping guard, round and sticky bits.
    d       = e_l - e_s;
    al      = {m_l, 3'b000};
    as_full = {m_s, 3'b000};
    if (d >= 11'd56) begin
      as_sh  = '0;
      sticky = (m_s != '0);
    end else begin
      as_sh  = as_full >> d;
      sticky = (as_full & ((56'd1 << d) - 56'd1)) != '0;
    end
    as_sh[0] = as_sh[0] | sticky;

    // Add or subtract the magnitudes (|large| >= |small|, so no sign change).
    if (s_l == s_s) sum = {1'b0, al} + {1'b0, as_sh};
    else            sum = {1'b0, al} - {1'b0, as_sh};

    // Normalise so that the leading one sits in bit 55.
    e_r = signed'({2'b00, e_l});
    lz  = '0;
    if (sum[56]) begin
      nrm = {sum[56:2], sum[1] | sum[0]};
      e_r = e_r + 13'sd1;
    end else begin
      for (int i = 0; i <= 55; i++) begin
        if (sum[i]) lz = 6'(55 - i);
      end
      nrm = sum[55:0] << lz;
      e_r = e_r - signed'({7'd0, lz});
    end

    // Round to nearest even.
    up     = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    mant_r = {1'b0, nrm[55:3]} + {53'd0, up};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e_r    = e_r + 13'sd1;
    end

    // Pack, with the special cases.
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) y = QNAN;
    else if (a_inf)                                      y = a;
    else if (b_inf)                                      y = b;
    else if (sum == '0)                                  y = {(s_l & s_s), 63'd0};
    else if (e_r >= 13'sd2047)                           y = {s_l, EXP_MAX, 52'd0};
    else if (e_r <= 13'sd0)                              y = {s_l, 63'd0};
    else                                                 y = {s_l, e_r[10:0], mant_r[51:0]};
  end

endmodule
