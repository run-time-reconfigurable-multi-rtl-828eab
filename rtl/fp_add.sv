// fp_add -- IEEE-754 double-precision adder/subtractor, y = a + b or a - b.
//
// The matrix algorithm needs additions and subtractions of doubles (the
// Strassen operand sums, the recombination of partial products and the sum
// of block products), but the paper does not describe an adder, so this is
// a plain textbook design of this project: unpack; order the operands by
// magnitude; shift the smaller significand right by the exponent difference
// keeping guard, round and sticky bits; add or subtract; normalise (one
// place right on a carry, leading-zero count and left shift after a
// cancellation); round to nearest, ties to even.
//
// Special values: NaN in, or infinity minus infinity, gives a quiet NaN;
// an infinite operand otherwise passes; an exact zero result is +0 (or -0
// when both operands are -0).  Denormal operands are taken as zero and a
// result below the normal range is flushed to a signed zero; the rest of the
// datapath (the multiplier) likewise flushes denormal inputs.  Overflow gives
// infinity.
//
// Interface: a, b (doubles), sub (1 = subtract) in; y out.  Combinational.
module fp_add
  import fpmm_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  input  logic  sub,
  output fp64_t y
);

  fp64_t            x1, x2;          // |x1| >= |x2|
  logic             s2;              // effective sign of b
  logic             a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [11:0]      d;               // exponent difference
  logic [55:0]      m1, m2;          // 1.52 significand + G R S
  logic [55:0]      m2s;
  logic             sticky;
  logic [56:0]      sum;
  logic signed [12:0] e;
  int               lz;
  logic [52:0]      mant;
  logic             g, r, st, up;
  logic [53:0]      mant_r;

  always_comb begin
    s2     = b.sign ^ sub;
    a_nan  = (a.exp == '1) && (a.man != '0);
    b_nan  = (b.exp == '1) && (b.man != '0);
    a_inf  = (a.exp == '1) && (a.man == '0);
    b_inf  = (b.exp == '1) && (b.man == '0);
    a_zero = (a.exp == '0);
    b_zero = (b.exp == '0);

    // Order by magnitude.
    if ({a.exp, a.man} >= {b.exp, b.man}) begin
      x1 = a;
      x2 = '{sign: s2, exp: b.exp, man: b.man};
    end else begin
      x1 = '{sign: s2, exp: b.exp, man: b.man};
      x2 = a;
    end

    d  = 12'(x1.exp) - 12'(x2.exp);
    m1 = {1'b1, x1.man, 3'b000};
    m2 = {1'b1, x2.man, 3'b000};

    // Alignment shift with sticky collection.
    if (d >= 12'd56) begin
      m2s    = '0;
      sticky = 1'b1;
    end else begin
      m2s    = m2 >> d;
      sticky = ((m2 << (12'd56 - d)) != '0) && (d != '0);
    end
    m2s[0] = m2s[0] | sticky;

    if (x1.sign == x2.sign) sum = {1'b0, m1} + {1'b0, m2s};
    else                    sum = {1'b0, m1} - {1'b0, m2s};

    e = 13'(x1.exp);

    // Normalise.
    lz = 0;
    if (sum[56]) begin
      sum = {1'b0, sum[56:2], sum[1] | sum[0]};
      e   = e + 13'sd1;
    end else begin
      for (int i = 55; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      if (lz < 56) begin
        sum = sum << lz;
        e   = e - 13'(lz);
      end
    end

    // Round to nearest even.
    mant   = sum[55:3];
    g      = sum[2];
    r      = sum[1];
    st     = sum[0];
    up     = g & (r | st | mant[0]);
    mant_r = {1'b0, mant} + 54'(up);
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e      = e + 13'sd1;
    end

    // Result selection.
    if (a_nan || b_nan || (a_inf && b_inf && (a.sign != s2))) begin
      y = FP_QNAN;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = '{sign: s2, exp: '1, man: '0};
    end else if (a_zero && b_zero) begin
      y = '{sign: a.sign & s2, exp: '0, man: '0};
    end else if (a_zero) begin
      y = '{sign: s2, exp: b.exp, man: b.man};
    end else if (b_zero) begin
      y = a;
    end else if (lz >= 56) begin
      y = '0;                                  // exact cancellation
    end else if (e >= 13'sd2047) begin
      y = '{sign: x1.sign, exp: '1, man: '0};
    end else if (e <= 13'sd0) begin
      y = '{sign: x1.sign, exp: '0, man: '0};  // flush underflow
    end else begin
      y = '{sign: x1.sign, exp: e[EXP_W-1:0], man: mant_r[51:0]};
    end
  end

endmodule
