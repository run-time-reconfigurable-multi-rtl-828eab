// fp_mult_core -- multi-precision double-precision floating-point multiplier
// datapath: sign calculation, exponent addition, five mantissa multipliers of
// different widths, normalizer and exception flags.
//
// Sign: XOR of the operand signs.  Exponent: the biased exponents are added
// and the bias 1023 subtracted (a plain adder and subtracter, as the paper
// suggests, since this path is short next to the mantissa product).
//
// Mantissa: one Karatsuba-Urdhva multiplier per precision mode, for the
// 8, 16, 23, 36 and 52-bit mantissas, i.e. 9, 17, 24, 37 and 53-bit
// significands with the hidden 1.  Only the multiplier of the selected mode
// sees the operands; the others get zeros (operand isolation), which is how
// this design renders the paper's "unused units are shut down".  The chosen
// product is aligned to 106 bits and normalised: if its top bit is set, the
// point moves one place and the exponent is incremented.  The 52 mantissa
// bits below the leading 1 are kept and the rest truncated.  Truncation here
// follows the paper's table of results, whose double-precision product of
// 4069b130ae804118 with itself, 40e4a0b1337cdfbd, is the truncated (not the
// rounded) value; the text's "rounding after multiplication" is not done.
//
// Exceptions (this design's handling where the paper is silent): a NaN
// operand, or infinity times zero, gives a quiet NaN; an infinite operand or
// exponent overflow gives infinity; a zero or denormal operand gives zero
// (denormal inputs are flushed); exponent underflow gives a denormal result
// by right-shifting the significand (truncated), or zero when nothing is left.
// The four flags classify the result the way the paper defines them.
//
// Interface: a, b (doubles, already truncated to the mode), mode (resolved,
// 001..101) in; p (double) and flags out.  Combinational.
//
// The low 52 bits of the 106-bit product and the top bit of the
// denormal-shift word are never read.  They are the bits that truncation
// discards, and linters report them as unused.
module fp_mult_core
  import fpmm_pkg::*;
(
  input  fp64_t     a,
  input  fp64_t     b,
  input  mode_e     mode,
  output fp64_t     p,
  output fp_flags_t flags
);

  // Significands (hidden 1 + top k mantissa bits) for each multiplier,
  // forced to zero unless that multiplier is the selected one.
  logic [8:0]   sa8,  sb8;
  logic [16:0]  sa16, sb16;
  logic [23:0]  sa23, sb23;
  logic [36:0]  sa36, sb36;
  logic [52:0]  sa52, sb52;
  logic [17:0]  pr8;
  logic [33:0]  pr16;
  logic [47:0]  pr23;
  logic [73:0]  pr36;
  logic [105:0] pr52;

  always_comb begin
    sa8  = (mode == MODE_8)  ? {1'b1, a.man[51 -: 8]}  : '0;
    sb8  = (mode == MODE_8)  ? {1'b1, b.man[51 -: 8]}  : '0;
    sa16 = (mode == MODE_16) ? {1'b1, a.man[51 -: 16]} : '0;
    sb16 = (mode == MODE_16) ? {1'b1, b.man[51 -: 16]} : '0;
    sa23 = (mode == MODE_23) ? {1'b1, a.man[51 -: 23]} : '0;
    sb23 = (mode == MODE_23) ? {1'b1, b.man[51 -: 23]} : '0;
    sa36 = (mode == MODE_36) ? {1'b1, a.man[51 -: 36]} : '0;
    sb36 = (mode == MODE_36) ? {1'b1, b.man[51 -: 36]} : '0;
    sa52 = (mode == MODE_52) ? {1'b1, a.man}           : '0;
    sb52 = (mode == MODE_52) ? {1'b1, b.man}           : '0;
  end

  karatsuba_mult #(.W(9))  u_mul8  (.x(sa8),  .y(sb8),  .p(pr8));
  karatsuba_mult #(.W(17)) u_mul16 (.x(sa16), .y(sb16), .p(pr16));
  karatsuba_mult #(.W(24)) u_mul23 (.x(sa23), .y(sb23), .p(pr23));
  karatsuba_mult #(.W(37)) u_mul36 (.x(sa36), .y(sb36), .p(pr36));
  karatsuba_mult #(.W(53)) u_mul52 (.x(sa52), .y(sb52), .p(pr52));

  logic               sign;
  logic [105:0]       prod;      // selected product, point after bit 104
  logic signed [13:0] e_sum;     // unbiased-sum exponent, may leave 1..2046
  logic signed [13:0] e_norm;
  logic [MAN_W-1:0]   man_n;
  logic [MAN_W:0]     sig_sub;   // significand shifted for a denormal result
  logic signed [13:0] sh;
  logic               a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    sign = a.sign ^ b.sign;

    unique case (mode)
      MODE_8:  prod = {pr8,  88'b0};
      MODE_16: prod = {pr16, 72'b0};
      MODE_23: prod = {pr23, 58'b0};
      MODE_36: prod = {pr36, 32'b0};
      default: prod = pr52;
    endcase

    // Exponent: ripple adder, then bias subtracter.
    e_sum = 14'(a.exp) + 14'(b.exp) - 14'(BIAS);

    // Normalizer.
    if (prod[105]) begin
      e_norm = e_sum + 14'sd1;
      man_n  = prod[104:53];
    end else begin
      e_norm = e_sum;
      man_n  = prod[103:52];
    end

    a_nan  = (a.exp == '1) && (a.man != '0);
    b_nan  = (b.exp == '1) && (b.man != '0);
    a_inf  = (a.exp == '1) && (a.man == '0);
    b_inf  = (b.exp == '1) && (b.man == '0);
    a_zero = (a.exp == '0);
    b_zero = (b.exp == '0);

    sh      = 14'sd1 - e_norm;
    sig_sub = '0;
    p       = '{sign: sign, exp: e_norm[EXP_W-1:0], man: man_n};

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p = FP_QNAN;
    end else if (a_inf || b_inf) begin
      p = '{sign: sign, exp: '1, man: '0};
    end else if (a_zero || b_zero) begin
      p = '{sign: sign, exp: '0, man: '0};
    end else if (e_norm >= 14'sd2047) begin
      p = '{sign: sign, exp: '1, man: '0};
    end else if (e_norm <= 14'sd0) begin
      if (sh <= 14'sd52)
        sig_sub = {1'b1, man_n} >> sh;
      p = '{sign: sign, exp: '0, man: sig_sub[MAN_W-1:0]};
    end

    flags = classify(p);
  end

endmodule
