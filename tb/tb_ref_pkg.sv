// tb_ref_pkg -- reference models for the testbenches.
//
// These are written independently of the RTL: plain integer arithmetic with
// the SystemVerilog '*' operator instead of the Karatsuba/Urdhva structure,
// a differently coded auto-mode scan, and the simulator's own IEEE double
// arithmetic ('real') for additions.  They encode the same arithmetic rules
// the design documents: operand truncation to the mode's mantissa width
// with round-up rnd = G&(R|T|E), truncation after the multiplication,
// denormal inputs flushed to zero.
package tb_ref_pkg;

  // Mantissa width of a mode code.
  function automatic int man_bits(logic [2:0] m);
    case (m)
      3'b001:  return 8;
      3'b010:  return 16;
      3'b011:  return 23;
      3'b100:  return 36;
      default: return 52;
    endcase
  endfunction

  // Auto-mode choice for one mantissa: position of the first 1 (from the
  // top) that has six zeros below it, then the threshold table.
  function automatic logic [2:0] ref_auto(logic [51:0] m);
    int n;
    n = 51;
    while (n >= 0) begin
      if (m[n]) begin
        logic ok;
        ok = 1'b1;
        for (int j = 1; j <= 6; j++)
          if (n - j >= 0 && m[n-j]) ok = 1'b0;
        if (ok) break;
      end
      n = n - 1;
    end
    if (n < 0)   return 3'b001;
    if (n >= 44) return 3'b001;
    if (n >= 35) return 3'b010;
    if (n >= 28) return 3'b011;
    if (n >= 16) return 3'b100;
    return 3'b101;
  endfunction

  function automatic logic [2:0] ref_resolve(logic [2:0] mode, logic [63:0] a, logic [63:0] b);
    logic [2:0] ma, mb;
    if (mode != 3'b000) return mode;
    ma = ref_auto(a[51:0]);
    mb = ref_auto(b[51:0]);
    return (ma > mb) ? ma : mb;
  endfunction

  // Operand truncation and rounding.
  function automatic logic [63:0] ref_trunc(logic [63:0] x, int k);
    longint unsigned man, kept, rest;
    int              drop;
    logic            g, r, t, e, rnd;
    logic [10:0]     ex;
    if (k == 52 || x[62:52] == 11'h000 || x[62:52] == 11'h7FF) return x;
    man  = longint'(x[51:0]);
    drop = 52 - k;
    kept = man >> drop;
    rest = man & ((64'd1 << drop) - 1);
    g = rest[drop-1];
    r = rest[drop-2];
    t = rest[drop-3];
    e = rest[drop-4];
    rnd = g & (r | t | e);
    kept = kept + longint'(rnd);
    ex = x[62:52];
    if (kept == (64'd1 << k)) begin
      kept = 0;
      ex   = ex + 1;
    end
    return {x[63], ex, 52'(kept << drop)};
  endfunction

  // Multiplication of two (already truncated) doubles at k mantissa bits,
  // result truncated to 52 bits.
  function automatic logic [63:0] ref_core(logic [63:0] a, logic [63:0] b, int k);
    logic [105:0] pa, pb, pr;
    logic         s;
    int           e, sh;
    logic [51:0]  man;
    logic [52:0]  sig;
    s = a[63] ^ b[63];
    if ((a[62:52] == 11'h7FF && a[51:0] != 0) || (b[62:52] == 11'h7FF && b[51:0] != 0))
      return 64'h7FF8_0000_0000_0000;
    if ((a[62:52] == 11'h7FF && b[62:52] == 0) || (b[62:52] == 11'h7FF && a[62:52] == 0))
      return 64'h7FF8_0000_0000_0000;
    if (a[62:52] == 11'h7FF || b[62:52] == 11'h7FF) return {s, 11'h7FF, 52'h0};
    if (a[62:52] == 0 || b[62:52] == 0) return {s, 63'h0};
    // Significands truncated to k bits (the operands are already rounded).
    pa = 106'({1'b1, a[51:0]} >> (52 - k));
    pb = 106'({1'b1, b[51:0]} >> (52 - k));
    pr = (pa * pb) << (2 * (52 - k));
    e  = int'(a[62:52]) + int'(b[62:52]) - 1023;
    if (pr[105]) begin
      e   = e + 1;
      man = pr[104:53];
    end else begin
      man = pr[103:52];
    end
    if (e >= 2047) return {s, 11'h7FF, 52'h0};
    if (e <= 0) begin
      sh  = 1 - e;
      sig = (sh > 52) ? 53'h0 : ({1'b1, man} >> sh);
      return {s, 11'h000, sig[51:0]};
    end
    return {s, 11'(e), man};
  endfunction

  // Full reconfigurable multiply: resolve mode, round operands, multiply.
  function automatic logic [63:0] ref_mult(logic [2:0] mode, logic [63:0] a, logic [63:0] b);
    logic [2:0] m;
    int         k;
    m = ref_resolve(mode, a, b);
    k = man_bits(m);
    return ref_core(ref_trunc(a, k), ref_trunc(b, k), k);
  endfunction

  // IEEE double add/sub by the simulator, with this design's denormal
  // flushing applied to operands and result.
  function automatic logic [63:0] flush(logic [63:0] x);
    if (x[62:52] == 0) return {x[63], 63'h0};
    return x;
  endfunction

  function automatic logic [63:0] ref_add(logic [63:0] a, logic [63:0] b, logic sub);
    real ra, rb, ry;
    logic [63:0] y;
    ra = $bitstoreal(flush(a));
    rb = $bitstoreal(flush(b));
    ry = sub ? (ra - rb) : (ra + rb);
    y  = $realtobits(ry);
    if (y[62:52] == 11'h7FF && y[51:0] != 0) return 64'h7FF8_0000_0000_0000;
    return flush(y);
  endfunction

  // Random normal double with exponent in [1023-er, 1023+er].
  function automatic logic [63:0] rand_fp(int er);
    logic [10:0] ex;
    ex = 11'(1023 - er + int'($urandom_range(0, 2 * er)));
    return {1'($urandom), ex, 20'($urandom), 32'($urandom)};
  endfunction

  // Small integer as a double (exact).
  function automatic logic [63:0] int_fp(int v);
    return $realtobits(real'(v));
  endfunction

  typedef logic [63:0] fp_t;
  typedef fp_t mat2_t [4];   // {x11, x12, x21, x22}

  // Strassen partial products S1..S7 of one processing element.
  function automatic void ref_strassen_s(logic [2:0] mode, mat2_t a, mat2_t b, output fp_t s [7]);
    fp_t al [5], be [5];
    al[0] = ref_add(a[0], a[3], 0);  be[0] = ref_add(b[0], b[3], 0);
    al[1] = ref_add(a[2], a[3], 0);  be[1] = ref_add(b[1], b[3], 1);
    al[2] = ref_add(a[0], a[1], 0);  be[2] = ref_add(b[2], b[0], 1);
    al[3] = ref_add(a[2], a[0], 1);  be[3] = ref_add(b[0], b[1], 0);
    al[4] = ref_add(a[1], a[3], 1);  be[4] = ref_add(b[2], b[3], 0);
    s[0] = ref_mult(mode, al[0], be[0]);
    s[1] = ref_mult(mode, al[1], b[0]);
    s[2] = ref_mult(mode, a[0],  be[1]);
    s[3] = ref_mult(mode, a[3],  be[2]);
    s[4] = ref_mult(mode, al[2], b[3]);
    s[5] = ref_mult(mode, al[3], be[3]);
    s[6] = ref_mult(mode, al[4], be[4]);
  endfunction

  // Result of one processing element.
  function automatic void ref_pe(logic [2:0] mode, mat2_t a, mat2_t b, output mat2_t p);
    fp_t s [7];
    ref_strassen_s(mode, a, b, s);
    p[0] = ref_add(ref_add(ref_add(s[0], s[3], 0), s[4], 1), s[6], 0);
    p[1] = ref_add(s[2], s[4], 0);
    p[2] = ref_add(s[1], s[3], 0);
    p[3] = ref_add(ref_add(ref_add(s[0], s[1], 1), s[2], 0), s[5], 0);
  endfunction

endpackage
