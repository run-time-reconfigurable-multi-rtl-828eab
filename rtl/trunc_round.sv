// trunc_round -- input truncation and rounding of one operand before the
// mantissa multiplication.
//
// For a mode keeping k mantissa bits (k = 8, 16, 23 or 36) the mantissa is
// cut after bit L (the k-th bit below the hidden 1).  The four bits that
// follow L are the rounding bits of the paper, guard G, round R, sticky T and
// an extra bit E, and the kept mantissa is rounded up by
//     rnd = G & (R | T | E)
// (a round-up scheme: rnd is added at L).  The bits below E are dropped.  If
// the increment carries out of the mantissa, the mantissa becomes 0 and the
// exponent grows by one (a value of 2.0 renormalised) -- how that carry is
// handled is this design's choice.  The truncated operand is still a double:
// the dropped positions are zero, so the narrower multipliers can take their
// top k bits.
//
// In the 52-bit mode the operand passes unchanged (the paper rounds only
// after the multiplication there).  Zeros, denormals, infinities and NaNs
// pass unchanged in every mode.
//
// Interface: x (double), mode (resolved, 001..101) in; y (double) out.
// Combinational.  The sign bit passes straight from x to y.
module trunc_round
  import fpmm_pkg::*;
(
  input  fp64_t x,
  input  mode_e mode,
  output fp64_t y
);

  int unsigned      k;        // kept mantissa bits
  int unsigned      drop;     // dropped mantissa bits, 52 - k
  logic [MAN_W-1:0] kept;     // kept bits, right-aligned
  logic [3:0]       grte;     // G, R, T, E
  logic             rnd;
  logic [MAN_W:0]   inc;      // kept + rnd, with carry-out

  always_comb begin
    k    = mode_man_bits(mode);
    drop = MAN_W - k;
    kept = x.man >> drop;
    grte = 4'((x.man << k) >> (MAN_W - 4));   // the four bits below L
    rnd  = grte[3] & (grte[2] | grte[1] | grte[0]);
    inc  = {1'b0, kept} + (MAN_W+1)'(rnd);
    y    = x;
    if (mode != MODE_52 && x.exp != '0 && x.exp != '1) begin
      if (inc[k]) begin
        y.man = '0;
        y.exp = x.exp + 1'b1;
      end else begin
        y.man = inc[MAN_W-1:0] << drop;
      end
    end
  end

endmodule
