// karatsuba_mult -- unsigned W x W multiplier: Karatsuba recursion on top,
// Urdhva Tiryagbhyam multipliers at the leaves.
//
// An operand of W bits is split into a more significant part of F = W/2 bits
// (X_l) and a less significant part of S = W - F bits (X_r); for odd W the
// upper part is the shorter one, as in the paper's odd-width rule.  Three
// sub-products are formed,
//     p1 = X_l*Y_l,  p2 = X_r*Y_r,  p3 = (X_l+X_r)*(Y_l+Y_r),
// and recombined with shifts instead of multiplications:
//     X*Y = p1<<2S + p2 + (p3 - p1 - p2)<<S.
// For even W this is the usual Karatsuba identity (S = W/2).  Each
// sub-product is again a karatsuba_mult, until the operands are at most
// LEAF bits wide; those are multiplied by urdhva_mult (zero-extended to
// LEAF bits).  The sum term p3 is one bit wider than its halves, so a
// recursion may end on a 5..8-bit leaf as well as on an 8-bit one.
//
// Interface: x, y (W bits) in, p (2W bits) out.  Purely combinational.
// W = 53 (the double-precision significand with its hidden bit) is the
// default; the floating-point multiplier instantiates 9, 17, 24, 37 and
// 53-bit copies.  LEAF = 8 is the paper's recursion limit.
//
// Lint note: a linter that elaborates this module on its own as the top may
// report undriven/unused bits on an unelaborated copy of the
// self-instantiation.  Those reports do not apply to any instantiated copy.
// In the leaf, the top bits of the 2*LEAF-bit Urdhva product are unused
// when the leaf is narrower than LEAF; they are zero and are dropped on
// purpose.
module karatsuba_mult #(
  parameter int unsigned W    = 53,
  parameter int unsigned LEAF = 8
) (
  input  logic [W-1:0]   x,
  input  logic [W-1:0]   y,
  output logic [2*W-1:0] p
);

  if (W <= LEAF) begin : g_leaf
    logic [2*LEAF-1:0] pl;
    urdhva_mult #(.N(LEAF)) u_leaf (
      .a(LEAF'(x)),
      .b(LEAF'(y)),
      .p(pl)
    );
    assign p = pl[2*W-1:0];
  end else begin : g_split
    localparam int unsigned F = W / 2;   // upper part width
    localparam int unsigned S = W - F;   // lower part width (>= F)

    logic [F-1:0]     xl, yl;
    logic [S-1:0]     xr, yr;
    logic [S:0]       xs, ys;
    logic [2*F-1:0]   p1;
    logic [2*S-1:0]   p2;
    logic [2*S+1:0]   p3;
    logic [2*S+1:0]   pm;

    assign xl = x[W-1:S];
    assign yl = y[W-1:S];
    assign xr = x[S-1:0];
    assign yr = y[S-1:0];
    assign xs = (S+1)'(xl) + (S+1)'(xr);
    assign ys = (S+1)'(yl) + (S+1)'(yr);

    karatsuba_mult #(.W(F),   .LEAF(LEAF)) u_hi  (.x(xl), .y(yl), .p(p1));
    karatsuba_mult #(.W(S),   .LEAF(LEAF)) u_lo  (.x(xr), .y(yr), .p(p2));
    karatsuba_mult #(.W(S+1), .LEAF(LEAF)) u_mid (.x(xs), .y(ys), .p(p3));

    // Subtracter of the Karatsuba datapath: the cross term X_l*Y_r + X_r*Y_l.
    assign pm = p3 - (2*S+2)'(p1) - (2*S+2)'(p2);

    // Shift-and-add of the three partial results.
    assign p = ((2*W)'(p1) << (2*S)) + (2*W)'(p2) + ((2*W)'(pm) << S);
  end

endmodule
