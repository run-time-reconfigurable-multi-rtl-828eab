// submatrix_add -- element-wise sum of two 2x2 blocks of doubles,
// z = x + y, with four double-precision adders.  It is the adding stage of
// the 4x4 multiplier, which forms each 2x2 block of the product as the sum
// of two block products, e.g. C0 = A0*B0 + A1*B2.
//
// Interface: x, y, z are [row][col] arrays of doubles.  Combinational.
module submatrix_add
  import fpmm_pkg::*;
(
  input  fp64_t x [2][2],
  input  fp64_t y [2][2],
  output fp64_t z [2][2]
);

  for (genvar r = 0; r < 2; r++) begin : g_r
    for (genvar c = 0; c < 2; c++) begin : g_c
      fp_add u_add (.a(x[r][c]), .b(y[r][c]), .sub(1'b0), .y(z[r][c]));
    end
  end

endmodule
