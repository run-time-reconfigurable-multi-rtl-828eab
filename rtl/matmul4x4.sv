// matmul4x4 -- run-time-reconfigurable multi-precision floating-point 4x4
// matrix multiplier, C = A * B, on doubles.  Top of the design.
//
// A and B are divided into 2x2 sub-matrices, A0 A1 / A2 A3 and B0 B1 / B2 B3
// (A0 is rows 0-1, columns 0-1; A1 rows 0-1, columns 2-3; and so on), and
// the product blocks are
//     C0 = A0*B0 + A1*B2    C1 = A0*B1 + A1*B3
//     C2 = A2*B0 + A3*B2    C3 = A2*B1 + A3*B3.
// All eight block products run at once in eight processing elements (each a
// Strassen 2x2 multiplier with seven reconfigurable element multipliers), so
// a 4x4 product takes the time of one 2x2 product.  Four 2x2 block adders
// then form C0..C3, which are registered.  This block-level split follows the
// paper's 4x4 equations and illustration; the paper calls the top level
// Strassen's algorithm but writes out this eight-product form for 4x4, and
// that is the form built here.
//
// Interface: a, b, c are [row][col] arrays of doubles; prec_sel is the
// 3-bit precision mode (000 auto, 001 8-bit, 010 16-bit, 011 23-bit,
// 100 36-bit, 101 52-bit mantissa), which may change with every operation.
// Flags are ORed over the eight PEs.
//
// Timing: ready is sampled at a rising edge while not busy; done is high for
// one cycle five clocks later, with c valid from then on until the next
// result.  An undefined prec_sel halts the operation: no done, and
// mod_sel_error is set.  reset is synchronous, active high.
module matmul4x4
  import fpmm_pkg::*;
(
  input  logic       clk,
  input  logic       reset,
  input  logic       ready,
  input  logic [2:0] prec_sel,
  input  fp64_t      a [4][4],
  input  fp64_t      b [4][4],
  output fp64_t      c [4][4],
  output logic       zero,
  output logic       infinity,
  output logic       nan,
  output logic       denormal,
  output logic       mod_sel_error,
  output logic       done,
  output logic       busy
);

  // Block product index: (bi, bj, bk) is A(bi,bk) * B(bk,bj).
  fp64_t      prod [2][2][2][2][2];   // [bi][bj][bk][r][c]
  logic [7:0] pe_done, pe_busy, pe_err, pe_z, pe_inf, pe_nan, pe_dn;

  for (genvar bi = 0; bi < 2; bi++) begin : g_i
    for (genvar bj = 0; bj < 2; bj++) begin : g_j
      for (genvar bk = 0; bk < 2; bk++) begin : g_k
        localparam int unsigned N = bi*4 + bj*2 + bk;
        pe u_pe (
          .clk          (clk),
          .ready        (ready),
          .reset        (reset),
          .prec_sel     (prec_sel),
          .a11          (a[2*bi][2*bk]),   .a12(a[2*bi][2*bk+1]),
          .a21          (a[2*bi+1][2*bk]), .a22(a[2*bi+1][2*bk+1]),
          .b11          (b[2*bk][2*bj]),   .b12(b[2*bk][2*bj+1]),
          .b21          (b[2*bk+1][2*bj]), .b22(b[2*bk+1][2*bj+1]),
          .p11          (prod[bi][bj][bk][0][0]),
          .p12          (prod[bi][bj][bk][0][1]),
          .p21          (prod[bi][bj][bk][1][0]),
          .p22          (prod[bi][bj][bk][1][1]),
          .zero         (pe_z[N]),
          .infinity     (pe_inf[N]),
          .nan          (pe_nan[N]),
          .denormal     (pe_dn[N]),
          .mod_sel_error(pe_err[N]),
          .done         (pe_done[N]),
          .busy         (pe_busy[N])
        );
      end

      // Shifting-and-adding stage: C(bi,bj) = sum over bk.
      fp64_t cblk [2][2];
      submatrix_add u_add (
        .x(prod[bi][bj][0]),
        .y(prod[bi][bj][1]),
        .z(cblk)
      );

      always_ff @(posedge clk) begin
        if (reset) begin
          for (int r = 0; r < 2; r++)
            for (int q = 0; q < 2; q++)
              c[2*bi+r][2*bj+q] <= '0;
        end else if (&pe_done) begin
          for (int r = 0; r < 2; r++)
            for (int q = 0; q < 2; q++)
              c[2*bi+r][2*bj+q] <= cblk[r][q];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      done <= 1'b0;
      {zero, infinity, nan, denormal} <= 4'b0;
    end else begin
      done <= &pe_done;
      if (&pe_done)
        {zero, infinity, nan, denormal} <= {|pe_z, |pe_inf, |pe_nan, |pe_dn};
    end
  end

  assign busy          = (|pe_busy) | done;
  assign mod_sel_error = |pe_err;

endmodule
