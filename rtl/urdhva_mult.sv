// urdhva_mult -- unsigned N x N multiplier by the Urdhva Tiryagbhyam
// ("vertically and crosswise") method.
//
// Column k of the product gathers the AND terms a[i]&b[k-i] (the crosswise
// lines of the method) and adds them to the carry word left by column k-1.
// The column adder's LSB is product bit k; its upper bits ripple on as the
// carry into column k+1.  For N = 4 this is exactly the six-adder chain of
// the 4 x 4 architecture the method is usually drawn with (adders for
// columns 1..6, p0 = a0&b0, p7 = last carry); for N = 8 it is the fourteen
// column adders the paper counts.  Each column adder with more than two
// operands is written as one sum, which synthesis may map to a carry-save
// tree; the paper suggests carry-save addition there.
//
// Interface: a, b (N bits) in, p (2N bits) out.  Purely combinational.
// The default N = 8 is the leaf size the paper's Karatsuba recursion stops at.
module urdhva_mult #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  // A column sum never exceeds N terms plus a carry below 2N, so
  // CW bits are ample.
  localparam int unsigned CW = $clog2(4*N + 1) + 1;

  logic [CW-1:0] col_sum [2*N-1];
  logic [CW-1:0] carry   [2*N];

  always_comb begin
    carry[0] = '0;
    for (int k = 0; k < 2*N-1; k++) begin
      col_sum[k] = carry[k];
      for (int i = 0; i < N; i++) begin
        if (k - i >= 0 && k - i < N)
          col_sum[k] = col_sum[k] + CW'(a[i] & b[k-i]);
      end
      p[k]       = col_sum[k][0];
      carry[k+1] = col_sum[k] >> 1;
    end
    p[2*N-1] = carry[2*N-1][0];
  end

endmodule
