// alpha_beta_calc -- operand combinations of Strassen's 2x2 algorithm.
//
// For A = [a11 a12; a21 a22] and B = [b11 b12; b21 b22] it forms the five
// sums/differences of A elements (alpha) and of B elements (beta) that feed
// the seven Strassen multiplications:
//     alpha1 = a11 + a22     beta1 = b11 + b22
//     alpha2 = a21 + a22     beta2 = b12 - b22
//     alpha3 = a11 + a12     beta3 = b21 - b11
//     alpha4 = a21 - a11     beta4 = b11 + b12
//     alpha5 = a12 - a22     beta5 = b21 + b22
// These are the paper's alpha/beta definitions for one 2x2 block, except
// beta5: the paper's alpha/beta list writes it as a difference, but its
// seven-product list, S7 = (a12 - a22)(b21 + b22), and Strassen's identity
// need the sum, which is what is built here.
//
// Interface: the eight elements in, alpha[0..4] and beta[0..4] (alpha1..5,
// beta1..5) out.  Ten double-precision adders; combinational.
module alpha_beta_calc
  import fpmm_pkg::*;
(
  input  fp64_t a11, a12, a21, a22,
  input  fp64_t b11, b12, b21, b22,
  output fp64_t alpha [5],
  output fp64_t beta  [5]
);

  fp_add u_al1 (.a(a11), .b(a22), .sub(1'b0), .y(alpha[0]));
  fp_add u_al2 (.a(a21), .b(a22), .sub(1'b0), .y(alpha[1]));
  fp_add u_al3 (.a(a11), .b(a12), .sub(1'b0), .y(alpha[2]));
  fp_add u_al4 (.a(a21), .b(a11), .sub(1'b1), .y(alpha[3]));
  fp_add u_al5 (.a(a12), .b(a22), .sub(1'b1), .y(alpha[4]));

  fp_add u_be1 (.a(b11), .b(b22), .sub(1'b0), .y(beta[0]));
  fp_add u_be2 (.a(b12), .b(b22), .sub(1'b1), .y(beta[1]));
  fp_add u_be3 (.a(b21), .b(b11), .sub(1'b1), .y(beta[2]));
  fp_add u_be4 (.a(b11), .b(b12), .sub(1'b0), .y(beta[3]));
  fp_add u_be5 (.a(b21), .b(b22), .sub(1'b0), .y(beta[4]));

endmodule
