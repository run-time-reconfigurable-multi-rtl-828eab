// final_product_calc -- recombination of Strassen's seven partial products
// into the 2x2 result:
//     p11 = S1 + S4 - S5 + S7
//     p12 = S3 + S5
//     p21 = S2 + S4
//     p22 = S1 - S2 + S3 + S6
// (the paper's product equations label the last line p11 again; it is p22).
// Each three-term line is a chain of three double-precision adders,
// evaluated left to right as written, so the rounding order is fixed.
//
// Interface: s[0..6] (S1..S7) in; p11, p12, p21, p22 out.  Eight adders;
// combinational.
module final_product_calc
  import fpmm_pkg::*;
(
  input  fp64_t s [7],
  output fp64_t p11, p12, p21, p22
);

  fp64_t t11a, t11b, t22a, t22b;

  fp_add u_11a (.a(s[0]),  .b(s[3]), .sub(1'b0), .y(t11a));
  fp_add u_11b (.a(t11a),  .b(s[4]), .sub(1'b1), .y(t11b));
  fp_add u_11c (.a(t11b),  .b(s[6]), .sub(1'b0), .y(p11));

  fp_add u_12  (.a(s[2]),  .b(s[4]), .sub(1'b0), .y(p12));
  fp_add u_21  (.a(s[1]),  .b(s[3]), .sub(1'b0), .y(p21));

  fp_add u_22a (.a(s[0]),  .b(s[1]), .sub(1'b1), .y(t22a));
  fp_add u_22b (.a(t22a),  .b(s[2]), .sub(1'b0), .y(t22b));
  fp_add u_22c (.a(t22b),  .b(s[5]), .sub(1'b0), .y(p22));

endmodule
