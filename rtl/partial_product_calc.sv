// partial_product_calc -- the seven Strassen multiplications of a processing
// element, each done by its own run-time-reconfigurable multiplier:
//     S1 = alpha1*beta1   S2 = alpha2*b11    S3 = a11*beta2
//     S4 = a22*beta3      S5 = alpha3*b22    S6 = alpha4*beta4
//     S7 = alpha5*beta5
// All seven run in parallel at the same precision mode: the PE's 3-bit
// precision select is prepended to every operand to form the 67-bit words
// the multipliers take.
//
// Timing is that of rtr_fp_mult: operands are taken when ready is high at
// a clock edge; one clock later s[] is registered and valid is high for one
// cycle (all seven finish together).  The exception flags and the
// mode-select error are ORed over the seven multipliers (this design's
// choice; the paper gives the PE one flag of each kind).  mode_used is the
// resolved mode of S1 (in auto-mode each multiplier resolves its own).
module partial_product_calc
  import fpmm_pkg::*;
(
  input  logic      clk,
  input  logic      reset,
  input  logic      ready,
  input  logic [2:0] prec_sel,
  input  fp64_t     alpha [5],
  input  fp64_t     beta  [5],
  input  fp64_t     a11, a22, b11, b22,
  output fp64_t     s [7],
  output fp_flags_t flags,
  output logic      mode_sel_error,
  output logic      valid,
  output mode_e     mode_used
);

  fp64_t opa [7];
  fp64_t opb [7];

  assign opa = '{alpha[0], alpha[1], a11,     a22,     alpha[2], alpha[3], alpha[4]};
  assign opb = '{beta[0],  b11,      beta[1], beta[2], b22,      beta[3],  beta[4]};

  logic [6:0] v, err, z, inf, nn, dn;
  mode_e      mu [7];

  for (genvar i = 0; i < 7; i++) begin : g_mul
    rtr_fp_mult u_mul (
      .clk           (clk),
      .reset         (reset),
      .ready         (ready),
      .a_in          ('{mode: prec_sel, val: opa[i]}),
      .b_in          ('{mode: prec_sel, val: opb[i]}),
      .product       (s[i]),
      .zero          (z[i]),
      .infinity      (inf[i]),
      .nan           (nn[i]),
      .denormal      (dn[i]),
      .mode_sel_error(err[i]),
      .valid         (v[i]),
      .mode_used     (mu[i])
    );
  end

  assign valid          = &v;
  assign mode_sel_error = |err;
  assign flags          = '{zero: |z, infinity: |inf, nan: |nn, denormal: |dn};
  assign mode_used      = mu[0];

endmodule
