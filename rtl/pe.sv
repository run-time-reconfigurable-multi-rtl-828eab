// pe -- processing element: a complete 2x2 double-precision matrix
// multiplier, P = A * B, by Strassen's algorithm with run-time-reconfigurable
// multi-precision element multipliers.
//
// Datapath, following the paper's PE block diagram: input registers (eight
// 64-bit elements and the 3-bit precision select) -> alpha/beta calculation
// (ten adders) -> partial product calculation (seven reconfigurable
// multipliers, S1..S7) -> final product calculation (eight adders) -> output
// registers (four 64-bit elements).  pe_control sequences it.  The port list
// is that of the paper's PE symbol, plus done and busy, which this design
// adds so that a user can tell when p11..p22 are valid.
//
// Timing: ready is sampled at a rising edge while the PE is idle; the
// elements and prec_sel are registered there.  done is high for one clock,
// four clocks later, and the outputs hold until the next result.  If
// prec_sel is an undefined code (110 or 111) the multipliers halt, no done
// is given and mod_sel_error is set.  zero, infinity, NaN and denormal are
// the multipliers' exception flags ORed over S1..S7, registered with the
// result.  reset is synchronous, active high.
// The multipliers' mode_used output is left unconnected here: the PE
// reports only the error and the flags.
module pe
  import fpmm_pkg::*;
(
  input  logic       clk,
  input  logic       ready,
  input  logic       reset,
  input  logic [2:0] prec_sel,
  input  fp64_t      a11, a12, a21, a22,
  input  fp64_t      b11, b12, b21, b22,
  output fp64_t      p11, p12, p21, p22,
  output logic       zero,
  output logic       infinity,
  output logic       nan,
  output logic       denormal,
  output logic       mod_sel_error,
  output logic       done,
  output logic       busy
);

  // Input registers.
  fp64_t      ra11, ra12, ra21, ra22, rb11, rb12, rb21, rb22;
  logic [2:0] rprec;

  logic load_in, mult_start, load_out, mult_valid, mult_err;

  always_ff @(posedge clk) begin
    if (reset) begin
      {ra11, ra12, ra21, ra22, rb11, rb12, rb21, rb22} <= '0;
      rprec <= '0;
    end else if (load_in) begin
      {ra11, ra12, ra21, ra22} <= {a11, a12, a21, a22};
      {rb11, rb12, rb21, rb22} <= {b11, b12, b21, b22};
      rprec <= prec_sel;
    end
  end

  fp64_t alpha [5];
  fp64_t beta  [5];

  alpha_beta_calc u_ab (
    .a11(ra11), .a12(ra12), .a21(ra21), .a22(ra22),
    .b11(rb11), .b12(rb12), .b21(rb21), .b22(rb22),
    .alpha(alpha), .beta(beta)
  );

  fp64_t     s [7];
  fp_flags_t mflags;

  partial_product_calc u_pp (
    .clk           (clk),
    .reset         (reset),
    .ready         (mult_start),
    .prec_sel      (rprec),
    .alpha         (alpha),
    .beta          (beta),
    .a11           (ra11),
    .a22           (ra22),
    .b11           (rb11),
    .b22           (rb22),
    .s             (s),
    .flags         (mflags),
    .mode_sel_error(mult_err),
    .valid         (mult_valid),
    .mode_used     ()
  );

  fp64_t f11, f12, f21, f22;

  final_product_calc u_fp (
    .s(s), .p11(f11), .p12(f12), .p21(f21), .p22(f22)
  );

  pe_control u_ctl (
    .clk          (clk),
    .reset        (reset),
    .ready        (ready),
    .mult_valid   (mult_valid),
    .mult_err     (mult_err),
    .load_in      (load_in),
    .mult_start   (mult_start),
    .load_out     (load_out),
    .done         (done),
    .busy         (busy),
    .mod_sel_error(mod_sel_error)
  );

  // Output registers.
  always_ff @(posedge clk) begin
    if (reset) begin
      {p11, p12, p21, p22} <= '0;
      {zero, infinity, nan, denormal} <= 4'b0;
    end else if (load_out) begin
      {p11, p12, p21, p22} <= {f11, f12, f21, f22};
      {zero, infinity, nan, denormal} <= mflags;
    end
  end

endmodule
