// rtr_fp_mult -- run-time-reconfigurable multi-precision floating-point
// multiplier (one matrix-element multiplier of the processing element).
//
// It takes two 67-bit operands: bits 66..64 select the precision mode, bits
// 63..0 are an IEEE double.  The mode may change on every operation, which is
// the run-time reconfiguration.  Structure, after the paper's block diagram:
// input registers -> mode select (with auto-mode and the mode-select error)
// -> truncation and rounding of both operands -> floating-point multiplier
// with one mantissa multiplier per mode -> output register.  The product is
// always delivered as a full double with the four exception flags.
//
// Timing (this design's choice; the paper names ready and reset but gives no
// timing): an operation is accepted when ready is high at a rising clock
// edge; the operands are registered there.  One clock later the result is
// registered and valid pulses for one cycle, so the latency is two clocks
// and a new operation may be accepted every clock.  If the two operands'
// mode bits differ (or name an undefined mode) the operation is halted: the
// product and flags keep their old values, valid stays low and
// mode_sel_error is set until the next operation is accepted.  reset is
// synchronous and active high and clears all registers.
//
// mode_used reports the resolved mode of the last result (useful to see what
// auto-mode picked); it is an addition of this design.
module rtr_fp_mult
  import fpmm_pkg::*;
(
  input  logic      clk,
  input  logic      reset,
  input  logic      ready,
  input  fp67_t     a_in,
  input  fp67_t     b_in,
  output fp64_t     product,
  output logic      zero,
  output logic      infinity,
  output logic      nan,
  output logic      denormal,
  output logic      mode_sel_error,
  output logic      valid,
  output mode_e     mode_used
);

  // Input registers.
  fp67_t a_q, b_q;
  logic  run_q;

  always_ff @(posedge clk) begin
    if (reset) begin
      a_q   <= '0;
      b_q   <= '0;
      run_q <= 1'b0;
    end else begin
      run_q <= ready;
      if (ready) begin
        a_q <= a_in;
        b_q <= b_in;
      end
    end
  end

  mode_e     mode;
  logic      mode_err;
  fp64_t     a_t, b_t, p_c;
  fp_flags_t f_c;

  mode_select u_mode (
    .mode_a  (a_q.mode),
    .mode_b  (b_q.mode),
    .man_a   (a_q.val.man),
    .man_b   (b_q.val.man),
    .mode    (mode),
    .mode_err(mode_err)
  );

  trunc_round u_tr_a (.x(a_q.val), .mode(mode), .y(a_t));
  trunc_round u_tr_b (.x(b_q.val), .mode(mode), .y(b_t));

  fp_mult_core u_core (
    .a    (a_t),
    .b    (b_t),
    .mode (mode),
    .p    (p_c),
    .flags(f_c)
  );

  // Output register.
  always_ff @(posedge clk) begin
    if (reset) begin
      product        <= '0;
      {zero, infinity, nan, denormal} <= 4'b0;
      mode_sel_error <= 1'b0;
      valid          <= 1'b0;
      mode_used      <= MODE_52;
    end else begin
      valid <= 1'b0;
      if (run_q) begin
        mode_sel_error <= mode_err;
        if (!mode_err) begin
          product   <= p_c;
          zero      <= f_c.zero;
          infinity  <= f_c.infinity;
          nan       <= f_c.nan;
          denormal  <= f_c.denormal;
          valid     <= 1'b1;
          mode_used <= mode;
        end
      end
    end
  end

endmodule
