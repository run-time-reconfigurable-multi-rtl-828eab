// pe_control -- control logic of the processing element.
//
// The paper gives the PE two control inputs, ready and reset, and a control
// block that sequences the work, mainly the multiplications; the sequence
// below is this design's.  A five-state machine:
//   IDLE  : waits for ready; load_in is ready itself, so the PE input
//           registers capture the matrices at the edge where ready is seen.
//   START : alpha/beta are settled from the input registers; mult_start
//           starts the seven multipliers.
//   RUN   : the multipliers compute.
//   CHECK : the multiplier results are valid.  If so, load_out captures the
//           final products into the output registers; if not, the
//           multipliers halted on a mode-select error (mult_err), which is
//           latched in mod_sel_error, and the PE returns to IDLE without
//           done.
//   DONE  : done is high for one cycle; outputs are valid from here on.
// So done rises four clocks after the edge that accepted ready.  ready is
// ignored while busy.  mod_sel_error is cleared when a new operation is
// accepted.  reset is synchronous, active high.
module pe_control (
  input  logic clk,
  input  logic reset,
  input  logic ready,
  input  logic mult_valid,
  input  logic mult_err,
  output logic load_in,
  output logic mult_start,
  output logic load_out,
  output logic done,
  output logic busy,
  output logic mod_sel_error
);

  typedef enum logic [2:0] {S_IDLE, S_START, S_RUN, S_CHECK, S_DONE} state_e;
  state_e state, state_n;

  always_comb begin
    state_n    = state;
    load_in    = 1'b0;
    mult_start = 1'b0;
    load_out   = 1'b0;
    done       = 1'b0;
    unique case (state)
      S_IDLE:  if (ready) begin
                 load_in = 1'b1;
                 state_n = S_START;
               end
      S_START: begin
                 mult_start = 1'b1;
                 state_n    = S_RUN;
               end
      S_RUN:   state_n = S_CHECK;
      S_CHECK: begin
                 load_out = mult_valid;
                 state_n  = mult_valid ? S_DONE : S_IDLE;
               end
      S_DONE:  begin
                 done    = 1'b1;
                 state_n = S_IDLE;
               end
      default: state_n = S_IDLE;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (reset) begin
      state         <= S_IDLE;
      mod_sel_error <= 1'b0;
    end else begin
      state <= state_n;
      if (load_in)
        mod_sel_error <= 1'b0;
      else if (state == S_CHECK && !mult_valid && mult_err)
        mod_sel_error <= 1'b1;
    end
  end

endmodule
