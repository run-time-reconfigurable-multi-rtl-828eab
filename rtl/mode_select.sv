// mode_select -- precision-mode decoder of the run-time-reconfigurable
// floating-point multiplier, including auto-mode.
//
// Both 67-bit operands carry three precision-select bits.  They must agree;
// if they differ the multiplier must not run and mode_err is raised (the
// paper's "mode select error").  Codes 110 and 111, which the paper's mode
// table leaves undefined, also raise mode_err (a choice of this design).
//
// Mode 000 (auto) picks the mode from the operands themselves, after the
// paper's flow chart: the mantissa is scanned from bit 51 downwards for the
// first 1 that is followed by at least six 0s (bits below bit 0 count as 0).
// The position n of that 1 says how many mantissa bits carry information,
// 52-n, and the narrowest mode is chosen from the thresholds printed in the
// chart: n >= 44 -> 8-bit, n >= 35 -> 16-bit, n >= 28 -> 23-bit,
// n >= 16 -> 36-bit.  The chart has no exit for n < 16; this design then
// uses the 52-bit mode, continuing the text's "and so on".  A zero mantissa
// (the chart's "zero or infinity" exit) selects the 8-bit mode.  The mode for
// the operation is the wider of the two operands' choices, so neither
// operand loses more than the rule allows (also this design's choice).
//
// Interface: mode_a/mode_b (3 bits), man_a/man_b (52 bits) in; mode (the
// resolved mode, never MODE_AUTO) and mode_err out.  Combinational.
module mode_select
  import fpmm_pkg::*;
(
  input  logic [2:0]       mode_a,
  input  logic [2:0]       mode_b,
  input  logic [MAN_W-1:0] man_a,
  input  logic [MAN_W-1:0] man_b,
  output mode_e            mode,
  output logic             mode_err
);

  // Auto-mode choice for one mantissa.
  function automatic mode_e auto_mode(logic [MAN_W-1:0] m);
    logic [MAN_W+5:0] ext;   // mantissa with six zero bits appended below
    int               pos;
    logic             found;
    ext   = {m, 6'b0};
    pos   = -1;
    found = 1'b0;
    for (int n = MAN_W-1; n >= 0; n--) begin
      if (!found && ext[n+6] && (ext[n+5 -: 6] == 6'b0)) begin
        found = 1'b1;
        pos   = n;
      end
    end
    if (!found)        return MODE_8;
    else if (pos >= 44) return MODE_8;
    else if (pos >= 35) return MODE_16;
    else if (pos >= 28) return MODE_23;
    else if (pos >= 16) return MODE_36;
    else                return MODE_52;
  endfunction

  mode_e am_a, am_b;

  always_comb begin
    am_a     = auto_mode(man_a);
    am_b     = auto_mode(man_b);
    mode_err = (mode_a != mode_b) || (mode_a > MODE_52);
    if (mode_a == MODE_AUTO)
      mode = (am_a > am_b) ? am_a : am_b;
    else if (mode_err)
      mode = MODE_52;
    else
      mode = mode_e'(mode_a);
  end

endmodule
