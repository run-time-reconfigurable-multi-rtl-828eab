// tb_mode_select -- fixed modes, mode-select errors and auto-mode.
// Auto-mode is checked on mantissas built to sit on each side of every
// threshold of the selection chart, on the operand of the paper's table of
// results, and on random mantissas against an independently coded scan.
module tb_mode_select;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [2:0]  ma, mb;
  logic [51:0] fa, fb;
  mode_e       mode;
  logic        err;

  mode_select dut (.mode_a(ma), .mode_b(mb), .man_a(fa), .man_b(fb), .mode(mode), .mode_err(err));

  task automatic chk(string what, logic [2:0] exp_mode, logic exp_err);
    #1;
    checks++;
    if (err !== exp_err || (!exp_err && mode !== exp_mode)) begin
      failures++;
      $display("%s: mode=%b err=%b, expected mode=%b err=%b", what, mode, err, exp_mode, exp_err);
    end
  endtask

  // Mantissa with a 1 at position n, six zeros below, and noise further down.
  function automatic logic [51:0] lead_at(int n);
    logic [51:0] m;
    m = {$urandom, $urandom};
    m = m | (52'd1 << n);
    for (int j = 1; j <= 6; j++) if (n - j >= 0) m[n-j] = 1'b0;
    // keep the bits above n free of a 1 followed by six zeros: set every
    // other bit above n
    for (int j = n + 1; j < 52; j++) m[j] = ((j - n) % 2 == 1);
    return m;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fa = {$urandom, $urandom}; fb = {$urandom, $urandom};
    for (int m = 1; m <= 5; m++) begin
      ma = 3'(m); mb = 3'(m);
      chk("fixed", 3'(m), 1'b0);
    end
    ma = 3'b001; mb = 3'b010; chk("mismatch", 3'b000, 1'b1);
    ma = 3'b000; mb = 3'b101; chk("mismatch auto", 3'b000, 1'b1);
    ma = 3'b110; mb = 3'b110; chk("undefined 110", 3'b000, 1'b1);
    ma = 3'b111; mb = 3'b111; chk("undefined 111", 3'b000, 1'b1);

    ma = 3'b000; mb = 3'b000;
    // Thresholds of the chart: n >= 44 / 35 / 28 / 16.
    fb = 52'h0;  // zero mantissa -> 8-bit, so fa decides
    fa = lead_at(44); chk("n=44", 3'b001, 1'b0);
    fa = lead_at(43); chk("n=43", 3'b010, 1'b0);
    fa = lead_at(35); chk("n=35", 3'b010, 1'b0);
    fa = lead_at(34); chk("n=34", 3'b011, 1'b0);
    fa = lead_at(28); chk("n=28", 3'b011, 1'b0);
    fa = lead_at(27); chk("n=27", 3'b100, 1'b0);
    fa = lead_at(16); chk("n=16", 3'b100, 1'b0);
    fa = lead_at(15); chk("n=15", 3'b101, 1'b0);
    fa = 52'h0;       chk("zero", 3'b001, 1'b0);
    fa = 52'h8_0000_0000_0000; chk("1.5", 3'b001, 1'b0);
    // Table-of-results operand 4069b130ae804118: first qualifying 1 at bit 23.
    fa = 52'h9_b130_ae80_4118; chk("table op", 3'b100, 1'b0);
    // Wider of the two operands wins.
    fa = lead_at(50); fb = lead_at(20); chk("max a<b", 3'b100, 1'b0);
    fa = lead_at(10); fb = lead_at(50); chk("max a>b", 3'b101, 1'b0);

    for (int it = 0; it < 3000; it++) begin
      logic [51:0] r1, r2;
      r1 = {$urandom, $urandom};
      r2 = {$urandom, $urandom};
      // thin out bits so that long zero runs occur
      r1 = r1 & {$urandom, $urandom} & {$urandom, $urandom};
      r2 = r2 & {$urandom, $urandom};
      fa = r1; fb = r2;
      chk("random", ref_resolve(3'b000, {12'h0, r1}, {12'h0, r2}), 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
