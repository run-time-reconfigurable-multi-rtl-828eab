// tb_partial_product_calc -- the seven parallel reconfigurable multipliers:
// S1..S7 against the reference in every mode, one-clock registered timing
// (valid two edges after ready), flag ORing and the mode-select error.
module tb_partial_product_calc;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic       clk = 0, reset = 1, ready = 0;
  logic [2:0] prec_sel;
  fp64_t      alpha [5];
  fp64_t      beta  [5];
  fp64_t      a11, a22, b11, b22;
  fp64_t      s [7];
  fp_flags_t  flags;
  logic       mode_sel_error, valid;
  mode_e      mode_used;

  partial_product_calc dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp_t ea [7], eb [7], exp_s [7];
    for (int i = 0; i < 5; i++) begin alpha[i] = '0; beta[i] = '0; end
    {a11, a22, b11, b22} = '0;
    prec_sel = 3'b101;
    repeat (3) @(negedge clk);
    reset = 0;
    for (int it = 0; it < 300; it++) begin
      int lat;
      prec_sel = 3'($urandom_range(0, 5));
      for (int i = 0; i < 5; i++) begin alpha[i] = rand_fp(20); beta[i] = rand_fp(20); end
      a11 = rand_fp(20); a22 = rand_fp(20); b11 = rand_fp(20); b22 = rand_fp(20);
      if (it == 7) alpha[0] = 64'h0;                        // S1 = 0
      if (it == 8) beta[3] = 64'h7FF0_0000_0000_0000;       // S6 = inf
      ea = '{alpha[0], alpha[1], a11, a22, alpha[2], alpha[3], alpha[4]};
      eb = '{beta[0],  b11,      beta[1], beta[2], b22,    beta[3],  beta[4]};
      for (int i = 0; i < 7; i++) exp_s[i] = ref_mult(prec_sel, ea[i], eb[i]);
      ready = 1;
      @(negedge clk); ready = 0;
      lat = 1;
      while (!valid && lat < 5) begin @(negedge clk); lat++; end
      chk("latency", lat == 2);
      for (int i = 0; i < 7; i++) begin
        checks++;
        if (s[i] !== exp_s[i]) begin
          failures++;
          if (failures < 15) $display("mode %b S%0d = %h expected %h", prec_sel, i + 1, s[i], exp_s[i]);
        end
      end
      if (it == 7) chk("zero flag", flags.zero);
      if (it == 8) chk("infinity flag", flags.infinity);
      if (it == 9) chk("no flags", flags == '0);
    end
    // Undefined mode halts all seven.
    @(negedge clk);
    prec_sel = 3'b111; ready = 1;
    @(negedge clk); ready = 0;
    repeat (3) begin @(negedge clk); chk("halt: no valid", !valid); end
    chk("mode error", mode_sel_error);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
