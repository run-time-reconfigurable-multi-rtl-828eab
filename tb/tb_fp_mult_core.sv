// tb_fp_mult_core -- the multi-precision floating-point multiplier datapath:
// the products of the paper's table of results for the 8, 16, 23 and 52-bit
// mantissa modes, random operands in every mode against the reference, and
// the exception cases (zero, infinity, NaN, overflow, underflow).
module tb_fp_mult_core;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  fp64_t     a, b, p;
  mode_e     mode;
  fp_flags_t flags;

  fp_mult_core dut (.a(a), .b(b), .mode(mode), .p(p), .flags(flags));

  task automatic chk(string what, logic [63:0] exp, logic [3:0] exp_flags);
    #1;
    checks++;
    if (p !== exp || flags !== exp_flags) begin
      failures++;
      if (failures < 10)
        $display("%s mode=%b a=%h b=%h: got %h/%b expected %h/%b", what, mode, a, b, p, flags, exp, exp_flags);
    end
  endtask

  function automatic logic [3:0] fl(logic [63:0] v);
    return {v[62:52] == 0 && v[51:0] == 0, v[62:52] == 11'h7FF && v[51:0] == 0,
            v[62:52] == 11'h7FF && v[51:0] != 0, v[62:52] == 0 && v[51:0] != 0};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Table of results: 4069b130ae804118 squared.  Operands truncated to the
    // mode (no rounding occurs for this operand in these modes).
    mode = MODE_8;  a = ref_trunc(64'h4069_b130_ae80_4118, 8);  b = a; chk("table 8",  64'h40e4_9ec8_0000_0000, 4'b0);
    mode = MODE_16; a = ref_trunc(64'h4069_b130_ae80_4118, 16); b = a; chk("table 16", 64'h40e4_a0b0_1b48_0000, 4'b0);
    mode = MODE_23; a = ref_trunc(64'h4069_b130_ae80_4118, 23); b = a; chk("table 23", 64'h40e4_a0b1_1c33_e320, 4'b0);
    mode = MODE_52; a = 64'h4069_b130_ae80_4118; b = a; chk("table 52", 64'h40e4_a0b1_337c_dfbd, 4'b0);

    for (int m = 1; m <= 5; m++) begin
      mode = mode_e'(m);
      for (int it = 0; it < 1500; it++) begin
        a = ref_trunc(rand_fp(300), man_bits(3'(m)));
        b = ref_trunc(rand_fp(300), man_bits(3'(m)));
        chk("random", ref_core(a, b, man_bits(3'(m))), fl(ref_core(a, b, man_bits(3'(m)))));
      end
    end

    mode = MODE_52;
    a = 64'h4000_0000_0000_0000; b = 64'h0;                   chk("x*0",   64'h0, 4'b1000);
    a = 64'hC000_0000_0000_0000; b = 64'h7FF0_0000_0000_0000; chk("x*inf", 64'hFFF0_0000_0000_0000, 4'b0100);
    a = 64'h7FF0_0000_0000_0000; b = 64'h0;                   chk("inf*0", 64'h7FF8_0000_0000_0000, 4'b0010);
    a = 64'h7FF0_0000_0000_0001; b = 64'h3FF0_0000_0000_0000; chk("nan",   64'h7FF8_0000_0000_0000, 4'b0010);
    a = 64'h7FE0_0000_0000_0000; b = 64'h4010_0000_0000_0000; chk("ovf",   64'h7FF0_0000_0000_0000, 4'b0100);
    a = 64'h0010_0000_0000_0000; b = 64'h3FE0_0000_0000_0000; chk("unf",   64'h0008_0000_0000_0000, 4'b0001);
    a = 64'h0010_0000_0000_0000; b = 64'h0010_0000_0000_0000; chk("unf0",  64'h0, 4'b1000);
    a = 64'h0000_0000_0000_0005; b = 64'h3FF0_0000_0000_0000; chk("den in", 64'h0, 4'b1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
