// tb_final_product_calc -- recombination of S1..S7 into p11..p22 against the
// simulator's double arithmetic (same evaluation order), and an end-to-end
// exact check: S1..S7 computed from small-integer matrices must give the
// classical 2x2 product.
module tb_final_product_calc;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  fp64_t s [7];
  fp64_t p11, p12, p21, p22;

  final_product_calc dut (.*);

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int i = 0; i < 7; i++) s[i] = rand_fp(6);
      #1;
      chk("p11", p11, ref_add(ref_add(ref_add(s[0], s[3], 0), s[4], 1), s[6], 0));
      chk("p12", p12, ref_add(s[2], s[4], 0));
      chk("p21", p21, ref_add(s[1], s[3], 0));
      chk("p22", p22, ref_add(ref_add(ref_add(s[0], s[1], 1), s[2], 0), s[5], 0));
    end
    for (int it = 0; it < 200; it++) begin
      int a11, a12, a21, a22, b11, b12, b21, b22;
      a11 = $urandom_range(0, 40) - 20; a12 = $urandom_range(0, 40) - 20;
      a21 = $urandom_range(0, 40) - 20; a22 = $urandom_range(0, 40) - 20;
      b11 = $urandom_range(0, 40) - 20; b12 = $urandom_range(0, 40) - 20;
      b21 = $urandom_range(0, 40) - 20; b22 = $urandom_range(0, 40) - 20;
      s[0] = int_fp((a11 + a22) * (b11 + b22));
      s[1] = int_fp((a21 + a22) * b11);
      s[2] = int_fp(a11 * (b12 - b22));
      s[3] = int_fp(a22 * (b21 - b11));
      s[4] = int_fp((a11 + a12) * b22);
      s[5] = int_fp((a21 - a11) * (b11 + b12));
      s[6] = int_fp((a12 - a22) * (b21 + b22));
      #1;
      chk("int p11", p11, int_fp(a11 * b11 + a12 * b21));
      chk("int p12", p12, int_fp(a11 * b12 + a12 * b22));
      chk("int p21", p21, int_fp(a21 * b11 + a22 * b21));
      chk("int p22", p22, int_fp(a21 * b12 + a22 * b22));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
