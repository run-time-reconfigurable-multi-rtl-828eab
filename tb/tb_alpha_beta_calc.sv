// tb_alpha_beta_calc -- the ten Strassen operand combinations against the
// simulator's double arithmetic, and an exact small-integer case.
module tb_alpha_beta_calc;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  fp64_t a11, a12, a21, a22, b11, b12, b21, b22;
  fp64_t alpha [5];
  fp64_t beta  [5];

  alpha_beta_calc dut (.*);

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
      if (it == 0) begin
        {a11, a12, a21, a22} = {int_fp(1), int_fp(2), int_fp(3), int_fp(4)};
        {b11, b12, b21, b22} = {int_fp(5), int_fp(6), int_fp(7), int_fp(8)};
      end else begin
        {a11, a12, a21, a22} = {rand_fp(8), rand_fp(8), rand_fp(8), rand_fp(8)};
        {b11, b12, b21, b22} = {rand_fp(8), rand_fp(8), rand_fp(8), rand_fp(8)};
      end
      #1;
      chk("alpha1", alpha[0], ref_add(a11, a22, 0));
      chk("alpha2", alpha[1], ref_add(a21, a22, 0));
      chk("alpha3", alpha[2], ref_add(a11, a12, 0));
      chk("alpha4", alpha[3], ref_add(a21, a11, 1));
      chk("alpha5", alpha[4], ref_add(a12, a22, 1));
      chk("beta1",  beta[0],  ref_add(b11, b22, 0));
      chk("beta2",  beta[1],  ref_add(b12, b22, 1));
      chk("beta3",  beta[2],  ref_add(b21, b11, 1));
      chk("beta4",  beta[3],  ref_add(b11, b12, 0));
      chk("beta5",  beta[4],  ref_add(b21, b22, 0));
      if (it == 0) begin
        chk("int alpha1", alpha[0], int_fp(5));
        chk("int alpha4", alpha[3], int_fp(2));
        chk("int alpha5", alpha[4], int_fp(-2));
        chk("int beta2",  beta[1],  int_fp(-2));
        chk("int beta5",  beta[4],  int_fp(15));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
