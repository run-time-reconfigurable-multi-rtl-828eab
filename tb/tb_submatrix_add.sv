// tb_submatrix_add -- element-wise 2x2 block sum against the simulator's
// double arithmetic.
module tb_submatrix_add;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  fp64_t x [2][2];
  fp64_t y [2][2];
  fp64_t z [2][2];

  submatrix_add dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < 2; c++) begin
          x[r][c] = rand_fp(10);
          y[r][c] = rand_fp(10);
        end
      #1;
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < 2; c++) begin
          checks++;
          if (z[r][c] !== ref_add(x[r][c], y[r][c], 0)) begin
            failures++;
            if (failures < 10) $display("z[%0d][%0d] = %h, expected %h", r, c, z[r][c], ref_add(x[r][c], y[r][c], 0));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
