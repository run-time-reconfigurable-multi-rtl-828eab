// tb_urdhva_mult -- exhaustive test of the Urdhva Tiryagbhyam multiplier at
// N = 4 (the paper's worked 4x4 case) and N = 8 (the leaf size used in the
// design), against the '*' operator.
module tb_urdhva_mult;
  int checks = 0, failures = 0;

  logic [3:0] a4, b4;
  logic [7:0] p4;
  logic [7:0] a8, b8;
  logic [15:0] p8;

  urdhva_mult #(.N(4)) dut4 (.a(a4), .b(b4), .p(p4));
  urdhva_mult         dut8 (.a(a8), .b(b8), .p(p8));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i); b4 = 4'(j); #1;
        checks++;
        if (p4 != 8'(i * j)) begin
          failures++;
          $display("N=4 %0d*%0d = %0d, got %0d", i, j, i * j, p4);
        end
      end
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a8 = 8'(i); b8 = 8'(j); #1;
        checks++;
        if (p8 != 16'(i * j)) begin
          failures++;
          if (failures < 10) $display("N=8 %0d*%0d = %0d, got %0d", i, j, i * j, p8);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
