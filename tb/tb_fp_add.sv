// tb_fp_add -- the double-precision adder/subtractor against the simulator's
// IEEE arithmetic (round to nearest even): random operands of near and far
// exponents, cancellation, and special values.
module tb_fp_add;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  fp64_t a, b, y;
  logic  sub;

  fp_add dut (.a(a), .b(b), .sub(sub), .y(y));

  task automatic chk(string what, logic [63:0] exp);
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("%s: %h %s %h = %h, expected %h", what, a, sub ? "-" : "+", b, y, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20000; it++) begin
      a   = rand_fp((it % 4 == 0) ? 80 : 3);
      b   = rand_fp((it % 4 == 0) ? 80 : 3);
      sub = 1'($urandom);
      if (it % 5 == 0) b = {b[63], a[62:52], b[51:0]};            // equal exponents
      if (it % 7 == 0) b = {~a[63] ^ sub, a[62:0] ^ 63'($urandom_range(0, 3))}; // near cancellation
      chk("random", ref_add(a, b, sub));
    end
    sub = 0;
    a = int_fp(5);  b = int_fp(-5); chk("cancel", 64'h0);
    a = 64'h7FF0_0000_0000_0000; b = int_fp(1); chk("inf+x", 64'h7FF0_0000_0000_0000);
    a = 64'h7FF0_0000_0000_0000; b = 64'hFFF0_0000_0000_0000; chk("inf-inf", 64'h7FF8_0000_0000_0000);
    a = 64'h7FF4_0000_0000_0000; b = int_fp(1); chk("nan", 64'h7FF8_0000_0000_0000);
    a = 64'h0; b = int_fp(-3); chk("0+x", int_fp(-3));
    a = int_fp(7); b = 64'h0; chk("x+0", int_fp(7));
    a = 64'h8000_0000_0000_0000; b = 64'h8000_0000_0000_0000; chk("-0+-0", 64'h8000_0000_0000_0000);
    a = 64'h7FEF_FFFF_FFFF_FFFF; b = a; chk("overflow", 64'h7FF0_0000_0000_0000);
    sub = 1;
    a = 64'h0010_0000_0000_0001; b = 64'h0010_0000_0000_0000; chk("underflow flush", 64'h0);
    sub = 0;
    a = int_fp(1); b = 64'h3CA0_0000_0000_0000; chk("tie to even", int_fp(1));
    a = 64'h3FF0_0000_0000_0001; b = 64'h3CA0_0000_0000_0000; chk("tie up to even", 64'h3FF0_0000_0000_0002);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
