// tb_trunc_round -- operand truncation and rnd = G&(R|T|E) rounding in each
// mode, on random doubles, on mantissas that carry out of the kept field,
// and on special values, against the reference model.
module tb_trunc_round;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  fp64_t x, y;
  mode_e mode;

  trunc_round dut (.x(x), .mode(mode), .y(y));

  task automatic chk(string what, logic [63:0] exp);
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("%s mode=%b x=%h: got %h expected %h", what, mode, x, y, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 1; m <= 5; m++) begin
      mode = mode_e'(m);
      for (int it = 0; it < 2000; it++) begin
        x = rand_fp(200);
        chk("random", ref_trunc(x, man_bits(3'(m))));
      end
      // Carry out of the kept field: all-ones mantissa with G=R=1.
      x = 64'h3FFF_FFFF_FFFF_FFFF;
      chk("carry", ref_trunc(x, man_bits(3'(m))));
      // G set, R T E clear: no round-up.
      x = {1'b0, 11'd1023, 52'h0} | (64'd1 << (51 - man_bits(3'(m)))) ;
      if (m != 5) chk("G only", {1'b0, 11'd1023, 52'h0});
      x = 64'h7FF0_0000_0000_0000; chk("inf", 64'h7FF0_0000_0000_0000);
      x = 64'h0000_0000_0000_0001; chk("denormal", 64'h0000_0000_0000_0001);
    end
    // Directed: 1.10011011 1011... in 8-bit mode rounds up to 1.10011100.
    mode = MODE_8;
    x = {1'b0, 11'd1023, 8'b10011011, 4'b1011, 40'h0};
    chk("directed up", {1'b0, 11'd1023, 8'b10011100, 44'h0});
    x = {1'b0, 11'd1023, 8'b10011011, 4'b0111, 40'hFF};
    chk("directed down", {1'b0, 11'd1023, 8'b10011011, 44'h0});
    x = {1'b1, 11'd1000, 8'hFF, 4'b1100, 40'h0};
    chk("directed carry", {1'b1, 11'd1001, 52'h0});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
