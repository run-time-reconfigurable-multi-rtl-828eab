// tb_pe -- the processing element (2x2 Strassen multiplier) end to end:
// random matrices in every precision mode against the reference model, the
// four-clock latency, small-integer matrices (exact in every mode, compared
// with the classical product), ready ignored while busy, exception flags,
// and the halt on an undefined precision code.
module tb_pe;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic       clk = 0, ready = 0, reset = 1;
  logic [2:0] prec_sel;
  fp64_t      a11, a12, a21, a22, b11, b12, b21, b22;
  fp64_t      p11, p12, p21, p22;
  logic       zero, infinity, nan, denormal, mod_sel_error, done, busy;

  pe dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Apply one operation and wait for done; returns the latency in clocks.
  task automatic run(logic [2:0] m, mat2_t a, mat2_t b, output int lat);
    @(negedge clk);
    prec_sel = m;
    {a11, a12, a21, a22} = {a[0], a[1], a[2], a[3]};
    {b11, b12, b21, b22} = {b[0], b[1], b[2], b[3]};
    ready = 1;
    @(negedge clk);
    // scramble the inputs: the PE must use its registered copy
    {a11, a12, a21, a22, b11, b12, b21, b22} = '1;
    lat = 1;
    while (!done && lat < 10) begin
      @(negedge clk);
      lat++;
    end
    ready = 0;
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mat2_t a, b, e;
    int    lat;
    prec_sel = 3'b101;
    {a11, a12, a21, a22, b11, b12, b21, b22} = '0;
    repeat (3) @(negedge clk);
    reset = 0;

    for (int it = 0; it < 120; it++) begin
      logic [2:0] m;
      m = 3'(it % 6);
      for (int i = 0; i < 4; i++) begin a[i] = rand_fp(10); b[i] = rand_fp(10); end
      ref_pe(m, a, b, e);
      run(m, a, b, lat);          // ready stays high while busy: ignored
      chk("latency 4", lat == 4);
      chk("p11", p11 === e[0]);
      chk("p12", p12 === e[1]);
      chk("p21", p21 === e[2]);
      chk("p22", p22 === e[3]);
      if (p11 !== e[0]) $display("  mode %b p11 %h expected %h", m, p11, e[0]);
    end

    // Small integers: exact in every mode, equal to the classical product.
    for (int it = 0; it < 60; it++) begin
      int ai [4], bi [4];
      logic [2:0] m;
      m = 3'(it % 6);
      for (int i = 0; i < 4; i++) begin
        ai[i] = $urandom_range(0, 30) - 15; bi[i] = $urandom_range(0, 30) - 15;
        a[i] = int_fp(ai[i]); b[i] = int_fp(bi[i]);
      end
      run(m, a, b, lat);
      chk("int p11", p11 === int_fp(ai[0] * bi[0] + ai[1] * bi[2]));
      chk("int p12", p12 === int_fp(ai[0] * bi[1] + ai[1] * bi[3]));
      chk("int p21", p21 === int_fp(ai[2] * bi[0] + ai[3] * bi[2]));
      chk("int p22", p22 === int_fp(ai[2] * bi[1] + ai[3] * bi[3]));
    end

    // Infinity in an element: the infinity flag is raised.
    a = '{64'h7FF0_0000_0000_0000, int_fp(1), int_fp(2), int_fp(3)};
    b = '{int_fp(1), int_fp(1), int_fp(1), int_fp(1)};
    run(3'b101, a, b, lat);
    chk("infinity flag", infinity);
    // Identity-like: zero flag from zero partial products.
    a = '{int_fp(1), int_fp(0), int_fp(0), int_fp(1)};
    run(3'b101, a, b, lat);
    chk("zero flag", zero && !infinity);

    // Undefined precision code: no done, error set, outputs held.
    @(negedge clk); prec_sel = 3'b110; ready = 1;
    @(negedge clk); ready = 0;
    repeat (8) begin @(negedge clk); chk("halt: no done", !done); end
    chk("mod_sel_error", mod_sel_error);
    chk("outputs held", p11 === int_fp(1));
    a = '{int_fp(2), int_fp(0), int_fp(0), int_fp(2)};
    run(3'b001, a, b, lat);
    chk("recovered", done && p11 === int_fp(2) && !mod_sel_error);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
