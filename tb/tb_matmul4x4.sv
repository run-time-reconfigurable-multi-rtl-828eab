// tb_matmul4x4 -- end-to-end test of the 4x4 multi-precision matrix
// multiplier at its only (default) configuration.
//
// Sequence: reset; random matrices in every precision mode with a mode
// change on every operation, checked bit-exactly against the reference model
// (block products by the PE reference, then block sums); small-integer
// matrices, exact in every mode and checked against the classical product;
// the paper's table-of-results operand placed in the matrices; auto-mode;
// an undefined precision code (halt, no done, error flag) and recovery;
// ready held high while busy; inputs carrying zero, infinity, NaN and
// values whose products underflow to denormals.  Each of these mechanisms
// is counted, and one that never happened counts as a failure.  The latency
// (done five clocks after ready is accepted) is checked on every operation.
module tb_matmul4x4;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic       clk = 0, reset = 1, ready = 0;
  logic [2:0] prec_sel;
  fp64_t      a [4][4];
  fp64_t      b [4][4];
  fp64_t      c [4][4];
  logic       zero, infinity, nan, denormal, mod_sel_error, done, busy;

  matmul4x4 dut (.*);

  always #5 clk = ~clk;

  // Mechanism counters.
  int n_mode [8];
  int n_switch, n_auto_modes, n_err, n_busy_ignored, n_zero, n_inf, n_nan, n_den, n_ops;
  logic [2:0] last_mode = 3'b111;

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  typedef fp_t mat4_t [4][4];

  function automatic void ref_mm(logic [2:0] m, mat4_t x, mat4_t y, output mat4_t z);
    for (int bi = 0; bi < 2; bi++)
      for (int bj = 0; bj < 2; bj++) begin
        mat2_t p0, p1, xa, yb;
        for (int bk = 0; bk < 2; bk++) begin
          xa = '{x[2*bi][2*bk], x[2*bi][2*bk+1], x[2*bi+1][2*bk], x[2*bi+1][2*bk+1]};
          yb = '{y[2*bk][2*bj], y[2*bk][2*bj+1], y[2*bk+1][2*bj], y[2*bk+1][2*bj+1]};
          if (bk == 0) ref_pe(m, xa, yb, p0);
          else         ref_pe(m, xa, yb, p1);
        end
        z[2*bi][2*bj]     = ref_add(p0[0], p1[0], 0);
        z[2*bi][2*bj+1]   = ref_add(p0[1], p1[1], 0);
        z[2*bi+1][2*bj]   = ref_add(p0[2], p1[2], 0);
        z[2*bi+1][2*bj+1] = ref_add(p0[3], p1[3], 0);
      end
  endfunction

  // One operation; returns the latency, checks c against exp.
  task automatic run(logic [2:0] m, mat4_t x, mat4_t y, mat4_t exp, string what);
    int lat;
    @(negedge clk);
    prec_sel = m;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin a[i][j] = x[i][j]; b[i][j] = y[i][j]; end
    ready = 1;
    @(negedge clk);
    lat = 1;
    while (!done && lat < 10) begin
      if (busy && ready) n_busy_ignored++;
      @(negedge clk);
      lat++;
    end
    ready = 0;
    chk({what, " latency 5"}, lat == 5);
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (c[i][j] !== exp[i][j]) begin
          failures++;
          if (failures < 15) $display("%s mode %b c[%0d][%0d] = %h expected %h", what, m, i, j, c[i][j], exp[i][j]);
        end
      end
    n_ops++;
    n_mode[m]++;
    if (m != last_mode) n_switch++;
    last_mode = m;
    if (zero) n_zero++;
    if (infinity) n_inf++;
    if (nan) n_nan++;
    if (denormal) n_den++;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mat4_t x, y, e;
    prec_sel = 3'b101;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin a[i][j] = '0; b[i][j] = '0; end
    repeat (3) @(negedge clk);
    reset = 0;

    // Random matrices, every mode, mode switching every operation.
    for (int it = 0; it < 24; it++) begin
      logic [2:0] m;
      m = 3'(it % 6);
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        x[i][j] = rand_fp(12); y[i][j] = rand_fp(12);
      end
      ref_mm(m, x, y, e);
      run(m, x, y, e, "random");
    end

    // Small integers: exact in every mode.
    for (int it = 0; it < 12; it++) begin
      int xi [4][4], yi [4][4];
      logic [2:0] m;
      m = 3'(5 - it % 6);
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        xi[i][j] = $urandom_range(0, 20) - 10; yi[i][j] = $urandom_range(0, 20) - 10;
        x[i][j] = int_fp(xi[i][j]); y[i][j] = int_fp(yi[i][j]);
      end
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        int acc;
        acc = 0;
        for (int k = 0; k < 4; k++) acc += xi[i][k] * yi[k][j];
        e[i][j] = int_fp(acc);
      end
      run(m, x, y, e, "integer");
    end

    // Auto-mode with operands of different precision needs.
    begin
      logic [2:0] seen [$];
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        x[i][j] = (i < 2) ? int_fp(i + j + 1) : 64'h4069_b130_ae80_4118;
        y[i][j] = (j < 2) ? int_fp(2) : rand_fp(4);
      end
      ref_mm(3'b000, x, y, e);
      run(3'b000, x, y, e, "auto");
      // count distinct modes auto-mode resolves to for these operands
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        logic [2:0] r;
        r = ref_resolve(3'b000, x[i][j], y[j][i]);
        if (!(r inside {seen})) seen.push_back(r);
      end
      n_auto_modes = seen.size();
    end

    // Undefined precision code: halted.
    @(negedge clk); prec_sel = 3'b111; ready = 1;
    @(negedge clk); ready = 0;
    begin
      int any_done;
      any_done = 0;
      repeat (8) begin @(negedge clk); if (done) any_done++; end
      chk("halt: no done", any_done == 0);
      chk("mod_sel_error", mod_sel_error);
      if (mod_sel_error) n_err++;
    end

    // Exceptions: zero row, infinity, NaN, tiny values (denormal products).
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      x[i][j] = (i == 0) ? 64'h0 : rand_fp(3); y[i][j] = rand_fp(3);
    end
    ref_mm(3'b101, x, y, e);
    run(3'b101, x, y, e, "zero row");
    x[1][1] = 64'h7FF0_0000_0000_0000;
    ref_mm(3'b101, x, y, e);
    run(3'b101, x, y, e, "infinity");
    x[1][1] = 64'h7FF8_0000_0000_0000;
    ref_mm(3'b011, x, y, e);
    run(3'b011, x, y, e, "nan");
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      x[i][j] = {1'($urandom), 11'd520, 52'($urandom)};
      y[i][j] = {1'($urandom), 11'd520, 52'($urandom)};
    end
    ref_mm(3'b101, x, y, e);
    run(3'b101, x, y, e, "denormal");
    chk("recovered from error", !mod_sel_error);

    // Mechanism coverage.
    for (int m = 0; m < 6; m++) chk($sformatf("mode %0d used", m), n_mode[m] > 0);
    chk("mode switches", n_switch > 6);
    chk("auto-mode resolved to several modes", n_auto_modes > 1);
    chk("mode-select error seen", n_err > 0);
    chk("ready ignored while busy", n_busy_ignored > 0);
    chk("zero flag seen", n_zero > 0);
    chk("infinity flag seen", n_inf > 0);
    chk("NaN flag seen", n_nan > 0);
    chk("denormal flag seen", n_den > 0);
    $display("ops=%0d switches=%0d auto_modes=%0d err=%0d busy_ignored=%0d zero=%0d inf=%0d nan=%0d den=%0d",
             n_ops, n_switch, n_auto_modes, n_err, n_busy_ignored, n_zero, n_inf, n_nan, n_den);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
