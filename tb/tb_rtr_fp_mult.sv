// tb_rtr_fp_mult -- the run-time-reconfigurable multiplier as a whole:
// the paper's table of results (4069b130ae804118 squared in every mode),
// the two-clock latency, back-to-back operations that switch mode every
// clock, auto-mode, and the halt on a mode-select error.
module tb_rtr_fp_mult;
  import fpmm_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic  clk = 0, reset = 1, ready = 0;
  fp67_t a_in, b_in;
  fp64_t product;
  logic  zero, infinity, nan, denormal, err, valid;
  mode_e mode_used;

  rtr_fp_mult dut (
    .clk, .reset, .ready, .a_in, .b_in, .product, .zero, .infinity, .nan,
    .denormal, .mode_sel_error(err), .valid, .mode_used
  );

  always #5 clk = ~clk;

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One operation: present, wait for valid, check value and latency.
  task automatic op(logic [2:0] ma, logic [2:0] mb, logic [63:0] a, logic [63:0] b,
                    logic [63:0] exp, string what);
    int lat;
    @(negedge clk);
    a_in = '{mode: ma, val: a}; b_in = '{mode: mb, val: b}; ready = 1;
    @(negedge clk);
    ready = 0;
    lat = 1;
    while (!valid && lat < 5) begin
      @(negedge clk);
      lat++;
    end
    chk({what, " latency"}, lat == 2);
    chk({what, " value"}, product === exp);
    if (product !== exp) $display("  %s: got %h expected %h", what, product, exp);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [63:0] X = 64'h4069_b130_ae80_4118;

  initial begin
    a_in = '0; b_in = '0;
    repeat (3) @(negedge clk);
    reset = 0;
    // Table of results.
    op(3'b001, 3'b001, X, X, 64'h40e4_9ec8_0000_0000, "table 8-bit");
    op(3'b010, 3'b010, X, X, 64'h40e4_a0b0_1b48_0000, "table 16-bit");
    op(3'b011, 3'b011, X, X, 64'h40e4_a0b1_1c33_e320, "table 23-bit");
    op(3'b101, 3'b101, X, X, 64'h40e4_a0b1_337c_dfbd, "table double");
    op(3'b100, 3'b100, X, X, ref_mult(3'b100, X, X),  "36-bit");
    // Auto-mode resolves this operand to the 36-bit mode (see mode_select).
    op(3'b000, 3'b000, X, X, ref_mult(3'b000, X, X),  "auto");
    chk("auto picked 36-bit", mode_used == MODE_36);
    // Auto-mode on short mantissas picks the 8-bit mode and is exact.
    op(3'b000, 3'b000, int_fp(13), int_fp(-7), int_fp(-91), "auto small ints");
    chk("auto picked 8-bit", mode_used == MODE_8);

    // Mode-select error: result registers hold, valid stays low.
    @(negedge clk);
    a_in = '{mode: 3'b001, val: X}; b_in = '{mode: 3'b010, val: X}; ready = 1;
    @(negedge clk); ready = 0;
    repeat (3) begin
      @(negedge clk);
      chk("error: no valid", !valid);
    end
    chk("error flag", err);
    chk("error: product held", product === int_fp(-91));
    @(negedge clk);
    a_in = '{mode: 3'b110, val: X}; b_in = '{mode: 3'b110, val: X}; ready = 1;
    @(negedge clk); ready = 0;
    repeat (3) begin
      @(negedge clk);
      chk("undefined mode: no valid", !valid);
    end
    chk("error flag 110", err);
    op(3'b101, 3'b101, int_fp(3), int_fp(5), int_fp(15), "recovery");
    chk("error cleared", !err);

    // Back-to-back, a new random mode every clock.
    begin
      logic [63:0] ea [$];
      logic [2:0]  em [$];
      int          got;
      got = 0;
      for (int it = 0; it < 400; it++) begin
        logic [2:0]  m;
        logic [63:0] a, b;
        m = 3'($urandom_range(0, 5));
        a = rand_fp(100); b = rand_fp(100);
        @(negedge clk);
        a_in = '{mode: m, val: a}; b_in = '{mode: m, val: b}; ready = 1;
        ea.push_back(ref_mult(m, a, b));
        if (valid) begin
          chk("stream value", product === ea.pop_front());
          got++;
        end
      end
      @(negedge clk); ready = 0;
      while (ea.size() > 0) begin
        if (valid) begin
          chk("stream value", product === ea.pop_front());
          got++;
        end
        @(negedge clk);
        if (got > 1000) break;
      end
      chk("stream count", got == 400);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
