// tb_pe_control -- the processing-element sequencer: state order and
// latencies of load_in, mult_start, load_out and done, ready ignored while
// busy, the error path, and reset.
module tb_pe_control;
  int checks = 0, failures = 0;

  logic clk = 0, reset = 1, ready = 0, mult_valid = 0, mult_err = 0;
  logic load_in, mult_start, load_out, done, busy, mod_sel_error;

  pe_control dut (.*);

  always #5 clk = ~clk;

  // A multiplier model: valid (or err) two edges after mult_start.
  logic [1:0] pipe;
  logic       fail_next = 0;
  always_ff @(posedge clk) begin
    pipe       <= {pipe[0], mult_start};
    mult_valid <= pipe[0] && !fail_next;
    mult_err   <= pipe[0] && fail_next;
  end

  task automatic chk(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run one operation; record the cycle of each control pulse.
  task automatic run(logic fail, output int t_start, output int t_out, output int t_done);
    int cyc;
    fail_next = fail;
    t_start = -1; t_out = -1; t_done = -1;
    @(negedge clk);
    ready = 1;
    #1;
    chk("load_in with ready when idle", load_in && !busy);
    @(negedge clk);
    ready = 1;   // held high: must be ignored while busy
    for (cyc = 1; cyc < 8; cyc++) begin
      chk("no load_in while busy", !load_in || !busy);
      if (mult_start) t_start = cyc;
      if (load_out)   t_out   = cyc;
      if (done)       t_done  = cyc;
      if (!busy) break;
      @(negedge clk);
    end
    ready = 0;
  endtask

  initial begin
    int ts, to, td;
    pipe = '0;
    repeat (3) @(negedge clk);
    reset = 0;
    @(negedge clk);
    chk("idle after reset", !busy && !done && !mod_sel_error);
    run(0, ts, to, td);
    chk("mult_start 1 cycle after accept", ts == 1);
    chk("load_out 3 cycles after accept", to == 3);
    chk("done 4 cycles after accept", td == 4);
    chk("no error", !mod_sel_error);
    run(1, ts, to, td);
    chk("error: no load_out", to == -1);
    chk("error: no done", td == -1);
    chk("error latched", mod_sel_error);
    run(0, ts, to, td);
    chk("after error: done", td == 4);
    chk("error cleared by new op", !mod_sel_error);
    // Reset in the middle of an operation returns to idle.
    @(negedge clk); ready = 1; @(negedge clk); ready = 0; reset = 1;
    @(negedge clk); reset = 0;
    chk("reset to idle", !busy);
    repeat (5) begin @(negedge clk); chk("nothing after reset", !done && !load_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
