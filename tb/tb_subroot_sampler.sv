// tb_subroot_sampler: checks the sub-root down-counter and pulse generator.
// A model array (a shift register of H stages fed by `inject`) stands in for the pNode pipeline.
// For several budgets it checks that exactly N pulses are injected, one per clock, that `done`
// waits for the pipeline to drain and rises N + H + 2 clocks after start, that `done` is sticky
// and that a zero budget finishes at once.
// Down-counter and pulse generator follow the design; one pulse per clock and waiting for the
// array to drain are this implementation's choices.
module tb_subroot_sampler;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] budget = 0, remaining;
  logic inject, busy, done;
  int checks = 0, failures = 0;
  localparam int H = 5;
  logic [H-1:0] pipe = 0;
  logic array_active;

  subroot_sampler dut (.clk, .rst_n, .start, .budget, .array_active, .inject, .busy, .done,
                       .remaining);

  always #5 clk = ~clk;
  always_ff @(posedge clk) pipe <= {pipe[H-2:0], inject};
  assign array_active = |pipe;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n);
    int cycles, pulses, gaps;
    bit seen_first;
    @(negedge clk);
    budget = 16'(n);
    start = 1;
    @(negedge clk);   // the edge in between took start
    start = 0;
    cycles = 0; pulses = 0; gaps = 0; seen_first = 0;
    check(busy && !done, "busy after start");
    while (!done && cycles < 10000) begin
      if (inject) begin
        pulses++;
        seen_first = 1;
      end else if (seen_first && pulses < n) gaps++;
      if (!done) check(busy, "busy until done");
      @(negedge clk);
      cycles++;
    end
    check(pulses == n, $sformatf("budget %0d: %0d pulses injected", n, pulses));
    check(gaps == 0, "one pulse per clock");
    check(cycles == n + H + 2, $sformatf("budget %0d: done after %0d clocks, expected %0d",
                                         n, cycles, n + H + 2));
    check(!array_active, "array drained at done");
    repeat (4) @(negedge clk);
    check(done && !busy && !inject, "done is sticky, generator idle");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !done && !inject, "idle after reset");
    run(1);
    run(7);
    run(50);
    run(300);
    // zero budget: nothing injected; done once the (empty) pipeline is seen idle
    @(negedge clk); budget = 0; start = 1; @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    check(done && !busy, "zero budget finishes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
