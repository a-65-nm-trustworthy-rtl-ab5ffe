// tb_stat_solver: checks the exact sub-root probabilities and the budget split.
// For random probabilities, budgets and minimum budgets the expected values are computed here
// from the products of the branch probabilities along the three-level path (p/16 for child_1,
// 1 - p/16 for child_0), N_k = max(N_min, floor(N * P_k)) and their sum. It also checks that the
// four probabilities always add up to exactly one.
// Exact evaluation of the top levels and budgets in proportion to probability follow the design;
// the fixed-point scaling and the N_min clamp rule are this implementation's.
module tb_stat_solver;
  logic clk = 0, rst_n = 0;
  logic [3:0] p_root = 0, p_a = 0, p_b = 0;
  logic [15:0] n_total = 0, n_min = 0;
  logic [8:0] p_sub [4];
  logic [15:0] n_sub [4];
  logic [17:0] n_sum;
  int checks = 0, failures = 0;

  stat_solver dut (.clk, .rst_n, .p_root, .p_a, .p_b, .n_total, .n_min, .p_sub, .n_sub, .n_sum);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int pr, pa, pb, n, nm, probs[4], ni[4], sum, psum;
      pr = $urandom_range(0, 15); pa = $urandom_range(0, 15); pb = $urandom_range(0, 15);
      n  = (it < 4) ? 50 : $urandom_range(0, 5000);
      nm = (it % 4 == 0) ? 0 : $urandom_range(0, 40);
      if (it == 1) begin pr = 15; pa = 0; pb = 15; nm = 3; end   // a tiny sub-tree is clamped
      probs[0] = (16 - pr) * (16 - pa);
      probs[1] = (16 - pr) * pa;
      probs[2] = pr * (16 - pb);
      probs[3] = pr * pb;
      sum = 0; psum = 0;
      for (int k = 0; k < 4; k++) begin
        ni[k] = (n * probs[k]) / 256;
        if (ni[k] < nm) ni[k] = nm;
        sum += ni[k];
        psum += probs[k];
      end
      @(negedge clk);
      p_root = 4'(pr); p_a = 4'(pa); p_b = 4'(pb); n_total = 16'(n); n_min = 16'(nm);
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        check(p_sub[k] == 9'(probs[k]), $sformatf("it %0d P%0d = %0d, expected %0d", it, k, p_sub[k], probs[k]));
        check(n_sub[k] == 16'(ni[k]), $sformatf("it %0d N%0d = %0d, expected %0d", it, k, n_sub[k], ni[k]));
      end
      check(n_sum == 18'(sum), $sformatf("it %0d sum %0d expected %0d", it, n_sum, sum));
      check(psum == 256, "probabilities add up to one");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
