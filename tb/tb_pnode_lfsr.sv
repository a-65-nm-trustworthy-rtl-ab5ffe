// tb_pnode_lfsr: checks the pNode LFSR against the polynomial x^8 + x^6 + x^5 + x^4 + 1.
// It compares every step with a reference register, checks that the register holds when not
// enabled, that the period is 255 and that every non-zero state is visited exactly once.
// The 8-bit length follows the design; the polynomial is this implementation's choice.
module tb_pnode_lfsr;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] state;
  logic [3:0] rn;
  logic [7:0] ref_s;
  int checks = 0, failures = 0;
  bit seen [256];

  pnode_lfsr #(.W(8), .RN_W(4), .SEED(8'h5A)) dut (.clk, .rst_n, .en, .state, .rn);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_s = 8'h5A;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == 8'h5A, "seed after reset");
    // hold while disabled
    repeat (5) @(posedge clk);
    @(negedge clk);
    check(state == 8'h5A, "holds when en = 0");
    // run one period
    en = 1;
    for (int i = 0; i < 255; i++) begin
      seen[state] = 1;
      check(rn == state[3:0], "rn is the low nibble");
      @(posedge clk);
      ref_s = {ref_s[6:0], ref_s[7] ^ ref_s[5] ^ ref_s[4] ^ ref_s[3]};
      @(negedge clk);
      check(state == ref_s, $sformatf("step %0d: got %02h expected %02h", i, state, ref_s));
      if (i < 254) check(state != 8'h5A, "period shorter than 255");
    end
    check(state == 8'h5A, "period is 255");
    begin
      int n = 0;
      for (int v = 1; v < 256; v++) if (seen[v]) n++;
      check(n == 255 && !seen[0], "all 255 non-zero states visited");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
