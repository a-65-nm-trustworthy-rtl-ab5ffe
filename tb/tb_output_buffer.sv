// tb_output_buffer: checks that a captured row of 24 8-bit counters is returned as six 32-bit
// words (node 4k in the low byte of word k) and that it holds while the input changes.
// The 24 x 8-bit size follows the design; the word layout is this implementation's choice.
module tb_output_buffer;
  logic clk = 0, rst_n = 0, capture = 0;
  logic [191:0] row_in = 0;
  logic [2:0] word_sel = 0;
  logic [31:0] word;
  int checks = 0, failures = 0;

  output_buffer dut (.clk, .rst_n, .capture, .row_in, .word_sel, .word);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] cnt [24];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 10; it++) begin
      @(negedge clk);
      for (int n = 0; n < 24; n++) begin
        cnt[n] = 8'($urandom);
        row_in[8*n +: 8] = cnt[n];
      end
      capture = 1;
      @(negedge clk);
      capture = 0;
      row_in = {6{$urandom}};   // input changes, buffer must hold
      for (int k = 0; k < 6; k++) begin
        word_sel = 3'(k);
        #1;
        check(word == {cnt[4*k+3], cnt[4*k+2], cnt[4*k+1], cnt[4*k]},
              $sformatf("iteration %0d word %0d = %08h", it, k, word));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
