// tb_row_queue: checks the configuration queue (6 words) and the probability queue (3 words).
// Random words are written, sometimes with idle clocks in between; each queue must commit
// exactly once per WORDS words, one clock after the last word, with word k in bits 32k+31..32k.
// A flush in the middle of a row must discard the partial row.
// Six and three words per row follow the design; the word order is this implementation's choice.
module tb_row_queue;
  logic clk = 0, rst_n = 0, flush = 0, wr = 0;
  logic [31:0] wdata = 0;
  logic cv, pv;
  logic [191:0] crow;
  logic [95:0]  prow;
  logic [2:0] cfill;
  logic [1:0] pfill;
  int checks = 0, failures = 0;

  row_queue #(.WORDS(6)) u_conf (.clk, .rst_n, .flush, .wr, .wdata, .row_valid(cv),
                                 .row_data(crow), .fill(cfill));
  row_queue #(.WORDS(3)) u_prob (.clk, .rst_n, .flush, .wr, .wdata, .row_valid(pv),
                                 .row_data(prow), .fill(pfill));

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
    logic [191:0] exp_c;
    logic [95:0]  exp_p;
    int nc, np;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int row = 0; row < 20; row++) begin
      exp_c = '0;
      nc = 0; np = 0;
      for (int w = 0; w < 6; w++) begin
        @(negedge clk);
        wdata = $urandom;
        wr = 1;
        exp_c[32*w +: 32] = wdata;
        if (w >= 3) exp_p[32*(w-3) +: 32] = wdata;
        else        exp_p[32*w +: 32] = wdata;
        @(negedge clk);
        wr = 0;
        if (cv) nc++;
        if (pv) begin
          np++;
          check(prow == exp_p, $sformatf("prob row %0d word group %0d", row, w / 3));
        end
        check(cv == (w == 5), $sformatf("conf row commits after 6 words (word %0d)", w));
        check(pv == (w == 2 || w == 5), $sformatf("prob row commits after 3 words (word %0d)", w));
        if (row % 3 == 0) repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      check(crow == exp_c, $sformatf("conf row %0d data", row));
      check(nc == 1 && np == 2, "commit counts");
    end
    // flush in the middle
    for (int w = 0; w < 4; w++) begin
      @(negedge clk); wdata = 32'hDEAD_0000 + 32'(w); wr = 1;
    end
    @(negedge clk); wr = 0; flush = 1;
    @(negedge clk); flush = 0;
    check(cfill == 0 && pfill == 0, "flush empties both queues");
    for (int w = 0; w < 6; w++) begin
      @(negedge clk); wdata = 32'(w + 1); wr = 1;
      @(negedge clk); wr = 0;
      check(cv == (w == 5), "after flush a full row takes 6 new words");
    end
    check(crow == {32'd6, 32'd5, 32'd4, 32'd3, 32'd2, 32'd1}, "row after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
