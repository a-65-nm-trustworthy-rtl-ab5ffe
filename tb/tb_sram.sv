// tb_sram: random byte-enabled writes and reads on both ports of the memory, compared with a
// model array; port A must see port B's writes from the next clock on.
// Memory size and port arrangement are this implementation's choices.
module tb_sram;
  localparam int DEPTH = 64;
  logic clk = 0;
  logic [5:0] a_addr = 0, b_addr = 0;
  logic [31:0] a_rdata, b_rdata, b_wdata = 0;
  logic b_we = 0;
  logic [3:0] b_be = 0;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  sram #(.DEPTH(DEPTH)) dut (.clk, .a_addr, .a_rdata, .b_we, .b_be, .b_addr, .b_wdata, .b_rdata);

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
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      b_we = 1; b_be = 4'hF; b_addr = 6'(i); b_wdata = $urandom; model[i] = b_wdata;
    end
    @(negedge clk); b_we = 0;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      b_addr = 6'($urandom); a_addr = 6'($urandom);
      b_we = $urandom_range(0, 1); b_be = 4'($urandom); b_wdata = $urandom;
      #1;
      check(b_rdata == model[b_addr], "port B read");
      check(a_rdata == model[a_addr], "port A read");
      @(posedge clk);
      if (b_we) for (int i = 0; i < 4; i++) if (b_be[i]) model[b_addr][8*i +: 8] = b_wdata[8*i +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
