// tb_spi_slave: an SPI master model (mode 0, SCX = clk/16) writes random words to random
// addresses of a bus-slave model and reads them back. The bus model sometimes delays the grant.
// Checks: every write reaches the bus with the right address and data, every read returns the
// stored word on MISO, frames with other commands and aborted frames do nothing.
// The pin names follow the design; the frame format checked here is this implementation's.
module tb_spi_slave;
  logic clk = 0, rst_n = 0;
  logic scx = 0, mosi = 0, ss = 1, miso;
  logic req, we, gnt;
  logic [31:0] addr, d_out, d_in;
  logic [31:0] mem [256];
  int checks = 0, failures = 0, writes = 0;

  spi_slave dut (.clk, .rst_n, .scx, .mosi, .ss, .miso, .req, .we, .addr, .d_out, .d_in, .gnt);

  always #5 clk = ~clk;
  always @(negedge clk) gnt = ($urandom_range(0, 3) != 0);
  assign d_in = mem[addr[9:2]];
  always @(posedge clk) if (req && gnt && we) begin
    mem[addr[9:2]] <= d_out;
    writes++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one 72-bit frame; returns the 32 bits seen on MISO during the data phase
  task automatic frame(logic [7:0] cmd, logic [31:0] a, logic [31:0] d, output logic [31:0] q,
                       input int nbits = 72);
    logic [71:0] out;
    out = {cmd, a, d};
    ss = 0;
    repeat (8) @(negedge clk);
    for (int i = 0; i < nbits; i++) begin
      mosi = out[71 - i];
      repeat (8) @(negedge clk);
      scx = 1;
      if (i >= 40) q = {q[30:0], miso};
      repeat (8) @(negedge clk);
      scx = 0;
    end
    repeat (8) @(negedge clk);
    ss = 1;
    repeat (16) @(negedge clk);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model [256];
    logic [31:0] q;
    for (int i = 0; i < 256; i++) begin
      mem[i] = 0;
      model[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      logic [7:0] w;
      logic [31:0] d;
      w = 8'($urandom);
      d = $urandom;
      frame(8'h02, {22'd0, w, 2'b00}, d, q);
      model[w] = d;
      check(mem[w] == d, $sformatf("write %0d reaches the bus", it));
      w = 8'($urandom_range(0, 255));
      frame(8'h03, {22'd0, w, 2'b00}, 32'h0, q);
      check(q == model[w], $sformatf("read %0d: %08h expected %08h", it, q, model[w]));
    end
    begin
      int n_before;
      n_before = writes;
      frame(8'h55, 32'h10, 32'hFFFF_FFFF, q);          // unknown command
      frame(8'h02, 32'h14, 32'hFFFF_FFFF, q, 60);      // aborted write
      check(writes == n_before && mem[4] == model[4] && mem[5] == model[5],
            "unknown command and aborted frame write nothing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
