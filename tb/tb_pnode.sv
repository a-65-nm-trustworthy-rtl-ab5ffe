// tb_pnode: checks one pNode in its three roles.
// Branch: for each pulse the output goes, one clock later, to child_1 when the low LFSR nibble
// is below p and to child_0 otherwise (reference LFSR kept in the testbench); over a full LFSR
// period the number of child_1 choices must be the number of 4-bit values below p in the
// sequence. Bypass: every pulse goes to child_0 and the LFSR does not move. Leaf: the counter
// counts pulses, never forwards, saturates at 255 and clears.
// The rule rn < p selects child_1 as in the design; the saturation and byte layout are own choices.
module tb_pnode;
  import pdt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, prob_we = 0, clr_cnt = 0;
  pnode_cfg_t cfg_in;
  logic [3:0] prob_in;
  logic [7:0] pulse_in = 0, pulse_out;
  logic [7:0] count;
  logic [7:0] ref_s;
  int checks = 0, failures = 0;
  localparam logic [7:0] SEED = 8'h3C;

  pnode #(.SEED(SEED)) dut (.clk, .rst_n, .cfg_we, .cfg_in, .prob_we, .prob_in, .clr_cnt,
                            .pulse_in, .pulse_out, .count);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic configure(bit leaf, bit bypass, int ch0, int ch1, int p);
    @(negedge clk);
    cfg_in  = '{is_bypass: bypass, child_1: 3'(ch1), child_0: 3'(ch0), is_leaf: leaf};
    prob_in = 4'(p);
    cfg_we = 1; prob_we = 1;
    @(negedge clk);
    cfg_we = 0; prob_we = 0;
  endtask

  // one pulse on input link `d`; returns the output seen one clock later
  task automatic pulse(int d, output logic [7:0] out);
    @(negedge clk);
    pulse_in = 8'(1) << d;
    @(negedge clk);
    pulse_in = 0;
    out = pulse_out;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] out;
    int n1, expected_n1;
    ref_s = SEED;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- branch: p = 5, child_0 = NE (1), child_1 = S (4) ----
    configure(0, 0, 1, 4, 5);
    n1 = 0; expected_n1 = 0;
    for (int i = 0; i < 255; i++) begin
      bit want1;
      want1 = ref_s[3:0] < 4'd5;
      expected_n1 += int'(want1);
      pulse(i % 8, out);
      check(out == (want1 ? 8'b0001_0000 : 8'b0000_0010),
            $sformatf("branch pulse %0d: out %b rn %0d", i, out, ref_s[3:0]));
      if (out[4]) n1++;
      ref_s = {ref_s[6:0], ref_s[7] ^ ref_s[5] ^ ref_s[4] ^ ref_s[3]};
      @(negedge clk);
      check(pulse_out == 0, "output pulse lasts one clock");
    end
    // nibble 0 appears 15 times, nibbles 1..15 16 times each in one period
    check(n1 == 79, $sformatf("child_1 taken %0d of 255 times for p=5, expected 79", n1));
    check(expected_n1 == 79, "reference count");

    // p = 0 never takes child_1, p = 15 takes it unless rn = 15
    configure(0, 0, 2, 6, 0);
    for (int i = 0; i < 20; i++) begin
      pulse(0, out);
      check(out == 8'b0000_0100, "p = 0 always child_0");
      ref_s = {ref_s[6:0], ref_s[7] ^ ref_s[5] ^ ref_s[4] ^ ref_s[3]};
    end

    // ---- bypass: child_0 = W (6) ----
    configure(0, 1, 6, 2, 15);
    for (int i = 0; i < 10; i++) begin
      pulse(2, out);
      check(out == 8'b0100_0000, "bypass forwards to child_0");
    end
    check(dut.u_lfsr.state == ref_s, "LFSR does not move in bypass mode");

    // ---- leaf ----
    configure(1, 0, 3, 3, 7);
    @(negedge clk); clr_cnt = 1; @(negedge clk); clr_cnt = 0;
    check(count == 0, "counter cleared");
    for (int i = 0; i < 300; i++) begin
      pulse(i % 8, out);
      check(out == 0, "leaf forwards nothing");
      check(count == 8'(i < 255 ? i + 1 : 255), $sformatf("leaf count %0d after %0d", count, i+1));
    end
    check(dut.u_lfsr.state == ref_s, "LFSR does not move in leaf mode");
    @(negedge clk); clr_cnt = 1; @(negedge clk); clr_cnt = 0;
    check(count == 0, "counter cleared again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
