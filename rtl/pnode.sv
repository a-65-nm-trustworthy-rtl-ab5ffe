// pnode: one probabilistic node of the PDT sampling array.
//
// A pNode has eight bidirectional links, one to each of its eight neighbours. A sample travels
// through the array as a one-cycle pulse. When a pulse arrives on any input link the node acts
// according to its role:
//   * branch  - compares its 4-bit random number rn with its 4-bit probability p and sends the
//               pulse to child_1 if rn < p, otherwise to child_0, then steps its LFSR;
//   * bypass  - sends the pulse to child_0 with no random draw (used for routing through nodes
//               that are not part of the tree);
//   * leaf    - increments its 8-bit counter and sends nothing.
// A sub-root is a branch node that receives its pulses from the tile's pulse generator.
//
// Interface: `pulse_in[d]` is the pulse coming from the neighbour in direction d,
// `pulse_out[d]` goes to the neighbour in direction d (see pdt_pkg::dir_e). The configuration
// byte and the probability nibble are written with `cfg_we` / `prob_we`; `clr_cnt` clears the
// counter. Timing: one clock per hop; `pulse_out` is registered.
//
// From the design: the register file fields (probability[3:0], is_leaf, child_0[2:0],
// child_1[2:0], is_bypass), the LFSR/comparator/3-to-8 decoder path, the test "rn < p gives
// sel = 1", the 8-bit leaf counter and gating the LFSR so it only moves on a pulse. Own choices:
// the counter saturates at 255 instead of wrapping; pulses arriving on several links in the same
// clock are merged into one (this only happens in a wrongly mapped tree); the LFSR value is drawn
// before it steps; reset clears all registers, which makes an unconfigured node a branch that
// forwards north.
module pnode
  import pdt_pkg::*;
#(
  parameter logic [LFSR_W-1:0] SEED = 8'h01
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  pnode_cfg_t        cfg_in,
  input  logic              prob_we,
  input  logic [PROB_W-1:0] prob_in,
  input  logic              clr_cnt,
  // pulse links
  input  logic [7:0]        pulse_in,
  output logic [7:0]        pulse_out,
  // leaf counter
  output logic [CNT_W-1:0]  count
);

  pnode_cfg_t        cfg;
  logic [PROB_W-1:0] prob;
  logic              pulse;      // input stage: any link active
  logic              draw;       // branch node with a pulse: LFSR clock enabled
  logic [PROB_W-1:0] rn;
  logic              sel;
  logic [2:0]        child;

  // Register file
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg  <= '0;
      prob <= '0;
    end else begin
      if (cfg_we)  cfg  <= cfg_in;
      if (prob_we) prob <= prob_in;
    end
  end

  // Input stage
  assign pulse = |pulse_in;
  assign draw  = pulse && !cfg.is_leaf && !cfg.is_bypass;

  pnode_lfsr #(.W(LFSR_W), .RN_W(PROB_W), .SEED(SEED)) u_lfsr (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (draw),
    .state(),
    .rn   (rn)
  );

  // Comparator and child multiplexer
  assign sel   = !cfg.is_bypass && (rn < prob);
  assign child = sel ? cfg.child_1 : cfg.child_0;

  // Output stage: 3-to-8 decoder into a one-cycle pulse
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       pulse_out <= '0;
    else if (pulse && !cfg.is_leaf)   pulse_out <= 8'(1) << child;
    else                              pulse_out <= '0;
  end

  // Leaf counter
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                     count <= '0;
    else if (clr_cnt)                               count <= '0;
    else if (pulse && cfg.is_leaf && count != '1)   count <= count + 1'b1;
  end

  // A node forwards at most one pulse per clock.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pulse_out));

endmodule
