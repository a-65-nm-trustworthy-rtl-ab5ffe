// stat_solver: exact evaluation of the shallow part of the tree and sampling-budget allocation.
//
// The top of the tree (root and its two children) is evaluated exactly instead of by sampling.
// With the branch convention of the pNodes (probability p/16 of taking child_1), the four
// sub-roots at depth 3 are reached with probabilities
//   P0 = (1-pr)(1-pa), P1 = (1-pr) pa, P2 = pr (1-pb), P3 = pr pb,
// where pr, pa, pb are the 4-bit probabilities of the root, of the root's child_0 and of its
// child_1 (p = value/16). The products are exact in 8 fractional bits (Pk = value/256). Each
// sub-tree then gets a budget N_k = max(N_min, floor(N * Pk)), and N_sum = sum of the N_k is
// the number of samples actually taken.
//
// From the design: levels up to depth 3 solved exactly, budgets proportional to the sub-root
// probabilities with a minimum N_min, and N as the sum of the N_i. Own choices: realising the
// solver as a small hardware unit, the fixed-point formats and rounding down. Timing: results
// are registered; they are valid one clock after the inputs change.
module stat_solver
  import pdt_pkg::*;
#(
  parameter int unsigned PW = PROB_W,
  parameter int unsigned BW = BUDGET_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PW-1:0]   p_root,
  input  logic [PW-1:0]   p_a,
  input  logic [PW-1:0]   p_b,
  input  logic [BW-1:0]   n_total,
  input  logic [BW-1:0]   n_min,
  output logic [2*PW:0]   p_sub [4],    // sub-root probability, value / 2^(2*PW)
  output logic [BW-1:0]   n_sub [4],    // budget of each sub-tree
  output logic [BW+1:0]   n_sum
);

  localparam int unsigned ONE = 1 << PW;

  logic [PW:0]     q_root [2];   // probability of root child 0 / 1, value / 2^PW
  logic [PW:0]     q_lvl2 [4];
  logic [2*PW:0]   prod   [4];
  logic [BW-1:0]   alloc  [4];
  logic [BW+1:0]   total;

  always_comb begin
    q_root[0] = (PW+1)'(ONE) - (PW+1)'(p_root);
    q_root[1] = (PW+1)'(p_root);
    q_lvl2[0] = (PW+1)'(ONE) - (PW+1)'(p_a);
    q_lvl2[1] = (PW+1)'(p_a);
    q_lvl2[2] = (PW+1)'(ONE) - (PW+1)'(p_b);
    q_lvl2[3] = (PW+1)'(p_b);
    total = '0;
    for (int k = 0; k < 4; k++) begin
      logic [BW+2*PW:0] scaled;
      prod[k]  = (2*PW+1)'(q_root[k/2] * q_lvl2[k]);
      scaled   = (BW+2*PW+1)'(n_total * prod[k]);
      alloc[k] = BW'(scaled >> (2*PW));
      if (alloc[k] < n_min) alloc[k] = n_min;
      total += (BW+2)'(alloc[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 4; k++) begin
        p_sub[k] <= '0;
        n_sub[k] <= '0;
      end
      n_sum <= '0;
    end else begin
      for (int k = 0; k < 4; k++) begin
        p_sub[k] <= prod[k];
        n_sub[k] <= alloc[k];
      end
      n_sum <= total;
    end
  end

endmodule
