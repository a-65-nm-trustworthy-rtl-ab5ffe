// pnode_lfsr: the 8-bit linear-feedback shift register that gives a pNode its random numbers.
//
// A Fibonacci LFSR with the maximal-length polynomial x^8 + x^6 + x^5 + x^4 + 1 (period 255).
// The register shifts left by one bit on every clock in which `en` is high; the new bit 0 is
// the XOR of the tap bits. `en` stands for the pNode's local clock gate: the register only
// moves when a pulse arrives. The 4-bit random number `rn` is the low nibble of the register.
//
// Following the design: an 8-bit LFSR of which only 4 bits are used, matching the 4-bit
// probability. Own choices: the polynomial, which nibble is taken and the reset-time seed
// (parameter SEED, must be non-zero). Timing: `rn` is valid from the register; one step per
// enabled clock.
module pnode_lfsr #(
  parameter int unsigned             W    = 8,
  parameter int unsigned             RN_W = 4,
  parameter logic [W-1:0]            SEED = 8'h01
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  output logic [W-1:0]    state,
  output logic [RN_W-1:0] rn
);

  logic feedback;

  // Taps 8, 6, 5, 4 (1-based) of the polynomial x^8 + x^6 + x^5 + x^4 + 1.
  assign feedback = state[W-1] ^ state[W-3] ^ state[W-4] ^ state[W-5];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= {state[W-2:0], feedback};
  end

  assign rn = state[RN_W-1:0];

  initial begin
    assert (SEED != '0) else $error("pnode_lfsr: SEED must be non-zero");
    assert (W == 8) else $error("pnode_lfsr: taps are defined for W = 8 only");
  end

endmodule
