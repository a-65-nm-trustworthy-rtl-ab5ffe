// subroot_sampler: the sub-root down-counter and pulse generator of one tile.
//
// A `start` strobe loads the down-counter with the sub-tree's sampling budget N_i. While the
// counter is non-zero the generator emits one pulse per clock on `inject` and decrements the
// counter. Once the counter is zero, no pulse is being injected and no pulse is travelling in
// the array (`array_active` low), the sub-tree has been fully sampled: `busy` falls and the
// sticky `done` flag is raised until the next `start`.
//
// From the design: a down-counter per sub-root loaded with N_i, a pulse generator injecting N_i
// pulses, and completion when the counter reaches zero. Own choices: one pulse per clock (the
// array is a pipeline, so pulses injected in successive clocks never meet), the 16-bit budget,
// and waiting for the array to drain before `done`, so that the leaf counters are final.
// Timing: with a budget N and H forwarding nodes on the longest path, `done` rises N + H + 2
// clocks after the clock edge that takes `start`.
module subroot_sampler
  import pdt_pkg::*;
#(
  parameter int unsigned BW = BUDGET_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [BW-1:0] budget,
  input  logic          array_active,
  output logic          inject,
  output logic          busy,
  output logic          done,
  output logic [BW-1:0] remaining
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      inject    <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else if (start) begin
      remaining <= budget;
      inject    <= 1'b0;
      busy      <= 1'b1;
      done      <= 1'b0;
    end else if (busy) begin
      if (remaining != '0) begin
        remaining <= remaining - 1'b1;
        inject    <= 1'b1;
      end else begin
        inject <= 1'b0;
        if (!inject && !array_active) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end else begin
      inject <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) inject |-> busy);
  assert property (@(posedge clk) disable iff (!rst_n) !(busy && done));

endmodule
