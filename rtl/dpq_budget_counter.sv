// dpq_budget_counter: budget accounting for one master of the DPQ arbiter.
//
// Every master owns a fixed number of accesses (its budget) per
// replenishment period. This block is the counter and the comparator the DPQ
// needs per master: the counter is loaded with BUDGET at reset and at every
// replenishment pulse, is decremented by one on each grant, and the master is
// eligible while the count is above zero. Budget left over at the end of a
// period is discarded by the reload (paper, Fig. 4 point C).
//
// Timing: `eligible` and `budget_left` are register outputs. A grant and a
// replenishment in the same cycle leave the counter at BUDGET: the grant is
// charged to the period that is ending (this design's choice). Reset is
// synchronous and active low (this design's choice, used throughout).
module dpq_budget_counter #(
  parameter int unsigned BUDGET = 4,  // accesses per replenishment period
  parameter int unsigned CNT_W  = 6   // counter width, holds BUDGET
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             replenish,   // start of a new period
  input  logic             grant,       // this master was granted
  output logic             eligible,    // budget left > 0
  output logic [CNT_W-1:0] budget_left
);

  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n)                 cnt <= CNT_W'(BUDGET);
    else if (replenish)         cnt <= CNT_W'(BUDGET);
    else if (grant && cnt != 0) cnt <= cnt - 1'b1;
  end

  assign eligible    = (cnt != '0);
  assign budget_left = cnt;

  // A master without budget must never be granted.
  a_grant_needs_budget: assert property (@(posedge clk) disable iff (!rst_n)
    grant |-> eligible);

endmodule
