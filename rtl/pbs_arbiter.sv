// pbs_arbiter: Priority Based Budget Scheduler, the static-priority arbiter
// that DPQ is measured against. Same interface as dpq_arbiter, so the
// platform can carry either.
//
// How it works: every master has a budget per replenishment period exactly
// as in DPQ (the same dpq_budget_counter and dpq_replenish_timer, the same
// period from Eq. (1)). The access goes to the requesting master with budget
// left that has the highest fixed priority. PRIO[m] is master m's rank: 1 is
// the highest, N the lowest, each rank used once. Budgets decouple bandwidth
// from priority, but a low-priority master can still be passed by every
// access the higher ones have budget for, which is the unfairness DPQ removes.
//
// Interface and timing: as dpq_arbiter. A grant is committed on the clock
// edge where gnt_valid && enable. `order` lists the masters from the highest
// priority down and never changes; `gnt_pos` is the winner's place in it.
//
// Follows the paper: budgets, replenishment, selection by static priority,
// and the ranks of its evaluation (master1 lowest ... master6 highest) as the
// default. This design's choice: the interface and the rank encoding.
module pbs_arbiter
  import dpq_pkg::*;
#(
  parameter int unsigned N            = 6,
  parameter int unsigned BUDGET [N]   = '{default: 4},
  parameter int unsigned PRIO   [N]   = '{6, 5, 4, 3, 2, 1},
  parameter int unsigned WC_RD_CMD_WD = 20,
  parameter int unsigned WC_WR_CMD_WD = 20,
  parameter int unsigned CNT_W        = 6,
  parameter int unsigned POS_W        = 16,   // holds RP-1
  parameter int unsigned ID_W         = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     req,
  input  logic             enable,
  output logic             gnt_valid,
  output logic [ID_W-1:0]  gnt_id,
  output logic [N-1:0]     gnt_onehot,   // committed grant, by master ID
  output logic [N-1:0]     eligible,
  output logic [CNT_W-1:0] budget_left [N],
  output logic             replenish,
  output logic [ID_W-1:0]  order [N],    // order[0] has the highest priority
  output logic [ID_W-1:0]  gnt_pos,      // rank of the winner, 0 = highest
  output logic [POS_W-1:0] crt_pos       // position inside the current period
);

  function automatic int unsigned budget_sum();
    int unsigned s = 0;
    for (int i = 0; i < N; i++) s += BUDGET[i];
    return s;
  endfunction

  localparam int unsigned RP = rp_cycles(WC_RD_CMD_WD, WC_WR_CMD_WD, budget_sum());

  logic [N-1:0] cand, win_onehot;
  logic         take;

  assign cand       = req & eligible;
  assign take       = gnt_valid && enable;
  assign gnt_onehot = take ? win_onehot : '0;

  dpq_replenish_timer #(.RP(RP), .POS_W(POS_W)) u_timer (
    .clk, .rst_n, .replenish, .crt_pos
  );

  for (genvar m = 0; m < N; m++) begin : g_budget
    dpq_budget_counter #(.BUDGET(BUDGET[m]), .CNT_W(CNT_W)) u_cnt (
      .clk, .rst_n,
      .replenish,
      .grant       (gnt_onehot[m]),
      .eligible    (eligible[m]),
      .budget_left (budget_left[m])
    );
  end

  // fixed priority order: the master of rank r+1 sits at order[r]
  for (genvar r = 0; r < N; r++) begin : g_order
    always_comb begin
      order[r] = '0;
      for (int m = 0; m < N; m++)
        if (PRIO[m] == r + 1) order[r] = ID_W'(m);
    end
  end

  // the candidate of lowest rank wins; ranks searched from the lowest
  // priority up so the last assignment is the highest priority
  always_comb begin
    gnt_valid  = 1'b0;
    gnt_id     = '0;
    gnt_pos    = '0;
    win_onehot = '0;
    for (int r = N - 1; r >= 0; r--) begin
      if (cand[order[r]]) begin
        gnt_valid  = 1'b1;
        gnt_id     = order[r];
        gnt_pos    = ID_W'(r);
        win_onehot = N'(1) << order[r];
      end
    end
  end

  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(gnt_onehot));

endmodule
