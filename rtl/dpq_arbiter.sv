// dpq_arbiter: Dynamic Priority Queue arbiter for N masters sharing an SDRAM.
//
// Composition (all following the paper, Sec. 4 and Sec. 7):
//   * one dpq_budget_counter per master, loaded with BUDGET[m] at the start of
//     every replenishment period and decremented on each grant;
//   * dpq_replenish_timer, a free-running counter of the replenishment period
//     RP = ceil((WC_RD_CMD_WD + WC_WR_CMD_WD)/2) * sum(BUDGET)  (Eq. (1));
//   * dpq_queue, which grants the first requesting master with budget left,
//     searching from the head, and moves it to the tail.
// The arbiter is not work conserving beyond the budgets: a requesting master
// with no budget waits for the next period even if the resource is idle.
//
// Interface and timing: `req[m]` is master m's request, held until granted.
// `gnt_valid`/`gnt_id` name the winner combinationally. `enable` says the
// downstream path takes an access this cycle; a grant is committed (queue
// update, budget decrement) on the clock edge where gnt_valid && enable, so
// the pair forms a valid/ready handshake with gnt_valid as valid.
//
// Defaults: six masters with a budget of four each (equal-density traffic of
// the paper's evaluation). The worst-case command widths of 20 cycles each
// are this design's assumption: the paper measures them on its FPGA and does
// not print them. 20 cycles is the longest time from taking a line to its
// last chunk seen with the behavioural controller of the system testbench
// under alternating traffic. They only set RP (480 cycles with the defaults).
module dpq_arbiter
  import dpq_pkg::*;
#(
  parameter int unsigned N            = 6,
  parameter int unsigned BUDGET [N]   = '{default: 4},
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
  output logic [ID_W-1:0]  order [N],    // order[0] is the head
  output logic [ID_W-1:0]  gnt_pos,      // queue position of the winner
  output logic [POS_W-1:0]  crt_pos       // position inside the current period
);

  function automatic int unsigned budget_sum();
    int unsigned s = 0;
    for (int i = 0; i < N; i++) s += BUDGET[i];
    return s;
  endfunction

  localparam int unsigned RP = rp_cycles(WC_RD_CMD_WD, WC_WR_CMD_WD, budget_sum());

  logic [N-1:0] win_onehot;
  logic         take;

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

  dpq_queue #(.N(N), .ID_W(ID_W)) u_queue (
    .clk, .rst_n,
    .cand       (req & eligible),
    .advance    (take),
    .win_valid  (gnt_valid),
    .win_id     (gnt_id),
    .win_pos    (gnt_pos),
    .win_onehot (win_onehot),
    .order      (order)
  );

  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(gnt_onehot));

endmodule
