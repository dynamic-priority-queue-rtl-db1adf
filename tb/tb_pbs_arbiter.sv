// tb_pbs_arbiter: self-checking test of the static-priority budget scheduler
// with three masters, budgets {5,3,2} and ranks {3,1,2} (m2 highest, m1
// lowest; ranks deliberately not in index order).
//
// 1. Directed: every master requests all the time for a whole period. The
//    grants must come out in priority order, each master exactly its budget:
//    m2 x3, then m3 x2, then m1 x5.
// 2. Random: random requests and downstream stalls; a reference model of
//    budgets, period timer and priorities predicts the winner, its rank and
//    the budgets every cycle. `order` must list m2, m3, m1 throughout.
module tb_pbs_arbiter;
  localparam int N = 3;
  localparam int unsigned BUD  [N] = '{5, 3, 2};
  localparam int unsigned PRIO [N] = '{3, 1, 2};
  localparam int RP = 80;   // ceil((7+8)/2) * 10
  logic clk = 0, rst_n = 0, enable = 0;
  logic [N-1:0] req = '0;
  logic gnt_valid, replenish;
  logic [1:0] gnt_id, gnt_pos;
  logic [N-1:0] gnt_onehot, eligible;
  logic [5:0] budget_left [N];
  logic [1:0] order [N];
  logic [15:0] crt_pos;
  int checks = 0, failures = 0;

  pbs_arbiter #(.N(N), .BUDGET(BUD), .PRIO(PRIO), .WC_RD_CMD_WD(7), .WC_WR_CMD_WD(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rb [N];
  int rpos;

  // One cycle: drive at negedge, compare with the model, advance at posedge.
  task automatic cycle(input logic [N-1:0] r, input logic en, output int won);
    int exp, best;
    @(negedge clk);
    req = r; enable = en;
    #1;
    exp = -1; best = N + 1;
    for (int m = 0; m < N; m++)
      if (req[m] && rb[m] > 0 && int'(PRIO[m]) < best) begin exp = m; best = int'(PRIO[m]); end
    checks++;
    if (gnt_valid != (exp >= 0) ||
        (exp >= 0 && (gnt_id != 2'(exp) || gnt_pos != 2'(best - 1)))) begin
      failures++;
      $display("t=%0t winner %0b/%0d rank %0d expected %0d", $time, gnt_valid, gnt_id, gnt_pos, exp);
    end
    checks++;
    if (gnt_onehot != ((exp >= 0 && en) ? N'(1) << exp : '0)) begin
      failures++; $display("t=%0t committed grant %b", $time, gnt_onehot);
    end
    for (int m = 0; m < N; m++) begin
      checks++;
      if (eligible[m] != (rb[m] > 0) || budget_left[m] != 6'(rb[m])) begin
        failures++; $display("t=%0t budget of %0d is %0d expected %0d", $time, m, budget_left[m], rb[m]);
      end
    end
    checks++;
    if (order[0] != 2'd1 || order[1] != 2'd2 || order[2] != 2'd0) begin
      failures++; $display("t=%0t order %0d %0d %0d", $time, order[0], order[1], order[2]);
    end
    checks++;
    if (replenish != (rpos == RP - 1) || crt_pos != 16'(rpos)) begin
      failures++; $display("t=%0t replenish=%0b at position %0d", $time, replenish, rpos);
    end
    won = (exp >= 0 && en) ? exp : -1;
    @(posedge clk);
    if (won >= 0) rb[won]--;
    if (rpos == RP - 1) begin
      for (int m = 0; m < N; m++) rb[m] = BUD[m];
      rpos = 0;
    end else rpos++;
  endtask

  initial begin
    int won, seq [$];
    for (int m = 0; m < N; m++) rb[m] = BUD[m];
    rpos = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // 1. Directed: one full period under full load.
    for (int c = 0; c < RP; c++) begin
      cycle('1, 1'b1, won);
      if (won >= 0) seq.push_back(won);
    end
    checks++;
    if (seq != '{1, 1, 1, 2, 2, 0, 0, 0, 0, 0}) begin
      failures++; $display("grant sequence of a loaded period: %p", seq);
    end
    // 2. Random traffic.
    for (int c = 0; c < 20000; c++)
      cycle(N'($urandom), ($urandom % 4 != 0), won);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
