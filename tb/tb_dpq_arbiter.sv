// tb_dpq_arbiter: self-checking test of the DPQ arbiter with the paper's
// three-master example (budgets {5,3,2}).
//
// 1. Directed: for each master j, put j at the tail of the queue, start a
//    new replenishment period with every master requesting all the time, and
//    count the grants to other masters before each of j's accesses. They
//    must equal the worst-case interference computed here with the greedy
//    procedure of the paper's Algorithm 1, e.g. (2,2,1,0,0) for m1, and each
//    master must get exactly its budget in the period.
// 2. Random: random requests and downstream stalls; a reference model of
//    queue, budgets and period timer predicts the winner every cycle, and
//    no master that requests with budget left may be passed by more than
//    n-1 grants to others (Eq. (4)).
// 3. No timing anomaly (Sec. 4.3: an earlier request cannot finish later):
//    from reset, the same closed-loop traffic of the other masters and the
//    same downstream stalls are replayed while one request of master j
//    arrives at cycle t or at t+1; its grant must never come later for the
//    earlier arrival. Every master, every t in 0..119.
module tb_dpq_arbiter;
  localparam int N = 3;
  localparam int unsigned BUD [N] = '{5, 3, 2};
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

  dpq_arbiter #(.N(N), .BUDGET(BUD), .WC_RD_CMD_WD(7), .WC_WR_CMD_WD(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Worst-case interference of access i of master j (Algorithm 1).
  function automatic int wc_interf(int j, int i);
    int tmp [N];
    int acc;
    for (int k = 0; k < N; k++) tmp[k] = BUD[k];
    for (int x = 0; x <= i; x++) begin
      acc = 0;
      for (int k = 0; k < N; k++)
        if (k != j && tmp[k] > 0) begin acc++; tmp[k]--; end
    end
    return acc;
  endfunction

  // Reference model state.
  int rq [$];
  int rb [N];
  int rpos;
  int intf [N];
  int maxintf = 0;

  task automatic model_step(input logic take, input int win);
    int idx;
    if (take) begin
      for (int m = 0; m < N; m++)
        if (m != win && req[m] && rb[m] > 0) begin
          intf[m]++;
          if (intf[m] > maxintf) maxintf = intf[m];
          checks++;
          if (intf[m] > N - 1) begin
            failures++; $display("master %0d passed %0d times", m, intf[m]);
          end
        end
      intf[win] = 0;
      rb[win]--;
      foreach (rq[p]) if (rq[p] == win) idx = p;
      rq.delete(idx);
      rq.push_back(win);
    end
    for (int m = 0; m < N; m++) if (!req[m] || rb[m] == 0) intf[m] = 0;
    if (rpos == RP - 1) begin
      for (int m = 0; m < N; m++) rb[m] = BUD[m];
      rpos = 0;
    end else rpos++;
  endtask

  // One cycle: drive at negedge, compare, advance model at posedge.
  task automatic cycle(input logic [N-1:0] r, input logic en, output int won);
    int exp;
    @(negedge clk);
    req = r; enable = en;
    #1;
    exp = -1;
    for (int p = 0; p < N; p++) if (exp < 0 && req[rq[p]] && rb[rq[p]] > 0) exp = rq[p];
    checks++;
    if (gnt_valid != (exp >= 0) || (exp >= 0 && gnt_id != 2'(exp))) begin
      failures++; $display("t=%0t winner %0b/%0d expected %0d", $time, gnt_valid, gnt_id, exp);
    end
    for (int m = 0; m < N; m++) begin
      checks++;
      if (eligible[m] != (rb[m] > 0) || budget_left[m] != 6'(rb[m])) begin
        failures++; $display("t=%0t budget of %0d is %0d expected %0d", $time, m, budget_left[m], rb[m]);
      end
    end
    checks++;
    if (replenish != (rpos == RP - 1)) begin
      failures++; $display("t=%0t replenish=%0b at position %0d", $time, replenish, rpos);
    end
    won = (exp >= 0 && en) ? exp : -1;
    @(posedge clk);
    model_step(exp >= 0 && en, exp);
  endtask

  initial begin
    int won, n_before, k, got [N];
    for (int m = 0; m < N; m++) begin rq.push_back(m); rb[m] = BUD[m]; intf[m] = 0; end
    rpos = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // 1. Directed worst case for every master.
    for (int j = 0; j < N; j++) begin
      cycle(N'(1) << j, 1'b1, won);          // j alone: goes to the tail
      while (rpos != 0) cycle('0, 1'b0, won); // wait for a new period
      n_before = 0; k = 0;
      for (int m = 0; m < N; m++) got[m] = 0;
      for (int c = 0; c < RP - 1; c++) begin
        cycle('1, 1'b1, won);
        if (won >= 0) got[won]++;
        if (won == j) begin
          checks++;
          if (n_before != wc_interf(j, k)) begin
            failures++;
            $display("m%0d access %0d: %0d interfering grants, Algorithm 1 says %0d",
                     j + 1, k + 1, n_before, wc_interf(j, k));
          end
          k++; n_before = 0;
        end else if (won >= 0) n_before++;
      end
      for (int m = 0; m < N; m++) begin
        checks++;
        if (got[m] != BUD[m]) begin
          failures++; $display("period %0d: m%0d got %0d grants, budget %0d", j, m + 1, got[m], BUD[m]);
        end
      end
      cycle('0, 1'b0, won);
    end
    // 2. Random traffic.
    for (int c = 0; c < 20000; c++)
      cycle(N'($urandom), ($urandom % 4 != 0), won);
    checks++;
    if (maxintf != N - 1) begin
      failures++; $display("largest interference seen %0d, expected to reach %0d", maxintf, N - 1);
    end
    // 3. No timing anomaly.
    for (int c = 0; c < TR; c++) en_pat[c] = ($urandom % 4 != 0);
    for (int k = 0; k < N; k++) for (int x = 0; x < 64; x++) gap_pat[k][x] = $urandom % 6;
    for (int j = 0; j < N; j++) begin
      int g_prev, g;
      replay(j, 0, g_prev);
      for (int t = 1; t < 120; t++) begin
        replay(j, t, g);
        checks++;
        if (g < 0 || g_prev < 0 || g_prev > g) begin
          failures++;
          $display("m%0d: request at %0d granted at %0d, at %0d granted at %0d", j + 1, t - 1, g_prev, t, g);
        end
        g_prev = g;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Replay for test 3: reset, then TR cycles of traffic. The masters other
  // than j request after gap_pat cycles, hold the request until granted, and
  // go on with the next gap; master j requests once, from cycle tj. g is the
  // cycle of j's grant, -1 if none.
  localparam int TR = 400;
  logic en_pat [TR];
  int   gap_pat [N][64];
  task automatic replay(input int j, input int tj, output int g);
    int wait_c [N], idx [N];
    logic [N-1:0] r;
    @(negedge clk);
    rst_n = 0; req = '0; enable = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin idx[k] = 0; wait_c[k] = gap_pat[k][0]; end
    r = '0;
    g = -1;
    for (int c = 0; c < TR; c++) begin
      for (int k = 0; k < N; k++)
        if (k != j && !r[k]) begin
          if (wait_c[k] == 0) r[k] = 1'b1; else wait_c[k]--;
        end
      if (c == tj) r[j] = 1'b1;
      req = r; enable = en_pat[c];
      #1;
      for (int k = 0; k < N; k++)
        if (gnt_onehot[k]) begin
          r[k] = 1'b0;
          if (k == j) begin if (g < 0) g = c; end
          else begin idx[k] = (idx[k] + 1) % 64; wait_c[k] = gap_pat[k][idx[k]]; end
        end
      @(negedge clk);
    end
    req = '0; enable = 0;
  endtask
endmodule
