// platform_monitor: checks and statistics for a dpq_platform system test.
//
// It watches the arbiter status ports and the controller interface and
//  * checks that no master that requests with budget left is passed by more
//    than N-1 grants to other masters (the DPQ interference bound, Eq. (4);
//    skipped with CHECK_INTF = 0 for the static-priority baseline),
//  * checks that no master gets more grants in one replenishment period than
//    its budget,
//  * checks that consecutive refresh requests are a whole number of TREFI
//    apart, and exactly TREFI when the refresh was not late,
//  * counts how often each mechanism happened: grants, grants away from the
//    queue head, requests blocked by an empty budget, replenishments, held
//    (closed) channel cycles, refreshes, late refreshes, controller stalls.
// At the end (`finish` high) it checks every master's results and the
// mechanism counts, prints a table and raises `reported`; the testbench
// then adds up `checks` and `failures` and prints the result line.
module platform_monitor #(
  parameter string       NAME = "system",
  parameter int          N   = 6,
  parameter int unsigned BUDGET [N] = '{default: 4},
  parameter int unsigned N_ACC  [N] = '{default: 2048},
  parameter int          TREFI = 975,
  parameter bit          CHECK_INTF = 1'b1   // DPQ's n-1 bound; off for PBS
) (
  input logic        clk,
  input logic        rst_n,
  input logic        finish,
  input logic [N-1:0] req,
  input logic [N-1:0] grant,
  input logic [N-1:0] eligible,
  input logic [2:0]  gnt_pos,
  input logic        replenish,
  input logic        hold,
  input logic        refresh_req,
  input logic        refresh_late,
  input logic        ctrl_stall,
  input logic        acc_start,     // a line access enters the splitter
  input logic        split_busy,    // splitter issuing chunks
  input logic        acc_write,     // kind of the access being issued
  input logic        done        [N],
  input logic [31:0] acc_count   [N],
  input logic [31:0] exec_cycles [N],
  input logic [31:0] max_latency [N],
  input logic [47:0] lat_sum     [N],
  input logic [15:0] data_errors [N],
  output logic       reported
);

  int checks = 0, failures = 0;
  int n_grant = 0, n_nonhead = 0, n_blocked = 0, n_repl = 0, n_hold = 0;
  int n_ref = 0, n_late = 0, n_stall = 0, max_intf = 0;
  int cmd_len = 0, max_rd_cmd = 0, max_wr_cmd = 0;
  longint sum_acc = 0;
  initial for (int m = 0; m < N; m++) sum_acc += longint'(N_ACC[m]);
  int intf [N];
  int per_period [N];
  longint cyc = 0, last_ref = -1;
  logic ref_d = 0, late_since = 0;

  initial for (int m = 0; m < N; m++) begin intf[m] = 0; per_period[m] = 0; end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (grant != 0) begin
      n_grant++;
      if (gnt_pos != 0) n_nonhead++;
      for (int m = 0; m < N; m++) begin
        if (grant[m]) begin
          intf[m] = 0;
          per_period[m]++;
          checks++;
          if (per_period[m] > int'(BUDGET[m])) begin
            failures++; $display("master %0d: %0d grants in one period", m, per_period[m]);
          end
        end else if (req[m] && eligible[m]) begin
          intf[m]++;
          if (intf[m] > max_intf) max_intf = intf[m];
          checks++;
          if (CHECK_INTF && intf[m] > N - 1) begin
            failures++; $display("master %0d passed by %0d grants", m, intf[m]);
          end
        end
      end
    end
    for (int m = 0; m < N; m++) begin
      if (!req[m] || !eligible[m]) intf[m] = 0;
      if (req[m] && !eligible[m]) n_blocked++;
    end
    if (replenish) begin
      n_repl++;
      for (int m = 0; m < N; m++) per_period[m] = 0;
    end
    if (hold) n_hold++;
    if (ctrl_stall) n_stall++;
    // command width: cycles from taking a line to its last chunk
    if (acc_start) cmd_len = 1;
    else if (split_busy) cmd_len++;
    if (split_busy) begin
      if (acc_write) begin if (cmd_len > max_wr_cmd) max_wr_cmd = cmd_len; end
      else if (cmd_len > max_rd_cmd) max_rd_cmd = cmd_len;
    end
    if (refresh_late) begin n_late++; late_since = 1; end
    if (refresh_req && !ref_d) begin
      n_ref++;
      if (last_ref >= 0) begin
        checks++;
        if (late_since ? ((cyc - last_ref) < longint'(TREFI)) : ((cyc - last_ref) != longint'(TREFI))) begin
          failures++; $display("refresh %0d cycles after the previous one", cyc - last_ref);
        end
      end
      last_ref = cyc;
      late_since = 0;
    end
    ref_d = refresh_req;
  end

  task automatic need(input string what, input int count);
    checks++;
    if (count == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endtask

  initial reported = 1'b0;

  always @(posedge clk) if (rst_n && finish && !reported) begin
    reported = 1'b1;
    $display("---- %s ----", NAME);
    $display("master  accesses  exec_cycles  max_latency  mean_latency  data_errors");
    for (int m = 0; m < N; m++) begin
      $display("m%0d      %8d  %11d  %11d  %12.1f  %11d", m + 1, acc_count[m], exec_cycles[m],
               max_latency[m], real'(lat_sum[m]) / real'(acc_count[m] == 0 ? 1 : acc_count[m]),
               data_errors[m]);
      checks++;
      if (!done[m] || acc_count[m] != N_ACC[m] || data_errors[m] != 0) begin
        failures++; $display("master %0d incomplete or corrupted", m + 1);
      end
    end
    $display("grants %0d, away from head %0d, budget-blocked request cycles %0d, replenishments %0d",
             n_grant, n_nonhead, n_blocked, n_repl);
    $display("held cycles %0d, refreshes %0d (late %0d), controller stall cycles %0d, largest interference %0d",
             n_hold, n_ref, n_late, n_stall, max_intf);
    $display("longest read command %0d cycles, longest write command %0d cycles", max_rd_cmd, max_wr_cmd);
    checks++;
    if (longint'(n_grant) != sum_acc) begin
      failures++; $display("%0d grants for %0d accesses", n_grant, sum_acc);
    end
    need("grant", n_grant);
    need("grant away from the queue head", n_nonhead);
    need("request blocked by an empty budget", n_blocked);
    need("replenishment", n_repl);
    need("channel held for refresh", n_hold);
    need("refresh", n_ref);
    need("controller stall", n_stall);
  end

endmodule
