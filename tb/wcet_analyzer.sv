// wcet_analyzer: the paper's SDRAM timing analysis (Algorithms 1 and 2)
// applied to a finished system run, checking that the computed WCET bound of
// every master is at least its observed execution time (the claim of Fig. 7).
//
// While the run goes on it records, per master, the kind of each access and
// its OnChipProcTime (execution-time cycles from the completion of the
// previous access, or from the start, to the request). It also measures, at
// the arbiter's output ("point 1" of the paper), the latency parameters of
// Fig. 3 the way the paper does on its FPGA:
//   WcRdCmdWd / WcWrCmdWd  cycles from taking a line to its last chunk,
//   WcRdDelay              cycles from the last read chunk to the completion
//                          seen by the master,
//   WcWrTail               cycles from the last write chunk to the completion,
//   tRFC                   longest run of cycles the channel is closed for a
//                          refresh (guard window, drain and refresh).
// When `finish` rises it runs Algorithm 1 for the worst-case access sequence
// lengths WcASL[m][i] = I_m[i] + 1 and Algorithm 2 over each master's recorded
// sequence. It also forms a best-case time (BCET): every access alone, at the
// shortest command width and tail seen. It checks BCET <= observed <= WCET
// for every master, prints the figures, keeps the bounds in wcet_bound and
// raises `reported`.
//
// Algorithm 2 is followed line by line; NewRp is local to each call. Choices
// of this testbench: WrTime/RdTime add up a sequence of WcASL alternating
// accesses that ends with the current one, with every interfering access at
// its worst command width, plus the tail of the current access; the analysis
// starts at replenishment position 0 and refresh counter 0, as for a task
// analysed in isolation.
module wcet_analyzer #(
  parameter string       NAME  = "system",
  parameter int          N     = 6,
  parameter int unsigned BUDGET [N] = '{default: 4},
  parameter int          RP    = 480,
  parameter int          TREFI = 975
) (
  input logic        clk,
  input logic        rst_n,
  input logic        finish,
  input logic        req_valid   [N],   // master is in its request state
  input logic        req_write   [N],   // kind of the master's request
  input logic [31:0] exec_cycles [N],
  input logic [31:0] acc_count   [N],
  input logic        acc_start,         // a line access enters the splitter
  input logic        split_busy,
  input logic        split_write,
  input logic        last_chunk,        // last chunk of a line accepted
  input logic        hold,
  output logic       reported
);

  int checks = 0, failures = 0;
  longint wcet_bound [N];      // results, valid once `reported` is high
  int wc_rd_cmd = 0, wc_wr_cmd = 0, wc_rd_delay = 0, wc_wr_tail = 0, t_rfc = 0;
  int bc_rd_cmd = 1 << 30, bc_wr_cmd = 1 << 30, bc_rd_delay = 1 << 30, bc_wr_tail = 1 << 30;
  int cmd_len = 0, hold_len = 0;
  longint cyc = 0;
  longint rd_last_q [$];       // cycles of last read chunks, oldest first
  longint wr_last_q [$];
  logic   req_d [N];
  logic [31:0] cnt_d [N];
  logic   write_q [N][$];      // per master: kind of each access
  int     ocpt_q  [N][$];      // per master: OnChipProcTime of each access
  logic [31:0] exec_done [N];  // execution time at the previous completion
  logic   pend_write [N];      // kind of the outstanding access

  initial for (int m = 0; m < N; m++) begin
    req_d[m] = 0; cnt_d[m] = 0; exec_done[m] = 0; pend_write[m] = 0;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (acc_start) cmd_len = 1;
    else if (split_busy) cmd_len++;
    if (split_busy) begin
      if (split_write) begin if (cmd_len > wc_wr_cmd) wc_wr_cmd = cmd_len; end
      else if (cmd_len > wc_rd_cmd) wc_rd_cmd = cmd_len;
    end
    if (last_chunk) begin
      if (split_write) begin
        wr_last_q.push_back(cyc);
        if (cmd_len < bc_wr_cmd) bc_wr_cmd = cmd_len;
      end else begin
        rd_last_q.push_back(cyc);
        if (cmd_len < bc_rd_cmd) bc_rd_cmd = cmd_len;
      end
    end
    if (hold) begin hold_len++; if (hold_len > t_rfc) t_rfc = hold_len; end
    else hold_len = 0;
    for (int m = 0; m < N; m++) begin
      if (req_valid[m] && !req_d[m]) begin
        write_q[m].push_back(req_write[m]);
        ocpt_q[m].push_back(int'(exec_cycles[m] - exec_done[m]));
        pend_write[m] = req_write[m];
      end
      // completions of each kind come back in the order the lines were
      // issued, so the oldest recorded last chunk belongs to this access
      if (acc_count[m] != cnt_d[m]) begin
        exec_done[m] = exec_cycles[m];
        if (pend_write[m]) begin
          if (wr_last_q.size() > 0) begin
            if (int'(cyc - wr_last_q[0]) > wc_wr_tail) wc_wr_tail = int'(cyc - wr_last_q[0]);
            if (int'(cyc - wr_last_q[0]) < bc_wr_tail) bc_wr_tail = int'(cyc - wr_last_q[0]);
            void'(wr_last_q.pop_front());
          end
        end else if (rd_last_q.size() > 0) begin
          if (int'(cyc - rd_last_q[0]) > wc_rd_delay) wc_rd_delay = int'(cyc - rd_last_q[0]);
          if (int'(cyc - rd_last_q[0]) < bc_rd_delay) bc_rd_delay = int'(cyc - rd_last_q[0]);
          void'(rd_last_q.pop_front());
        end
      end
      req_d[m] = req_valid[m];
      cnt_d[m] = acc_count[m];
    end
  end

  // Algorithm 1: worst-case interfering accesses for the i-th access of
  // master j in one replenishment period; -1 stands for X (ineligible).
  int wcasl [N][$];
  function automatic void algorithm1();
    int max_budget = 0;
    for (int j = 0; j < N; j++) if (int'(BUDGET[j]) > max_budget) max_budget = int'(BUDGET[j]);
    for (int j = 0; j < N; j++) begin
      int temp [N];
      for (int k = 0; k < N; k++) temp[k] = int'(BUDGET[k]);
      wcasl[j].delete();
      for (int i = 0; i < max_budget; i++) begin
        if (temp[j] == 0) wcasl[j].push_back(-1);
        else begin
          int acc = 0;
          for (int k = 0; k < N; k++)
            if (k != j && temp[k] > 0) begin acc++; temp[k]--; end
          temp[j]--;
          wcasl[j].push_back(acc + 1);
        end
      end
    end
  endfunction

  // Worst-case time of a sequence of `asl` alternating accesses ending with
  // the current one (write or read), from the request to its completion.
  function automatic int seq_time(input int asl, input logic write);
    int t = write ? wc_wr_cmd + wc_wr_tail : wc_rd_cmd + wc_rd_delay;
    for (int x = 1; x < asl; x++)
      t += ((x % 2 == 1) != write) ? wc_wr_cmd : wc_rd_cmd;
    return t;
  endfunction

  // Algorithm 2 over the recorded accesses of master mm; returns the WCET
  // bound (sum of OnChipProcTime and worst-case latencies).
  function automatic longint algorithm2(input int mm, input int trfc);
    longint wcet = 0;
    int used = 0, crt_pos = 0, t_ref = 0;
    for (int a = 0; a < ocpt_q[mm].size(); a++) begin
      int  ocpt = ocpt_q[mm][a];
      int  rem_rp = 0, lat;
      bit  new_rp = 0;
      if (used == int'(BUDGET[mm])) begin
        used = 0;
        new_rp = 1;
        if (RP > crt_pos + ocpt) begin
          rem_rp = RP - (crt_pos + ocpt);
          crt_pos = 0;
        end else begin
          crt_pos = (crt_pos + ocpt) - RP;
        end
      end else if (crt_pos + ocpt >= RP) begin
        used = 0;
        crt_pos = (crt_pos + ocpt) - RP;
        new_rp = 1;
      end
      lat = seq_time(wcasl[mm][used], write_q[mm][a]);
      used++;
      if (new_rp) crt_pos += lat;
      else crt_pos += ocpt + lat;
      lat += rem_rp;
      t_ref += lat + ocpt;
      if (t_ref >= TREFI) begin
        t_ref -= TREFI;
        lat += trfc;
      end
      wcet += longint'(ocpt) + longint'(lat);
    end
    return wcet;
  endfunction

  // Best case: no interference, no budget wait, no refresh, and the
  // shortest command width and tail seen for each kind.
  function automatic longint best_case(input int mm);
    longint bcet = 0;
    for (int a = 0; a < ocpt_q[mm].size(); a++)
      bcet += longint'(ocpt_q[mm][a]) +
              (write_q[mm][a] ? longint'(bc_wr_cmd) + longint'(bc_wr_tail)
                              : longint'(bc_rd_cmd) + longint'(bc_rd_delay));
    return bcet;
  endfunction

  initial reported = 1'b0;

  always @(posedge clk) if (rst_n && finish && !reported) begin
    reported = 1'b1;
    algorithm1();
    $display("---- %s: timing analysis ----", NAME);
    $display("measured WcRdCmdWd %0d, WcWrCmdWd %0d, WcRdDelay %0d, write tail %0d, tRFC %0d",
             wc_rd_cmd, wc_wr_cmd, wc_rd_delay, wc_wr_tail, t_rfc);
    $display("best case: RdCmdWd %0d, WrCmdWd %0d, RdDelay %0d, write tail %0d",
             bc_rd_cmd, bc_wr_cmd, bc_rd_delay, bc_wr_tail);
    $display("master        BCET  observed  WCET bound  WCET(no refresh)  bound/observed  WCET/WCETnr");
    for (int m = 0; m < N; m++) begin
      longint wcet, wcet_nr, bcet;
      wcet    = algorithm2(m, t_rfc);
      wcet_bound[m] = wcet;
      wcet_nr = algorithm2(m, 0);
      bcet    = best_case(m);
      $display("m%0d      %10d  %8d  %10d  %16d  %14.3f  %11.3f", m + 1, bcet, exec_cycles[m],
               wcet, wcet_nr, real'(wcet) / real'(exec_cycles[m]), real'(wcet) / real'(wcet_nr));
      checks += 2;
      if (wcet < longint'(exec_cycles[m])) begin
        failures++; $display("master %0d: observed execution time above the WCET bound", m + 1);
      end
      if (bcet > longint'(exec_cycles[m])) begin
        failures++; $display("master %0d: observed execution time below the best case", m + 1);
      end
    end
  end
endmodule
