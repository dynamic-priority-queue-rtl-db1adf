// tb_dpq_workloads: end-to-end test of the DPQ system under both workloads
// of the paper's Table 1, each run once with the DPQ arbiter and once with
// the static-priority budget scheduler (PBS) it is compared with, as four
// independent systems side by side:
//   equal density       budgets 4 each, 2048 accesses each, mean on-chip 8
//   incremental density budgets 32,16,8,4,2,1, accesses 3200..100 and mean
//                       on-chip times 8,16,...,256 for masters 1..6
//   PBS ranks           master6 highest ... master1 lowest
// Each system is a platform_bench (top, behavioural controller model,
// monitor, and for DPQ the timing analysis that checks the WCET bounds).
// At the end the testbench also compares the two arbiters on equal density,
// where the evaluation shows DPQ to be fair and PBS not:
//   * the spread of worst latencies over the masters is smaller with DPQ,
//   * the lowest-priority master under PBS sees a worse latency than any
//     master under DPQ.
// and checks two properties of the DPQ bounds that the evaluation reports:
//   * equal density: the WCET bounds of all masters are within 1 %,
//   * incremental density: master1 and master2, which make the most
//     accesses per period, have the loosest bounds (largest bound/observed).
// It then prints the result line. A watchdog ends the run as a failure if
// any system hangs.
module tb_dpq_workloads;
  logic clk = 0, rst_n = 0, start = 0;
  logic rep [4];
  int   chk [4], fail [4];

  localparam int unsigned EQ_BUD  [6] = '{4, 4, 4, 4, 4, 4};
  localparam int unsigned EQ_NACC [6] = '{2048, 2048, 2048, 2048, 2048, 2048};
  localparam int unsigned EQ_OCPT [6] = '{8, 8, 8, 8, 8, 8};
  localparam int unsigned IN_BUD  [6] = '{32, 16, 8, 4, 2, 1};
  localparam int unsigned IN_NACC [6] = '{3200, 1600, 800, 400, 200, 100};
  localparam int unsigned IN_OCPT [6] = '{8, 16, 32, 64, 128, 256};

  platform_bench #(.NAME("equal density, DPQ"), .BUDGET(EQ_BUD), .N_ACC(EQ_NACC),
                   .AVG_OCPT(EQ_OCPT), .USE_PBS(1'b0))
    u_eq_dpq (.clk, .rst_n, .start, .reported(rep[0]), .checks(chk[0]), .failures(fail[0]));
  platform_bench #(.NAME("incremental density, DPQ"), .BUDGET(IN_BUD), .N_ACC(IN_NACC),
                   .AVG_OCPT(IN_OCPT), .USE_PBS(1'b0))
    u_in_dpq (.clk, .rst_n, .start, .reported(rep[1]), .checks(chk[1]), .failures(fail[1]));
  platform_bench #(.NAME("equal density, PBS"), .BUDGET(EQ_BUD), .N_ACC(EQ_NACC),
                   .AVG_OCPT(EQ_OCPT), .USE_PBS(1'b1))
    u_eq_pbs (.clk, .rst_n, .start, .reported(rep[2]), .checks(chk[2]), .failures(fail[2]));
  platform_bench #(.NAME("incremental density, PBS"), .BUDGET(IN_BUD), .N_ACC(IN_NACC),
                   .AVG_OCPT(IN_OCPT), .USE_PBS(1'b1))
    u_in_pbs (.clk, .rst_n, .start, .reported(rep[3]), .checks(chk[3]), .failures(fail[3]));

  always #4 clk = ~clk;   // 125 MHz

  function automatic int total(input int v [4]);
    return v[0] + v[1] + v[2] + v[3];
  endfunction

  always @(posedge clk) if (rep[0] && rep[1] && rep[2] && rep[3]) begin
    automatic int checks = total(chk), failures = total(fail);
    automatic int dpq_max = 0, dpq_min = 1 << 30, pbs_max = 0, pbs_min = 1 << 30;
    for (int m = 0; m < 6; m++) begin
      dpq_max = (int'(u_eq_dpq.max_latency[m]) > dpq_max) ? int'(u_eq_dpq.max_latency[m]) : dpq_max;
      dpq_min = (int'(u_eq_dpq.max_latency[m]) < dpq_min) ? int'(u_eq_dpq.max_latency[m]) : dpq_min;
      pbs_max = (int'(u_eq_pbs.max_latency[m]) > pbs_max) ? int'(u_eq_pbs.max_latency[m]) : pbs_max;
      pbs_min = (int'(u_eq_pbs.max_latency[m]) < pbs_min) ? int'(u_eq_pbs.max_latency[m]) : pbs_min;
    end
    $display("equal density worst latencies: DPQ %0d..%0d, PBS %0d..%0d (lowest-priority master %0d)",
             dpq_min, dpq_max, pbs_min, pbs_max, u_eq_pbs.max_latency[0]);
    checks += 2;
    if (pbs_max - pbs_min <= dpq_max - dpq_min) begin
      failures++; $display("PBS spreads worst latencies no more than DPQ");
    end
    if (int'(u_eq_pbs.max_latency[0]) <= dpq_max) begin
      failures++; $display("lowest PBS priority no worse than DPQ");
    end
    begin
      automatic longint bmax = 0, bmin = 64'h7FFF_FFFF_FFFF_FFFF;
      automatic real ratio [6];
      for (int m = 0; m < 6; m++) begin
        automatic longint b = u_eq_dpq.g_wcet.u_wcet.wcet_bound[m];
        bmax = (b > bmax) ? b : bmax;
        bmin = (b < bmin) ? b : bmin;
        ratio[m] = real'(u_in_dpq.g_wcet.u_wcet.wcet_bound[m]) / real'(u_in_dpq.exec_cycles[m]);
      end
      checks += 2;
      if (real'(bmax) > 1.01 * real'(bmin)) begin
        failures++; $display("equal density DPQ bounds differ: %0d..%0d", bmin, bmax);
      end
      for (int m = 2; m < 6; m++)
        if (ratio[m] >= ratio[0] || ratio[m] >= ratio[1]) begin
          failures++; $display("incremental DPQ: m%0d bound looser than m1 or m2", m + 1);
          break;
        end
      $display("DPQ bounds: equal density %0d..%0d; incremental bound/observed m1 %.3f m2 %.3f",
               bmin, bmax, ratio[0], ratio[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("watchdog expired (reported %0b %0b %0b %0b)", rep[0], rep[1], rep[2], rep[3]);
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail) + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    start <= 1;
  end
endmodule
