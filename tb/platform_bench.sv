// platform_bench: one complete DPQ system for the workload testbench.
// It holds a dpq_platform with the given budgets, access counts and mean
// on-chip times, a behavioural hp2_ctrl_model in place of the controller and
// DDR2 device, and a platform_monitor that checks the run. Clock, reset and
// start come from the testbench. `reported` rises once the monitor has checked the
// finished run; `checks` and `failures` are the monitor's totals.
// USE_PBS selects the static-priority baseline arbiter; the DPQ timing
// analysis (wcet_analyzer) runs only for DPQ. The workload parameters are
// those of the paper's Table 1; the controller model and the checks belong
// to this testbench.
module platform_bench #(
  parameter string       NAME     = "workload",
  parameter int unsigned BUDGET   [6] = '{default: 4},
  parameter int unsigned N_ACC    [6] = '{default: 2048},
  parameter int unsigned AVG_OCPT [6] = '{default: 8},
  parameter bit          USE_PBS  = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic reported,
  output int   checks,
  output int   failures
);
  import dpq_pkg::*;
  localparam int N = 6;
  logic local_init_done, local_write_req, local_read_req, local_burstbegin;
  logic local_autopch_req, local_ready, local_rdata_valid, local_refresh_req, local_refresh_ack;
  logic [LOCAL_ADDR_W-1:0] local_address;
  logic [CHUNK_W-1:0] local_wdata, local_rdata;
  logic [7:0] local_be;
  logic [2:0] local_size;
  logic done [N];
  logic [31:0] acc_count [N], exec_cycles [N], max_latency [N];
  logic [47:0] lat_sum [N];
  logic [15:0] data_errors [N];
  logic all_done, refresh_late, arb_replenish;
  logic [N-1:0] arb_grant, arb_eligible;
  logic [2:0] arb_gnt_pos;
  logic [2:0] arb_order [N];
  logic [5:0] arb_budget_left [N];
  logic [15:0] arb_crt_pos;
  int stall_cycles, refreshes, refresh_waits, reads, writes;

  dpq_platform #(.BUDGET(BUDGET), .N_ACC(N_ACC), .AVG_OCPT(AVG_OCPT), .USE_PBS(USE_PBS)) dut (.*);

  hp2_ctrl_model u_ctrl (.*);

  platform_monitor #(.NAME(NAME), .BUDGET(BUDGET), .N_ACC(N_ACC), .CHECK_INTF(!USE_PBS)) u_mon (
    .clk, .rst_n, .finish(all_done),
    .req(dut.arb_req), .grant(arb_grant), .eligible(arb_eligible), .gnt_pos(arb_gnt_pos),
    .replenish(arb_replenish), .hold(dut.hold), .refresh_req(local_refresh_req),
    .refresh_late, .ctrl_stall((local_write_req || local_read_req) && !local_ready),
    .acc_start(dut.s_valid && dut.s_ready), .split_busy(dut.u_split.busy),
    .acc_write(dut.u_split.cur.kind == ACC_WRITE),
    .done, .acc_count, .exec_cycles, .max_latency, .lat_sum, .data_errors,
    .reported(rep_mon)
  );

  function automatic int unsigned budget_sum();
    int unsigned s = 0;
    for (int m = 0; m < N; m++) s += BUDGET[m];
    return s;
  endfunction
  // the platform's replenishment period, Eq. (1) with its default widths
  localparam int RP = int'(rp_cycles(20, 20, budget_sum()));

  logic req_write [N];
  for (genvar m = 0; m < N; m++) begin : g_kind
    assign req_write[m] = dut.m_req[m].kind == ACC_WRITE;
  end

  logic rep_mon, rep_wcet;
  int   wcet_checks, wcet_failures;
  if (!USE_PBS) begin : g_wcet
    wcet_analyzer #(.NAME(NAME), .BUDGET(BUDGET), .RP(RP)) u_wcet (
      .clk, .rst_n, .finish(all_done),
      .req_valid(dut.m_req_valid), .req_write, .exec_cycles, .acc_count,
      .acc_start(dut.s_valid && dut.s_ready), .split_busy(dut.u_split.busy),
      .split_write(dut.u_split.cur.kind == ACC_WRITE),
      .last_chunk(dut.u_split.chunk_taken && dut.u_split.chunk == 2'd3),
      .hold(dut.hold), .reported(rep_wcet)
    );
    assign wcet_checks   = u_wcet.checks;
    assign wcet_failures = u_wcet.failures;
  end else begin : g_no_wcet
    // the timing analysis above is the one for DPQ; none is run for PBS
    assign rep_wcet      = 1'b1;
    assign wcet_checks   = 0;
    assign wcet_failures = 0;
  end

  assign reported = rep_mon && rep_wcet;
  assign checks   = u_mon.checks + wcet_checks;
  assign failures = u_mon.failures + wcet_failures;
endmodule
