// tb_dpq_platform: end-to-end test of the DPQ system at its default size,
// which is the equal-density workload: six masters, budget 4 each, 2048
// alternating random accesses each with a mean on-chip time of 8 cycles.
// The controller and memory are the behavioural hp2_ctrl_model; the checks
// are in platform_monitor (interference bound, budgets per period, refresh
// spacing, data integrity, every mechanism exercised) and in wcet_analyzer
// (the worst-case timing analysis must bound every master's execution time).
module tb_dpq_platform;
  import dpq_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0, start = 0;
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
  logic reported, rep_mon, rep_wcet;
  logic req_write [N];

  dpq_platform dut (.*);

  hp2_ctrl_model u_ctrl (.*);

  platform_monitor #(.NAME("equal density, default parameters")) u_mon (
    .clk, .rst_n, .finish(all_done),
    .req(dut.arb_req), .grant(arb_grant), .eligible(arb_eligible), .gnt_pos(arb_gnt_pos),
    .replenish(arb_replenish), .hold(dut.hold), .refresh_req(local_refresh_req),
    .refresh_late, .ctrl_stall((local_write_req || local_read_req) && !local_ready),
    .acc_start(dut.s_valid && dut.s_ready), .split_busy(dut.u_split.busy),
    .acc_write(dut.u_split.cur.kind == ACC_WRITE),
    .done, .acc_count, .exec_cycles, .max_latency, .lat_sum, .data_errors,
    .reported(rep_mon)
  );

  for (genvar m = 0; m < N; m++) begin : g_kind
    assign req_write[m] = dut.m_req[m].kind == ACC_WRITE;
  end

  // Rp of the defaults: Eq. (1) with 20-cycle widths and six budgets of 4
  wcet_analyzer #(.NAME("equal density, default parameters"), .RP(480)) u_wcet (
    .clk, .rst_n, .finish(all_done),
    .req_valid(dut.m_req_valid), .req_write, .exec_cycles, .acc_count,
    .acc_start(dut.s_valid && dut.s_ready), .split_busy(dut.u_split.busy),
    .split_write(dut.u_split.cur.kind == ACC_WRITE),
    .last_chunk(dut.u_split.chunk_taken && dut.u_split.chunk == 2'd3),
    .hold(dut.hold), .reported(rep_wcet)
  );

  assign reported = rep_mon && rep_wcet;

  always @(posedge clk) if (reported) begin
    $display("TB_RESULT checks=%0d failures=%0d", u_mon.checks + u_wcet.checks,
             u_mon.failures + u_wcet.failures);
    $finish;
  end

  always #4 clk = ~clk;   // 125 MHz

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_mon.checks + u_wcet.checks,
             u_mon.failures + u_wcet.failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    start <= 1;
  end
endmodule
