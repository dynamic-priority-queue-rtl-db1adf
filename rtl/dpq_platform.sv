// dpq_platform: N masters sharing one DDR2 SDRAM through a DPQ arbiter.
//
// This is the evaluation system of the DPQ scheme (paper, Sec. 6 and
// Fig. 2b): six hardware traffic generators, each standing for a core whose
// cache misses go to the shared SDRAM, the Dynamic Priority Queue arbiter,
// the interconnect that carries the granted access, the bank-interleaving
// splitter that turns each 32-byte line into one auto-precharged chunk per
// bank, and the refresh circuit that issues refreshes at exact tREFI
// intervals. The DDR2 controller itself is vendor IP and lives outside: its
// local interface is brought out as ports.
//
// Data flow per access: traffic_gen raises a request -> dpq_arbiter picks the
// first requesting master with budget left from the head of its queue ->
// dpq_interconnect passes that master's line to bi_access_splitter when the
// splitter is free and refresh_ctrl does not hold the channel ->
// four local requests go to the controller -> a write completes when its last
// chunk is taken, a read when its four words are back.
//
// Parameters: per-master BUDGET, N_ACC (accesses to generate), AVG_OCPT (mean
// on-chip time) and SEED. Defaults are the paper's equal-density workload
// (budget 4, 2048 accesses, mean 8 cycles for all six masters, Table 1).
// WC_RD_CMD_WD and WC_WR_CMD_WD only size the replenishment period; the
// paper measures them and does not print them; 20 cycles each is assumed
// (the longest command width seen with the system testbench's controller).
//
// USE_PBS = 1 replaces the DPQ arbiter by pbs_arbiter, the static-priority
// budget scheduler the paper compares DPQ with (ranks PRIO, default those of
// its evaluation); everything else stays the same. The default is DPQ.
//
// Ports: `start` launches the generators once local_init_done is high.
// Per-master results (done, exec_cycles, max_latency, lat_sum, data_errors)
// are plain arrays; `all_done` is high when every generator finished.
// The arb_* outputs expose the arbiter state (grants, eligibility, queue
// order, budgets, replenishment) for observation and have no function.
module dpq_platform
  import dpq_pkg::*;
#(
  parameter int unsigned N            = 6,
  parameter int unsigned BUDGET   [N] = '{default: 4},
  parameter int unsigned N_ACC    [N] = '{default: 2048},
  parameter int unsigned AVG_OCPT [N] = '{default: 8},
  parameter int unsigned WC_RD_CMD_WD = 20,
  parameter int unsigned WC_WR_CMD_WD = 20,
  parameter int unsigned TREFI        = 975,
  parameter bit          USE_PBS      = 1'b0,   // 1: static-priority baseline
  parameter int unsigned PRIO     [N] = '{6, 5, 4, 3, 2, 1},  // PBS ranks only
  parameter int unsigned REF_GUARD    = 24,
  parameter int unsigned ID_W         = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  // controller local interface
  input  logic                    local_init_done,
  output logic [LOCAL_ADDR_W-1:0] local_address,
  output logic                    local_write_req,
  output logic                    local_read_req,
  output logic                    local_burstbegin,
  output logic [CHUNK_W-1:0]      local_wdata,
  output logic [CHUNK_W/8-1:0]    local_be,
  output logic [2:0]              local_size,
  output logic                    local_autopch_req,
  input  logic                    local_ready,
  input  logic [CHUNK_W-1:0]      local_rdata,
  input  logic                    local_rdata_valid,
  output logic                    local_refresh_req,
  input  logic                    local_refresh_ack,
  // results
  output logic                    done        [N],
  output logic [31:0]             acc_count   [N],
  output logic [31:0]             exec_cycles [N],
  output logic [31:0]             max_latency [N],
  output logic [47:0]             lat_sum     [N],
  output logic [15:0]             data_errors [N],
  output logic                    all_done,
  output logic                    refresh_late,
  // arbiter status, for observation
  output logic [N-1:0]            arb_grant,
  output logic [N-1:0]            arb_eligible,
  output logic                    arb_replenish,
  output logic [ID_W-1:0]         arb_gnt_pos,
  output logic [ID_W-1:0]         arb_order [N],
  output logic [5:0]              arb_budget_left [N],
  output logic [15:0]             arb_crt_pos
);

  // master side
  logic              m_req_valid [N];
  line_req_t         m_req       [N];
  logic              m_req_ready [N];
  logic              m_wr_done   [N];
  logic              m_rd_valid  [N];
  logic [LINE_W-1:0] m_rd_data;

  // arbiter
  logic [N-1:0]      arb_req;
  logic              arb_enable, gnt_valid;
  logic [ID_W-1:0]   gnt_id;

  // splitter
  logic              s_valid, s_ready, s_wr_done, s_rd_valid, path_idle;
  line_req_t         s_req;
  logic [ID_W-1:0]   s_id, s_wr_id, s_rd_id;
  logic [LINE_W-1:0] s_rd_data;

  logic              hold;

  for (genvar m = 0; m < N; m++) begin : g_master
    traffic_gen #(
      .N_ACC    (N_ACC[m]),
      .AVG_OCPT (AVG_OCPT[m]),
      .SEED     (32'h9E37_79B9 * (m + 1))
    ) u_tg (
      .clk, .rst_n,
      .start       (start && local_init_done),
      .req_valid   (m_req_valid[m]),
      .req         (m_req[m]),
      .req_ready   (m_req_ready[m]),
      .wr_done     (m_wr_done[m]),
      .rd_valid    (m_rd_valid[m]),
      .rd_data     (m_rd_data),
      .done        (done[m]),
      .acc_count   (acc_count[m]),
      .exec_cycles (exec_cycles[m]),
      .max_latency (max_latency[m]),
      .lat_sum     (lat_sum[m]),
      .data_errors (data_errors[m])
    );
  end

  if (USE_PBS) begin : g_pbs
    pbs_arbiter #(
      .N            (N),
      .BUDGET       (BUDGET),
      .PRIO         (PRIO),
      .WC_RD_CMD_WD (WC_RD_CMD_WD),
      .WC_WR_CMD_WD (WC_WR_CMD_WD),
      .CNT_W        (6),
      .POS_W        (16),
      .ID_W         (ID_W)
    ) u_arbiter (
      .clk, .rst_n,
      .req         (arb_req),
      .enable      (arb_enable),
      .gnt_valid, .gnt_id,
      .gnt_onehot  (arb_grant),
      .eligible    (arb_eligible),
      .budget_left (arb_budget_left),
      .replenish   (arb_replenish),
      .order       (arb_order),
      .gnt_pos     (arb_gnt_pos),
      .crt_pos     (arb_crt_pos)
    );
  end else begin : g_dpq
    dpq_arbiter #(
      .N            (N),
      .BUDGET       (BUDGET),
      .WC_RD_CMD_WD (WC_RD_CMD_WD),
      .WC_WR_CMD_WD (WC_WR_CMD_WD),
      .CNT_W        (6),
      .POS_W        (16),
      .ID_W         (ID_W)
    ) u_arbiter (
      .clk, .rst_n,
      .req         (arb_req),
      .enable      (arb_enable),
      .gnt_valid, .gnt_id,
      .gnt_onehot  (arb_grant),
      .eligible    (arb_eligible),
      .budget_left (arb_budget_left),
      .replenish   (arb_replenish),
      .order       (arb_order),
      .gnt_pos     (arb_gnt_pos),
      .crt_pos     (arb_crt_pos)
    );
  end

  dpq_interconnect #(.N(N), .ID_W(ID_W)) u_ic (
    .m_req_valid, .m_req, .m_req_ready, .m_wr_done, .m_rd_valid, .m_rd_data,
    .arb_req, .arb_enable, .gnt_valid, .gnt_id,
    .hold,
    .s_valid, .s_ready, .s_req, .s_id,
    .s_wr_done, .s_wr_id, .s_rd_valid, .s_rd_id, .s_rd_data
  );

  bi_access_splitter #(.ID_W(ID_W), .RD_DEPTH(8)) u_split (
    .clk, .rst_n,
    .in_valid (s_valid),
    .in_ready (s_ready),
    .in_req   (s_req),
    .in_id    (s_id),
    .local_address, .local_write_req, .local_read_req, .local_burstbegin,
    .local_wdata, .local_be, .local_size, .local_autopch_req,
    .local_ready, .local_rdata, .local_rdata_valid,
    .wr_done  (s_wr_done),
    .wr_id    (s_wr_id),
    .rd_valid (s_rd_valid),
    .rd_id    (s_rd_id),
    .rd_data  (s_rd_data),
    .idle     (path_idle)
  );

  refresh_ctrl #(.TREFI(TREFI), .GUARD(REF_GUARD)) u_refresh (
    .clk, .rst_n,
    .path_idle,
    .hold,
    .local_refresh_req,
    .local_refresh_ack,
    .late (refresh_late)
  );

  always_comb begin
    all_done = 1'b1;
    for (int m = 0; m < N; m++) all_done &= done[m];
  end

endmodule
