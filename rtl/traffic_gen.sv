// traffic_gen: hardware traffic generator acting as one master.
//
// It emulates an in-order core behind a cache (paper, Sec. 3.1 and Sec. 6):
// it issues one cache-line access at a time, waits for it to complete, then
// spends a random on-chip processing time (OnChipProcTime) before the next.
// Accesses alternate write, read, write, ... at random line addresses, the
// pattern that produces the worst-case latencies under bank interleaving.
// After N_ACC accesses it stops and raises `done`.
//
// The on-chip time is uniform in 0..2*AVG_OCPT cycles, so its mean is
// AVG_OCPT (the paper's Table 1 gives the means; the distribution and the
// 32-bit Galois LFSR that draws it and the addresses are this design's
// choices). Written data follow dpq_pkg::line_pattern; every read line is
// compared with the same pattern and a mismatch is counted in data_errors.
//
// Measurements: exec_cycles counts from start to done (the observed execution
// time), max_latency is the longest request-to-completion time of one access
// (a write completes when its last chunk enters the controller, a read when
// its line returns), lat_sum is the sum of all those latencies.
//
// Interface: `start` is sampled in IDLE. The request handshake and the
// completion signals are those of dpq_interconnect's master side.
module traffic_gen
  import dpq_pkg::*;
#(
  parameter int unsigned N_ACC    = 2048,
  parameter int unsigned AVG_OCPT = 8,
  parameter logic [31:0] SEED     = 32'h1234_5678
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              req_valid,
  output line_req_t         req,
  input  logic              req_ready,
  input  logic              wr_done,
  input  logic              rd_valid,
  input  logic [LINE_W-1:0] rd_data,
  output logic              done,
  output logic [31:0]       acc_count,
  output logic [31:0]       exec_cycles,
  output logic [31:0]       max_latency,
  output logic [47:0]       lat_sum,
  output logic [15:0]       data_errors
);

  typedef enum logic [2:0] {IDLE, GAP, REQ, WAIT, DONE} state_e;

  state_e      state;
  logic [31:0] lfsr, lfsr_next;
  logic [31:0] gap;
  logic [31:0] lat;
  acc_kind_e   kind;
  logic [LINE_ADDR_W-1:0] addr;
  logic        complete;

  // Galois LFSR, polynomial x^32 + x^22 + x^2 + x + 1.
  assign lfsr_next = {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
  assign complete  = (state == WAIT) &&
                     ((kind == ACC_WRITE && wr_done) || (kind == ACC_READ && rd_valid));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= IDLE;
      lfsr        <= (SEED == 0) ? 32'h1 : SEED;
      gap         <= '0;
      lat         <= '0;
      kind        <= ACC_WRITE;
      addr        <= '0;
      acc_count   <= '0;
      exec_cycles <= '0;
      max_latency <= '0;
      lat_sum     <= '0;
      data_errors <= '0;
    end else begin
      if (state inside {GAP, REQ, WAIT}) exec_cycles <= exec_cycles + 1;
      if (state inside {REQ, WAIT})      lat <= lat + 1;
      unique case (state)
        IDLE:
          if (start) begin
            state <= GAP;
            gap   <= lfsr % (2*AVG_OCPT + 1);
            lfsr  <= lfsr_next;
          end
        GAP:
          if (gap == 0) begin
            state <= REQ;
            addr  <= lfsr[LINE_ADDR_W-1:0];
            lfsr  <= lfsr_next;
            lat   <= '0;
          end else begin
            gap <= gap - 1;
          end
        REQ:
          if (req_ready) state <= WAIT;
        WAIT:
          if (complete) begin
            acc_count <= acc_count + 1;
            lat_sum   <= lat_sum + 48'(lat + 1);
            if (lat + 1 > max_latency) max_latency <= lat + 1;
            if (kind == ACC_READ && rd_data != line_pattern(addr))
              data_errors <= data_errors + 1'b1;
            kind <= (kind == ACC_WRITE) ? ACC_READ : ACC_WRITE;
            if (acc_count + 1 == N_ACC) begin
              state <= DONE;
            end else begin
              state <= GAP;
              gap   <= lfsr % (2*AVG_OCPT + 1);
              lfsr  <= lfsr_next;
            end
          end
        DONE: ;
        default: state <= IDLE;
      endcase
    end
  end

  assign req_valid = (state == REQ);
  assign req.kind      = kind;
  assign req.line_addr = addr;
  assign req.wdata     = line_pattern(addr);
  assign done          = (state == DONE);

endmodule
