// hp2_ctrl_model: behavioural model (not synthesizable) of a DDR2 controller
// local interface together with the memory behind it, for system tests.
//
// It stands in for the vendor high-performance DDR2 controller and the DDR2
// device. Requests are taken while local_ready is high into a command FIFO of
// CMD_DEPTH entries. The model drains that FIFO at one burst every BURST_CYC
// cycles, adds TURN_CYC cycles when the access type changes (read/write
// turnaround) and returns read words in order RD_LAT cycles after their burst.
// local_ready also drops at random (STALL_PCT percent of cycles) and during a
// refresh. A refresh request is acknowledged once the FIFO has drained; the
// memory is then busy for TRFC cycles. Unwritten words read as
// dpq_pkg::word_pattern of their address. All timing numbers are rough DDR2
// figures at 125 MHz chosen for the model, not measurements.
//
// Counters for the testbench: stall_cycles (a request waited), refreshes,
// refresh_waits (cycles a refresh request waited for the FIFO to drain),
// reads, writes.
module hp2_ctrl_model
  import dpq_pkg::*;
#(
  parameter int CMD_DEPTH = 4,
  parameter int BURST_CYC = 2,
  parameter int TURN_CYC  = 2,
  parameter int RD_LAT    = 10,
  parameter int TRFC      = 14,
  parameter int STALL_PCT = 10,
  parameter int INIT_CYC  = 20
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    local_init_done,
  input  logic [LOCAL_ADDR_W-1:0] local_address,
  input  logic                    local_write_req,
  input  logic                    local_read_req,
  input  logic                    local_burstbegin,
  input  logic [CHUNK_W-1:0]      local_wdata,
  input  logic [CHUNK_W/8-1:0]    local_be,
  input  logic [2:0]              local_size,
  input  logic                    local_autopch_req,
  output logic                    local_ready,
  output logic [CHUNK_W-1:0]      local_rdata,
  output logic                    local_rdata_valid,
  input  logic                    local_refresh_req,
  output logic                    local_refresh_ack,
  output int                      stall_cycles,
  output int                      refreshes,
  output int                      refresh_waits,
  output int                      reads,
  output int                      writes
);

  typedef struct {
    logic                    wr;
    logic [LOCAL_ADDR_W-1:0] a;
    logic [CHUNK_W-1:0]      d;
  } cmd_t;

  logic [CHUNK_W-1:0] mem [logic [LOCAL_ADDR_W-1:0]];
  cmd_t               cq [$];
  logic [CHUNK_W-1:0] rq_data [$];
  longint             rq_time [$];
  longint             now;
  int                 busy, refresh_left, init_cnt;
  logic               last_wr, stall;

  always @(negedge clk) stall = ($urandom % 100) < STALL_PCT;

  assign local_ready = local_init_done && refresh_left == 0 && !local_refresh_ack
                       && cq.size() < CMD_DEPTH && !stall;

  always @(posedge clk) begin
    if (!rst_n) begin
      now = 0; busy = 0; refresh_left = 0; init_cnt = 0; last_wr = 0;
      local_init_done <= 0; local_rdata_valid <= 0; local_refresh_ack <= 0;
      stall_cycles = 0; refreshes = 0; refresh_waits = 0; reads = 0; writes = 0;
      cq.delete(); rq_data.delete(); rq_time.delete();
    end else begin
      now++;
      if (init_cnt < INIT_CYC) init_cnt++;
      local_init_done <= (init_cnt >= INIT_CYC);
      // accept
      if ((local_write_req || local_read_req) && !local_ready) stall_cycles++;
      if ((local_write_req || local_read_req) && local_ready) begin
        cmd_t c;
        c.wr = local_write_req; c.a = local_address; c.d = local_wdata;
        cq.push_back(c);
      end
      // execute
      if (busy > 0) busy--;
      if (refresh_left > 0) refresh_left--;
      else if (busy == 0 && cq.size() > 0) begin
        cmd_t c;
        c = cq.pop_front();
        busy = BURST_CYC - 1 + ((c.wr != last_wr) ? TURN_CYC : 0);
        last_wr = c.wr;
        if (c.wr) begin
          mem[c.a] = c.d;
          writes++;
        end else begin
          rq_data.push_back(mem.exists(c.a) ? mem[c.a] : word_pattern(c.a));
          rq_time.push_back(now + longint'(RD_LAT));
          reads++;
        end
      end
      // read return, one word per cycle, in order
      local_rdata_valid <= 0;
      if (rq_time.size() > 0 && rq_time[0] <= now) begin
        local_rdata_valid <= 1;
        local_rdata <= rq_data.pop_front();
        void'(rq_time.pop_front());
      end
      // refresh
      local_refresh_ack <= 0;
      if (local_refresh_req && !local_refresh_ack && refresh_left == 0) begin
        if (cq.size() == 0 && busy == 0) begin
          local_refresh_ack <= 1;
          refresh_left = TRFC;
          refreshes++;
        end else refresh_waits++;
      end
    end
  end

endmodule
