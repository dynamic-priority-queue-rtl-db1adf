// bi_access_splitter: bank-interleaved access splitting in front of the
// SDRAM controller.
//
// Bank interleaving (BI) cuts every cache-line access into one chunk per bank
// so that each chunk goes to its own bank and every bank gets one chunk; each
// chunk is issued with auto-precharge, so a bank closes as early as possible
// and the next access never finds a foreign open row. The paper implements BI
// in front of a controller that lacks it natively, "using access splitting
// and user controlled auto precharge"; it gives that function, not the
// circuit, so this is the simplest circuit that does it.
//
// How it works: an accepted 256-bit line access is held in a register and
// issued as N_BANKS single-word local requests, bank 0 first, with local
// address {line_addr, bank}, local_size = 1 and local_autopch_req = 1. A
// request is taken by the controller on a cycle where local_ready is high.
// A write is complete when its last chunk is taken (wr_done pulses the next
// cycle with the master's ID). For a read the master's ID is queued when the
// first chunk is taken; the controller returns read words in order, and after
// N_BANKS words the assembled line leaves on rd_valid/rd_id/rd_data.
//
// Interface: in_valid/in_ready handshake for the line access and the ID of
// the granting master; the local_* ports follow the Avalon-style local side of
// the Altera high-performance DDR2 controller (port names and the
// ready/valid meaning are this design's reading of that controller);
// `idle` is high when nothing is being issued and no read data is owed,
// which the refresh circuit uses.
//
// Choices of this design: lowest address bits select the bank; one line is
// split at a time; up to RD_DEPTH reads may be outstanding.
module bi_access_splitter
  import dpq_pkg::*;
#(
  parameter int unsigned ID_W     = 3,
  parameter int unsigned RD_DEPTH = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // line access from the arbiter
  input  logic                    in_valid,
  output logic                    in_ready,
  input  line_req_t               in_req,
  input  logic [ID_W-1:0]         in_id,
  // controller local interface
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
  // completions
  output logic                    wr_done,
  output logic [ID_W-1:0]         wr_id,
  output logic                    rd_valid,
  output logic [ID_W-1:0]         rd_id,
  output logic [LINE_W-1:0]       rd_data,
  output logic                    idle
);

  logic              busy;
  line_req_t         cur;
  logic [ID_W-1:0]   cur_id;
  logic [BANK_W-1:0] chunk;
  logic              chunk_taken;

  logic              fifo_push, fifo_empty, fifo_full;
  logic [ID_W-1:0]   fifo_head;
  logic [BANK_W-1:0] beat;
  logic [LINE_W-1:0] gather;

  assign in_ready    = !busy && !fifo_full;
  assign chunk_taken = busy && local_ready;

  // Issue side.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      chunk   <= '0;
      wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      if (in_valid && in_ready) begin
        busy  <= 1'b1;
        chunk <= '0;
      end else if (chunk_taken) begin
        chunk <= chunk + 1'b1;
        if (chunk == BANK_W'(N_BANKS-1)) begin
          busy    <= 1'b0;
          wr_done <= (cur.kind == ACC_WRITE);
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (in_valid && in_ready) begin
      cur    <= in_req;
      cur_id <= in_id;
    end

  assign wr_id             = cur_id;
  assign local_address     = {cur.line_addr, chunk};
  assign local_write_req   = busy && (cur.kind == ACC_WRITE);
  assign local_read_req    = busy && (cur.kind == ACC_READ);
  assign local_burstbegin  = busy;
  assign local_wdata       = cur.wdata[chunk*CHUNK_W +: CHUNK_W];
  assign local_be          = '1;
  assign local_size        = 3'd1;
  assign local_autopch_req = busy;

  // Return side: IDs of outstanding reads, in issue order.
  assign fifo_push = chunk_taken && (chunk == '0) && (cur.kind == ACC_READ);

  sync_fifo #(.W(ID_W), .DEPTH(RD_DEPTH)) u_rd_ids (
    .clk, .rst_n,
    .push  (fifo_push),
    .din   (cur_id),
    .pop   (local_rdata_valid && beat == BANK_W'(N_BANKS-1)),
    .dout  (fifo_head),
    .empty (fifo_empty),
    .full  (fifo_full)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat     <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= 1'b0;
      if (local_rdata_valid) begin
        beat <= beat + 1'b1;
        if (beat == BANK_W'(N_BANKS-1)) rd_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (local_rdata_valid) begin
      gather[beat*CHUNK_W +: CHUNK_W] <= local_rdata;
      if (beat == BANK_W'(N_BANKS-1)) rd_id <= fifo_head;
    end
  end

  assign rd_data = gather;
  assign idle    = !busy && fifo_empty && (beat == '0);

  a_rdata_expected: assert property (@(posedge clk) disable iff (!rst_n)
    local_rdata_valid |-> !fifo_empty);

endmodule
