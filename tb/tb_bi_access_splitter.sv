// tb_bi_access_splitter: self-checking test of bank-interleaved splitting.
// Random line reads and writes with random master IDs enter the splitter; a
// small controller model in the testbench accepts local requests with random
// stalls, stores written words and answers reads in order after a random
// delay. Checked: every line becomes exactly four single-word requests, bank
// 0..3 in order, at address {line, bank}, with auto-precharge and size 1;
// written words land at the right addresses; write completions and read lines
// come back with the right ID and data; `idle` is low while work is owed.
module tb_bi_access_splitter;
  import dpq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  line_req_t in_req;
  logic [2:0] in_id;
  logic [LOCAL_ADDR_W-1:0] local_address;
  logic local_write_req, local_read_req, local_burstbegin, local_autopch_req;
  logic [CHUNK_W-1:0] local_wdata, local_rdata;
  logic [7:0] local_be;
  logic [2:0] local_size;
  logic local_ready = 0, local_rdata_valid = 0;
  logic wr_done, rd_valid, idle;
  logic [2:0] wr_id, rd_id;
  logic [LINE_W-1:0] rd_data;
  int checks = 0, failures = 0;

  bi_access_splitter #(.ID_W(3), .RD_DEPTH(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [CHUNK_W-1:0] mem [logic [LOCAL_ADDR_W-1:0]];
  // expected issue stream and completions
  typedef struct { acc_kind_e kind; logic [LINE_ADDR_W-1:0] la; logic [LINE_W-1:0] d; int id; } acc_t;
  acc_t issued [$];      // accepted, not fully issued
  int   chunk_no = 0;
  int   exp_wr [$];
  acc_t exp_rd [$];
  logic [CHUNK_W-1:0] rd_pipe [$];
  int   rd_delay [$];
  int   n_rd = 0, n_wr = 0, stalls = 0;

  // Controller model.
  always @(negedge clk) local_ready = rst_n && ($urandom % 3 != 0);

  always @(posedge clk) if (rst_n) begin
    // read return: one word per cycle after the delay of the head entry
    local_rdata_valid <= 1'b0;
    if (rd_delay.size() > 0) begin
      if (rd_delay[0] == 0) begin
        local_rdata_valid <= 1'b1;
        local_rdata <= rd_pipe.pop_front();
        void'(rd_delay.pop_front());
      end else rd_delay[0]--;
    end
    if ((local_write_req || local_read_req) && !local_ready) stalls++;
    if ((local_write_req || local_read_req) && local_ready) begin
      acc_t a;
      a = issued[0];
      checks++;
      if (local_write_req != (a.kind == ACC_WRITE) || local_read_req != (a.kind == ACC_READ)
          || local_address != {a.la, 2'(chunk_no)} || !local_autopch_req || local_size != 3'd1
          || !local_burstbegin || local_be != 8'hFF
          || (a.kind == ACC_WRITE && local_wdata != a.d[chunk_no*CHUNK_W +: CHUNK_W])) begin
        failures++;
        $display("t=%0t bad local request addr=%h chunk %0d", $time, local_address, chunk_no);
      end
      if (local_write_req) mem[local_address] = local_wdata;
      else begin
        rd_pipe.push_back(mem.exists(local_address) ? mem[local_address] : word_pattern(local_address));
        rd_delay.push_back($urandom % 6);
      end
      if (chunk_no == N_BANKS - 1) begin
        chunk_no = 0;
        void'(issued.pop_front());
        if (a.kind == ACC_WRITE) exp_wr.push_back(a.id);
      end else chunk_no++;
    end
    // completions
    if (wr_done) begin
      checks++;
      if (exp_wr.size() == 0 || wr_id != 3'(exp_wr[0])) begin
        failures++; $display("t=%0t unexpected write completion id %0d", $time, wr_id);
      end else void'(exp_wr.pop_front());
      n_wr++;
    end
    if (rd_valid) begin
      acc_t e;
      checks++;
      e = exp_rd.pop_front();
      if (rd_id != 3'(e.id) || rd_data != e.d) begin
        failures++; $display("t=%0t read line id %0d expected %0d, data ok=%0b", $time, rd_id, e.id, rd_data == e.d);
      end
      n_rd++;
    end
  end

  // Reference content of a line as the model memory holds it.
  function automatic logic [LINE_W-1:0] mem_line(logic [LINE_ADDR_W-1:0] la);
    logic [LINE_W-1:0] l;
    for (int b = 0; b < N_BANKS; b++)
      l[b*CHUNK_W +: CHUNK_W] = mem.exists({la, 2'(b)}) ? mem[{la, 2'(b)}] : word_pattern({la, 2'(b)});
    return l;
  endfunction

  initial begin
    acc_t a;
    int busy_seen;
    busy_seen = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      a.kind = acc_kind_e'($urandom % 2);
      a.la   = LINE_ADDR_W'($urandom % 16);   // few lines: reads hit earlier writes
      for (int w = 0; w < LINE_W / 32; w++) a.d[w*32 +: 32] = $urandom;
      a.id   = $urandom % 6;
      in_req = '{kind: a.kind, line_addr: a.la, wdata: a.d};
      in_id  = 3'(a.id);
      in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      if (!idle) busy_seen++;
      @(posedge clk);
      // a read returns what memory holds once all earlier writes are done;
      // accesses are issued strictly in order, so compute it at issue time
      issued.push_back(a);
      #1 in_valid = 0;
      if (a.kind == ACC_READ) begin
        // wait until this line's commands are issued, then snapshot memory
        wait (issued.size() == 0);
        a.d = mem_line(a.la);
        exp_rd.push_back(a);
      end
      checks++;
      if (idle && issued.size() != 0) begin failures++; $display("idle while issuing"); end
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (40) @(posedge clk);
    checks++;
    if (n_rd + n_wr != 600 || exp_rd.size() != 0 || exp_wr.size() != 0 || !idle || stalls == 0) begin
      failures++; $display("reads %0d writes %0d left %0d/%0d idle %0b stalls %0d",
                           n_rd, n_wr, exp_rd.size(), exp_wr.size(), idle, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
