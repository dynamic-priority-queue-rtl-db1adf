// tb_traffic_gen: self-checking test of one traffic generator (40 accesses,
// mean on-chip time 8). The testbench plays the memory side with random
// accept and completion delays and corrupts a few read lines on purpose.
// Checked: one access at a time, write/read alternation starting with a
// write, write data = line pattern of the address, on-chip gaps within
// 0..16 cycles with a mean near 8, the access count, the longest latency,
// the execution time and the number of corrupted reads it reports.
module tb_traffic_gen;
  import dpq_pkg::*;
  localparam int NACC = 40, AVG = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic req_valid, req_ready = 0, wr_done = 0, rd_valid = 0, done;
  line_req_t req;
  logic [LINE_W-1:0] rd_data;
  logic [31:0] acc_count, exec_cycles, max_latency;
  logic [47:0] lat_sum;
  logic [15:0] data_errors;
  int checks = 0, failures = 0;

  traffic_gen #(.N_ACC(NACC), .AVG_OCPT(AVG), .SEED(32'hACE1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, t_req, t_done, t_start, gap, gap_sum, maxlat, lat, corrupt, lsum;
    acc_kind_e exp_kind;
    exp_kind = ACC_WRITE; gap_sum = 0; maxlat = 0; corrupt = 0; lsum = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk); start = 1; cyc = 0; t_start = 0; t_done = 0;
    @(negedge clk); start = 0; cyc = 1;
    for (int n = 0; n < NACC; n++) begin
      while (!req_valid) begin @(negedge clk); cyc++; end
      t_req = cyc;
      gap = t_req - t_done - 1;
      gap_sum += gap;
      checks++;
      if (gap < 0 || gap > 2 * AVG + 1) begin failures++; $display("gap %0d", gap); end
      checks++;
      if (req.kind != exp_kind || (req.kind == ACC_WRITE && req.wdata != line_pattern(req.line_addr))) begin
        failures++; $display("access %0d: kind %0d", n, req.kind);
      end
      repeat ($urandom % 5) begin @(negedge clk); cyc++; end
      req_ready = 1;
      @(negedge clk); cyc++;
      req_ready = 0;
      checks++;
      if (req_valid) begin failures++; $display("request still valid after accept"); end
      repeat ($urandom % 12) begin @(negedge clk); cyc++; end
      if (req.kind == ACC_WRITE) wr_done = 1;
      else begin
        rd_valid = 1;
        rd_data = line_pattern(req.line_addr);
        if ($urandom % 5 == 0) begin rd_data[7] = ~rd_data[7]; corrupt++; end
      end
      lat = cyc - t_req + 1;
      lsum += lat;
      if (lat > maxlat) maxlat = lat;
      @(negedge clk); cyc++;
      t_done = cyc - 1;
      wr_done = 0; rd_valid = 0;
      exp_kind = (exp_kind == ACC_WRITE) ? ACC_READ : ACC_WRITE;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (!done || acc_count != NACC || max_latency != 32'(maxlat) || lat_sum != 48'(lsum)
        || data_errors != 16'(corrupt) || exec_cycles != 32'(t_done)) begin
      failures++;
      $display("done %0b count %0d maxlat %0d/%0d latsum %0d/%0d errors %0d/%0d exec %0d/%0d",
               done, acc_count, max_latency, maxlat, lat_sum, lsum, data_errors, corrupt, exec_cycles, t_done);
    end
    checks++;
    if (gap_sum < NACC * (AVG - 3) || gap_sum > NACC * (AVG + 3)) begin
      failures++; $display("mean gap %0d/%0d", gap_sum, NACC);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
