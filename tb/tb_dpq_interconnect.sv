// tb_dpq_interconnect: self-checking test of the master-side multiplexer.
// Random master requests, arbiter winners, hold and downstream readiness are
// applied; the expected downstream access, arbiter enable, accept pulses and
// routed completions are worked out here and compared each step.
module tb_dpq_interconnect;
  import dpq_pkg::*;
  localparam int N = 6;
  logic m_req_valid [N];
  line_req_t m_req [N];
  logic m_req_ready [N], m_wr_done [N], m_rd_valid [N];
  logic [LINE_W-1:0] m_rd_data;
  logic [N-1:0] arb_req;
  logic arb_enable, gnt_valid, hold, s_valid, s_ready, s_wr_done, s_rd_valid;
  logic [2:0] gnt_id, s_id, s_wr_id, s_rd_id;
  line_req_t s_req;
  logic [LINE_W-1:0] s_rd_data;
  int checks = 0, failures = 0, moved = 0;

  dpq_interconnect #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    for (int n = 0; n < 5000; n++) begin
      for (int m = 0; m < N; m++) begin
        m_req_valid[m] = 1'($urandom % 2);
        m_req[m].kind = acc_kind_e'($urandom % 2);
        m_req[m].line_addr = LINE_ADDR_W'($urandom);
        m_req[m].wdata = {8{$urandom}};
      end
      gnt_valid = 1'($urandom % 2);
      gnt_id    = 3'($urandom % N);
      hold      = ($urandom % 4 == 0);
      s_ready   = 1'($urandom % 2);
      s_wr_done = 1'($urandom % 2); s_wr_id = 3'($urandom % N);
      s_rd_valid = 1'($urandom % 2); s_rd_id = 3'($urandom % N);
      s_rd_data = {8{$urandom}};
      #1;
      ok = 1;
      for (int m = 0; m < N; m++) begin
        if (arb_req[m] != m_req_valid[m]) ok = 0;
        if (m_req_ready[m] != (gnt_valid && !hold && s_ready && gnt_id == 3'(m))) ok = 0;
        if (m_wr_done[m] != (s_wr_done && s_wr_id == 3'(m))) ok = 0;
        if (m_rd_valid[m] != (s_rd_valid && s_rd_id == 3'(m))) ok = 0;
      end
      if (arb_enable != (s_ready && !hold)) ok = 0;
      if (s_valid != (gnt_valid && !hold)) ok = 0;
      if (s_valid && (s_req != m_req[gnt_id] || s_id != gnt_id)) ok = 0;
      if (m_rd_data != s_rd_data) ok = 0;
      if (s_valid && s_ready) moved++;
      checks++;
      if (!ok) begin failures++; $display("step %0d mismatch", n); end
      #9;
    end
    checks++;
    if (moved == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
