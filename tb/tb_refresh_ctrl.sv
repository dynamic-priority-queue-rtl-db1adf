// tb_refresh_ctrl: self-checking test of the user-controlled refresh circuit
// with TREFI = 100 and GUARD = 10. A testbench timer predicts when `hold`
// must rise; the path reports busy at random before the guard window and
// (in some periods) past expiry, to force a late refresh. Checked: hold over
// the guard window and until the acknowledge, requests only on an idle path,
// a request exactly at expiry when the path is idle, `late` when it is not,
// and the request held until the acknowledge arrives.
module tb_refresh_ctrl;
  localparam int TREFI = 100, GUARD = 10;
  logic clk = 0, rst_n = 0, path_idle = 1, local_refresh_ack = 0;
  logic hold, local_refresh_req, late;
  int checks = 0, failures = 0, t = 0, n_ref = 0, n_late = 0, last_req = -1;
  int on_time = 0;
  logic req_d = 0, pending = 0;

  refresh_ctrl #(.TREFI(TREFI), .GUARD(GUARD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pos, ack_wait, busy_left;
    bit force_late;
    busy_left = 0; ack_wait = -1; force_late = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (t = 0; t < 3000; t++) begin
      @(negedge clk);
      pos = t % TREFI;
      if (pos == 0) force_late = ($urandom % 3 == 0);
      // path activity: random bursts, stopping at the guard window unless
      // this period is meant to be late
      if (busy_left > 0) busy_left--;
      else if (!hold && pos < TREFI - 1 - GUARD - 8 && $urandom % 10 == 0) busy_left = $urandom % 8;
      if (force_late && pos == TREFI - 4) busy_left = 6;
      path_idle = (busy_left == 0);
      #1;
      checks++;
      if ((pos >= TREFI - 1 - GUARD) && !hold) begin
        failures++; $display("t=%0d hold low in guard window", t);
      end
      if (pos == TREFI - 1) pending = 1;
      if (pending && !hold) begin
        failures++; $display("t=%0d hold low while refresh owed", t);
      end
      if (local_refresh_req && !req_d) begin
        n_ref++;
        checks++;
        if (!path_idle && t > 0) begin failures++; $display("t=%0d request on a busy path", t); end
        if (last_req >= 0 && (t - last_req) == TREFI) on_time++;
        last_req = t;
      end
      if (late) n_late++;
      // acknowledge after a random delay
      if (local_refresh_req) begin
        if (ack_wait < 0) ack_wait = $urandom % 4;
        else if (ack_wait > 0) ack_wait--;
      end
      local_refresh_ack = local_refresh_req && ack_wait == 0;
      req_d = local_refresh_req;
      @(posedge clk);
      if (local_refresh_ack) begin ack_wait = -1; pending = 0; end
      #1 local_refresh_ack = 0;
      checks++;
      if (req_d && !local_refresh_req && !(ack_wait == -1)) begin
        failures++; $display("t=%0d request dropped before acknowledge", t);
      end
    end
    checks++;
    if (n_ref != 3000 / TREFI - 1 && n_ref != 3000 / TREFI) begin
      failures++; $display("%0d refreshes", n_ref);
    end
    checks++;
    if (n_late == 0 || on_time == 0) begin failures++; $display("late %0d on time %0d", n_late, on_time); end
    $display("refreshes %0d, late %0d, on time %0d", n_ref, n_late, on_time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
