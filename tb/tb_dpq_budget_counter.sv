// tb_dpq_budget_counter: self-checking test of one DPQ budget counter.
// Drives random grants (only while eligible, as the arbiter does) and
// periodic replenishments, and compares eligibility and remaining budget
// with a counter kept in the testbench, every cycle.
module tb_dpq_budget_counter;
  localparam int unsigned BUDGET = 5;
  logic clk = 0, rst_n = 0, replenish = 0, grant = 0;
  logic eligible;
  logic [5:0] budget_left;
  int checks = 0, failures = 0, model = BUDGET, exhausted = 0;

  dpq_budget_counter #(.BUDGET(BUDGET), .CNT_W(6)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      checks++;
      if (eligible !== (model != 0) || budget_left !== 6'(model)) begin
        failures++;
        $display("cycle %0d: eligible=%0b left=%0d expected %0d", cyc, eligible, budget_left, model);
      end
      if (model == 0) exhausted++;
      replenish = (cyc % 23 == 22);
      grant     = eligible && ($urandom % 3 != 0);
      @(posedge clk);
      if (replenish) model = BUDGET;
      else if (grant) model--;
    end
    replenish = 0; grant = 0;
    checks++;
    if (exhausted == 0) begin
      failures++;
      $display("budget never ran out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
