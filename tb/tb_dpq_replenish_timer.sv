// tb_dpq_replenish_timer: checks that replenishment pulses come exactly every
// RP cycles, where RP is worked out here from Eq. (1) for budgets {5,3,2} and
// command widths 7 and 8 cycles: ceil(15/2) * 10 = 80.
module tb_dpq_replenish_timer;
  localparam int unsigned RP = 80;
  logic clk = 0, rst_n = 0;
  logic replenish;
  logic [15:0] crt_pos;
  int checks = 0, failures = 0, last = -1, pulses = 0;

  dpq_replenish_timer #(.RP(dpq_pkg::rp_cycles(7, 8, 10)), .POS_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 1000; cyc++) begin
      @(negedge clk);
      checks++;
      if (crt_pos !== 16'(cyc % RP)) begin
        failures++;
        $display("cycle %0d: crt_pos=%0d", cyc, crt_pos);
      end
      if (replenish) begin
        pulses++;
        checks++;
        if ((last >= 0 && cyc - last != RP) || (last < 0 && cyc != RP - 1)) begin
          failures++;
          $display("pulse at %0d, previous at %0d", cyc, last);
        end
        last = cyc;
      end
    end
    checks++;
    if (pulses != 1000 / RP) begin
      failures++;
      $display("%0d pulses, expected %0d", pulses, 1000 / RP);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
