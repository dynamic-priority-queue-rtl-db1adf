// tb_dpq_queue: self-checking test of the DPQ priority queue.
// A reference queue kept in the testbench applies the rule "first candidate
// from the head wins, moves to the tail, those behind it move up" to random
// candidate sets; winner and queue order are compared every cycle. A directed
// part replays the grants of the paper's three-master example (Fig. 4).
module tb_dpq_queue;
  localparam int N = 6;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [N-1:0] cand = '0;
  logic win_valid;
  logic [2:0] win_id, win_pos;
  logic [N-1:0] win_onehot;
  logic [2:0] order [N];
  int checks = 0, failures = 0, nonhead = 0;
  int ref_q [$];

  dpq_queue #(.N(N)) dut (.*);

  // Three-master instance for the Fig. 4 example.
  logic [2:0] c3 = '0;
  logic adv3 = 0, v3;
  logic [1:0] id3, pos3;
  logic [2:0] oh3;
  logic [1:0] ord3 [3];
  dpq_queue #(.N(3)) dut3 (.clk, .rst_n, .cand(c3), .advance(adv3), .win_valid(v3),
    .win_id(id3), .win_pos(pos3), .win_onehot(oh3), .order(ord3));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check3(input int exp_id, input int e0, input int e1, input int e2);
    #1;
    checks++;
    if (!v3 || id3 != 2'(exp_id)) begin
      failures++; $display("fig4: winner %0d expected %0d", id3, exp_id);
    end
    @(posedge clk); #1;
    checks++;
    if (ord3[0] != 2'(e0) || ord3[1] != 2'(e1) || ord3[2] != 2'(e2)) begin
      failures++; $display("fig4: order %0d %0d %0d expected %0d %0d %0d",
                           ord3[0], ord3[1], ord3[2], e0, e1, e2);
    end
  endtask

  initial begin
    int exp_pos, exp_id;
    for (int i = 0; i < N; i++) ref_q.push_back(i);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // Random part.
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      cand    = N'($urandom);
      advance = ($urandom % 4 != 0);
      #1;
      exp_pos = -1;
      for (int p = 0; p < N; p++) if (exp_pos < 0 && cand[ref_q[p]]) exp_pos = p;
      checks++;
      if (win_valid != (exp_pos >= 0)) begin
        failures++; $display("cycle %0d: win_valid=%0b", cyc, win_valid);
      end else if (exp_pos >= 0 && (win_pos != 3'(exp_pos) || win_id != 3'(ref_q[exp_pos])
                                     || win_onehot != N'(1) << ref_q[exp_pos])) begin
        failures++; $display("cycle %0d: winner %0d@%0d expected %0d@%0d", cyc, win_id, win_pos,
                             ref_q[exp_pos], exp_pos);
      end
      if (!win_valid) advance = 0;
      @(posedge clk);
      if (advance && exp_pos >= 0) begin
        exp_id = ref_q[exp_pos];
        if (exp_pos != 0) nonhead++;
        ref_q.delete(exp_pos);
        ref_q.push_back(exp_id);
      end
      #1;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (order[p] != 3'(ref_q[p])) begin
          failures++; $display("cycle %0d: order[%0d]=%0d expected %0d", cyc, p, order[p], ref_q[p]);
        end
      end
    end
    advance = 0;
    checks++;
    if (nonhead == 0) begin failures++; $display("no grant away from the head"); end
    // Fig. 4: IDs 0,1,2 stand for m1,m2,m3. Bring the queue to m3, m2, m1.
    @(negedge clk); c3 = 3'b001; adv3 = 1; check3(0, 1, 2, 0); // m1 to tail
    @(negedge clk); c3 = 3'b010; check3(1, 2, 0, 1);           // m2 to tail
    @(negedge clk); c3 = 3'b001; check3(0, 2, 1, 0);           // queue m3 m2 m1
    // Point A: m3 requests but has no budget; m2 wins and goes to the tail.
    @(negedge clk); c3 = 3'b011; check3(1, 2, 0, 1);           // m3 m1 m2
    // Point B: only m1 is eligible and requesting.
    @(negedge clk); c3 = 3'b001; check3(0, 2, 1, 0);           // m3 m2 m1
    // Point D: new period, all eligible, m3 at the head wins.
    @(negedge clk); c3 = 3'b111; check3(2, 1, 0, 2);           // m2 m1 m3
    adv3 = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
