// dpq_queue: the dynamic priority queue of the DPQ arbiter.
//
// The queue holds the N master IDs in N registers; position 0 is the head and
// has the highest priority. Each cycle the block searches from the head for
// the first master that both requests and is eligible (budget left) and
// offers it as the winner. When the winner is taken (`advance`), the masters
// ahead of it keep their positions, every master behind it moves one position
// towards the head, and the winner is written into the tail register. A
// master that is passed over, for lack of budget or because it does not
// request, therefore climbs in priority whenever someone behind it is served.
// This is the DPQ rule as the paper gives it (Sec. 4, Fig. 4); the register
// file plus next-state mux also follows the paper's area remark (Sec. 7).
//
// Reset order is m0, m1, ..., m(N-1) from head to tail (this design's
// choice; the paper does not give an initial order).
//
// Interface and timing: `cand` is indexed by master ID. `win_*` are
// combinational from `cand` and the registered queue. The queue updates on the
// clock edge at which `advance` is high; `advance` must only be raised while
// `win_valid` is high.
module dpq_queue #(
  parameter int unsigned N    = 6,
  parameter int unsigned ID_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N-1:0]    cand,        // request & eligible, by master ID
  input  logic            advance,     // winner granted this cycle
  output logic            win_valid,
  output logic [ID_W-1:0] win_id,
  output logic [ID_W-1:0] win_pos,     // queue position of the winner
  output logic [N-1:0]    win_onehot,  // winner, by master ID
  output logic [ID_W-1:0] order [N]    // order[p] = master ID at position p
);

  logic [ID_W-1:0] q [N];

  // Priority search from the head.
  always_comb begin
    win_valid = 1'b0;
    win_pos   = '0;
    win_id    = '0;
    for (int p = N-1; p >= 0; p--) begin
      if (cand[q[p]]) begin
        win_valid = 1'b1;
        win_pos   = ID_W'(p);
        win_id    = q[p];
      end
    end
    win_onehot = '0;
    if (win_valid) win_onehot[win_id] = 1'b1;
  end

  // Move the winner to the tail, shift the rest behind it forward.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < N; p++) q[p] <= ID_W'(p);
    end else if (advance && win_valid) begin
      for (int p = 0; p < N-1; p++)
        if (ID_W'(p) >= win_pos) q[p] <= q[p+1];
      q[N-1] <= win_id;
    end
  end

  assign order = q;

  a_advance_has_winner: assert property (@(posedge clk) disable iff (!rst_n)
    advance |-> win_valid);

endmodule
