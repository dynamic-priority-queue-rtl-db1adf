// sync_fifo: small single-clock first-in first-out buffer (helper).
//
// DEPTH entries of W bits in a register array with read and write pointers
// one bit wider than the index, so full and empty are told apart. A push
// while full and a pop while empty are ignored (and flagged by assertions).
// `dout` shows the oldest entry whenever `empty` is low. Push and pop may
// happen in the same cycle. DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign empty = (wp == rp);
  assign full  = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign dout  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full)  wp <= wp + 1'b1;
      if (pop  && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (push && !full) mem[wp[AW-1:0]] <= din;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
