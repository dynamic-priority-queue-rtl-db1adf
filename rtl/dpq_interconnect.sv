// dpq_interconnect: the shared path between N masters and the memory side.
//
// The masters sit above the arbiter and the controller below it (paper,
// Fig. 2b). This block is the data path around the DPQ arbiter: it forwards
// the requests of all masters to the arbiter, multiplexes the winner's line
// access onto the single downstream channel, closes that channel while the
// refresh circuit holds it, and routes completions back: a write completion
// or a returned read line goes to the master whose ID travels with it.
// The paper gives this function only; the channel protocol is this design's.
//
// Master side (arrays indexed by master ID): m_req_valid[m] stays high, with
// m_req[m] stable, until m_req_ready[m] pulses; the master then waits for
// m_wr_done[m] (write) or m_rd_valid[m] with the shared m_rd_data (read).
// Downstream: s_valid/s_ready handshake with s_req and the ID s_id.
// Arbiter: arb_req and arb_enable out, gnt_valid/gnt_id in. An access moves
// on the cycle where the arbiter's winner is valid, the downstream is ready
// and the channel is not held; that same condition commits the grant.
module dpq_interconnect
  import dpq_pkg::*;
#(
  parameter int unsigned N    = 6,
  parameter int unsigned ID_W = (N > 1) ? $clog2(N) : 1
) (
  // masters
  input  logic                m_req_valid [N],
  input  line_req_t           m_req       [N],
  output logic                m_req_ready [N],
  output logic                m_wr_done   [N],
  output logic                m_rd_valid  [N],
  output logic [LINE_W-1:0]   m_rd_data,
  // arbiter
  output logic [N-1:0]        arb_req,
  output logic                arb_enable,
  input  logic                gnt_valid,
  input  logic [ID_W-1:0]     gnt_id,
  // refresh
  input  logic                hold,
  // downstream (bank-interleaving splitter)
  output logic                s_valid,
  input  logic                s_ready,
  output line_req_t           s_req,
  output logic [ID_W-1:0]     s_id,
  input  logic                s_wr_done,
  input  logic [ID_W-1:0]     s_wr_id,
  input  logic                s_rd_valid,
  input  logic [ID_W-1:0]     s_rd_id,
  input  logic [LINE_W-1:0]   s_rd_data
);

  always_comb begin
    for (int m = 0; m < N; m++) arb_req[m] = m_req_valid[m];
  end

  assign arb_enable = s_ready && !hold;
  assign s_valid    = gnt_valid && !hold;
  assign s_req      = m_req[gnt_id];
  assign s_id       = gnt_id;
  assign m_rd_data  = s_rd_data;

  always_comb begin
    for (int m = 0; m < N; m++) begin
      m_req_ready[m] = s_valid && s_ready && (gnt_id == ID_W'(m));
      m_wr_done[m]   = s_wr_done  && (s_wr_id == ID_W'(m));
      m_rd_valid[m]  = s_rd_valid && (s_rd_id == ID_W'(m));
    end
  end

endmodule
