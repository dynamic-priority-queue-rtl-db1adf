// dpq_replenish_timer: replenishment period counter of the DPQ arbiter.
//
// The replenishment period Rp is a fixed number of clock cycles in which every
// master may spend its budget once. Following Eq. (1) of the DPQ scheme it is
// RP = ceil((WcRdCmdWd + WcWrCmdWd)/2) * sum(Budget); the parent computes it
// with dpq_pkg::rp_cycles and passes it in. The counter runs freely from reset,
// independently of traffic and refresh, so period boundaries fall at fixed
// multiples of RP (the analysis of the scheme counts positions inside a
// period in exactly that way).
//
// Interface and timing: `replenish` is high for the last cycle of every
// period (crt_pos == RP-1); budget counters reload on that edge, so the new
// period starts on the next cycle. `crt_pos` is the position inside the
// current period.
module dpq_replenish_timer #(
  parameter int unsigned RP    = 480,               // period in cycles
  parameter int unsigned POS_W = $clog2(RP + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             replenish,
  output logic [POS_W-1:0] crt_pos
);

  always_ff @(posedge clk) begin
    if (!rst_n)                       crt_pos <= '0;
    else if (crt_pos == POS_W'(RP-1)) crt_pos <= '0;
    else                              crt_pos <= crt_pos + 1'b1;
  end

  assign replenish = (crt_pos == POS_W'(RP-1));

endmodule
