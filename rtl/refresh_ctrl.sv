// refresh_ctrl: user-controlled SDRAM refresh at exact tREFI intervals.
//
// A controller that schedules refresh by itself does so at tREFI plus or
// minus a few cycles, depending on the traffic in flight, which a timing
// analysis cannot predict. This circuit takes refresh over: a free-running
// timer counts TREFI cycles; GUARD cycles before it expires the circuit
// closes all channels into the controller (`hold`), so the controller's
// command and data FIFOs run empty; when the timer expires it requests a
// refresh as soon as the memory path is idle, and keeps `hold` until the
// controller acknowledges. The paper describes this function (Sec. 6); the
// FSM, the guard length and the handshake are this design's.
//
// Timing: the timer never stops, so refresh requests start exactly TREFI
// cycles apart as long as the path is idle at expiry; `late` pulses when it
// was not (the guard was too short). local_refresh_req is held until
// local_refresh_ack. Defaults: TREFI = 975 cycles is 7.8 us of DDR2 at the
// paper's 125 MHz (7.8 us is the DDR2 standard value, not printed in the
// paper); GUARD = 24 cycles is this design's choice, enough to drain one
// line access and its read data.
module refresh_ctrl #(
  parameter int unsigned TREFI = 975,
  parameter int unsigned GUARD = 24,
  parameter int unsigned CNT_W = $clog2(TREFI + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic path_idle,          // nothing in flight towards the SDRAM
  output logic hold,               // close all channels to the controller
  output logic local_refresh_req,
  input  logic local_refresh_ack,
  output logic late                // expiry found the path busy
);

  typedef enum logic [1:0] {COUNT, WAIT_IDLE, REQUEST} state_e;

  state_e           state;
  logic [CNT_W-1:0] tcnt;
  logic             expire, guard_window;

  assign expire       = (tcnt == CNT_W'(TREFI-1));
  assign guard_window = (tcnt >= CNT_W'(TREFI-1-GUARD));

  always_ff @(posedge clk) begin
    if (!rst_n)      tcnt <= '0;
    else if (expire) tcnt <= '0;
    else             tcnt <= tcnt + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= COUNT;
      late  <= 1'b0;
    end else begin
      late <= 1'b0;
      unique case (state)
        COUNT:
          if (expire) begin
            state <= path_idle ? REQUEST : WAIT_IDLE;
            late  <= !path_idle;
          end
        WAIT_IDLE:
          if (path_idle) state <= REQUEST;
        REQUEST:
          if (local_refresh_ack) state <= COUNT;
        default: state <= COUNT;
      endcase
    end
  end

  assign local_refresh_req = (state == REQUEST);
  assign hold              = guard_window || (state != COUNT);

endmodule
