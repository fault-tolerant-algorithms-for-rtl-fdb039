// watchdog_timer: timeout port (T, s) of a node, as drawn in the paper's
// watchdog figure.
//
// An up-counter advances on every tick of the node's local clock (tick is a
// one-cycle enable). A comparator checks Ct >= TO and a flip-flop turns the
// result into a stable "expired" level. Retriggering clears both the counter
// and the flip-flop; the owning state machine retriggers the timer in the cycle
// it switches to the state s the timeout belongs to. The counter saturates at
// its maximum, so a timer that is never retriggered stays expired.
//
// Timing: with retrig in cycle c and a tick in every later cycle, expired goes
// high at the end of the cycle in which the T-th tick is counted, i.e. it is
// visible T+1 cycles after retrig. A TO of 0 expires one cycle after retrig.
// The paper resets the counter asynchronously; here the retrigger is
// synchronous, which is this design's choice.
//
// RST_EXPIRED chooses the value after rst_n: 0 starts a fresh count, 1 starts
// expired (used for timeouts that should not block anything at power-up).
module watchdog_timer
  import fatal_pkg::*;
#(
  parameter bit RST_EXPIRED = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  tick,     // tick of the local clock
  input  logic  retrig,   // watchdog retrigger
  input  tval_t to_val,   // timeout register contents
  output logic  expired   // watchdog expired
);

  tval_t ct;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ct      <= RST_EXPIRED ? '1 : '0;
      expired <= RST_EXPIRED;
    end else if (retrig) begin
      ct      <= '0;
      expired <= 1'b0;
    end else begin
      if (tick && ct != '1) ct <= ct + 1'b1;
      expired <= (ct >= to_val);
    end
  end

endmodule
