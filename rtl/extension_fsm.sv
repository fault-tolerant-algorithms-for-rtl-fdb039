// extension_fsm: the dormant/passive/active machine that connects the
// resynchronization routine to the main routine (the paper's "extension of
// the core routine" figure).
//
// When the resynchronization machine is in resync (a resynchronization point
// has been observed locally) the node goes from dormant to passive and resets
// its join and sleep->waking flags. From passive it goes to active when it
// memorizes >= f+1 nodes in sleep->waking, a sign that others still run the
// basic cycle. From passive or active it falls back to dormant once it is no
// longer in resync. The timeouts (T7, passive) and (T6, active), retriggered
// on the switch to their states, feed condition * of the main routine, which
// lets a recovering node join early (T6, from active) or late (T7).
// One state register, updated every cycle. After rst_n the machine is
// dormant (this design's choice).
// Every machine gets the node's whole timeout bundle (timeouts_t) and reads
// only its own fields; lint reports the other bits of that input as unused.
module extension_fsm
  import fatal_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tick,
  input  timeouts_t  to,
  input  logic       in_resync,
  input  logic       f1_sleepwk,   // >= f+1 sleep->waking
  output ext_state_t state,
  output flags_t     clr,          // join and sleep->waking on dormant->passive
  output logic       t6_expired,
  output logic       t7_expired
);

  ext_state_t nxt;

  always_comb begin
    nxt = state;
    clr = '0;
    unique case (state)
      X_DORMANT: if (in_resync) begin
        nxt = X_PASSIVE;  clr.joined = 1'b1;  clr.sleepwk = 1'b1;
      end
      X_PASSIVE: begin
        if (!in_resync)      nxt = X_DORMANT;
        else if (f1_sleepwk) nxt = X_ACTIVE;
      end
      X_ACTIVE:  if (!in_resync) nxt = X_DORMANT;
      default:   nxt = X_DORMANT;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= X_DORMANT;
    else        state <= nxt;
  end

  watchdog_timer u_t6 (.clk, .rst_n, .tick,
    .retrig((nxt == X_ACTIVE) && (state != X_ACTIVE)), .to_val(to.t6), .expired(t6_expired));
  watchdog_timer u_t7 (.clk, .rst_n, .tick,
    .retrig((nxt == X_PASSIVE) && (state != X_PASSIVE)), .to_val(to.t7), .expired(t7_expired));

endmodule
