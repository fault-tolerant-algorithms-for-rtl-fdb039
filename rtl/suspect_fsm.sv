// suspect_fsm: the two-state trust/suspect machine that runs beside the main
// routine (bottom left of the paper's core routine figure).
//
// A node in ready that memorizes >= f+1 nodes in accept switches to suspect;
// as soon as it is no longer in ready it returns to trust. The timeout
// (2 theta d, suspect) is retriggered on the switch to suspect; the main
// routine leaves ready for recover when this timeout has expired while the
// node is still in suspect (and condition * does not hold).
// One state register, updated every cycle; "in ready" reads the main
// routine's state register. After rst_n the machine is in trust (this
// design's choice).
// Every machine gets the node's whole timeout bundle (timeouts_t) and reads
// only its own fields; lint reports the other bits of that input as unused.
module suspect_fsm
  import fatal_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  timeouts_t   to,
  input  logic        f1_accept,    // >= f+1 accept
  input  logic        in_ready,
  output susp_state_t state,
  output logic        sus_expired   // (2 theta d, suspect)
);

  susp_state_t nxt;

  always_comb begin
    nxt = state;
    unique case (state)
      SU_TRUST:   if (f1_accept && in_ready) nxt = SU_SUSPECT;
      SU_SUSPECT: if (!in_ready)             nxt = SU_TRUST;
      default:    nxt = SU_TRUST;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= SU_TRUST;
    else        state <= nxt;
  end

  watchdog_timer u_tsus (
    .clk, .rst_n, .tick,
    .retrig ((nxt == SU_SUSPECT) && (state != SU_SUSPECT)),
    .to_val (to.tsus),
    .expired(sus_expired)
  );

endmodule
