// core_fsm: the main routine of a FATAL node (the paper's core routine figure,
// whose fault-free part is the basic cycle).
//
// States: ready, propose, accept, sleep, sleep->waking, waking, recover, join.
// A pulse is the switch to accept. In the basic cycle a node in ready moves to
// propose when (T3 expired and the DARTS flag is set) or T4 expired or it
// memorizes >= f+1 nodes in propose; it moves to accept on >= n-f nodes in
// propose or accept; after T1 with >= n-f accept memorized it goes to sleep,
// after (theta+1)T1 to sleep->waking, at once to waking, and after (T2, accept)
// back to ready. The consistency checks send the node to recover: T1 expiring
// with fewer than n-f accept, >= f+1 recover or accept seen while waking, T5
// expiring in propose, and the suspect timeout in ready. From recover the node
// goes to join on condition *, and from join to propose on >= n-f join,
// propose or accept (or back to recover when the extension machine is
// dormant). Guards, timeouts and flag resets are those of the paper's figure.
//
//   * = ((T6, active) and in active)
//       or (((T7, passive) or >= f+1 join) and not in dormant)
//
// Flag resets requested on the switch (clr, one cycle):
//   ready->propose, ready->join, propose->accept : accept
//   sleep->waking -> waking                       : accept, recover
//   waking->ready                                 : join, propose, DARTS flag
//   recover->join                                 : propose, accept
//
// Implementation: one state register updated every clk cycle; the "in s"
// conditions of the paper read this register (the loop-back S_{i,i} is one
// cycle). Each timeout is a watchdog_timer retriggered in the cycle the
// machine switches to the timeout's state. Where several guards hold at once
// the paper allows any fixed order; here the recover checks win over leaving
// waking and join, and propose wins over join and recover in ready. After
// rst_n the machine is in recover, which the paper does not prescribe (the
// protocol stabilizes from any state).
// Every machine gets the node's whole timeout bundle (timeouts_t) and reads
// only its own fields; lint reports the other bits of that input as unused.
module core_fsm
  import fatal_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  timeouts_t   to,
  // thresholds over the memory flags
  input  logic        f1_propose,     // >= f+1 propose
  input  logic        f1_join,        // >= f+1 join
  input  logic        nf_jpa,         // >= n-f join or propose or accept
  input  logic        nf_pa,          // >= n-f propose or accept
  input  logic        nf_accept,      // >= n-f accept
  input  logic        f1_ra,          // >= f+1 recover or accept
  input  logic        darts_flag,     // memory flag of DARTS_i
  // other machines of the node
  input  logic        in_suspect,
  input  logic        sus_expired,    // (2 theta d, suspect)
  input  logic        in_dormant,
  input  logic        in_active,
  input  logic        t6_expired,     // (T6, active)
  input  logic        t7_expired,     // (T7, passive)
  output core_state_t state,
  output flags_t      clr,            // flag kinds to reset
  output logic        clr_darts       // reset the DARTS_i flag
);

  core_state_t nxt;
  logic t1_exp, ts_exp, t2_exp, t3_exp, t4_exp, t5_exp;
  logic star;

  assign star = (t6_expired && in_active) ||
                ((t7_expired || f1_join) && !in_dormant);

  always_comb begin
    nxt       = state;
    clr       = '0;
    clr_darts = 1'b0;
    unique case (state)
      C_READY: begin
        if ((t3_exp && darts_flag) || t4_exp || f1_propose) begin
          nxt = C_PROPOSE;  clr.accept = 1'b1;
        end else if (f1_join && !in_dormant) begin
          nxt = C_JOIN;     clr.accept = 1'b1;
        end else if (sus_expired && in_suspect && !star) begin
          nxt = C_RECOVER;
        end
      end
      C_PROPOSE: begin
        if (nf_pa) begin
          nxt = C_ACCEPT;   clr.accept = 1'b1;
        end else if (t5_exp) begin
          nxt = C_RECOVER;
        end
      end
      C_ACCEPT: begin
        if (t1_exp && nf_accept)  nxt = C_SLEEP;
        else if (t1_exp)          nxt = C_RECOVER;
      end
      C_SLEEP: begin
        if (ts_exp) nxt = C_SLEEP_WK;
      end
      C_SLEEP_WK: begin
        nxt = C_WAKING;  clr.accept = 1'b1;  clr.recover = 1'b1;
      end
      C_WAKING: begin
        if (f1_ra) begin
          nxt = C_RECOVER;
        end else if (t2_exp) begin
          nxt = C_READY;  clr.joined = 1'b1;  clr.propose = 1'b1;  clr_darts = 1'b1;
        end
      end
      C_RECOVER: begin
        if (star) begin
          nxt = C_JOIN;  clr.propose = 1'b1;  clr.accept = 1'b1;
        end
      end
      C_JOIN: begin
        if (in_dormant)  nxt = C_RECOVER;
        else if (nf_jpa) nxt = C_PROPOSE;
      end
      default: nxt = C_RECOVER;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= C_RECOVER;
    else        state <= nxt;
  end

  // Timeouts, retriggered on the switch to their state.
  logic enter_accept, enter_sleep, enter_ready, enter_propose;
  assign enter_accept  = (nxt == C_ACCEPT)  && (state != C_ACCEPT);
  assign enter_sleep   = (nxt == C_SLEEP)   && (state != C_SLEEP);
  assign enter_ready   = (nxt == C_READY)   && (state != C_READY);
  assign enter_propose = (nxt == C_PROPOSE) && (state != C_PROPOSE);

  watchdog_timer u_t1 (.clk, .rst_n, .tick, .retrig(enter_accept),  .to_val(to.t1),     .expired(t1_exp));
  watchdog_timer u_t2 (.clk, .rst_n, .tick, .retrig(enter_accept),  .to_val(to.t2),     .expired(t2_exp));
  watchdog_timer u_ts (.clk, .rst_n, .tick, .retrig(enter_sleep),   .to_val(to.tsleep), .expired(ts_exp));
  watchdog_timer u_t3 (.clk, .rst_n, .tick, .retrig(enter_ready),   .to_val(to.t3),     .expired(t3_exp));
  watchdog_timer u_t4 (.clk, .rst_n, .tick, .retrig(enter_ready),   .to_val(to.t4),     .expired(t4_exp));
  watchdog_timer u_t5 (.clk, .rst_n, .tick, .retrig(enter_propose), .to_val(to.t5),     .expired(t5_exp));

endmodule
