// fatal_pkg: types and constants shared by the FATAL pulse-synchronization node.
//
// The protocol is a set of small state machines per node. What a node sends to
// the others is not its full state but a 5-bit word: three bits name one of six
// communicated states of the main routine (recover, accept, join, propose,
// sleep->waking and "other"), one bit tells whether the resynchronization
// routine shows "supp" or "none", and one bit tells whether the initiator
// machine is in "init" or "wait". This split follows the paper; the numeric
// codes are this design's choice.
//
// Timeouts are counted in ticks of the node's local clock. The default values
// below solve the paper's timeout constraints for drift bound theta = 1.04,
// maximum channel delay d = 8 ticks, n = 5, f = 1 and T4 = 1.2 T3 (the paper
// sets T4 = alpha T3 with 1 <= alpha < (2 theta+1)/(theta^3+theta^2) = 1.396;
// alpha = 1.2 is this design's choice, so that a DARTS-triggered proposal
// after T3 comes 83 ticks before the T4 fallback). Each value was obtained by
// setting every timeout to the least value its inequality allows and raising
// T2 until all inequalities, including the one on
// lambda = sqrt((25*theta-9)/(25*theta)), hold; values are rounded up to
// whole ticks. theta, d and the resulting numbers are this
// design's choice: the paper gives the constraints, not the numbers.
// DEFAULT_TIMEOUTS is the parameter default of fatal_node and fatal_system;
// lint of a module that does not use it reports it as an unused parameter.
package fatal_pkg;

  // Width of every watchdog counter and timeout register.
  localparam int unsigned TW = 20;
  typedef logic [TW-1:0] tval_t;

  // Main routine (Fig. 2 of the paper), local states.
  typedef enum logic [2:0] {
    C_READY    = 3'd0,
    C_PROPOSE  = 3'd1,
    C_ACCEPT   = 3'd2,
    C_SLEEP    = 3'd3,
    C_SLEEP_WK = 3'd4,  // "sleep -> waking"
    C_WAKING   = 3'd5,
    C_RECOVER  = 3'd6,
    C_JOIN     = 3'd7
  } core_state_t;

  // Communicated signal of the main routine: six values.
  typedef enum logic [2:0] {
    S_OTHER   = 3'd0,
    S_RECOVER = 3'd1,
    S_ACCEPT  = 3'd2,
    S_JOIN    = 3'd3,
    S_PROPOSE = 3'd4,
    S_SLEEPWK = 3'd5
  } core_sig_t;

  // trust / suspect machine (Fig. 2, bottom left).
  typedef enum logic {SU_TRUST = 1'b0, SU_SUSPECT = 1'b1} susp_state_t;

  // dormant / passive / active machine (Fig. 3).
  typedef enum logic [1:0] {
    X_DORMANT = 2'd0,
    X_PASSIVE = 2'd1,
    X_ACTIVE  = 2'd2
  } ext_state_t;

  // wait / init machine (Fig. 4, left).
  typedef enum logic {RI_WAIT = 1'b0, RI_INIT = 1'b1} rinit_state_t;

  // none / supp j / supp->resync / resync machine (Fig. 4, right). The index j
  // of "supp j" is kept in a separate register.
  typedef enum logic [1:0] {
    RS_NONE     = 2'd0,
    RS_SUPP     = 2'd1,
    RS_SUPP_RES = 2'd2,  // "supp -> resync"
    RS_RESYNC   = 2'd3
  } rsupp_state_t;

  // Word carried by every channel from a sender to a receiver.
  typedef struct packed {
    logic      init;  // 1: initiator machine in "init", 0: "wait"
    logic      supp;  // 1: resync machine shows "supp", 0: "none"
    core_sig_t core;  // communicated state of the main routine
  } chan_word_t;

  // Kinds of memory flag kept per sender.
  typedef struct packed {
    logic recover;
    logic accept;
    logic joined;
    logic propose;
    logic sleepwk;
    logic supp;
  } flags_t;

  // All durations used by one node, in local-clock ticks.
  typedef struct packed {
    tval_t t1;      // (T1, accept)
    tval_t tsleep;  // ((theta+1)T1, sleep)
    tval_t t2;      // (T2, accept)
    tval_t t3;      // (T3, ready)
    tval_t t4;      // (T4, ready)
    tval_t t5;      // (T5, propose)
    tval_t t6;      // (T6, active)
    tval_t t7;      // (T7, passive)
    tval_t tsus;    // (2 theta d, suspect)
    tval_t tsupp;   // (2 theta d, supp j)
    tval_t tsr;     // (4 theta d, supp -> resync)
    tval_t r1;      // (R1, supp -> resync)
    tval_t r2;      // (R2, supp j)
    tval_t r3_lo;   // R3 uniform on [r3_lo, r3_lo + r3_span]
    tval_t r3_span;
    tval_t ty;      // (T_y, pulse) of the DARTS coupling
  } timeouts_t;

  // theta = 1.04, d = 8 ticks, n = 5, f = 1, T4 = 1.2 T3 (see header).
  //   T1 = 4 theta d                        T2 from the fixed point (1300.3)
  //   T6 = theta((theta+1)T1 + T2 + 6d)     T3, T5 = least values allowed
  //   T7, R1 = least values allowed         R2 = 2 theta (R1 + (theta+2)T1 + T2/theta
  //                                                  + (8 theta+9)d)(n-f)/(1-lambda)
  //   R3 on [theta(R2+3d), theta(R2+3d) + 8(1-lambda)R2]
  // T_y depends on DARTS precision figures the paper leaves open; 64 ticks is
  // this design's choice.
  localparam timeouts_t DEFAULT_TIMEOUTS = '{
    t1: 20'd34, tsleep: 20'd68, t2: 20'd1301, t3: 20'd416, t4: 20'd499,
    t5: 20'd478, t6: 20'd1473, t7: 20'd5005, tsus: 20'd17, tsupp: 20'd17,
    tsr: 20'd34, r1: 20'd5306, r2: 20'd295425, r3_lo: 20'd307266,
    r3_span: 20'd452336, ty: 20'd64
  };

  // Map a local core state to the communicated signal.
  function automatic core_sig_t core_signal(core_state_t s);
    case (s)
      C_RECOVER:  return S_RECOVER;
      C_ACCEPT:   return S_ACCEPT;
      C_JOIN:     return S_JOIN;
      C_PROPOSE:  return S_PROPOSE;
      C_SLEEP_WK: return S_SLEEPWK;
      default:    return S_OTHER;
    endcase
  endfunction

endpackage
