// fatal_node: one node of the FATAL pulse synchronization protocol.
//
// The node receives, from every node j (itself included), the 5-bit state word
// S_{i,j}, keeps a set of memory flags per sender (remote_flag_unit), combines
// them in threshold modules (>= f+1 and >= n-f conditions) and runs five state
// machines concurrently:
//   core_fsm         main routine; a pulse is the switch to accept
//   suspect_fsm      trust/suspect check while in ready
//   extension_fsm    dormant/passive/active link to resynchronization points
//   resync_init_fsm  wait/init, driven by the randomized timeout R3
//   resync_supp_fsm  none/supp j/supp->resync/resync agreement
// The machines talk to each other only through their state registers, as in
// the paper. A local memory flag records the DARTS_i signal; the
// pulse_coupler produces PULSE_i and the force-marking request.
//
// Interface: tick is the local clock of the node (one-cycle enable per tick,
// standing in for the ring oscillator); all timeouts count these ticks. tx is
// the word the node sends on all its channels. Timing: a word arriving at rx
// sets a flag one cycle later; the state machines react in the cycle after
// that; their new state appears on tx at once (tx is a function of the state
// registers).
//
// Parameters: N nodes, up to F < N/3 faulty; TO holds all timeouts; SEED
// seeds the node's random source and must differ between nodes.
module fatal_node
  import fatal_pkg::*;
#(
  parameter int unsigned N    = 5,
  parameter int unsigned F    = 1,
  parameter timeouts_t   TO   = DEFAULT_TIMEOUTS,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               tick,
  input  logic               darts,         // DARTS_i from the node's DARTS clock
  input  chan_word_t [N-1:0] rx,            // S_{i,j}, j = 0..N-1
  output chan_word_t         tx,            // S_i
  output logic               pulse,         // PULSE_i to the DARTS clock
  output logic               force_mark,    // force a marked DARTS tick
  output core_state_t        core_state,
  output susp_state_t        susp_state,
  output ext_state_t         ext_state,
  output rinit_state_t       rinit_state,
  output rsupp_state_t       rsupp_state
);

  // ---------------- memory flags and thresholds ----------------
  flags_t       clr, clr_core, clr_ext, clr_rs;
  flags_t       fl [N];
  logic [N-1:0] v_prop, v_join, v_acc, v_rec, v_swk, v_supp, v_init;

  assign clr = clr_core | clr_ext | clr_rs;

  for (genvar j = 0; j < N; j++) begin : g_flags
    remote_flag_unit u_flags (.clk, .rst_n, .obs(rx[j]), .clr, .flags(fl[j]));
    assign v_prop[j] = fl[j].propose;
    assign v_join[j] = fl[j].joined;
    assign v_acc[j]  = fl[j].accept;
    assign v_rec[j]  = fl[j].recover;
    assign v_swk[j]  = fl[j].sleepwk;
    assign v_supp[j] = fl[j].supp;
    assign v_init[j] = rx[j].init;
  end

  logic f1_propose, f1_join, nf_jpa, nf_pa, nf_accept, f1_ra, f1_accept, f1_sleepwk, nf_supp;

  threshold_gate #(.N(N), .K(F+1)) u_th_f1p  (.in(v_prop),                  .ge(f1_propose));
  threshold_gate #(.N(N), .K(F+1)) u_th_f1j  (.in(v_join),                  .ge(f1_join));
  threshold_gate #(.N(N), .K(N-F)) u_th_nfj  (.in(v_join | v_prop | v_acc), .ge(nf_jpa));
  threshold_gate #(.N(N), .K(N-F)) u_th_nfpa (.in(v_prop | v_acc),          .ge(nf_pa));
  threshold_gate #(.N(N), .K(N-F)) u_th_nfa  (.in(v_acc),                   .ge(nf_accept));
  threshold_gate #(.N(N), .K(F+1)) u_th_f1ra (.in(v_rec | v_acc),           .ge(f1_ra));
  threshold_gate #(.N(N), .K(F+1)) u_th_f1a  (.in(v_acc),                   .ge(f1_accept));
  threshold_gate #(.N(N), .K(F+1)) u_th_f1s  (.in(v_swk),                   .ge(f1_sleepwk));
  threshold_gate #(.N(N), .K(N-F)) u_th_nfs  (.in(v_supp),                  .ge(nf_supp));

  // DARTS_i memory flag.
  logic darts_flag, clr_darts;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) darts_flag <= 1'b0;
    else        darts_flag <= (darts_flag && !clr_darts) || darts;
  end

  // ---------------- state machines ----------------
  logic sus_expired, t6_expired, t7_expired, in_resync, sig_supp;
  logic [$clog2(N)-1:0] supp_idx;

  core_fsm u_core (
    .clk, .rst_n, .tick, .to(TO),
    .f1_propose, .f1_join, .nf_jpa, .nf_pa, .nf_accept, .f1_ra, .darts_flag,
    .in_suspect (susp_state == SU_SUSPECT),
    .sus_expired,
    .in_dormant (ext_state == X_DORMANT),
    .in_active  (ext_state == X_ACTIVE),
    .t6_expired, .t7_expired,
    .state(core_state), .clr(clr_core), .clr_darts
  );

  suspect_fsm u_susp (
    .clk, .rst_n, .tick, .to(TO),
    .f1_accept, .in_ready(core_state == C_READY),
    .state(susp_state), .sus_expired
  );

  extension_fsm u_ext (
    .clk, .rst_n, .tick, .to(TO),
    .in_resync, .f1_sleepwk,
    .state(ext_state), .clr(clr_ext), .t6_expired, .t7_expired
  );

  resync_init_fsm #(.SEED(SEED)) u_rinit (
    .clk, .rst_n, .tick, .to(TO), .state(rinit_state)
  );

  resync_supp_fsm #(.N(N), .F(F)) u_rsupp (
    .clk, .rst_n, .tick, .to(TO),
    .init_obs(v_init), .nf_supp,
    .state(rsupp_state), .idx(supp_idx), .clr(clr_rs), .sig_supp, .in_resync
  );

  // ---------------- output word and DARTS coupling ----------------
  assign tx.init = (rinit_state == RI_INIT);
  assign tx.supp = sig_supp;
  assign tx.core = core_signal(core_state);

  core_state_t core_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) core_q <= C_RECOVER;
    else        core_q <= core_state;
  end

  pulse_coupler u_coupler (
    .clk, .rst_n, .tick, .ty(TO.ty),
    .accept_entry(core_state == C_ACCEPT && core_q != C_ACCEPT),
    .darts, .pulse, .force_mark
  );

  logic unused_idx;
  assign unused_idx = ^supp_idx;

endmodule
