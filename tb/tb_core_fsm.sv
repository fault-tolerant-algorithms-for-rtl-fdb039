// tb_core_fsm: directed test of the main routine with short timeouts
// (T1 = 4, (theta+1)T1 = 6, T2 = 30, T3 = 8, T4 = 12, T5 = 10 ticks, a tick
// every cycle). The testbench drives the threshold and neighbour-machine
// inputs and checks every transition of the routine, the flag resets
// requested on each switch, and the dwell times: a timeout of T ticks
// retriggered on the switch to a state lets the machine leave that state
// T+2 cycles later (T+1 cycles until the expiry flag is seen, one cycle for
// the switch). Covered: recover->join (* by >= f+1 join and by T6 in active),
// join->recover (dormant), join->propose, propose->recover (T5),
// propose->accept, accept->sleep, accept->recover (T1 without n-f accept),
// sleep->sleep->waking->waking, waking->ready (T2), waking->recover,
// ready->propose by T4, by T3 with the DARTS flag and by f+1 propose,
// ready->join, ready->recover (suspect) and its blocking by *.
module tb_core_fsm;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic f1_propose, f1_join, nf_jpa, nf_pa, nf_accept, f1_ra, darts_flag;
  logic in_suspect, sus_expired, in_dormant, in_active, t6_expired, t7_expired;
  core_state_t state;
  flags_t clr;
  logic clr_darts;
  int checks = 0, failures = 0;
  timeouts_t to;

  always #5 clk = ~clk;

  core_fsm dut (.clk, .rst_n, .tick(1'b1), .to, .f1_propose, .f1_join, .nf_jpa, .nf_pa,
                .nf_accept, .f1_ra, .darts_flag, .in_suspect, .sus_expired, .in_dormant,
                .in_active, .t6_expired, .t7_expired, .state, .clr, .clr_darts);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (state=%s)", what, state.name()); end
  endtask

  task automatic idle_inputs();
    {f1_propose, f1_join, nf_jpa, nf_pa, nf_accept, f1_ra, darts_flag} = '0;
    {in_suspect, sus_expired, in_active, t6_expired, t7_expired} = '0;
    in_dormant = 1'b0;
  endtask

  // One clock: sample the combinational flag-reset request, then step.
  flags_t last_clr;
  logic   last_clr_darts;
  task automatic step();
    #1 last_clr = clr; last_clr_darts = clr_darts;
    @(posedge clk); #1;
    @(negedge clk);
  endtask

  // Step until the state changes; return the number of cycles.
  task automatic run_until_change(int max, output int n);
    core_state_t s0;
    s0 = state;
    n = 0;
    while (state == s0 && n < max) begin step(); n++; end
  endtask

  // From propose, run a fault-free basic cycle back to ready.
  task automatic cycle_to_ready();
    int n;
    nf_pa = 1'b1; nf_accept = 1'b1;
    run_until_change(5, n);
    check(state == C_ACCEPT, "propose -> accept");
    nf_pa = 1'b0;
    run_until_change(50, n);   // sleep
    run_until_change(50, n);   // sleep->waking
    run_until_change(50, n);   // waking
    run_until_change(50, n);   // ready
    check(state == C_READY, "basic cycle back to ready");
    idle_inputs();
  endtask

  initial begin
    int n;
    to = DEFAULT_TIMEOUTS;
    to.t1 = 20'd4; to.tsleep = 20'd6; to.t2 = 20'd30; to.t3 = 20'd8; to.t4 = 20'd12; to.t5 = 20'd10;
    idle_inputs();
    in_dormant = 1'b1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(state == C_RECOVER, "recover after reset");
    f1_join = 1'b1;
    step(); check(state == C_RECOVER, "* needs a non-dormant extension machine");
    in_dormant = 1'b0;
    step();
    check(state == C_JOIN, "recover -> join on >= f+1 join");
    check(last_clr == flags_t'(6'b010100), "recover -> join resets propose and accept");
    f1_join = 1'b0; nf_jpa = 1'b1; in_dormant = 1'b1;
    step(); check(state == C_RECOVER, "join -> recover when dormant (wins over n-f)");
    in_dormant = 1'b0; in_active = 1'b1; t6_expired = 1'b1; nf_jpa = 1'b0;
    step(); check(state == C_JOIN, "recover -> join on (T6, active)");
    in_active = 1'b0; t6_expired = 1'b0; nf_jpa = 1'b1;
    step(); check(state == C_PROPOSE, "join -> propose on >= n-f join/propose/accept");
    nf_jpa = 1'b0;
    run_until_change(100, n);
    check(state == C_RECOVER && n == int'(to.t5) + 2, $sformatf("propose -> recover by T5 after %0d", n));
    t7_expired = 1'b1; step(); check(state == C_JOIN, "recover -> join on (T7, passive)");
    t7_expired = 1'b0; nf_jpa = 1'b1; step(); nf_jpa = 1'b0;
    // propose -> accept and the timed basic cycle
    nf_pa = 1'b1; nf_accept = 1'b1;
    step();
    check(state == C_ACCEPT && last_clr == flags_t'(6'b010000), "propose -> accept resets accept");
    nf_pa = 1'b0;
    run_until_change(100, n);
    check(state == C_SLEEP && n == int'(to.t1) + 2, $sformatf("accept -> sleep after %0d", n));
    run_until_change(100, n);
    check(state == C_SLEEP_WK && n == int'(to.tsleep) + 2, $sformatf("sleep -> sleep->waking after %0d", n));
    step();
    check(state == C_WAKING && last_clr == flags_t'(6'b110000), "sleep->waking -> waking resets accept, recover");
    run_until_change(100, n);
    // T2 runs from the switch to accept: T2+2 = 6 + 8 + 1 + n cycles
    check(state == C_READY && n + 15 == int'(to.t2) + 2, $sformatf("waking -> ready, T2 total %0d", n + 15));
    check(last_clr == flags_t'(6'b001100) && last_clr_darts, "waking -> ready resets join, propose, DARTS flag");
    nf_accept = 1'b0;
    // ready -> propose by T4 alone
    run_until_change(100, n);
    check(state == C_PROPOSE && n == int'(to.t4) + 2, $sformatf("ready -> propose by T4 after %0d", n));
    check(last_clr == flags_t'(6'b010000), "ready -> propose resets accept");
    cycle_to_ready();
    // T3 with DARTS flag
    darts_flag = 1'b1;
    run_until_change(100, n);
    check(state == C_PROPOSE && n == int'(to.t3) + 2, $sformatf("ready -> propose by T3 and DARTS after %0d", n));
    cycle_to_ready();
    // f+1 propose
    step(); step();
    f1_propose = 1'b1; step();
    check(state == C_PROPOSE, "ready -> propose on >= f+1 propose");
    cycle_to_ready();
    // ready -> join
    f1_join = 1'b1; step();
    check(state == C_JOIN && last_clr == flags_t'(6'b010000), "ready -> join resets accept");
    f1_join = 1'b0; nf_jpa = 1'b1; step(); nf_jpa = 1'b0;
    // accept without n-f accept -> recover
    nf_pa = 1'b1; step(); nf_pa = 1'b0;
    check(state == C_ACCEPT, "accept again");
    run_until_change(100, n);
    check(state == C_RECOVER && n == int'(to.t1) + 2, $sformatf("accept -> recover by T1 after %0d", n));
    // waking -> recover on f+1 recover/accept
    t7_expired = 1'b1; step(); t7_expired = 1'b0;
    nf_jpa = 1'b1; step(); nf_jpa = 1'b0;
    nf_pa = 1'b1; nf_accept = 1'b1; step(); nf_pa = 1'b0;
    run_until_change(100, n); run_until_change(100, n); step();
    check(state == C_WAKING, "in waking");
    f1_ra = 1'b1; step(); f1_ra = 1'b0;
    check(state == C_RECOVER, "waking -> recover on >= f+1 recover or accept");
    // ready -> recover through the suspect timeout, blocked by *
    t7_expired = 1'b1; step(); t7_expired = 1'b0;
    nf_jpa = 1'b1; step(); nf_jpa = 1'b0;
    cycle_to_ready();
    in_suspect = 1'b1; sus_expired = 1'b1; in_active = 1'b1; t6_expired = 1'b1;
    step(); check(state == C_READY, "suspect timeout does not act while * holds");
    in_active = 1'b0; t6_expired = 1'b0;
    step(); check(state == C_RECOVER, "ready -> recover on suspect timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
