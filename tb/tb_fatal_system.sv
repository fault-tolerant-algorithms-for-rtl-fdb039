// tb_fatal_system: end-to-end test of a 5-node FATAL system at its default
// parameters (the same timeouts a chip would use; no parameter overrides).
//
// Environment:
//  - Local clocks: node i ticks every cycle except one cycle in SKIP[i]
//    (node 0 never skips), giving rates 1, 0.99, 0.98, 0.971 and 0.964,
//    inside the drift bound theta = 1.04.
//  - DARTS model: when enabled, DARTS_i rises 1740 cycles after the rising
//    edge of PULSE_i (the DARTS clocks run in step, so the same real time for
//    every node; for the fastest node this is after T3 and before T4 of the
//    following ready state) and falls 10 cycles into the next PULSE_i (the
//    marked tick). A node's
//    DARTS_i can be held low ("stuck") to provoke force_mark.
//  - Byzantine node: node 4's words to every other node are replaced by
//    random words, redrawn independently per receiver. The same mechanism
//    feeds node 3 random words from every sender in phase 5.
//
// Phases and checks:
//  1. Reset into recover / dormant. No pulse may occur before the first
//     resynchronization point, which needs a node's random timeout R3 to
//     expire (about 0.3 to 0.76 million cycles). After it, all nodes must
//     join (after T7) and pulse together.
//  2. No DARTS: 5 rounds; proposals come from T4 or from >= f+1 propose;
//     force_mark follows every pulse (DARTS_i never falls).
//  3. DARTS on: 6 rounds; proposals come from T3 with the DARTS flag; no
//     force_mark after the first round. Then node 2's DARTS_i is stuck low for
//     3 rounds and force_mark must come from node 2 only.
//  4. Node 4 Byzantine: 8 rounds in which nodes 0..3 keep pulsing together.
//  5. Two healthy rounds (node 4's stale flags are cleared), then a
//     transient fault: node 3 receives random words from everybody for 3
//     rounds, then its inputs are healthy again. Nodes 0, 1, 2 and 4 must keep
//     pulsing; node 3 must fall back to recover and, at a later
//     resynchronization point of nodes 0..2, join and pulse with the others
//     again. The corrupted init words restart node 3's (R2, supp j) timers,
//     so this may take several resynchronization points; the test allows
//     1.1 million cycles (R2 plus one R3 span). With the fixed seed node 3
//     rejoins at about cycle 689000.
//  6. Uneven channel delays: every channel r <- s is replaced by a copy of
//     tx[s] delayed by 2 + ((3r + s) mod 4) cycles (4 to 7 cycles end to end,
//     below d = 8 ticks of the slowest node). 6 rounds; the skew must become
//     nonzero and stay within the bound. The whole run lasts about 704000
//     cycles.
// In every round all correct nodes must pulse once, within a skew of
// 2 theta d = 17 cycles (the paper's stabilization point allows 2d), and the
// time between rounds must lie in [1626, 1939] cycles, the accuracy bounds
// (T2+T3)/theta - 3d and theta (T2+T4+8d) of the default timeouts.
// Every mechanism counted below must have happened at least once.
module tb_fatal_system;
  import fatal_pkg::*;
  localparam int N = 5;
  localparam int SKEW_MAX = 17;
  localparam int PER_MIN = 1626, PER_MAX = 1939;
  localparam int DARTS_RISE = 1740;
  localparam int SKIP[N] = '{0, 100, 50, 35, 28};

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] tick, darts, pulse, force_mark;
  logic [N-1:0][N-1:0] fault_en;
  chan_word_t [N-1:0][N-1:0] fault_word;
  chan_word_t [N-1:0] tx;
  core_state_t [N-1:0] core_state;
  susp_state_t [N-1:0] susp_state;
  ext_state_t [N-1:0] ext_state;
  rinit_state_t [N-1:0] rinit_state;
  rsupp_state_t [N-1:0] rsupp_state;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fatal_system dut (.clk, .rst_n, .tick, .darts, .fault_en, .fault_word, .pulse, .force_mark,
                    .tx, .core_state, .susp_state, .ext_state, .rinit_state, .rsupp_state);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- environment ----------------
  longint cyc = 0;
  int skip_cnt[N];
  logic darts_on = 1'b0, byz_on = 1'b0, cut3 = 1'b0;
  logic [N-1:0] darts_stuck = '0;
  int since_pulse[N];
  int pulse_high[N];

  always_ff @(posedge clk) cyc <= cyc + 1;

  always_comb begin
    for (int i = 0; i < N; i++) tick[i] = !(SKIP[i] != 0 && skip_cnt[i] == SKIP[i] - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        skip_cnt[i] <= 0; since_pulse[i] <= 0; pulse_high[i] <= 0;
      end
      darts <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        skip_cnt[i] <= (SKIP[i] != 0 && skip_cnt[i] == SKIP[i] - 1) ? 0 : skip_cnt[i] + 1;
        pulse_high[i] <= pulse[i] ? pulse_high[i] + 1 : 0;
        if (pulse[i] && pulse_high[i] == 0) since_pulse[i] <= 0;
        else since_pulse[i] <= since_pulse[i] + 1;
        if (!darts_on || darts_stuck[i]) darts[i] <= 1'b0;
        else if (since_pulse[i] == DARTS_RISE) darts[i] <= 1'b1;
        else if (pulse[i] && pulse_high[i] == 10) darts[i] <= 1'b0;
      end
    end
  end

  // Byzantine words of node 4, redrawn with probability 1/16 per cycle. In
  // the uneven-delay phase every channel r <- s instead carries tx[s] delayed
  // by CH_DELAY + EXTRA(r, s) cycles, rebuilt here from the tx outputs.
  localparam int CH_DELAY = 2;
  localparam int XMAX = 3;
  chan_word_t [N-1:0][CH_DELAY+XMAX-2:0] tx_hist;  // [k]: tx delayed k+1 cycles
  logic skew_on = 1'b0;

  function automatic int extra(int r, int s);
    return (3 * r + s) % (XMAX + 1);
  endfunction

  always_ff @(posedge clk) begin
    for (int s = 0; s < N; s++) begin
      tx_hist[s][0] <= tx[s];
      for (int k = 1; k <= CH_DELAY + XMAX - 2; k++) tx_hist[s][k] <= tx_hist[s][k-1];
    end
    for (int r = 0; r < N; r++) begin
      for (int s = 0; s < N; s++) begin
        fault_en[r][s] <= (byz_on && s == 4 && r != 4) || (cut3 && r == 3) || skew_on;
        if (skew_on)
          fault_word[r][s] <= tx_hist[s][CH_DELAY + extra(r, s) - 2];
        else if ($urandom_range(15) == 0) begin
          fault_word[r][s].init <= ($urandom_range(63) == 0);
          fault_word[r][s].supp <= 1'($urandom);
          fault_word[r][s].core <= core_sig_t'($urandom_range(5));
        end
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_r3_init = 0, n_resync_pt = 0, n_passive = 0, n_active = 0, n_join = 0;
  int n_rec3 = 0, n_rejoin3 = 0, n_rp012 = 0, rec3, rp0;
  longint cut_end;
  int n_prop_t4 = 0, n_prop_darts = 0, n_prop_relay = 0, n_recover = 0;
  int n_force[N], n_pulse[N];
  longint rise_cyc[N];
  logic [N-1:0] pulse_q = '0;
  core_state_t [N-1:0] core_q;
  rsupp_state_t [N-1:0] rs_q;
  ext_state_t [N-1:0] ext_q;
  rinit_state_t [N-1:0] ri_q;

  initial for (int i = 0; i < N; i++) begin n_force[i] = 0; n_pulse[i] = 0; rise_cyc[i] = 0; end

  always @(posedge clk) if (rst_n) begin
    pulse_q <= pulse; core_q <= core_state; rs_q <= rsupp_state; ext_q <= ext_state;
    ri_q <= rinit_state;
    for (int i = 0; i < N; i++) begin
      if (pulse[i] && !pulse_q[i]) begin n_pulse[i]++; rise_cyc[i] = cyc; end
      if (force_mark[i]) n_force[i]++;
      if (rinit_state[i] == RI_INIT && ri_q[i] != RI_INIT) n_r3_init++;
      if (rsupp_state[i] == RS_SUPP_RES && rs_q[i] != RS_SUPP_RES) begin
        n_resync_pt++;
        if (i < 3) n_rp012++;
      end
      if (ext_state[i] == X_PASSIVE && ext_q[i] != X_PASSIVE) n_passive++;
      if (ext_state[i] == X_ACTIVE && ext_q[i] != X_ACTIVE) n_active++;
      if (core_state[i] == C_JOIN && core_q[i] != C_JOIN) n_join++;
      if (core_state[i] == C_RECOVER && core_q[i] != C_RECOVER) begin
        n_recover++;
        if (i == 3) n_rec3++;
      end
      if (i == 3 && core_state[i] == C_PROPOSE && core_q[i] == C_JOIN) n_rejoin3++;
    end
  end

  // Why a node leaves ready for propose.
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_node[i].u_node.u_core.state == C_READY &&
          dut.g_node[i].u_node.u_core.nxt == C_PROPOSE) begin
        if (dut.g_node[i].u_node.u_core.f1_propose)      n_prop_relay++;
        else if (dut.g_node[i].u_node.u_core.t4_exp)     n_prop_t4++;
        else                                             n_prop_darts++;
      end
    end
  end

  // ---------------- rounds ----------------
  longint last_round = -1;

  // Wait for the next round of pulses among the nodes in w; check that each
  // pulses exactly once within SKEW_MAX and that the round period is in range.
  task automatic round(logic [N-1:0] w, string tag, int max_wait = 3000);
    int snap[N];
    longint t0, mn, mx;
    bit started;
    for (int i = 0; i < N; i++) snap[i] = n_pulse[i];
    started = 0;
    for (int c = 0; c < max_wait && !started; c++) begin
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) if (w[i] && n_pulse[i] != snap[i]) started = 1;
    end
    check(started, {tag, ": round started"});
    t0 = cyc;
    repeat (200) @(posedge clk);
    #1;
    mn = cyc; mx = 0;
    for (int i = 0; i < N; i++) if (w[i]) begin
      check(n_pulse[i] == snap[i] + 1, $sformatf("%s: node %0d pulsed once", tag, i));
      if (rise_cyc[i] < mn) mn = rise_cyc[i];
      if (rise_cyc[i] > mx) mx = rise_cyc[i];
    end
    check(mx - mn <= SKEW_MAX, $sformatf("%s: skew %0d", tag, mx - mn));
    if (mx - mn > max_skew) max_skew = int'(mx - mn);
    if (last_round >= 0)
      check(t0 - last_round >= PER_MIN && t0 - last_round <= PER_MAX,
            $sformatf("%s: period %0d", tag, t0 - last_round));
    $display("%s: round at cycle %0d, skew %0d, period %0d", tag, t0, mx - mn,
             last_round >= 0 ? t0 - last_round : 0);
    last_round = t0;
  endtask

  int f0[N];
  int max_skew = 0;
  task automatic snap_force();
    for (int i = 0; i < N; i++) f0[i] = n_force[i];
  endtask

  initial begin
    int t4_0, d_0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // Phase 1: stabilization from reset.
    repeat (100) @(posedge clk);
    #1 check(core_state == {N{C_RECOVER}} && ext_state == {N{X_DORMANT}}, "reset in recover / dormant");
    wait (n_resync_pt > 0);
    $display("first resynchronization point at cycle %0d", cyc);
    check(n_pulse.sum() == 0, "no pulse before the first resynchronization point");
    check(n_r3_init > 0, "resynchronization started by an R3 timeout");
    round('1, "stabilization", 20000);
    // Phase 2: no DARTS.
    last_round = -1;
    snap_force();
    repeat (5) round('1, "T4");
    for (int i = 0; i < N; i++) check(n_force[i] - f0[i] >= 5, $sformatf("force_mark of node %0d", i));
    // Phase 3: DARTS on.
    darts_on = 1'b1;
    t4_0 = n_prop_t4; d_0 = n_prop_darts;
    round('1, "DARTS");
    snap_force();
    repeat (5) round('1, "DARTS");
    check(n_prop_t4 == t4_0, "no T4 proposal while DARTS is on");
    check(n_prop_darts > d_0, "DARTS proposals");
    for (int i = 0; i < N; i++) check(n_force[i] == f0[i], $sformatf("no force_mark of node %0d", i));
    darts_stuck[2] = 1'b1;
    snap_force();
    repeat (3) round('1, "DARTS_i of node 2 stuck");
    for (int i = 0; i < N; i++)
      check((n_force[i] - f0[i] >= 2) == (i == 2), $sformatf("force_mark only from node 2 (%0d)", i));
    darts_stuck[2] = 1'b0;
    // Phase 4: Byzantine node 4.
    byz_on = 1'b1;
    repeat (8) round(5'b01111, "Byzantine node 4");
    // Phase 5: transient fault of node 3's inputs, then recovery.
    // Node 4 is healthy again; let two rounds clear what the flags learned
    // from it, so that only one node is faulty at a time.
    byz_on = 1'b0;
    repeat (2) round('1, "all healthy");
    last_round = -1;
    rec3 = n_rec3;
    cut3 = 1'b1;
    repeat (3) round(5'b10111, "node 3 inputs corrupted");
    cut3 = 1'b0;
    last_round = -1;
    repeat (3) round(5'b10111, "node 3 recovering");
    check(n_rec3 > rec3, "node 3 fell back to recover");
    check(core_state[3] == C_RECOVER || core_state[3] == C_JOIN, "node 3 out of the basic cycle");
    // Node 3 can only rejoin at a resynchronization point of the correct
    // nodes 0..2. Every corrupted init word it saw from a node j retriggered
    // its (R2, supp j) timer, so it ignores those initiators for R2 ticks;
    // keep running rounds until it rejoins or R2 plus one R3 span has passed.
    rp0 = n_rp012;
    n_rejoin3 = 0;
    cut_end = cyc;
    while (n_rejoin3 == 0 && cyc < cut_end + 1_100_000) round(5'b10111, "waiting for rejoin");
    check(n_rp012 > rp0, "correct nodes passed a resynchronization point");
    $display("node 3 rejoined by cycle %0d after %0d resynchronization points", cyc, n_rp012 - rp0);
    check(n_rejoin3 > 0, "node 3 rejoined through join");
    last_round = -1;
    repeat (3) round('1, "all five again");
    // Phase 6: uneven channel delays of 4 to 7 cycles end to end.
    skew_on = 1'b1;
    last_round = -1;
    repeat (6) round('1, "uneven delays");
    $display("largest skew observed: %0d cycles", max_skew);
    check(max_skew > 0, "uneven delays produced a nonzero skew");
    skew_on = 1'b0;
    // Every mechanism must have happened.
    $display("mechanisms: r3_init=%0d resync_point=%0d passive=%0d active=%0d join=%0d recover=%0d",
             n_r3_init, n_resync_pt, n_passive, n_active, n_join, n_recover);
    $display("mechanisms: propose_T4=%0d propose_DARTS=%0d propose_relay=%0d force_mark=%0d pulses=%0d",
             n_prop_t4, n_prop_darts, n_prop_relay, n_force.sum(), n_pulse.sum());
    check(n_r3_init > 0, "mechanism: R3 init");
    check(n_resync_pt > 0, "mechanism: resynchronization point");
    check(n_passive > 0, "mechanism: extension passive");
    check(n_active > 0, "mechanism: extension active");
    check(n_join > 0, "mechanism: join");
    check(n_prop_t4 > 0, "mechanism: propose on T4");
    check(n_prop_darts > 0, "mechanism: propose on T3 and DARTS");
    check(n_prop_relay > 0, "mechanism: propose on f+1 propose");
    check(n_force.sum() > 0, "mechanism: force_mark");
    check(n_pulse.sum() > 0, "mechanism: pulse");
    check(n_rec3 > 0, "mechanism: recover");
    check(n_rejoin3 > 0, "mechanism: rejoin of a recovered node");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
